// fs_cconv: complex 1-D convolution with N complex taps built from CPMs.
//
// The transposed register chain of fs_conv, with complex registers. Tap i
// contributes CPM(x+jy, c_i+js_i) - (x^2+y^2)(1+j); the sample term is
// computed once and shared. The weight squares travel along the chain and
// are removed once at the output by adding Sw(1+j), Sw = -sum(c_i^2+s_i^2)
// (Sw = -N for unit weights). Tap N-1 feeds the first register, so after
// sample x_t + jy_t
//   z2 = 2 * sum_i (c_i + js_i)(x_{t-i} + jy_{t-i}).
//
// Interface: the chain advances on en; z2 is combinational from the last
// register and sw; z_valid is high once N samples have entered since reset.
// The structure follows the paper's Fig. 11; z_valid, the widths and the
// reset are this design's choices.
module fs_cconv
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] y,
  input  logic signed [DW-1:0] c [N],
  input  logic signed [DW-1:0] s [N],
  input  logic signed [AW-1:0] sw,
  output logic signed [AW-1:0] z2_re,
  output logic signed [AW-1:0] z2_im,
  output logic                 z_valid
);

  localparam int CW = $clog2(N + 1);

  logic        [2*DW-1:0] xsq, ysq;
  logic        [AW-1:0]   t;
  logic signed [AW-1:0]   p_re [N], p_im [N];
  logic signed [AW-1:0]   ch_re [N], ch_im [N];
  logic        [CW-1:0]   cnt;

  fs_square #(.W(DW)) u_xsq (.x(x), .y(xsq));
  fs_square #(.W(DW)) u_ysq (.x(y), .y(ysq));
  assign t = AW'(xsq) + AW'(ysq);

  for (genvar i = 0; i < N; i++) begin : g_tap
    logic [2*DW+2:0] pre, pim;
    fs_cpm #(.DW(DW)) u_cpm (.a(x), .b(y), .c(c[i]), .s(s[i]), .re(pre), .im(pim));
    assign p_re[i] = AW'(pre) - AW'(t);
    assign p_im[i] = AW'(pim) - AW'(t);
  end

  for (genvar m = 0; m < N; m++) begin : g_chain
    logic signed [AW-1:0] prev_re, prev_im;
    if (m == 0) begin : g_first
      assign prev_re = '0;
      assign prev_im = '0;
    end else begin : g_next
      assign prev_re = ch_re[m-1];
      assign prev_im = ch_im[m-1];
    end
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        ch_re[m] <= '0;
        ch_im[m] <= '0;
      end else if (en) begin
        ch_re[m] <= prev_re + p_re[N-1-m];
        ch_im[m] <= prev_im + p_im[N-1-m];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                   cnt <= '0;
    else if (en && cnt != CW'(N)) cnt <= cnt + 1'b1;
  end

  assign z2_re   = ch_re[N-1] + sw;
  assign z2_im   = ch_im[N-1] + sw;
  assign z_valid = (cnt == CW'(N));

endmodule
