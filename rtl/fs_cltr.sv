// fs_cltr: complex linear transform X_k + jY_k = sum_i (c_ki + js_ki)(x_i + jy_i)
// built from complex partial multiplications (fs_cpm, four squares each).
//
// Each complex accumulator k is first loaded with S_k(1+j), where
// S_k = -sum_i (c_ki^2 + s_ki^2) (init; S_k = -N for unit coefficients such
// as the DFT). Then, for every sample x_i + jy_i (one per cycle with en, with
// the coefficient column c_ki + js_ki), lane k adds CPM(x_i+jy_i, c_ki+js_ki)
// minus (x_i^2 + y_i^2)(1+j). That sample term is computed once and shared.
// After N samples acc = 2(X_k + jY_k).
//
// Interface: as fs_ltr (init has priority, registered outputs, done after N
// samples). The structure follows the paper's Fig. 10; done, the widths and
// the reset are this design's choices.
module fs_cltr
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic signed [AW-1:0] sk     [N],
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] y,
  input  logic signed [DW-1:0] c      [N],
  input  logic signed [DW-1:0] s      [N],
  output logic signed [AW-1:0] acc_re [N],
  output logic signed [AW-1:0] acc_im [N],
  output logic                 done
);

  localparam int CW = $clog2(N + 1);

  logic [2*DW-1:0] xsq, ysq;
  logic [AW-1:0]   t;          // (x^2 + y^2), subtracted from both parts
  logic [CW-1:0]   cnt;

  fs_square #(.W(DW)) u_xsq (.x(x), .y(xsq));
  fs_square #(.W(DW)) u_ysq (.x(y), .y(ysq));
  assign t = AW'(xsq) + AW'(ysq);

  for (genvar k = 0; k < N; k++) begin : g_lane
    logic [2*DW+2:0] pre, pim;
    fs_cpm #(.DW(DW)) u_cpm (.a(x), .b(y), .c(c[k]), .s(s[k]), .re(pre), .im(pim));

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        acc_re[k] <= '0;
        acc_im[k] <= '0;
      end else if (init) begin
        acc_re[k] <= sk[k];
        acc_im[k] <= sk[k];
      end else if (en) begin
        acc_re[k] <= acc_re[k] + AW'(pre) - AW'(t);
        acc_im[k] <= acc_im[k] + AW'(pim) - AW'(t);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || init)           cnt <= '0;
    else if (en && cnt != CW'(N)) cnt <= cnt + 1'b1;
  end

  assign done = (cnt == CW'(N));

endmodule
