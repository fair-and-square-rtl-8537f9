// fs_cltr3: complex linear transform X_k + jY_k = sum_i (c_ki + js_ki)(x_i + jy_i)
// built from three-square complex partial multiplications (fs_cpm3).
//
// Accumulator k is first loaded (init) with Sx_k + jSy_k, where
//   Sx_k = sum_i (-c_ki^2 + (c_ki+s_ki)^2),  Sy_k = sum_i (-c_ki^2 - (s_ki-c_ki)^2).
// Then, for every sample x_i + jy_i (one per cycle with en, with the
// coefficient column), lane k adds CPM3(x_i+jy_i, c_ki+js_ki) plus the shared
// sample term (-(x_i+y_i)^2 + y_i^2) + j(-(x_i+y_i)^2 - x_i^2) from
// fs_cpm3_term. After N samples acc = 2(X_k + jY_k).
//
// The paper's figure and text call this sample term one "to be subtracted",
// while its equations (40)-(43) add it; the equations are followed here
// (subtracting it would give wrong results).
// Interface: as fs_ltr (init has priority, registered outputs, done after N
// samples). The structure follows the paper's Fig. 13; done, the widths and
// the reset are this design's choices.
module fs_cltr3
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic signed [AW-1:0] sx     [N],
  input  logic signed [AW-1:0] sy     [N],
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

  logic signed [2*DW+3:0] t_re, t_im;
  logic        [CW-1:0]   cnt;

  fs_cpm3_term #(.DW(DW)) u_term (.x(x), .y(y), .re(t_re), .im(t_im));

  for (genvar k = 0; k < N; k++) begin : g_lane
    logic signed [2*DW+5:0] pre, pim;
    fs_cpm3 #(.DW(DW)) u_cpm3 (.a(x), .b(y), .c(c[k]), .s(s[k]), .re(pre), .im(pim));

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        acc_re[k] <= '0;
        acc_im[k] <= '0;
      end else if (init) begin
        acc_re[k] <= sx[k];
        acc_im[k] <= sy[k];
      end else if (en) begin
        acc_re[k] <= acc_re[k] + AW'(pre) + AW'(t_re);
        acc_im[k] <= acc_im[k] + AW'(pim) + AW'(t_im);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || init)           cnt <= '0;
    else if (en && cnt != CW'(N)) cnt <= cnt + 1'b1;
  end

  assign done = (cnt == CW'(N));

endmodule
