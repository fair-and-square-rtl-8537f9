// fs_tensor_core: square-based tensor core, C_{n+1} = A_n * B_n + C_n.
//
// A TM x TP grid of fs_tc_pe. PE(i,j) receives row i of the TM x TN tile A,
// column j of the TN x TP tile B, Sa_i and Sb_j, and the shared init. One
// tile step is done per cycle with en high. When a row of tiles of a larger
// matrix is multiplied by a column of tiles, Sa_i and Sb_j are the
// correction terms of row i and column j of the larger matrices
// (Sa_i = -sum a_ik^2, Sb_j = -sum b_kj^2 over the whole inner dimension);
// init loads Sa_i + Sb_j into every accumulator, and after the last step
// o[i][j] holds 2*c_ij.
//
// Interface: o is registered; a step presented in cycle t is visible in o
// from cycle t+1. The grid and its wiring follow the paper's Fig. 4; the
// tile size, the en strobe and the widths are this design's choices.
module fs_tensor_core
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int TM = 4,
  parameter int TN = 4,
  parameter int TP = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 en,
  input  logic signed [DW-1:0] a  [TM][TN],
  input  logic signed [DW-1:0] b  [TN][TP],
  input  logic signed [AW-1:0] sa [TM],
  input  logic signed [AW-1:0] sb [TP],
  output logic signed [AW-1:0] o  [TM][TP]
);

  for (genvar i = 0; i < TM; i++) begin : g_row
    for (genvar j = 0; j < TP; j++) begin : g_col
      logic signed [DW-1:0] bcol [TN];
      for (genvar k = 0; k < TN; k++) begin : g_k
        assign bcol[k] = b[k][j];
      end
      fs_tc_pe #(.DW(DW), .AW(AW), .N(TN)) u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .init (init),
        .en   (en),
        .a    (a[i]),
        .b    (bcol),
        .sa   (sa[i]),
        .sb   (sb[j]),
        .o    (o[i][j])
      );
    end
  end

endmodule
