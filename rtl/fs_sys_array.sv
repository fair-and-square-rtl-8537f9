// fs_sys_array: square-based stationary systolic array for C = A*B.
//
// ROWS x COLS grid of fs_sys_pe. Column i holds row i of A (a_i0 at the top,
// a_i,ROWS-1 at the bottom); row k receives row k of B.
//   Load   (sel = 0): each column input presents a_i,ROWS-1 first and a_i0
//          last, one per cycle, for ROWS cycles; the values shift down RA.
//   Compute (sel = 1): each column input presents Sa_i = -sum_k a_ik^2 and
//          keeps it; row k input presents b_k0, b_k1, ... delayed by k cycles
//          (zero otherwise). Column i accumulates Sa_i + sum_k (a_ik+b_kj)^2
//          down the PEs. At the bottom Sb_j = -sum_k b_kj^2 is added; the Sb
//          stream passes one register per column so that it meets the
//          results, which leave column i one cycle after column i-1.
// Timing: with b_00 entering row 0 in compute cycle 0, col_out[i] carries
// 2*c_ij during cycle j + i + ROWS + 1 (combinational bottom adders), and
// sb_in must present Sb_j during cycle j + ROWS + 1.
// The structure follows the paper's Figs. 2 and 3; the size, the widths and
// the timing figures above are this design's.
module fs_sys_array
#(
  parameter int DW   = fs_pkg::DATA_W,
  parameter int AW   = fs_pkg::ACC_W,
  parameter int ROWS = 4,
  parameter int COLS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sel,
  input  logic signed [AW-1:0] col_in  [COLS],
  input  logic signed [DW-1:0] row_in  [ROWS],
  input  logic signed [AW-1:0] sb_in,
  output logic signed [AW-1:0] col_out [COLS]
);

  // vertical[k][i] is the top input of PE(k,i); vertical[ROWS][i] the column bottom
  logic signed [AW-1:0] vertical   [ROWS+1][COLS];
  // horizontal[k][i] is the left input of PE(k,i)
  logic signed [DW-1:0] horizontal [ROWS][COLS+1];
  // Sb skew chain: sb_col[i] is the Sb value added at column i
  logic signed [AW-1:0] sb_col     [COLS];

  for (genvar i = 0; i < COLS; i++) begin : g_top
    assign vertical[0][i] = col_in[i];
  end

  for (genvar k = 0; k < ROWS; k++) begin : g_row
    assign horizontal[k][0] = row_in[k];
    for (genvar i = 0; i < COLS; i++) begin : g_col
      fs_sys_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .sel      (sel),
        .top_in   (vertical[k][i]),
        .left_in  (horizontal[k][i]),
        .right_out(horizontal[k][i+1]),
        .down_out (vertical[k+1][i])
      );
    end
  end

  assign sb_col[0] = sb_in;
  for (genvar i = 1; i < COLS; i++) begin : g_skew
    always_ff @(posedge clk) begin
      if (!rst_n) sb_col[i] <= '0;
      else        sb_col[i] <= sb_col[i-1];
    end
  end

  for (genvar i = 0; i < COLS; i++) begin : g_out
    assign col_out[i] = vertical[ROWS][i] + sb_col[i];
  end

endmodule
