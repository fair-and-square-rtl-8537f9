// fs_cpm3_term: per-sample correction term of the three-square (CPM3) engines.
//
// For a sample x + jy:
//   re = -(x+y)^2 + y^2      im = -(x+y)^2 - x^2
// This is the summand of Sxy and Syx in the paper's equations (41)/(43)
// (and of Sab_h / Sba_h in (33)/(35)). It depends on the sample only, so the
// transform and convolution engines compute it once per sample and add it
// to every lane. Interface: combinational, signed outputs of 2*DW+4 bits.
module fs_cpm3_term
#(
  parameter int DW = fs_pkg::DATA_W
) (
  input  logic signed [DW-1:0]   x,
  input  logic signed [DW-1:0]   y,
  output logic signed [2*DW+3:0] re,
  output logic signed [2*DW+3:0] im
);

  localparam int OW = 2*DW + 4;

  logic signed [DW:0]     sxy;
  logic        [2*DW+1:0] q_xy;
  logic        [2*DW-1:0] q_x, q_y;

  assign sxy = (DW+1)'(x) + (DW+1)'(y);

  fs_square #(.W(DW+1)) u_q_xy (.x(sxy), .y(q_xy));
  fs_square #(.W(DW))   u_q_x  (.x(x),   .y(q_x));
  fs_square #(.W(DW))   u_q_y  (.x(y),   .y(q_y));

  assign re = OW'(q_y) - OW'(q_xy);
  assign im = -(OW'(q_xy) + OW'(q_x));

endmodule
