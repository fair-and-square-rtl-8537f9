// fs_cpm: complex partial multiplication (CPM) with four squares.
//
// For operands a+jb and c+js:
//   re = (a+c)^2 + (b-s)^2      im = (b+c)^2 + (a+s)^2
// Used in place of a complex multiplier inside an accumulation, these give
// 2*(ac-bs) and 2*(bc+as) once the correction terms
// -(a^2+b^2) - (c^2+s^2) are added to each part.
//
// Interface: combinational; both outputs are non-negative, 2*DW+3 bits.
// The four adders and four squarers follow the paper's Fig. 9a.
module fs_cpm
#(
  parameter int DW = fs_pkg::DATA_W
) (
  input  logic signed [DW-1:0]   a,
  input  logic signed [DW-1:0]   b,
  input  logic signed [DW-1:0]   c,
  input  logic signed [DW-1:0]   s,
  output logic        [2*DW+2:0] re,
  output logic        [2*DW+2:0] im
);

  logic signed [DW:0]     s_ac, s_bs, s_bc, s_as;
  logic        [2*DW+1:0] q_ac, q_bs, q_bc, q_as;

  assign s_ac = (DW+1)'(a) + (DW+1)'(c);
  assign s_bs = (DW+1)'(b) - (DW+1)'(s);
  assign s_bc = (DW+1)'(b) + (DW+1)'(c);
  assign s_as = (DW+1)'(a) + (DW+1)'(s);

  fs_square #(.W(DW+1)) u_q_ac (.x(s_ac), .y(q_ac));
  fs_square #(.W(DW+1)) u_q_bs (.x(s_bs), .y(q_bs));
  fs_square #(.W(DW+1)) u_q_bc (.x(s_bc), .y(q_bc));
  fs_square #(.W(DW+1)) u_q_as (.x(s_as), .y(q_as));

  assign re = (2*DW+3)'(q_ac) + (2*DW+3)'(q_bs);
  assign im = (2*DW+3)'(q_bc) + (2*DW+3)'(q_as);

endmodule
