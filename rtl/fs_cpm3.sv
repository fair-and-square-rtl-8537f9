// fs_cpm3: complex partial multiplication with three squares (CPM3).
//
// For operands a+jb and c+js:
//   re = (c+a+b)^2 - (b+c+s)^2      im = (c+a+b)^2 + (a+s-c)^2
// The square (c+a+b)^2 is shared by both parts, so three squarers suffice.
// Inside an accumulation these give 2*(ac-bs) and 2*(bc+as) once the
// correction terms (-(a+b)^2 + b^2) + (-c^2 + (c+s)^2) (real part) and
// (-(a+b)^2 - a^2) + (-c^2 - (s-c)^2) (imaginary part) are added.
//
// Interface: combinational; signed outputs of 2*DW+6 bits. im is never
// negative, so its top bit is always 0; it is kept signed, at the same width
// as re, so both parts can be treated alike.
// The three squares follow the paper's equations (37)/(38) and Fig. 12a.
module fs_cpm3
#(
  parameter int DW = fs_pkg::DATA_W
) (
  input  logic signed [DW-1:0]   a,
  input  logic signed [DW-1:0]   b,
  input  logic signed [DW-1:0]   c,
  input  logic signed [DW-1:0]   s,
  output logic signed [2*DW+5:0] re,
  output logic signed [2*DW+5:0] im
);

  localparam int SW = DW + 2;   // width of a three-operand sum
  localparam int OW = 2*DW + 6;

  logic signed [SW-1:0]   s_cab, s_bcs, s_asc;
  logic        [2*SW-1:0] q_cab, q_bcs, q_asc;

  assign s_cab = SW'(c) + SW'(a) + SW'(b);
  assign s_bcs = SW'(b) + SW'(c) + SW'(s);
  assign s_asc = SW'(a) + SW'(s) - SW'(c);

  fs_square #(.W(SW)) u_q_cab (.x(s_cab), .y(q_cab));
  fs_square #(.W(SW)) u_q_bcs (.x(s_bcs), .y(q_bcs));
  fs_square #(.W(SW)) u_q_asc (.x(s_asc), .y(q_asc));

  assign re = OW'(q_cab) - OW'(q_bcs);
  assign im = OW'(q_cab) + OW'(q_asc);

endmodule
