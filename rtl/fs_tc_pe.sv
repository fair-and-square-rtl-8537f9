// fs_tc_pe: processing element of the square-based tensor core.
//
// Computes a partial dot product of a row a (of a tile of A) and a column b
// (of a tile of B), sum_k (a_k + b_k)^2, with N squarers and an adder tree,
// and accumulates it. Two muxes controlled by init pick what is added: with
// init the register is loaded with Sa + Sb (the correction terms of the full
// matrices' row i and column j); otherwise register + partial dot product.
// After the last step O holds 2 * sum a_ik*b_kj.
//
// Interface: one step per cycle when en is high; init has priority over en.
// The output O is the register (one cycle latency).
// The mux/adder arrangement follows the paper's Fig. 5b; the en strobe,
// the widths and the reset are this design's choices.
module fs_tc_pe
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 en,
  input  logic signed [DW-1:0] a [N],
  input  logic signed [DW-1:0] b [N],
  input  logic signed [AW-1:0] sa,
  input  logic signed [AW-1:0] sb,
  output logic signed [AW-1:0] o
);

  logic        [2*DW+1:0] sq [N];
  logic signed [AW-1:0]   pdp;       // partial dot product
  logic signed [AW-1:0]   mux_hi;    // 0: register, 1: Sa
  logic signed [AW-1:0]   mux_lo;    // 0: partial dot product, 1: Sb
  logic signed [AW-1:0]   acc;

  for (genvar k = 0; k < N; k++) begin : g_sq
    logic signed [DW:0] sum;
    assign sum = (DW+1)'(a[k]) + (DW+1)'(b[k]);
    fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq[k]));
  end

  always_comb begin
    pdp = '0;
    for (int k = 0; k < N; k++) pdp = pdp + AW'(sq[k]);
  end

  assign mux_hi = init ? sa : acc;
  assign mux_lo = init ? sb : pdp;

  always_ff @(posedge clk) begin
    if (!rst_n)          acc <= '0;
    else if (init || en) acc <= mux_hi + mux_lo;
  end

  assign o = acc;

endmodule
