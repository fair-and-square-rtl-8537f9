// fs_sys_pe: processing element of the square-based stationary systolic array.
//
// RA holds a stationary element a_ik, RB passes the b stream to the right and
// RC holds the partial column sum. Each cycle RC <= top_in + (RA + RB)^2, i.e.
// the multiplier of an ordinary PE is replaced by the square of a sum. The
// mux on the down output selects RA when sel = 0, so the a values shift down
// the column chain while the array is loaded, and RC when sel = 1, so the
// partial sums travel down while it computes.
//
// Interface: all outputs are registers (one cycle per PE both ways).
// Register names, the partial product and the sel mux follow the paper's
// Fig. 3. RA loading only while sel = 0 (holding while computing), the AW-bit
// vertical path that carries both a values and sums, and the reset of all
// three registers are this design's choices.
module fs_sys_pe
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sel,
  input  logic signed [AW-1:0] top_in,
  input  logic signed [DW-1:0] left_in,
  output logic signed [DW-1:0] right_out,
  output logic signed [AW-1:0] down_out
);

  logic signed [DW-1:0]   ra, rb;
  logic signed [AW-1:0]   rc;
  logic signed [DW:0]     sum;
  logic        [2*DW+1:0] sq;

  assign sum = (DW+1)'(ra) + (DW+1)'(rb);

  fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ra <= '0;
      rb <= '0;
      rc <= '0;
    end else begin
      if (!sel) ra <= top_in[DW-1:0];
      rb <= left_in;
      rc <= top_in + AW'(sq);
    end
  end

  assign right_out = rb;
  assign down_out  = sel ? rc : AW'(ra);

endmodule
