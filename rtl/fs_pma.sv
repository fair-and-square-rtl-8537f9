// fs_pma: partial multiplication accumulator (a multiply-accumulator whose
// multiplier is replaced by a square of a sum).
//
// Since a*b = ((a+b)^2 - a^2 - b^2)/2, a dot product c_ij = sum_k a_ik*b_kj
// equals ( sum_k (a_ik+b_kj)^2 + Sa_i + Sb_j ) / 2 with Sa_i = -sum_k a_ik^2
// and Sb_j = -sum_k b_kj^2. The register is first loaded with Sa_i + Sb_j
// (init), then each cycle with en high adds (a+b)^2. After the last pair the
// register holds 2*c_ij; the final right shift is left to the consumer.
//
// Interface: init has priority over en. acc is the register itself, so a pair
// presented in cycle t is included in acc from cycle t+1.
// The datapath follows the paper's Fig. 1b; the init/en strobes, the widths
// and the synchronous active-low reset are this design's choices.
module fs_pma
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic signed [AW-1:0] init_val,
  input  logic                 en,
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  output logic signed [AW-1:0] acc
);

  logic signed [DW:0]     sum;
  logic        [2*DW+1:0] sq;

  assign sum = (DW+1)'(a) + (DW+1)'(b);

  fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq));

  always_ff @(posedge clk) begin
    if (!rst_n)    acc <= '0;
    else if (init) acc <= init_val;
    else if (en)   acc <= acc + AW'(sq);
  end

endmodule
