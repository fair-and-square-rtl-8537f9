// fs_ltr: real linear transform X_k = sum_i w_ki * x_i built from squares.
//
// N accumulators, one per output k. Because
//   w*x = ((w+x)^2 - x^2 - w^2)/2,
// each accumulator is first loaded with Sw_k = -sum_i w_ki^2 (init); then,
// for every sample x_i (one per cycle with en high, together with the
// coefficient column w_0i..w_N-1i), lane k adds (w_ki + x_i)^2 - x_i^2. The
// square x_i^2 is computed once and shared by all lanes, so N outputs cost
// N+1 squarers instead of N multipliers. After N samples acc[k] = 2*X_k.
//
// Interface: init has priority over en. acc is registered. done rises in the
// cycle after the N-th sample accepted since init and stays high until the
// next init. The datapath follows the paper's Fig. 6b; the coefficients are
// inputs because the paper does not describe their storage; done, the
// widths and the reset are this design's choices.
module fs_ltr
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic signed [AW-1:0] sw  [N],
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w   [N],
  output logic signed [AW-1:0] acc [N],
  output logic                 done
);

  localparam int CW = $clog2(N + 1);

  logic [2*DW-1:0] xsq;
  logic [CW-1:0]   cnt;

  fs_square #(.W(DW)) u_xsq (.x(x), .y(xsq));

  for (genvar k = 0; k < N; k++) begin : g_lane
    logic signed [DW:0]     sum;
    logic        [2*DW+1:0] sq;
    assign sum = (DW+1)'(w[k]) + (DW+1)'(x);
    fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq));

    always_ff @(posedge clk) begin
      if (!rst_n)    acc[k] <= '0;
      else if (init) acc[k] <= sw[k];
      else if (en)   acc[k] <= acc[k] + AW'(sq) - AW'(xsq);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || init)            cnt <= '0;
    else if (en && cnt != CW'(N))  cnt <= cnt + 1'b1;
  end

  assign done = (cnt == CW'(N));

endmodule
