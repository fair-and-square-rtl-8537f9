// fs_conv: real 1-D convolution (FIR) with N taps built from squares.
//
// Transposed form: every sample x is used by all taps at once and the
// partial sums move through a chain of N registers. Tap i contributes
// (w_i + x)^2 - x^2 = 2*w_i*x + w_i^2; the x^2 is computed once and
// shared. The w_i^2 parts travel along with the partial sums, so their total
// is removed once at the output by adding Sw = -sum_i w_i^2. Weight w_{N-1}
// feeds the first register and w_0 the last, so after sample x_t
//   y2 = 2 * sum_{i=0}^{N-1} w_i * x_{t-i}
// (feeding the weights in reverse order gives the correlation form
// y_k = sum w_i x_{i+k}).
//
// Interface: the chain advances on en. y2 = last register + Sw (the output
// adder is combinational). y_valid is high once N samples have entered since
// reset, i.e. the window is full. The chain, shared x^2 and output Sw adder
// follow the paper's Fig. 8; y_valid, the widths and the reset are this
// design's choices.
module fs_conv
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W,
  parameter int N  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w [N],
  input  logic signed [AW-1:0] sw,
  output logic signed [AW-1:0] y2,
  output logic                 y_valid
);

  localparam int CW = $clog2(N + 1);

  logic        [2*DW-1:0] xsq;
  logic signed [AW-1:0]   p     [N];   // p[i]: contribution of tap i
  logic signed [AW-1:0]   chain [N];   // chain[m] is fed by tap N-1-m
  logic        [CW-1:0]   cnt;

  fs_square #(.W(DW)) u_xsq (.x(x), .y(xsq));

  for (genvar i = 0; i < N; i++) begin : g_tap
    logic signed [DW:0]     sum;
    logic        [2*DW+1:0] sq;
    assign sum = (DW+1)'(w[i]) + (DW+1)'(x);
    fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq));
    assign p[i] = AW'(sq) - AW'(xsq);
  end

  for (genvar m = 0; m < N; m++) begin : g_chain
    logic signed [AW-1:0] prev;
    if (m == 0) begin : g_first
      assign prev = '0;
    end else begin : g_next
      assign prev = chain[m-1];
    end
    always_ff @(posedge clk) begin
      if (!rst_n)  chain[m] <= '0;
      else if (en) chain[m] <= prev + p[N-1-m];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                   cnt <= '0;
    else if (en && cnt != CW'(N)) cnt <= cnt + 1'b1;
  end

  assign y2      = chain[N-1] + sw;
  assign y_valid = (cnt == CW'(N));

endmodule
