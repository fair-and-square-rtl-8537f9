// fs_conv2d: 2-D convolution of a KH x KW kernel over an image streamed in
// raster order (IMG_W samples per row), built from squares.
//
// It extends the transposed chain of fs_conv to two dimensions. Every sample
// x goes to all KH*KW taps at once; tap (r,c) contributes
// (w_rc + x)^2 - x^2 = 2*w_rc*x + w_rc^2, with x^2 computed once per sample
// and shared by all taps. The partial sums move along one chain of
// D+1 registers, D = (KH-1)*IMG_W + KW-1; stage m is fed by the tap whose
// delay r*IMG_W + c equals D-m, and stages with no tap (the stretch between
// two kernel rows) only pass the sum on. The weight squares ride along and
// are cancelled once at the output by adding Sw = -sum w_rc^2. After the
// sample at row h, column k:
//   y2 = 2 * sum_{r,c} w[r][c] * x[h-r][k-c]
// (convolution form; a correlation needs the kernel rotated by 180 degrees).
//
// Interface: the chain advances on en; sof marks the first sample of a frame
// (row 0, column 0). y_valid is high when the last sample closed a window
// lying wholly inside the frame (h >= KH-1 and k >= KW-1); other outputs
// mix samples across row or frame boundaries and must be ignored.
// The paper gives the 2-D convolution only as equations (12)-(14) and notes
// that each sample's square is computed once and shared by all kernel
// positions, as in its 1-D figure; this chain arrangement, the sof/y_valid
// handshake and all sizes are this design's choices.
module fs_conv2d #(
  parameter int DW    = fs_pkg::DATA_W,
  parameter int AW    = fs_pkg::ACC_W,
  parameter int KH    = 3,
  parameter int KW    = 3,
  parameter int IMG_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 sof,
  input  logic signed [DW-1:0] x,
  input  logic signed [DW-1:0] w [KH][KW],
  input  logic signed [AW-1:0] sw,
  output logic signed [AW-1:0] y2,
  output logic                 y_valid
);

  localparam int D  = (KH - 1) * IMG_W + KW - 1;
  localparam int XW = $clog2(IMG_W);
  localparam int RW = $clog2(KH + 1);

  logic        [2*DW-1:0] xsq;
  logic signed [AW-1:0]   chain [D+1];

  fs_square #(.W(DW)) u_xsq (.x(x), .y(xsq));

  for (genvar m = 0; m <= D; m++) begin : g_stage
    localparam int DLY = D - m;
    localparam int R   = DLY / IMG_W;
    localparam int C   = DLY % IMG_W;
    logic signed [AW-1:0] prev, contrib;

    if (m == 0) begin : g_first
      assign prev = '0;
    end else begin : g_next
      assign prev = chain[m-1];
    end

    if (C < KW) begin : g_tap
      logic signed [DW:0]     sum;
      logic        [2*DW+1:0] sq;
      assign sum = (DW+1)'(w[R][C]) + (DW+1)'(x);
      fs_square #(.W(DW+1)) u_sq (.x(sum), .y(sq));
      assign contrib = AW'(sq) - AW'(xsq);
    end else begin : g_pass
      assign contrib = '0;
    end

    always_ff @(posedge clk) begin
      if (!rst_n)  chain[m] <= '0;
      else if (en) chain[m] <= prev + contrib;
    end
  end

  assign y2 = chain[D] + sw;

  // Position of the next sample in the frame and of the last one taken.
  logic [XW-1:0] col, last_col;
  logic [RW-1:0] row, last_row;   // saturates at KH
  logic          seen;
  logic [XW-1:0] cur_col;
  logic [RW-1:0] cur_row;

  assign cur_col = sof ? '0 : col;
  assign cur_row = sof ? '0 : row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col      <= '0;
      row      <= '0;
      last_col <= '0;
      last_row <= '0;
      seen     <= 1'b0;
    end else if (en) begin
      seen     <= 1'b1;
      last_col <= cur_col;
      last_row <= cur_row;
      if (cur_col == XW'(IMG_W - 1)) begin
        col <= '0;
        row <= (cur_row == RW'(KH)) ? cur_row : cur_row + 1'b1;
      end else begin
        col <= cur_col + 1'b1;
        row <= cur_row;
      end
    end
  end

  assign y_valid = seen && (last_row >= RW'(KH - 1)) && (last_col >= XW'(KW - 1));

endmodule
