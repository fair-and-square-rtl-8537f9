// fs_square: combinational squarer, y = x*x for a signed W-bit operand.
//
// The operand is first made non-negative (|x| fits in W unsigned bits, since
// (-x)^2 = x^2). The square is then the sum of the folded partial products of
// a squarer: every bit m_i contributes m_i * 2^(2i) (m_i*m_i = m_i) and every
// pair i<j contributes (m_i & m_j) * 2^(i+j+1), i.e. the symmetric pair of a
// multiplier's partial-product matrix counted once and doubled. That is why a
// squarer needs about half the partial-product bits of a W x W multiplier,
// the saving the square-based engines are built on. The paper leaves the
// squaring circuit open; this folded form is this design's choice.
//
// Interface: x (signed, W bits) -> y (unsigned, 2W bits). No clock, no latency.
module fs_square #(
  parameter int W = 9
) (
  input  logic signed [W-1:0]   x,
  output logic        [2*W-1:0] y
);

  logic [W-1:0] m;

  // Row i of the folded partial-product matrix, present when m_i = 1:
  // bit 2i holds the diagonal m_i*m_i, bits i+j+1 (j > i) hold m_i*m_j.
  always_comb begin
    logic [2*W-1:0] row;
    m = x[W-1] ? W'(-x) : W'(x);
    y = '0;
    for (int i = 0; i < W; i++) begin
      row = (((2*W)'(m) >> (i + 1)) << (2*i + 2)) | ((2*W)'(1) << (2*i));
      if (m[i]) y = y + row;
    end
  end

endmodule
