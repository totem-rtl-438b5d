// plog_encode: binary to plog conversion (bin-to-log).
//
// For x > 0 let eta(x) be the position of its leading one, so that
// 2^eta <= x < 2^(eta+1). The plog value eta + x/2^eta - 1 approximates
// log2(x) to within 0.0861. Its integer part is eta itself and its
// fraction bits are simply the bits of x that follow the leading one, so
// the conversion needs only a leading-one detector and a shifter: no table
// and no arithmetic.
//
// The code is sign-magnitude: {sign, eta[IW-1:0], frac[F-1:0]}, where F
// bits of fraction are kept and the rest are truncated. Zero, which has no
// logarithm, is given the code with every bit set (PLOG_ZERO); a non-zero
// value that would land on that code is saturated one code lower.
//
// Interface: x is a two's complement word of W bits, whose magnitude (at
// most 2^(W-1)) fits W bits; code is valid combinationally. The layout
// follows the plog encoding exactly; W = 16, F = 3, the two's complement
// input and the zero code are this design's choices.
module plog_encode #(
  parameter int unsigned W  = totem_pkg::PLOG_W,
  parameter int unsigned F  = totem_pkg::PLOG_F,
  localparam int unsigned IW = $clog2(W),
  localparam int unsigned CW = 1 + IW + F
) (
  input  logic [W-1:0]  x,
  output logic [CW-1:0] code
);

  logic [W-1:0]    mag;
  logic [IW-1:0]   eta;
  logic [W+F-1:0]  shifted;
  logic [F-1:0]    frac;
  logic            sign;

  always_comb begin
    sign = x[W-1];
    mag  = sign ? (~x + 1'b1) : x;

    // Leading-one detector.
    eta = '0;
    for (int i = 0; i < W; i++) begin
      if (mag[i]) eta = IW'(i);
    end

    // The F bits below the leading one: x * 2^F / 2^eta, low F bits.
    shifted = {mag, {F{1'b0}}} >> eta;
    frac    = shifted[F-1:0];

    if (mag == '0) begin
      code = '1;
    end else begin
      code = {sign, eta, frac};
      if (code == '1) code = code - 1'b1;
    end
  end

endmodule
