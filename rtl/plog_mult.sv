// plog_mult: multiplier of the plog processor variant.
//
// With both operands in plog code a product needs no multiplier: the log
// magnitudes {eta, frac} of the two operands are added as fixed-point
// numbers (a fraction carry moves into the integer part), the sum goes
// through a plog-to-bin converter, and the sign is the XOR of the two
// signs. A zero operand (code PLOG_ZERO) forces a zero product. Together
// with the encoding this approximates a * b to within about ten per cent.
//
// Interface: a and b are plog codes {sign, eta[IW-1:0], frac[F-1:0]};
// p is the OUT_W-bit two's complement product. Purely combinational, so it
// fits in the pipeline stage that holds the conventional multiplier. The
// adder-plus-converter structure follows the plog proposal; the code layout
// and zero handling are this design's choices.
module plog_mult #(
  parameter int unsigned IW    = totem_pkg::PLOG_IW,
  parameter int unsigned F     = totem_pkg::PLOG_F,
  parameter int unsigned OUT_W = totem_pkg::ACC_BITS,
  localparam int unsigned CW   = 1 + IW + F
) (
  input  logic [CW-1:0]    a,
  input  logic [CW-1:0]    b,
  output logic [OUT_W-1:0] p
);

  logic [IW+F:0]    lg_sum;
  logic [OUT_W-1:0] mag;
  logic             sign;
  logic             zero;

  assign zero   = (a == '1) || (b == '1);
  assign sign   = a[CW-1] ^ b[CW-1];
  assign lg_sum = (IW+F+1)'(a[CW-2:0]) + (IW+F+1)'(b[CW-2:0]);

  plog_decode #(.IW(IW + 1), .F(F), .OUT_W(OUT_W)) u_dec (
    .lg  (lg_sum),
    .mag (mag)
  );

  always_comb begin
    if (zero)      p = '0;
    else if (sign) p = ~mag + 1'b1;
    else           p = mag;
  end

endmodule
