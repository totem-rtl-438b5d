// plog_decode: plog to binary conversion (log-to-bin).
//
// The inverse of the plog approximation: a log value with integer part I
// and fraction g = frac/2^F is turned back into 2^I * (1 + g), i.e. the
// F+1 bit mantissa {1, frac} shifted left by I and then right by F. As in
// the forward direction, the curve 2^g is replaced by its chord 1 + g, so
// the unit is a single shifter. Bits shifted out below the binary point are
// dropped (truncation toward zero); a result too large for OUT_W-1 bits
// saturates.
//
// Interface: lg is an unsigned fixed-point number with IW integer bits and
// F fraction bits; mag is the unsigned magnitude. Purely combinational.
// The chord-based antilog and truncation are this design's choices; the
// plog scheme calls only for a plog-to-bin unit after the adder.
module plog_decode #(
  parameter int unsigned IW    = totem_pkg::PLOG_IW + 1,
  parameter int unsigned F     = totem_pkg::PLOG_F,
  parameter int unsigned OUT_W = totem_pkg::ACC_BITS
) (
  input  logic [IW+F-1:0] lg,
  output logic [OUT_W-1:0] mag
);

  localparam int unsigned WIDE = OUT_W + F + 1;

  logic [IW-1:0]   ip;
  logic [F:0]      mant;
  logic [WIDE-1:0] wide;
  logic            ovf;

  always_comb begin
    ip   = lg[IW+F-1:F];
    mant = {1'b1, lg[F-1:0]};
    // A shift that moves the leading one to bit OUT_W-1 or above overflows.
    ovf  = (32'(ip) + F + 1) > (OUT_W - 1 + F);
    wide = WIDE'(mant) << ip;
    if (ovf) mag = {1'b0, {(OUT_W-1){1'b1}}};
    else     mag = wide[OUT_W+F-1:F];
  end

endmodule
