// totem_pkg: constants and types shared by the Totem neurochip RTL.
//
// The numbers that come from the chip itself are the 32 processors per
// chip, the 128-word deep weight memory of 8-bit words, the 32-bit storage
// register behind each multiply-accumulate unit and the limit of four chips
// working in parallel on one layer. The 16-bit input width, the plog code
// layout (sign, 4-bit exponent, 3-bit fraction) and the activation table size
// are this design's own choices.
package totem_pkg;

  // Chip organisation.
  localparam int unsigned CHIP_PES    = 32;   // processors per chip
  localparam int unsigned MEM_DEPTH     = 128;  // weight words per processor
  localparam int unsigned WEIGHT_BITS  = 8;    // weight word width
  localparam int unsigned ACC_BITS     = 32;   // accumulator / storage register
  localparam int unsigned DATA_BITS    = 16;   // broadcast bus width
  localparam int unsigned MAX_CHIPS = 4;    // chips in parallel on one layer

  localparam int unsigned MEM_AW    = $clog2(MEM_DEPTH);

  // plog code: {sign, eta[PLOG_IW-1:0], frac[PLOG_F-1:0]}.
  localparam int unsigned PLOG_W    = 16;   // magnitude bits of a binary operand
  localparam int unsigned PLOG_IW   = 4;    // log2(PLOG_W): bits of eta(x)
  localparam int unsigned PLOG_F    = 3;    // fraction bits kept
  localparam int unsigned PLOG_CW   = 1 + PLOG_IW + PLOG_F;
  // Zero has no logarithm; it takes the code with every bit set.

  // Activation look-up table on the board.
  localparam int unsigned LUT_AW    = 12;
  localparam int unsigned LUT_DW    = 16;

  // Multiplier flavour of a processor.
  typedef enum logic {
    ARITH_MULT = 1'b0,  // conventional 16 x 8 two's complement multiplier
    ARITH_PLOG = 1'b1   // plog adder followed by a plog-to-bin converter
  } arith_e;

  // Source of the broadcast bus and destination of the output stream.
  typedef enum logic {
    PORT_HOST = 1'b0,
    PORT_LOOP = 1'b1
  } route_e;

  // One pass: n_inputs broadcast samples are multiplied by the weights at
  // base_addr .. base_addr+n_inputs-1 of every processor; afterwards the
  // first n_out storage registers are drained.
  typedef struct packed {
    logic [MEM_AW:0]   n_inputs;   // 1 .. MEM_DEPTH
    logic [MEM_AW-1:0] base_addr;
    logic [7:0]        n_out;      // board: 1 .. chips*CHIP_PES, chip: 0 .. CHIP_PES
    route_e            in_src;     // board only
    route_e            out_dst;    // board only
  } pass_cmd_t;

endpackage
