// totem_chip: the Totem neurochip.
//
// An array of NUM_PE (32) processors, each with its own 128 x 8-bit weight
// memory, works on one input stream. The broadcast bus delivers one sample
// per clock to all processors at once; every processor multiplies it by its
// own weight and accumulates, so the chip completes NUM_PE
// multiply-accumulates per clock (32 x 30 MHz = 0.96 GMAC/s at the chip's
// clock rate). The control logic sequences the weight addresses and the
// pipeline; finished sums are parked in the 32-bit storage registers and read
// out one per clock over the output bus while the next pass is already
// computing.
//
// Two arithmetic variants share this structure (parameter ARITH):
//   ARITH_MULT  16 x 8 two's complement multipliers, as on the chip;
//   ARITH_PLOG  the proposed plog variant: the broadcast sample is converted
//               once to plog code on the bus, weights are stored as plog
//               codes, and each processor adds logarithms and converts back.
//
// Interface:
//   w_*      host write of weight word w_addr of processor w_pe
//   cmd_*    pass command (n_inputs, base_addr, n_out; routing fields unused)
//   in_*     broadcast samples, valid/ready
//   out_*    output bus: out_data is the storage register of processor
//            out_idx; out_last marks the last beat of the drain
//   stall    the sequencer is holding a transfer until the drain finishes
// Timing: see totem_ctrl; the broadcast register adds no extra cycle (it
// is stage 1's input register).
//
// The processor count, memory size and register width follow the chip; the
// handshakes, the multiplexed output bus and the single shared bin-to-plog
// encoder are this design's choices.
module totem_chip
  import totem_pkg::*;
#(
  parameter arith_e      ARITH  = ARITH_MULT,
  parameter int unsigned NUM_PE = totem_pkg::CHIP_PES,
  parameter int unsigned DEPTH  = totem_pkg::MEM_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host weight write
  input  logic                w_we,
  input  logic [SW-1:0]       w_pe,
  input  logic [AW-1:0]       w_addr,
  input  logic [WEIGHT_BITS-1:0] w_data,
  // pass command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  pass_cmd_t           cmd,
  // broadcast bus
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_BITS-1:0]   in_data,
  // output bus
  output logic                out_valid,
  input  logic                out_ready,
  output logic [ACC_BITS-1:0]    out_data,
  output logic [SW-1:0]       out_idx,
  output logic                out_last,
  // status
  output logic                stall
);

  logic            rd_en, mul_en, acc_en, acc_first, xfer;
  logic [AW-1:0]   rd_addr;
  logic [DATA_BITS-1:0] bcast_next;
  logic [DATA_BITS-1:0] bcast;
  logic [ACC_BITS-1:0]  result [NUM_PE];

  totem_ctrl #(.NUM_PE(NUM_PE), .DEPTH(DEPTH)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmd_valid (cmd_valid),
    .cmd_ready (cmd_ready),
    .cmd       (cmd),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .rd_en     (rd_en),
    .rd_addr   (rd_addr),
    .mul_en    (mul_en),
    .acc_en    (acc_en),
    .acc_first (acc_first),
    .xfer      (xfer),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_sel   (out_idx),
    .out_last  (out_last),
    .stall     (stall)
  );

  // Broadcast bus register, loaded together with the weight read.
  if (ARITH == ARITH_PLOG) begin : g_enc
    logic [PLOG_CW-1:0] code;
    plog_encode #(.W(DATA_BITS), .F(PLOG_F)) u_enc (
      .x    (in_data),
      .code (code)
    );
    assign bcast_next = DATA_BITS'(code);
  end else begin : g_bin
    assign bcast_next = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     bcast <= '0;
    else if (rd_en) bcast <= bcast_next;
  end

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    totem_pe #(
      .ARITH    (ARITH),
      .DATA_W   (DATA_BITS),
      .WEIGHT_W (WEIGHT_BITS),
      .ACC_W    (ACC_BITS),
      .DEPTH    (DEPTH)
    ) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_we      (w_we && (w_pe == SW'(i))),
      .w_addr    (w_addr),
      .w_data    (w_data),
      .rd_en     (rd_en),
      .rd_addr   (rd_addr),
      .x         (bcast),
      .mul_en    (mul_en),
      .acc_en    (acc_en),
      .acc_first (acc_first),
      .xfer      (xfer),
      .result    (result[i])
    );
  end

  // Output bus.
  assign out_data = result[out_idx];

endmodule
