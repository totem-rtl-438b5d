// totem_pe: one processor of the Totem array.
//
// A processor holds the weights of the neuron (or neurons) mapped onto it,
// multiplies each broadcast input by the weight the sequencer addresses,
// and accumulates the products. When a neuron is complete its sum is copied
// into a 32-bit storage register, which the output bus reads while the
// accumulator already works on the next neuron.
//
// Pipeline, driven entirely by the chip sequencer (the processor has no
// control of its own):
//   stage 0  rd_en/rd_addr   read the weight word
//   stage 1  mul_en, x       product <= x * weight   (one cycle after stage 0)
//   stage 2  acc_en          acc <= acc_first ? product : acc + product
//   xfer                     result <= acc
// One multiply-accumulate completes per clock. With ARITH = ARITH_MULT the
// product comes from a 16 x 8 two's complement multiplier, as on the chip.
// With ARITH = ARITH_PLOG the weight word and the low byte of x are plog
// codes and the product comes from an adder and a plog-to-bin converter.
//
// The 128 x 8-bit memory, the 32-bit storage register and the overlap of
// read-out with accumulation follow the chip; the three-stage split, the
// 16-bit input and the wrapping accumulator are this design's choices.
module totem_pe
  import totem_pkg::*;
#(
  parameter arith_e      ARITH    = ARITH_MULT,
  parameter int unsigned DATA_W   = totem_pkg::DATA_BITS,
  parameter int unsigned WEIGHT_W = totem_pkg::WEIGHT_BITS,
  parameter int unsigned ACC_W    = totem_pkg::ACC_BITS,
  parameter int unsigned DEPTH    = totem_pkg::MEM_DEPTH,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host weight write
  input  logic                w_we,
  input  logic [AW-1:0]       w_addr,
  input  logic [WEIGHT_W-1:0] w_data,
  // stage 0
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  // stage 1
  input  logic [DATA_W-1:0]   x,
  input  logic                mul_en,
  // stage 2
  input  logic                acc_en,
  input  logic                acc_first,
  // transfer to the storage register
  input  logic                xfer,
  output logic [ACC_W-1:0]    result
);

  logic [WEIGHT_W-1:0] weight;
  logic [ACC_W-1:0]    prod_next;
  logic [ACC_W-1:0]    prod;
  logic [ACC_W-1:0]    acc;

  totem_weight_mem #(.DEPTH(DEPTH), .WIDTH(WEIGHT_W)) u_mem (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .re    (rd_en),
    .raddr (rd_addr),
    .rdata (weight)
  );

  if (ARITH == ARITH_PLOG) begin : g_plog
    plog_mult #(.IW(PLOG_IW), .F(PLOG_F), .OUT_W(ACC_W)) u_pmul (
      .a (x[PLOG_CW-1:0]),
      .b (weight[PLOG_CW-1:0]),
      .p (prod_next)
    );
  end else begin : g_mult
    logic signed [DATA_W+WEIGHT_W-1:0] full;
    always_comb begin
      full      = $signed(x) * $signed(weight);
      prod_next = ACC_W'(full);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod   <= '0;
      acc    <= '0;
      result <= '0;
    end else begin
      if (mul_en) prod <= prod_next;
      if (acc_en) acc  <= acc_first ? prod : acc + prod;
      if (xfer)   result <= acc;
    end
  end

endmodule
