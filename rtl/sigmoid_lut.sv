// sigmoid_lut: RAM-based activation table on the board.
//
// The chip computes only weighted sums; the non-linearity is applied off
// chip by a RAM look-up table that the host fills (normally with a sigmoid,
// but any function of the sum can be loaded). The 32-bit sum is scaled by
// an arithmetic right shift of 'shift' bits, saturated to the signed range
// of an ADDR_W-bit address and offset to an unsigned address, so that the
// table entry 2^(ADDR_W-1) + s holds f(s * 2^shift).
//
// Interface: we/waddr/wdata write one entry. Sums enter on in_* with a tag
// that travels with them (the board uses it for the neuron index and the
// destination) and leave on out_* one cycle later, together with the
// untouched sum. One-entry pipeline with valid/ready: a new sum is accepted
// in the cycle the previous result is taken, so the table sustains one
// look-up per clock.
//
// The table being RAM-based and off-chip follows the board; its size, the
// shift-and-saturate addressing and the handshake are this design's choices.
module sigmoid_lut #(
  parameter int unsigned ADDR_W = totem_pkg::LUT_AW,
  parameter int unsigned DATA_W = totem_pkg::LUT_DW,
  parameter int unsigned ACC_W  = totem_pkg::ACC_BITS,
  parameter int unsigned TAG_W  = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  // host table write
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [4:0]        shift,
  // sums in
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [ACC_W-1:0]  in_acc,
  input  logic [TAG_W-1:0]  in_tag,
  // activations out
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic [ACC_W-1:0]  out_acc,
  output logic [TAG_W-1:0]  out_tag
);

  localparam logic signed [ACC_W-1:0] SMAX = ACC_W'((1 << (ADDR_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] SMIN = -ACC_W'(1 << (ADDR_W - 1));

  logic [DATA_W-1:0]        mem [1 << ADDR_W];
  logic signed [ACC_W-1:0]  scaled;
  logic [ADDR_W-1:0]        raddr;
  logic                     in_fire;

  always_comb begin
    scaled = $signed(in_acc) >>> shift;
    if (scaled > SMAX)      raddr = {1'b1, {(ADDR_W-1){1'b1}}};
    else if (scaled < SMIN) raddr = '0;
    else                    raddr = scaled[ADDR_W-1:0] ^ {1'b1, {(ADDR_W-1){1'b0}}};
  end

  assign in_ready = !out_valid || out_ready;
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (in_fire) out_data <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
      out_tag   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_acc <= in_acc;
        out_tag <= in_tag;
      end
    end
  end

endmodule
