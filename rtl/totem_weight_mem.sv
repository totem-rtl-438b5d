// totem_weight_mem: weight memory of one Totem processor.
//
// Each processor owns DEPTH words of WIDTH bits (128 x 8 bits on the chip),
// enough for a neuron with up to 128 inputs, or for several smaller neurons
// of different layers stored one after another. The sequencer reads the
// words in order, one per clock, while the host writes them through a
// separate port before a run.
//
// Interface and timing: write on the rising edge when we is high. A read
// with re high returns the word at raddr on rdata one clock later; rdata
// holds its value while re is low. Reading and writing the same word in the
// same cycle returns the old word. The separate write port and the one-cycle
// read are this design's choices.
module totem_weight_mem #(
  parameter int unsigned DEPTH = totem_pkg::MEM_DEPTH,
  parameter int unsigned WIDTH = totem_pkg::WEIGHT_BITS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
