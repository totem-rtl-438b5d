// totem_board: Totem co-processor board, the top of the design.
//
// Up to four chips are put in parallel on one network layer. They share the
// broadcast bus and receive the same pass command, so chip c computes
// neurons c*NUM_PE .. c*NUM_PE+NUM_PE-1 of the layer from the same inputs;
// four chips give a layer of 128 neurons. Their output buses are chained
// by an arbiter that drains chip 0 first, then chip 1 and so on, which turns
// the layer's sums into one stream of n_out values. That stream passes
// through the off-chip activation table and then goes either to the host or
// back onto the broadcast bus (out_dst = PORT_LOOP). In the second case the
// activations of one layer become the inputs of the next layer while they
// are being read out, so a multi-layer network runs without the host
// handling the hidden values: the storage registers let this read-out
// overlap the next layer's multiply-accumulate. Layers share each
// processor's memory by using different base addresses.
//
// Commands: a pass_cmd_t with n_inputs and base_addr (as for a chip), n_out
// (1 .. NUM_CHIPS*NUM_PE neurons to read out), in_src (PORT_HOST: samples
// from in_*, PORT_LOOP: the activations fed back) and out_dst. A pass with
// in_src = PORT_LOOP must follow a pass with out_dst = PORT_LOOP whose
// n_out equals its n_inputs.
//
// Host side (plain valid/ready streams):
//   w_*    write weight word w_addr of processor w_pe of chip w_chip
//   lut_*  write table entry lut_addr; lut_shift scales the sums
//   in_*   input samples, 16-bit two's complement
//   out_*  out_data activation, out_acc raw sum, out_idx neuron number
// Timing: the arbiter is combinational, so a sum reaches out_* (or the
// broadcast bus) one cycle after its beat leaves the chip, the cycle of the
// table read. The status outputs report a
// held transfer (stall) and a fed-back sample accepted by the chips
// (loop_beat).
//
// The number of chips and their sharing of inputs follow the board; the
// feedback path, the drain order, the command format and the handshakes are
// this design's choices. The ISA/VME/PCI host bus logic is not part of this
// RTL: its signals appear here as the ports above.
module totem_board
  import totem_pkg::*;
#(
  parameter arith_e      ARITH     = ARITH_MULT,
  parameter int unsigned NUM_CHIPS = totem_pkg::MAX_CHIPS,
  parameter int unsigned NUM_PE    = totem_pkg::CHIP_PES,
  parameter int unsigned DEPTH     = totem_pkg::MEM_DEPTH,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned SW       = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned CW       = (NUM_CHIPS > 1) ? $clog2(NUM_CHIPS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host weight write
  input  logic                w_we,
  input  logic [CW-1:0]       w_chip,
  input  logic [SW-1:0]       w_pe,
  input  logic [AW-1:0]       w_addr,
  input  logic [WEIGHT_BITS-1:0] w_data,
  // host activation table write
  input  logic                lut_we,
  input  logic [LUT_AW-1:0]   lut_addr,
  input  logic [LUT_DW-1:0]   lut_data,
  input  logic [4:0]          lut_shift,
  // pass command
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  pass_cmd_t           cmd,
  // host input stream
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_BITS-1:0]   in_data,
  // host output stream
  output logic                out_valid,
  input  logic                out_ready,
  output logic [LUT_DW-1:0]   out_data,
  output logic [ACC_BITS-1:0]    out_acc,
  output logic [7:0]          out_idx,
  // status
  output logic                stall,
  output logic                loop_beat
);

  localparam int unsigned QD = 4;  // pass records in flight (2 suffice)

  typedef struct packed {
    logic [7:0] n_out;
    route_e     dst;
  } drain_rec_t;

  // Chip side signals.
  logic              c_cmd_ready [NUM_CHIPS];
  logic              c_in_ready  [NUM_CHIPS];
  logic              c_out_valid [NUM_CHIPS];
  logic              c_out_ready [NUM_CHIPS];
  logic [ACC_BITS-1:0]  c_out_data  [NUM_CHIPS];
  logic [SW-1:0]     c_out_idx   [NUM_CHIPS];
  logic              c_out_last  [NUM_CHIPS];
  logic              c_stall     [NUM_CHIPS];

  logic              all_cmd_ready, all_in_ready, any_stall;
  logic              cmd_fire;
  logic              bc_valid;     // sample on the broadcast bus
  logic [DATA_BITS-1:0] bc_data;
  route_e            cur_src;

  // Pass records.
  drain_rec_t        q [QD];
  logic [1:0]        q_wr, q_rd;
  logic [2:0]        q_cnt;
  logic              q_full;
  drain_rec_t        q_head;

  // Arbiter.
  logic [CW-1:0]     cptr;
  logic [CW-1:0]     last_chip;
  logic              a_valid, a_ready, a_last;
  logic [ACC_BITS-1:0]  a_acc;
  logic [7:0]        a_idx;

  // Table output.
  logic              t_valid, t_ready;
  logic [LUT_DW-1:0] t_data;
  logic [ACC_BITS-1:0]  t_acc;
  logic [8:0]        t_tag;
  route_e            t_dst;
  logic              loop_valid;

  always_comb begin
    all_cmd_ready = 1'b1;
    all_in_ready  = 1'b1;
    any_stall     = 1'b0;
    for (int c = 0; c < NUM_CHIPS; c++) begin
      all_cmd_ready &= c_cmd_ready[c];
      all_in_ready  &= c_in_ready[c];
      any_stall     |= c_stall[c];
    end
  end

  assign q_full    = (q_cnt == 3'(QD));
  assign cmd_ready = all_cmd_ready && !q_full;
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign stall     = any_stall;

  // Each chip drains its share of the n_out neurons.
  function automatic pass_cmd_t chip_cmd(pass_cmd_t c_in, int unsigned c);
    pass_cmd_t r;
    r = c_in;
    if (32'(c_in.n_out) <= c * NUM_PE)            r.n_out = '0;
    else if (32'(c_in.n_out) >= (c + 1) * NUM_PE) r.n_out = 8'(NUM_PE);
    else                                          r.n_out = 8'(32'(c_in.n_out) - c * NUM_PE);
    return r;
  endfunction

  // Broadcast bus source.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cur_src <= PORT_HOST;
    else if (cmd_fire) cur_src <= cmd.in_src;
  end

  assign loop_valid = t_valid && (t_dst == PORT_LOOP);
  assign bc_valid   = ((cur_src == PORT_HOST) ? in_valid : loop_valid) && all_in_ready;
  assign bc_data    = (cur_src == PORT_HOST) ? in_data : t_data;
  assign in_ready   = (cur_src == PORT_HOST) && all_in_ready;
  assign loop_beat  = (cur_src == PORT_LOOP) && bc_valid;

  // The chips.
  for (genvar c = 0; c < NUM_CHIPS; c++) begin : g_chip
    totem_chip #(.ARITH(ARITH), .NUM_PE(NUM_PE), .DEPTH(DEPTH)) u_chip (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_we      (w_we && (w_chip == CW'(c))),
      .w_pe      (w_pe),
      .w_addr    (w_addr),
      .w_data    (w_data),
      .cmd_valid (cmd_fire),
      .cmd_ready (c_cmd_ready[c]),
      .cmd       (chip_cmd(cmd, c)),
      .in_valid  (bc_valid),
      .in_ready  (c_in_ready[c]),
      .in_data   (bc_data),
      .out_valid (c_out_valid[c]),
      .out_ready (c_out_ready[c]),
      .out_data  (c_out_data[c]),
      .out_idx   (c_out_idx[c]),
      .out_last  (c_out_last[c]),
      .stall     (c_stall[c])
    );
    assign c_out_ready[c] = a_ready && (cptr == CW'(c));
  end

  // Pass record queue: pushed when a pass is commanded, popped when the
  // last neuron of its drain has left the arbiter.
  assign q_head    = q[q_rd];
  assign last_chip = CW'((32'(q_head.n_out) - 1) / NUM_PE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wr  <= '0;
      q_rd  <= '0;
      q_cnt <= '0;
      for (int i = 0; i < QD; i++) q[i] <= '0;
    end else begin
      if (cmd_fire) begin
        q[q_wr] <= '{n_out: cmd.n_out, dst: cmd.out_dst};
        q_wr    <= q_wr + 1'b1;
      end
      if (a_valid && a_ready && a_last) q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + 3'(cmd_fire) - 3'(a_valid && a_ready && a_last);
    end
  end

  // Output arbiter: chip cptr is on the board's output bus.
  assign a_valid = c_out_valid[cptr];
  assign a_acc   = c_out_data[cptr];
  assign a_idx   = 8'(32'(cptr) * NUM_PE + 32'(c_out_idx[cptr]));
  assign a_last  = c_out_last[cptr] && (cptr == last_chip);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cptr <= '0;
    end else if (a_valid && a_ready && c_out_last[cptr]) begin
      cptr <= a_last ? '0 : cptr + 1'b1;
    end
  end

  sigmoid_lut #(.ADDR_W(LUT_AW), .DATA_W(LUT_DW), .ACC_W(ACC_BITS), .TAG_W(9)) u_lut (
    .clk       (clk),
    .rst_n     (rst_n),
    .we        (lut_we),
    .waddr     (lut_addr),
    .wdata     (lut_data),
    .shift     (lut_shift),
    .in_valid  (a_valid),
    .in_ready  (a_ready),
    .in_acc    (a_acc),
    .in_tag    ({q_head.dst, a_idx}),
    .out_valid (t_valid),
    .out_ready (t_ready),
    .out_data  (t_data),
    .out_acc   (t_acc),
    .out_tag   (t_tag)
  );

  assign t_dst     = route_e'(t_tag[8]);
  assign t_ready   = (t_dst == PORT_LOOP) ? ((cur_src == PORT_LOOP) && all_in_ready) : out_ready;
  assign out_valid = t_valid && (t_dst == PORT_HOST);
  assign out_data  = t_data;
  assign out_acc   = t_acc;
  assign out_idx   = t_tag[7:0];

  // Last command, for the loop rule below.
  logic [7:0] prev_n_out;
  route_e     prev_dst;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_n_out <= '0;
      prev_dst   <= PORT_HOST;
    end else if (cmd_fire) begin
      prev_n_out <= cmd.n_out;
      prev_dst   <= cmd.out_dst;
    end
  end

  // Rules the host must keep.
  a_loop_chain : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_fire && (cmd.in_src == PORT_LOOP) |->
      (prev_dst == PORT_LOOP) && (32'(prev_n_out) == 32'(cmd.n_inputs)))
    else $error("totem_board: loop pass does not match the pass feeding it");
  a_q_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    !(cmd_fire && q_full))
    else $error("totem_board: too many passes in flight");
  a_n_out : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_fire |-> (cmd.n_out != '0) && (32'(cmd.n_out) <= NUM_CHIPS * NUM_PE))
    else $error("totem_board: n_out out of range");
  a_loop_src : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && (cur_src == PORT_LOOP) |-> !in_ready)
    else $error("totem_board: host sample taken during a loop pass");

endmodule
