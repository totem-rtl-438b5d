// totem_ctrl: control logic of the Totem chip.
//
// The sequencer runs one "pass" at a time. A pass broadcasts n_inputs
// samples; with each sample it reads the weight at base_addr + k from every
// processor's memory, so all processors compute a neuron in parallel from
// the same input stream. Because weights are read strictly in sequence, a
// neuron may use any number of inputs up to the memory depth, and the memory
// can hold several layers side by side, each starting at its own base
// address.
//
// When the last product has been accumulated the sums are moved into the
// storage registers (xfer) and the output bus starts to drain the first
// n_out of them, one per accepted beat. The drain runs on its own: the next
// pass may be commanded and accumulated while it is in progress, which is
// the point of the storage register. If a pass reaches its transfer while
// the previous drain is still going, the transfer waits (stall high) so
// that no result is overwritten before it is read.
//
// Handshakes (all valid/ready, a beat moves when both are high):
//   cmd      accepted only when the sequencer is idle
//   in       one broadcast sample per beat while a pass runs
//   out      out_sel names the processor whose register is on the bus,
//            out_last marks the final beat of a drain
// Timing: a sample accepted in cycle t is read from memory in t (stage 0),
// multiplied in t+1 and accumulated in t+2. With samples every cycle the
// transfer comes 2 cycles after the last sample and the sequencer is idle
// again one cycle later: a pass of n samples takes n + 3 cycles from
// acceptance of the first sample to cmd_ready, plus any stall.
//
// The valid/ready protocol, the base-address partitioning mechanism, the
// stall rule and the fixed drain order are this design's choices; the
// sequential weight access and the overlap of read-out with computation
// follow the chip.
module totem_ctrl
  import totem_pkg::*;
#(
  parameter int unsigned NUM_PE = totem_pkg::CHIP_PES,
  parameter int unsigned DEPTH  = totem_pkg::MEM_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned SW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // pass command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  pass_cmd_t     cmd,
  // broadcast input handshake
  input  logic          in_valid,
  output logic          in_ready,
  // processor pipeline controls
  output logic          rd_en,      // stage 0, also loads the broadcast register
  output logic [AW-1:0] rd_addr,
  output logic          mul_en,     // stage 1
  output logic          acc_en,     // stage 2
  output logic          acc_first,
  output logic          xfer,
  // output bus
  output logic          out_valid,
  input  logic          out_ready,
  output logic [SW-1:0] out_sel,
  output logic          out_last,
  // status
  output logic          stall
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH} state_e;

  state_e          state;
  logic [AW:0]     cnt;
  logic [AW:0]     n_in;
  logic [AW-1:0]   base;
  logic [7:0]      n_out_q;
  logic            v1, first1, v2, first2;
  logic            in_fire;

  // drain side
  logic            d_busy;
  logic [SW-1:0]   d_idx;
  logic [7:0]      d_n;
  logic            out_fire;
  logic            drain_free;

  assign cmd_ready = (state == S_IDLE);
  assign in_ready  = (state == S_RUN);
  assign in_fire   = in_valid && in_ready;

  assign rd_en     = in_fire;
  assign rd_addr   = base + cnt[AW-1:0];
  assign mul_en    = v1;
  assign acc_en    = v2;
  assign acc_first = first2;

  assign out_valid  = d_busy;
  assign out_sel    = d_idx;
  assign out_last   = d_busy && (8'(d_idx) == d_n - 8'd1);
  assign out_fire   = out_valid && out_ready;
  assign drain_free = !d_busy || (out_fire && out_last);

  always_comb begin
    xfer  = 1'b0;
    stall = 1'b0;
    if (state == S_FLUSH && !v1 && !v2) begin
      xfer  = drain_free;
      stall = !drain_free;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      n_in    <= '0;
      base    <= '0;
      n_out_q <= '0;
      v1      <= 1'b0;
      first1  <= 1'b0;
      v2      <= 1'b0;
      first2  <= 1'b0;
    end else begin
      v1     <= in_fire;
      first1 <= in_fire && (cnt == '0);
      v2     <= v1;
      first2 <= first1;
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            state   <= S_RUN;
            cnt     <= '0;
            n_in    <= cmd.n_inputs;
            base    <= cmd.base_addr;
            n_out_q <= cmd.n_out;
          end
        end
        S_RUN: begin
          if (in_fire) begin
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == n_in) state <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          if (xfer) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_busy <= 1'b0;
      d_idx  <= '0;
      d_n    <= '0;
    end else begin
      if (out_fire) begin
        if (out_last) d_busy <= 1'b0;
        else          d_idx  <= d_idx + 1'b1;
      end
      if (xfer && n_out_q != '0) begin
        d_busy <= 1'b1;
        d_idx  <= '0;
        d_n    <= n_out_q;
      end
    end
  end

  // Protocol rules.
  a_cmd_len : assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && cmd_ready |-> (cmd.n_inputs != '0) &&
                               (32'(cmd.base_addr) + 32'(cmd.n_inputs) <= DEPTH) &&
                               (32'(cmd.n_out) <= NUM_PE))
    else $error("totem_ctrl: command out of range");
  a_out_hold : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_sel))
    else $error("totem_ctrl: output beat withdrawn");
  a_no_overwrite : assert property (@(posedge clk) disable iff (!rst_n)
    xfer |-> drain_free)
    else $error("totem_ctrl: storage register overwritten before drain");

endmodule
