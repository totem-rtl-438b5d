// tb_totem_board: end-to-end test of the co-processor board.
//
// Two boards run the same stimulus in lockstep: one with multiplier
// processors, one with plog processors. They are reduced to 3 chips of 8
// processors with 64-word memories so that many passes fit in a short run;
// the full-size board is exercised by tb_totem_board_full.
//
// The host loads random weights into every chip and a logistic sigmoid
// into the activation table, then runs a mix of
//   - two-layer networks: layer 1 takes host samples (base 0) and feeds
//     its activations back over the loop; layer 2 (stored after layer 1 in
//     the same memories) consumes them and returns its outputs to the host;
//   - single-layer passes with random n_out, so that the drain sometimes
//     stops inside a chip and sometimes spans all chips.
// Inputs come with random gaps and the output with random back-pressure.
// Every host output (index, sum, activation) is compared in order with a
// reference computed in the testbench. The mechanisms of the design are
// counted and each must occur: transfer stall, loop feedback, drain moving
// from chip to chip, a drain that ends before the last chip, a drain
// overlapping a pass, host back-pressure, input gaps.
module tb_totem_board;
  import totem_pkg::*;
  import tb_totem_ref_pkg::*;

  localparam int NC   = 3;
  localparam int NPE  = 8;
  localparam int DEP  = 64;
  localparam int NTOT = NC * NPE;
  localparam int AW   = 12;
  localparam int SH   = 6;          // table shift used throughout

  logic        clk = 0, rst_n = 0;
  logic        w_we = 0;
  logic [1:0]  w_chip = 0;
  logic [2:0]  w_pe = 0;
  logic [5:0]  w_addr = 0;
  logic [7:0]  w_data = 0;
  logic        lut_we = 0;
  logic [11:0] lut_addr = 0;
  logic [15:0] lut_data = 0;
  logic [4:0]  lut_shift = 5'(SH);
  logic        cmd_valid = 0;
  pass_cmd_t   cmd = '0;
  logic        in_valid = 0;
  logic [15:0] in_data = 0;
  logic        out_ready;
  logic        cmd_ready [2], in_ready [2], out_valid [2], stall [2], loop_beat [2];
  logic [15:0] out_data [2];
  logic [31:0] out_acc [2];
  logic [7:0]  out_idx [2];
  logic [7:0]  wmem [2][NC][NPE][DEP];

  int checks = 0, failures = 0;
  int n_stall = 0, n_loop = 0, n_chip_switch = 0, n_short_drain = 0;
  int n_overlap = 0, n_backpressure = 0, n_gap = 0, n_host_out = 0;

  for (genvar v = 0; v < 2; v++) begin : g_dut
    totem_board #(.ARITH(v == 0 ? ARITH_MULT : ARITH_PLOG), .NUM_CHIPS(NC),
                  .NUM_PE(NPE), .DEPTH(DEP)) dut (
      .clk, .rst_n,
      .w_we, .w_chip, .w_pe, .w_addr, .w_data(v == 0 ? w_data : w_data ^ 8'h5a),
      .lut_we, .lut_addr, .lut_data, .lut_shift,
      .cmd_valid, .cmd_ready(cmd_ready[v]), .cmd,
      .in_valid, .in_ready(in_ready[v]), .in_data,
      .out_valid(out_valid[v]), .out_ready, .out_data(out_data[v]),
      .out_acc(out_acc[v]), .out_idx(out_idx[v]),
      .stall(stall[v]), .loop_beat(loop_beat[v]));
  end

  always #5 clk = ~clk;
  logic rnd_ready = 1;
  always @(negedge clk) rnd_ready <= ($urandom_range(3) != 0);
  assign out_ready = rnd_ready;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- model
  typedef struct {
    int n_inputs, base, n_out;
    route_e src, dst;
  } pass_t;

  pass_t cmds [$];
  int    host_in [$];
  int    e_idx [$], e_acc [2][$], e_act [2][$];

  // sums of neurons 0..n_out-1 of a pass over the given samples
  function automatic void run_pass(int v, pass_t p, int xs [$], output int sums [$]);
    sums = {};
    for (int g = 0; g < p.n_out; g++) begin
      int acc;
      acc = 0;
      for (int k = 0; k < p.n_inputs; k++)
        acc += ref_prod(v == 1, xs[k], wmem[v][g / NPE][g % NPE][p.base + k]);
      sums.push_back(acc);
    end
  endfunction

  function automatic int act(int acc);
    return int'($signed(ref_act(ref_lut_addr(acc, SH, AW), AW)));
  endfunction

  // Schedules one pass (or a two-layer network) and its expected outputs.
  task automatic plan_single();
    pass_t p;
    int xs [$];
    int sums [$];
    p.n_inputs = $urandom_range(1, DEP);
    p.base     = $urandom_range(0, DEP - p.n_inputs);
    p.n_out    = ($urandom_range(2) == 0) ? NTOT : $urandom_range(1, NTOT);
    p.src = PORT_HOST; p.dst = PORT_HOST;
    for (int k = 0; k < p.n_inputs; k++) xs.push_back(int'($urandom_range(65535)) - 32768);
    foreach (xs[k]) host_in.push_back(xs[k]);
    cmds.push_back(p);
    for (int v = 0; v < 2; v++) begin
      run_pass(v, p, xs, sums);
      foreach (sums[g]) begin
        e_acc[v].push_back(sums[g]); e_act[v].push_back(act(sums[g]));
        if (v == 0) e_idx.push_back(g);
      end
    end
  endtask

  task automatic plan_network(int nin, int nhid, int nout);
    pass_t p1, p2;
    int xs [$];
    int s1 [$], s2 [$], h [$];
    p1.n_inputs = nin; p1.base = 0; p1.n_out = nhid; p1.src = PORT_HOST; p1.dst = PORT_LOOP;
    p2.n_inputs = nhid; p2.base = nin; p2.n_out = nout; p2.src = PORT_LOOP; p2.dst = PORT_HOST;
    for (int k = 0; k < nin; k++) xs.push_back(int'($urandom_range(4095)) - 2048);
    foreach (xs[k]) host_in.push_back(xs[k]);
    cmds.push_back(p1); cmds.push_back(p2);
    for (int v = 0; v < 2; v++) begin
      run_pass(v, p1, xs, s1);
      h = {};
      foreach (s1[g]) h.push_back(act(s1[g]));
      run_pass(v, p2, h, s2);
      foreach (s2[g]) begin
        e_acc[v].push_back(s2[g]); e_act[v].push_back(act(s2[g]));
        if (v == 0) e_idx.push_back(g);
      end
    end
  endtask

  // ------------------------------------------------------------- monitors
  bit cmd_fired = 0, in_fired = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready[0]) cmd_fired = 1;
    if (in_valid && in_ready[0]) in_fired = 1;
    check(cmd_ready[0] == cmd_ready[1] && in_ready[0] == in_ready[1] &&
          out_valid[0] == out_valid[1], "boards in lockstep");
    if (stall[0]) n_stall++;
    if (loop_beat[0]) n_loop++;
    if (g_dut[0].dut.a_valid && g_dut[0].dut.a_ready && g_dut[0].dut.c_out_last[g_dut[0].dut.cptr]) begin
      if (!g_dut[0].dut.a_last) n_chip_switch++;
      else if (32'(g_dut[0].dut.cptr) != NC - 1) n_short_drain++;
    end
    if (g_dut[0].dut.a_valid && (in_valid && in_ready[0] || loop_beat[0])) n_overlap++;
    if (out_valid[0] && !out_ready) n_backpressure++;
    if (out_valid[0] && out_ready) begin
      n_host_out++;
      check(e_idx.size() > 0, "unexpected host output");
      if (e_idx.size() > 0) begin
        check(out_idx[0] == 8'(e_idx[0]) && out_idx[1] == 8'(e_idx[0]), "neuron index");
        for (int v = 0; v < 2; v++) begin
          check($signed(out_acc[v]) == e_acc[v][0],
                $sformatf("board %0d neuron %0d sum %0d expected %0d", v, e_idx[0], $signed(out_acc[v]), e_acc[v][0]));
          check($signed(out_data[v]) == e_act[v][0],
                $sformatf("board %0d neuron %0d activation %0d expected %0d", v, e_idx[0], $signed(out_data[v]), e_act[v][0]));
          void'(e_acc[v].pop_front()); void'(e_act[v].pop_front());
        end
        void'(e_idx.pop_front());
      end
    end
  end

  // ---------------------------------------------------------- host threads
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weights and table
    for (int c = 0; c < NC; c++)
      for (int p = 0; p < NPE; p++)
        for (int a = 0; a < DEP; a++) begin
          w_we = 1; w_chip = 2'(c); w_pe = 3'(p); w_addr = 6'(a);
          w_data = ($urandom_range(1) != 0) ? 8'($urandom_range(15)) : -8'($urandom_range(15));
          wmem[0][c][p][a] = w_data; wmem[1][c][p][a] = w_data ^ 8'h5a;
          @(negedge clk);
        end
    w_we = 0;
    for (int a = 0; a < (1 << AW); a++) begin
      lut_we = 1; lut_addr = 12'(a); lut_data = ref_act(a, AW);
      @(negedge clk);
    end
    lut_we = 0;
    // workload
    for (int i = 0; i < 40; i++) begin
      if (i % 3 == 0) plan_single();
      else plan_network($urandom_range(1, 16), $urandom_range(1, NTOT), $urandom_range(1, NTOT));
    end
    fork
      // commands
      begin
        while (cmds.size() > 0) begin
          pass_t p;
          p = cmds.pop_front();
          cmd = '0;
          cmd.n_inputs = 8'(unsigned'(p.n_inputs)); cmd.base_addr = 7'(unsigned'(p.base)); cmd.n_out = 8'(p.n_out);
          cmd.in_src = p.src; cmd.out_dst = p.dst;
          cmd_valid = 1; cmd_fired = 0;
          do @(negedge clk); while (!cmd_fired);
          cmd_valid = 0;
        end
      end
      // host samples
      begin
        while (host_in.size() > 0) begin
          while ($urandom_range(5) == 0) begin in_valid = 0; n_gap++; @(negedge clk); end
          in_valid = 1; in_data = 16'(host_in[0]); in_fired = 0;
          @(negedge clk);
          if (in_fired) void'(host_in.pop_front());
        end
        in_valid = 0;
      end
    join
    while (e_idx.size() > 0) @(negedge clk);
    repeat (10) @(negedge clk);
    check(n_host_out > 0, "host outputs seen");
    check(n_stall > 0, "transfer stall occurred");
    check(n_loop > 0, "loop feedback occurred");
    check(n_chip_switch > 0, "drain moved from chip to chip");
    check(n_short_drain > 0, "drain ended before the last chip");
    check(n_overlap > 0, "drain overlapped a pass");
    check(n_backpressure > 0, "host back-pressure occurred");
    check(n_gap > 0, "input gaps occurred");
    $display("outputs %0d stall %0d loop %0d chip-switch %0d short-drain %0d overlap %0d backpressure %0d gaps %0d",
             n_host_out, n_stall, n_loop, n_chip_switch, n_short_drain, n_overlap, n_backpressure, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
