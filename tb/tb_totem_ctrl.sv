// tb_totem_ctrl: checks the chip sequencer on its own.
// Random passes (length, base address, number of outputs) are commanded
// with random gaps in the input stream and random back-pressure on the
// output bus. Monitors check: the weight address sequence, the stage-1 and
// stage-2 controls one and two cycles after each read, the first-term flag,
// one transfer per pass, the drain order and last flag, that a transfer
// never happens during a drain (the stall), and the pass length of n + 3
// cycles when nothing waits.
module tb_totem_ctrl;
  import totem_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0, cmd_ready;
  pass_cmd_t  cmd;
  logic       in_valid = 0, in_ready;
  logic       rd_en, mul_en, acc_en, acc_first, xfer;
  logic [6:0] rd_addr;
  logic       out_valid, out_ready, out_last;
  logic [4:0] out_sel;
  logic       stall;
  int checks = 0, failures = 0;
  int stalls = 0, xfers = 0, drained = 0, fast_passes = 0;

  totem_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Expected-pass queue shared by stimulus and monitors.
  int q_base[$], q_len[$], q_nout[$];
  int d_nout[$];
  int k = 0;             // samples of the current pass issued
  logic rd_d1 = 0, rd_d2 = 0, first_d1 = 0, first_d2 = 0;
  logic drain_busy = 0;
  int   drain_idx = 0, drain_n = 0;
  bit   hold_out = 0;
  logic pend_xfer = 0;

  logic rnd_ready = 1;
  always @(negedge clk) rnd_ready <= ($urandom_range(3) != 0);
  assign out_ready = !hold_out && rnd_ready;

  always @(posedge clk) if (rst_n) begin
    // stage alignment
    check(mul_en == rd_d1, "mul_en follows read by one cycle");
    check(acc_en == rd_d2, "acc_en follows read by two cycles");
    if (acc_en) check(acc_first == first_d2, "first-term flag");
    rd_d1 <= rd_en; rd_d2 <= rd_d1;
    first_d1 <= rd_en && (k == 0); first_d2 <= first_d1;
    if (rd_en) begin
      check(rd_addr == 7'(q_base[0] + k), $sformatf("address base %0d + %0d", q_base[0], k));
      k = k + 1;
    end
    if (stall) stalls++;
    // drain
    if (out_valid && out_ready) begin
      check(drain_busy, "beat only during a drain");
      check(out_sel == 5'(drain_idx), "drain order");
      check(out_last == (drain_idx == drain_n - 1), "last flag");
      drained++;
      if (drain_idx == drain_n - 1) drain_busy = 0;
      drain_idx++;
    end
    if (xfer) begin
      check(k == q_len[0], "transfer after the last sample");
      check(!drain_busy, "no transfer while draining");
      xfers++;
      k = 0;
      if (q_nout[0] != 0) begin
        drain_busy = 1; drain_idx = 0; drain_n = q_nout[0];
      end
      void'(q_base.pop_front()); void'(q_len.pop_front()); void'(q_nout.pop_front());
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      int len, base, nout, t0, t1, st0;
      bit gaps;
      len  = (p % 10 == 0) ? 128 : $urandom_range(1, 30);
      base = $urandom_range(0, 128 - len);
      nout = $urandom_range(0, 32);
      gaps = (p % 3 == 1);
      hold_out = (p % 5 == 2);        // force the next transfer to wait
      while (!cmd_ready) @(negedge clk);
      cmd = '0;
      cmd.n_inputs = 8'(len); cmd.base_addr = 7'(base); cmd.n_out = 8'(nout);
      cmd_valid = 1;
      q_base.push_back(base); q_len.push_back(len); q_nout.push_back(nout);
      @(negedge clk);
      cmd_valid = 0;
      t0 = -1;
      st0 = stalls;
      for (int s = 0; s < len; s++) begin
        while (gaps && $urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        if (t0 < 0) t0 = int'($time / 10);
        check(in_ready, "sample accepted while the pass runs");
        @(negedge clk);
      end
      in_valid = 0;
      if (hold_out) begin
        repeat (len + 8) @(negedge clk);
        check(!cmd_ready || !drain_busy, "held drain keeps the transfer waiting");
        hold_out = 0;
      end
      while (!cmd_ready) @(negedge clk);
      t1 = int'($time / 10);
      if (!gaps && stalls == st0) begin
        check((t1 - t0) == len + 3, $sformatf("pass of %0d samples took %0d cycles", len, t1 - t0));
        fast_passes++;
      end
    end
    repeat (100) @(negedge clk);
    check(xfers == 60, $sformatf("60 transfers, saw %0d", xfers));
    check(stalls > 0, "the transfer stall happened");
    check(fast_passes > 0, "a pass took n + 3 cycles");
    check(!drain_busy, "all drains finished");
    $display("stall cycles %0d, beats drained %0d, n+3 passes %0d", stalls, drained, fast_passes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
