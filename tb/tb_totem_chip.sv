// tb_totem_chip: checks a full-size chip (32 processors, 128 words each)
// in the multiplier and the plog variant, driven with the same stimulus.
// Random weights are loaded, then passes of random length and base address
// run with random gaps in the broadcast stream and random back-pressure on
// the output bus. Every drained word is compared with the reference sum of
// its processor, in order. Also checked: a gap-free pass takes n + 3
// cycles, i.e. the chip does 32 multiply-accumulates per clock; a drain can
// overlap the next pass; the transfer stall occurs.
module tb_totem_chip;
  import totem_pkg::*;
  import tb_totem_ref_pkg::*;

  localparam int NPE = 32;
  logic        clk = 0, rst_n = 0;
  logic        w_we = 0;
  logic [4:0]  w_pe = 0;
  logic [6:0]  w_addr = 0;
  logic [7:0]  w_data = 0;
  logic        cmd_valid = 0;
  pass_cmd_t   cmd = '0;
  logic        in_valid = 0;
  logic [15:0] in_data = 0;
  logic        out_ready;
  logic        cmd_ready [2], in_ready [2], out_valid [2], out_last [2], stall [2];
  logic [31:0] out_data [2];
  logic [4:0]  out_idx [2];
  logic [7:0]  wmem [2][NPE][128];
  int checks = 0, failures = 0;
  int stalls = 0, overlaps = 0, beats = 0, rate_ok = 0;
  bit hold_out = 0;

  for (genvar v = 0; v < 2; v++) begin : g_dut
    totem_chip #(.ARITH(v == 0 ? ARITH_MULT : ARITH_PLOG)) dut (
      .clk, .rst_n, .w_we, .w_pe, .w_addr,
      .w_data   (v == 0 ? w_data : ~w_data),
      .cmd_valid, .cmd_ready(cmd_ready[v]), .cmd,
      .in_valid, .in_ready(in_ready[v]), .in_data,
      .out_valid(out_valid[v]), .out_ready, .out_data(out_data[v]),
      .out_idx(out_idx[v]), .out_last(out_last[v]), .stall(stall[v]));
  end

  always #5 clk = ~clk;
  logic rnd_ready = 1;
  always @(negedge clk) rnd_ready <= ($urandom_range(4) != 0);
  assign out_ready = !hold_out && rnd_ready;

  initial begin
    #20000000;
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

  // expected drained words, both variants
  int exp_q [2][$];
  int exp_i [$];
  int exp_last [$];

  always @(posedge clk) if (rst_n) begin
    check(out_valid[0] == out_valid[1] && in_ready[0] == in_ready[1], "variants in lockstep");
    if (stall[0]) stalls++;
    if (out_valid[0] && out_ready && in_valid && in_ready[0]) overlaps++;
    if (out_valid[0] && out_ready) begin
      beats++;
      check(exp_i.size() > 0, "unexpected output beat");
      if (exp_i.size() > 0) begin
        check(out_idx[0] == 5'(exp_i[0]), "output index");
        check(out_last[0] == (exp_last[0] != 0), "last flag");
        check($signed(out_data[0]) == exp_q[0][0],
              $sformatf("mult pe %0d: %0d vs %0d", exp_i[0], $signed(out_data[0]), exp_q[0][0]));
        check($signed(out_data[1]) == exp_q[1][0],
              $sformatf("plog pe %0d: %0d vs %0d", exp_i[0], $signed(out_data[1]), exp_q[1][0]));
        void'(exp_q[0].pop_front()); void'(exp_q[1].pop_front());
        void'(exp_i.pop_front()); void'(exp_last.pop_front());
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPE; p++) begin
      for (int a = 0; a < 128; a++) begin
        w_we = 1; w_pe = 5'(p); w_addr = 7'(a); w_data = 8'($urandom);
        wmem[0][p][a] = w_data; wmem[1][p][a] = ~w_data;
        @(negedge clk);
      end
    end
    w_we = 0;
    for (int n = 0; n < 30; n++) begin
      int len, base, nout, t0, t1, st0;
      int xs [128];
      bit gaps;
      len  = (n % 6 == 0) ? 128 : $urandom_range(1, 64);
      base = $urandom_range(0, 128 - len);
      nout = (n % 4 == 0) ? 32 : $urandom_range(1, 32);
      gaps = (n % 3 == 2);
      hold_out = (n % 7 == 3);
      for (int s = 0; s < len; s++) begin
        xs[s] = int'($urandom_range(65535)) - 32768;
        if ($urandom_range(5) == 0) xs[s] = 0;
      end
      while (!cmd_ready[0]) @(negedge clk);
      cmd = '0; cmd.n_inputs = 8'(len); cmd.base_addr = 7'(base); cmd.n_out = 8'(nout);
      cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      st0 = stalls;
      t0 = int'($time / 10);
      for (int s = 0; s < len; s++) begin
        while (gaps && $urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_data = 16'(xs[s]);
        @(negedge clk);
      end
      in_valid = 0;
      // reference sums of the processors that will be drained
      for (int p = 0; p < nout; p++) begin
        for (int v = 0; v < 2; v++) begin
          int acc;
          acc = 0;
          for (int s = 0; s < len; s++) acc += ref_prod(v == 1, xs[s], wmem[v][p][base + s]);
          exp_q[v].push_back(acc);
        end
        exp_i.push_back(p);
        exp_last.push_back(p == nout - 1);
      end
      if (hold_out) begin
        repeat (10) @(negedge clk);
        hold_out = 0;
      end
      while (!cmd_ready[0]) @(negedge clk);
      t1 = int'($time / 10);
      if (!gaps && stalls == st0) begin
        // first sample is taken in the cycle after the command
        check(t1 - t0 == len + 3, $sformatf("pass of %0d samples took %0d cycles", len, t1 - t0));
        rate_ok++;
      end
    end
    while (exp_i.size() > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    check(stalls > 0, "transfer stall occurred");
    check(overlaps > 0, "drain overlapped a pass");
    check(rate_ok > 0, "a gap-free pass was timed");
    $display("beats %0d, stall cycles %0d, overlap cycles %0d, timed passes %0d",
             beats, stalls, overlaps, rate_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
