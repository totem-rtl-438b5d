// tb_sigmoid_lut: checks the activation table.
// The table is filled with a known function of the address, then sums of
// all magnitudes (including ones that saturate at both ends) are looked up
// with random shifts, random input gaps and random output back-pressure.
// Each result is compared in order with the entry at the reference
// address; sum and tag must pass through unchanged. With out_ready held
// high the table must take one sum per clock.
module tb_sigmoid_lut;
  import tb_totem_ref_pkg::*;
  localparam int AW = 12;
  logic        clk = 0, rst_n = 0;
  logic        we = 0;
  logic [11:0] waddr = 0;
  logic [15:0] wdata = 0;
  logic [4:0]  shift = 0;
  logic        in_valid = 0, in_ready;
  logic [31:0] in_acc = 0;
  logic [8:0]  in_tag = 0;
  logic        out_valid, out_ready;
  logic [15:0] out_data;
  logic [31:0] out_acc;
  logic [8:0]  out_tag;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;
  bit full_rate = 0;
  int e_acc [$], e_tag [$], e_addr [$];

  sigmoid_lut dut (.*);

  always #5 clk = ~clk;
  logic rnd_ready = 1;
  always @(negedge clk) rnd_ready <= ($urandom_range(3) != 0);
  assign out_ready = full_rate || rnd_ready;

  function automatic logic [15:0] table_fn(int a);
    return 16'(a * 37 + 5);
  endfunction

  initial begin
    #2000000;
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

  bit fired = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      e_acc.push_back(int'(in_acc)); e_tag.push_back(int'(in_tag));
      e_addr.push_back(ref_lut_addr(int'(in_acc), int'(shift), AW));
      fired = 1;
    end
    if (out_valid && out_ready) begin
      check(e_acc.size() > 0, "unexpected result");
      if (e_acc.size() > 0) begin
        check(out_data == table_fn(e_addr[0]), $sformatf("entry %0d", e_addr[0]));
        check(out_acc == 32'(e_acc[0]) && out_tag == 9'(e_tag[0]), "sum and tag pass through");
        void'(e_acc.pop_front()); void'(e_tag.pop_front()); void'(e_addr.pop_front());
      end
    end
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < (1 << AW); a++) begin
      we = 1; waddr = 12'(a); wdata = table_fn(a);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      int acc, sh, ad;
      sh  = $urandom_range(31);
      case ($urandom_range(3))
        0: acc = int'($urandom);
        1: acc = int'($urandom_range(8191)) - 4096;
        2: acc = (int'($urandom_range(8191)) - 4096) << sh;
        default: acc = ($urandom_range(1) != 0) ? 32'h7fffffff : 32'h80000000;
      endcase
      ad = ref_lut_addr(acc, sh, AW);
      if (ad == (1 << AW) - 1) sat_hi++;
      if (ad == 0) sat_lo++;
      while ($urandom_range(4) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_acc = 32'(acc); in_tag = 9'(i); shift = 5'(sh);
      fired = 0;
      do @(negedge clk); while (!fired);
    end
    in_valid = 0;
    while (e_acc.size() > 0) @(negedge clk);
    // throughput: one look-up per clock
    full_rate = 1; shift = 0;
    t0 = int'($time / 10);
    for (int i = 0; i < 100; i++) begin
      in_valid = 1; in_acc = 32'(i - 50); in_tag = 9'(i);
      check(in_ready, "one sum per clock");
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    check(e_acc.size() == 0 && int'($time / 10) - t0 == 101, "100 look-ups in 101 cycles");
    check(sat_hi > 0 && sat_lo > 0, "both saturation ends exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
