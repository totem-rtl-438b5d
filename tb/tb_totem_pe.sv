// tb_totem_pe: checks one processor in both arithmetic variants.
// The testbench plays the sequencer: it loads random weights, then runs
// neurons of random length from random base addresses, driving stage 0,
// stage 1 and stage 2 controls one cycle apart, with random idle cycles in
// the input stream. The storage register must show the reference sum
// after the transfer and must keep the previous neuron's sum while the
// next neuron is being accumulated.
module tb_totem_pe;
  import totem_pkg::*;
  import tb_totem_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        w_we = 0;
  logic [6:0]  w_addr = 0;
  logic [7:0]  w_data = 0;
  logic        rd_en = 0;
  logic [6:0]  rd_addr = 0;
  logic [15:0] x = 0;
  logic [15:0] xcode = 0;
  logic        mul_en, acc_en = 0, acc_first = 0, xfer = 0;
  logic [31:0] res_m, res_p;
  logic [7:0]  wm [128];
  logic [7:0]  wp [128];
  int checks = 0, failures = 0;

  // the same controls drive a multiplier processor and a plog processor
  totem_pe #(.ARITH(ARITH_MULT)) dut_m (
    .clk, .rst_n, .w_we, .w_addr, .w_data(w_data), .rd_en, .rd_addr, .x(x),
    .mul_en, .acc_en, .acc_first, .xfer, .result(res_m));
  logic       w_we_p = 0;
  logic [7:0] w_data_p = 0;
  totem_pe #(.ARITH(ARITH_PLOG)) dut_p (
    .clk, .rst_n, .w_we(w_we_p), .w_addr, .w_data(w_data_p), .rd_en, .rd_addr, .x(xcode),
    .mul_en, .acc_en, .acc_first, .xfer, .result(res_p));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] got, int exp, string what);
    checks++;
    if ($signed(got) != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, $signed(got), exp);
    end
  endtask

  // Stage-1/2 controls follow stage 0 by one and two cycles.
  logic v1 = 0, f1 = 0;
  logic acc_first_s0 = 0;
  logic [15:0] x_s0, xc_s0;
  always_ff @(posedge clk) begin
    v1 <= rd_en; f1 <= rd_en && acc_first_s0;
    acc_en <= v1; acc_first <= f1;
    if (rd_en) begin x <= x_s0; xcode <= xc_s0; end
  end
  assign mul_en = v1;

  initial begin
    int prev_m, prev_p;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 128; a++) begin
      wm[a] = 8'($urandom);
      wp[a] = 8'($urandom);
      w_we = 1; w_we_p = 1; w_addr = 7'(a); w_data = wm[a]; w_data_p = wp[a];
      @(negedge clk);
    end
    w_we = 0; w_we_p = 0;
    prev_m = 0; prev_p = 0;
    for (int n = 0; n < 40; n++) begin
      int len, base, sm, sp;
      len  = (n == 0) ? 128 : $urandom_range(1, 40);
      base = (n == 0) ? 0 : $urandom_range(0, 128 - len);
      sm = 0; sp = 0;
      for (int k = 0; k < len; k++) begin
        int xv;
        xv = int'($urandom_range(65535)) - 32768;
        if ($urandom_range(3) == 0) xv = 0;
        while ($urandom_range(3) == 0) begin
          rd_en = 0; acc_first_s0 = 0;
          @(negedge clk);
        end
        rd_en = 1; rd_addr = 7'(base + k); acc_first_s0 = (k == 0);
        x_s0 = 16'(xv); xc_s0 = 16'(ref_plog_enc(xv));
        sm += ref_prod(1'b0, xv, wm[base + k]);
        sp += ref_prod(1'b1, xv, wp[base + k]);
        @(negedge clk);
        // while the neuron runs, the storage register keeps the last sum
        check(res_m, prev_m, "storage held (mult)");
        check(res_p, prev_p, "storage held (plog)");
      end
      rd_en = 0; acc_first_s0 = 0;
      repeat (2) @(negedge clk);
      xfer = 1;
      @(negedge clk);
      xfer = 0;
      check(res_m, sm, $sformatf("neuron %0d mult", n));
      check(res_p, sp, $sformatf("neuron %0d plog", n));
      prev_m = sm; prev_p = sp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
