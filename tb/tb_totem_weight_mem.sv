// tb_totem_weight_mem: checks the processor weight memory.
// Fills all 128 words with random data through the write port, reads them
// back in sequence and in random order, and checks the one-cycle read
// latency, that rdata holds while re is low and that a read during a write
// of the same word returns the old word.
module tb_totem_weight_mem;
  localparam int DEPTH = 128;
  logic       clk = 0;
  logic       we = 0, re = 0;
  logic [6:0] waddr = 0, raddr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  totem_weight_mem dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic [7:0] got, logic [7:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %02h expected %02h", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = 8'($urandom);
      we = 1; waddr = 7'(a); wdata = model[a];
      @(negedge clk);
    end
    we = 0;
    // sequential read, one word per cycle
    for (int a = 0; a < DEPTH; a++) begin
      re = 1; raddr = 7'(a);
      @(negedge clk);
      check(rdata, model[a], $sformatf("seq read %0d", a));
    end
    // hold while re low
    re = 0; raddr = 7'd3;
    @(negedge clk);
    check(rdata, model[DEPTH-1], "hold");
    // random reads
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      re = 1; raddr = 7'(a);
      @(negedge clk);
      check(rdata, model[a], $sformatf("random read %0d", a));
    end
    // read during write of the same word
    re = 1; raddr = 7'd9; we = 1; waddr = 7'd9; wdata = ~model[9];
    @(negedge clk);
    check(rdata, model[9], "read-during-write old value");
    model[9] = ~model[9];
    we = 0;
    @(negedge clk);
    check(rdata, model[9], "new value after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
