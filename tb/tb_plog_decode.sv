// tb_plog_decode: exhaustive check of the plog-to-bin converter over all
// 256 log values of a 5.3 fixed-point input, including the saturating ones,
// against a real-arithmetic antilog (1 + g) * 2^I truncated to an integer.
module tb_plog_decode;
  import tb_totem_ref_pkg::*;
  logic [7:0]  lg;
  logic [31:0] mag;
  int checks = 0, failures = 0, sats = 0;

  plog_decode dut (.lg(lg), .mag(mag));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      longint exp;
      lg = 8'(v);
      #1;
      exp = ref_antilog(v, 32);
      if (exp == 64'h7fffffff) sats++;
      checks++;
      if (longint'(mag) != exp) begin
        failures++;
        $display("FAIL lg=%0d mag=%0d expected %0d", v, mag, exp);
      end
    end
    checks++;
    if (sats == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
