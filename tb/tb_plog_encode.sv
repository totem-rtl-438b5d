// tb_plog_encode: exhaustive check of the bin-to-plog converter.
// Every 16-bit sample is encoded and compared with a reference built from
// the definition of eta and plog; the approximation error of the code
// against log2|x| is also checked to stay within 0.0861 plus the 2^-3
// truncation step.
module tb_plog_encode;
  import tb_totem_ref_pkg::*;
  logic [15:0] x;
  logic [7:0]  code;
  int checks = 0, failures = 0;
  real worst = 0.0;

  plog_encode dut (.x(x), .code(code));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      logic [7:0] exp;
      x = 16'(v);
      #1;
      exp = ref_plog_enc(v);
      checks++;
      if (code !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d code=%02h expected %02h", v, code, exp);
      end
      if (v != 0) begin
        real lg, pl, err;
        lg  = $ln(real'((v < 0) ? -v : v)) / $ln(2.0);
        pl  = real'(code[6:3]) + real'(code[2:0]) / 8.0;
        err = lg - pl;
        if (err > worst) worst = err;
        checks++;
        if (err < -1e-9 || err > 0.0861 + 0.125 + 1e-9) begin
          failures++;
          if (failures < 10) $display("FAIL error x=%0d err=%f", v, err);
        end
      end
    end
    $display("largest log2 error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
