// tb_plog_mult: checks the plog multiplier.
// Random sample/weight code pairs and all 256 x 256 code pairs are compared
// bit-exactly with the reference product; for codes of real samples the
// relative error against the true product x * w is also checked to stay
// under the Mitchell bound (11.1 %) plus the truncation of both operands.
module tb_plog_mult;
  import tb_totem_ref_pkg::*;
  logic [7:0]  a, b;
  logic [31:0] p;
  int checks = 0, failures = 0;
  int within10 = 0, nonzero = 0;

  plog_mult dut (.a(a), .b(b), .p(p));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // every code pair, exact
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        checks++;
        if ($signed(p) != ref_plog_mul(8'(i), 8'(j))) begin
          failures++;
          if (failures < 10) $display("FAIL a=%02h b=%02h p=%0d exp=%0d", i, j, $signed(p), ref_plog_mul(8'(i), 8'(j)));
        end
      end
    end
    // accuracy on encoded integers
    for (int k = 0; k < 20000; k++) begin
      int x, y;
      real t, e;
      x = int'($urandom_range(65535)) - 32768;
      y = int'($urandom_range(510)) - 255;
      a = ref_plog_enc(x); b = ref_plog_enc(y);
      #1;
      t = real'(x) * real'(y);
      checks++;
      if (t == 0.0) begin
        if (p != 0) begin
          failures++;
          $display("FAIL zero product x=%0d y=%0d p=%0d", x, y, $signed(p));
        end
      end else begin
        e = (real'($signed(p)) - t) / t;
        nonzero++;
        if (e < 0.0) e = -e;
        if (e <= 0.10) within10++;
        if (e > 0.111 + 0.25 + 1e-9) begin
          failures++;
          $display("FAIL accuracy x=%0d y=%0d p=%0d err=%f", x, y, $signed(p), e);
        end
      end
    end
    $display("products within 10%%: %0d of %0d", within10, nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
