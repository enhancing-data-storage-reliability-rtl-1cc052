// tb_gf_mult -- checks the Mastrovito GF(2^9) multiplier against a
// carry-less-multiply-and-reduce reference: every a against 40 random b,
// plus the identities a*0 = 0 and a*1 = a.
module tb_gf_mult;
  import tb_ref_pkg::*;
  logic [8:0] a, b, p;
  int checks = 0, failures = 0;

  gf_mult dut (.a(a), .b(b), .p(p));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 512; x++) begin
      for (int k = 0; k < 42; k++) begin
        a = 9'(x);
        b = (k == 0) ? 9'd0 : (k == 1) ? 9'd1 : 9'($urandom);
        #1;
        checks++;
        if (p !== ref_mul(a, b)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h p=%h exp=%h", a, b, p, ref_mul(a, b));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
