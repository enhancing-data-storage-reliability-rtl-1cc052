// tb_xor_share_cmult -- checks the XOR-shared constant multiplier groups used
// by the Chien search (steps J = 1, 2, 3 with four products each, and the
// J = 5 group alpha^5, alpha^10, alpha^15, alpha^20) on all 512 inputs against
// the reference multiply, checks that sharing never adds gates, and prints
// the XOR gate counts with and without sharing. For the constant multipliers
// of the t = 3, P = 4 Chien search (groups J = 1, 2, 3) it also totals the
// counts three ways and checks them against an offline count of the same
// algorithm: plain matrices 72, sharing inside each multiplier 60, sharing
// across each group of four 24.
module tb_xor_share_cmult;
  import tb_ref_pkg::*;
  logic [8:0] b;
  logic [3:0][8:0] p1, p2, p3, p5;
  int checks = 0, failures = 0;

  xor_share_cmult #(.J(1), .P(4)) u1 (.b(b), .prod(p1));
  xor_share_cmult #(.J(2), .P(4)) u2 (.b(b), .prod(p2));
  xor_share_cmult #(.J(3), .P(4)) u3 (.b(b), .prod(p3));
  xor_share_cmult #(.J(5), .P(4)) u5 (.b(b), .prod(p5));

  // one-product instances: sharing inside a single multiplier, alpha^(j*i)
  logic [0:0][8:0] single [12];
  for (genvar j = 1; j <= 3; j++) begin : g_j
    for (genvar i = 1; i <= 4; i++) begin : g_i
      xor_share_cmult #(.J(j * i), .P(1)) u (.b(b), .prod(single[(j-1)*4 + i - 1]));
    end
  end

  task automatic check(logic [3:0][8:0] p, int j);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (p[i] !== ref_mul(b, ref_pow(j * (i + 1)))) begin
        failures++;
        if (failures < 10) $display("FAIL J=%0d i=%0d b=%h got=%h", j, i, b, p[i]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 512; x++) begin
      b = 9'(x);
      #1;
      check(p1, 1); check(p2, 2); check(p3, 3); check(p5, 5);
    end
    $display("XOR gates  J=1: %0d shared / %0d plain", u1.XOR_COUNT, u1.XOR_COUNT_PLAIN);
    $display("XOR gates  J=2: %0d shared / %0d plain", u2.XOR_COUNT, u2.XOR_COUNT_PLAIN);
    $display("XOR gates  J=3: %0d shared / %0d plain", u3.XOR_COUNT, u3.XOR_COUNT_PLAIN);
    $display("XOR gates  J=5: %0d shared / %0d plain", u5.XOR_COUNT, u5.XOR_COUNT_PLAIN);
    begin
      int plain, one, grp;
      plain = u1.XOR_COUNT_PLAIN + u2.XOR_COUNT_PLAIN + u3.XOR_COUNT_PLAIN;
      grp   = u1.XOR_COUNT + u2.XOR_COUNT + u3.XOR_COUNT;
      one   = g_j[1].g_i[1].u.XOR_COUNT + g_j[1].g_i[2].u.XOR_COUNT + g_j[1].g_i[3].u.XOR_COUNT + g_j[1].g_i[4].u.XOR_COUNT
            + g_j[2].g_i[1].u.XOR_COUNT + g_j[2].g_i[2].u.XOR_COUNT + g_j[2].g_i[3].u.XOR_COUNT + g_j[2].g_i[4].u.XOR_COUNT
            + g_j[3].g_i[1].u.XOR_COUNT + g_j[3].g_i[2].u.XOR_COUNT + g_j[3].g_i[3].u.XOR_COUNT + g_j[3].g_i[4].u.XOR_COUNT;
      $display("Chien multipliers (t=3, P=4): %0d plain, %0d shared per multiplier, %0d shared per group", plain, one, grp);
      checks += 3;
      if (plain != 72) failures++;
      if (one != 60) failures++;
      if (grp != 24) failures++;
      for (int k = 0; k < 12; k++) begin
        checks++;
        if (single[k][0] !== ref_mul(b, ref_pow((k / 4 + 1) * (k % 4 + 1)))) failures++;
      end
    end
    checks++;
    if (u5.XOR_COUNT > u5.XOR_COUNT_PLAIN || u3.XOR_COUNT > u3.XOR_COUNT_PLAIN) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
