// tb_bch_bm -- gives the Berlekamp-Massey solver syndromes of random error
// patterns with 0..3 errors (t = 3) and checks that the returned sigma is a
// non-zero multiple of prod (1 + alpha^l x) over the error positions l, that
// its degree L equals the number of errors, that a solve takes 2t = 6 clocks
// after the syndromes are taken (one clock when all syndromes are zero), and
// that sigma is held while out_ready is low.
module tb_bch_bm;
  import tb_ref_pkg::*;
  localparam int T = 3, N = 283;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_zero = 0;
  logic [2*T-1:0][8:0] in_syn = '0;
  logic out_valid, out_ready = 0;
  logic [T:0][8:0] out_sigma;
  logic [3:0] out_deg;
  int checks = 0, failures = 0;

  bch_bm #(.T(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    int pos[$], ne, cyc;
    fe_t e [T+1];
    fe_t x;
    bit zero;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      ne = k % (T + 1);
      ref_positions(N, ne, pos);
      // expected locator polynomial prod (1 + X_l x)
      for (int i = 0; i <= T; i++) e[i] = '0;
      e[0] = 9'd1;
      foreach (pos[q]) begin
        x = ref_pow(pos[q]);
        for (int i = T; i > 0; i--) e[i] = e[i] ^ ref_mul(e[i-1], x);
      end
      zero = 1;
      for (int i = 1; i <= 2 * T; i++) begin
        in_syn[i-1] = '0;
        foreach (pos[q]) in_syn[i-1] ^= ref_pow(i * pos[q]);
        if (in_syn[i-1] != 0) zero = 0;
      end
      @(negedge clk);
      in_zero  = zero;
      in_valid = 1;
      #1;
      chk(in_ready, "ready when idle");
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      in_syn   = '0;    // the solver must have captured them
      cyc = 0;
      while (!out_valid && cyc < 50) begin @(negedge clk); cyc++; end
      chk(cyc == (zero ? 0 : 2 * T), $sformatf("latency %0d (errors %0d)", cyc, ne));
      // hold: result stays while out_ready is low
      repeat (2) @(negedge clk);
      chk(out_valid && !in_ready, "held");
      chk(out_sigma[0] != 0, "sigma0 nonzero");
      for (int i = 0; i <= T; i++)
        chk(ref_mul(out_sigma[i], e[0]) == ref_mul(e[i], out_sigma[0]), $sformatf("sigma_%0d word %0d", i, k));
      chk(int'(out_deg) == ne, "degree");
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      chk(!out_valid, "released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
