// tb_bch_chien -- loads the 4-parallel Chien search (t = 3, n = 283) with
// error locators built from random sets of 0..3 error positions, scaled by a
// random non-zero constant, and checks that out_err marks exactly those
// positions, beat by beat in transmission order, over ceil(n/P) = 71 beats
// with out_sop/out_eop on the first and last. Two locators are loaded back
// to back to check that the second is taken in the last beat of the first.
module tb_bch_chien;
  import tb_ref_pkg::*;
  localparam int T = 3, K = 256, P = 4, N = K + 9 * T, BEATS = (N + P - 1) / P;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [T:0][8:0] in_sigma = '0;
  logic out_valid, out_sop, out_eop;
  logic [P-1:0] out_err;
  int checks = 0, failures = 0;

  bch_chien #(.T(T), .K(K), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [T:0][8:0] locator(int pos[$]);
    fe_t e [T+1];
    fe_t x, c;
    logic [T:0][8:0] r;
    for (int i = 0; i <= T; i++) e[i] = '0;
    e[0] = 9'd1;
    foreach (pos[q]) begin
      x = ref_pow(pos[q]);
      for (int i = T; i > 0; i--) e[i] = e[i] ^ ref_mul(e[i-1], x);
    end
    c = 9'($urandom_range(511, 1));
    for (int i = 0; i <= T; i++) r[i] = ref_mul(e[i], c);
    return r;
  endfunction

  initial begin
    int pos[$], pos2[$];
    word_t expv, got;
    int beats;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      ref_positions(N, k % (T + 1), pos);
      expv = '0;
      foreach (pos[q]) expv[pos[q]] = 1'b1;
      @(negedge clk);
      in_sigma = locator(pos);
      in_valid = 1;
      #1;
      chk(in_ready, "ready");
      @(negedge clk);
      in_valid = 0;
      got = '0;
      beats = 0;
      while (out_valid && beats < BEATS) begin
        chk(out_sop == (beats == 0), "sop");
        chk(out_eop == (beats == BEATS - 1), "eop");
        for (int j = 0; j < P; j++) got[(BEATS - 1 - beats) * P + j] = out_err[j];
        beats++;
        if (k == 39 && beats == BEATS) begin
          // back-to-back: load the next locator in the last beat
          ref_positions(N, 2, pos2);
          in_sigma = locator(pos2);
          in_valid = 1;
          #1;
          chk(in_ready, "ready in last beat");
        end
        @(negedge clk);
        in_valid = 0;
      end
      chk(beats == BEATS, $sformatf("beats %0d", beats));
      chk(got == expv, $sformatf("error pattern %0d", k));
    end
    // the back-to-back word
    expv = '0;
    foreach (pos2[q]) expv[pos2[q]] = 1'b1;
    got = '0;
    beats = 0;
    chk(out_valid && out_sop, "second word starts at once");
    while (out_valid) begin
      for (int j = 0; j < P; j++) got[(BEATS - 1 - beats) * P + j] = out_err[j];
      beats++;
      @(negedge clk);
    end
    chk(got == expv && beats == BEATS, "back-to-back word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
