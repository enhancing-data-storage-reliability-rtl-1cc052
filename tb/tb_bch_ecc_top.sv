// tb_bch_ecc_top -- end-to-end test of the ECC block in three configurations:
// the default code (t = 3, k = 256, P = 4: n = 283, 71 beats per word); the
// 18-parity-bit code (t = 2, k = 256, P = 4: n = 274, 69 beats), whose length
// matches the n = 274 quoted for the NOR page; and a small code (t = 3,
// k = 8, P = 8: n = 35, 5 beats) whose words are shorter than the 2t-clock BM
// stage, so that the input stall occurs. Each harness
// encodes, corrupts, decodes and checks a stream of words; this bench then
// requires that every mechanism happened at least once: the input stall,
// the zero-syndrome early exit, all three pipeline stages busy at once, and
// the correction of 1, 2 and 3 errors.
module tb_bch_ecc_top;
  logic clk = 0;
  always #5 clk = ~clk;

  bit done_a, done_b;
  int ca, fa, sa, ea, oa, cb, fb, sb, eb, ob;
  int xa [4];
  int xb [4];
  bit done_c;
  int cc, fc, sc, ec, oc;
  int xc [4];

  tb_ecc_harness #(.T(3), .K(256), .P(4), .WORDS(8)) h_paper (
    .clk, .done(done_a), .checks(ca), .failures(fa), .n_stall(sa), .n_early(ea), .n_overlap3(oa), .n_fixed(xa));
  tb_ecc_harness #(.T(3), .K(8), .P(8), .WORDS(12)) h_small (
    .clk, .done(done_b), .checks(cb), .failures(fb), .n_stall(sb), .n_early(eb), .n_overlap3(ob), .n_fixed(xb));

  tb_ecc_harness #(.T(2), .K(256), .P(4), .WORDS(6)) h_t2 (
    .clk, .done(done_c), .checks(cc), .failures(fc), .n_stall(sc), .n_early(ec), .n_overlap3(oc), .n_fixed(xc));

  int checks, failures;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc + 1);
    $finish;
  end

  initial begin
    wait (done_a && done_b && done_c);
    checks = ca + cb + cc;
    failures = fa + fb + fc;
    $display("mechanisms: input stalls %0d, zero-syndrome early exits %0d, three stages busy %0d clocks",
             sa + sb + sc, ea + eb + ec, oa + ob + oc);
    $display("corrected words: 1 error %0d, 2 errors %0d, 3 errors %0d", xa[1] + xb[1] + xc[1], xa[2] + xb[2] + xc[2], xa[3] + xb[3]);
    checks += 7;
    if (oc == 0)      begin failures++; $display("FAIL pipeline overlap never happened (t = 2)"); end
    if (sa + sb == 0) begin failures++; $display("FAIL input stall never happened"); end
    if (ea + eb == 0) begin failures++; $display("FAIL early exit never happened"); end
    if (oa == 0)      begin failures++; $display("FAIL pipeline overlap never happened"); end
    for (int i = 1; i <= 3; i++)
      if (xa[i] + xb[i] == 0) begin failures++; $display("FAIL no %0d-error word corrected", i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
