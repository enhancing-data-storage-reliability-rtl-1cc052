// tb_bch_decoder -- streams 10 reference-encoded words (t = 3, k = 256,
// P = 4) carrying 0..3 random bit errors back to back into the decoder and
// checks every corrected beat and the per-word error count. It also checks
// that input is never held back at these sizes, that the first word leaves
// ceil(n/P) + 2t + 4 = 81 clocks after its first beat went in, and that
// words then leave every ceil(n/P) = 71 clocks (against 71 + 6 + 71 for a
// decoder that finishes one word before taking the next). Six more words are
// then sent with random idle clocks between beats and checked for content.
module tb_bch_decoder;
  import tb_ref_pkg::*;
  localparam int T = 3, K = 256, P = 4, N = K + 9 * T, BEATS = (N + P - 1) / P, WORDS = 16, FAST = 10;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [P-1:0] in_data = '0;
  logic out_valid, out_sop, out_eop;
  logic [P-1:0] out_data;
  logic [7:0] out_nerr;
  int checks = 0, failures = 0;

  bch_decoder #(.T(T), .K(K), .P(P)) dut (.*);

  always #5 clk = ~clk;

  word_t good [WORDS];
  word_t page [WORDS];
  int    nerr [WORDS];
  int    cyc = 0, t_in0 = -1, out_w = 0, out_b = 0, stalls = 0;
  int    t_sop [WORDS];
  word_t got;

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

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && !in_ready) stalls++;
    if (out_valid) begin
      if (out_sop) begin got = '0; out_b = 0; t_sop[out_w] = cyc; end
      for (int j = 0; j < P; j++) got[(BEATS - 1 - out_b) * P + j] = out_data[j];
      out_b++;
      if (out_eop) begin
        chk(got == good[out_w], $sformatf("word %0d", out_w));
        chk(int'(out_nerr) == nerr[out_w], $sformatf("nerr word %0d", out_w));
        out_w++;
      end
    end
  end

  initial begin
    word_t msg;
    int pos[$];
    for (int w = 0; w < WORDS; w++) begin
      for (int j = 0; j < K; j++) msg[j] = 1'($urandom);
      good[w] = ref_encode(msg, K, T);
      nerr[w] = (w + 1) % (T + 1);
      ref_positions(N, nerr[w], pos);
      page[w] = good[w];
      foreach (pos[q]) page[w][pos[q]] ^= 1'b1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < FAST; w++) begin
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < P; j++) in_data[j] = page[w][(BEATS - 1 - b) * P + j];
        @(posedge clk);
        if (w == 0 && b == 0) t_in0 = cyc;
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    wait (out_w == FAST);
    chk(stalls == 0, "no input stall");
    // gapped input
    for (int w = FAST; w < WORDS; w++) begin
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < P; j++) in_data[j] = page[w][(BEATS - 1 - b) * P + j];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    wait (out_w == WORDS);
    repeat (4) @(posedge clk);
    chk(t_sop[0] - t_in0 == BEATS + 2 * T + 4, $sformatf("latency %0d", t_sop[0] - t_in0));
    for (int w = 1; w < FAST; w++) chk(t_sop[w] - t_sop[w-1] == BEATS, $sformatf("interval %0d", t_sop[w] - t_sop[w-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
