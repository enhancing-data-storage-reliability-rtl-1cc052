// tb_ecc_harness -- end-to-end stimulus and checking for one bch_ecc_top.
//
// Encodes WORDS random messages through the write path and checks each
// codeword against the long-division reference. It then flips (w+1) mod
// (T+1) random bits of word w, the flash errors, and streams all the pages
// into the read path back to back, as fast as dec_in_ready allows. The
// corrected words and out_nerr are checked against the originals. After an idle
// gap one error-free word and one word with T errors are sent alone to
// measure the single-word latency. It counts how often each mechanism of the
// decoder occurred: input stalls, early exits on a zero syndrome, clocks in
// which all three pipeline stages were busy on different words, and
// corrected 1..T-bit patterns. It checks the latencies and, when
// ceil(n/P) > 2t + 1, that words leave every ceil(n/P) clocks.
module tb_ecc_harness #(
  parameter int T = 3,
  parameter int K = 256,
  parameter int P = 4,
  parameter int WORDS = 8
) (
  input  logic clk,
  output bit   done,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output int   n_early,
  output int   n_overlap3,
  output int   n_fixed [4]
);
  import tb_ref_pkg::*;
  localparam int N = K + 9 * T, BEATS = (N + P - 1) / P;

  logic rst_n = 0;
  logic enc_in_valid = 0, enc_in_ready, enc_in_bit = 0;
  logic enc_out_valid, enc_out_sop, enc_out_eop, enc_out_bit;
  logic dec_in_valid = 0, dec_in_ready;
  logic [P-1:0] dec_in_data = '0;
  logic dec_out_valid, dec_out_sop, dec_out_eop;
  logic [P-1:0] dec_out_data;
  logic [7:0] dec_out_nerr;

  bch_ecc_top #(.T(T), .K(K), .P(P)) dut (.*);

  word_t good [WORDS + 2];
  word_t page [WORDS + 2];
  int    nerr [WORDS + 2];
  int    cyc = 0;
  int    t_in_first [WORDS + 2];
  int    t_out_first [WORDS + 2];
  int    out_w = 0, out_b = 0;
  word_t got;
  int    sent_words = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL[T=%0d K=%0d P=%0d] %s", T, K, P, what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dec_in_valid && !dec_in_ready) n_stall++;
      if (dut.u_dec.u_bm.in_valid && dut.u_dec.u_bm.in_ready && dut.u_dec.u_bm.in_zero) n_early++;
      if (dut.u_dec.u_syn.take && int'(dut.u_dec.u_bm.state) == 1 && dut.u_dec.u_chien.busy) n_overlap3++;
    end
  end

  // read-path monitor
  always @(posedge clk) if (rst_n && dec_out_valid) begin
    if (dec_out_sop) begin got = '0; out_b = 0; t_out_first[out_w] = cyc; end
    for (int j = 0; j < P; j++) got[(BEATS - 1 - out_b) * P + j] = dec_out_data[j];
    out_b++;
    if (dec_out_eop) begin
      chk(out_b == BEATS, "beats per word");
      chk(got == good[out_w], $sformatf("corrected word %0d", out_w));
      chk(int'(dec_out_nerr) == nerr[out_w], $sformatf("nerr word %0d: %0d vs %0d", out_w, dec_out_nerr, nerr[out_w]));
      if (got == good[out_w] && nerr[out_w] > 0 && nerr[out_w] <= 3) n_fixed[nerr[out_w]]++;
      out_w++;
    end
  end

  task automatic send_page(int w);
    int b;
    b = 0;
    while (b < BEATS) begin
      @(negedge clk);
      dec_in_valid = 1;
      for (int j = 0; j < P; j++) dec_in_data[j] = page[w][(BEATS - 1 - b) * P + j];
      @(posedge clk);
      if (dec_in_ready) begin
        if (b == 0) t_in_first[w] = cyc;
        b++;
      end
    end
  endtask

  task automatic idle_input();
    @(negedge clk);
    dec_in_valid = 0;
  endtask

  initial begin
    word_t msg, cw;
    int pos[$], idx;
    done = 0; checks = 0; failures = 0; n_stall = 0; n_early = 0; n_overlap3 = 0;
    for (int i = 0; i < 4; i++) n_fixed[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write path
    for (int w = 0; w < WORDS + 2; w++) begin
      msg = '0;
      for (int j = 0; j < K; j++) msg[j] = 1'($urandom);
      good[w] = ref_encode(msg, K, T);
      cw = '0;
      idx = 0;
      while (idx < N) begin
        @(negedge clk);
        enc_in_valid = (idx < K);
        enc_in_bit = (idx < K) ? msg[idx] : 1'b0;
        @(posedge clk);
        if (enc_out_valid) begin
          cw[N - 1 - idx] = enc_out_bit;
          idx++;
        end
      end
      @(negedge clk);
      enc_in_valid = 0;
      chk(cw == good[w], $sformatf("encoded word %0d", w));
      // flash errors
      nerr[w] = (w == WORDS) ? 0 : (w == WORDS + 1) ? T : (w + 1) % (T + 1);
      ref_positions(N, nerr[w], pos);
      page[w] = cw;
      foreach (pos[q]) page[w][pos[q]] ^= 1'b1;
    end
    // read path: back to back
    for (int w = 0; w < WORDS; w++) send_page(w);
    idle_input();
    wait (out_w == WORDS);
    repeat (3 * BEATS) @(posedge clk);
    // single words: latency
    send_page(WORDS);
    idle_input();
    wait (out_w == WORDS + 1);
    repeat (3 * BEATS) @(posedge clk);
    send_page(WORDS + 1);
    idle_input();
    wait (out_w == WORDS + 2);
    repeat (5) @(posedge clk);
    chk(t_out_first[0] - t_in_first[0] == BEATS + 2 * T + 4,
        $sformatf("first-word latency %0d", t_out_first[0] - t_in_first[0]));
    chk(t_out_first[WORDS] - t_in_first[WORDS] == BEATS + 4,
        $sformatf("error-free latency %0d", t_out_first[WORDS] - t_in_first[WORDS]));
    chk(t_out_first[WORDS+1] - t_in_first[WORDS+1] == BEATS + 2 * T + 4,
        $sformatf("t-error latency %0d", t_out_first[WORDS+1] - t_in_first[WORDS+1]));
    if (BEATS > 2 * T + 1)
      for (int w = 1; w < WORDS; w++)
        chk(t_out_first[w] - t_out_first[w-1] == BEATS,
            $sformatf("interval %0d", t_out_first[w] - t_out_first[w-1]));
    $display("[T=%0d K=%0d P=%0d n=%0d beats=%0d] first-word latency %0d clocks, words every %0d clocks",
             T, K, P, N, BEATS, t_out_first[0] - t_in_first[0], t_out_first[WORDS-1] - t_out_first[WORDS-2]);
    done = 1;
  end
endmodule
