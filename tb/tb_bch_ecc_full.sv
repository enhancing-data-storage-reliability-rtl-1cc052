// tb_bch_ecc_full -- the ECC block at its default sizes (t = 3, k = 256,
// P = 4, n = 283): writes four random 256-bit pages through the encoder,
// checks each codeword, flips 0, 1, 2 and 3 random bits in them, reads them
// back to back through the decoder and checks the corrected pages, the error
// counts and the 71-clock spacing of the output words (from the second
// word with errors on; the error-free first word skips the BM stage and so
// leaves 2t clocks early).
module tb_bch_ecc_full;
  import tb_ref_pkg::*;
  localparam int T = 3, K = 256, P = 4, N = K + 9 * T, BEATS = (N + P - 1) / P, WORDS = 4;
  logic clk = 0, rst_n = 0;
  logic enc_in_valid = 0, enc_in_ready, enc_in_bit = 0;
  logic enc_out_valid, enc_out_sop, enc_out_eop, enc_out_bit;
  logic dec_in_valid = 0, dec_in_ready;
  logic [P-1:0] dec_in_data = '0;
  logic dec_out_valid, dec_out_sop, dec_out_eop;
  logic [P-1:0] dec_out_data;
  logic [7:0] dec_out_nerr;
  int checks = 0, failures = 0;

  bch_ecc_top dut (.*);

  always #5 clk = ~clk;

  word_t good [WORDS];
  word_t page [WORDS];
  int    nerr [WORDS];
  int    cyc = 0, out_w = 0, out_b = 0;
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
    if (dec_out_valid) begin
      if (dec_out_sop) begin got = '0; out_b = 0; t_sop[out_w] = cyc; end
      for (int j = 0; j < P; j++) got[(BEATS - 1 - out_b) * P + j] = dec_out_data[j];
      out_b++;
      if (dec_out_eop) begin
        chk(got == good[out_w], $sformatf("page %0d", out_w));
        chk(int'(dec_out_nerr) == nerr[out_w], $sformatf("nerr page %0d", out_w));
        out_w++;
      end
    end
  end

  initial begin
    word_t msg, cw;
    int pos[$], idx;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      for (int j = 0; j < K; j++) msg[j] = 1'($urandom);
      good[w] = ref_encode(msg, K, T);
      cw = '0;
      idx = 0;
      while (idx < N) begin
        @(negedge clk);
        enc_in_valid = (idx < K);
        enc_in_bit = (idx < K) ? msg[idx] : 1'b0;
        @(posedge clk);
        if (enc_out_valid) begin cw[N - 1 - idx] = enc_out_bit; idx++; end
      end
      @(negedge clk);
      enc_in_valid = 0;
      chk(cw == good[w], $sformatf("codeword %0d", w));
      nerr[w] = w % (T + 1);
      ref_positions(N, nerr[w], pos);
      page[w] = cw;
      foreach (pos[q]) page[w][pos[q]] ^= 1'b1;
    end
    for (int w = 0; w < WORDS; w++)
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        dec_in_valid = 1;
        for (int j = 0; j < P; j++) dec_in_data[j] = page[w][(BEATS - 1 - b) * P + j];
        @(posedge clk);
        while (!dec_in_ready) @(posedge clk);
      end
    @(negedge clk);
    dec_in_valid = 0;
    wait (out_w == WORDS);
    repeat (4) @(posedge clk);
    for (int w = 2; w < WORDS; w++) chk(t_sop[w] - t_sop[w-1] == BEATS, $sformatf("spacing %0d", t_sop[w] - t_sop[w-1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
