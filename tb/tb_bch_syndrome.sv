// tb_bch_syndrome -- feeds random received words (codewords with 0..4 bit
// errors, and plain random words) to the 4-parallel syndrome generator for
// the t = 3 code and compares S_1..S_6 with direct evaluation r(alpha^i).
// Checks that a word takes ceil(n/P) = 71 beats, that the result appears the
// clock after the last beat, that out_zero is set exactly for error-free
// codewords, and that the last beat of the next word is held back while the
// previous result has not been taken.
module tb_bch_syndrome;
  import tb_ref_pkg::*;
  localparam int T = 3, K = 256, P = 4, N = K + 9 * T, BEATS = (N + P - 1) / P;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [P-1:0] in_data = '0;
  logic out_valid, out_ready = 1, out_zero;
  logic [2*T-1:0][8:0] out_syn;
  int checks = 0, failures = 0, stalls = 0;

  bch_syndrome #(.T(T), .K(K), .P(P)) dut (.*);

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

  task automatic send(word_t w, bit hold_result);
    int b;
    b = 0;
    while (b < BEATS) begin
      @(negedge clk);
      in_valid = 1;
      for (int j = 0; j < P; j++) in_data[j] = w[(BEATS - 1 - b) * P + j];
      #1;
      if (in_ready) b++;
      else stalls++;
      @(posedge clk);
      #1;
      if (hold_result && b == BEATS - 1 && out_valid) begin
        // previous result still unread: the last beat must be held back
        @(negedge clk);
        out_ready = 0;
        #1;
        chk(!in_ready, "last beat stalled");
        @(negedge clk);
        out_ready = 1;
      end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    word_t msg, w;
    int pos[$], ne;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      for (int j = 0; j < K; j++) msg[j] = 1'($urandom);
      w = ref_encode(msg, K, T);
      ne = (k < 30) ? (k % 5) : 0;
      ref_positions(N, ne, pos);
      foreach (pos[q]) w[pos[q]] ^= 1'b1;
      if (k >= 35) for (int l = 0; l < N; l++) w[l] = 1'($urandom);
      out_ready = 0;
      send(w, 0);
      // result must be valid the clock after the last beat
      chk(out_valid, "out_valid after last beat");
      for (int i = 1; i <= 2 * T; i++) chk(out_syn[i-1] == ref_syn(w, N, i), $sformatf("S%0d word %0d", i, k));
      chk(out_zero == (ne == 0 && k < 35), "out_zero");
      // the next word's last beat must wait while this result is not taken
      if (k == 3) begin
        for (int b = 0; b < BEATS; b++) begin
          @(negedge clk);
          in_valid = 1;
          in_data = '0;
          #1;
          if (b < BEATS - 1) chk(in_ready, "in_ready before last beat");
          else chk(!in_ready, "last beat held while result pending");
          if (b < BEATS - 1) @(posedge clk);
        end
        @(negedge clk);
        in_valid = 0;
        out_ready = 1;
        @(posedge clk); #1;
        @(negedge clk);
        in_valid = 1;    // release the held last beat
        #1;
        chk(in_ready, "held beat accepted after result taken");
        @(posedge clk); #1;
        @(negedge clk);
        in_valid = 0;
        chk(out_valid && out_zero, "all-zero word gives zero syndrome");
      end
      @(negedge clk);
      out_ready = 1;
      @(negedge clk);
      chk(!out_valid, "result released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
