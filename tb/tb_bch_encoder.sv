// tb_bch_encoder -- encodes random 256-bit messages (and the all-zero and
// all-one messages) with the serial LFSR encoder for t = 3, compares each
// 283-bit codeword with a long-division reference, and checks that a word
// takes exactly n clocks when the message is supplied without gaps, with
// out_sop/out_eop on the first and last bit and in_ready low for the parity.
module tb_bch_encoder;
  import tb_ref_pkg::*;
  localparam int T = 3, K = 256, N = K + 9 * T;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_bit = 0;
  logic out_valid, out_sop, out_eop, out_bit;
  int checks = 0, failures = 0;

  bch_encoder #(.T(T), .K(K)) dut (.*);

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
    word_t msg, exp_cw, got;
    int idx, cycles, first;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 12; w++) begin
      msg = '0;
      for (int j = 0; j < K; j++) msg[j] = (w == 0) ? 1'b0 : (w == 1) ? 1'b1 : 1'($urandom);
      exp_cw = ref_encode(msg, K, T);
      got = '0;
      idx = 0;
      cycles = 0;
      while (idx < N) begin
        @(negedge clk);
        in_valid = (idx < K);
        in_bit   = (idx < K) ? msg[idx] : 1'b0;
        #1;
        chk(in_ready == (idx < K), "in_ready");
        chk(out_valid == 1'b1, "out_valid");
        chk(out_sop == (idx == 0), "sop");
        chk(out_eop == (idx == N - 1), "eop");
        got[N - 1 - idx] = out_bit;
        idx++;
        cycles++;
      end
      @(negedge clk);
      in_valid = 0;
      chk(got == exp_cw, $sformatf("codeword %0d", w));
      chk(cycles == N, "cycle count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
