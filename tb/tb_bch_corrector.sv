// tb_bch_corrector -- drives random error beats and, one clock later, random
// FIFO data into the corrector (P = 4), in words of 7 beats with idle gaps,
// and checks that the output two clocks later is data XOR error with the
// sop/eop markers carried along, and that the per-word count of corrected
// bits is right.
module tb_bch_corrector;
  localparam int P = 4, WB = 7;
  logic clk = 0, rst_n = 0;
  logic err_valid = 0, err_sop = 0, err_eop = 0;
  logic [P-1:0] err = '0, fifo_data = '0;
  logic out_valid, out_sop, out_eop;
  logic [P-1:0] out_data;
  logic [7:0] out_nerr;
  int checks = 0, failures = 0;

  typedef struct { bit v, s, e; logic [P-1:0] d; } beat_t;
  beat_t expq[$];
  int cnt = 0;
  int expn[$];

  bch_corrector #(.P(P)) dut (.*);

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

  // output monitor: compares with the expected stream of valid beats
  always @(negedge clk) if (rst_n && out_valid) begin
    beat_t b;
    b = expq.pop_front();
    chk(out_data == b.d && out_sop == b.s && out_eop == b.e, "beat");
    if (out_eop) chk(int'(out_nerr) == expn.pop_front(), "error count");
  end

  initial begin
    logic [P-1:0] e_prev;
    bit v_prev;
    repeat (3) @(posedge clk);
    rst_n = 1;
    v_prev = 0;
    e_prev = '0;
    for (int w = 0; w < 200; w++) begin
      for (int b = 0; b < WB; b++) begin
        @(posedge clk);
        #1;
        // data for the beat issued last clock
        fifo_data = P'($urandom);
        if (v_prev) expq.push_back('{1, b == 1, 0, fifo_data ^ e_prev});
        err_valid = 1;
        err_sop   = (b == 0);
        err_eop   = (b == WB - 1);
        err       = (($urandom % 3) == 0) ? P'($urandom) : '0;
        cnt = (b == 0) ? $countones(err) : cnt + $countones(err);
        if (b == WB - 1) expn.push_back(cnt);
        v_prev = 1;
        e_prev = err;
      end
      // mark the eop beat in the expectation, then an idle gap
      @(posedge clk);
      #1;
      fifo_data = P'($urandom);
      expq.push_back('{1, 0, 1, fifo_data ^ e_prev});
      err_valid = 0;
      err = '0;
      v_prev = 0;
      repeat ($urandom % 3) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    chk(expq.size() == 0, "all beats seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
