// tb_sram_fifo -- random writes and reads (never writing when full or reading
// when empty) on a 13-entry FIFO, a depth that is not a power of two, checked
// against a queue model: data order, the one-clock read latency, and the
// full/empty flags every clock. The FIFO is also filled to the brim and
// drained.
module tb_sram_fifo;
  localparam int W = 4, D = 13;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  logic [W-1:0] expect_q;
  bit pending = 0;

  sram_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic step(bit w, bit r);
    @(negedge clk);
    if (pending) chk(rd_data == expect_q, "read data");
    chk(full == (model.size() == D), "full flag");
    chk(empty == (model.size() == 0), "empty flag");
    wr_en = w && (model.size() < D || r);
    rd_en = r && model.size() > 0;
    wr_data = W'($urandom);
    pending = rd_en;
    if (rd_en) expect_q = model.pop_front();
    if (wr_en) model.push_back(wr_data);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) step(1'($urandom), 1'($urandom));
    for (int i = 0; i < 20; i++) step(1, 0);
    for (int i = 0; i < 20; i++) step(0, 1);
    for (int i = 0; i < 2000; i++) step(($urandom % 4) != 0, ($urandom % 4) == 0);
    for (int i = 0; i < 30; i++) step(0, 1);
    step(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
