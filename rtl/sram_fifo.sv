// sram_fifo -- first-in first-out buffer on a memory array with synchronous
// read, as an SRAM macro would behave.
//
// Holds the received beats of the decoder while the syndrome, BM and Chien
// stages work on them. A write stores wr_data at the write pointer; a read
// launched with rd_en presents the oldest word on rd_data one clock later.
// Pointers wrap at DEPTH, which need not be a power of two; a counter gives
// full/empty. Writing when full or reading when empty is a usage error and is
// flagged by assertions. The buffer and its place beside the decoder follow
// the decoder block diagram; depth, read latency and reset are this design's.
module sram_fifo #(
  parameter int unsigned WIDTH = 4,
  parameter int unsigned DEPTH = 284
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (rd_en) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
