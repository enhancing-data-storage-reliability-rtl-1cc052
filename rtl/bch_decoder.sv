// bch_decoder -- pipelined, P-parallel BCH decoder.
//
// Three stages work on three successive words at once:
//   syndrome  (ceil(n/P) clocks)  ->  Berlekamp-Massey (2t clocks)
//   ->  Chien search (ceil(n/P) clocks)  ->  XOR corrector.
// The received beats are written to an SRAM FIFO as they arrive and read back
// in step with the Chien search, so the corrected word leaves in the order it
// came in. Stages hand over through valid/ready; a stage holds its result
// until the next one is free. Because the BM stage needs only 2t clocks, the
// syndrome stage can take a new word straight after the last, and a word is
// accepted every ceil(n/P) clocks (ceil(n/P) + 2t + ceil(n/P) for one word
// alone). The input is held back (in_ready low) only when ceil(n/P) is
// shorter than the BM time, or the FIFO is full.
// Latency: the first corrected beat leaves ceil(n/P) + 2t + 4 clocks after the
// first received beat is taken; 2t clocks sooner when the syndrome is all
// zero, since the BM stage is then skipped.
// Interface: in_valid/in_ready/in_data take beats of P bits, highest degree
// first, the first beat led by ceil(n/P)*P - n zeros. out_valid/out_sop/
// out_eop/out_data give the corrected beats in the same layout; out_nerr is
// the number of bits corrected in the word, valid with out_eop. There is no
// output back-pressure.
// Stage structure and the overlap follow the paper; handshakes, FIFO depth
// and reset are this design's.
module bch_decoder
  import gf_pkg::*;
#(
  parameter int unsigned T = 3,
  parameter int unsigned K = 256,
  parameter int unsigned P = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [P-1:0] in_data,
  output logic         out_valid,
  output logic         out_sop,
  output logic         out_eop,
  output logic [P-1:0] out_data,
  output logic [7:0]   out_nerr
);

  localparam int unsigned N          = K + bch_parity_bits(T);
  localparam int unsigned BEATS      = (N + P - 1) / P;
  localparam int unsigned FIFO_DEPTH = 4 * BEATS;

  logic                     syn_in_ready, fifo_full, fifo_empty;
  logic                     syn_valid, syn_ready, syn_zero;
  logic [2*T-1:0][GF_M-1:0] syn;
  logic                     sig_valid, sig_ready;
  logic [T:0][GF_M-1:0]     sigma;
  logic [3:0]               sig_deg;   // locator degree; not used by this decoder
  logic                     err_valid, err_sop, err_eop;
  logic [P-1:0]             err, fifo_data;

  assign in_ready = syn_in_ready && !fifo_full;

  bch_syndrome #(.T(T), .K(K), .P(P)) u_syn (
    .clk, .rst_n,
    .in_valid (in_valid && !fifo_full), .in_ready (syn_in_ready), .in_data,
    .out_valid(syn_valid), .out_ready(syn_ready), .out_syn(syn), .out_zero(syn_zero)
  );

  sram_fifo #(.WIDTH(P), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(in_valid && in_ready), .wr_data(in_data), .full(fifo_full),
    .rd_en(err_valid), .rd_data(fifo_data), .empty(fifo_empty)
  );

  bch_bm #(.T(T)) u_bm (
    .clk, .rst_n,
    .in_valid(syn_valid), .in_ready(syn_ready), .in_syn(syn), .in_zero(syn_zero),
    .out_valid(sig_valid), .out_ready(sig_ready), .out_sigma(sigma), .out_deg(sig_deg)
  );

  bch_chien #(.T(T), .K(K), .P(P)) u_chien (
    .clk, .rst_n,
    .in_valid(sig_valid), .in_ready(sig_ready), .in_sigma(sigma),
    .out_valid(err_valid), .out_sop(err_sop), .out_eop(err_eop), .out_err(err)
  );

  bch_corrector #(.P(P)) u_cor (
    .clk, .rst_n,
    .err_valid, .err_sop, .err_eop, .err, .fifo_data,
    .out_valid, .out_sop, .out_eop, .out_data, .out_nerr
  );

  // The FIFO always holds the beats the Chien search is about to correct.
  a_fifo_ready: assert property (@(posedge clk) disable iff (!rst_n) err_valid |-> !fifo_empty);

endmodule
