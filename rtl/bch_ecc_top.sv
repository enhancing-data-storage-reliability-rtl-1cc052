// bch_ecc_top -- ECC block of a NOR-flash controller: BCH(n, k=256, t=3)
// over GF(2^9).
//
// Write path: the serial LFSR encoder turns k message bits into an n-bit
// systematic codeword (message first, then n-k parity bits) for the flash
// page. Read path: the page comes back as ceil(n/P)-beat words of P bits and
// the pipelined parallel decoder corrects up to t bit errors per word. The
// two paths are independent and can run at the same time. The flash array
// itself is outside this block and connects through the enc_out_* and dec_in_*
// ports. Timing of each path is described in bch_encoder and bch_decoder.
module bch_ecc_top
  import gf_pkg::*;
#(
  parameter int unsigned T = 3,
  parameter int unsigned K = 256,
  parameter int unsigned P = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  // write path: message in, codeword out to the flash page
  input  logic         enc_in_valid,
  output logic         enc_in_ready,
  input  logic         enc_in_bit,
  output logic         enc_out_valid,
  output logic         enc_out_sop,
  output logic         enc_out_eop,
  output logic         enc_out_bit,
  // read path: page beats in from the flash, corrected beats out
  input  logic         dec_in_valid,
  output logic         dec_in_ready,
  input  logic [P-1:0] dec_in_data,
  output logic         dec_out_valid,
  output logic         dec_out_sop,
  output logic         dec_out_eop,
  output logic [P-1:0] dec_out_data,
  output logic [7:0]   dec_out_nerr
);

  bch_encoder #(.T(T), .K(K)) u_enc (
    .clk, .rst_n,
    .in_valid(enc_in_valid), .in_ready(enc_in_ready), .in_bit(enc_in_bit),
    .out_valid(enc_out_valid), .out_sop(enc_out_sop), .out_eop(enc_out_eop), .out_bit(enc_out_bit)
  );

  bch_decoder #(.T(T), .K(K), .P(P)) u_dec (
    .clk, .rst_n,
    .in_valid(dec_in_valid), .in_ready(dec_in_ready), .in_data(dec_in_data),
    .out_valid(dec_out_valid), .out_sop(dec_out_sop), .out_eop(dec_out_eop),
    .out_data(dec_out_data), .out_nerr(dec_out_nerr)
  );

endmodule
