// bch_syndrome -- P-parallel syndrome generator S_i = r(alpha^i), 1 <= i <= 2t.
//
// The received word arrives as ceil(n/P) beats of P bits, highest degree
// first; bit P-1 of a beat is its highest degree. Because n need not be a
// multiple of P, the first beat starts with ceil(n/P)*P - n zero bits, the
// shortening zeros, which do not change r(alpha^i). Only the t odd syndromes
// have accumulators. Per beat, by Horner's rule,
//   S_i <- S_i * alpha^(i*P) + sum_{j=0}^{P-1} d_j * alpha^(i*j)
// (d_j = beat bit j), so a word takes ceil(n/P) clocks instead of n. The even
// syndromes follow from S_2i = S_i^2 through squaring circuits (XOR-only
// networks) as the result is stored.
// Handshake: in_valid/in_ready per beat. The result register is loaded on the
// last beat of a word; out_valid holds it until out_ready. Only that last
// beat can be held back (in_ready low), when the previous result has not been
// taken yet. out_zero flags an all-zero syndrome: the word has no error.
// Parallel accumulation and the squaring of even syndromes follow the paper;
// the padding, handshake and reset are this design's.
module bch_syndrome
  import gf_pkg::*;
#(
  parameter int unsigned T = 3,
  parameter int unsigned K = 256,
  parameter int unsigned P = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [P-1:0]              in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [2*T-1:0][GF_M-1:0]  out_syn,    // out_syn[i-1] = S_i
  output logic                      out_zero
);

  localparam int unsigned N     = K + bch_parity_bits(T);
  localparam int unsigned BEATS = (N + P - 1) / P;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  // Constant tables: STEP[h] = alpha^((2h+1)P), TAB[h][j] = alpha^((2h+1)j).
  function automatic logic [T-1:0][GF_M-1:0] step_table();
    for (int unsigned h = 0; h < T; h++) step_table[h] = gf_alpha_pow((2*h + 1) * P);
  endfunction
  function automatic logic [T-1:0][P-1:0][GF_M-1:0] tap_table();
    for (int unsigned h = 0; h < T; h++)
      for (int unsigned j = 0; j < P; j++) tap_table[h][j] = gf_alpha_pow((2*h + 1) * j);
  endfunction
  localparam logic [T-1:0][GF_M-1:0]        STEP = step_table();
  localparam logic [T-1:0][P-1:0][GF_M-1:0] TAB  = tap_table();

  logic [BW-1:0] beat;
  gf_t           acc  [T];          // acc[h] accumulates S_(2h+1)
  gf_t           nxt  [T];
  logic          last, take;
  logic [2*T-1:0][GF_M-1:0] full_syn;
  logic          all_zero;

  assign last     = (beat == BW'(BEATS - 1));
  assign in_ready = !(last && out_valid && !out_ready);
  assign take     = in_valid && in_ready;

  // Horner step for the odd syndromes: constant multiplier plus the taps.
  gf_t held [T];     // accumulator, or zero on the first beat of a word
  gf_t scaled [T];   // held * alpha^((2h+1)P)
  for (genvar h = 0; h < int'(T); h++) begin : g_odd
    assign held[h] = (beat == '0) ? gf_t'(0) : acc[h];
    gf_mult u_step (.a(held[h]), .b(STEP[h]), .p(scaled[h]));
  end

  always_comb begin
    for (int unsigned h = 0; h < T; h++) begin
      nxt[h] = scaled[h];
      for (int unsigned j = 0; j < P; j++)
        if (in_data[j]) nxt[h] = nxt[h] ^ TAB[h][j];
    end
  end

  // Odd syndromes from the accumulators, even ones by squaring circuits.
  for (genvar i = 1; i <= int'(2*T); i++) begin : g_syn
    if (i % 2 == 1) begin : g_o
      assign full_syn[i-1] = nxt[(i-1)/2];
    end else begin : g_e
      gf_mult u_sq (.a(full_syn[i/2 - 1]), .b(full_syn[i/2 - 1]), .p(full_syn[i-1]));
    end
  end

  always_comb begin
    all_zero = 1'b1;
    for (int unsigned h = 0; h < T; h++)
      if (nxt[h] != '0) all_zero = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      beat      <= '0;
      out_valid <= 1'b0;
      out_syn   <= '0;
      out_zero  <= 1'b0;
      for (int unsigned h = 0; h < T; h++) acc[h] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        for (int unsigned h = 0; h < T; h++) acc[h] <= nxt[h];
        beat <= last ? '0 : beat + 1'b1;
        if (last) begin
          out_valid <= 1'b1;
          out_syn   <= full_syn;
          out_zero  <= all_zero;
        end
      end
    end
  end

endmodule
