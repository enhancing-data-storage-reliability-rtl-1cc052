// bch_chien -- P-parallel Chien search with XOR-shared constant multipliers.
//
// Tests sigma(alpha^-l) = 0 for every codeword position l, P positions per
// clock, in the order the bits leave the FIFO (highest degree first), so the
// error pattern lines up with the stored word beat by beat.
// Position l is tested at exponent e = 511 - l. With BEATS = ceil(n/P) and
// e0 = 511 - P*BEATS, lane i (1..P) of beat b tests e = e0 + b*P + i, and
// maps to beat bit P-i. Register R_j holds sigma_j * alpha^(j*(e0 + b*P)):
// it is loaded with sigma_j * alpha^(j*e0) and each clock multiplied by
// alpha^(j*P). For each j one xor_share_cmult forms R_j * alpha^(j*i),
// i = 1..P: the P lane terms, the last of which is also the register update.
// Each lane adds sigma_0 and its t terms (a t+1 input m-bit adder) and
// compares with zero. Lanes above degree n-1 (the padding of the first beat)
// are masked.
// Timing: sigma is taken when in_valid and in_ready; the next BEATS clocks
// present out_err with out_valid (out_sop on the first, out_eop on the last).
// A new sigma can be taken in the last beat, so words follow back to back.
// The parallel structure and the shared multipliers follow the paper; the
// register preload and the ordering are this design's.
module bch_chien
  import gf_pkg::*;
#(
  parameter int unsigned T = 3,
  parameter int unsigned K = 256,
  parameter int unsigned P = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [T:0][GF_M-1:0] in_sigma,
  output logic                 out_valid,
  output logic                 out_sop,
  output logic                 out_eop,
  output logic [P-1:0]         out_err
);

  localparam int unsigned N     = K + bch_parity_bits(T);
  localparam int unsigned BEATS = (N + P - 1) / P;
  localparam int unsigned E0    = GF_Q - P * BEATS;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  function automatic logic [T:0][GF_M-1:0] init_table();
    for (int unsigned j = 0; j <= T; j++) init_table[j] = gf_alpha_pow(j * E0);
  endfunction
  localparam logic [T:0][GF_M-1:0] INIT = init_table();

  logic                        busy;
  logic [BW-1:0]               beat;
  logic                        last, take;
  gf_t                         s0;
  gf_t                         R    [1:T];
  logic [T:1][P-1:0][GF_M-1:0] prod;
  gf_t                         lane [P];

  for (genvar j = 1; j <= int'(T); j++) begin : g_grp
    xor_share_cmult #(.J(j), .P(P)) u_grp (.b(R[j]), .prod(prod[j]));
  end

  always_comb begin
    for (int unsigned i = 0; i < P; i++) begin
      lane[i] = s0;                                   // lane i tests offset i+1
      for (int unsigned j = 1; j <= T; j++) lane[i] = lane[i] ^ prod[j][i];
    end
    for (int unsigned i = 0; i < P; i++) begin
      // offset i+1 -> beat bit P-1-i, degree P*(BEATS-beat) - 1 - i
      out_err[P-1-i] = (lane[i] == '0) &&
                       !(beat == '0 && (P * BEATS - 1 - i) >= N);
    end
  end

  assign last      = (beat == BW'(BEATS - 1));
  assign in_ready  = !busy || last;
  assign take      = in_valid && in_ready;
  assign out_valid = busy;
  assign out_sop   = busy && (beat == '0);
  assign out_eop   = busy && last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      beat <= '0;
      s0   <= '0;
      for (int unsigned j = 1; j <= T; j++) R[j] <= '0;
    end else if (take) begin
      busy <= 1'b1;
      beat <= '0;
      s0   <= in_sigma[0];
      for (int unsigned j = 1; j <= T; j++) R[j] <= gf_mul(in_sigma[j], INIT[j]);
    end else if (busy) begin
      beat <= last ? '0 : beat + 1'b1;
      if (last) busy <= 1'b0;
      for (int unsigned j = 1; j <= T; j++) R[j] <= prod[j][P-1];
    end
  end

endmodule
