// bch_encoder -- systematic serial BCH encoder (linear feedback shift register).
//
// Computes C(x) = x^(n-k) v(x) + (x^(n-k) v(x) mod g(x)) one bit per clock.
// The register holds the n-k remainder bits; stage i feeds stage i+1 through
// an XOR with the feedback times g_i, the feedback being the incoming message
// bit XOR the last stage.
//   Message phase (k clocks): the feedback path is closed (switch S1) and the
//     message bit goes straight to the output (switch S2 on data).
//   Parity phase (n-k clocks): the feedback is opened, the register shifts
//     its content out, highest degree first (S2 on parity); in_ready is low.
// Interface: in_valid/in_ready/in_bit take the message, highest degree
// first; out_valid/out_sop/out_eop/out_bit give the n codeword bits in the
// same order, in the clock the bit is taken (message) or shifted (parity).
// The bit takes one clock whenever out_valid is high; a codeword takes n
// clocks when the message is supplied without gaps.
// The LFSR structure and the switch roles follow the encoder drawing; g(x)
// comes from gf_pkg::bch_gen_poly; handshake and reset are this design's.
module bch_encoder
  import gf_pkg::*;
#(
  parameter int unsigned T = 3,     // correctable errors
  parameter int unsigned K = 256    // message bits
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic in_bit,
  output logic out_valid,
  output logic out_sop,
  output logic out_eop,
  output logic out_bit
);

  localparam int unsigned R = bch_parity_bits(T);       // n - k
  localparam int unsigned N = K + R;
  localparam gen_poly_t   G = bch_gen_poly(T);
  localparam logic [R-1:0] G_LOW = G[R-1:0];             // g_0 .. g_(n-k-1)
  localparam int unsigned CW = $clog2(N + 1);

  logic [R-1:0]  lfsr;
  logic [CW-1:0] cnt;          // codeword bit index
  logic          parity_phase;
  logic          fb;

  assign parity_phase = (cnt >= CW'(K));
  assign in_ready     = !parity_phase;
  assign fb           = in_bit ^ lfsr[R-1];

  assign out_valid = parity_phase || in_valid;
  assign out_bit   = parity_phase ? lfsr[R-1] : in_bit;
  assign out_sop   = out_valid && (cnt == '0);
  assign out_eop   = out_valid && (cnt == CW'(N - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr <= '0;
      cnt  <= '0;
    end else if (out_valid) begin
      if (parity_phase) lfsr <= {lfsr[R-2:0], 1'b0};                    // S1 open
      else              lfsr <= {lfsr[R-2:0], 1'b0} ^ (fb ? G_LOW : '0); // S1 closed
      cnt <= (cnt == CW'(N - 1)) ? '0 : cnt + 1'b1;
    end
  end

endmodule
