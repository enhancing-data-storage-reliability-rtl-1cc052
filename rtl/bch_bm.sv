// bch_bm -- Berlekamp-Massey error-locator solver, one iteration per clock.
//
// From the syndromes S_1..S_2t it finds sigma(x), the polynomial whose roots
// are the inverses of the error positions. The inversionless form is used,
// so no finite-field divider is needed. With sigma = 1, beta = x, gamma = 1,
// L = 0, iteration r = 0..2t-1 computes
//   Delta  = sum_{i=0}^{t} sigma_i * S_(r+1-i)            (S_j = 0 for j < 1)
//   sigma' = gamma * sigma + Delta * beta
//   if Delta != 0 and 2L <= r:  beta' = x*sigma, L' = r+1-L, gamma' = Delta
//   else:                       beta' = x*beta
// The result is sigma scaled by a non-zero constant, which has the same roots.
// Each clock uses a multiplexer (selecting S_(r+1-i)), the multipliers of
// Delta, then those of the update: 3(t+1) gf_mult instances in all.
// Timing: syndromes taken in clock 0, 2t iteration clocks, then out_valid
// holds sigma until out_ready. When in_zero says every syndrome is zero the
// iterations are skipped and sigma = 1 is presented at once (no error).
// The 2t-clock iteration count and the early exit follow the paper; the
// inversionless update, the handshake and reset are this design's choices.
module bch_bm
  import gf_pkg::*;
#(
  parameter int unsigned T = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [2*T-1:0][GF_M-1:0] in_syn,     // in_syn[j-1] = S_j
  input  logic                     in_zero,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [T:0][GF_M-1:0]     out_sigma,  // out_sigma[i] = sigma_i
  output logic [3:0]               out_deg     // L
);

  localparam int unsigned RW = $clog2(2*T + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;

  state_t                   state;
  logic [RW-1:0]            r;
  logic [2*T-1:0][GF_M-1:0] syn;
  gf_t                      sigma [T+1];
  gf_t                      beta  [T+1];
  gf_t                      gamma;
  logic [3:0]               L;

  gf_t  sel   [T+1];   // S_(r+1-i)
  gf_t  dprod [T+1];   // sigma_i * S_(r+1-i)
  gf_t  gprod [T+1];   // gamma * sigma_i
  gf_t  bprod [T+1];   // Delta * beta_i
  gf_t  delta;
  logic do_swap;

  always_comb begin
    for (int i = 0; i <= int'(T); i++) begin
      int idx;
      idx = int'(r) + 1 - i;
      sel[i] = (idx >= 1 && idx <= int'(2*T)) ? syn[idx-1] : gf_t'(0);
    end
  end

  for (genvar i = 0; i <= int'(T); i++) begin : g_mul
    gf_mult u_d (.a(sigma[i]), .b(sel[i]), .p(dprod[i]));
    gf_mult u_g (.a(gamma),    .b(sigma[i]), .p(gprod[i]));
    gf_mult u_b (.a(delta),    .b(beta[i]),  .p(bprod[i]));
  end

  always_comb begin
    delta = '0;
    for (int i = 0; i <= int'(T); i++) delta = delta ^ dprod[i];
    do_swap = (delta != '0) && ({L, 1'b0} <= 5'(r));
  end

  assign in_ready  = (state == S_IDLE) || (state == S_DONE && out_ready);
  assign out_valid = (state == S_DONE);
  assign out_deg   = L;
  always_comb
    for (int i = 0; i <= int'(T); i++) out_sigma[i] = sigma[i];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r     <= '0;
      syn   <= '0;
      gamma <= gf_t'(1);
      L     <= '0;
      for (int i = 0; i <= int'(T); i++) begin
        sigma[i] <= (i == 0) ? gf_t'(1) : gf_t'(0);
        beta[i]  <= (i == 1) ? gf_t'(1) : gf_t'(0);
      end
    end else begin
      case (state)
        S_RUN: begin
          for (int i = 0; i <= int'(T); i++) sigma[i] <= gprod[i] ^ bprod[i];
          if (do_swap) begin
            beta[0] <= '0;
            for (int i = 1; i <= int'(T); i++) beta[i] <= sigma[i-1];
            L     <= 4'(r) + 4'd1 - L;
            gamma <= delta;
          end else begin
            beta[0] <= '0;
            for (int i = 1; i <= int'(T); i++) beta[i] <= beta[i-1];
          end
          r <= r + 1'b1;
          if (r == RW'(2*T - 1)) state <= S_DONE;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: ;
      endcase
      if (in_valid && in_ready) begin
        syn   <= in_syn;
        r     <= '0;
        gamma <= gf_t'(1);
        L     <= '0;
        for (int i = 0; i <= int'(T); i++) begin
          sigma[i] <= (i == 0) ? gf_t'(1) : gf_t'(0);
          beta[i]  <= (i == 1) ? gf_t'(1) : gf_t'(0);
        end
        state <= in_zero ? S_DONE : S_RUN;
      end
    end
  end

endmodule
