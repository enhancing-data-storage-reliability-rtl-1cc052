// xor_share_cmult -- a group of P constant multipliers that share one input,
// built with XOR sharing.
//
// Outputs prod[i] = b * alpha^(J*(i+1)), i = 0..P-1. Every output bit of a
// constant multiplier is an XOR of some input bits; written as a matrix, the
// P*m rows (one per output bit) select columns (input bits). The four-stage
// sharing algorithm is run at elaboration time by the constant function
// cse_run():
//   1-2. count, for every pair of columns, the rows that use both and pick
//        the pair with the most matches;
//   3.   add a new column equal to the XOR of that pair and let those rows
//        use it instead of the two originals;
//   4.   repeat until no pair occurs in more than one row.
// Each added column is one shared XOR gate; each row is then the XOR of its
// remaining columns. Sharing across the whole group (all P products of one
// sigma_j) is the variant the Chien search uses. XOR_COUNT and
// XOR_COUNT_PLAIN report the gate counts with and without sharing.
// Combinational, no clock. The algorithm follows the description of the
// XOR-sharing multiplier; tie-breaking (lowest column indices first) is this
// design's choice.
module xor_share_cmult
  import gf_pkg::*;
#(
  parameter int unsigned J = 1,   // exponent step of the group
  parameter int unsigned P = 4    // number of products
) (
  input  gf_t                    b,
  output logic [P-1:0][GF_M-1:0] prod
);

  localparam int unsigned NR     = P * GF_M;   // rows: output bits
  localparam int unsigned MAXNEW = NR;         // bound on shared XORs
  localparam int unsigned NV     = GF_M + MAXNEW;
  localparam int unsigned RES_W  = NV * NR + MAXNEW * 16 + 16;
  localparam int unsigned IW     = $clog2(NV);     // index width into ext

  typedef logic [NR-1:0] rowset_t;

  // Column sets of the plain (unshared) matrix.
  function automatic logic [NV-1:0][NR-1:0] plain_cols();
    logic [NV-1:0][NR-1:0] col;
    gf_t x;
    col = '0;
    for (int unsigned i = 0; i < P; i++) begin
      x = gf_alpha_pow(J * (i + 1));
      for (int unsigned v = 0; v < GF_M; v++) begin
        for (int unsigned r = 0; r < GF_M; r++)
          if (x[r]) col[v][i*GF_M + r] = 1'b1;
        x = gf_mul_alpha(x);
      end
    end
    return col;
  endfunction

  // Result packing: {column sets, pair list, number of shared XORs}.
  function automatic logic [RES_W-1:0] cse_run();
    logic [NV-1:0][NR-1:0] col;
    logic [MAXNEW-1:0][15:0] pairs;
    int unsigned nv, nnew, best, cnt, ba, bb;
    bit done;
    col   = plain_cols();
    pairs = '0;
    nv    = GF_M;
    nnew  = 0;
    done  = 1'b0;
    for (int unsigned it = 0; it < MAXNEW; it++) begin
      if (!done) begin
        best = 1; ba = 0; bb = 0;
        for (int unsigned a = 0; a < nv; a++)
          for (int unsigned c = a + 1; c < nv; c++) begin
            cnt = $countones(col[a] & col[c]);
            if (cnt > best) begin best = cnt; ba = a; bb = c; end
          end
        if (best < 2) done = 1'b1;
        else begin
          col[nv] = col[ba] & col[bb];
          col[ba] = col[ba] & ~col[nv];
          col[bb] = col[bb] & ~col[nv];
          pairs[nnew] = {8'(ba), 8'(bb)};
          nv++;
          nnew++;
        end
      end
    end
    return {col, pairs, 16'(nnew)};
  endfunction

  localparam logic [RES_W-1:0]        RES   = cse_run();
  localparam int unsigned             NNEW  = int'(RES[15:0]);
  localparam logic [MAXNEW-1:0][15:0] PAIRS = RES[16 +: MAXNEW*16];
  localparam logic [NV-1:0][NR-1:0]   COLS  = RES[16 + MAXNEW*16 +: NV*NR];

  function automatic int unsigned count_xors(logic [NV-1:0][NR-1:0] col, int unsigned extra);
    int unsigned n, k;
    n = extra;
    for (int unsigned r = 0; r < NR; r++) begin
      k = 0;
      for (int unsigned v = 0; v < NV; v++) if (col[v][r]) k++;
      if (k > 1) n += k - 1;
    end
    return n;
  endfunction

  localparam int unsigned XOR_COUNT       = count_xors(COLS, NNEW);
  localparam int unsigned XOR_COUNT_PLAIN = count_xors(plain_cols(), 0);

  logic [NV-1:0] ext;      // input bits followed by the shared XORs
  logic [NR-1:0] flat;

  always_comb begin
    ext = '0;
    ext[GF_M-1:0] = b;
    for (int unsigned k = 0; k < NNEW; k++)
      ext[GF_M + k] = ext[IW'(PAIRS[k][15:8])] ^ ext[IW'(PAIRS[k][7:0])];
    for (int unsigned r = 0; r < NR; r++) begin
      flat[r] = 1'b0;
      for (int unsigned v = 0; v < NV; v++)
        if (COLS[v][r]) flat[r] = flat[r] ^ ext[v];
    end
  end

  always_comb
    for (int unsigned i = 0; i < P; i++) prod[i] = flat[i*GF_M +: GF_M];

endmodule
