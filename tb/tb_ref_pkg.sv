// tb_ref_pkg -- reference models for the testbenches, written independently
// of the RTL: GF(2^9) products by carry-less multiplication followed by long
// division by x^9 + x^4 + 1, BCH generator polynomials as fixed constants
// (g(x) for t = 1..4, worked out offline as LCMs of minimal polynomials),
// systematic encoding by polynomial long division, and syndromes by direct
// evaluation. Codewords are held as bit vectors indexed by degree.
package tb_ref_pkg;

  typedef bit [8:0]   fe_t;
  typedef bit [511:0] word_t;

  function automatic fe_t ref_mul(fe_t a, fe_t b);
    bit [16:0] p;
    p = '0;
    for (int i = 0; i < 9; i++) if (b[i]) p ^= 17'(a) << i;
    for (int d = 16; d >= 9; d--) if (p[d]) p ^= 17'(10'h211) << (d - 9);
    return p[8:0];
  endfunction

  function automatic fe_t ref_pow(int e);
    fe_t r;
    r = 9'd1;
    e = e % 511;
    if (e < 0) e += 511;
    for (int i = 0; i < e; i++) r = ref_mul(r, 9'd2);
    return r;
  endfunction

  function automatic bit [63:0] ref_gen(int t);
    case (t)
      1: return 64'h211;
      2: return 64'h495c9;
      3: return 64'hd612b79;
      default: return 64'h1cc2b989a1;
    endcase
  endfunction

  function automatic int ref_r(int t);   // parity bits n - k
    return 9 * t;
  endfunction

  // Systematic codeword: message bit j (j = 0 first sent) has degree n-1-j.
  function automatic word_t ref_encode(word_t msg, int k, int t);
    word_t rem, cw;
    bit [63:0] g;
    int r;
    r  = ref_r(t);
    g  = ref_gen(t);
    cw = '0;
    for (int j = 0; j < k; j++) cw[k + r - 1 - j] = msg[j];
    rem = cw;
    for (int d = k + r - 1; d >= r; d--)
      if (rem[d]) for (int i = 0; i <= r; i++) if (g[i]) rem[d - r + i] ^= 1'b1;
    for (int i = 0; i < r; i++) cw[i] = rem[i];
    return cw;
  endfunction

  function automatic fe_t ref_syn(word_t w, int n, int i);
    fe_t s;
    s = '0;
    for (int l = 0; l < n; l++) if (w[l]) s ^= ref_pow(i * l);
    return s;
  endfunction

  // Choose ne distinct positions in [0, n).
  function automatic void ref_positions(int n, int ne, ref int pos[$]);
    int p;
    bit dup;
    pos.delete();
    while (pos.size() < ne) begin
      p = int'($urandom_range(n - 1, 0));
      dup = 0;
      foreach (pos[q]) if (pos[q] == p) dup = 1;
      if (!dup) pos.push_back(p);
    end
  endfunction

endpackage
