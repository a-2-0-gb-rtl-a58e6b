// ldpccc_ref -- behavioural reference of pipelined LDPC-convolutional decoding
// for one codeword stream, written directly from the message-passing
// equations with natural (row, check, edge) indexing, independent of the
// decoder's RAM layout and address offsets.
//
// At local step tau: variable set tau enters (channel LLRs in lam_in);
// processor l updates the Z checks of block row R = tau-1-l*M with the
// pairwise-extrinsic rule, then the variables of set R-M+1 (all M of their
// check messages are then current) and hands their variable-to-check
// messages and channel LLR to processor l+1. The last processor's
// a-posteriori signs are left in hard_out. Messages live in arrays indexed by
// row modulo K; everything starts at zero.
module ldpccc_ref
  import ldpccc_pkg::*;
#(
  parameter int Z     = 4,
  parameter int NC    = 2,
  parameter int NV    = 4,
  parameter int NPROC = 3,
  parameter int CODE  = 1,
  localparam int M  = NC,
  localparam int CB = NV / M,
  localparam int K  = 4 * M
);
  byte v2c [NPROC+1][K][Z][NV];
  byte c2v [NPROC][K][Z][NV];
  byte lam [NPROC+1][K][CB*Z];
  byte lam_in  [CB*Z];
  bit  hard_out [CB*Z];
  byte otab [8][8];

  // O(a, b) on magnitudes, from tanh / atanh (the decoder uses exp / ln).
  initial begin
    for (int a = 0; a < 8; a++)
      for (int b = 0; b < 8; b++) begin
        real y, o;
        y = $tanh(a * DELTA / 2.0) * $tanh(b * DELTA / 2.0);
        if (y > 0.999999) o = 7.0; else o = 2.0 * $atanh(y) / DELTA;
        if (o > 7.0) o = 7.0;
        otab[a][b] = byte'(int'($floor(o + 0.5)));
      end
    foreach (v2c[a, b, c, d]) v2c[a][b][c][d] = 0;
    foreach (c2v[a, b, c, d]) c2v[a][b][c][d] = 0;
    foreach (lam[a, b, c]) lam[a][b][c] = 0;
  end

  function automatic byte op(byte x, byte y);       // sign-magnitude O()
    return byte'(((x ^ y) & 8) | otab[x & 7][y & 7]);
  endfunction
  function automatic int tc(byte x);
    return (x & 8) ? -(x & 7) : (x & 7);
  endfunction
  function automatic byte sm(int v);
    int a;
    a = (v < 0) ? -v : v;
    if (a > 7) a = 7;
    return byte'(((v < 0) ? 8 : 0) | a);
  endfunction
  function automatic int md(int a, int n);
    return ((a % n) + n) % n;
  endfunction

  task automatic step(int tau);
    byte s [NV];
    byte f [NV];
    byte bk [NV];
    for (int l = 0; l < NPROC; l++) begin
      int r, i, sset;
      r = tau - 1 - l * M;
      i = md(r, M);
      for (int m = 0; m < Z; m++) begin
        for (int e = 0; e < NV; e++) s[e] = v2c[l][md(r, K)][m][e];
        f[0] = s[0];
        for (int e = 1; e < NV; e++) f[e] = op(f[e-1], s[e]);
        bk[NV-1] = s[NV-1];
        for (int e = NV - 2; e >= 0; e--) bk[e] = op(bk[e+1], s[e]);
        for (int e = 0; e < NV; e++)
          c2v[l][md(r, K)][m][e] = (e == 0) ? bk[1] : (e == NV - 1) ? f[NV-2] : op(f[e-1], bk[e+1]);
      end
      sset = r - M + 1;
      for (int cb = 0; cb < CB; cb++)
        for (int x = 0; x < Z; x++) begin
          int col, tot, mm [M];
          col = md(sset, M) * CB + cb;
          tot = tc(lam[l][md(sset, K)][cb*Z+x]);
          for (int k = 0; k < M; k++) begin
            mm[k] = md(x - code_shift(CODE, Z, md(sset + k, M), col), Z);
            tot += tc(c2v[l][md(sset + k, K)][mm[k]][col]);
          end
          for (int k = 0; k < M; k++)
            v2c[l+1][md(sset + k, K)][mm[k]][col] = sm(tot - tc(c2v[l][md(sset + k, K)][mm[k]][col]));
          lam[l+1][md(sset, K)][cb*Z+x] = lam[l][md(sset, K)][cb*Z+x];
          if (l == NPROC - 1) hard_out[cb*Z+x] = (tot < 0);
        end
    end
    for (int cb = 0; cb < CB; cb++)
      for (int x = 0; x < Z; x++) begin
        int col;
        col = md(tau, M) * CB + cb;
        for (int k = 0; k < M; k++)
          v2c[0][md(tau + k, K)][md(x - code_shift(CODE, Z, md(tau + k, M), col), Z)][col] = lam_in[cb*Z+x];
        lam[0][md(tau, K)][cb*Z+x] = lam_in[cb*Z+x];
      end
  endtask
endmodule
