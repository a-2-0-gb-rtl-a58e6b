// ldpccc_pkg -- shared types, constants and elaboration-time functions of the
// QC-LDPC convolutional-code decoder.
//
// Messages are 4-bit sign-magnitude log-likelihood ratios: bit 3 is the sign
// (1 = negative LLR = bit value 1), bits 2:0 the magnitude in units of the
// quantisation step DELTA. The 4-bit width follows the paper; the step size
// itself (found there by density evolution) is not published, so DELTA = 0.5
// is this design's own choice.
//
// The code is built from a QC-LDPC base matrix of NC x NV circulants of size
// Z x Z, unwrapped into a convolutional code with period M = gcd(NC, NV).
// This package assumes M = NC (as in the rate-5/6, 4 x 24 code), so every
// block row holds Z check nodes of degree NV and every variable node has
// degree M. Circulant convention (taken from the printed example matrix):
// check m of a circulant with shift s is connected to variable (m + s) mod Z.
//
// The shift values of the paper's 4 x 24 girth-8 base matrix are not
// published; code_shift() returns a fixed formula for CODE = 0 (a stand-in of
// this design) and the printed 2 x 4, Z = 4 example matrix for CODE = 1.
package ldpccc_pkg;

  localparam int QBITS = 4;                    // message width (paper: 4-bit quantisation)
  localparam int QMAG  = QBITS - 1;            // magnitude bits
  localparam int QMAX  = (1 << QMAG) - 1;      // largest magnitude, 7
  localparam real DELTA = 0.5;                 // quantisation step (assumed)

  typedef logic [QBITS-1:0] msg_t;             // {sign, magnitude}

  // Circulant shift of base-matrix entry (row i, column c).
  function automatic int code_shift(int code, int z, int i, int c);
    int ex [2][4];
    ex = '{'{0, 1, 2, 3}, '{1, 0, 0, 2}};
    if (code == 1) return ex[i % 2][c % 4] % z;
    return (i * (c * c + 7 * c + 1) * 11) % z;
  endfunction

  // Magnitude part of O(a*DELTA, b*DELTA) = Q{2 atanh(tanh(a D/2) tanh(b D/2))}.
  function automatic int o_mag(int a, int b);
    real ta, tb, y, o;
    ta = (1.0 - $exp(-a * DELTA)) / (1.0 + $exp(-a * DELTA));
    tb = (1.0 - $exp(-b * DELTA)) / (1.0 + $exp(-b * DELTA));
    y  = ta * tb;
    if (y >= 0.999999) return QMAX;
    o  = $ln((1.0 + y) / (1.0 - y)) / DELTA;
    if (o > QMAX) return QMAX;
    return int'($floor(o + 0.5));
  endfunction

  // Non-negative modulo.
  function automatic int pmod(int a, int n);
    int r;
    r = a % n;
    return (r < 0) ? r + n : r;
  endfunction

  // A processing group of P = Z/G checks q = 0..P-1 is handled in stage g
  // (checks g*P+q).  A message that sits at check (g*P + q + off) mod Z lives
  // in RAM bank (q + off) mod P at address (g + (q + off mod Z) / P) mod G.
  function automatic int grp_ram(int q, int off, int z, int p);
    return (q + pmod(off, z)) % p;
  endfunction
  function automatic int grp_addr_off(int q, int off, int z, int p);
    return (q + pmod(off, z)) / p;
  endfunction
  // Inverse: which group member q reaches RAM bank pb for offset off.
  function automatic int grp_member(int pb, int off, int z, int p);
    return pmod(pb - pmod(off, z), p);
  endfunction

endpackage
