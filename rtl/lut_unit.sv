// lut_unit -- one look-up-table unit of the check-node LUT tree.
//
// Computes O(i, j) = Q{2 atanh(tanh(i/2) tanh(j/2))} for two 4-bit
// sign-magnitude messages. The paper realises O as a 2^8-entry LUT on the two
// 4-bit inputs; here the same table is split into its exact parts: the output
// sign is the XOR of the input signs and the magnitude comes from a 64-entry
// table over the two 3-bit magnitudes, computed at elaboration from the
// formula with the step DELTA of ldpccc_pkg. Purely combinational.
module lut_unit
  import ldpccc_pkg::*;
(
  input  msg_t a,
  input  msg_t b,
  output msg_t o
);
  typedef logic [QMAG-1:0] tab_t [(1 << (2 * QMAG))];

  function automatic tab_t build_table();
    tab_t t;
    for (int i = 0; i <= QMAX; i++)
      for (int j = 0; j <= QMAX; j++)
        t[(i << QMAG) | j] = QMAG'(o_mag(i, j));
    return t;
  endfunction

  localparam tab_t MAG_TABLE = build_table();

  always_comb begin
    o[QBITS-1]  = a[QBITS-1] ^ b[QBITS-1];
    o[QMAG-1:0] = MAG_TABLE[{a[QMAG-1:0], b[QMAG-1:0]}];
  end
endmodule
