// tb_util_pkg -- independent reference arithmetic for the unit testbenches:
// the pairwise check operation from tanh / atanh, the check-node extrinsic
// rule written as plain left-to-right and right-to-left folds, and the
// variable-node sums.
package tb_util_pkg;
  import ldpccc_pkg::*;

  function automatic int o_ref(int a, int b);           // magnitudes 0..7
    real y, o;
    y = $tanh(a * DELTA / 2.0) * $tanh(b * DELTA / 2.0);
    if (y > 0.999999) return 7;
    o = 2.0 * $atanh(y) / DELTA;
    if (o > 7.0) o = 7.0;
    return int'($floor(o + 0.5));
  endfunction

  function automatic msg_t op_ref(msg_t x, msg_t y);
    return msg_t'({x[3] ^ y[3], 3'(o_ref(int'(x[2:0]), int'(y[2:0])))});
  endfunction

  // alpha_i = O(s_{i-}, s_{i+}); s_{i-} folds s_1..s_{i-1} from the left,
  // s_{i+} folds s_d..s_{i+1} from the right.
  function automatic msg_t cnp_ref(msg_t s [], int i);
    msg_t lo, hi;
    int d;
    d = s.size();
    if (i > 0) begin lo = s[0]; for (int k = 1; k < i; k++) lo = op_ref(lo, s[k]); end
    if (i < d - 1) begin hi = s[d-1]; for (int k = d - 2; k > i; k--) hi = op_ref(hi, s[k]); end
    if (i == 0) return hi;
    if (i == d - 1) return lo;
    return op_ref(lo, hi);
  endfunction

  function automatic int to_int(msg_t m);
    return m[3] ? -int'(m[2:0]) : int'(m[2:0]);
  endfunction
  function automatic msg_t to_sm(int v);
    int a;
    a = (v < 0) ? -v : v;
    if (a > 7) a = 7;
    return msg_t'({v < 0, 3'(a)});
  endfunction
endpackage
