// vnp -- variable-node processor.
//
// Converts the channel message lambda and the DV check-to-variable messages
// from sign-magnitude to two's complement, adds them in an adder tree to the
// a-posteriori sum, and returns for each edge the extrinsic sum (total minus
// that edge's own message), saturated to +-QMAX and converted back to
// sign-magnitude. The hard decision is the sign of the a-posteriori sum
// (a zero sum decides 0). Structure as drawn in the paper (SM to 2C, adder
// tree, 2C to SM); the rounding rule of the saturation is this design's own.
// Purely combinational.
module vnp
  import ldpccc_pkg::*;
#(
  parameter int DV = 4                       // variable-node degree (= M)
) (
  input  msg_t lambda,
  input  msg_t c2v  [DV],
  output msg_t v2c  [DV],
  output logic hard
);
  localparam int SW = QBITS + $clog2(DV + 1) + 1;   // sum width
  typedef logic signed [SW-1:0] sum_t;

  function automatic sum_t sm2c(msg_t m);
    sum_t v;
    v = sum_t'(m[QMAG-1:0]);
    return m[QBITS-1] ? -v : v;
  endfunction

  function automatic msg_t c2sm(sum_t v);
    sum_t mag;
    mag = (v < 0) ? -v : v;
    if (mag > sum_t'(QMAX)) mag = sum_t'(QMAX);
    return {(v < 0), mag[QMAG-1:0]};
  endfunction

  sum_t term [DV];
  sum_t total;

  always_comb begin
    total = sm2c(lambda);
    for (int k = 0; k < DV; k++) begin
      term[k] = sm2c(c2v[k]);
      total   = total + term[k];
    end
    for (int k = 0; k < DV; k++) v2c[k] = c2sm(total - term[k]);
    hard = (total < 0);
  end
endmodule
