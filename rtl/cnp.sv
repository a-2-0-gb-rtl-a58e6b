// cnp -- check-node processor built as a tree of LUT units.
//
// For a check node of degree D with inputs s[0..D-1] (variable-to-check
// messages, sign-magnitude) every output alpha[k] excludes its own input:
//   alpha[k] = O(fwd[k-1], bwd[k+1]),  alpha[0] = bwd[1], alpha[D-1] = fwd[D-2]
// where fwd[k] = O(fwd[k-1], s[k]) runs from s[0] upwards and bwd[k] =
// O(bwd[k+1], s[k]) from s[D-1] downwards, the pairing order the paper gives
// for s_{i-} and s_{i+}. This uses 3D-6 LUT units, the count the paper's
// tree drawing shows (its text counts 2D). Purely combinational; the decoder
// registers around it.
module cnp
  import ldpccc_pkg::*;
#(
  parameter int D = 24                      // check-node degree (paper: d_c = 24)
) (
  input  msg_t s     [D],
  output msg_t alpha [D]
);
  // fwd / bwd chains, one generate block per element.
  for (genvar k = 0; k < D - 1; k++) begin : g_fwd
    msg_t v;
    if (k == 0) begin : g_first
      assign v = s[0];
    end else begin : g_next
      lut_unit u_lut (.a(g_fwd[k-1].v), .b(s[k]), .o(v));
    end
  end
  for (genvar k = D - 1; k > 0; k--) begin : g_bwd
    msg_t v;
    if (k == D - 1) begin : g_first
      assign v = s[D-1];
    end else begin : g_next
      lut_unit u_lut (.a(g_bwd[k+1].v), .b(s[k]), .o(v));
    end
  end

  assign alpha[0]   = g_bwd[1].v;
  assign alpha[D-1] = g_fwd[D-2].v;
  for (genvar k = 1; k < D - 1; k++) begin : g_out
    lut_unit u_ext (.a(g_fwd[k-1].v), .b(g_bwd[k+1].v), .o(alpha[k]));
  end
endmodule
