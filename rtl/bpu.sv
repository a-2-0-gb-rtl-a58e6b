// bpu -- block processing unit for block row B of one processor.
//
// A BPU is dedicated to one block row of the base matrix, so all of its
// wiring to the message RAMs is fixed (no switch network). In each stage it
//   * feeds the P check nodes g*P+q (q = 0..P-1) of its block row to P CNPs,
//     reading all NV edge messages from RAMs (B, col, q);
//   * passes, for each CNP, the CB = NV/M new check-to-variable messages that
//     go to the variables leaving the processor (column block (B+1) mod M)
//     to CB VNPs, which also take the variables' other M-1 check-to-variable
//     messages and the channel message from the RAMs;
//   * hands the VNP results (all M variable-to-check messages and the channel
//     message) to the next processor and the hard decisions out;
//   * forms the write data of its processor's lane: the CNP results go back to
//     where they were read, except at the leaving variables' slots, which
//     receive the previous processor's variable-to-check messages (the
//     paper's combined shift-and-write).
// Inputs rd/cm_rd are this processor's lane of the RAM read data; v2c_prev /
// lam_prev are the previous processor's VNP outputs (or the channel input) in
// the same (cb, q) order. Purely combinational: RAM read data in, RAM write
// data out in the same cycle.
// Many wr entries are constant zero by construction. This BPU only writes its
// own block row's C2V messages and the V2C messages of the column block
// entering that row; every other edge slot of its lane is cleared for reuse.
// A synthesis tool therefore sees those outputs as constants.
module bpu
  import ldpccc_pkg::*;
#(
  parameter int Z    = 512,
  parameter int G    = 512,
  parameter int NC   = 4,
  parameter int NV   = 24,
  parameter int CODE = 0,
  parameter int B    = 0,                    // block row served by this BPU
  localparam int M  = NC,
  localparam int P  = Z / G,
  localparam int CB = NV / M
) (
  input  msg_t rd       [M][NV][P],
  input  msg_t cm_rd    [NV][P],
  input  msg_t v2c_prev [CB][P][M],
  input  msg_t lam_prev [CB][P],
  output msg_t wr       [M][NV][P],
  output msg_t cm_wr    [NV][P],
  output msg_t v2c_out  [CB][P][M],
  output msg_t lam_out  [CB][P],
  output logic hard     [CB][P]
);
  localparam int JL = (B + 1) % M;           // column block of leaving variables

  msg_t c2v [P][NV];

  for (genvar q = 0; q < P; q++) begin : g_cnp
    msg_t s [NV];
    for (genvar col = 0; col < NV; col++) begin : g_in
      assign s[col] = rd[B][col][q];
    end
    cnp #(.D(NV)) u_cnp (.s(s), .alpha(c2v[q]));
  end

  for (genvar cb = 0; cb < CB; cb++) begin : g_vn
    localparam int COL = JL * CB + cb;
    localparam int SB  = code_shift(CODE, Z, B, COL);
    for (genvar q = 0; q < P; q++) begin : g_grp
      msg_t vin [M];
      msg_t vout [M];
      msg_t lam;
      for (genvar k = 0; k < M; k++) begin : g_edge
        localparam int R  = (B + 1 + k) % M;
        localparam int PB = grp_ram(q, SB - code_shift(CODE, Z, R, COL), Z, P);
        if (k == M - 1) begin : g_new
          assign vin[k] = c2v[q][COL];
        end else begin : g_old
          assign vin[k] = rd[R][COL][PB];
        end
        assign v2c_out[cb][q][k] = vout[k];
      end
      assign lam = cm_rd[COL][grp_ram(q, SB, Z, P)];
      assign lam_out[cb][q] = lam;
      vnp #(.DV(M)) u_vnp (
        .lambda(lam), .c2v(vin), .v2c(vout), .hard(hard[cb][q])
      );
    end
  end

  // Write data of this lane.
  for (genvar r = 0; r < M; r++) begin : g_wr_row
    for (genvar col = 0; col < NV; col++) begin : g_wr_col
      localparam int KP = (r - B - 1 + 2 * M) % M;     // edge index k' of row r
      localparam int SD = code_shift(CODE, Z, B, col) - code_shift(CODE, Z, r, col);
      for (genvar pb = 0; pb < P; pb++) begin : g_wr_grp
        if (col / CB == JL) begin : g_vn_slot
          assign wr[r][col][pb] = v2c_prev[col % CB][grp_member(pb, SD, Z, P)][KP];
        end else if (r == B) begin : g_cn_slot
          assign wr[r][col][pb] = c2v[pb][col];
        end else begin : g_idle
          assign wr[r][col][pb] = '0;
        end
      end
    end
  end

  for (genvar col = 0; col < NV; col++) begin : g_cm_wr
    localparam int SC = code_shift(CODE, Z, B, col);
    for (genvar pb = 0; pb < P; pb++) begin : g_grp
      if (col / CB == JL) begin : g_used
        assign cm_wr[col][pb] = lam_prev[col % CB][grp_member(pb, SC, Z, P)];
      end else begin : g_idle
        assign cm_wr[col][pb] = '0;
      end
    end
  end
endmodule
