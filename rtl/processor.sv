// processor -- one decoding iteration: M dedicated BPUs working on one lane of
// the combined message memory.
//
// BPU b always serves block row b. In a step, codeword bank w works on block
// row blk[w]; the processor connects each bank to the BPU of that block row
// (with NCW = M banks every BPU is busy, each on another codeword, which is the
// paper's multi-codeword pipeline; with NCW = 1 only BPU blk[0] does useful
// work). rd / cm_rd are this processor's lane of every bank's read data;
// wr / cm_wr are the lane's write data for every bank. v2c_prev / lam_prev
// come from the same BPU of the previous processor, v2c_out / lam_out / hard
// go to the next one. Purely combinational.
module processor
  import ldpccc_pkg::*;
#(
  parameter int Z    = 512,
  parameter int G    = 512,
  parameter int NC   = 4,
  parameter int NV   = 24,
  parameter int NCW  = 4,
  parameter int CODE = 0,
  localparam int M  = NC,
  localparam int P  = Z / G,
  localparam int CB = NV / M,
  localparam int BW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [BW-1:0] blk      [NCW],
  input  msg_t          rd       [NCW][M][NV][P],
  input  msg_t          cm_rd    [NCW][NV][P],
  input  msg_t          v2c_prev [M][CB][P][M],
  input  msg_t          lam_prev [M][CB][P],
  output msg_t          wr       [NCW][M][NV][P],
  output msg_t          cm_wr    [NCW][NV][P],
  output msg_t          v2c_out  [M][CB][P][M],
  output msg_t          lam_out  [M][CB][P],
  output logic          hard     [M][CB][P]
);
  msg_t b_rd    [M][M][NV][P];
  msg_t b_cm_rd [M][NV][P];
  msg_t b_wr    [M][M][NV][P];
  msg_t b_cm_wr [M][NV][P];

  // Bank that BPU b serves in this step (bank 0 when none does).
  function automatic int bank_of(int b, logic [BW-1:0] bl [NCW]);
    for (int w = 0; w < NCW; w++) if (int'(bl[w]) == b) return w;
    return 0;
  endfunction

  for (genvar b = 0; b < M; b++) begin : g_bpu
    always_comb begin
      b_rd[b]    = rd[bank_of(b, blk)];
      b_cm_rd[b] = cm_rd[bank_of(b, blk)];
    end
    bpu #(.Z(Z), .G(G), .NC(NC), .NV(NV), .CODE(CODE), .B(b)) u_bpu (
      .rd(b_rd[b]), .cm_rd(b_cm_rd[b]),
      .v2c_prev(v2c_prev[b]), .lam_prev(lam_prev[b]),
      .wr(b_wr[b]), .cm_wr(b_cm_wr[b]),
      .v2c_out(v2c_out[b]), .lam_out(lam_out[b]), .hard(hard[b])
    );
  end

  always_comb begin
    for (int w = 0; w < NCW; w++) begin
      wr[w]    = b_wr[blk[w]];
      cm_wr[w] = b_cm_wr[blk[w]];
    end
  end
endmodule
