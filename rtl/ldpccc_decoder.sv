// ldpccc_decoder -- pipelined decoder for QC-LDPC convolutional codes.
//
// I = NPROC processors in series, one per decoding iteration, each made of
// M = NC dedicated BPUs. The processors' message RAMs are combined into NCW
// banks (one per codeword in flight) whose words carry one 4-bit lane per
// processor, so one address counter serves all processors. Each decoding step
// takes G + GAP cycles: in stage g the active BPU of every processor updates
// checks g*P..g*P+P-1 (P = Z/G) of its block row, updates the variables that
// leave the processor through those checks, and writes the results into the
// next processor's lane of the same RAM words.
//
// Channel interface (per bank w, in every write cycle, ch_valid = 1): the
// decoder names with ch_set[w] (the index of the variable set, a block of
// CB*Z = Z*NV/M variables, entering in this step; bank w runs w steps behind
// bank 0, so ch_set[w] = step - w) and ch_pos[w][cb][q] (position within the
// set, cb*Z + x) the CB*P channel LLRs it takes in this cycle; ch_llr must
// give them in the same cycle, 4-bit sign-magnitude. The order within a set
// follows the code's circulants, so a source normally sits behind a small
// buffer addressed by ch_pos. Output (dec_valid, dec_set, dec_pos, dec_bit)
// gives hard decisions in the same way, for the set that leaves the last
// processor, NPROC*M steps after it entered: dec_set = ch_set - NPROC*M.
// en is sampled at step boundaries: while it is low the decoder stalls.
// ready goes high once the RAMs are cleared after reset (G cycles).
//
// Follows the paper: processor/BPU structure, CNP LUT tree, VNP adder tree,
// combined RAMs, shift-and-write schedule, multi-codeword pipeline, default
// sizes of the z = 512, I = 18, four-codeword code. This design's own choices:
// the stand-in base-matrix shifts, DELTA, GAP = 1, the zero clear after reset,
// and the channel/decision port protocol.
//
// Lint notes: step_start of the controller is left open (the top needs only
// the write-cycle signals), and the last processor's v2c_o/lam_o have no
// next processor to feed, so they are unused by design; only its hard
// decisions leave the chip.
module ldpccc_decoder
  import ldpccc_pkg::*;
#(
  parameter int Z     = 512,                 // circulant size z
  parameter int G     = 512,                 // stages per step
  parameter int NC    = 4,                   // base-matrix rows, = M
  parameter int NV    = 24,                  // base-matrix columns
  parameter int NPROC = 18,                  // processors = iterations I
  parameter int NCW   = 4,                   // codewords in flight (1 or M)
  parameter int GAP   = 1,                   // idle cycles per step
  parameter int CODE  = 0,                   // base-matrix shift table
  localparam int M  = NC,
  localparam int P  = Z / G,
  localparam int CB = NV / M,
  localparam int W  = NPROC * QBITS,
  localparam int GW = (G > 1) ? $clog2(G) : 1,
  localparam int BW = (M > 1) ? $clog2(M) : 1,
  localparam int PW = $clog2(CB * Z)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  output logic                ready,
  output logic                stalled,
  output logic                ch_valid,
  output logic signed [31:0]  ch_set  [NCW],
  output logic [PW-1:0]       ch_pos  [NCW][CB][P],
  input  msg_t                ch_llr  [NCW][CB][P],
  output logic                dec_valid,
  output logic signed [31:0]  dec_set [NCW],
  output logic [PW-1:0]       dec_pos [NCW][CB][P],
  output logic                dec_bit [NCW][CB][P]
);
  logic          clr, rd_en, wr_en;
  logic [GW-1:0] clr_addr, rd_g, wr_g;
  logic [BW-1:0] rd_blk [NCW];
  logic [BW-1:0] wr_blk [NCW];
  logic [31:0]   wr_step;

  addr_ctrl #(.G(G), .M(M), .NCW(NCW), .GAP(GAP)) u_ctrl (
    .clk, .rst_n, .en, .clr, .clr_addr, .rd_en, .rd_g, .rd_blk,
    .wr_en, .wr_g, .wr_blk, .wr_step, .step_start(), .stalled
  );

  // Bank memories (full words) and their per-lane views.
  logic [W-1:0] bk_rdata    [NCW][M][NV][P];
  logic [W-1:0] bk_cm_rdata [NCW][NV][P];
  logic [W-1:0] bk_wdata    [NCW][M][NV][P];
  logic [W-1:0] bk_cm_wdata [NCW][NV][P];

  msg_t l_rd    [NPROC][NCW][M][NV][P];
  msg_t l_cm_rd [NPROC][NCW][NV][P];
  msg_t l_wr    [NPROC][NCW][M][NV][P];
  msg_t l_cm_wr [NPROC][NCW][NV][P];

  for (genvar w = 0; w < NCW; w++) begin : g_bank
    msg_bank #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .CODE(CODE)) u_bank (
      .clk, .clr, .clr_addr,
      .rd_en, .rd_g, .rd_blk(rd_blk[w]),
      .wr_en, .wr_g, .wr_blk(wr_blk[w]),
      .wdata(bk_wdata[w]), .cm_wdata(bk_cm_wdata[w]),
      .rdata(bk_rdata[w]), .cm_rdata(bk_cm_rdata[w])
    );
  end

  always_comb begin
    for (int l = 0; l < NPROC; l++)
      for (int w = 0; w < NCW; w++) begin
        for (int r = 0; r < M; r++)
          for (int c = 0; c < NV; c++)
            for (int p = 0; p < P; p++)
              l_rd[l][w][r][c][p] = bk_rdata[w][r][c][p][l*QBITS +: QBITS];
        for (int c = 0; c < NV; c++)
          for (int p = 0; p < P; p++)
            l_cm_rd[l][w][c][p] = bk_cm_rdata[w][c][p][l*QBITS +: QBITS];
      end
  end

  always_comb begin
    for (int l = 0; l < NPROC; l++)
      for (int w = 0; w < NCW; w++) begin
        for (int r = 0; r < M; r++)
          for (int c = 0; c < NV; c++)
            for (int p = 0; p < P; p++)
              bk_wdata[w][r][c][p][l*QBITS +: QBITS] = l_wr[l][w][r][c][p];
        for (int c = 0; c < NV; c++)
          for (int p = 0; p < P; p++)
            bk_cm_wdata[w][c][p][l*QBITS +: QBITS] = l_cm_wr[l][w][c][p];
      end
  end

  // Processor chain: processor l takes the VNP results of processor l-1; the
  // first one takes the channel LLRs as both channel and variable-to-check
  // messages. Each link lives in its own generate block.
  msg_t ch_lam [M][CB][P];
  msg_t ch_v2c [M][CB][P][M];

  always_comb begin
    for (int b = 0; b < M; b++)
      for (int cb = 0; cb < CB; cb++)
        for (int q = 0; q < P; q++) begin
          ch_lam[b][cb][q] = '0;
          for (int w = 0; w < NCW; w++)
            if (int'(wr_blk[w]) == b) ch_lam[b][cb][q] = ch_llr[w][cb][q];
          for (int k = 0; k < M; k++) ch_v2c[b][cb][q][k] = ch_lam[b][cb][q];
        end
  end

  for (genvar l = 0; l < NPROC; l++) begin : g_proc
    msg_t v2c_o [M][CB][P][M];
    msg_t lam_o [M][CB][P];
    logic hard_o [M][CB][P];
    if (l == 0) begin : g_first
      processor #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NCW(NCW), .CODE(CODE)) u_proc (
        .blk(wr_blk), .rd(l_rd[l]), .cm_rd(l_cm_rd[l]),
        .v2c_prev(ch_v2c), .lam_prev(ch_lam),
        .wr(l_wr[l]), .cm_wr(l_cm_wr[l]),
        .v2c_out(v2c_o), .lam_out(lam_o), .hard(hard_o)
      );
    end else begin : g_next
      processor #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NCW(NCW), .CODE(CODE)) u_proc (
        .blk(wr_blk), .rd(l_rd[l]), .cm_rd(l_cm_rd[l]),
        .v2c_prev(g_proc[l-1].v2c_o), .lam_prev(g_proc[l-1].lam_o),
        .wr(l_wr[l]), .cm_wr(l_cm_wr[l]),
        .v2c_out(v2c_o), .lam_out(lam_o), .hard(hard_o)
      );
    end
  end

  // Variable positions handled in the write cycle, per bank.
  typedef int sh_t [M];
  // Shift of the circulant joining block row b to the leaving variables of
  // column cb of the set, for every b.
  function automatic sh_t leave_shift(int cb);
    sh_t t;
    for (int b = 0; b < M; b++) t[b] = code_shift(CODE, Z, b, ((b + 1) % M) * CB + cb);
    return t;
  endfunction

  for (genvar cb = 0; cb < CB; cb++) begin : g_pos
    localparam sh_t SH = leave_shift(cb);
    for (genvar w = 0; w < NCW; w++) begin : g_bank
      for (genvar q = 0; q < P; q++) begin : g_grp
        always_comb begin
          ch_pos[w][cb][q]  = PW'(cb * Z + (int'(wr_g) * P + q + SH[wr_blk[w]]) % Z);
          dec_pos[w][cb][q] = ch_pos[w][cb][q];
          dec_bit[w][cb][q] = g_proc[NPROC-1].hard_o[wr_blk[w]][cb][q];
        end
      end
    end
  end

  always_comb begin
    for (int w = 0; w < NCW; w++) begin
      ch_set[w]  = $signed(wr_step) - w;
      dec_set[w] = $signed(wr_step) - w - NPROC * M;
    end
  end

  assign ch_valid  = wr_en;
  assign dec_valid = wr_en;
  assign ready     = !clr;
endmodule
