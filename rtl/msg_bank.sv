// msg_bank -- the message memory of one codeword for all I processors.
//
// Edge messages: one RAM per (block row r, base column col, group member pb),
// M*NV*P RAMs of depth G, P = Z/G. RAM (r, col, pb) address a holds the
// message on the edge between check a*P+pb of the block row currently held for
// base row r and the variable of base column col joined to it. Channel
// messages: one RAM per (base column col, pb), NV*P RAMs of depth G, holding
// the channel LLR of variable a*P+pb of column block col. Each word holds one
// 4-bit lane per processor, lane l for processor l (the paper's memory
// combination), and all lanes share one address.
//
// In a step of block row i the RAMs accessed in stage g are
//   * RAM (i, col, pb), every col: address g (check-node reads, write-back);
//   * RAM (r, col, pb), r != i, col in the block of the leaving variables,
//     (i+1) mod M: the variable node's other edges, at address
//     (g + off) mod G with off = ((pb' + (s_i - s_r) mod Z) / P),
//   * channel RAM (col, pb) of the same columns, address (g + off) mod G.
// The offsets are constants derived from the circulant shifts s of the base
// matrix, so each RAM's address is the stage counter plus a fixed start
// value, the paper's "simple counter" address controller. Every accessed RAM
// is written with a full word in the cycle after its read, at the same
// address. During clr all RAMs are written with zero at clr_addr.
module msg_bank
  import ldpccc_pkg::*;
#(
  parameter int Z     = 512,                 // circulant size z
  parameter int G     = 512,                 // stages per step
  parameter int NC    = 4,                   // base-matrix rows (= M)
  parameter int NV    = 24,                  // base-matrix columns
  parameter int NPROC = 18,                  // processors I (lanes per word)
  parameter int CODE  = 0,                   // shift table, see ldpccc_pkg
  localparam int M  = NC,
  localparam int P  = Z / G,
  localparam int CB = NV / M,
  localparam int W  = NPROC * QBITS,
  localparam int GW = (G > 1) ? $clog2(G) : 1,
  localparam int BW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          clr,
  input  logic [GW-1:0] clr_addr,
  input  logic          rd_en,
  input  logic [GW-1:0] rd_g,
  input  logic [BW-1:0] rd_blk,
  input  logic          wr_en,
  input  logic [GW-1:0] wr_g,
  input  logic [BW-1:0] wr_blk,
  input  logic [W-1:0]  wdata    [M][NV][P],
  input  logic [W-1:0]  cm_wdata [NV][P],
  output logic [W-1:0]  rdata    [M][NV][P],
  output logic [W-1:0]  cm_rdata [NV][P]
);
  typedef int tab_t [M];

  function automatic tab_t edge_act(int r, int col);
    tab_t t;
    for (int i = 0; i < M; i++)
      t[i] = (r == i || col / CB == (i + 1) % M) ? 1 : 0;
    return t;
  endfunction

  function automatic tab_t edge_off(int r, int col, int pb);
    tab_t t;
    int d;
    for (int i = 0; i < M; i++) begin
      t[i] = 0;
      if (r != i && col / CB == (i + 1) % M) begin
        d    = code_shift(CODE, Z, i, col) - code_shift(CODE, Z, r, col);
        t[i] = grp_addr_off(grp_member(pb, d, Z, P), d, Z, P);
      end
    end
    return t;
  endfunction

  function automatic tab_t cm_off(int col, int pb);
    tab_t t;
    int s;
    for (int i = 0; i < M; i++) begin
      s    = code_shift(CODE, Z, i, col);
      t[i] = grp_addr_off(grp_member(pb, s, Z, P), s, Z, P);
    end
    return t;
  endfunction

  function automatic logic [GW-1:0] wrap(logic [GW-1:0] g, int off);
    int a;
    a = int'(g) + off;
    if (a >= G) a = a - G;
    return GW'(a);
  endfunction

  for (genvar r = 0; r < M; r++) begin : g_row
    for (genvar col = 0; col < NV; col++) begin : g_col
      for (genvar pb = 0; pb < P; pb++) begin : g_grp
        localparam tab_t ACT = edge_act(r, col);
        localparam tab_t OFF = edge_off(r, col, pb);
        logic          we, re;
        logic [GW-1:0] waddr, raddr;
        logic [W-1:0]  wd;
        always_comb begin
          re    = rd_en && (ACT[rd_blk] != 0);
          raddr = wrap(rd_g, OFF[rd_blk]);
          we    = clr || (wr_en && (ACT[wr_blk] != 0));
          waddr = clr ? clr_addr : wrap(wr_g, OFF[wr_blk]);
          wd    = clr ? '0 : wdata[r][col][pb];
        end
        msg_ram #(.DEPTH(G), .WIDTH(W)) u_ram (
          .clk, .we, .waddr, .wdata(wd), .re, .raddr, .rdata(rdata[r][col][pb])
        );
      end
    end
  end

  for (genvar col = 0; col < NV; col++) begin : g_cm
    for (genvar pb = 0; pb < P; pb++) begin : g_grp
      localparam tab_t OFF = cm_off(col, pb);
      logic          we, re;
      logic [GW-1:0] waddr, raddr;
      logic [W-1:0]  wd;
      always_comb begin
        re    = rd_en && (col / CB == (int'(rd_blk) + 1) % M);
        raddr = wrap(rd_g, OFF[rd_blk]);
        we    = clr || (wr_en && (col / CB == (int'(wr_blk) + 1) % M));
        waddr = clr ? clr_addr : wrap(wr_g, OFF[wr_blk]);
        wd    = clr ? '0 : cm_wdata[col][pb];
      end
      msg_ram #(.DEPTH(G), .WIDTH(W)) u_ram (
        .clk, .we, .waddr, .wdata(wd), .re, .raddr, .rdata(cm_rdata[col][pb])
      );
    end
  end

  initial assert (NV % NC == 0 && Z % G == 0)
    else $error("msg_bank: needs NC | NV and G | Z");
endmodule
