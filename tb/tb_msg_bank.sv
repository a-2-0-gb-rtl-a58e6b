// tb_msg_bank -- message memory of one codeword on the printed example code
// (Z = 4, 2 x 4 base matrix, G = 2). Every RAM word is written, for every
// block row i and stage g, with a tag naming the RAM and the address at which
// the code's circulants place the message (worked out here from the check /
// variable connections, not from the bank's offset tables); reading back
// every (i, g) must return the tag of the expected address in every RAM
// accessed. Also checks the zero clear.
module tb_msg_bank;
  import ldpccc_pkg::*;
  localparam int Z = 4, G = 2, NC = 2, NV = 4, NPROC = 4, CODE = 1;
  localparam int M = NC, P = Z / G, CB = NV / M, W = NPROC * QBITS, GW = 1, BW = 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clr, rd_en, wr_en;
  logic [GW-1:0] clr_addr, rd_g, wr_g;
  logic [BW-1:0] rd_blk, wr_blk;
  logic [W-1:0] wdata [M][NV][P];
  logic [W-1:0] cm_wdata [NV][P];
  logic [W-1:0] rdata [M][NV][P];
  logic [W-1:0] cm_rdata [NV][P];
  int checks = 0, failures = 0;

  msg_bank #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .CODE(CODE)) dut (.*);

  // Expected address of edge RAM (r, col, pb) in stage g of block row i, -1 if unused.
  function automatic int exp_addr(int i, int g, int r, int col, int pb);
    if (r == i) return g;
    if (col / CB != (i + 1) % M) return -1;
    for (int q = 0; q < P; q++) begin
      int x, mp;
      x  = (g * P + q + code_shift(CODE, Z, i, col)) % Z;   // leaving variable
      mp = pmod(x - code_shift(CODE, Z, r, col), Z);        // its check in row r
      if (mp % P == pb) return mp / P;
    end
    return -1;
  endfunction
  function automatic int exp_cm(int i, int g, int col, int pb);
    if (col / CB != (i + 1) % M) return -1;
    for (int q = 0; q < P; q++) begin
      int x;
      x = (g * P + q + code_shift(CODE, Z, i, col)) % Z;
      if (x % P == pb) return x / P;
    end
    return -1;
  endfunction
  function automatic logic [W-1:0] tag(int kind, int r, int col, int pb, int a);
    return W'((((kind * M + r) * NV + col) * P + pb) * G + a + 1);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    clr = 0; rd_en = 0; wr_en = 0; clr_addr = 0; rd_g = 0; wr_g = 0; rd_blk = 0; wr_blk = 0;
    foreach (wdata[a, b, c]) wdata[a][b][c] = '1;
    foreach (cm_wdata[a, b]) cm_wdata[a][b] = '1;
    @(negedge clk);
    for (int a = 0; a < G; a++) begin
      clr = 1; wr_en = 1; clr_addr = GW'(a); @(negedge clk);
    end
    clr = 0; wr_en = 0;
    // Cleared contents read as zero.
    for (int i = 0; i < M; i++)
      for (int g = 0; g < G; g++) begin
        rd_en = 1; rd_blk = BW'(i); rd_g = GW'(g); @(negedge clk);
        foreach (rdata[r, c, p]) if (exp_addr(i, g, r, c, p) >= 0) chk(rdata[r][c][p] == 0, "cleared");
      end
    rd_en = 0;
    // Write tags.
    for (int i = 0; i < M; i++)
      for (int g = 0; g < G; g++) begin
        wr_en = 1; wr_blk = BW'(i); wr_g = GW'(g);
        foreach (wdata[r, c, p]) wdata[r][c][p] = tag(0, r, c, p, exp_addr(i, g, r, c, p));
        foreach (cm_wdata[c, p]) cm_wdata[c][p] = tag(1, 0, c, p, exp_cm(i, g, c, p));
        @(negedge clk);
      end
    wr_en = 0;
    // Read back.
    for (int i = 0; i < M; i++)
      for (int g = 0; g < G; g++) begin
        rd_en = 1; rd_blk = BW'(i); rd_g = GW'(g); @(negedge clk);
        foreach (rdata[r, c, p]) begin
          int a;
          a = exp_addr(i, g, r, c, p);
          if (a >= 0) chk(rdata[r][c][p] == tag(0, r, c, p, a), $sformatf("edge RAM (%0d,%0d,%0d) i=%0d g=%0d", r, c, p, i, g));
        end
        foreach (cm_rdata[c, p]) begin
          int a;
          a = exp_cm(i, g, c, p);
          if (a >= 0) chk(cm_rdata[c][p] == tag(1, 0, c, p, a), $sformatf("channel RAM (%0d,%0d) i=%0d g=%0d", c, p, i, g));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
