// tb_addr_ctrl -- address controller with G = 5, M = 3, three banks, GAP = 2:
// clear sweep, stage counter sequence, step length G + GAP, block-row
// rotation per bank, one-cycle delayed write signals and a stall while en is
// low.
module tb_addr_ctrl;
  localparam int G = 5, M = 3, NCW = 3, GAP = 2, GW = 3, BW = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, en, clr, rd_en, wr_en, step_start, stalled;
  logic [GW-1:0] clr_addr, rd_g, wr_g;
  logic [BW-1:0] rd_blk [NCW];
  logic [BW-1:0] wr_blk [NCW];
  logic [31:0] wr_step;
  int checks = 0, failures = 0;
  int cyc = 0, nclr = 0, step = 0, run_len = 0, idle_len = 0, nstall = 0;
  logic p_rd_en; logic [GW-1:0] p_rd_g; logic [BW-1:0] p_blk [NCW];

  addr_ctrl #(.G(G), .M(M), .NCW(NCW), .GAP(GAP)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    rst_n = 0; en = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
  end

  // en low for a while after step 6 to force a stall.
  always @(negedge clk) en <= rst_n && !(step >= 6 && step < 7 && cyc > 0 && nstall < 4 && (stalled || !rd_en));

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (clr) begin
      chk(clr_addr == GW'(nclr), "clear address sequence");
      nclr++;
    end
    if (cyc > 1) begin
      chk(wr_en == p_rd_en, "wr_en is rd_en delayed");
      if (p_rd_en) begin
        chk(wr_g == p_rd_g, "wr_g is rd_g delayed");
        for (int w = 0; w < NCW; w++) chk(wr_blk[w] == p_blk[w], "wr_blk delayed");
      end
    end
    if (stalled && nclr == G) nstall++;
    if (rd_en) begin
      if (run_len == 0) begin
        chk(step_start, "step_start on first stage");
        if (step > 0 && nstall == 0) chk(idle_len == GAP, "GAP idle cycles between steps");
        for (int w = 0; w < NCW; w++)
          chk(int'(rd_blk[w]) == ((step - 1 - w) % M + 2 * M) % M, "block row of bank");
      end
      chk(rd_g == GW'(run_len), "stage counter");
      run_len++;
      idle_len = 0;
      if (run_len == G) begin run_len = 0; step++; if (nstall > 0 && nstall < 100) nstall += 100; end
    end else if (nclr == G) idle_len++;
    p_rd_en = rd_en; p_rd_g = rd_g; p_blk = rd_blk;
    if (step == 10) begin
      chk(nclr == G, "clear lasts G cycles");
      chk(nstall > 100, "stall happened");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    #20000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
