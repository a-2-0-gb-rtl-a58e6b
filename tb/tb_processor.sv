// tb_processor -- one processor (2 BPUs) serving two codeword banks on the
// example code. For random bank data and both assignments of banks to block
// rows, each bank must get the write data of the BPU of its block row and
// each BPU must read the data of its bank: checked through the check-node
// results, the channel messages passed on and the shifted-in messages.
module tb_processor;
  import ldpccc_pkg::*;
  import tb_util_pkg::*;
  localparam int Z = 4, G = 2, NC = 2, NV = 4, NCW = 2, CODE = 1;
  localparam int M = NC, P = Z / G, CB = NV / M, BW = 1;
  logic [BW-1:0] blk [NCW];
  msg_t rd [NCW][M][NV][P];
  msg_t cm_rd [NCW][NV][P];
  msg_t v2c_prev [M][CB][P][M];
  msg_t lam_prev [M][CB][P];
  msg_t wr [NCW][M][NV][P];
  msg_t cm_wr [NCW][NV][P];
  msg_t v2c_out [M][CB][P][M];
  msg_t lam_out [M][CB][P];
  logic hard [M][CB][P];
  int checks = 0, failures = 0;

  processor #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NCW(NCW), .CODE(CODE)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    msg_t s [];
    s = new[NV];
    for (int t = 0; t < 200; t++) begin
      blk[0] = BW'(t % 2); blk[1] = BW'(1 - t % 2);
      foreach (rd[a, b, c, d]) rd[a][b][c][d] = msg_t'($urandom);
      foreach (cm_rd[a, b, c]) cm_rd[a][b][c] = msg_t'($urandom);
      foreach (v2c_prev[a, b, c, d]) v2c_prev[a][b][c][d] = msg_t'($urandom);
      foreach (lam_prev[a, b, c]) lam_prev[a][b][c] = msg_t'($urandom);
      #1;
      for (int w = 0; w < NCW; w++) begin
        int b, jl;
        b = int'(blk[w]);
        jl = (b + 1) % M;
        for (int q = 0; q < P; q++) begin
          for (int c = 0; c < NV; c++) s[c] = rd[w][b][c][q];
          for (int c = 0; c < NV; c++)
            if (c / CB != jl) chk(wr[w][b][c][q] == cnp_ref(s, c), "bank gets its BPU's check results");
            else chk(wr[w][b][c][q] == v2c_prev[b][c % CB][q][M-1], "bank gets its BPU's shifted-in messages");
        end
        for (int cb = 0; cb < CB; cb++)
          for (int q = 0; q < P; q++) begin
            int col;
            col = jl * CB + cb;
            chk(lam_out[b][cb][q] == cm_rd[w][col][(q + code_shift(CODE, Z, b, col)) % P],
                "BPU reads its bank's channel messages");
          end
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
