// tb_bpu -- block processing unit for block row 1 of a 2 x 4 base matrix with
// Z = 8 and G = 4 (two checks per stage). Random RAM read data and random
// messages from the previous processor; the CNP results, the VNP inputs
// (located from the check / variable connections of the code), the VNP
// results and the write data of every slot are compared with the reference.
module tb_bpu;
  import ldpccc_pkg::*;
  import tb_util_pkg::*;
  localparam int Z = 8, G = 4, NC = 2, NV = 4, CODE = 0, B = 1;
  localparam int M = NC, P = Z / G, CB = NV / M, JL = (B + 1) % M;
  msg_t rd [M][NV][P];
  msg_t cm_rd [NV][P];
  msg_t v2c_prev [CB][P][M];
  msg_t lam_prev [CB][P];
  msg_t wr [M][NV][P];
  msg_t cm_wr [NV][P];
  msg_t v2c_out [CB][P][M];
  msg_t lam_out [CB][P];
  logic hard [CB][P];
  int checks = 0, failures = 0;

  bpu #(.Z(Z), .G(G), .NC(NC), .NV(NV), .CODE(CODE), .B(B)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // Group member q (stage 0) whose leaving variable's message in row r sits in RAM pb.
  function automatic int member(int r, int col, int pb);
    for (int q = 0; q < P; q++) begin
      int x;
      x = (q + code_shift(CODE, Z, B, col)) % Z;
      if (pmod(x - code_shift(CODE, Z, r, col), Z) % P == pb) return q;
    end
    return -1;
  endfunction

  initial begin
    msg_t s [];
    msg_t c2v_e [P][NV];
    s = new[NV];
    for (int t = 0; t < 200; t++) begin
      foreach (rd[a, b, c]) rd[a][b][c] = msg_t'($urandom);
      foreach (cm_rd[a, b]) cm_rd[a][b] = msg_t'($urandom);
      foreach (v2c_prev[a, b, c]) v2c_prev[a][b][c] = msg_t'($urandom);
      foreach (lam_prev[a, b]) lam_prev[a][b] = msg_t'($urandom);
      #1;
      for (int q = 0; q < P; q++) begin
        for (int c = 0; c < NV; c++) s[c] = rd[B][c][q];
        for (int c = 0; c < NV; c++) c2v_e[q][c] = cnp_ref(s, c);
      end
      for (int cb = 0; cb < CB; cb++)
        for (int q = 0; q < P; q++) begin
          int col, x, tot, cv [M];
          msg_t lam;
          col = JL * CB + cb;
          x   = (q + code_shift(CODE, Z, B, col)) % Z;
          lam = cm_rd[col][x % P];
          tot = to_int(lam);
          for (int k = 0; k < M; k++) begin
            int r;
            r = (B + 1 + k) % M;
            if (r == B) cv[k] = to_int(c2v_e[q][col]);
            else cv[k] = to_int(rd[r][col][pmod(x - code_shift(CODE, Z, r, col), Z) % P]);
            tot += cv[k];
          end
          for (int k = 0; k < M; k++) chk(v2c_out[cb][q][k] == to_sm(tot - cv[k]), "VNP output");
          chk(lam_out[cb][q] == lam, "channel message passed on");
          chk(hard[cb][q] == (tot < 0), "hard decision");
        end
      for (int r = 0; r < M; r++)
        for (int col = 0; col < NV; col++)
          for (int pb = 0; pb < P; pb++) begin
            if (col / CB == JL)
              chk(wr[r][col][pb] == v2c_prev[col % CB][member(r, col, pb)][pmod(r - B - 1, M)],
                  "shifted-in variable-to-check message");
            else if (r == B)
              chk(wr[r][col][pb] == c2v_e[pb][col], "check-to-variable write-back");
          end
      for (int col = JL * CB; col < JL * CB + CB; col++)
        for (int pb = 0; pb < P; pb++)
          chk(cm_wr[col][pb] == lam_prev[col % CB][member(B, col, pb) >= 0 ?
              (pb - code_shift(CODE, Z, B, col) % P + P) % P : 0], "channel message write");
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
