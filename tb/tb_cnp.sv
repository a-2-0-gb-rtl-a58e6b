// tb_cnp -- check-node processor of degree 24 on random and corner-case
// inputs, every output compared with the fold-based reference.
module tb_cnp;
  import ldpccc_pkg::*;
  import tb_util_pkg::*;
  localparam int D = 24;
  msg_t s [D];
  msg_t alpha [D];
  msg_t sd [];
  int checks = 0, failures = 0;
  cnp #(.D(D)) dut (.s, .alpha);
  initial begin
    sd = new[D];
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < D; k++) begin
        case (t)
          0: s[k] = 4'h7;                               // all strong positive
          1: s[k] = (k == 5) ? 4'h0 : 4'hF;             // one erasure
          default: s[k] = msg_t'($urandom_range(0, 15));
        endcase
        sd[k] = s[k];
      end
      #1;
      for (int k = 0; k < D; k++) begin
        checks++;
        if (alpha[k] !== cnp_ref(sd, k)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d k=%0d got %h exp %h", t, k, alpha[k], cnp_ref(sd, k));
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
