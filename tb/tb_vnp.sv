// tb_vnp -- variable-node processor of degree 4: random and saturating
// inputs, extrinsic outputs and hard decision against integer sums.
module tb_vnp;
  import ldpccc_pkg::*;
  import tb_util_pkg::*;
  localparam int DV = 4;
  msg_t lambda;
  msg_t c2v [DV];
  msg_t v2c [DV];
  logic hard;
  int checks = 0, failures = 0;
  vnp #(.DV(DV)) dut (.lambda, .c2v, .v2c, .hard);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      int tot;
      lambda = (t == 0) ? 4'h7 : (t == 1) ? 4'hF : msg_t'($urandom_range(0, 15));
      for (int k = 0; k < DV; k++) c2v[k] = (t < 2) ? lambda : msg_t'($urandom_range(0, 15));
      #1;
      tot = to_int(lambda);
      for (int k = 0; k < DV; k++) tot += to_int(c2v[k]);
      for (int k = 0; k < DV; k++) begin
        checks++;
        if (v2c[k] !== to_sm(tot - to_int(c2v[k]))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d k=%0d got %h exp %h", t, k, v2c[k], to_sm(tot - to_int(c2v[k])));
        end
      end
      checks++;
      if (hard !== (tot < 0)) failures++;
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
