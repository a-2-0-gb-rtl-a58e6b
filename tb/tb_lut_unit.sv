// tb_lut_unit -- exhaustive test of the LUT unit: all 256 input pairs
// against O(i,j) computed from tanh / atanh, plus sign symmetry.
module tb_lut_unit;
  import ldpccc_pkg::*;
  import tb_util_pkg::*;
  msg_t a, b, o;
  int checks = 0, failures = 0;
  lut_unit dut (.a, .b, .o);
  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a = msg_t'(i); b = msg_t'(j);
        #1;
        checks++;
        if (o !== op_ref(a, b)) begin
          failures++;
          $display("FAIL O(%h,%h) = %h, expected %h", a, b, o, op_ref(a, b));
        end
      end
    // O never exceeds the smaller input magnitude.
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        a = msg_t'(i); b = msg_t'(j);
        #1;
        checks++;
        if (int'(o[2:0]) > ((i < j) ? i : j)) failures++;
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
