// tb_msg_ram -- random writes and reads against an array model, including
// reads of the address being written in the same cycle (old data expected)
// and read-data hold while re is low.
module tb_msg_ram;
  localparam int DEPTH = 16, WIDTH = 12, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata, model [DEPTH], exp_q;
  int checks = 0, failures = 0;
  msg_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); re = $urandom_range(0, 3) != 0;
      waddr = AW'($urandom); raddr = (t % 5 == 0) ? waddr : AW'($urandom); wdata = WIDTH'($urandom);
      if (re) exp_q = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d rdata=%h exp=%h", t, rdata, exp_q);
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
