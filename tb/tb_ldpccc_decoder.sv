// tb_ldpccc_decoder -- end-to-end test of the decoder on the small example
// code (Z = 4, 2 x 4 base matrix of the printed example, G = 2 so two checks
// per stage, M = 2 BPUs, 3 processors, 2 codewords in flight). All hard
// decisions are compared bit for bit with the behavioural reference; step
// length, clear length and latency are checked; the counts of stalls, busy
// BPUs and corrected errors must be non-zero.
module tb_ldpccc_decoder;
  import ldpccc_pkg::*;
  localparam int Z = 4, G = 2, NC = 2, NV = 4, NPROC = 3, NCW = 2, GAP = 1, CODE = 1;
  localparam int NSTEPS = 40;
  localparam int M = NC, P = Z / G, CB = NV / M, PW = $clog2(CB * Z);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, en, ready, stalled, ch_valid, dec_valid, done;
  logic signed [31:0] ch_set [NCW];
  logic signed [31:0] dec_set [NCW];
  logic [PW-1:0] ch_pos [NCW][CB][P];
  logic [PW-1:0] dec_pos [NCW][CB][P];
  msg_t ch_llr [NCW][CB][P];
  logic dec_bit [NCW][CB][P];
  int checks, failures;

  ldpccc_decoder #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .NCW(NCW), .GAP(GAP),
                   .CODE(CODE)) dut (.*);

  dec_checker #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .NCW(NCW), .GAP(GAP),
                .CODE(CODE), .NSTEPS(NSTEPS)) chk (.*);

  // Every BPU of the last processor must be busy in the same step.
  // Second instance: one codeword in flight, one check per stage.
  localparam int Z1 = 4, G1 = 4, NP1 = 2, NCW1 = 1, P1 = 1;
  logic rst1_n, en1, ready1, stalled1, ch_valid1, dec_valid1, done1;
  logic signed [31:0] ch_set1 [NCW1];
  logic signed [31:0] dec_set1 [NCW1];
  logic [PW-1:0] ch_pos1 [NCW1][CB][P1];
  logic [PW-1:0] dec_pos1 [NCW1][CB][P1];
  msg_t ch_llr1 [NCW1][CB][P1];
  logic dec_bit1 [NCW1][CB][P1];
  int checks1, failures1;

  ldpccc_decoder #(.Z(Z1), .G(G1), .NC(NC), .NV(NV), .NPROC(NP1), .NCW(NCW1), .GAP(2),
                   .CODE(CODE)) dut1 (
    .clk, .rst_n(rst1_n), .en(en1), .ready(ready1), .stalled(stalled1),
    .ch_valid(ch_valid1), .ch_set(ch_set1), .ch_pos(ch_pos1), .ch_llr(ch_llr1),
    .dec_valid(dec_valid1), .dec_set(dec_set1), .dec_pos(dec_pos1), .dec_bit(dec_bit1));

  dec_checker #(.Z(Z1), .G(G1), .NC(NC), .NV(NV), .NPROC(NP1), .NCW(NCW1), .GAP(2),
                .CODE(CODE), .NSTEPS(NSTEPS)) chk1 (
    .clk, .rst_n(rst1_n), .en(en1), .ready(ready1), .stalled(stalled1),
    .ch_valid(ch_valid1), .ch_set(ch_set1), .ch_pos(ch_pos1), .ch_llr(ch_llr1),
    .dec_valid(dec_valid1), .dec_set(dec_set1), .dec_pos(dec_pos1), .dec_bit(dec_bit1),
    .checks(checks1), .failures(failures1), .done(done1));

  int busy_steps = 0;
  always @(negedge clk)
    if (ch_valid && dut.wr_g == 0 && dut.u_ctrl.wr_blk[0] != dut.u_ctrl.wr_blk[NCW-1])
      busy_steps++;

  initial begin
    wait (rst_n && rst1_n);
    wait (done && done1);
    @(negedge clk);
    $display("multi-codeword: stalls=%0d steps_timed=%0d busy_steps=%0d channel_errors=%0d decoded_errors=%0d",
             chk.n_stall, chk.n_step_len, busy_steps, chk.ch_err, chk.dec_err);
    $display("single-codeword: stalls=%0d steps_timed=%0d channel_errors=%0d decoded_errors=%0d",
             chk1.n_stall, chk1.n_step_len, chk1.ch_err, chk1.dec_err);
    checks += checks1;
    failures += failures1;
    if (chk1.n_stall == 0) begin failures++; $display("FAIL no stall (single)"); end
    if (!(chk1.dec_err < chk1.ch_err)) begin failures++; $display("FAIL no errors corrected (single)"); end
    checks += 2;
    if (chk.n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (busy_steps == 0) begin failures++; $display("FAIL BPUs never all busy"); end
    if (chk.n_step_len == 0) begin failures++; $display("FAIL no step timed"); end
    if (!(chk.dec_err < chk.ch_err)) begin failures++; $display("FAIL no errors corrected"); end
    checks += 4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * (NSTEPS + 10) * (G + GAP + 2) * 10);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
