// tb_ldpccc_4x24 -- the decoder with the default 4 x 24 base matrix and
// four codewords in flight, but with z = G = 32 and 4 processors so that it
// simulates in seconds. It runs NPROC*M + 4 = 20 decoding steps and compares
// every hard decision with the behavioural reference (through dec_checker),
// checks clear time, step length and latency, and requires a stall and a
// lower error count after decoding than on the channel. The channel flips
// 2% of the bits (LLR magnitude 1..3) and gives the others magnitude 4..7.
// Parameters are scaled down from the default only in z, G and the number of
// processors; the datapath per check row is the full-size one.
module tb_ldpccc_4x24;
  import ldpccc_pkg::*;
  localparam int Z = 32, G = 32, NC = 4, NV = 24, NPROC = 4, NCW = 4, GAP = 1, CODE = 0;
  localparam int NSTEPS = NPROC * NC + 4;
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

  ldpccc_decoder #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .NCW(NCW), .GAP(GAP), .CODE(CODE)) dut (.*);

  dec_checker #(.Z(Z), .G(G), .NC(NC), .NV(NV), .NPROC(NPROC), .NCW(NCW), .GAP(GAP),
                .CODE(CODE), .NSTEPS(NSTEPS), .ERR_PM(20), .OK_MIN(4)) chk (.*);

  initial begin
    wait (rst_n);
    wait (done);
    @(negedge clk);
    $display("stalls=%0d steps_timed=%0d channel_errors=%0d decoded_errors=%0d",
             chk.n_stall, chk.n_step_len, chk.ch_err, chk.dec_err);
    if (chk.n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (chk.n_step_len == 0) begin failures++; $display("FAIL no step timed"); end
    if (!(chk.dec_err < chk.ch_err)) begin failures++; $display("FAIL no errors corrected"); end
    checks += 3;
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
