// dec_checker -- stimulus and end-to-end checker for ldpccc_decoder.
//
// Drives reset and en, answers the decoder's channel requests with LLRs of
// the all-zero codeword sent over a noisy channel (a fixed hash of bank, set
// and position decides each value: ERR_PM per mille of them negative, with magnitude 1..3; correct ones
// have magnitude OK_MIN..7), and keeps one
// ldpccc_ref per codeword bank. Every hard decision is compared with the
// reference; it also checks the clear time (G cycles), the step length
// (G + GAP cycles), the decision latency (NPROC*M steps) and that the
// decoder corrects channel errors. en is dropped for a few steps to make the
// decoder stall. Mechanisms counted: stall, clear, full BPU use (every BPU busy in one step
// when NCW = M), error correction. done rises after NSTEPS steps.
module dec_checker
  import ldpccc_pkg::*;
#(
  parameter int Z = 4, G = 2, NC = 2, NV = 4, NPROC = 3, NCW = 2, GAP = 1, CODE = 1,
  parameter int NSTEPS = 20,
  parameter int ERR_PM = 100,                // channel errors per 1000 bits
  parameter int OK_MIN = 1,                  // least magnitude of a correct LLR
  localparam int M = NC, P = Z / G, CB = NV / M, PW = $clog2(CB * Z)
) (
  input  logic               clk,
  output logic               rst_n,
  output logic               en,
  input  logic               ready,
  input  logic               stalled,
  input  logic               ch_valid,
  input  logic signed [31:0] ch_set  [NCW],
  input  logic [PW-1:0]      ch_pos  [NCW][CB][P],
  output msg_t               ch_llr  [NCW][CB][P],
  input  logic               dec_valid,
  input  logic signed [31:0] dec_set [NCW],
  input  logic [PW-1:0]      dec_pos [NCW][CB][P],
  input  logic               dec_bit [NCW][CB][P],
  output int                 checks,
  output int                 failures,
  output logic               done
);
  function automatic msg_t chan(int w, int n, int pos);
    int unsigned h;
    h = w * 32'd2654435761 ^ n * 32'd2246822519 ^ pos * 32'd3266489917 ^ 32'h9e37;
    h = h ^ (h >> 15); h = h * 32'd2246822519; h = h ^ (h >> 13);
    h = h * 32'd3266489917; h = h ^ (h >> 16);
    if (int'(h % 1000) < ERR_PM) return msg_t'(4'b1000 | (1 + (h >> 8) % 3));
    return msg_t'(OK_MIN + int'((h >> 8) % (8 - OK_MIN)));
  endfunction

  for (genvar w = 0; w < NCW; w++) begin : g_ref
    ldpccc_ref #(.Z(Z), .NC(NC), .NV(NV), .NPROC(NPROC), .CODE(CODE)) u_ref ();
  end

  always_comb
    for (int w = 0; w < NCW; w++)
      for (int cb = 0; cb < CB; cb++)
        for (int q = 0; q < P; q++) ch_llr[w][cb][q] = chan(w, ch_set[w], int'(ch_pos[w][cb][q]));

  int cyc, steps, last_start, n_stall, n_step_len, ch_err, dec_err, clr_cycles;
  logic prev_valid;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; cyc = 0; steps = 0; n_stall = 0; n_step_len = 0;
    ch_err = 0; dec_err = 0; clr_cycles = 0; last_start = -1; prev_valid = 0;
    rst_n = 0; en = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && !ready) clr_cycles <= clr_cycles + 1;

  // en: high, except for 3*(G+GAP) cycles once the run is half done.
  int stall_left = -1;
  logic stall_gap;                           // a stall happened since the last step start
  always @(negedge clk)
    if (rst_n) begin
      if (steps == NSTEPS / 2 && stall_left < 0) stall_left = 3 * (G + GAP);
      en <= (stall_left <= 0);
      if (stall_left > 0) stall_left--;
    end
  always @(posedge clk) if (rst_n && ready && stalled && steps > 0) n_stall <= n_stall + 1;
  always @(posedge clk) if (rst_n && ready && stalled) stall_gap <= 1'b1;

  always @(negedge clk) begin
    if (rst_n && ch_valid && !done) begin
      if (!prev_valid) begin
        if (steps == 0) chk(clr_cycles == G, "clear phase length");
        if (last_start >= 0 && !stall_gap) begin
          chk(cyc - last_start == G + GAP, "step length G+GAP");
          n_step_len++;
        end
        last_start = cyc;
        stall_gap <= 1'b0;
        for (int w = 0; w < NCW; w++) begin
          chk(ch_set[w] == steps - w, "channel set index");
          chk(dec_set[w] == ch_set[w] - NPROC * M, "decision latency NPROC*M steps");
        end
        steps++;
      end
      if (steps == NSTEPS) done <= 1;
    end
    prev_valid <= ch_valid;
  end

  // Per bank: run the reference step, then compare this cycle's decisions.
  for (genvar w = 0; w < NCW; w++) begin : g_cmp
    always @(negedge clk) begin
      if (rst_n && ch_valid && !done) begin
        if (!prev_valid) begin
          for (int p = 0; p < CB*Z; p++) g_ref[w].u_ref.lam_in[p] = byte'(chan(w, ch_set[w], p));
          g_ref[w].u_ref.step(ch_set[w]);
        end
        for (int cb = 0; cb < CB; cb++)
          for (int q = 0; q < P; q++) begin
            chk(dec_valid && dec_bit[w][cb][q] == g_ref[w].u_ref.hard_out[dec_pos[w][cb][q]],
                "hard decision vs reference");
            if (dec_set[w] >= 0) begin
              dec_err += int'(dec_bit[w][cb][q]);
              ch_err  += int'(chan(w, dec_set[w], int'(dec_pos[w][cb][q])) >> 3);
            end
          end
      end
    end
  end
endmodule
