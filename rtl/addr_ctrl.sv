// addr_ctrl -- address controller and decoding-step sequencer.
//
// After reset it first sweeps the RAM address space once (G cycles, clr = 1)
// so that all message RAMs start from zero. It then runs decoding steps: a
// step is G stage cycles, in which the stage counter g counts 0..G-1 (the RAM
// address base, incremented by one per cycle as in the paper), followed by GAP
// idle cycles that let the last writes of the step land before the next step
// reads (the paper's "G + d cycles per BPU"; d = GAP is this design's choice,
// one cycle for its one-cycle read-to-write pipeline). A step only starts while
// en is high, so a missing input stalls the decoder at a step boundary.
//
// blk[w] is the block row (0..M-1) that codeword bank w works on in the
// current step, i.e. which BPU serves it: blk[w] = (t - 1 - w) mod M for global
// step t. With NCW = M banks every BPU is busy in every step (the paper's
// M-codeword pipeline); with NCW = 1 one BPU works per step.
//
// rd_* signals describe the cycle whose RAM reads are issued; wr_* are the
// same signals one cycle later, the cycle in which the read data is processed
// and written back. wr_step is the global step number of the write cycle.
module addr_ctrl #(
  parameter int G   = 512,                   // stages per decoding step
  parameter int M   = 4,                     // BPUs per processor (period)
  parameter int NCW = 4,                     // codewords in flight (1 or M)
  parameter int GAP = 1,                     // idle cycles per step (d)
  localparam int GW = (G > 1) ? $clog2(G) : 1,
  localparam int BW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  output logic          clr,
  output logic [GW-1:0] clr_addr,
  output logic          rd_en,
  output logic [GW-1:0] rd_g,
  output logic [BW-1:0] rd_blk [NCW],
  output logic          wr_en,
  output logic [GW-1:0] wr_g,
  output logic [BW-1:0] wr_blk [NCW],
  output logic [31:0]   wr_step,
  output logic          step_start,          // first stage cycle of a step
  output logic          stalled              // at a step boundary, en low
);
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN, S_GAP} state_t;
  state_t state;

  logic [GW-1:0] cnt;
  logic [31:0]   gap_cnt;
  logic [31:0]   step;
  logic [BW-1:0] base;                       // (step - 1) mod M

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_CLEAR;
      cnt     <= '0;
      gap_cnt <= '0;
      step    <= '0;
      base    <= BW'(M - 1);
    end else begin
      unique case (state)
        S_CLEAR: begin
          cnt <= cnt + 1'b1;
          if (cnt == GW'(G - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
          end
        end
        S_IDLE: if (en) state <= S_RUN;
        S_RUN: begin
          cnt <= cnt + 1'b1;
          if (cnt == GW'(G - 1)) begin
            cnt     <= '0;
            gap_cnt <= '0;
            state   <= S_GAP;
          end
        end
        S_GAP: begin
          gap_cnt <= gap_cnt + 1;
          if (gap_cnt == GAP - 1) begin
            step  <= step + 1;
            base  <= (base == BW'(M - 1)) ? '0 : base + 1'b1;
            state <= en ? S_RUN : S_IDLE;
          end
        end
        default: state <= S_CLEAR;
      endcase
    end
  end

  assign clr        = (state == S_CLEAR);
  assign clr_addr   = cnt;
  assign rd_en      = (state == S_RUN);
  assign rd_g       = cnt;
  assign step_start = (state == S_RUN) && (cnt == '0);
  assign stalled    = (state == S_IDLE);

  always_comb begin
    for (int w = 0; w < NCW; w++)
      rd_blk[w] = BW'((int'(base) - w + M) % M);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_g    <= '0;
      wr_step <= '0;
      for (int w = 0; w < NCW; w++) wr_blk[w] <= '0;
    end else begin
      wr_en   <= rd_en;
      wr_g    <= rd_g;
      wr_step <= step;
      for (int w = 0; w < NCW; w++) wr_blk[w] <= rd_blk[w];
    end
  end

  // A step never starts before the previous one has drained.
  initial assert (GAP >= 1) else $error("addr_ctrl: GAP must be at least 1");
  initial assert (NCW == 1 || NCW == M) else $error("addr_ctrl: NCW must be 1 or M");
endmodule
