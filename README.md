# Pipelined decoder for QC-LDPC convolutional codes

An LDPC convolutional code (LDPCCC) is an LDPC code whose parity-check matrix is
a band that never ends: a check node only involves variables from the last few
time instants. This lets the decoder run as a pipeline. Processor 1 performs
iteration 1 on a window of the stream, hands the window on to processor 2, and
so on. After I processors, decided bits leave the pipeline while new channel
values keep entering it.

This RTL implements such a decoder for codes derived from a quasi-cyclic (QC)
LDPC block code:

* The code is defined by an `NC x NV` base matrix of `Z x Z` circulant
  permutations. The default is 4 x 24 with Z = 512, a rate-5/6 code.
* I = 18 processors, one per iteration.
* Four codewords are decoded at the same time.

At 100 MHz this gives 4 x 2560 information bits per 513 cycles, about
2.0 Gb/s.

The design has two main ideas:

1. **Fixed, counter-driven storage.** Every message lives at a RAM address
   that is a constant offset from one stage counter. No switch network and no
   address tables are needed.
2. **Combined memories.** The RAMs of all I processors are merged into wide
   words, one 4-bit lane per processor, so all processors share one set of
   RAMs and one address.

## The code and its time structure

The base matrix H_b (rows i = 0..NC-1, columns j = 0..NV-1) holds a shift
s(i,j) for each block. Block (i,j) is the Z x Z permutation that connects check
m to variable (m + s(i,j)) mod Z.

The convolutional code cuts H_b along a staircase with period M = gcd(NC, NV).
This design assumes M = NC, which is true for 4 x 24. The cut turns the matrix
into M slices:

* At each time instant t, a new **variable set** v_t enters. It holds
  CB*Z variables, where CB = NV/M is the number of base columns per set.
* A new **check set** (block row) u_t also appears. It holds Z checks.
* Check row r is connected to variable sets s = r-k for k = 0..M-1. The
  connection uses base row i = r mod M and base column block j = s mod M.
* So every check sees M consecutive variable sets, and every variable set
  meets M consecutive check rows.

The code memory is m_s = M-1.

The shifts for the 4 x 24 code are not published. The parameter `CODE` picks
a shift table (`ldpccc_pkg::code_shift`):

| CODE | Shift table | Use |
|---|---|---|
| 0 (default) | stand-in formula s(i,c) = 11·i·(c²+7c+1) mod z | Any size. Sensible, but not optimised for girth. |
| 1 | the 2 x 4, z = 4 matrix used as the worked example | The testbenches. |

To decode a real code, replace `code_shift`; nothing else depends on the
values.

## Processors, BPUs and the decoding step

Time is counted in **decoding steps** of G + GAP clock cycles. GAP defaults
to 1, the least this datapath allows.

Inside one step the Z checks of a block row are visited in G **stages**.
Stage g handles P = Z/G checks. With the defaults P = 1, so one check per
cycle per processor.

Each processor has M **block processing units (BPUs)**, one per block row
modulo M. BPU b is hard-wired to the block rows r with r mod M = b, so its
connections to the RAMs never change. In processor l during step t:

* The active row is r = t-1-lM. It is handled by BPU (r mod M).
* For each of its P checks, a **check-node processor (CNP)** reads the NV
  variable-to-check (V2C) messages and produces NV check-to-variable (C2V)
  messages.
* The oldest variable set that row r touches is s = t-lM-M. That set has
  now met all M of its check rows in this iteration, so it **leaves** the
  processor. For each of its variables, a **variable-node processor (VNP)**
  adds the channel LLR and its M C2V messages. One of these C2V messages is
  the one the CNP just produced; the others come from RAM. The VNP then
  forms M extrinsic V2C messages and a hard decision.
* Those V2C messages, and the channel LLR, are written into **processor
  l+1's** lane at the same RAM address. This hand-over is the
  "shift-and-write" that moves a variable set from one iteration to the next
  without any copying. When the set reaches processor l+1, its first check
  row there is exactly the row that processor is about to visit.
* The new set t enters lane 0 from the channel. It has no C2V messages yet,
  so its V2C messages equal the channel LLR.

The last processor's hard decisions are the output. A variable set entering
in step t is decided at the end of step t + I·M. The latency is therefore
I·M steps: 72 steps of 513 cycles at the defaults.

### Message memories

Each codeword in flight has its own **bank** (`msg_bank`). A bank holds two
kinds of RAM, all G words deep:

* **Edge RAMs:** M block rows × NV base columns × P. Each holds one message
  per check edge. V2C and C2V messages share the same location over time.
* **Channel RAMs:** NV × P. Each holds the channel LLR of every variable
  still in the processor.

RAM selection and address use these rules:

* Check m of a row lives in RAM m mod P at address m div P.
* For a variable, the address is found through the circulant, plus an offset
  that depends only on the block row.
* As a result, each RAM is read and written at (g + constant) mod G.
  `ldpccc_pkg::grp_ram`, `grp_addr_off` and `grp_member` compute these
  constants at elaboration.

With the defaults, one bank has 96 edge RAMs and 24 channel RAMs of
512 × 72 bits. There are 18 processor lanes of 4 bits each.

Each RAM is read in stage g and written one cycle later, at the address it
read. The write goes into the next processor's lane (the shift-and-write
described above). Because the other lanes are written back unchanged, each
word is a plain read-modify-write.

### Four codewords at once

In a single-codeword decoder, only one of a processor's M BPUs works in any
step. With NCW = M banks, bank w runs w steps behind bank 0. Its block row in
step t is (t-1-w) mod M. Each step the M banks therefore occupy the M
different BPUs, which rotate, and throughput rises by a factor of M.

`processor` uses an M-way multiplexer per bank to route each bank's read data
to the BPU of its current block row, and to route that BPU's write data back.
NCW = 1 is also supported: the other BPUs simply idle.

## Check-node processor: a tree of LUTs

The check update uses the sum-product rule on 4-bit sign-magnitude messages:

* α_k = O(s_1, …, s_{k-1}, s_{k+1}, …, s_d)
* O(a,b) = Q(2 atanh(tanh(a/2) tanh(b/2)))

Here O is applied pairwise, because it is associative. `lut_unit` computes O
with these parts:

* The output sign is the XOR of the input signs.
* The magnitude comes from a 64-entry table built at elaboration. The
  quantisation step is `DELTA` = 0.5, with rounding to nearest and saturation
  at magnitude 7.

`cnp` builds the d outputs from three groups of units:

* A forward chain: f_1 = O(s_1,s_2), f_k = O(f_{k-1}, s_{k+1}).
* A backward chain, built the same way from s_d.
* d-2 combining units: α_k = O(f_{k-1}, b_{k+1}).

α_1 and α_d are taken directly from the ends of the chains. In total this is
3d-6 = 66 units for d = 24. This is an exact computation, with no min-sum
approximation. The text describing the architecture quotes "2d = 48 units",
which does not match this chain structure; the 3d-6 count is what the chain
drawing implies.

## Variable-node processor

`vnp` converts the channel LLR and the M C2V messages to two's complement and
sums them in an adder tree. Each outgoing message is the total minus its own
input, saturated to ±7 and converted back to sign-magnitude. The hard
decision is the sign of the total; a zero total decides 0.

## Control and interface

`addr_ctrl` is the only controller. It runs these phases:

1. After an asynchronous reset (`rst_n`), it clears every RAM with zeros for
   G cycles, then raises `ready`.
2. At each step boundary it samples `en`. While `en` is low it waits; the
   decoder reports this on `stalled`.
3. Each step then runs G read cycles. The writes follow one cycle behind the
   reads, and GAP idle cycles close the step.

Channel input and decisions are exchanged during the write cycles of every
step, per bank w (`ch_valid` is high in each write cycle):

| Signal | Direction | Meaning |
|---|---|---|
| `ch_set[w]` | out | Index of the set entering this step (= step − w). |
| `ch_pos[w][cb][q]` | out | Position within the set, cb·Z + x. |
| `ch_llr[w][cb][q]` | in | The requested 4-bit LLR, in the same cycle. |
| `dec_valid`, `dec_set`, `dec_pos`, `dec_bit` | out | The same fields for the set leaving the last processor; dec_set = ch_set − NPROC·M. |

Positions follow the circulant order, not the natural order. A source
therefore normally sits behind a small buffer addressed by `ch_pos`.

## Parameters

All sizes are parameters of `ldpccc_decoder`:

| Parameter | Default | Meaning |
|---|---|---|
| `Z` | 512 | Circulant size. |
| `G` | 512 | Stages per step. Z/G must be an integer. |
| `NC` | 4 | Base-matrix rows. Also the period M. |
| `NV` | 24 | Base-matrix columns. A multiple of NC. |
| `NPROC` | 18 | Iterations. |
| `NCW` | 4 | Codewords in flight: 1 or NC. |
| `GAP` | 1 | Idle cycles per step. At least 1. |
| `CODE` | 0 | Shift table. |

Throughput is NCW·(NV−NC)·Z/NC information bits per (G+GAP) cycles.

The defaults correspond to the z = 512, I = 18, four-codeword configuration:

* 2.0 Gb/s at 100 MHz.
* 17.7 Mbit of RAM. The published count for that configuration is 17.56 Mbit.

Other published configurations need a rebuild:

* z = 422 with G = 422.
* z = 1024 with I = 12 or 10 and G = 1024.

Single-codeword versions use NCW = 1.

## Files

`rtl/` (one module per file, top `ldpccc_decoder`):

| File | Contents |
|---|---|
| `ldpccc_pkg` | Message type, quantiser, shift table, address functions. |
| `lut_unit`, `cnp`, `vnp` | Node arithmetic. |
| `msg_ram` | Simple dual-port RAM with synchronous read. |
| `msg_bank` | One codeword's RAMs with their address offsets. |
| `bpu`, `processor` | The datapath of one block row and of one iteration. |
| `addr_ctrl` | Stage and step sequencer. |

`tb/`:

* Each block has a self-checking testbench `tb_<block>`.
* `ldpccc_ref` is an independent behavioural decoder. It indexes messages
  naturally by row, column and check number, with no RAM layout.
* `dec_checker` drives a decoder with a deterministic noisy all-zero codeword
  and compares every hard decision with `ldpccc_ref`. It also checks:
  * the clear length;
  * the step length;
  * `ch_set`;
  * the latency;
  * that a stall happens.
* `tb_ldpccc_decoder` runs two small decoders end to end:
  * the 2 × 4, z = 4 example code with three processors and two codewords;
  * a single-codeword build with GAP = 2.
* `tb_ldpccc_4x24` runs the default 4 × 24 base matrix with four codewords,
  at z = G = 32 with 4 processors.

Simulate, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/ldpccc_pkg.sv \
        $(ls rtl/*.sv | grep -v _pkg) tb/tb_util_pkg.sv tb/ldpccc_ref.sv tb/dec_checker.sv tb/tb_ldpccc_decoder.sv \
        --top-module tb_ldpccc_decoder && ./obj_dir/Vtb_ldpccc_decoder

(packages first). Every testbench prints `TB_RESULT checks=N failures=M`.

## Departures and limits

* **Shift values.** The base-matrix shifts are a stand-in (see above), so
  error rates will not match those of the published code.
* **Quantisation.** The quantisation step 0.5 and the rounding rule are
  assumed; the original derives its step from density evolution.
* **Memory depth.** RAM depth equals G. It is not rounded up to a power of
  two.
* **Pipeline registers.** The CNP and VNP are combinational within the
  one-cycle read-to-write path. A fast implementation would pipeline them
  and raise GAP to match.
* **Noise generator.** The AWGN noise generator used for hardware error-rate
  measurements is not part of this RTL.
* **Default-size simulation.** The default-size decoder has about 2,200
  check and variable processors. Its verilator build did not finish within
  10 minutes, so it was not simulated.
  * The largest size simulated is `tb_ldpccc_4x24`: the 4 × 24 base matrix
    with z = G = 32, 4 processors and 4 codewords.
  * There, 14,798 hard decisions matched the reference.
  * The default-size build differs only in its parameter values.
* **Start-up.** After reset the message memories hold zero LLRs, so the
  code's start is treated as unknown rather than as known zeros. The first
  few output sets therefore decode worse than the steady state.
