# Line successive-cancellation decoder for polar codes

A polar code of length n = 2^m carries k information bits in a vector
u = (u_0 … u_{n-1}). The other n − k positions, the *frozen* set, are fixed to 0.
The codeword is x = u·G with G = B·F^{⊗m}, where F = [[1,0],[1,1]] and B is the
bit-reversal permutation. A successive-cancellation (SC) decoder estimates
u_0, u_1, … in order. Each estimate uses the channel log-likelihood ratios (LLRs)
and all the bits decided before it.

This RTL implements the *line* SC decoder. All the arithmetic is done by one row of
n/2 identical processing elements (PEs), which serves every level of the decoding
tree in turn. Intermediate LLRs are kept in a tree of 2n − 1 registers, and
partial sums in n − 1 one-bit registers. Two counters sequence the whole decoder.
One stage of the tree runs per clock cycle, so a codeword takes 2n − 2 cycles
whatever the code rate. Area grows linearly in n. The default build is the
(1024, 512) code with 5-bit LLRs.

The decoder architecture follows Leroux, Raymond, Sarkis, Tal, Vardy and Gross,
*Hardware Implementation of Successive Cancellation Decoders for Polar Codes*.
This comes from that publication:

- the line of n/2 PEs;
- the min-sum PE in sign-magnitude arithmetic;
- the register-tree sizes and the address mappings;
- the counter-based control;
- the partial-sum update rule.

These are choices made for this RTL and are listed in
[Departures and own choices](#departures-and-own-choices):

- the channel-loading handshake and the output port;
- overflow handling in the PE;
- the frozen-set construction.

## The decoding schedule

For bit i the decoder walks the tree from the channel (stage m−1) down to a leaf
(stage 0). Stage l combines pairs of the 2^{l+1} LLRs produced by stage l+1 (or by
the channel) into 2^l LLRs. It uses one of two functions, both with the min-sum
approximation:

    f(a, b) = sign(a)·sign(b)·min(|a|, |b|)
    g(a, b, s) = (−1)^s·a + b          (s = partial sum, a bit)

Stage l uses f when bit l of i is 0 and g when it is 1. Whatever stage l produced
for bit i stays valid until stage l runs again. The walk for bit i+1 therefore
starts at stage ffs(i+1), the lowest set bit of i+1, and never at the top. Stage
l runs 2^{m−l} times per codeword. Summed over the stages this gives 2n − 2 cycles.
For n = 8:

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 |
|-------|---|---|---|---|---|---|---|---|---|----|----|----|----|----|
| stage 2 | f | | | | | | | g | | | | | | |
| stage 1 | | f | | | g | | | | f | | | g | | |
| stage 0 | | | f | g | | f | g | | | f | g | | f | g |
| bit decided | | | u0 | u1 | | u2 | u3 | | | u4 | u5 | | u6 | u7 |

Only one stage is busy at a time, and stage l needs 2^l PEs. A single row of n/2
PEs can therefore play every stage: stage l uses PEs 0 … 2^l − 1.

`sc_ctrl` holds two counters:

- **i**, the bit being decoded, 0 … n−1;
- **l**, the active stage. It counts down to 0, then reloads with
  ffs\*(i+1), which is m−1 when i+1 wraps to 0. The same rule starts the next
  codeword at the top.

The PE function is `i[l] ? g : f` and goes to all PEs at once.

## The LLR register tree and its address maps

`sc_llr_regs` holds 2n − 1 Q-bit cells laid out as follows:

| cells | contents |
|-------|----------|
| 0 … n−1 | channel LLRs (λ_0 in cell 0); a shift register |
| 2n − 2^{l+1} … 2n − 2^{l+1} + 2^l − 1 | output of stage l (2^l cells) |

For n = 8:

- cells 0–7 hold the channel;
- cells 8–11 hold stage 2;
- cells 12–13 hold stage 1;
- cell 14 holds stage 0.

When stage l is active, PE p (p < 2^l) uses these cells:

    reads   La = MEM(2n − 2^{l+2} + 2p),  Lb = MEM(2n − 2^{l+2} + 2p + 1)
    writes       MEM(2n − 2^{l+1} + p)

Stage l therefore reads exactly the region that stage l+1 wrote, and stage m−1
reads the channel. The f and g results of a stage share its region. The g result
overwrites the f result only after the lower stages have used the f result.

Each cell has exactly one writer: one PE, in one stage. The PE-to-memory
demultiplexer is therefore only a write enable per region. The reverse direction,
`sc_llr_mux`, is one small multiplexer per PE, with one input per stage in which
that PE is active:

- PE 0 has m inputs;
- PEs n/4 … n/2−1 only ever read the channel.

This is the multiplexing that the linear-area argument relies on: a crossbar
would not be linear. Every cell is coded as a separate register (a `g_*`
generate block holding `r`), not as a memory array. That is the register-only
memory style of the architecture, and it keeps synthesis and simulation away
from multi-port memory inference.

## Partial sums

This is the least obvious part of the design. Take stage l, running g for a bit
i whose bit l is 1. The bits decided in the first half of the current
2^{l+1}-bit block are u_{i0} … u_{i0+2^l−1}, where i0 is i with its low l+1 bits
cleared. PE p then needs bit p of the polar transform of those 2^l bits. The full
decoding graph holds (n/2)·log2(n) such sums. At any moment, however, stage l
needs only 2^l of them, so n − 1 one-bit cells in total are enough.

`sc_ps_mem` gives stage l the cells n − 2^{l+1} … n − 2^{l+1} + 2^l − 1. PE p
reads cell n − 2^{l+1} + p. After each decision u_i, every stage l with bit l of
i equal to 0 updates its region. Such a bit lies in the first half of its block,
so the stage will need it later. With r = i mod 2^l and z\* = bitrev_l(p):

- r = 0: the first bit of a new block. Cell p gets u_i if p = 0, and 0
  otherwise. This is a restart, not an XOR.
- otherwise: cell p ^= u_i, but only if z\* has no bit that r lacks. That is the
  transform's row r, column p.

Stages with bit l of i equal to 1 hold still while their g operations consume
them. The restart replaces clearing the sums of the full graph per codeword; the
source states the rule only as an XOR per graph node. For stage 0 the rule
collapses to "cell n−2 ← u_i when i is even". That is the u_{i−1} that the g of
every odd bit needs.

Example, n = 8, stage 1 (cells 4, 5) after u_0 … u_3:

- u_0 restarts the region to (u_0, 0);
- u_1 XORs into both cells, giving (u_0⊕u_1, u_1);
- u_2 and u_3 have bit 1 set and leave the region alone.

At cycle 12 the g of stage 1 for u_6 instead reads a region rebuilt from u_4 and
u_5.

## The processing element

`sc_pe` is combinational and works on sign-magnitude words (sign in bit Q−1,
1 = negative). Sign-magnitude makes f trivial: an XOR of the signs, and the
smaller magnitude. One magnitude comparator is shared by f and g:

- for f, it picks the smaller magnitude;
- for g, it picks which operand's sign survives a subtraction.

g uses one unsigned adder, whose second operand is chosen by
sign(La) ⊕ s ⊕ sign(Lb):

- equal effective signs: max + min;
- different effective signs: max + two's complement of min, which is max − min.

Two details are this design's own:

- **Saturation.** An addition that overflows saturates to 2^{Q−1} − 1. A wrap
  would flip the magnitude.
- **Ties.** On equal magnitudes of opposite sign the zero result takes sign(Lb).

Because of the second rule a −0 can occur. The decision unit reads the sign bit
directly, so a −0 decides 1.

## Decision and frozen bits

While stage 0 is active, `sc_decision` turns PE 0's output into
u_i = sign bit AND NOT frozen. `sc_frozen_rom` is indexed by i. The same cycle
updates the partial sums. The stage-0 register (cell 2n−2) is written but never
read.

The frozen set is not stored in a file. `sc_frozen_rom` computes it at
elaboration with a constant function, so the ROM is a constant bit vector for
any n and k. It uses the Bhattacharyya-parameter construction for BPSK on AWGN
at a design Eb/N0 of `DESIGN_EBN0_DB` (default 2 dB):

1. Start from z0 = exp(−(k/n)·Eb/N0).
2. For each index, walk its m bits from the most significant down. On bit 0 set
   z ← 2z − z²; on bit 1 set z ← z².
3. The k indices with the smallest z carry information; the others are frozen.
   On equal z, the lower index is taken first.

The k-th smallest z is found by bisecting on a threshold, which keeps the work
at elaboration to about 60·n comparisons. Changing `K` or `DESIGN_EBN0_DB`
changes only the ROM contents; the rest of the hardware is unchanged.

## Interface and timing (`sc_line_decoder`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock; synchronous active-low reset |
| llr_in | in | Q | channel LLR, sign-magnitude; λ_0 first |
| llr_valid / llr_ready | in / out | 1 | an LLR moves when both are high |
| u_valid | out | 1 | one pulse per decided bit, in order u_0 … u_{n−1} |
| u_hat, u_idx | out | 1, log2 n | the bit and its index |
| u_last | out | 1 | marks u_{n−1} |
| u_frozen | out | 1 | the bit was a frozen position |
| busy | out | 1 | a codeword is being decoded |

Parameters:

- `N` (default 1024), a power of two, at least 4;
- `Q` (default 5), at least 2;
- `K` (default N/2), the number of information bits;
- `DESIGN_EBN0_DB` (default 2.0), the design point of the frozen-set
  construction.

Timing:

- Input and decoding: the n channel LLRs shift into cells 0 … n−1. Decoding
  starts in the cycle after the n-th LLR is stored, provided the decoder is idle.
  It then runs for exactly 2n − 2 cycles.
- Output: each u_valid comes one cycle after that bit's stage-0 cycle.
- Overlap: stage m−1 is the only reader of the channel cells. Its last read is
  the g at the first cycle of bit n/2. From that cycle on, `llr_ready` is high
  again and the next codeword shifts in during the second half of the current
  one.
- Throughput: n−1 of the n loads overlap decoding. A continuous stream
  therefore gets one codeword every 2n cycles, about n/(2n) = 0.5 bit per clock.
  At the 500 MHz that the architecture was synthesised for, this is 250 Mbit/s
  of u bits.

## Departures and own choices

- **Throughput.** 2n cycles per codeword in a stream, against the 2n − 2 of the
  decoding schedule alone. The two extra cycles come from the one load that
  cannot overlap and from the start cycle. The schedule itself is 2n − 2 cycles
  and is checked.
- **Decision point.** The decision is taken from PE 0's output in its own cycle,
  as the text describes. The block diagram draws the decision unit behind the
  stage-0 register.
- **Channel handshake.** The valid/ready handshake, the shift direction and the
  output port with index, last and frozen flags are not specified by the source.
- **PE details.** Saturation of g, the tie rule of the comparator and the sign-bit
  position are own choices.
- **Partial-sum restart.** The restart at the first bit of each block is the
  formulation used here for the update on n − 1 time-multiplexed cells.
- **Frozen set.** The frozen-set construction and the design SNR are own choices.
  The source names Tal and Vardy's construction but gives no set.
- **Quantisation.** Q = 5 follows the area study in the text. One figure caption
  of the source says q = 6. Q is a parameter.
- **Not built.** The butterfly and pipelined-tree decoders, which serve only as
  comparison points. The SRAM-based memory variant, which is mentioned as an
  alternative.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|-----------|----------------|
| `tb_sc_pe` | all 4096 input combinations at Q = 5 against integer min-sum arithmetic, saturation and ties included |
| `tb_sc_llr_mux` | read mapping for every stage and PE, n = 16 |
| `tb_sc_llr_regs` | shift loading, and a write to each stage region that leaves every other cell unchanged, n = 16 |
| `tb_sc_ps_mem` | partial sums seen by every g over 6 random codewords, against the reference encoder, n = 16 |
| `tb_sc_ctrl` | the n = 8 schedule table above cycle by cycle; `llr_ready` low while the channel is in use; 2n period in a stream |
| `tb_sc_frozen_rom`, `tb_sc_decision` | ROM contents: the (8,4) set, and all 1024 entries at n = 1024 against the testbench's own construction; the decision rule |
| `tb_sc_line_decoder` | n = 64: 12 noisy codewords at 0–3 dB |
| `tb_sc_line_decoder_full` | n = 1024, Q = 5, default parameters: 3 codewords |
| `tb_sc_line_decoder_sweep` | six decoders in parallel decoding 5500 noisy codewords in all at 0–4 dB: n = 8, 16, 64, 256 at Q = 5, and n = 256 at Q = 4 and Q = 6; prints frame-error counts per configuration and Eb/N0 |

The two end-to-end testbenches work as follows:

- Random information bits are encoded, sent as BPSK over AWGN, clipped at ±3σ
  and quantised.
- Every output bit must equal that of `tb_sc_ref_pkg::ref_decode`. This is an
  independent SC decoder that re-walks the tree from the channel for every bit.
- Both check the cycle budget and count the mechanisms: f and g cycles,
  g saturation, a frozen bit whose LLR would have decided 1, input backpressure,
  loading during decoding, and restart after an input pause.

Run from the repository root:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/sc_pkg.sv tb/tb_sc_ref_pkg.sv tb/tb_sc_line_decoder.sv \
        --top-module tb_sc_line_decoder -Mdir obj_top
    obj_top/Vtb_sc_line_decoder

For the other testbenches, replace the testbench name; the sweep also needs
`-y tb` to find its per-configuration unit `tb_sc_sweep_unit`. The n = 1024 build takes
about a minute and a half of C++ compilation and runs in under a second.

What has not been checked:

- no gate-level or timing analysis;
- error rates only over a few hundred frames per point, far from the low
  frame-error region;
- Q = 4 and Q = 6 only at n = 256, not at n = 1024.
