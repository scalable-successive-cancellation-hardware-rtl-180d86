# A semi-parallel successive-cancellation polar decoder in SystemVerilog

Polar codes are decoded by successive cancellation (SC): the decoder walks a
binary tree of log-likelihood ratios (LLRs) from the received channel values
down to the individual bits, deciding bit 0 first, then bit 1 with the
knowledge of bit 0, and so on. Two ideas make this affordable in hardware for
very long codes (N = 2^15 and beyond):

* **Semi-parallel datapath.** Only P processing elements (PEs) exist, P much
  smaller than N/2. A tree stage with 2^l nodes is swept P nodes per clock
  cycle, so large stages take several cycles and small ones take one. All
  operands move through wide SRAM words and fixed wiring, never through large
  multiplexers, so the clock rate does not fall as N grows.
* **Partial sums from an encoder.** The g function of SC needs, for every
  node, the XOR combination ("partial sum") of bits already decided. Instead of
  a partial-sum network that grows with N, a small semi-parallel encoder
  re-encodes the decided bits block by block and keeps the results in SRAM,
  one P-bit word per cycle.

This RTL implements the decoder architecture of *Scalable Successive-
Cancellation Hardware Decoder for Polar Codes* (A. J. Raymond and W. J.
Gross): separate channel and internal LLR memories (which lets the next frame
load while the current one is decoded and lets the two memories use different
word lengths), a chained stage-0 PE that decides two bits per cycle, and the
semi-parallel partial-sum encoder. Where the paper leaves a detail open (the
memory map, the encoder's word layout, the input interface, saturation) this
design makes its own choice; these are listed in
[Where this design departs from the paper](#where-this-design-departs-from-the-paper).

Default configuration: N = 32768 (2^15), P = 64, quantization (6,3,2), that
is 6 integer bits for internal LLRs, 3 integer bits for channel LLRs and 2
fractional bits for both: internal LLRs Q = 8 bits, channel LLRs Qc = 5 bits.
The frozen-bit ROM holds a rate-1/2 code.

## The algorithm in fixed point

With a and b two LLRs of a node pair and s a partial sum, the PEs evaluate the
min-sum approximation

    f(a, b)    = sign(a) sign(b) min(|a|, |b|)
    g(s, a, b) = b + (-1)^s a

Results saturate to the symmetric range [-(2^(Q-1)-1), 2^(Q-1)-1]. Channel
LLRs have the same fractional bits as internal ones, so they enter the PEs
sign-extended from Qc to Q bits. A decided bit is 1 when its LLR is negative,
0 when the LLR is zero or positive, and always 0 when the bit is frozen.

The code is `x = u F^(n)` with `F = [1 0; 1 1]`, bits in natural order. In the
SC tree, stage l (l = n-1 down to 1) holds blocks of 2^(l+1) LLRs; its 2^l
nodes pair LLR j with LLR j + 2^l of the block. Stage n-1 reads the channel;
stage 0 is the bit decision.

## The schedule

The decoder handles the bits in pairs. For pair p (bits u_2p and u_2p+1):

1. **f/g passes.** For p = 0 every stage from n-1 down to 1 runs an f pass.
   Otherwise, with t the number of trailing zero bits of p, stage t+1 runs a
   g pass and stages t down to 1 run f passes. A pass on stage l takes
   max(1, 2^l / P) cycles.
2. **Chained PE.** One cycle on stage 0 evaluates f, decides u_2p, evaluates
   g with that decision and decides u_2p+1.
3. **Encoder.** Encoder stage 0 merges the two new bits; then, as long as the
   block of 2^(e+1) bits that ends with this pair is complete (bit e of p is 1),
   encoder stage e+1 follows. Encoder stage e takes max(1, 2^(e+1) / P) cycles.
   After the frame's last pair the encoder does not run: only the partial sums
   that a later g needs are computed.

For N = 8, P = 2 this gives exactly the following 17 cycles:

| cycle | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 | 16 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| stage 2 | f | f | | | | | | | | | g | g | | | | | |
| stage 1 | | | f | | | g | | | | | | | f | | | g | |
| stage 0 | | | | fg | | | fg | | | | | | | fg | | | fg |
| encoder 0 | | | | | e | | | e | | | | | | | e | | |
| encoder 1 | | | | | | | | | e | e | | | | | | | |
| output | | | | u0 u1 | | | u2 u3 | | | | | | | u4 u5 | | | u6 u7 |

Summed over a frame, the decoding latency is

    N/P (5P/2 - 1) + 2N/P log2(N/(4P)) - log2 P + 2   cycles,

88 572 cycles for N = 2^15, P = 64. The decoder outputs are registered, so the
last pair leaves one cycle later. Loading a frame takes N cycles (one LLR per
cycle) and overlaps the previous frame's decoding, so frames are decoded back
to back and the throughput is N (K/N) / 88 572 information bits per cycle: about
0.185 bit/cycle for the rate-1/2 default code.

### Why the read addresses run one cycle ahead

Every memory (channel, LLR, partial-sum, frozen ROM) has a registered read:
the address given in cycle t returns data in cycle t+1. `sc_controller` keeps
the operation of the current cycle in registers (`cur`) and computes the next
one (`nxt`) combinationally; the read addresses come from `nxt`, the write
enables and datapath controls from `cur`. The PE or encoder result of cycle t
is written on the edge that ends cycle t.

Because the schedule has no idle cycles, a stage often reads a word that the
previous operation wrote on the very edge on which the read address is
sampled: stage 0 reads the two LLRs that stage 1 has just produced, the first
word of a pass reads the last word of the pass above, encoder stage e+1 reads
the last word of encoder stage e. The SRAM array then still holds the old
word. Each LLR SRAM and partial-sum SRAM therefore has a bypass register: when
the write and read addresses match on an edge, the write data are captured and
selected in place of the array output in the next cycle.

## Memory organisation

All memories are word-organised; a word holds P elements.

**Channel SRAMs 1 and 2** (N/(2P) words of P·Qc bits each; 256 x 320 bits at
the defaults). LLRs 0..N/2-1 of a frame are in SRAM 1, N/2..N-1 in SRAM 2, word
w holding LLRs wP..wP+P-1. In pass cycle k of stage n-1, both SRAMs read word
k, and PE lane j receives a from SRAM 1 and b from SRAM 2: exactly the node
pairs (j, j + N/2) of that stage.

**Internal LLR SRAMs 1 and 2** (P·Q bits per word). Stage l (1..n-1) writes its
2^l results into region l. The first half of the results goes to SRAM 1, the
second half to SRAM 2, so that stage l-1 again finds operand a in SRAM 1 and
operand b in the same lane and word of SRAM 2:

* a stage with more than P results writes one word per cycle, the first half
  of its cycles to SRAM 1 and the second half to SRAM 2;
* a stage with 2^l <= P results writes one word to both SRAMs in the same
  cycle, SRAM 2 receiving the word shifted down by 2^(l-1) lanes (a barrel
  shifter on the SRAM 2 write port).

Region l occupies max(1, 2^(l-1)/P) words in each SRAM; the regions are stacked
from l = 1 upwards (`polar_pkg::llr_base`). At the defaults each SRAM has 261
words of 512 bits.

**Partial-sum SRAMs A and B** (P bits per word). Partial sums are kept in
natural order, so the g pass on stage l reads word k of region l of SRAM A
and lane j gets the partial sum of node kP+j.

* SRAM A, region l (l = 1..n-1, max(1, 2^l/P) words): the encoding of the
  earlier ("left") block of 2^l bits, read by g passes of stage l and by
  encoder stage l as its L operand.
* SRAM B, region l (l = 1..n-2): the encoding of a later ("right") block of
  2^l bits, waiting to be merged with its left neighbour by encoder stage l.

Encoder stage e writes its 2^(e+1)-bit result to region e+1 of A when that
block is itself a left block (bit e of the pair index is 0), else to region
e+1 of B. Sizes at the defaults: A 516 words, B 260 words, together 49 664
bits, the same total as the paper's P(3N/(2P) + 2 log2 P - 4).

**Frozen-bit ROM**: N/2 words of 2 bits (u_2p, u_2p+1). The paper does not
publish its frozen sets; this ROM is filled at elaboration by the
polarization-weight rule: with beta_j = round(4096 * 2^(j/4)) (a 21-entry
integer table), the weight of index i is the sum of beta_j over the set bits j
of i, and u_i is frozen when that weight is below `PW_THRESHOLD`. The weight
grows with the reliability of the bit channel, so the threshold sets the rate:
the default 134 807 leaves K = 16 385 information bits at N = 2^15 (rate 1/2).
Other useful values: N = 2^15 with rates 1/4, 3/4 and 0.9: 164 791, 104 823,
78 896; rate 1/2 at N = 2^16, 2^17, 2^18, 2^20: 162 362, 195 130, 234 098,
335 548; N = 256, rate 1/2: 32 486. Nothing else in the decoder depends on
the code.

Total storage at the defaults: 163 840 (channel) + 267 264 (internal LLR) +
49 664 (partial sums) + 32 768 (ROM) = 513 536 bits.

## The partial-sum encoder

Encoder stage e merges two neighbouring blocks of 2^e bits that are already
encoded, L (earlier) and R (later), into the encoding of their concatenation:

    out[j]       = L[j] xor R[j]     j < 2^e
    out[j + 2^e] = R[j]

These are the encoding graph's XOR and pass-through nodes. Stage 0 takes its
one-bit blocks directly from the chained PE (through a register). A stage whose
result fits into one word (2^(e+1) <= P) forms it in one cycle as
`(R << 2^e) | (L xor R)`; a larger stage spends its first half of cycles on
the XOR words (reading L from A and R from B) and its second half on copying
the R words. Each cycle produces one complete output word.

## Channel input and frame overlap

`channel_buffer` accepts one Qc-bit LLR per cycle (valid/ready), packs P of
them into a word and writes it to the proper channel SRAM in the cycle the
word's last LLR arrives. Its three states make the overlap safe:

* LOAD: accepting LLRs (`in_ready` = 1);
* FULL: a complete frame is stored; the controller starts it (`take`) as soon
  as it is idle or has just decided the last pair of the previous frame;
* BUSY: the frame is being decoded; the channel memory is read-only.

After the g pass of stage n-1, when pair N/4 begins, the channel LLRs are no
longer needed; the controller pulses `release_ch` and the buffer returns to
LOAD. The next frame thus loads during the second half of the current
decoding (N cycles of loading against about 44 000 cycles of second half at
the defaults).

## Interface of the top level

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `in_valid`, `in_llr`, `in_ready` | in, in, out | 1, QC, 1 | channel LLRs in natural order, one per accepted cycle |
| `u_valid` | out | 1 | a decided pair is presented |
| `u_out` | out | 2 | `u_out[0]` = u_2p, `u_out[1]` = u_2p+1 |
| `u_pair` | out | n-1 | pair index p |
| `u_last` | out | 1 | last pair of the frame |
| `llr_out` | out | 2 x Q | stage-0 LLRs of the two bits (soft output) |
| `busy` | out | 1 | a frame is being decoded |

Parameters of `polar_decoder_top`: `N` (power of two, N >= 4P), `P` (power of
two, >= 2), `QI`, `QIC`, `QF` (quantization), `PW_THRESHOLD` (frozen-set rule). Q
and QC are derived.

## Modules

| file | block |
|---|---|
| `rtl/polar_pkg.sv` | phase type, region sizes and base addresses |
| `rtl/polar_decoder_top.sv` | top level, wiring of the figure-level blocks |
| `rtl/sc_controller.sv` | schedule, addresses, write enables, frame hand-off |
| `rtl/channel_buffer.sv` | serial-to-word packing and channel-memory hand-off |
| `rtl/dp_sram.sv` | simple dual-port SRAM, registered read (channel SRAMs) |
| `rtl/sram_bypass.sv` | dp_sram plus bypass register (LLR and partial-sum SRAMs) |
| `rtl/pe_array.sv` | P PEs, operand multiplexer and sign extension, chained PE |
| `rtl/decoding_pe.sv` | one f/g PE |
| `rtl/chained_pe.sv` | stage-0 PE deciding two bits per cycle |
| `rtl/ps_encoder.sv` | partial-sum encoder datapath |
| `rtl/frozen_rom.sv` | frozen-bit ROM |

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. The reference for the decoder is
`tb/polar_ref_pkg.sv`, a plain software SC decoder with the same fixed-point
rules that keeps all tree levels in one array and computes every partial sum
by re-encoding the decided bits, so it shares neither the memory map nor the
schedule with the RTL.

* `tb_decoding_pe`, `tb_chained_pe`: all operand pairs at Q = 5.
* `tb_pe_array`: random words, both sources and both functions.
* `tb_ps_encoder`: every encoder stage up to 128-bit blocks against the
  software polar transform.
* `tb_sc_controller`: the N = 8, P = 2 schedule above, cycle by cycle, and the
  latency formula at N = 1024, P = 16.
* `tb_dp_sram`, `tb_sram_bypass`, `tb_channel_buffer`, `tb_frozen_rom`.
* `tb_polar_decoder_top` (N = 256, P = 8, six frames) and
  `tb_polar_decoder_full` (all defaults, N = 2^15, P = 64, three frames): frames
  streamed back to back, the first noiseless and the others through a noisy
  channel; every decided bit must equal the reference decoder's, the noiseless
  frame must decode to the transmitted bits, and every frame's latency must
  equal the formula. Both also count that each mechanism occurred: bypass
  reads on all four bypassed SRAMs, loading during decoding, input
  back-pressure, back-to-back frame starts, channel f and g passes,
  single-word and multi-word encoder stages, frozen and information bits, and
  at least one noisy frame decoded to the transmitted bits. The full-size run
  takes about ten seconds with Verilator.
* `tb_workloads_n15`: ten code configurations at N = 2^15, P = 64 (rates
  1/4 to 0.9 and quantizations from (5,5,0) to (9,4,0)), two frames each,
  through `tb/polar_bench.sv`, a parameterized copy of the end-to-end bench.
* `tb_workloads_long`: one noiseless frame each at N = 2^16, 2^17, 2^18 and
  2^20 (P = 64), checking the decoded bits and the latency formula. This is
  the slowest bench: about a minute to build and half a minute to run.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/polar_pkg.sv tb/polar_ref_pkg.sv tb/tb_polar_decoder_top.sv \
        --top-module tb_polar_decoder_top -o sim
    ./obj_dir/sim

The decoder has been checked only in simulation; it has not been synthesized
for timing, so nothing here confirms the paper's clock rates.

## Where this design departs from the paper

* **Memory map.** The paper gives the total memory sizes and word widths; the
  region layout and the A/B use of the two partial-sum SRAMs are this design's.
  The block diagram shows the two partial-sum SRAMs feeding the PEs through a
  multiplexer; here the PEs read only SRAM A, and SRAM B is read only by the
  encoder. The internal LLR SRAMs give one word per SRAM to each stage with at
  most 2P results, 320 LLRs more than the paper's Q(N + P log2 P - P) count.
* **Encoder word layout.** The paper's encoder uses P/2 encoding PEs that each
  produce an XOR and a pass-through value and keeps partial sums in
  bit-reversed order. This encoder keeps natural order and produces one
  aligned output word per cycle (XOR words, then copy words), using P XOR
  lanes and exactly the paper's number of cycles.
* **Frozen set.** The paper's codes are optimized for a target error rate but
  their frozen sets are not given; the ROM uses the polarization-weight rule
  above.
* **Interfaces and fixed-point details.** The valid/ready input, the registered
  outputs, the symmetric saturation and the tie rule of the hard decision are
  this design's choices.
* **Widths printed in the block diagram.** The diagram labels the PE output
  line "2Q" and the encoder output line "Q"; here the PEs write P·Q bits per
  cycle and the encoder P bits, as the paper's text describes. The 2Q width is
  used for the soft output `llr_out`.
