# Pruned folded polar encoder

A polar code of length N = 2^n maps a source frame u of N bits to the code word
x = u · F^{⊗n} over GF(2), with F = [1 0; 1 1]. In hardware this is a butterfly
network of n columns of N/2 two-input "XOR-or-pass" units. A folded encoder does not build
the whole network. It takes L source bits per clock cycle and reuses a small network over
N/L cycles, as a pipelined FFT does.

Puncturing and shortening, which give polar codes lengths that are not powers of two, leave
a long run of frozen (always-zero) source bits at the start of every frame. Any XOR of
zeros is zero, so the cycles that would carry only those bits do no useful work. The
**pruned** folded encoder skips them. With C leading frozen bits, a frame needs
ceil((N−C)/L) cycles instead of N/L. For the (1024, 744) code with L = 32 and C = 342
this is 22 cycles instead of 32, so throughput rises from 32 to 46.5 bits per cycle.

This RTL implements that encoder for any power-of-two N and L (2 ≤ L < N) and any C.
By default it is built for N = 1024, L = 32, C = 342. With C < L it is the plain folded
encoder.

## Data order

**Input.** A frame is B = N/L blocks. Block b holds source bits bL … bL+L−1, and bit l of
`in_blk_i` is source bit bL+l. The first Z = floor(C/L) blocks are all frozen and are
never presented. A frame is the P = B − Z blocks Z … B−1, fed in order on consecutive
accepted cycles. `in_sof_o` is high when the next accepted block is block Z of a new
frame. Block Z may still hold some frozen bits (C mod L of them). The encoder forces
those bits to zero itself.

**Output.** The code word is returned as B output blocks k = 0 … B−1 of L bits. Lane p
of block k carries code bit

    x[(p mod 2)·N/2 + k·L/2 + bitrev(p/2)]          bitrev over log2(L)−1 bits

So each block holds L/2 consecutive bits of the first half of the code word and the
matching L/2 bits of the second half. The halves are interleaved lane by lane. Within a
half, the order is bit-reversed across lane pairs. This order is what the datapath
produces naturally. The encoder computes u·F^{⊗n} without the bit-reversal permutation
B_N that some definitions put into the generator matrix. If B_N is wanted, it is only a
different naming of the output bits.

## The datapath

The architecture factorises F^{⊗n} into an in-cycle part that works on one block and a
temporal part that combines blocks from different cycles.

### In-cycle network: XP and P_K

`xp` is the 2×2 kernel. Its upper output is a⊕b and its lower output is b.
`spatial_stage` is one column of L/2 XP units on lane pairs (0,1), (2,3), … followed by
the permutation P_K on every group of K lanes. P_K sends the even lanes of a group to its
upper half and the odd lanes to its lower half, keeping their order.
`spatial_network` chains log2 L such stages with K = L, L/2, …, 2. P_2 is the identity.
After stage i, adjacent lanes hold indices that differ in bit i+1, so the next XOR column
finds its partners next to each other. The network computes F^{⊗log2 L} of the block in
one cycle. Its output lane p holds result bit bitrev(p).

### Temporal part: commutator chains

The L lanes then form L/2 independent chains of two lanes. Each chain has log2(N/L)
stages. Each stage is a commutator S_K (K = 2, 4, …, N/L) followed by an XP unit.

A commutator S_K (`commutator`) has K/2 delay registers on its lower input, a 2×2
switch, and K/2 delay registers on its upper output. Let D = K/2. If the switch is crossed
in the right cycles, two stream elements that entered D cycles apart leave in the same
cycle, one on each line. The following XP then applies the kernel to source blocks D
apart. Stage i (D = 2^i) combines blocks whose indices differ in bit i.

The switch timing is the least obvious part of the design. Stage i first sees a frame's
data 2^i − 1 cycles after the frame started, because each earlier stage adds its own upper
delay. Its switch is therefore crossed in frame cycle t (0 … B−1) when

    bit i of ((t − (2^i − 1)) mod B) = 1.

This makes the stage's switch period equal to twice its delay, aligned to the moment the
stage's first element pair is complete.

With this schedule, block 0 of a frame leaves the last stage in the same cycle as the
frame's last block enters. Every code bit depends on the last source block, so this is the
earliest any output can appear. Blocks 1 … B−1 follow in the next B−1 cycles, while the
next frame is already entering. The encoder holds N − L delay bits, one chain of
2·(1 + 2 + … + B/2) bits per lane pair.

## Pruning the frozen blocks

The commutator network is linear, and the skipped blocks are zero. Feeding a zero block
therefore only advances the delay lines with zero input. That step can be computed instead
of clocked. Each commutator can take several steps in one clock cycle: step s reads the
state left by step s−1 and has its own input, switch setting and enable (`STEPS` ports).
In the cycle that accepts block Z of a frame, the encoder performs Z zero-input steps with
frame cycles 0 … Z−1, and then the real step with frame cycle Z. In every later cycle of
the frame it performs only the real step, with frame cycle r+Z. The delay lines then hold
exactly what they would hold had the zero blocks been fed. The result is bit-identical to
the unpruned encoder fed the full frame.

The Z zero-input steps also produce outputs. These are blocks 1 … Z of the previous frame,
which the unpruned encoder would have emitted in the skipped cycles. They leave together on
`out_ext_x_o` in that first cycle, next to block Z+1 on `out_x_o`. So each frame has P
output cycles, and one of them carries Z+1 blocks. For N = 16, L = 4, C = 7 (Z = 1, P = 3)
the schedule repeats every three cycles:

| frame cycle r | block fed | `out_x_o` | `out_ext_x_o` |
|---|---|---|---|
| 0 | u-block 1 | block 2 of previous frame | block 1 of previous frame |
| 1 | u-block 2 | block 3 of previous frame | – |
| 2 | u-block 3 | block 0 of this frame | – |

Latency (first block in to first block out, counted inclusively) is P cycles. The frame
period is also P cycles.

The extra steps cost combinational logic, not registers. Each extra step repeats the
commutator muxes and the XP units. Much of it reduces to constants because the step inputs
are zero and the switch settings are fixed. The path through Z+1 chained steps is long, and
it sets the clock rate of a large-Z build.

## Control and interface

`encoder_ctrl` holds the frame counter r (0 … P−1) and a flag that one full frame has been
accepted since reset. From these it derives the step enables, every switch setting, the
index of the output block (`out_blk_o`: 0 when r = P−1, r+Z+1 otherwise), and the valid
flags.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (all delay lines clear to 0) |
| `in_valid_i` | in | 1 | a block is present; the whole encoder advances only in such cycles |
| `in_blk_i` | in | L | source block |
| `in_sof_o` | out | 1 | the block accepted now is block Z, the first fed block of a frame |
| `out_valid_o` | out | 1 | `out_x_o` holds a block of an accepted frame |
| `out_blk_o` | out | log2(N/L) | block index k of `out_x_o` |
| `out_x_o` | out | L | output block k, lane order as above |
| `out_ext_valid_o` | out | 1 | `out_ext_x_o` is valid (first cycle of a frame, not the first frame) |
| `out_ext_x_o` | out | Z × L | element e is block e+1 of the previous frame |

There is no back-pressure. `in_valid_i` acts as a clock enable, and outputs are valid only
in cycles with `in_valid_i` high. Outputs are combinational from the current input and the
registers, as in the cycle tables the design is based on: block 0 appears in the same cycle
as the frame's last input. Register them outside if timing requires. The last P−1 output
cycles of a frame happen while the next frame is fed. To drain the final frame of a burst,
feed one more frame, for example all zeros.

## Cost and performance

| quantity | this RTL | stated for the architecture |
|---|---|---|
| latency, frame period | ceil((N−C)/L) cycles | ceil((N−C)/L) |
| throughput | N / ceil((N−C)/L) bits/cycle | same |
| delay registers | N − L (+ counter) | N − L + 2 |
| XP units | at most (Z+1)·(L/2)·log2 N before constant folding | L/2·(log2 N + C) |

Measured in simulation, latency and frame period are equal for every size. They are 22
cycles for (N, L, C) = (1024, 32, 342), 6 for (256, 32, 95), 3 for (16, 4, 7), 4 for
(16, 4, 0) with no pruning, 6 for (64, 8, 16) and 14 for (32, 2, 5). The default build
synthesises to 998 flip-flops: 992 delay bits, a 5-bit frame counter and one flag.

## Where this departs from the published design

- The published circuit is drawn only for N = 16, L = 4. It stores the zero-block
  contributions in a few extra registers (one holding the single information bit of the
  first fed block) and adds extra output XORs, with switches on a period-3 schedule. The
  general construction here (multi-step commutators) is this design's own. It gives the
  same latency, the same throughput and the same single merged output cycle for any N, L
  and C. It does not apply the one- or two-register saving.
- The merged output cycle is the first cycle of the next frame (blocks 1 … Z+1 of the
  previous frame), not the last cycle of the current one.
- The number of merged cycles is described as ceil(C/L), while the latency is
  ceil((N−C)/L) = N/L − floor(C/L). These differ by one when L divides C. This design
  follows the latency formula and skips floor(C/L) blocks.
- The wiring of P_K is the stride permutation derived above. It agrees with the drawn P_4
  and with the straight top and bottom lines of the drawn P_8.
- The output order, reset, the valid handshake and the forcing of frozen bits to zero are
  not specified for the original and were chosen here.
- The quoted throughput for the (1024, 744) encoder, 16.07 Gb/s at 359.18 MHz, is below
  N/22 × f = 16.7 Gb/s. FPGA area and clock figures are not reproduced here.
- The code construction (Bhattacharyya recursion for erasure channels, the modified
  Tal–Vardy procedure) that decides the frozen set, and hence C, is an offline algorithm.
  It is not hardware and is not part of this RTL.

## Files

| file | content |
|---|---|
| `rtl/polar_pkg.sv` | `bitrev`, `zero_blocks` (Z), `out_index` (output lane map) |
| `rtl/xp.sv` | XOR-or-pass kernel |
| `rtl/spatial_stage.sv` | XP column + P_K |
| `rtl/spatial_network.sv` | the log2 L in-cycle stages |
| `rtl/commutator.sv` | S_K, with `STEPS` steps per cycle |
| `rtl/encoder_ctrl.sv` | frame counter, switch schedule, valid flags |
| `rtl/pruned_folded_encoder.sv` | the encoder (top) |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/enc_checker.sv`, `tb/enc_bench.sv` | random-frame stimulus and bit-exact scoreboard |

`tb_pruned_folded_encoder` runs six (N, L, C) sizes side by side: (16,4,7), (16,4,0),
(256,32,95), (64,8,13), (64,8,16), where L divides C, and (32,2,5), the narrowest
datapath. `tb_pruned_folded_encoder_full` runs the default (1024,32,342) build. Both
insert random idle cycles, drive garbage into the frozen bits of the first fed block, and
compare every output bit with a direct butterfly computation. They also check the latency
and frame period and report how often stalls, merged cycles and masking occurred. Each
testbench prints `TB_RESULT checks=… failures=…`.

To simulate with Verilator, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl -Itb rtl/polar_pkg.sv \
        rtl/xp.sv rtl/spatial_stage.sv rtl/spatial_network.sv rtl/commutator.sv \
        rtl/encoder_ctrl.sv rtl/pruned_folded_encoder.sv \
        tb/enc_checker.sv tb/enc_bench.sv tb/tb_pruned_folded_encoder.sv \
        --top-module tb_pruned_folded_encoder -o sim && obj_dir/sim

To build another code, set `N`, `L` and `C` on `pruned_folded_encoder`. The output
`out_ext_x_o` has floor(C/L) blocks, or one unused block when C < L.
