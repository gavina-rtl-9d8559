# GAVINA: a bit-serial GEMM accelerator with guarded aggressive undervolting

Timing errors from undervolting hit the most significant bits of an integer
multiply hardest, because those bits sit at the end of the longest carry
chains. A bit-serial accelerator computes the product one pair of operand bits
at a time, so it always knows the significance of the bits it is working on.
GAVINA uses that to run the compute array at two supply voltages. Pairs of low
significance run at an aggressively lowered *approximate* voltage, where timing
errors are allowed. The last `G` pairs of every multiplication, which are the
most significant, run at a safe *guarded* voltage. The design is called
Guarded Aggressive underVolting (GAV). The same bit-serial loop also gives
free choice of operand precision (1 to 8 bits, set independently for
activations and weights) at a throughput of `C·L·K / (A_bits·B_bits)` MACs
per cycle.

This repository holds synthesizable SystemVerilog for the digital part of the
accelerator, in its published shape `[C, L, K] = [576, 8, 16]`. It also holds
a self-checking testbench for every module. One of them runs the whole
accelerator at full size.

## 1. What one context computes

A *context* is one tile multiplication:

    P[k][l] (+)= sum over c of A[c][l] * B[k][c]
    A: [C, L] signed a_bits-bit activations    B: [K, C] signed b_bits-bit weights

Both operands are two's complement. Write `x = -x[n-1]·2^(n-1) + sum x[i]·2^i`.
The product then splits into `a_bits × b_bits` binary matrix products, one per
bit pair `(bitA, bitB)`:

    P += sign(bitA, bitB) · 2^(bitA+bitB) · popcount_c( A[c][l][bitA] & B[k][c][bitB] )
    sign = -1 when exactly one of bitA, bitB is its operand's top (sign) bit, else +1

The **Parallel Array** computes one such binary product per clock cycle for all
`K·L` outputs at once. It has `K × L` inner-product elements (iPEs). Each iPE
ANDs `C` activation bits with `C` weight bits and counts the ones, giving a
`clog2(C+1)` = 10-bit count. The loops over `c`, `l` and `k` are unrolled in
space. Only the two bit loops run in time, so a context takes exactly
`a_bits·b_bits` cycles.

## 2. Shift-and-accumulate in two levels

Each count must be shifted by `bitA+bitB` (0 to 14 positions) and added with
its sign. Doing that with a full barrel shifter on all 128 lanes every cycle
costs a lot of power. The work is therefore split in two:

* **L0** (every cycle). A small shifter (0–3 positions), an optional
  negation, and a 20-bit accumulator per lane.
* **L1** (once per *L0 window*). A full shifter (0–14) and a 32-bit
  accumulator per lane. It also reads and writes the result memory.

An L0 window is a run of consecutive pairs whose significances lie within 4
of each other. If a window opens at significance `s0`, each pair in it gets L0
shift `s - s0`. When the window closes, its sum is shifted by `s0` in L1.

**Pair order.** The controller visits the pairs in ascending significance
`s = bitA + bitB`, with `bitB` ascending within one significance. A window
opens at the first pair of the context, and again at the first pair whose
significance is more than 3 above the window's start. Example for
`A_bits = 6, B_bits = 4, G = 12`, one column per cycle
(`+`/`-` = sign, `A`/`G` = approximate/guarded supply):

    cycle   0 1 2 3 4 5 6 7 8 9 | 10 11 12 13 14 15 16 17 18 19 20 21 22 | 23
    bitB    0 0 1 0 1 2 0 1 2 3 |  0  1  2  3  0  1  2  3  1  2  3  2  3 |  3
    bitA    0 1 0 2 1 0 3 2 1 0 |  4  3  2  1  5  4  3  2  5  4  3  5  4 |  5
    L0Shift 0 1 1 2 2 2 3 3 3 3 |  0  0  0  0  1  1  1  1  2  2  2  3  3 |  0
    sign    + + + + + + + + + - |  +  +  +  -  -  +  +  -  -  +  -  -  - |  +
    supply  A A A A A A A A A A |  A  A  G  G  G  G  G  G  G  G  G  G  G |  G
    L1Shift                   0 |                                      4 |  8

Because the order is by significance, "the last G cycles" and "the G most
significant pairs" are the same set of pairs. Ties inside one significance go
to the pair with the larger `bitB`.

## 3. The GAV voltage schedule

A single number `G` per context sets the schedule. The last `G` pairs run at
`V_guard` and the rest at `V_aprox`:

* `G = 0` undervolts the whole multiplication.
* `G ≥ a_bits·b_bits` undervolts nothing.

The controller drives `vsel_guard` (1 = `V_guard`) to an external DVS
converter. The signal is aligned with the cycle in which the Parallel Array
works on that pair, one cycle after the operand read. Idle cycles request
`V_guard`. The converter is assumed to settle within a fraction of a cycle.
Only the input registers and the Parallel Array sit in the undervolted domain.
Everything after the synchronizer runs at a fixed safe voltage.

The **synchronizer** is the boundary between the domains. An undervolted iPE
may still be switching at the clock edge, so its first sampling flop can go
metastable. Two flop stages per bit keep such a value out of the accumulators.
In RTL it is a 2-cycle delay line. Undervolting errors themselves are a
physical effect and are not modelled: the RTL always computes the exact
result.

## 4. Datapath and timing

    host ──► A1 Mem ──┐ (copy, one plane/cycle)        ┌─────────── approximate domain ──────────┐
    host ──► B1 Mem ──┤                                │                                         │
                      ├─► A0 Mem ─┐                    │                                         │
                      └─► B0 Mem ─┴─► input_regs ──────┼─► parallel_array (K×L ipe) ───────────► │
                                                       └─────────────────────────────────────────┘
                                          sync (2 stages) ─► l0_acc ─► l1_acc ◄─► P Mem ─► host
    controller: loader, pair sequencer, L0/L1 controls, vsel_guard

Pipeline, for a pair whose first-level read address is driven in cycle `t`:

| cycle | what happens |
|---|---|
| t | `controller` drives `bitA`/`bitB` to A0/B0 Mem (combinational read) |
| t+1 | `input_regs` hold the planes, the Parallel Array computes, `vsel_guard` is valid for this pair |
| t+2, t+3 | synchronizer stages |
| t+3 | `l0_acc` adds the shifted, signed count (result in its register at t+4) |
| t+4 | if the pair closed a window: `l1_acc` adds the window sum shifted by `s0`; on the context's last window it writes P Mem and `done` pulses |

**Double buffering and throughput.** A0 and B0 Mem each have two banks. While
the sequencer works through one bank, the loader copies the next context's
planes from A1/B1 into the other bank, one A plane and one B plane per cycle,
`max(a_bits, b_bits)` cycles in all. The sequencer moves to the other bank in
the cycle after the last pair. As long as each load is no longer than the
previous context (`max(a,b) ≤ a·b` always holds for a context's own sizes),
contexts follow each other with no idle cycle. The peak rate is then
`73728 / (a_bits·b_bits)` MACs per cycle. At 50 MHz and a2w2 that is
1.84 TOP/s.

**Tiling.** Larger GEMMs are cut into `[C,L] × [K,C]` tiles:

* For the C dimension, a context with `accumulate = 1` starts L1 from the P
  line it will write. Partial sums over C tiles therefore add up in P Mem.
* For the L and K dimensions, use separate P lines.

## 5. Memories, data layout and host interface

All memories are flip-flop arrays with combinational reads. The published
chip uses latch-based standard-cell memories instead. Each memory has two
banks.

| memory | line | lines per bank | bank select |
|---|---|---|---|
| A1 Mem | one activation bit plane, `C·L` = 4608 bits | 32 | top bit of the line address |
| B1 Mem | one weight bit plane, `K·C` = 9216 bits | 32 | top bit of the line address |
| A0 Mem | one plane; plane `b` = bit `b` | 8 | controller |
| B0 Mem | one plane | 8 | controller |
| P Mem | one `[K,L]` result, 128 × 32-bit signed | 8 | top bit of the line address |

One bank of all five holds 73.2 kB.

Bit packing (chosen here):

* A plane: bit `l·C + c` = bit `b` of `A[c][l]`.
* B plane: bit `k·C + c` = bit `b` of `B[k][c]`.
* P line: element `P[k][l]` is at 32-bit word `k·L + l`.

A context reads `a_bits` consecutive A1 lines from `a1_line` (bit 0 first)
and `b_bits` consecutive B1 lines from `b1_line`.

**Host port** (`gavina_top`). This plain memory port stands in for the
system's AXI4 crossbar:

* `host_mem` selects A1, B1 or P.
* `host_line` selects the line (bank = top bit).
* `host_word` selects the 32-bit word in the line.
* `host_we` writes A1/B1.
* `host_rdata` reads any of the three, combinationally.

**Commands.** A context is started with `cmd_valid`/`cmd_ready` carrying a
`gav_cmd_t` (`gavina_pkg`):

* `a_bits`, `b_bits` (1..8)
* `g`
* `a1_line`, `b1_line`, `p_line`
* `accumulate`

A command is accepted when the loader is idle and its target A0/B0 bank is
free. It must be held steady until then; an assertion checks this. `busy`
stays high while anything is loading or in flight.

## 6. Parameters

| parameter | default | origin |
|---|---|---|
| `C, L, K` | 576, 8, 16 | published array shape (73728 AND cells) |
| `S_BITS` | 10 | `clog2(C+1)` |
| `MAX_BITS` | 8 | published precision range (2–8 bit; 1 bit also works) |
| `SYNC_STAGES` | 2 | published two-stage synchronizer |
| `L0_SHIFT_MAX` | 3 | small L0 shifter, 0..3 as in the published control example |
| `L0_W`, `ACC_W` | 20, 32 | chosen: L0 never overflows for 8b×8b; 32 bits leave 7 bits of headroom for C tiling |
| `L1_LINES`, `P_LINES` | 32, 8 | chosen so that one bank of all memories is about 74 kB, the published total |
| `HOST_DW` | 32 | chosen |

`gavina_top` takes `C`, `L` and `K` as parameters. The other values live in
`gavina_pkg`.

## 7. Where this RTL departs from the published design

* **Pair order and windows.** The published control-sequence example
  (`A_bits=6`, `B_bits=4`, `G=12`) uses a different order, with four L0
  windows at L1 shifts 0, 2, 3, 4. The rule behind it is not given, and its
  last cycle would need an L0 shift of 4. The significance order used here is
  a simple rule that does fit the published L0 range of 0..3. It also
  reproduces exactly which pairs the published GAV schedule marks as guarded
  for `G` = 1, 5, 12 and 20. The guarded set for `G=12` is the same as in the
  published example.
* **Shift direction.** The published accumulator drawing labels its shifters
  `>>`. Its shift values equal `bitA+bitB` minus the L1 shift, so here they
  are implemented as left shifts (multiply by `2^shift`).
* **Undervolting errors.** In simulation the RTL is always exact. Timing
  errors at `V_aprox` come from the silicon. The original work estimates
  their effect on accuracy with a software model that flips iPE output bits
  at random. Its probability tables depend on:
  * the bit position;
  * the exact count;
  * a binned previous count;
  * errors in the two next-higher bits.

  The tables were calibrated from gate-level simulation and are not
  published. That model is not part of the hardware and is not reproduced.
* **Not built:**
  * the DVS converter (only its select signal is provided);
  * level shifters between domains;
  * the power domains themselves;
  * the AXI4 crossbar and host;
  * latch-based memories (flip-flop arrays used instead).
* **Own choices:** widths, memory depths, the command format, the loader and
  the reset behaviour. All registers reset synchronously with `rst_n` low;
  memory contents do not reset.

## 8. Workloads

Every evaluated configuration maps onto contexts of the built array through
tiling:

* precisions a8w8, a6w6, a8w4, a5w5, a6w3, a8w2, a4w4, a3w3, a4w2, a2w2;
* the random `[4608,64] × [64,4608]` error-characterisation GEMM: 8 C-tiles ×
  8 L-tiles × 4 K-tiles = 256 contexts;
* ResNet-18 on CIFAR-10 (im2col reductions up to `512·9 = 4608`).

None of these fits on chip at once, so the host streams tiles through the
double-buffered A1/B1 banks. The largest ResNet-18 layer, for example, has
2.36 M weights.

`tb_gemm_tiled` runs one full output tile of the random GEMM: `P[16,8] =
B[16,4608] · A[4608,8]`, the whole 4608-long reduction. It uses eight
accumulated contexts, at a8w8 (G=32), a4w4 (G=8) and a2w2 (G=0). At 8 bits
one operand tile group fills a 32-plane bank. The testbench therefore writes
the next group into the other bank while the current one computes. It checks
all 384 sums against an integer GEMM, and checks that compute time is
`8·a·b` cycles per precision. The other 31 output tiles differ only in which
data are loaded.

`tb_conv_layer` lowers 3×3 convolutions to contexts by im2col. It uses
reduction index `c = ci·9 + ky·3 + kx`, with 8 output pixels as the L columns
and 16 filters as the K rows. Two ResNet-18 layer shapes are run, each at
a4w4 and a2w2 on a 4×4 output patch:

* the first layer, with 3 input channels: `C = 27`, zero-padded to 576;
* a 64-channel layer, where `C = 576` fills the array exactly.

Results are compared with a direct convolution. Deeper layers, with 128 to
512 channels, are the same computation with more C tiles and accumulation,
which `tb_gemm_tiled` already covers.

## 9. Files and simulation

`rtl/`:

* `gavina_pkg` — shared constants and types
* `ipe`, `parallel_array`, `input_regs`, `sync`, `l0_acc`, `l1_acc`
* `controller`
* `operand_l1_mem` (A1/B1), `operand_l0_mem` (A0/B0), `p_mem`
* `gavina_top`

`tb/`: one self-checking testbench per module, named `tb_<module>`. Each
prints `TB_RESULT checks=N failures=M`.

* `tb_controller` compares every pair, control signal and supply select with
  an independent reference, including the published guarded sets.
* `tb_gavina_top` runs the full-size accelerator end to end:
  * five back-to-back contexts (a4w4, a8w8, a2w2, an accumulated second C
    tile, and a3w5);
  * checks all results against an integer GEMM;
  * checks the `a·b`-cycle spacing of the contexts;
  * checks the number of undervolted cycles;
  * checks that every mechanism (both supplies, voltage switches, negation,
    several windows, accumulation, overlapped loading) occurred.
* `tb_gemm_tiled` and `tb_conv_layer` run the workloads described in
  section 8.

Example, with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/gavina_pkg.sv tb/tb_gavina_top.sv --top-module tb_gavina_top -o sim
    ./obj_dir/sim

The full-size build takes about 15 s and the run under a second.
