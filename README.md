# A layer-pipelined QC-LDPC decoder for the IEEE 802.11n rate-1/2 code

This is a synthesizable SystemVerilog decoder for the IEEE 802.11n (2012) rate-1/2
quasi-cyclic LDPC code with circulant size z = 81 (codeword length n = 1944). It decodes
with the layered, scaled min-sum algorithm. Four ideas give the throughput:

1. **z-fold parallelism.** Each non-zero block of the parity-check matrix is a cyclically
   shifted 81 x 81 identity matrix, so its 81 check rows touch 81 different variables.
   Eighty-one node-processing lanes therefore work on a whole block in one clock cycle.
2. **A compact schedule.** Only the non-zero blocks of each layer are processed: 8 slots
   per layer instead of the 24 block columns of the base matrix, a 3x saving.
3. **A split node processor.** The check-node update is split into a *global* pass and a
   *local* pass. The global pass finds the smallest and second-smallest message magnitude
   and the sign product over a layer. The local pass then forms each outgoing message
   from those results. Both passes cost O(degree).
4. **Two-layer pipelining.** The global pass (GNPU array) of layer u+1 runs at the same
   time as the local pass (LNPU array) of layer u. The block order inside each layer is
   rearranged so that this overlap never reads a stale value.

With 8 iterations, one frame takes 899 clock cycles from start to done. The
non-pipelined schedule takes 1539 cycles.

## The code and its two tables

The base matrix `HB` (12 layers x 24 block columns) holds, for each block, either -1
(an all-zero block) or the right-shift s of the identity block. In a block with shift s,
check row r is connected to variable (r + s) mod 81 of that block column.

The decoder never looks at `HB` directly while it runs. It walks through `BETA_I`, a 12 x 8
*rearranged block index matrix*. Row u lists the non-zero block columns of layer u in
processing order, padded with -1 to eight slots. Ten layers have 7 blocks and two have 8.
All layers get 8 slots so that the schedule is the same for every layer. Padded slots are
left out of the min/sign search and are not written back. The matching shift of slot w is
`HB[u][BETA_I[u][w]]` (function `beta_s` in `ldpc_pkg`). Both tables live in
`rtl/ldpc_pkg.sv`. The code-parameter ROM (`param_rom`) is built from them when the
design is elaborated.

The order within each row of `BETA_I` is what makes the pipeline legal. The 12 layers form
two *superlayers*, layers 1–6 and 7–12. Take two adjacent layers u and u+1 of the same
superlayer that share a block column. That column sits in an earlier slot of layer u than
of layer u+1. The `param_rom` testbench checks this property for all 40 shared columns. At
the two superlayer boundaries (6→7 and 12→1) the property does not hold, so the pipeline is
drained there.

## Arithmetic

All values are 10-bit two's complement with 4 fraction bits (6 integer bits including the
sign). Sums are saturated to the symmetric range ±511, so a magnitude always fits in 9 bits.
For each edge between check row i and variable j, in each iteration:

| step | where | operation |
|---|---|---|
| variable-to-check | GNPU | q = sat(p − r_old) |
| global pass | GNPU | running first minimum f and second minimum s of \|q\|, running XOR of sign(q); a new value with \|q\| ≤ f moves f into s |
| local pass | LNPU | m = s if \|q\| = f, else f; sign = sign product XOR sign(q) |
| check-to-variable | LNPU | r_new = ±floor(3m/4) (scaling factor 0.75) |
| APP update | LNPU | p = sat(q + r_new) |

The APP value p of every variable starts as the channel LLR, ln P(0)/P(1). All stored
check-to-variable messages start at zero: instead of clearing the CN memory, its read port
returns zeros during the first iteration. The hard decision is 1 where p < 0.

## The pipeline

One block of 81 edges enters per clock cycle. A block passes through three stages:

```
 A  (address)  decoder_ctrl issues a token {layer, slot, column, shift, flags};
               read APP[column] and CN[layer, slot]                (registered reads)
 B  (global)   rotate the APP word by shift (barrel_shifter); GNPU lanes form q,
               update min/sign accumulators; q and the token enter the q buffer
               ... 8 cycles in the q buffer (an 8-deep delay line) ...
 L  (local)    LNPU lanes form r_new and p; rotate p back by 81 − shift;
               write APP[column] and CN[layer, slot]
```

A layer has exactly 8 slots, so a block leaves the q buffer just as the GNPU lanes have
latched the final minima of its layer. Those minima sit in each GNPU lane's result
registers for the next 8 cycles, while the lane's accumulators already work on the next
layer. This is the two-layer overlap, and it needs no storage beyond the q buffer.

**Schedules.** The 2x schedule issues the six layers of a superlayer back to back and then
one layer time (8 cycles) of bubbles. During the bubbles the LNPU array finishes the last
layer of the superlayer:

```
GNPU:  L1  L2  L3  L4  L5  L6  --  L7  L8  L9  L10 L11 L12 --
LNPU:  --  L1  L2  L3  L4  L5  L6  --  L7  L8  L9  L10 L11 L12
```

One iteration is 14 layer slots, or 112 cycles. The pipelining efficiency is 6/7 = 0.86.
The 1x schedule (`PIPE2X = 0`) puts a bubble after every layer: 24 slots, or 192 cycles per
iteration, 1.71 times slower.

**Why the result equals plain sequential layered decoding.** Take a column that layer u
writes in slot w′ and layer u+1 reads in slot w, with w′ < w. The LNPU writes it in stage L,
which is cycle t₀ + 9 + w′ if layer u started issuing at cycle t₀. The GNPU read for layer
u+1 is issued at cycle t₀ + 8 + w. When w = w′ + 1, the write and the read fall in the same
cycle. The APP memory forwards the word being written to the read port in that case. Every
read therefore sees the latest write in layer order, and the pipelined decoder produces
bit for bit the same APP values as a decoder that finishes each layer before starting the
next. The end-to-end testbenches check exactly this against a sequential model.

**Timing of a frame.** start is sampled on a clock edge. Tokens then issue for
`TMAX × 112` cycles (2x). The last write reaches memory 3 cycles later, and done pulses in
that cycle. With the default 8 iterations this is 899 cycles (1539 for 1x).

## Memories

| memory | words | word | contents |
|---|---|---|---|
| APP (`app_memory`) | 24, one per block column | 81 x 10 bits | APP values in variable order; loaded with the channel LLRs |
| CN messages (`cn_msg_memory`) | 12 x 8, one per (layer, slot) | 81 x 10 bits | check-to-variable messages in check-row order, so they are never rotated |

Each memory is a simple dual-port RAM with a registered read. The APP memory adds the
write-to-read forwarding described above.

## Parity check and early termination

`parity_check` evaluates v·Hᵀ at the end of every iteration and costs no cycles. It watches
the APP write port. When a column is written by the last layer that uses it (the column's
final value for the iteration), its 81 hard-decision bits are rotated by H_b(u, c) and
XORed into the 81-bit syndrome of every layer u that contains the column. After the last
slot of layer 12 has been written, `parity_ok` tells whether all 972 checks hold.

**Early termination.** This follows the algorithm's stopping rule, and the host turns it
on with `early_stop`. If the checks hold after iteration k < t_max, the controller stops
issuing one cycle after the flag is set. The blocks of iteration k+1 that are already in
the pipeline are dropped: the q buffer and the GNPU-stage token are cleared, and the write
enables are gated off. The APP memory therefore holds exactly the values after iteration
k. Done follows after k × 112 + 4 cycles (k × 192 + 4 for 1x), and `iter` reads k. With
`early_stop` low, the decoder always runs t_max iterations.

## Top-level interface (`qc_ldpc_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `llr_wr_en`, `llr_wr_addr`, `llr_wr_data` | in | 1, 5, 81 x 10 | load the channel LLRs of one block column (only while `busy` is low); element r is variable 81·addr + r |
| `start` | in | 1 | start decoding (ignored while busy) |
| `early_stop` | in | 1 | stop as soon as all parity checks hold; hold stable during a run |
| `busy`, `done` | out | 1 | decoding in progress; one-cycle pulse when finished |
| `iter` | out | 8 | iterations issued so far; after done, the number run |
| `rd_addr` | in | 5 | block column to read back (while idle) |
| `rd_llr`, `rd_hard` | out | 81 x 10, 81 | APP values and hard decisions of that column, one cycle after `rd_addr` |
| `parity_ok`, `parity_valid` | out | 1 | all checks satisfied after the last iteration; flag valid |

Parameters: `PIPE2X` (1 = 2x schedule, the default; 0 = 1x) and `TMAX_P` (iteration count,
default 8). The code size is set by the constants in `ldpc_pkg`.

## Files

| file | contents |
|---|---|
| `rtl/ldpc_pkg.sv` | constants, base matrix, rearranged index matrix, fixed-point helpers, pipeline token type |
| `rtl/param_rom.sv` | column, shift and valid flag of each (layer, slot); code length, iteration limit |
| `rtl/decoder_ctrl.sv` | block/layer/superlayer/iteration counters, 2x or 1x schedule, start/busy/done |
| `rtl/barrel_shifter.sv` | 81-word circular rotation in 7 logarithmic stages (2^k mod 81 each) |
| `rtl/app_memory.sv`, `rtl/cn_msg_memory.sv` | the two RAMs |
| `rtl/gnpu.sv`, `rtl/lnpu.sv` | one lane of the global and the local pass |
| `rtl/npu_array.sv` | 81 GNPU lanes, 81 LNPU lanes and the 8-deep q buffer |
| `rtl/parity_check.sv` | on-the-fly syndrome check |
| `rtl/qc_ldpc_decoder.sv` | top level |
| `tb/ldpc_ref_pkg.sv` | sequential reference model of layered scaled min-sum decoding, same fixed point |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end and BER testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends by itself. It also has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv \
          tb/tb_qc_ldpc_decoder.sv --top-module tb_qc_ldpc_decoder -o sim
./obj_dir/sim
```

Use the same command with another `tb_<name>.sv` for the other testbenches. Leave out
`tb/ldpc_ref_pkg.sv` for the unit tests that do not use it.

- `tb_qc_ldpc_decoder`: full size, default parameters. It decodes four frames: random LLRs;
  two noisy all-zero codewords at 2.5 dB Eb/N0, which must decode to zero; and a frame that
  drives saturation. The testbench compares every APP value and hard decision with the
  reference model, checks the parity flag against v·Hᵀ computed from the reference
  decisions, and checks the cycle count (899). Two frames run with `early_stop` on. The
  random one must not stop. The noisy one must stop after the first iteration k at which
  the reference decisions satisfy every check. Its APP values must equal the reference
  after k iterations, and the run must take k × 112 + 4 cycles. The testbench also counts
  the pipeline mechanisms and fails if any of them never happens: GNPU/LNPU overlap,
  superlayer bubbles, skipped padded slots, APP forwarding, first-iteration zero reads,
  saturation and an early stop.
- `tb_qc_ldpc_decoder_1x`: the same test for the 1x schedule (1539 cycles; no overlap and
  no forwarding may occur).
- `tb_ber_awgn`: a BER workload. It sends 100 frames per point at 1.0–2.5 dB Eb/N0 through
  an 8-iteration and a 4-iteration decoder side by side, checks every frame against the
  reference model and prints the BER.
- `tb_param_rom`, `tb_barrel_shifter`, `tb_app_memory`, `tb_cn_msg_memory`, `tb_gnpu`,
  `tb_lnpu`, `tb_npu_array`, `tb_decoder_ctrl`, `tb_parity_check`: unit tests against
  models written independently of the RTL.

All testbenches together run in a few seconds.

Measured BER (all-zero codeword, BPSK, AWGN, rate 1/2, 100 frames per point):

| Eb/N0 | channel | 8 iterations | 4 iterations |
|---|---|---|---|
| 1.0 dB | 0.128 | 0.053 | 0.075 |
| 1.5 dB | 0.114 | 6.1e-3 | 0.026 |
| 2.0 dB | 0.103 | 2.8e-4 | 6.5e-3 |
| 2.5 dB | 0.089 | 0 | 8.8e-4 |

## Where this design makes its own choices

The block structure follows the source architecture: the code-parameter ROM, the APP and
CN-message RAMs, the barrel shifter, and the z-fold GNPU and LNPU arrays. So do the
global/local algorithm, the rearranged index matrix, the superlayer schedule and the 0.75
scaling. The following points are this design's own:

- **Word length.** The source describes the messages as "6 signed bits and 4 fractional
  bits". This is read as one 10-bit word. The same width is used for the APP values, and
  every sum is saturated to ±511.
- **Rounding.** The scaling is rounded down: floor(3m/4).
- **Rearranged shift matrix.** The shift matrix that goes with the rearranged index matrix
  is not tabulated in the source. It is derived from the base matrix.
- **Write-back rotation and forwarding.** A second barrel shifter undoes the rotation on the
  write-back path. APP write-to-read forwarding resolves the one-slot stagger. Neither is
  described in the source.
- **q buffer.** An 8-deep delay line carries q from the GNPU lanes to the LNPU lanes.
- **First-iteration zeroing.** The CN memory is zeroed on read in the first iteration.
- **Interfaces and reset.** The host interface, the start/busy/done handshake, the reset
  scheme and the one-block-per-cycle rate are all chosen here.
- **Hard decision.** The source's decision rule (0 when p < 0) contradicts its LLR
  definition, ln P(0)/P(1). This design follows the LLR definition: p < 0 decodes to 1.
- **Parity check and early stop.** The stopping rule is the source's. Its hardware form
  is chosen here: the on-the-fly syndrome check, the flush of the blocks in flight, and
  the `early_stop` enable. The published throughput assumes a fixed iteration count.
- **Other block sizes.** Only the z = 81 code is in the ROM. The source says a z = 81
  decoder can serve all three block lengths of the rate-1/2 code. However, the z = 27 and
  z = 54 codes of the standard use their own shift tables, so they cannot be decoded here
  without new tables and a way to select them.

The source reports 608 Mb/s (337 Mb/s for 1x) and a latency of 5.7 µs. At 899 cycles per
1944-bit frame, this design gives 432 Mb/s and 4.5 µs at 200 MHz, or 562 Mb/s and 3.5 µs at
260 MHz (the source quotes both clock rates). Its clock-cycles-per-iteration figure is not
published, so those numbers cannot be checked exactly. The 2x/1x speed-up here is 1.71,
which matches the quoted "1.7 times faster" (the source's throughput table gives 1.80). At
1 dB the measured BER matches the published 8-iteration fixed-point curve (about 0.055). At
2 dB it is about ten times lower than that curve (2.8e-4 against roughly 4e-3). The
source's exact rounding and saturation are not known, so the curves are not expected to
coincide.
No timing closure has been attempted. The LNPU stage, which includes the inverse barrel
shifter, and the APP forwarding mux form one long combinational path. A fast FPGA build
would register the LNPU output, and then needs one more slot of stagger or one more
forwarding stage.
