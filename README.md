# E2ATST training accelerator: RTL description

This is synthesizable SystemVerilog for an accelerator that **trains** spiking
transformers (for example Spikingformer), rather than only running inference.
Training a spiking network with back-propagation through time has three
phases:

* **FP (forward pass).** Matrix products of binary spikes with FP16 weights.
* **BP (backward pass).** Matrix products of FP16 gradients with FP16
  weights.
* **WG (weight gradient).** Matrix products of spikes with FP16 gradients.

Around the matrix products sit three kinds of element-wise work:

* leaky integrate-and-fire neurons (SOMA) and their backward rule (GRAD);
* residual additions (RES);
* forward and backward batch normalisation (BN).

The main idea is to cover all of this with very few hardware resources:

* **One array for all three phases.** A single 64 x 64 matrix array handles
  FP, BP and WG. In FP and WG one operand is a spike, so each element only
  *adds* a weight or gradient when the spike is 1. In BP both operands are
  FP16, and the same element multiplies and accumulates.
* **One output-stationary dataflow.** The array keeps each output element in
  place while the operands stream past. This is the dataflow that has the
  lowest energy and latency for training, and it fixes the tile latency at
  `2*ROWS + COLS + T - 2` cycles.
* **One reuse module for SOMA, GRAD and RES.** These three element-wise
  operations are folded into a single vector module with one shared adder
  per lane. A mode multiplexer selects which of the three it computes.
* **Two BN units.** Forward BN and backward BN are separate vector units.
  Forward BN keeps the two values that backward BN needs: the centred input
  `N = x - mu` and `sqrt(var + eps)`.

The design is organised around an on-chip memory of FP16 and spike SRAM
banks. A global controller executes a queue of commands, one at a time. A
host (a CPU, or a DMA moving tiles from DRAM) loads data and commands over
a 32-bit SoC bus.

## Block structure

```
                SoC bus (32 bit)
                     |
                 bus_if ------------------ global_ctrl (config regs, command FIFO)
                     |                         | start / done per module
   +-----------------+-----------+-------------+----------------+
   |                             |                              |
 mm_fetch_store            soma_fetch_store               bn_fetch_store
   |                             |                              |
 mm_array (64x64 mm_pe)    soma_grad_res (64 reuse_lane)   bn_fp, bn_bp (64 lanes)
   |                             |                              |
   +-------- request crossbar in e2atst_top (owner = running unit or the bus) ---------+
             |                 |                    |
  4 FP16 banks (sram_2p)  2 spike banks        Para bank
  1024 x 64 x 16 bit      1024 x 64 x 1 bit    64 x 64 x 16 bit
                          (spikes, masks)      (gamma, beta, sqrt, dgamma, dbeta)
```

| File | Contents |
|---|---|
| `rtl/fp16_pkg.sv` | binary16 add, sub, mul, div, sqrt, compare (round to nearest even, subnormals flushed) |
| `rtl/e2atst_pkg.sv` | sizes, opcodes, the 128-bit command, configuration, and the memory request/response bundles |
| `rtl/mm_pe.sv`, `rtl/mm_array.sv` | processing element and the ROWS x COLS output-stationary array |
| `rtl/reuse_lane.sv`, `rtl/soma_grad_res.sv` | one SOMA/GRAD/RES lane, and 64 of them with an output register |
| `rtl/bn_fp.sv`, `rtl/bn_bp.sv` | forward and backward batch norm, 64 feature lanes |
| `rtl/sram_2p.sv` | one read port + one write port SRAM bank with lane mask |
| `rtl/mm_fetch_store.sv`, `rtl/soma_fetch_store.sv`, `rtl/bn_fetch_store.sv` | sequencers that move operands and results between the banks and the datapaths |
| `rtl/global_ctrl.sv` | configuration registers, command FIFO, module start/done |
| `rtl/bus_if.sv` | SoC bus slave: registers and SRAM windows |
| `rtl/e2atst_top.sv` | top: all of the above plus the bank crossbar |

## Number format

Every datapath uses IEEE binary16 with these rules:

* Rounding is to nearest even.
* Subnormal inputs are treated as zero, and a result below 2^-14 becomes +0.
* Every zero result is +0.
* Overflow gives ±Inf, and invalid operations give the quiet NaN `7E00`.

Flushing subnormals and using a single zero sign are this design's choices.
The source only says that all training signals are FP16. The functions in
`fp16_pkg` are plain combinational SystemVerilog, and every unit calls them.
A multiply-accumulate is rounded twice: once after the product and once
after the sum.

## The matrix array and its latency

`mm_array` computes one output tile `O = A * B`:

* `A` is ROWS x T and `B` is T x COLS.
* Element (r, c) holds `O[r][c]`.
* Each input cycle delivers one column of A (`a_col[r] = A[r][k]`) and one
  row of B (`b_row[c] = B[k][c]`).

How the operands move:

* **Skew.** Row r of A is delayed r cycles and column c of B is delayed c
  cycles. The two operands then meet in element (r, c) at cycle `k + r + c`.
* **Propagation.** A values move one element right per cycle and B values
  move one element down.
* **Output.** After the last product reaches element (ROWS-1, COLS-1), the
  drain shifts the finished sums down one row per cycle. `out_row` shows
  rows ROWS-1 down to 0, one per cycle.

Counting from the first input cycle to the last output row, this takes

    t = 2*ROWS + COLS + T - 2

which is the output-stationary tile latency the design is built around. A
matrix larger than the array is split into `ceil(B/ROWS) * ceil(K/COLS)`
tiles, one command each. A reduction longer than 4095 (the 12-bit length
field) is split into several tiles whose partial results are added with RES
commands.

Operand modes:

* **Spike mode (`a_spike` in the command).** Bit 0 of each A lane is a spike
  and gates the addition of B.
* **FP16 mode.** The element multiplies and accumulates.

The PE has no multiplier bypass for spike mode: the same PE does both.

Memory layout used by `mm_fetch_store`:

* word `s0_addr + k` of the A bank is column k of A;
* word `s1_addr + k` of the B bank is row k of B;
* result row r goes to word `d0_addr + r`, and only lanes below COLS are
  written.

With activations stored one sample per word, this layout serves every
product directly, except that the FP and BP products need one operand
transposed. The transpose is not in hardware; the host or DMA re-lays out
that operand (see *Limits*). The WG product `dW = X^T dZ` needs no
re-layout.

## SOMA / GRAD / RES reuse module

Each of the 64 lanes (`reuse_lane`) has one FP16 adder that all three modes
share. Its first input is always the partial sum PS, and a three-way
multiplexer supplies the second. The selector numbering is GRAD = 0,
SOMA = 1, RES = 2.

**SOMA** (forward leaky integrate-and-fire):

* `U(t) = PS + (S(t-1) ? 0 : alpha * U(t-1))`. This is
  `U(t) = alpha U(t-1)(1 - S(t-1)) + BN(t)`, with PS = the BN output.
* `S(t) = U(t) >= th_f`.
* `mask = th_l < U(t) < th_r`.

The stored U(t) is the potential before reset. The reset to zero happens
through the `(1 - S(t-1))` factor when U(t) is used at step t+1.

**GRAD** (backward rule), with `a = alpha * dU(t+1)`:

* `dS(t) = PS + (-U(t)) * a`, where PS = the MM result of the backward
  product.
* `dU(t) = dS(t) * fire'(U(t)) + (S(t) ? 0 : a)`.
* `fire'(U)` is the stored gradient mask times a programmable surrogate
  height `beta_sg`.

**RES:** `sum = PS + R`.

Time-step boundaries:

* The `first` flag of a command marks t = 0 for SOMA: U(t-1) and S(t-1) are
  taken as 0.
* For GRAD the same flag marks the last step: dU(t+1) is taken as 0.

The fetch&store unit keeps spikes in spike bank 0 and masks in spike bank 1,
at the same address. This is how the forward pass leaves S(t) and the mask
for the backward pass.

Thresholds:

* **Fire condition.** The source's equation fires on `U >= th_f`, while its
  block diagram draws `th_f < U`. The equation is implemented.
* **Mask window.** The equation uses th_f as the lower bound of the window,
  while the diagram has a separate `th_l`. The separate register is
  implemented; set `th_l = th_f` for the equation's behaviour.

## Batch normalisation

`bn_fp` has one lane per feature. Samples stream through it one word per
cycle, in two passes:

1. **Pass 1.** `sum x` and `sum x^2` are accumulated. `fin` then produces
   the statistics:
   * `mu = sum x / m`;
   * `var = sum x^2 / m - mu^2`;
   * `sqrt = sqrt(var + eps)`.
2. **Pass 2.** `N = x - mu` and `y = gamma * N / sqrt + beta`.

`bn_bp` consumes the forward pass's `sqrt` (through the Para bank) and `N`
(through an FP16 bank):

1. **Load.** `1/sqrt` is formed.
2. **Pass 1.** It accumulates:
   * `M = gamma * g / sqrt`;
   * `S_N`, `S_M`, `S_MN`;
   * `sum g`.
3. **Statistics.** `dgamma = S_MN / gamma` and `dbeta = sum g`.
4. **Constants.** `c1 = S_MN (1/sqrt)^2 / m`, `c2 = c1 S_N / m` and
   `c3 = S_M / m`.
5. **Pass 2.** `dx = ((M - N c1) + c2) - c3`.

The variance uses `E[x^2] - mu^2` in FP16, exactly as specified. It can
therefore lose precision, or even go negative (giving NaN), when
`|mu| >> sigma`. This is a property of the algorithm, not of the RTL.

## Fetch&store units and their timing

Each unit runs one command and pulses `done`:

| Command | Unit | Cycles from start to done |
|---|---|---|
| `OP_MM` | mm_fetch_store | 1 (clear) + T (feed) + wait + ROWS (drain) + 1; first input to last store = `2R + C + T - 2` |
| `OP_SOMA`, `OP_GRAD`, `OP_RES` | soma_fetch_store | `len + 4` (read i, compute i+1, write i+2) |
| `OP_BNF` | bn_fetch_store | `2*len + 11` |
| `OP_BNB` | bn_fetch_store | `2*len + 12` |

**Memory ports.** Every SRAM bank has one read and one write port. All
operands of one command must therefore be in different banks. A result may
go back into a bank that is also read, at another address. The top checks
this with the assertion `a_no_bank_conflict`.

**Port ownership.** While a command runs, all bank ports belong to the unit
running it. When the controller is idle, they belong to the bus.

## Command interface

All bus addresses are word addresses; bits [19:16] select the region:

| `bus_addr[19:16]` | Target | Word / lane selection |
|---|---|---|
| 0 | controller registers | `[4:0]` register |
| 1..4 | FP16 banks 0..3 | `[14:5]` word, `[4:0]` lane pair (low half = even lane) |
| 5, 6 | spike bank 0 (spikes), 1 (masks) | `[14:5]` word, `[0]` lanes 0..31 / 32..63 |
| 7 | Para bank | `[10:5]` word, `[4:0]` lane pair |

Bus handshake:

* Reads return data one cycle after acceptance.
* SRAM accesses are held with `bus_ready = 0` while `busy` is high.
* Register accesses are always accepted.

Controller registers:

| Register | Read/write | Contents |
|---|---|---|
| 0–5 | write | `alpha`, `beta_sg`, `th_f`, `th_l`, `th_r`, `eps` (FP16 in bits 15:0) |
| 8–11 | write | staging words of a command (word 0 = command bits 31:0) |
| 12 | write | pushes the staged command into the 16-entry FIFO (dropped and counted if the FIFO is full) |
| 16 | read | status `{fifo count, busy, completed commands}` |
| 17–22 | read | completed commands per opcode |
| 24 | read | dropped pushes |

The command (`cmd_t` in `e2atst_pkg`) has these fields:

* opcode;
* `a_spike`;
* `first`;
* a 12-bit length;
* three source and two destination FP16 operands (bank + address each);
* spike read and write addresses;
* four Para word indices.

Per opcode they mean:

| Opcode | Sources | Destinations |
|---|---|---|
| `OP_MM` | s0 = A, s1 = B | d0 = result rows |
| `OP_SOMA` | s0 = PS, s1 = U(t-1) | d0 = U(t); spikes and masks at `sk_waddr` |
| `OP_GRAD` | s0 = PS, s1 = U(t), s2 = dU(t+1); S and mask at `sk_raddr` | d0 = dU(t) |
| `OP_RES` | s0 = PS, s1 = R | d0 = sum |
| `OP_BNF` | s0 = x; Para p0 = gamma, p1 = beta | d0 = y, d1 = N; Para p2 = sqrt |
| `OP_BNB` | s0 = g, s1 = N; Para p0 = gamma, p1 = sqrt | d0 = dx; Para p2 = dgamma, p3 = dbeta |

`OP_NOP` retires at once.

## Simulating

Testbenches are in `tb/`, one per block (`tb_<module>.sv`). They are
self-checking against a reference written with `real` arithmetic
(`tb/fp16_ref_pkg.sv`), and each ends with a `TB_RESULT checks=... failures=...`
line. `tb/tb_mem_model.sv` is a behavioural bank set used by the
fetch&store testbenches.

The end-to-end test `tb_e2atst_top` (body in `tb/tb_e2e_body.svh`) runs one
training step of a spiking layer entirely over the bus. It compares every
SRAM word with a reference model that executes the same command stream.
The matrix array is reduced to 8 x 8 (tile size N = 8); every other size is
at its default (64 lanes, 1024-word banks, 16-entry FIFO). It runs in well
under a second. Changing `localparam N` in `tb/tb_e2atst_top.sv` runs the
same test at another array size.

The training step it runs:

1. spike MM;
2. BN forward;
3. SOMA for t = 0 and t = 1;
4. RES;
5. GRAD for t = 1 and t = 0;
6. BN backward;
7. a spike MM for the weight gradient;
8. the host transposes dZ;
9. an FP16 MM for the input gradient.

The test also counts each mechanism and fail if any never occurred:

* each opcode;
* spike-mode and FP16-mode array beats;
* the MM latency check;
* fired spikes and set masks;
* a FIFO holding several commands;
* bus stalls.

Example, with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/fp16_pkg.sv rtl/e2atst_pkg.sv tb/fp16_ref_pkg.sv \
        tb/tb_e2atst_top.sv --top-module tb_e2atst_top
    ./obj_dir/Vtb_e2atst_top

The full-size 64 x 64 array (4096 FP16 processing elements, each with its
own multiplier and adder) makes Verilator generate a very large C++ model.
Its compilation did not finish in 15 minutes on a 4-core machine, so no
simulation at the default array size is included. The largest array
simulated end to end is 16 x 16, with N = 16 and all other sizes at their
defaults. It passed every check. Compiling it took about 4 minutes, and the
simulation itself took under a second. The build effort grows with the
number of PEs, so 64 x 64 would need roughly 16 times as long to compile.
Every array size shares the same PE and skew generators, and the tile
latency formula is checked at each size that was run.

## Limits and departures from the source description

* **Operand transposes are done outside the accelerator.**
  * A layer's FP product needs its input spikes with one word per feature,
    but SOMA produces one word per sample.
  * Likewise, the BP product needs dZ transposed.
  * The source says only that these products use the transposed FP results.
    The end-to-end test performs the transpose over the bus, standing in for
    the DMA.
* **One command at a time.**
  * Module operations do not overlap.
  * The array is not refilled while it drains, so back-to-back tiles do not
    overlap their skew and drain phases.
  * The source's utilisation (83 %) assumes a better-overlapped schedule.
  * BN units are not deeply pipelined: each step is one cycle of
    combinational FP16 logic plus a register. The source calls them deeply
    pipelined but gives no stages.
* **Memory organisation is this design's.**
  * The source lists two 1-bit and seven 16-bit SRAMs without sizes.
  * This design has two spike banks, four FP16 data banks and one Para bank,
    all 64 lanes wide. Data banks are 1024 words deep and the Para bank 64.
* **Batch norm over large batches.** A BN command keeps its whole batch in
  one bank, so m is at most 1024 samples at the default depth.
  Spikingformer's per-time-step batch (16 x 196 = 3136 samples) needs larger
  banks, or statistics accumulated across commands; neither is built.
* **Surrogate gradient.** The surrogate derivative is a rectangle: beta
  inside the mask window, 0 outside. Its shape is not specified in the
  source.
* **FP16 rounding.**
  * Every FP16 operation is rounded separately; there is no fused
    multiply-add.
  * Results agree bit for bit with the testbench reference, not with
    higher-precision arithmetic.
* **Training only.** The running mean and variance that inference BN would
  use are not kept; the source mentions them only for inference.
* **Outside the chip.** DRAM and DMA are not part of the RTL; the bus port is
  where they connect. Clock (500 MHz) and process (28 nm) are properties of
  an implementation, not of this RTL.

## Lint notes

* `rst_n` drives both the asynchronous resets and the `disable iff` of the
  top's assertion. Verilator therefore reports it as used synchronously and
  asynchronously. This is expected.
* Unused-signal reports concern fields of the shared request, response and
  command bundles that a given unit does not use, and the weight outputs of
  the bottom PE row, which have no consumer.
