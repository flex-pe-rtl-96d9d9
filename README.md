# Flex-PE: a SIMD multi-precision CORDIC processing element and its systolic array

Neural-network hardware usually has a MAC array and, next to it, separate
units for the activation functions (sigmoid, tanh, softmax, ReLU). Every one
of those units is sized for one number format. Flex-PE takes another route.
One CORDIC datapath does both jobs:

- Hyperbolic rotation gives cosh and sinh, and so e^x.
- Linear vectoring gives division, which turns e^x into sigmoid, tanh and softmax.
- Linear rotation gives multiply-accumulate.

The whole datapath is SIMD. A 32-bit word holds 8 lanes of 4 bits, 4 of 8 bits,
2 of 16 bits or 1 of 32 bits, and the precision can change from one operation
to the next.

Lower precisions need fewer CORDIC iterations. The 32-bit pipeline can then be
cut in half, so two independent streams share it. A pipeline of 8 hyperbolic
and 10 linear stages therefore produces 16, 8, 4 or 1 activation results per
clock at 4, 8, 16 or 32 bits.

This RTL implements the following:

- The SIMD building blocks: the add/subtract unit, the barrel shifter and the constant ROM.
- One CORDIC stage.
- Two Flex-PE variants: a pipelined one with time multiplexing, and an iterative one.
- An 8×8 output-stationary systolic array whose PEs are iterative Flex-PEs.
- A control engine, the memories, and a top level with a simple host register port.

The host CPU, AXI interconnect, DMA and software stack of the surrounding SoC
are not part of the RTL.

## Number formats

Each lane is an N-bit two's-complement fixed-point number, with N = 4, 8, 16 or 32.

| Format | Fraction bits | Range | Used for |
|---|---|---|---|
| data | N-3 | [-4, 4) | X, Y, e^x, sums, MAC input and accumulator |
| angle | N-2 | [-2, 2) | Z: hyperbolic angle, quotient, MAC weight |

The angle format has one more fraction bit than the data format. So a data
word read as an angle word is worth twice its value. Where a data value has to
enter Z (the activation of an accumulator inside a PE), it is first doubled,
`acc + acc`.

The start value 1/Kh and the atanh(2^-i) constants are kept once, as 32-bit
masters. Each is rounded to the lane width by `(m >> (32-N)) + m[31-N]`.

## The SIMD primitives

**Add/subtract (`simd_addsub`).**

- The adder is one ripple-carry chain, built from eight 4-bit segments.
- In front of each segment's b input sits a b/~b select.
- At each segment boundary a carry-break multiplexer chooses one of two sources:
  - the carry from the segment below, when both segments belong to the same lane;
  - the lane's own subtract bit, when a new lane starts there. This bit is the "+1" of the two's complement.
- Each lane has its own subtract bit, because each CORDIC lane rotates in its own direction.

**Barrel shifter (`simd_lbs`).**

- Five stages shift right by 1, 2, 4, 8 and 16 bits, each with sign fill inside the lane.
- One slice is built per lane and precision, and the precision picks the result.
- Stages beyond the lane width (e.g. shift 16 in a 4-bit lane) are switched off.
- The shifter tracks guard and sticky bits. When `rne` is set, the shift rounds to nearest even; when clear, it truncates.

**ROM (`cordic_rom`).**

- It returns E_i for the current iteration, replicated across the lanes.
- In hyperbolic mode E_i is atanh(2^-i). In linear mode it is 2^-i, computed as `1 << (N-2-i)`.

## One CORDIC stage

`cordic_stage` performs one micro-rotation on three SIMD words.

| Mode | Direction d | X | Y | Z |
|---|---|---|---|---|
| hyperbolic rotation | +1 when Z ≥ 0 | X + d·Y·2^-i | Y + d·X·2^-i | Z − d·atanh(2^-i) |
| linear rotation (MAC) | +1 when Z ≥ 0 | X | Y + d·X·2^-i | Z − d·2^-i |
| linear vectoring (div) | −1 when sign X = sign Y | X | Y + d·X·2^-i | Z − d·2^-i |
| pass | – | X | Y | Z |

The direction is taken per lane from the lane's sign bit; this is the "sign extract" step. The datapath is two shifters, the ROM and three add/subtract units.

A linear stage whose shift exceeds N-2 has no effect on an N-bit angle
(2^-i rounds to zero), so it is set to pass. This matters at 4 bits: the shared
linear iteration count would otherwise rotate by a zero step and still add or
subtract the shifted X.

Functions, for an input x:

- e^x = cosh x + sinh x, from hyperbolic rotation with X0 = 1/Kh, Y0 = 0, Z0 = x.
- tanh x = sinh / cosh, by linear vectoring with X = cosh, Y = sinh, Z = 0.
- sigmoid x = e^x / (1 + e^x), by linear vectoring.
- softmax: x_j ↦ e^{x_j} / Σ e^{x_k}, in two passes (below).
- MAC: y + x·w, by linear rotation with X = x, Y = y, Z = w. The weight must lie in [-1, 1).
- ReLU: max(0, x) per lane, with no CORDIC work.

Iterations per precision:

| Precision | Hyperbolic stages (shift sequence) | Linear stages |
|---|---|---|
| 4 | 4 (1,2,3,4) | 4 |
| 8, 16 | 4 (1,2,3,4) | 5 |
| 32 | 8 (1,2,3,4,4,5,6,7) | 10 |

The eight-stage sequence repeats i = 4, which hyperbolic CORDIC needs in order to converge. Its gain gives 1/Kh = 1.20748. The four-stage sequence has 1/Kh = 1.20435.

Because so few stages are used, the result converges over a limited input range:

- Hyperbolic inputs should stay within about |x| ≤ 1.1.
- Quotients must lie in [-1, 1].

## The pipelined Flex-PE and its time multiplexing

`flex_pe_pipe` is the part that takes most thought.

The datapath is one chain of 8 hyperbolic stages and then 10 linear stages, with a register after each stage. Between the two halves sits `af_select`, the "AF glue":

- It adds cosh and sinh to form e^x.
- For sigmoid it forms 1 + e^x.
- For softmax it pushes e^x into a FIFO and accumulates the sum.
- It chooses what the linear chain receives:

  | Function | Linear chain input | Linear mode |
  |---|---|---|
  | tanh | (cosh, sinh) | vectoring |
  | sigmoid | (1 + e^x, e^x) | vectoring |
  | softmax | (Σ, FIFO head) | vectoring |
  | MAC | the operands | rotation |
  | ReLU | – | pass |

At 4, 8 and 16 bits only 4 hyperbolic and at most 5 linear stages are needed, so each chain is split into two halves:

```
          hyperbolic 0..3   hyperbolic 4..7        linear 0..4      linear 5..9
group 0 ─► [H0 H1 H2 H3] ─► AF glue 0 ─────────► [L0 .. L4] ─► result A
group 1 ──────────────────► [H4 H5 H6 H7] ─► AF glue 1 ─► [L5 .. L9] ─► result B
32-bit  ─► [H0 ........................ H7] ─► AF glue 1 ─► [L0 ............ L9] ─► result B
```

How the split works:

- The middle stages H4 and L5 each have an input multiplexer. It follows the previous stage's token if that token is 32 bits wide; otherwise it takes the second input group.
- Every stage reads its shift index and mode from the tag that travels with its own token. So stage H4 runs as iteration 1 for a group-1 token and as iteration 5 for a 32-bit token.
- There are two copies of the AF glue, each with its own softmax FIFO, one per group.

**Throughput.** In time-multiplexed (TM) mode the PE takes two input words per
clock, one per group:

| Precision | Words per clock | Lanes per word | Results per clock |
|---|---|---|---|
| 4 | 2 | 8 | 16 |
| 8 | 2 | 4 | 8 |
| 16 | 2 | 2 | 4 |
| 32 | 1 | 1 | 1 |

**Latency.**

| Path | Latency | Output |
|---|---|---|
| 32-bit | 18 clocks (8 + 10 stages) | `out_data[1]` |
| TM, group 0 | 9 clocks (4 + 5 stages) | `out_data[0]` |
| TM, group 1 | 9 clocks | `out_data[1]` |

A 4-bit linear operation uses only 4 of its 5 linear stages; the fifth is set to pass.

**Rule.** A 32-bit token and a narrower one must never be in the same chain
half at the same time, since they would need the same stage. Drain the
pipeline (`busy` low) before switching between 32-bit and narrower
operations. Switching among 4, 8 and 16 bits needs no drain. Assertions check
the rule.

The precision, function and softmax flags travel as a tag (`pe_cfg_t`) with each token.

### Softmax in two passes

The PE cannot divide by a sum before that sum exists, so a softmax vector goes through twice:

1. **Pass 0** (`sm_phase = 0`; `sm_first` marks the first element).
   - Each element's e^x, shifted right by `sm_shift`, is pushed into the group's FIFO.
   - The same value is added to an accumulator.
   - The linear chain does nothing; the token is marked "drop" and gives no output.
2. **Pass 1** (`sm_phase = 1`).
   - The inputs are ignored.
   - Each token pops one e^x from the FIFO and divides it by the accumulated sum.

**Scaling.** The shift `sm_shift` scales numerator and denominator alike, so the quotient is unchanged. It keeps the sum inside the data range: with n elements of e^x up to about 3, the sum needs about log2(3n) − 2 bits of headroom.

**Limits.** The FIFO holds 16 words, so a vector has at most 16 elements per group. Softmax is per lane: each lane of the SIMD word is its own vector.

## The iterative Flex-PE

`flex_pe_iter` reuses a single `cordic_stage`. A small state machine runs the steps in turn: IDLE, HYP (hyperbolic iterations), GLUE (form the linear inputs), LIN (linear iterations), DONE. It handles MAC, sigmoid, tanh and ReLU; it does not handle softmax.

Cycles from `start` to `done`:

| Operation | 4-bit | 8/16-bit | 32-bit |
|---|---|---|---|
| MAC | 5 | 6 | 11 |
| sigmoid, tanh | 10 | 11 | 20 |
| ReLU | 1 | 1 | 1 |

`ready` is high in IDLE and DONE. `result` holds its value until the next start.

Worst absolute error measured against real arithmetic, over random inputs (|x| ≤ 1 for the activation functions; MAC with |w| < 1):

| Precision | Sigmoid | Tanh | MAC |
|---|---|---|---|
| 4 | 0.48 | 0.51 | 0.75 |
| 8 | 0.075 | 0.139 | 0.084 |
| 16 | 0.040 | 0.082 | 0.028 |
| 32 | 0.0026 | 0.0085 | 0.0008 |

At 4 bits the error is mostly the format itself: one LSB is 0.5.

The 8- and 16-bit errors are the cost of only 4 hyperbolic and 5 linear stages. The 16-bit figures are barely better than the 8-bit ones because the iteration count, not the word length, limits them.

The pipelined PE gives the same per-token results, since it uses the same stages.

## The systolic array

`sa_array` is a ROWS×COLS (default 8×8) mesh of `sa_pe`. Each PE holds one output element and one iterative Flex-PE. Data moves through the mesh like this:

- Weights move left to right along the rows. Each weight carries a valid bit.
- Input features move bottom to top along the columns.

In response to a `step` pulse, each PE:

- latches the weight and input it receives and passes them on next cycle;
- starts a CORDIC MAC `acc ← acc + x·w` if the weight is valid.

The valid bit is needed because a CORDIC product with 0 is not exactly 0. Without it, the zero padding of the skewed feed would disturb the accumulators.

Once the MAC chain is done, the `act` pulse runs the chosen activation on the accumulator in place.

**Feed order.** The control engine feeds the mesh skewed. At beat t:

- row r receives W[r][t−r];
- column c receives X[t−c][c].

PE (r, c) therefore sees matching pairs W[r][k]·X[k][c], and after K + ROWS + COLS − 2 beats it holds

  OUT[r][c] = Σ_k W[r][k] · X[k][c].

That is an (8×K)·(K×8) matrix product in every SIMD lane at once.

**Pacing.** Each beat waits until every PE's CORDIC is idle (`busy` low). A beat therefore takes the MAC latency of the selected precision, plus one cycle.

## Control engine and top level

`flexpe_accel` connects the following:

- 8 weight banks, one per row;
- 8 input banks, one per column;
- 8 output banks, one per row;
- the control engine `sa_ctrl`;
- the array;
- one pipelined Flex-PE for softmax.

All banks are `simd_mem`, 64 words deep for weights and inputs. They have synchronous write and combinational read.

The host port is a plain word interface: `host_we`, a 16-bit `host_addr` and `host_wdata`. Read data `host_rdata` appears one clock after the address. `irq` pulses for one cycle when a run completes.

| Address | Content |
|---|---|
| 0x0000 | CTRL: write 1 to start a run |
| 0x0001 | CFG: [1:0] precision (0=4, 1=8, 2=16, 3=32 bit), [3:2] function (0 ReLU, 1 sigmoid, 2 tanh, 3 softmax), [4] apply function, [9:5] softmax shift, [10] round-to-nearest-even |
| 0x0002 | KLEN: dot-product length K, 1..64 |
| 0x0003 | STATUS: [0] busy, [1] done |
| 0x0004 | CYCLES: clocks taken by the last run |
| 0x1000 + r·64 + k | W[r][k], weight (angle format, MAC Z operand, magnitude below 1) |
| 0x2000 + c·64 + k | X[k][c], input feature (data format, MAC X operand) |
| 0x3000 + r·8 + c | OUT[r][c], read only |

Inside each PE the input feature drives CORDIC X, the accumulator Y, and the weight Z, so weights must be below 1 in magnitude.

A run steps through these states:

- CLEAR: clear the accumulators.
- BEAT / BWAIT: K + 14 beats.
- ACT / AWAIT: only if the function is sigmoid, tanh or ReLU and "apply" is set.
- OUT: write the accumulators (or activations) to the output banks.
- SOFT / SDRAIN: only for softmax. Each output row is streamed through the pipelined Flex-PE, first pass 0 and then pass 1, and the quotients overwrite the row.
  - In TM precisions two rows go at once, one per group.
  - At 32 bits the rows go one by one.
  - The input to the pipe is the doubled accumulator, so that it lands in the angle format of Z.
- DONE.

Cycle counts measured for complete runs at the default size:

| Run | Clocks |
|---|---|
| sigmoid, 16 bit, K=6 | 238 |
| tanh, 32 bit, K=4 | 321 |
| ReLU, 8 bit, K=6 | 228 |
| MAC only, 16 bit, K=5 | 217 |
| softmax, 8 bit, K=6 | 329 |
| softmax, 32 bit, K=4 | 579 |

## Where this design departs from or fills in the source description

- **Throughput versus input timing.** The source describes the pipelined PE as loading inputs over two clocks and producing outputs on alternate clocks. It also claims 16/8/4/1 results per clock. Here the two time-multiplexed groups enter in the same clock, which gives the claimed throughput.
- **Repeated hyperbolic iteration.** The source's iteration table lists i = 1, 2, 3, … without the repeat. Its scale factor (Kh = 0.8281) and convergence range (±1.1182) only hold with i = 4 repeated. The 8-stage sequence repeats it.
- **Linear range.** The source quotes a linear-rotation range of about ±7.97, which implies iterations starting at i = −2. Here iterations start at i = 1, so MAC weights must lie in [-1, 1).
- **Array size.** The block diagram shows a 128×128 array, but the evaluated array is 8×8. The default is 8×8; ROWS and COLS are parameters.
- **Design choices.** These are not given by the source and are this design's own:
  - the number formats;
  - the two-pass softmax control, with its shift and FIFO depth of 16;
  - the drain rule between 32-bit and narrower tokens;
  - the valid bit on weights;
  - the output-stationary dataflow and its skew;
  - the use of the iterative PE inside the array and the pipelined PE for softmax;
  - memory depths (64 words);
  - the register map and host port, which stand in for the AXI/DMA interface of the SoC;
  - the state sequences;
  - the ReLU carried through pass stages.
- **Not built.**
  - The RISC-V host, AXI interconnect, DMA, peripherals and host memories.
  - The scheduler software.
  - Accumulation across K tiles: each run clears the accumulators, so a layer with K > 64 needs the host to add partial results.
  - Softmax over vectors longer than one output row.

## Files

| File | Content |
|---|---|
| `rtl/flexpe_pkg.sv` | types, encodings, lane helpers, constants |
| `rtl/simd_addsub.sv`, `simd_lbs.sv`, `cordic_rom.sv` | SIMD primitives |
| `rtl/cordic_stage.sv` | one micro-rotation |
| `rtl/exp_fifo.sv`, `af_select.sv` | softmax FIFO and AF glue |
| `rtl/flex_pe_pipe.sv` | pipelined, time-multiplexed Flex-PE |
| `rtl/flex_pe_iter.sv` | iterative Flex-PE |
| `rtl/sa_pe.sv`, `sa_array.sv` | systolic PE and mesh |
| `rtl/simd_mem.sv` | memory bank |
| `rtl/sa_ctrl.sv` | control engine |
| `rtl/flexpe_accel.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_util_pkg.sv` | lane access and real-number helpers |

Every testbench:

- draws random stimulus;
- compares the results with a model written in `real` arithmetic, or with exact integer models for the primitives;
- ends with a line `TB_RESULT checks=<n> failures=<m>`;
- has a watchdog.

`tb_flexpe_accel` runs the whole accelerator at its default parameters:

- seven layers over all four precisions and all functions, including both softmax paths;
- each layer is programmed through the host port.

It counts how often each mechanism occurs and fails if any never occurs. The mechanisms are:

- MAC beats;
- in-PE activations;
- each function;
- softmax tokens;
- time-multiplexed and 32-bit pipe cycles;
- precision switches;
- interrupts.

## Simulating

With Verilator 5, the package files must come first:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/flexpe_pkg.sv tb/tb_util_pkg.sv \
    $(ls rtl/*.sv | grep -v flexpe_pkg) tb/tb_flex_pe_pipe.sv \
    --top-module tb_flex_pe_pipe
obj_dir/Vtb_flex_pe_pipe
```

Replace the testbench name to run another. The full accelerator test (`tb_flexpe_accel`) compiles 64 PEs. Building it takes a few minutes; simulating it takes under a second.

Every module has defaults for all parameters and can be linted on its own (`verilator --lint-only -Wall` with the package first).
