# A GDN / inverse-GDN core for FPGA learned image compression

Learned image codecs of the Ballé hyperprior family put a *generalised divisive
normalisation* (GDN) after each convolution of the encoder, and its inverse (iGDN) after each
convolution of the decoder. For a pixel with activations `x_0 .. x_{C-1}` (one per channel):

    GDN :  y_i = x_i / sqrt( beta_i + sum_j gamma_ij * x_j^2 )
    iGDN:  y_i = x_i * sqrt( beta_i + sum_j gamma_ij * x_j^2 )

Many FPGA codecs replace GDN with ReLU because it is awkward in hardware, and they lose
rate-distortion quality by doing so. The accelerator this RTL comes from keeps GDN. It runs the
int8 convolutions on stock convolution processors and sends every GDN/iGDN layer to a small
custom core. That core is *mixed precision*: activations enter and leave as int8, like
everything else in the network, but the normalisation itself is computed in 32-bit fixed point,
because 8 bits there cost visible quality.

This repository holds SystemVerilog for that custom core: three normalisation engines, each a
chain of square, multiply, add, square-root and divide units with its own parameter memory,
plus the instruction fetch, scheduler and shared buffer that feed them from memory. The
convolution processors, the host CPU, the entropy coder and the DRAM are not part of it (see
*Boundaries*).

## 1. Number formats

| quantity | format | notes |
|---|---|---|
| activations in memory | int8, `fp` fraction bits | value = q * 2^-fp, symmetric, zero point 0 |
| inside the engines | signed 32-bit Q16.16 | `x`, `x^2`, products, sums, square roots, results |
| `beta_i`, `gamma_ij` | Q16.16 words in memory | must be non-negative, as GDN requires |
| running sum | 40-bit accumulator | clipped to [0, 2^31-1] when the row is done |

Conversion into the core is an exact shift (`x = q << (16 - in_fp)`). Conversion out rounds half
up and saturates to [-128, 127] (`q = sat(round(y * 2^out_fp))`). Each descriptor chooses its own
`in_fp` and `out_fp` (0..15), so the int8 scale can change from layer to layer. Squares and
products saturate at the 32-bit limits instead of wrapping.

## 2. The arithmetic units

**Square unit** (`gdn_square_unit`) and **multiply unit** (`gdn_multiply_unit`): one 32x32
multiply each, then a shift back to Q16.16. The multiply unit rounds. Both take one cycle and
accept an operand every clock. One multiply unit forms `gamma_ij * x_j^2`. In iGDN a second one
forms the final `x_i * sqrt(.)`, so the running sum never has to wait.

**Add unit** (`gdn_add_unit`): one accumulator. A term flagged `first` loads
`beta_i + term`, and a term flagged `last` releases the clipped sum a cycle later. It is plain
adder-and-register logic, with no multiplier.

**Square root** (`gdn_sqrt_pwl`). `alpha = 1/2` is the only exponent built. The argument `n` is
written as `m * 4^e`, with `m` in [1, 4), found from the leading-one position. Then
`sqrt(n) = sqrt(m) * 2^e`. The top `SEG_BITS` bits of the normalised word pick one of the
segments covering [1, 4). A table holds `sqrt` at the start of every segment, and the value is
interpolated linearly with the remaining bits. The table is generated at elaboration by an
integer square root, `T[k] = isqrt(k << (34 - SEG_BITS))`, so there is no data file. At
`SEG_BITS = 6` (48 live segments) the relative error is below 1.5e-4. With 4 and 8 bits it is
about 1.6e-3 and 3e-5. Latency is 2 cycles, one argument per clock.

**Divide unit** (`gdn_divide_unit`). The division is done as a reciprocal followed by a
multiply. The divisor `s` is normalised to `m` in [1, 2). A 32-entry seed table,
`r0[k] = 2^30 / (1 + (k + 0.5)/32)`, gives a first guess at 1/m. One Newton-Raphson step,
`r1 = r0 * (2 - m*r0)`, squares its error to below 3e-4. The quotient is then
`x * r1 >> (p + 14)`, where `p` is the leading-one position of `s`. Latency is 4 cycles, one
division per clock. A zero divisor returns the clipped value with the sign of `x`. Since
`beta > 0`, a zero divisor does not occur in a valid GDN layer.

## 3. One engine, one pixel

`gdn_engine` works through one pixel at a time. Its *local pool* (`gdn_local_mem`) holds the
layer's `gamma` matrix (C*C words, row i = output channel i), `beta` (C words), and the
pixel's `x_j` and `x_j^2` (C words each). Every read port is synchronous, like block RAM.

```
start ─► LOAD (C clk) ─► GAP (2) ─► ACC (C*C clk) ─────────────────► DRAIN (10) ─► done
          read int8 x_j             row i: j = 0..C-1
          convert, square           gamma[i][j], x2[j] ─► MU ─► AU ─┐
          store x_j, x_j^2                                         │ every C clocks
                                                                   ▼
                     x_i ───────────────────────────────► sqrt (2) ─► DU (4)  [GDN]
                                                                  └► MU (1+3) [iGDN]
                                                                   ▼
                                                 round to int8, write result byte i
```

* **LOAD**: the C input bytes are read from the engine's slot in the global pool, one per clock,
  converted to Q16.16 and squared. Both `x_j` and `x_j^2` are stored.
* **ACC**: one term per clock. The gamma address simply counts `0 .. C*C-1`. The `x^2` address
  is the column `j`. The beta and `x_i` addresses are the row `i`. Each row's sum leaves the add
  unit C clocks after the row began and enters the square-root/divide tail. Rows overlap: while
  row i is in the 7-cycle tail, row i+1 is already being summed. Every pipeline register carries
  the row number along, so a result is always written to its own channel.
* **DRAIN**: after the last term the engine waits for the tail to empty, then pulses `done`.

A pixel takes **C*C + C + 12 clocks** from the edge that samples `start` to `done`, in either
mode. That is 16 524, 25 772 and 37 068 clocks for 128, 160 and 192 channels. The parameters
stay in the local pool, so every pixel of a layer reuses them.

## 4. The core

`gdn_core` connects three engines to one memory port and one processor interface.

```
 processor ── start, desc_addr ─► gdn_instr_fetch ── desc ─► gdn_scheduler ── pw_* (broadcast) ─► engine 0,1,2
            ◄────────── irq ────┘        │                      │  eng_start / eng_done          local pools
                                          └───── memory port ────┤
                                                                 └─ slot r/w ─► gdn_global_mem ◄─► engines
```

**Descriptors.** A layer is described by five 32-bit words. Descriptors of a chain sit one
after another in memory.

| word | bits | field |
|---|---|---|
| 0 | 31 | mode: 0 = GDN, 1 = iGDN |
| 0 | 30 | last descriptor of the chain |
| 0 | 27:24 | `in_fp`, fraction bits of the int8 input |
| 0 | 23:20 | `out_fp`, fraction bits of the int8 output |
| 0 | 15:0 | channels C (1 .. MAX_C) |
| 1 | 31:0 | number of pixels |
| 2 | 31:0 | word address of the parameters: `beta[0..C-1]`, then `gamma[0..C*C-1]` row by row |
| 3 | 31:0 | word address of the input, pixel-major, `ceil(C/4)` words per pixel, channel 0 in bits 7:0 |
| 4 | 31:0 | word address of the output, same layout |

**Instruction fetch** (`gdn_instr_fetch`) starts on `start` and reads the descriptor words. It
hands the descriptor to the scheduler and waits for that layer to finish. It then moves on to
the next descriptor, or pulses `irq` once after the one marked `last`.

**Scheduler** (`gdn_scheduler`) runs one layer in two phases:

1. **Parameter load.** It reads the `C + C*C` parameter words and writes each one into all
   three local pools in the same cycle.
2. **Pixel distribution.** Pixel p goes to engine p mod 3. To start an engine, the scheduler
   copies the pixel's input words into that engine's slot of the global pool, then pulses
   `eng_start`. When an engine signals `done`, the scheduler copies the engine's result slot
   back to memory. An engine gets its next pixel only after its results are out. Stores come
   before loads.

Moving a pixel takes about `2*ceil(C/4)` memory accesses against C*C compute cycles. The
three engines therefore run concurrently almost all of the time.

**Global pool** (`gdn_global_mem`) has one input vector and one output vector per engine.
The scheduler side is 32 bits wide and the engine side one byte wide.

**Memory port.** A request (`ram_req`, `ram_we`, `ram_addr`, `ram_wdata`) is held stable until
`ram_gnt`. Read data returns on `ram_rvalid`/`ram_rdata` in request order, with any latency.
A write completes with its grant. Only one request is outstanding at a time. Instruction fetch
and scheduler never request together, and an assertion checks this.

**Status outputs**: `busy`, `sat_count` (int8 outputs clipped since reset), `param_words`
(parameter words loaded) and `pix_stored` (pixels finished in the current layer).

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `N_ENG` | 3 | engines (the source design has three) |
| `MAX_C` | 192 | largest channel count. 192 is the widest model evaluated; it sets the local pool at 192*192 gamma words per engine |
| `SEG_BITS` | 6 | square-root table resolution (2^SEG_BITS segments over [0, 4), three quarters of them used) |
| `SEED_BITS` | 5 | reciprocal seed table size |

At the defaults, synthesis finds about 3.6 Mbit of memory: three copies of the gamma matrix at
1.18 Mbit each, plus small vectors.

## 6. Capacity and speed against the evaluated models

The accelerator was evaluated with a 192-channel teacher model and 160- and 128-channel
distilled students (96 in some tables), each also pruned by 30%. Every GDN/iGDN layer of these
models fits the default core. The widest needs 36 864 gamma words, exactly one local pool, and
the pixel count is unlimited because pixels stream through memory. All four widths were
simulated in both modes, and a 134-channel layer stands in for the pruned models (section 9).

Speed is a different matter. The source gives no figure for the GDN engines' parallelism, and
this RTL computes one `gamma*x^2` term per clock per engine. Take the three encoder GDN
layers of one 256x256 patch: 128^2 + 64^2 + 32^2 = 21 504 pixels. At 160 channels they need
21 504 * 25 772 / 3 ≈ 1.8e8 clocks. A 720p frame needs at least 15 patches, and more because
the patches overlap. So a frame takes at least 9 s at 300 MHz. The accelerator reports around
44 frames/s for this model, about 400 times faster. To match that, the normalisation would need
over a thousand multiply-accumulates per clock, not three.
The structure scales that way: more engines (`N_ENG`), or several rows per engine sharing the
`x_j^2` read. But no such figure is given, so the RTL keeps the simplest schedule.

## 7. What comes from the source design and what does not

Taken from the source design:
- a dedicated GDN/iGDN core with three compute units
- each unit a chain of square, multiply, add and divide units: squaring and division mapped to
  multipliers, the sum built from adder logic
- the square root as a piecewise-linear table with adjustable precision
- the division done as a reciprocal approximation and a multiply
- parameters and intermediate values in on-chip memory local to each unit, with a global
  memory pool, a scheduler and an instruction fetch between the units, the processor and RAM
- 32-bit fixed point inside GDN, int8 outside, converted on entry and requantised on exit
- symmetric quantisation (zero point 0) with saturation

Choices made in this implementation, because the source does not specify them:
- Q16.16 format; power-of-two int8 scales
- the 40-bit accumulator
- segment and seed-table sizes
- one Newton step
- all pipeline latencies
- one term per clock per engine, and the LOAD/ACC schedule
- a second multiply unit for the iGDN product: the source draws a single shared multiply unit
- gamma kept in the local pool: the source lists beta, alpha and the activations there
- alpha fixed at 1/2 and not stored
- the slot layout of the global pool
- the descriptor format and chaining
- pixel-level round-robin distribution
- the request/grant memory protocol
- synchronous active-low reset

## 8. Boundaries

Not in this RTL:
- **Convolution processors.** The accelerator runs its int8 convolutions on three vendor
  deep-learning processor cores (8 pixels x 16 input x 16 output channels per clock each). They
  are used as supplied, and only their configuration is known.
- **Host CPU.** The processor runs the runtime that prepares buffers and starts the core. It
  also does patch extraction (overlapping 256x256 tiles), patch reassembly, and the arithmetic
  coding of the latents with the factorised and Gaussian entropy models. All of that is
  software.
- **External DRAM and its controller.** In simulation they are replaced by `tb/ram_model.sv`,
  a behavioural memory with configurable latency and random grant stalls.

The core's processor and memory signals are therefore top-level ports.

## 9. Simulation

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`. Each
module file begins with a description of its interface and timing. For example, with
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    rtl/gdn_pkg.sv tb/gdn_ref_pkg.sv tb/tb_gdn_core.sv --top-module tb_gdn_core
./obj_dir/Vtb_gdn_core +verilator+rand+reset+2
```

Replace `tb_gdn_core` by any other testbench name. `+verilator+rand+reset+2` starts every
register that reset does not touch at a random value.

| testbench | what it establishes |
|---|---|
| `tb_gdn_square_unit`, `tb_gdn_multiply_unit`, `tb_gdn_add_unit` | exact results against integer/real models, saturation, streaming |
| `tb_gdn_sqrt_pwl` | full input range at `SEG_BITS` = 4, 6, 8 side by side: each within its segment error bound, largest relative error measured 1.6e-3, 1.4e-4 and 3.3e-5; 2-cycle latency |
| `tb_gdn_divide_unit` | error below 5e-4 relative (+2 LSB) over the full input range; 4-cycle latency |
| `tb_gdn_local_mem`, `tb_gdn_global_mem` | every word and byte lane, slot separation, read latency |
| `tb_gdn_engine` | GDN and iGDN for C = 16, 12, 5, 1 against a double-precision reference (±1 LSB), C*C+C+12 clocks per pixel, saturation |
| `tb_gdn_instr_fetch` | three-descriptor chain then a restart: every field, only descriptor addresses read, no descriptor offered while a layer runs, one `irq` per chain |
| `tb_gdn_scheduler` | parameter broadcast order, round-robin assignment, result placement, with behavioural engines and memory stalls |
| `tb_gdn_core` | default-size core: 192-channel GDN, 24-channel iGDN and 7-channel GDN layers chained. Every output byte is checked; each mechanism is counted (both modes, chaining, all engines used, engines overlapping, memory stalls, int8 saturation, padded channel counts) |
| `tb_gdn_workloads` | 96-, 128-, 160- and 192-channel GDN and iGDN layers and a 134-channel layer (a 30%-pruned 192-channel model) in one chain at default size, with exact per-pixel busy time |

The reference (`tb/gdn_ref_pkg.sv`) evaluates the GDN formulas in double precision from the
same int8 inputs and Q16.16 parameters. Agreement within one int8 step is the accuracy
contract. The hardware's own error sources are the Q16.16 truncation of `x^2`, the table
square root and the approximate reciprocal, together well below 1e-3 relative.

The default-size runs (`tb_gdn_core`, `tb_gdn_workloads`) take seconds. Loading the
192-channel parameters dominates: about 37 000 memory reads.
