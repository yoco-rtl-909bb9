# AiDAC core: all-analog multibit vector-matrix multiplication, in SystemVerilog

AiDAC is an analog in-memory computing architecture for 8-bit vector-matrix
multiplication (VMM). Its main idea is to keep every step between the digital
input vector and the digital result in the analog domain, so that no DACs are
needed and one ADC conversion serves a whole column of macros:

* **Inputs become voltages without a DAC.** The capacitors that a row of
  memory cells already has are split into binary-weighted groups. Each group
  is charged by one input bit, and the groups then share their charge. The
  row voltage is then `IN / 255 * VDD`.
* **Multibit weights come from grouping capacitors too.** Each cell
  multiplies the row voltage by its stored bit. A column shares charge to
  form a 1-bit-weight dot product. Eight adjacent columns then share
  binary-weighted portions of their capacitance, which gives an 8-bit-weight
  dot product.
* **Macros are joined in the analog domain.** Inputs pass from macro to
  macro through small latching row drivers. The partial sums of vertically
  stacked macros are added as delays in a chain of voltage-to-time
  converters (a "column time accumulator"). One time-to-digital converter
  (TDC) per output digitises the sum.

One core is 8 x 8 macros of 128 x 256 cells. It computes a 1024-input,
256-output VMM with 8-bit inputs and weights in one 50 MHz analog clock
cycle. This repository holds SystemVerilog for that core:

* synthesizable RTL for its digital parts: controller, row drivers and
  buffers;
* exact fixed-point behavioural models of its analog parts: the
  charge-domain macro and the time accumulator;
* testbenches for each part, for a reduced core and for the full-size core.

The architecture comes from the AiDAC publication by Xuan, Chen and Kang.
Everything below describes this implementation of it, and the
[Departures and choices](#departures-and-choices) section lists where this
implementation had to decide something the architecture leaves open.

## The arithmetic of one VMM

The result of the core is easiest to understand by following the charge.
Write `N = 8` for the bit width, `M = 128` for the rows of a macro, and
`VDD` for the supply.

### Phase I and II: the row capacitors are the DAC

The 255 grouped cells of row `i` form groups of 1, 2, 4, ..., 128 cells, and
each group has its own input line and tri-state gate. In phase I (S1 on, EN
on, S2 off), group `g` is charged to VDD if bit `g` of the input `IN_i` is 1,
and to 0 otherwise. In phase II, EN turns off and S2 joins the groups. All
cells carry equal capacitors, so the row settles at the charge-weighted mean:

    V_IN_i = sum_g 2^g * bit_g(IN_i) * VDD / (2^N - 1) = IN_i / 255 * VDD

### Phase III and IV: 1-bit multiply, column sum

With S1 off and the read line RL high, each cell whose stored weight bit is 0
discharges its capacitor, and the others keep `V_IN_i`. RL then falls and S0
connects all cells of a column to its output line. Column `j` settles at

    V_col_j = sum_i V_IN_i * w_ij / M

### Phase V: 8-bit weights by column-to-column sharing

Eight adjacent columns form a compute block (CB), and bit `b` of a weight is
stored in column `b` of the CB. S3 isolates `2^b` of the cells of column `b`.
S4 then joins these isolated parts across the eight columns, so the CB settles
at

    V_CB = sum_b 2^b * V_col_b / (2^N - 1)
         = VDD * sum_i IN_i * W_i / (255 * 255 * M)

where `W_i` is the 8-bit weight of row `i`. One CB is therefore an 8-bit x
8-bit, 128-input multiply-accumulate. It is normalised so that all-255
operands give VDD.

### Phase VI: adding macros as time

For each CB position, one voltage-to-time converter (VTC) per macro forms a
chain down the eight stacked macros. A stage starts when the previous one has
finished, and its delay grows linearly with its CB voltage. The stop pulse of
the chain therefore arrives at

    t_stop = sum_k (T0 + TK * V_CB_k / VDD)

A reference chain per macro column sees 0 V and arrives at `8 * T0`. Its
pulse is the TDC's start, so the intrinsic delays cancel. The 8-bit TDC maps
the full-scale difference `8 * TK` to 256 codes. Output `o` of the core is
therefore

    code_o = min(255, floor(256 * sum_{i<1024} IN_i * W_io / (255 * 255 * 1024)))

It is the dot product scaled to the operands' full range, so all-255 inputs
and weights saturate at 255. The testbenches check every output code against
this formula. The models round down at each sharing step and the TDC
truncates, so the code can be one below the ideal. In the full-size test all
256 codes match the ideal exactly.

Random data averaged over 1024 products lands near the middle of the range.
To use the codes as a layer output, scale them back by
`255 * 255 * 1024 / 256`. Signed operands are not handled by the core.

## Organisation of a core

| Level | Part | Count | Module |
|---|---|---|---|
| cell | memory-and-compute cell: capacitor, 2 transistors, 8 SRAM bits | 128 x 256 per macro | inside `cd_macro` |
| macro | charge-domain macro | 8 x 8 | `cd_macro` (behavioural) |
| macro | row driver (one per row per macro, 8 bits wide) | 128 per macro | `row_driver` |
| macro | time-accumulator stage (one per CB per macro) | 32 per macro, plus 1 reference | `time_acc` (behavioural) |
| core | TDC, 8 bit | 256 | external; `tb/tdc_model.sv` for simulation |
| core | input and output buffer, 64 x 256 bit each (2 KB) | 2 | `io_buffer` |
| core | controller | 1 | `controller` |
| core | top level | 1 | `aidac_core` |

Shared types are in `aidac_pkg`:

* `volt_t`: a voltage as a fraction of VDD in steps of `2^-24 VDD`.
* `tfs_t`: a time in femtoseconds.
* `sw_t`: the switch bundle S1, S2, EN, RL, S0, S3, S4 and TAE (the time
  accumulators' and TDCs' enable).
* `state_t`: the controller's steps.

**Data layout.**

* Macro `(mr, mc)` holds global input rows `mr*128 ... mr*128+127`. It
  computes outputs `mc*32 ... mc*32+31`, one per CB.
* In the input buffer, input `i` is byte `i % 32` of word `ibuf_base + i/32`.
  Output `o` is laid out the same way from `obuf_base`.
* One VMM uses 32 input words and 8 output words. Each 2 KB buffer therefore
  holds two input vectors, or eight result vectors.

**Weights.** Each cell holds a cluster of eight SRAM bits. `wsel` chooses
which of the eight bits takes part in the computation. A core therefore
stores eight complete 1024 x 256 8-bit weight matrices (2 MB) and switches
between them without reloading. Weights are written one row of one cluster
bit at a time:

* `w_macro = mr*8 + mc`, `w_row`, `w_set`;
* bit `j` of `w_data` goes to column `j`, so the weight bit `b` of CB `c`
  is `w_data[c*8 + b]`.

Loading one matrix takes 8192 writes.

## Schedule and timing

All digital logic runs on one clock, 1 GHz in the architecture. The analog
cycle is one 50 MHz period, i.e. 20 digital cycles. The controller runs a VMM
as follows:

| Step | Cycles | What happens |
|---|---|---|
| RESET | 1 | switch S clears every row-driver latch |
| LOAD | 33 | 32 input-buffer reads, each word latched into the drivers of its 32 rows one cycle later; the drivers of a row are transparent together, so the value reaches all 8 macros |
| PH1 | 3 | S1, EN |
| PH2 | 3 | S1, S2 |
| PH3 | 3 | RL |
| PH4 | 2 | S0 |
| PH5 | 2 | S0, S3; S4 from the second cycle |
| PH6 | 7 | S0, S3, S4, TAE; TDC codes captured in the last cycle |
| STORE | 8 | 8 result words written to the output buffer; `done` with the last |

From `vmm_start` to `done` is 62 cycles, of which 20 are the analog cycle.
Phases I to V take 13 ns, the settling time the architecture gives for a
macro. The phase lengths are parameters of `controller`. The controller
checks with assertions that S1 is never on together with S0 or RL, and that
S4 is on only while S3 is.

## How the analog parts are modelled

`cd_macro` and `time_acc` are behavioural models. They are written as plain
integer logic so that every SystemVerilog tool, including synthesis front
ends, accepts them, but they stand for analog circuits, not for gates to be
built.

* Voltages are exact fixed-point fractions of VDD (24 fractional bits).
  Each charge-sharing step is an integer average, rounded down.
* Each phase settles within the clock cycle in which its switch is sampled
  on. `cd_macro` keeps the state the circuit keeps:
  * which input groups were charged;
  * the row voltages;
  * whether the read line has pulsed;
  * the column voltages;
  * the CB voltages, which hold after phase V.
* A VTC stage adds `T0 + TK * v / VDD`, with `T0 = 13 ps` and
  `TK = 100 ps`, to the arrival time of its input pulse. The 113 ps sum is
  the stage latency the architecture quotes, but the split between T0 and
  TK is this implementation's choice. Pulses are a valid bit plus a time
  value, not edges, so the chain is combinational.
* Noise, capacitor mismatch, charge injection, VTC non-linearity and TDC
  error are not modelled. The architecture reports below 0.68 % error for
  the charge-domain MAC, 0.11 % for the time accumulation and 0.79 % for
  the whole VMM. The models are ideal, so their results show what the
  circuit is meant to compute, not its accuracy.
* The TDC is an existing, silicon-proven converter and is not part of this
  design. `aidac_core` brings out `tdc_en`, `tdc_start[o]` and `tdc_stop[o]`
  (arrival times in fs) and takes back `tdc_code[o]`. `tb/tdc_model.sv` is
  an ideal 8-bit converter with full scale `8 * TK`.
* The memory-and-compute cell has no module of its own. A core has two
  million of them, and they live as arrays inside `cd_macro`.

## Interface of `aidac_core`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `vmm_start` | in | 1 | start a VMM (ignored while `busy`) |
| `ibuf_base`, `obuf_base` | in | 6 | first input word and first result word |
| `wsel` | in | 3 | cluster bit used as the weight matrix |
| `busy`, `done` | out | 1 | VMM running; last result written |
| `ib_we`, `ib_waddr`, `ib_wdata` | in | 1, 6, 256 | write the input buffer |
| `ob_re`, `ob_raddr` / `ob_rdata` | in / out | 1, 6 / 256 | read the output buffer, data one cycle later |
| `w_we`, `w_macro`, `w_row`, `w_set`, `w_data` | in | 1, 6, 7, 3, 256 | write one row of one cluster bit of one macro |
| `tdc_en` | out | 1 | TDCs enabled (phase VI) |
| `tdc_start[256]`, `tdc_stop[256]` | out | 32 each | reference and accumulated pulse times, fs |
| `tdc_code[256]` | in | 8 each | TDC results, sampled in the last cycle of phase VI |

Parameters set the macro grid (`MROWS`, `MCOLS`), the macro size (`ROWS`,
`COLS`), the bit width `NBIT`, the cluster size, the buffer word width
`BUS`, the buffer depths, and the VTC constants. Their defaults are the
sizes above. `BUS/NBIT` must divide both `MROWS*ROWS` and
`MCOLS*COLS/NBIT`.

## Files

* `rtl/aidac_pkg.sv`: shared types and constants.
* `rtl/aidac_core.sv`: the core.
* `rtl/controller.sv`, `rtl/row_driver.sv`, `rtl/io_buffer.sv`: the digital
  parts.
* `rtl/cd_macro.sv`, `rtl/time_acc.sv`: behavioural models of the analog
  parts.
* `tb/tb_<module>.sv`: a self-checking testbench per module.
* `tb/tb_aidac_core.sv`: the end-to-end test on a 2 x 2 core of
  8 x 32-cell macros.
* `tb/tb_aidac_full.sv`: one VMM on the full-size core.
* `tb/tb_mac_transfer.sv`: the 128-channel 8-bit MAC transfer curves of one
  full-size macro. It runs a weight scan at input 255 and an input scan at
  weight 255, and checks linearity and monotonicity.
* `tb/tb_attention_scores.sv`: a transformer's attention scores `Q K^T`
  (16 queries, 16 keys, d_k = 16) as a tiled workload on the reduced core.
  The two key tiles sit in two cluster bits and are chosen by `wsel`.
* `tb/tdc_model.sv`: the TDC stand-in.

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog.

## Simulating

With Verilator 5, for example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/aidac_pkg.sv tb/tb_aidac_core.sv --top-module tb_aidac_core
    ./obj_dir/Vtb_aidac_core

Replace `tb_aidac_core` with any other testbench. `tb_aidac_core` covers
the following, and checks all outputs and the latency for each VMM:

* every phase;
* the driver reset;
* switching `wsel`;
* both input-buffer slots and two output slots;
* a saturated full-scale VMM and an all-zero VMM.

`tb_aidac_full` builds the full 64-macro core. That takes a few minutes of
C++ compilation, and the simulation of one VMM about a minute. It loads
random weights, runs one VMM and checks all 256 outputs and the 62-cycle
latency.

To change the design:

* Sizes are parameters of `aidac_core`.
* The phase lengths are parameters of `controller`.
* The VTC law is in `time_acc`.
* The charge arithmetic is in the `always_comb` block of `cd_macro`.

## Departures and choices

Where the architecture is explicit, this implementation follows it: the
sizes, the phase order and switch levels, the charge-sharing equations, the
chaining of VTCs with a shared reference column, and the 2 KB buffers.
Where it is silent or unclear, the following choices were made.

* **Column weights.** The CB weights its columns 1:2:...:128 and divides by
  255, as the description of the column grouping says. The CB equation as
  printed in the architecture uses `2^j` for `j = 1..N`. That would double
  the result and exceed VDD, so it was not followed.
* **S3 polarity.** One passage says S3 is turned *off* before S4 is turned
  on. The phase-by-phase description says S3 turns *on*, then S4, and both
  hold. The controller follows the phase description.
* **Switch timing.** The phase lengths are chosen, as is keeping S0 on
  through phases V and VI and turning S2 off after phase II.
* **The 256th cell of a row.** The binary groups account for 255 of a
  row's 256 cells. The model gives every cell of the row the shared
  voltage.
* **Weight sets.** The eight SRAM bits of a cell are used as eight
  selectable weight matrices. The architecture says only that a cell holds
  a cluster of eight SRAM bits.
* **Weight-write port, buffer ports, word layouts and the host
  handshake.** These are this implementation's own. The architecture
  treats the decoders and buffers as small auxiliary parts.
* **Load and store are not overlapped with the analog cycle.** A VMM
  therefore takes 62 digital cycles here, although its analog part takes
  the 20 ns the architecture counts.
* **Row driver.** The driver is a level-sensitive latch, as in the
  architecture (two cross-coupled inverters). The load strobe `le` that
  opens it is this implementation's choice. Synthesis tools will report the
  latches; they are intended.
* **Time accumulator.** The VTC's linear law and its 13 ps + 100 ps split
  are assumed. The architecture takes the VTC from earlier work.
* **Not modelled.** Analog errors and signed operands are not modelled.
  The TDC is outside this design.
