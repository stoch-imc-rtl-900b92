# Stoch-IMC: stochastic computing inside an STT-MRAM bank, bit-parallel

Stochastic computing stores a number p in [0,1] as a bitstream where each bit is '1' with
probability p. Arithmetic then becomes very cheap. A product is the AND of two independent
streams. A scaled sum is a 2:1 multiplexer. A square root, a divider or an exponential are small
gate networks. The price is length: 8-bit resolution needs streams of 256 bits.

Stoch-IMC runs such circuits inside STT-MRAM. Each bit of a bitstream is one magnetic tunnel
junction (MTJ) cell. Two properties of the cells do the work:

* **Random bits from the cell.** An MTJ hit by a write pulse switches with a probability set by
  the pulse's amplitude and width. So a stochastic number is written into memory directly. It
  needs no random-number generator and no comparator.
* **Gates in the array (2T-1MTJ logic mode).** Several cells of a row drive current through one
  output cell. Depending on the input states, the output cell either switches or keeps the value
  it was preset to. That evaluates a gate in place.

The "bit-parallel" part is how the bits are spread out. A 256-bit stream is not stored along one
row and processed bit by bit. It is spread over 256 subarrays, one bit each, and all subarrays run
the same step at the same time. Inside each subarray, many rows also run the same gate at once.
So a whole stochastic circuit costs a few steps, whatever the stream length. Reading the result
back is a popcount over the subarrays. The bank does it with a two-level accumulator tree in
n + m steps.

This repository gives the RTL of such a memory:

* one bank by default, optionally several working in parallel;
* in each bank, n = 16 groups of m = 16 subarrays, each 256 × 256 cells;
* its controller, instruction buffer, pulse-code table and accumulators;
* a behavioural model of the MTJ switching statistics;
* testbenches that run stochastic arithmetic and three application kernels end to end.

## The three kinds of in-memory step

All computation is a sequence of steps broadcast to every subarray of the bank. A step acts on a
contiguous row range `[row_first, row_last]` of one or more columns. Every subarray applies it to
the same cells.

| Step | Effect on column `out_col`, rows in range |
|---|---|
| **preset** | write a constant (`imm[0]`) |
| **stochastic write** | each cell switches 0 → 1 with the probability the pulse gives; the column must be preset to 0 first |
| **logic** | `out[r + row_shift] = gate(in_col[0..k-1][r])` for every row r of the range |

**Logic needs a preset.** In a logic step the output cell can only move away from its preset
value. A gate whose output is preset to 0 can only set it to 1. A gate preset to 1 can only clear
it. The subarray model enforces this. So a logic step onto an output that was not preset gives the
wrong answer, just as the device would. The preset value per gate is in
`stoch_imc_pkg::gate_preset`:

| Gate | Preset |
|---|---|
| NAND, NOT, NOR, MAJ3N, MAJ5N (inverting) | 0 |
| AND, OR, BUFF (non-inverting) | 1 |

MAJ3N and MAJ5N are the inverted 3- and 5-input majority gates. The NAND and AND values are stated
in the source publication. The others are chosen to match them.

**Overlapped preset.** The preset of a gate's output cell can share a step with the previous gate.
A logic step may carry `pre_en`/`pre_col`. Then column `pre_col` of the same rows is preset to
`imm[0]` while the gate runs. A chain of k gates then costs 1 preset + k logic steps, not 2k. The
publication counts time steps this way.

**Row shift.** `row_shift` (signed) writes the result k rows lower or higher. With BUFF this is
the inter-row copy. It lines operands up in the same column of different rows, so that later
steps can process those rows together.

**Example: scaled addition Y = S·A + (1−S)·B** (a 2:1 multiplexer with select S), over 16 rows at
once. Each gate presets the next gate's output:

```
preset  CN := 0
NOT     CN := ~S          (pre N1 := 1)
AND     N1 := A & S       (pre N2 := 1)
AND     N2 := B & CN      (pre Y  := 1)
OR      Y  := N1 | N2
```

## Writing numbers: the switching law and the BtoS table

A preset (parallel, '0') MTJ hit by a pulse of amplitude Vp and width tp switches with

```
P_sw = 1 - exp(-tp / tau),    tau = tau0 * exp(Delta * (1 - Vp / Vc0))
```

`mtj_switching_model` draws one independent outcome per row from this law. One such model sits
next to every subarray, so the bits of a stream are independent across subarrays and across rows.

The model's constants are Delta = 40, tau0 = 1 ns, Vc0 = 0.31959 V and tp = 4 ns. They are chosen
so that a 310 mV, 4 ns pulse switches with probability 0.7, the operating point the publication
quotes. The pulse amplitude is selected by an 8-bit code: Vp = 0.25 V + code × 0.5 mV. Code 0 means
no pulse. All of this is a modelling choice. A real array would use its measured curve.

The **BtoS memory** (binary-to-stochastic) is a 256 × 8 table. For each 8-bit value v it holds the
pulse code that writes probability v/256. The host loads it before a run. The testbenches compute
it as follows:

```
code(0) = 0
code(v) = the c in 1..255 minimising |P_sw(Vp(c)) - v/256|
```

In closed form, the ideal amplitude for probability p is
`Vp = Vc0 * (1 - ln(tp / (tau0 * (-ln(1 - p)))) / Delta)`. Rounding to 0.5 mV codes puts at most
about 1 % error on the written probability.

An `I_SBG v` instruction looks up code(v) and writes that pulse into the addressed column of every
subarray.

## Reading numbers: two-level accumulation

The value of a result bit is the number of its ones across all N·M subarrays.

1. `I_ACC row, col` loads cell (row, col) of every subarray into its buffer register.
2. **Local phase, M steps.** In every group at once, the local bus selects subarray 0..M−1 in turn
   and the group's local accumulator adds the bit. It holds 0..M, so it is $clog2(M+1) = 5 bits.
3. **Global phase, N steps.** The global bus selects group 0..N−1 in turn. The global accumulator
   adds their counts. It holds 0..N·M, so it is 9 bits.
4. One more cycle, then the count is returned to the host as `res_data`. The count divided by 256
   is the stochastic value.

So one result costs N + M = 32 steps, not N·M. The testbench checks that every accumulation takes
exactly M local and N global cycles.

**Longer streams.** A stream longer than N·M bits is computed as K passes of N·M bits on the same
cells. Each pass writes fresh random bits, evaluates and accumulates. The host adds the K counts.
`tb_workloads` does this for a 512-bit product.

## A larger example: kernel density estimation

`tb_kde` shows how a whole application is laid out. It estimates a probability density from a
pixel's current value X_t and its 32 previous values:

```
PDF = (1/32) * sum_i exp(-4 u_i),    u_i = (X_t + 1 - X_(t-i)) / 2
```

Each piece is a small stochastic circuit:

* **u_i** is a 2:1 multiplexer with select 0.5 between X_t and NOT X_(t-i).
* **exp(-0.8u)** is a fifth-order Maclaurin series written as a NAND chain. The first stage is
  1 − (c/5)u. Each later stage k computes 1 − (c/k)·u·(previous stage). Here c = 0.8. Every stage
  needs its own independent copy of u. A 3-input NAND is split into AND + NAND.
* **exp(-4u)** is the product (AND) of five independent copies of exp(-0.8u). This keeps every
  intermediate value inside [0,1].
* **The mean** is a five-level tree of 2:1 multiplexers, each with a fresh 0.5 select stream.

The layout is what makes it cheap:

* Frame i occupies rows 5i..5i+4, one row per independent copy. That is 160 rows.
* Every gate runs on all 160 rows in one step.
* Rows are combined by a shifted BUFF followed by an AND or a multiplexer.
  * For the product, the copies are shifted up by 1..4 rows.
  * For tree level l, the shift is 5·2^l rows.

The full program has 498 instructions:

| Part | In-memory steps |
|---|---|
| input writes, logic | 432 |
| 65 accumulations × 32 | 2080 |



The controller runs a program from the global buffer (1024 words of `inst_t`), starting at address
0 and ending at `I_HALT`.

| Field | Meaning |
|---|---|
| `op` | `I_NOP`, `I_PRESET`, `I_SBG`, `I_LOGIC`, `I_ACC`, `I_HALT` |
| `gate` | gate of an `I_LOGIC` |
| `row_first`, `row_last` | row range (inclusive) |
| `row_shift` | signed 9-bit destination-row offset of `I_LOGIC` |
| `in_col[0..4]` | gate inputs; `in_col[0]` is also the column an `I_ACC` reads |
| `out_col` | target column |
| `pre_en`, `pre_col` | overlapped preset of `I_LOGIC` |
| `imm` | preset value (bit 0), or the 8-bit value of `I_SBG` |

Timing at the clock:

| Instruction | Cost |
|---|---|
| every instruction | fetch 1 cycle + decode 1 cycle |
| `I_SBG` | 1 extra cycle for the BtoS lookup |
| `I_ACC` | 1 load cycle + M + N + 1 cycles |

The subarray command is issued in the cycle after decode, overlapping the next fetch. So a run of
preset/logic instructions issues one step every 2 clock cycles.

The output `steps` counts in-memory steps, the time measure this design is about:

* 1 per preset, stochastic write or logic step;
* N + M per accumulation.

The ratio of clock cycles to steps is this implementation's choice. The publication counts steps,
not clocks.

## Several banks in parallel (`stoch_imc_memory`, top level)

A bank produces N·M bits of every stream per pass. Instead of running more passes, a longer stream
can be spread over NB banks:

* Every bank receives the same host writes and the same start, so it holds the same program and
  table.
* Each bank runs on its own independently switching cells, so it computes a different set of
  N·M bits.
* The banks stay in lockstep. An assertion checks this.
* For each result, the memory adds the banks' counts in one extra cycle, the inter-bank transfer.
  `res_data` grows to $clog2(NB·N·M+1) bits.

With the default NB = 1 the memory is exactly one bank, the evaluated 256-bit configuration. The
`tb_multibank` testbench runs the same program on NB = 1 and NB = 2 side by side. The two-bank memory
delivers 512-bit results in the same cycles.

## Host interface (`bank_io`)

Write the table and program first, while the bank is idle. An assertion checks this.

| Signals | Effect |
|---|---|
| `host_we`, `host_sel = 0` | write entry `host_addr` of the BtoS table with `host_wdata.imm` (`imm` is the LSB field of `inst_t`) |
| `host_we`, `host_sel = 1` | write instruction `host_wdata` at `host_addr` |
| `host_start` (one cycle) | run the program; ignored while `busy` |

Writes reach the memories one cycle later. Each `I_ACC` produces one `res_valid` pulse with:

* `res_data`, the count of ones (0..256);
* `res_idx`, the result's sequence number.

`done` pulses at `I_HALT`.

## Parameters

| Module | Parameter | Default | Note |
|---|---|---|---|
| `stoch_imc_bank` | `N`, `M` | 16, 16 | groups per bank, subarrays per group; N·M = stream length per pass |
| | `ROWS`, `COLS` | 256, 256 | subarray size; addresses are 8 bits (`ADDR_W` in the package) |
| | `DEPTH` | 1024 | global buffer words (own choice) |
| `stoch_imc_memory` | `NB` | 1 | banks working in parallel; also takes the bank parameters |
| `mtj_switching_model` | `TP_NS`, `DELTA`, `TAU0_NS`, `VC0_V`, `VP_MIN_V`, `VP_STEP_V` | see above | switching-law constants |

The accumulator widths follow from N and M.

## Files

| RTL (`rtl/`) | Role |
|---|---|
| `stoch_imc_pkg.sv` | gate, command and instruction types; preset rule |
| `subarray.sv` | cell array, row decoder, row-parallel gates, row shift, buffer register |
| `mtj_switching_model.sv` | behavioural (not synthesisable) stochastic switching, uses `$urandom` and reals |
| `subarray_group.sv` | M subarrays with their switching models, local bus and local accumulator |
| `local_bus.sv`, `global_bus.sv` | the M:1 and N:1 selections used during accumulation |
| `local_accumulator.sv`, `global_accumulator.sv` | the two counters |
| `btos_memory.sv`, `global_buffer.sv` | pulse-code table and instruction memory |
| `bank_controller.sv` | program sequencer and accumulation sequencer |
| `bank_io.sv` | host port |
| `stoch_imc_bank.sv` | one bank |
| `stoch_imc_memory.sv` | NB banks working on one stream in parallel (top level) |

Every file starts with a comment on its function, interface and timing.

## Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it runs |
|---|---|
| `tb_stoch_imc_memory` | the top level at full size (one bank): the same program as `tb_stoch_imc_bank`, every mechanism counted |
| `tb_multibank` | a two-bank memory next to the default one, same host stimulus: 512-bit results, lockstep, banks drawing different bits |
| `tb_stoch_imc_bank` | full-size bank: multiplication, scaled addition (with overlapped presets), inter-row copy, exact gate identities; checks step counts and counts every mechanism |
| `tb_workloads` | full-size bank: stochastic square root over 16 values, one 16-point batch of the object-location Bayesian kernel (5-AND chain), a pipelined 512-bit product |
| `tb_divider` | full-size bank: eight JK-flip-flop stochastic divisions, and three runs of the heart-disaster Bayesian network that ends in the divider (see below) |
| `tb_kde` | full-size bank: kernel density estimation of one pixel over 32 history frames, including the stochastic exponential (see below) |
| `tb_<module>` | one per RTL module |

Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/stoch_imc_pkg.sv tb/tb_stoch_imc_memory.sv --top-module tb_stoch_imc_memory
./obj_dir/Vtb_stoch_imc_memory
```

The full-size bank holds 256 subarrays × 64 Kbit. It builds in a few seconds and runs in under a
second.

Stochastic results are compared with a bound: 5 binomial standard deviations plus 4 % of full
scale (for pulse-code rounding). Exact identities, such as NAND(1,1) = 0 or AND(1,B) = B bit for
bit, are compared exactly.

## How far this follows the source, and where it does not

**Taken from the source publication:**

* the architecture (bank → groups with local accumulator → subarrays, global accumulator, BtoS
  memory, global buffer, controller, bank I/O);
* the 16 × 16 configuration of 256 × 256 subarrays;
* the preset / write / logic step sequence, with preset values for NAND and AND;
* the switching law and its 310 mV / 4 ns → 0.7 point;
* n + m accumulation steps and the accumulator widths;
* the overlapped preset in step counting;
* spreading a long stream over several banks, or over passes of one bank;
* the gate circuits of the arithmetic and of the kernel-density and heart-disaster networks.

**Chosen here (not specified there):**

* the instruction set and encoding;
* the clock-level timing (2 cycles per step);
* contiguous row ranges with a single row shift;
* the MTJ constants other than the quoted point;
* the pulse-code mapping;
* the remaining gate presets;
* the global-buffer depth;
* the host protocol.

**Deliberate simplifications:**

* **Cells are functional bits.** The SL/BL drivers and the 2T-1MTJ cell are modelled by what they
  do, not by voltages and currents. Gate voltage windows, energy and device variation are not
  modelled.
* **Banks share one host port.** Banks working in parallel receive broadcast writes and run in
  lockstep. The inter-bank transfer is a single adder cycle. The source only says it costs "a few
  cycles". Passes on one bank are combined by the host.
* **No scheduler.** The source describes a scheduling and mapping algorithm that turns a gate
  netlist into row-parallel steps. It is not included. The programs in the testbenches are
  scheduled by hand.
* **All gates are offered.** For reliability, the source restricts its evaluation to NOT, BUFF,
  NAND, NOR and the inverted majorities, but uses AND and OR in its examples. All eight are
  offered here; a program may keep to the smaller set.
* **Independent bits only.** Absolute-value subtraction needs two streams that are positively
  correlated. This bank has no way to generate correlated streams.
* **Delays in the exponential.** The delay elements of the exponential circuit are realised as
  independently generated copies of the input, because the delay only serves to decorrelate. In a
  bit-parallel layout, neighbouring bits of a stream live in different subarrays.
* **Divider as per-subarray chains.** Each subarray evaluates the divider's feedback as its own
  chain down the rows, as described above. This mapping is this design's choice.
* **Kernels that were not run.** Local image thresholding is not in the testbenches. Its variance
  term subtracts two means with an XOR, which, like absolute-value subtraction, needs correlated
  streams.
