# ZK-Tracer: trace generation for a zkVM in hardware

A zero-knowledge virtual machine (zkVM) proves that a program ran correctly.
Before any proof can be computed, the program has to be executed and its
*execution trace* written out: a table with one row per instruction (pc,
operands, results, memory traffic), plus auxiliary columns that tie the
tables of the proof system together. In software this front end is slow. An
interpreter executes the guest program. The main trace is written to DRAM and
then read back, and a long chain of modular inversions and running sums builds
the auxiliary columns.

This accelerator does both jobs in hardware and overlaps them:

* A small in-order RISC-V core, the **Main Trace Unit (MTU)**, runs the guest
  program natively. A side-path unit snoops every instruction as it retires,
  reduces the recorded words into the proof system's prime field and emits
  one **main-trace row** per instruction.
* Each row goes two ways at once. It is written to main memory, and it is
  pushed into an on-chip **trace buffer**, so the rows never have to be read
  back from DRAM.
* The **Permutation Trace Unit (PTU)** reads rows from the buffer and computes,
  for every row *i*, the LogUp permutation column and its running sum:

  ```
  perm_i = 1 / (gamma + sum_j beta^j * A_ij)        sum_i = perm_0 + ... + perm_i
  ```

  Here `A_ij` is column *j* of row *i*, and `beta`, `gamma` are random
  challenges. A DMA engine writes the `(perm_i, sum_i)` pairs to main memory.

All arithmetic is in the BabyBear field, p = 2^31 − 2^27 + 1 = 0x78000001.
Every field element travels as a 31-bit word below p.

The design follows a published architecture ("ZK-Tracer", a heterogeneous
accelerator for zkVM trace generation). Its structure, the arithmetic
techniques and the choice of 17 parallel compute units come from there. The
row format, the instruction encodings, the handshakes, the register map, the
batching and buffer sizes, and the way the blocks are sequenced are
choices of this implementation. The last section lists every departure.

## Field arithmetic

Five arithmetic blocks are used throughout. They all work on values below p.

| Module | What it computes | How |
|---|---|---|
| `fast_mod_red` | raw 32-bit word → x mod p | 2^31 ≡ 2^27 − 1, so `x = hi·2^31 + lo` folds to `lo + hi·(2^27 − 1)`: one addition, then one conditional subtraction |
| `mod_add` | (a + b) mod p | `s = a + b` and `t = s + (2^31 − p)` are formed in parallel. The carry out of either means `s ≥ p`, so an OR of the two carries selects `t`. No magnitude comparator is needed |
| `barrett_mod_mul` | a·b mod p | Barrett: `q = (a·b·m) >> 62` with `m = floor(2^62/p)`. `r = a·b − q·p < 2p`, then one conditional subtraction |
| `mont_mul` | a·b·2^−32 mod p | Montgomery REDC with R = 2^32. To-Montgomery is `mont_mul(x, 2^64 mod p)`; to-normal is `mont_mul(x, 1)` |
| `mod_inv_eea` | a^−1 mod p | binary extended Euclid, one shift-or-subtract step per clock, at most about 62 steps |

Each block uses the reduction that suits where it sits:

* The systolic array multiplies a stream of values in normal form, so it
  uses Barrett reduction and never converts between domains.
* The exponentiation and batch-inverse units chain many products on a few
  values. They use Montgomery form and pay for the conversions once.

The constants are derived from p in `zkt_pkg`.

## Main Trace Unit

`mtu` holds three parts: the core (`rv_core`), its instruction and data
memories (two `tcm_ram` of 4096 words each), and the trace collection unit
(`tcu`).

**Core.** `rv_core` is a classic five-stage in-order RV32IM pipeline: IF,
ID, EX, MEM, WB.

* Operands are forwarded from MEM and WB into EX.
* A load followed by a dependent instruction costs one stall cycle.
* Taken branches and jumps resolve in EX and flush two instructions.
* The register file is written in WB and bypassed to ID.
* EBREAK or ECALL ends the program: fetch stops, and `halted` rises when the
  instruction retires.
* Multiply and divide (the M extension) run in `rv_muldiv`, which sits in EX.
  A multiply is a single 33 × 33-bit combinational product and costs no extra
  cycle.
* Divide and remainder use a restoring divider that produces one bit per
  clock. While it works it holds IF, ID and EX for 33 cycles and sends
  bubbles into MEM. Division by zero and the −2^31 / −1 overflow give the
  results the ISA specifies.
* The core has no CSRs, no interrupts and no compressed (C) instructions.

**Custom instructions.** Two instructions on the custom-0 major opcode
(`0001011`) let software choose what is traced:

| funct3 | instruction | effect |
|---|---|---|
| 0 | `trace_on`  | capture starts with the next instruction |
| 1 | `trace_off` | capture stops |

Neither instruction is recorded itself. Any register fields are ignored.

**Retire snoop and row format.** Every retiring instruction appears on the
core's `ret_*` port with the eight 32-bit values of a row:

| column | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| value | pc | instruction | rs1 value | rs2 value | ALU result | memory address | memory data | rd write value |

Values that do not apply are 0. The TCU passes the row through a bank of
eight `fast_mod_red` units in the same cycle and holds the result in one
output register. That register is offered to two sinks at once:

* the TMEM path (main memory);
* the trace buffer.

Each sink takes the row with its own valid/ready handshake, and the
register frees once both have it.

**Freeze.** If a new instruction retires while the held row has not been
taken by both sinks, the TCU raises `freeze`. The whole pipeline then holds
still, so no row is lost and nothing is reordered. The core slows down only
when a sink is slower than the program. `freeze_cycles` counts those cycles.

## Trace buffer

`trace_buffer` is a circular buffer of 512 rows.

* **Write side.** It accepts one row per cycle while not full. A full buffer
  back-pressures the TCU, which freezes the core.
* **Read side.** This is what the PTU needs for wide tables. The reader sees
  `count` rows, starting at the oldest. It can read any of them by offset
  (combinational read). It frees the oldest `release_n` rows with a one-cycle
  `release`.

With this interface the PTU can read the same batch once per pass through
its arrays and free it only after the last pass.

## Permutation Trace Unit

`ptu` is a four-stage pipeline. The stages are weight precomputation, `LANES`
= 17 compute units (one MMAC systolic array and one batch inverter each), a
join, and a parallel prefix adder tree.

### Weights: `mod_exp_unit` and `weight_lut`

The weights `beta^j` are the same for every row, so they are computed once per
task (j = 0 … ncols−1) and stored in `weight_lut`.

* `mod_exp_unit` has one Montgomery multiplier. It forms each power by
  left-to-right square-and-multiply over the bits of j.
* beta is converted to Montgomery form once, and each result is converted
  back before it is written.
* For 8 columns this takes a few dozen cycles per task.

### MMAC systolic array: `ws_pe`, `mmac_array`

`mmac_array` is a one-dimensional weight-stationary chain of `NPE` = 8
processing elements.

**PE.** PE *j* holds weight `beta^j`. It multiplies column *j* of the row by
that weight (Barrett) and adds the result to the partial sum from PE *j−1*
(`mod_add`). Both the forwarded input and the partial sum are registered.

**Skew.** Column *j* of a row is delayed *j* cycles by skew registers, so it
meets its own partial sum. The array accepts one row per cycle and finishes a
row `ncols` + 1 cycles after it enters.

**gamma.** gamma enters as the initial partial sum of PE 0.

**End of the chain.** After the last active PE come three parts:

* an adder;
* an **output buffer** (a FIFO of `BATCH` entries);
* a **DMUX** that either sends the buffer head back to the adder or sends it
  out.

Column count against array width:

* **Narrow tables (ncols < NPE).** PEs at and beyond `ncols` are disabled and
  the result is tapped after PE `ncols−1`. The disable is a register enable,
  which a synthesis tool turns into clock gating. Fewer columns therefore also
  mean a shorter latency.
* **Wide tables (ncols > NPE).** The table is processed in passes of up to
  `NPE` columns:
  * Before each pass the controller preloads that pass's weights, one PE per
    cycle, broadcast to all lanes.
  * It then streams the same rows again.
  * On pass 0 the adder adds 0. On every later pass it pops the row's earlier
    partial sum from the output buffer, adds it and pushes the new total. This
    is the **partial-sum feedback**.
  * After the last pass the buffer drains one total per cycle into the batch
    inverter.

  The row format here has 8 columns, so at the default `NPE` = 8 every table
  fits in one pass. Feedback is exercised by building the array narrower.

### Batching and lanes

Rows are processed in **batches** of `LANES × BATCH` = 17 × 16 = 272 rows.
Row *r* of a batch goes to lane *r* mod 17, so each lane holds 16 rows.

1. The controller waits until the buffer holds a full batch, or until the
   end of the trace (`flush`).
2. Each pass streams the batch out of the buffer at one row per cycle.
3. When every array is done and every inverter is ready, all 17 arrays drain
   into their inverters together. The batch is then released from the trace
   buffer.
4. While a batch is being inverted, the next batch already streams through
   the arrays.

**Padding.** At the end of the trace a short last batch is padded with zero
rows. `rows_total` counts only the real rows, and the DMA engine drops the
results of the padding.

### Batch modular inverse: `batch_mod_inv`

Each lane inverts its 16 denominators with Montgomery's trick: one field
inversion plus 3(N−1) multiplications. It works in Montgomery form and uses
three multipliers.

| phase | cycles | work |
|---|---|---|
| LOAD | N | Convert each input `D[i]` to Montgomery form, store it, and form the prefix products `P[i] = D[0]·…·D[i]` |
| INV | ~62 | Convert `P[N−1]` to normal form, invert it with `mod_inv_eea` and convert it back |
| BACK | N | For i = N−1 … 1: `R[i] = acc·P[i−1]` and `acc = acc·D[i]`. Then `R[0] = acc` |
| OUT | N | Convert to normal form and stream out in input order |

A zero denominator would make the whole batch zero. That happens only if
`gamma + Σ beta^j A_ij ≡ 0`, which has negligible probability for random
challenges.

### Join and prefix adder tree: `prefix_adder_tree`

The 17 inverter outputs are joined into one vector of 17 consecutive rows,
and a vector is taken only when every lane has a value.

`prefix_adder_tree` forms the inclusive prefix sums of the vector with a
Kogge-Stone tree of `mod_add` units (5 levels for 17 lanes). It adds the
running total of all earlier vectors and carries the new total forward. It
produces one vector per cycle, with one register stage. The permutation
values and running sums go to the DMA engine as one 17-wide vector.

## Memory-side interfaces

Both main-memory paths are separate write-only ports with valid/ready, so
they never contend.

* **Main trace (`tmem_writer`).** Each beat writes one row of 8 × 32 bits
  (field elements zero-extended) to `TRACE_BASE + i·32`.
* **Permutation trace (`dma_engine`).** Each beat writes 64 bits
  `{0, sum_i, 0, perm_i}` to `PERM_BASE + i·8`. The engine splits each 17-row
  vector into single writes and skips rows ≥ `rows_total`.

## Control registers and a task

`csr_regs` is the host's view of the accelerator. Its bus is a single-cycle
request, and reads are combinational.

| offset | name | meaning |
|---|---|---|
| 0x00 | CTRL | write 1 to bit 0 to start a task |
| 0x04 | STATUS | bit 0 busy, bit 1 done. Write 1 to bit 1 to clear done and the interrupt |
| 0x08 | TRACE_BASE | byte address of the main trace |
| 0x0C | PERM_BASE | byte address of the permutation trace |
| 0x10 | NUM_COLS | columns folded into the permutation, 1…8. 0 or >8 means 8. Reset value 8 |
| 0x14 | IRQ_EN | bit 0 enables the completion interrupt |
| 0x18 | ROWS | main-trace rows of the last task (read only) |
| 0x1C / 0x20 | BETA / GAMMA | challenges of the last task (read only) |

A task runs like this:

1. The host loads the program into IMEM and any data into DMEM through the
   memory port (`mem_sel` 0 selects IMEM, 1 selects DMEM; byte addresses).
2. It sets the bases and NUM_COLS, then writes CTRL.
3. The sequencer requests two samples from the random number source
   (`trng_req` / `trng_valid` / `trng_data`). It reduces them to beta and
   gamma, starts the PTU (which fills the weight table) and lets the core run
   from pc 0.
4. When the core has halted and every row has left the trace path, it raises
   `flush` so the PTU finishes the last, padded batch.
5. When the PTU is done and the DMA engine is idle, it sets done and raises
   `irq` if enabled.

The random number source itself is outside this RTL.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `LANES` | 17 | compute units in the PTU (the published design point) |
| `NPE` | 8 | PEs per systolic array |
| `BATCH` | 16 | rows per lane per batch. Also the output-buffer and batch-inverse size |
| `MAX_COLS` | 64 | weight-table depth |
| `TB_DEPTH` | 512 | trace-buffer rows |
| `IMEM_WORDS`, `DMEM_WORDS` | 4096 | tightly coupled memories (16 KiB each) |

All are parameters of `zk_tracer`. `NPE` may be smaller than the row width,
which makes wide tables take several passes. `TB_DEPTH` must be at least
`LANES × BATCH`.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`).
Each compares the module against reference arithmetic in `tb_ref_pkg`, which
uses plain 64-bit modular arithmetic, Fermat inversion and a small RV32IM
encoder. Each testbench prints `TB_RESULT checks=<n> failures=<n>`.

Where a latency is fixed, the cycle count is checked as well:

* the array's pass latency;
* the inversion step bound;
* one-cycle trace capture.

The end-to-end tests load a guest program into IMEM (a Fibonacci loop in
the first two), run a whole task through the CSRs and check three things:

* every main-trace row that reaches memory;
* every permutation pair against reference arithmetic on those rows;
* the completion status and interrupt.

The Fibonacci program stores its results, includes a load-use hazard, a call and
return, and a `trace_on` / `trace_off` bracket.

| testbench | configuration | mechanisms that must occur |
|---|---|---|
| `tb_zk_tracer` | 3 lanes, 4 PEs, batches of 5, 16-row buffer, 6 columns, 96 rows, random memory back-pressure | core freeze, full trace buffer, untraced instructions, partial-sum feedback, disabled PEs, padded final batch, batch inversion |
| `tb_zk_tracer_full` | all defaults, 8 columns, 1800 rows | freeze, untraced instructions, padding, inversion. With 17 lanes the buffer never fills |
| `tb_zk_tracer_isprime` | all defaults, a trial-division prime test over 40 numbers (MUL and REMU in the loop), about 3900 rows, memories always ready | untraced instructions, inversion. The prime flags in DMEM are checked. The core must never be frozen and the buffer never full |
| `tb_zk_tracer_modexp` | all defaults, square-and-multiply modular exponentiation over 16 triples (MUL and REMU), about 15000 cycles, memories always ready | untraced instructions, inversion. Every result is checked. The core must never be frozen and the buffer never full |
| `tb_zk_tracer_sha256` | all defaults, SHA-256 compression of 3 chained blocks (the first is the padded message "abc"), about 19000 cycles, memories always ready | untraced instructions, inversion. The final hash state is checked against a reference SHA-256, which is itself checked against the known digest of "abc". The core may be frozen for under a fifth of the run (see the limits below) |

`tb_rv_core` also runs a program that executes all eight M-extension
instructions next to load-use and forwarding hazards. `tb_rv_muldiv` checks
the multiply/divide unit on its own, including corner operands and the exact
stall length. The full-size runs take seconds of simulation.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/zkt_pkg.sv tb/tb_ref_pkg.sv tb/tb_zk_tracer.sv --top-module tb_zk_tracer
./obj_dir/Vtb_zk_tracer
```

## Departures from the published design and limits

* **Core.** The published MTU extends the SCR1 core, an RV32IMC design. This
  one is its own five-stage RV32IM pipeline without the C extension, CSRs or
  interrupts. RV32IM is what zkVM guests are compiled for.
* **Where capture happens.** The published TCU snoops the EX and MEM stages.
  This one takes the same values from the retire (WB) stage, where they are
  final and in program order.
* **Custom instructions.** The encodings of `trace_on` / `trace_off` are not
  published. Custom-0 with funct3 0/1 is this design's choice.
* **Back-pressure.** The published TCU is said to cause no back-pressure.
  Here the field reduction adds no cycles, but a full sink freezes the core
  rather than losing rows.
* **Row format.** The published row contents ("pc, operands, ALU result,
  memory values") are fixed here as the eight columns above. There is one
  trace table, so there is one PTU. The published design has one PTU per
  trace table.
* **Sizes and orders.** The array width, batch size, buffer depths, memory
  sizes and the order of rows across lanes are not published and are chosen
  here.
* **Batch-inverse buffer.** The published figure's prefix buffer holds
  products of all but one element. This design follows the published
  multiplication count (3(N−1)) with a plain forward/backward scheme.
* **Memory macros.** The weight table, trace buffer and memories are register
  arrays. A real chip would use SRAM macros.
* **Clock gating.** Clock gating is expressed as register enables, not gating
  cells.
* **Outside parts.** The random number source, the host CPU and main memory
  are outside the design. They appear as ports.
* **Workloads.** The published benchmarks are SP1's Fibonacci, Is_Prime,
  Groth16 verify, RSA, BLS12-381, BN254, SHA256 and Tendermint. They were not
  run as such, because their program sizes are not published. Built with the
  SP1 runtime, they would very likely exceed the 16 KiB memories. Small
  Fibonacci, prime-test, modular-exponentiation (RSA-like) and SHA-256
  programs do run end to end.
* **PTU input rate.** The PTU reads the trace buffer at one row per cycle in
  total, dealing the rows out to the 17 lanes. It also spends a few cycles
  per batch on the weight preload and pipeline fill. So it takes in slightly
  less than one row per cycle. Programs with divides, loads and taken
  branches retire more slowly than that, and there the core is never frozen.
  The prime-test and modular-exponentiation runs check this. SHA-256 code has
  almost no stalls, and there the core is frozen about 13% of the time. Reading
  several rows per cycle into the lanes would remove this limit.
