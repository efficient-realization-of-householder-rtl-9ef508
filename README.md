# A Householder-QR processing element with a fused MHT datapath

Householder QR factorization spends almost all of its time on one update:
for every column `a` to the right of the current pivot, form `t = vᵀa` and
then `a ← a − 2·v·t`. Done naively, that is two passes over the column. The
first is an inner product. The second is a scaled vector subtraction that
cannot start until the first is finished. Written out per element, though,
the update is a single expression:

    a_i  ←  a_i − 2v_i · (v_1 a_1 + v_2 a_2 + v_3 a_3)        (3-row column)

It has four multiplications, two additions and one subtraction. That is exactly
the operator count of a 4-input dot-product unit (four multipliers and a tree
of three adders), provided the operators are wired differently. This
"modified Householder transform" (MHT) therefore needs no new arithmetic. It
only needs a second configuration of the dot-product datapath, so that each
updated matrix element comes out of one pass through the unit.

This repository holds synthesizable SystemVerilog for a processing element
(PE) built around that idea. The PE has:

- a floating-point sequencer with a reconfigurable DOT4 unit, a divider, a
  square-root unit and a 256-entry register file;
- a load/store half that moves matrix blocks from an external global memory
  (GM) into a local memory and on into the register file;
- a small semaphore block that orders the three instruction streams.

A self-checking end-to-end testbench runs complete QR factorizations (3x3,
4x4, 5x3, 8x8) through the PE. The results match a software model bit for bit.

The PE is meant as one tile of a larger coarse-grained reconfigurable array.
That array (routers, arbiters and memory tiles) is not part of this RTL. The
PE's GM port is simply brought out to the top level.

## 1. Organisation

```
                            pe_top
  +-------------------------------------------------------------+
  |  ls_cfu (Load-Store CFU)               fps (FP Sequencer)   |
  |  +--------------+  +--------------+   +------------------+  |
  |  | gls imem     |  | lls imem     |   | fps imem         |  |
  |  | gls_ctrl     |  | lls_ctrl     |   | fps_ctrl (issue, |  |
GM <-+ GM <-> LM    |  | LM <-> RF    +---+  scoreboard)     |  |
  |  +------+-------+  +------+-------+   | reg_file 256x64  |  |
  |         | port A    port B|           | fp_arith_unit:   |  |
  |       +-+-------------------+-+       | DOT4 FDIV FSQRT  |  |
  |       | local_mem 4096 x 64   |       +------------------+  |
  |       +-----------------------+                             |
  |              pe_sem: 4 counting semaphores                  |
  +-------------------------------------------------------------+
```

A PE does its work in five steps:

1. load the matrix from GM into the local memory (LM);
2. copy it from LM into the register file;
3. compute;
4. copy the results back to LM;
5. store them in GM.

Each of the two copy paths has its own sequencer with its own program, and the
FPS runs a third program. The three can overlap, for example while the FPS
computes on one block the global sequencer fetches the next. Their order is
set only by semaphores (section 4).

| File | Contents |
|---|---|
| `rtl/pe_pkg.sv` | types, instruction formats, sizes, semaphore numbers |
| `rtl/fp_add.sv`, `rtl/fp_mul.sv` | combinational binary64 adder/subtractor and multiplier |
| `rtl/dot4.sv` | the reconfigurable DOT4 pipeline (section 2) |
| `rtl/fp_div.sv`, `rtl/fp_sqrt.sv` | iterative divider and square root, 57 clocks each |
| `rtl/fp_arith_unit.sv` | the three units behind one issue port, three write-back ports |
| `rtl/reg_file.sv` | 256 x 64-bit register file, 9 read and 4 write ports |
| `rtl/fps_ctrl.sv`, `rtl/fps.sv` | FPS issue logic, and the FPS itself |
| `rtl/instr_mem.sv` | instruction memory, used three times |
| `rtl/local_mem.sv` | dual-port local memory |
| `rtl/gls_ctrl.sv`, `rtl/lls_ctrl.sv`, `rtl/ls_cfu.sv` | load/store sequencers and the Load-Store CFU |
| `rtl/pe_sem.sv` | semaphore counters |
| `rtl/pe_top.sv` | the PE |

## 2. DOT4: one datapath, two configurations

DOT4 has four binary64 multipliers (`M0..M3`) and three binary64
adder/subtractors (`A0..A2`). Each instruction supplies eight register
operands `op0..op7` and a configuration bit `mht`.

**Inner-product configuration (`mht = 0`).** The unit computes

    y = (op0·op1 ±₀ op2·op3) ±₂ (op4·op5 ±₁ op6·op7)

The three `sub` bits of the instruction choose `+` or `−` at each adder.
With the sign bits this configuration covers:

- dot products of up to four terms;
- longer dot products, by chaining the partial sum in as an operand with
  the constant 1;
- sums and differences;
- copies and scalings (for example `2·v_i`).

**MHT configuration (`mht = 1`).** The unit computes

    y = op7 − op6 · (op0·op1 + (op2·op3 + op4·op5))
      =  a  − 2v_i· (v_1 a_1 + (v_2 a_2 + v_3 a_3))

The first three multipliers form the three products of `vᵀa`. Adders A1
and A0 sum them. The fourth multiplier, which in the other configuration
multiplies `op6·op7`, is moved to after the sum, where it multiplies by the
precomputed `2v_i` (`op6`). A2 then subtracts the result from `a` (`op7`).
The factor 2 is not applied inside the unit. Software computes `2v` once per
reflection, with one inner-product-mode DOT4 per element (`v_i · 2`).

**Pipeline.** There is a register after every level of operators:

| stage | inner product | MHT |
|---|---|---|
| 1 | M0..M3 | M0..M2; `2v_i` and `a` carried along |
| 2 | A0, A1 | A1: `p1 + p2` |
| 3 | A2 → result | A0: `p0 + s` |
| 4 | | M3: `2v_i · t` |
| 5 | | A2: `a − …` → result |

The latency is 3 clocks for an inner product and 5 clocks for an MHT
operation. The unit accepts a new operation every clock in either
configuration. A 3x3 column update (six MHT operations, as in the 3x3
example) therefore streams at one element per clock.

**Reconfiguration.** The two configurations share the multipliers and adders
but route them differently, and their latencies differ. Because of this, they
cannot be mixed inside the pipeline. A mode register holds the current
configuration.

- An operation whose `mht` bit differs from the mode register is refused
  (`in_ready` low) until the pipeline has drained.
- Then the mode register switches, and `reconfig` pulses for one clock.
- The FPS counts such clocks as "busy unit" stalls.

Programs should group operations of the same kind. The QR programs do this
naturally: a run of inner products for `v`, then a run of MHT updates.

Each operation carries an 8-bit tag, its destination register, through the
pipeline. The result comes out with its tag on write-back port 0.

**Longer columns.** The MHT configuration has room for three products. For a
column of length `L > 3`:

- the first `L−2` products of `vᵀa` are summed in advance with
  inner-product passes, giving a partial sum `τ`;
- each element is then updated by one MHT operation with the operands
  `{τ, 1, v_{L−1}, a_{L−1}, v_L, a_L, 2v_i, a_i}`;
- the pair `τ·1` rides in the first multiplier slot.

So the per-element work is still a single fused operation, and only the
shared partial sum is extra.

## 3. The floating-point sequencer

**Issue.** `fps_ctrl` reads one instruction per clock from its instruction
memory and issues it in program order to the arithmetic unit. An instruction
waits while any of the following holds:

- **Register hazard.** A register it reads or writes is still awaiting a
  result. A 256-bit scoreboard sets a register's bit at issue and clears it at
  write-back. This covers read-after-write and write-after-write. An
  instruction that needs a result issues on the clock after its write-back,
  when the register file holds the value.
- **Busy unit.** The divider or square-root unit is occupied (each works on
  one operation at a time), or DOT4 is draining for a reconfiguration.
- **Semaphore.** The instruction waits on a semaphore that is empty, or it
  signals one while results are outstanding (section 4).

Independent instructions therefore overlap freely. A divide can run for 57
clocks while dozens of DOT4 operations go through, and results retire out of
order on three write-back ports (DOT4, FDIV, FSQRT). `HALT` waits for the
scoreboard to empty before it raises `halted`.

**Register file.** 256 x 64 bits, asynchronous reads, written on the clock
edge.

- Read ports: nine. Eight serve the operands of the issuing instruction, and
  one serves the local load/store sequencer.
- Write ports: four. Three are the arithmetic write-backs and one is the
  local load/store sequencer.
- If two ports write the same register in one clock, the higher-numbered
  port wins. The scoreboard makes this impossible for arithmetic results.

**Divider and square root.** Both are restoring, one-bit-per-clock designs.

- They produce 55 result bits: 53 significand bits, a guard bit and a spare
  bit for normalisation.
- The final remainder supplies the sticky bit.
- A result is ready 57 clocks after `start`.

`FSQRT` has a sign option (`sub[0]`) that returns `−copysign(√x, s)`.
Householder needs `α = −sign(x_1)·‖x‖`, and the option produces it in one
instruction.

## 4. Three programs, four semaphores

The hardest part of using the PE is ordering its three instruction streams.
Every instruction of every sequencer carries the same 6-bit `sync` field:

| field | meaning |
|---|---|
| `wait_en`, `wait_sem[1:0]` | do not start until semaphore `wait_sem` is non-zero; take one count when starting |
| `sig_en`, `sig_sem[1:0]` | do not start until everything earlier in this sequencer has finished; then add one count to `sig_sem` |

A signal is given when its instruction *starts*, after the instructions
before it have finished. So "signal when this load is complete" is written
as a `NOP` carrying `sig_en` after the load. In the FPS, "finished" means the
scoreboard is empty.

The semaphores are 8-bit counters that are cleared at `start`. When a
sequencer takes from an empty semaphore, an assertion fires. The numbering
used by the programs in this repository is:

| # | name | given by → taken by | meaning |
|---|---|---|---|
| 0 | `SEM_G2L` | global LS → local LS | data has arrived in LM |
| 1 | `SEM_L2F` | local LS → FPS | operands are in registers |
| 2 | `SEM_F2L` | FPS → local LS | results are in registers |
| 3 | `SEM_L2G` | local LS → global LS | results are in LM |

A single-block factorization then looks like this:

```
global LS:  LOAD GM→LM ; NOP sig G2L ; STORE LM→GM wait L2G ; HALT
local LS:   LM2RF wait G2L ; LM2RF ; NOP sig L2F ;
            RF2LM wait F2L ; ... ; NOP sig L2G ; HALT
FPS:        NOP wait L2F ; <QR> ; NOP sig F2L ; HALT
```

Because the semaphores count, a producer may run several blocks ahead of its
consumer (up to 255). That is what lets the loads of the next block overlap
the computation of the current one.

## 5. The Load-Store CFU

**Global sequencer (`gls_ctrl`).**

- `LOAD gm, lm, len` issues read requests to GM on a valid/ready channel, as
  fast as GM accepts them, without waiting for responses.
- Responses come back in order on a response channel that the PE always
  accepts. Each response is written to LM port A as it arrives, so a load
  streams one word per clock.
- `STORE lm, gm, len` reads LM (synchronous, one clock) and then writes GM,
  for one word every two clocks.

**Local sequencer (`lls_ctrl`).**

- `LM2RF lm, rf, len` reads LM port B and writes the register the next
  clock. It moves one word per clock and takes `len + 1` clocks in all.
- `RF2LM rf, lm, len` reads a register and writes LM in the same clock, at
  one word per clock.

**Local memory.** 4096 words of 64 bits, with two independent synchronous
ports. The two sequencers never contend for it.

**Programs.** All three instruction memories are 1024 deep. They are loaded
through one port of the top (`imem_sel` picks the memory) before `start`.

## 6. Instruction formats

All formats are packed structs in `pe_pkg`. The MSB is listed first.

| sequencer | fields | bits |
|---|---|---|
| FPS | `op[2:0] mht sub[2:0] rd[7:0] rs[7..0][7:0] sync[5:0]` | 85 |
| global LS | `op[1:0] gm_addr[31:0] lm_addr[15:0] len[15:0] sync[5:0]` | 72 |
| local LS | `op[1:0] lm_addr[15:0] rf_addr[7:0] len[8:0] sync[5:0]` | 41 |

The opcodes are:

- FPS: `NOP 0`, `DOT4 1`, `FDIV 2` (`rd = rs0/rs1`), `FSQRT 3`, `HALT 7`.
- Global LS: `NOP 0`, `LOAD 1`, `STORE 2`, `HALT 3`.
- Local LS: `NOP 0`, `LM2RF 1`, `RF2LM 2`, `HALT 3`.

The load port of the top is 85 bits wide. Narrower instructions sit in its
low bits.

## 7. Floating-point conventions

All arithmetic is IEEE-754 binary64 with round-to-nearest-even.

- Subnormal inputs and results are flushed to a zero of the same sign.
- Every invalid operation returns the quiet NaN `7FF8_0000_0000_0000`
  (the square-root sign option may flip its sign bit).
- Infinities and signed zeros follow the standard.

Each operator rounds once. Inside DOT4 every product and every sum is rounded
separately, so a DOT4 result equals the same sequence of scalar operations in
any IEEE double arithmetic (without fused multiply-add), in the order shown
in section 2. The testbenches rely on this to compare bit for bit.

## 8. Running QR on the PE

The end-to-end testbench (`tb/tb_pe_top.sv`) generates the programs for an
`M x N` matrix. It keeps the matrix column-major in two register buffers
(ping-pong, one per step) and uses `r0 = 0`, `r1 = 1`, `r2 = 2`. For each
column `k`:

1. `‖x‖²` with chained DOT4 inner products.
2. `α = −sign(x_1)‖x‖` with one `FSQRT` using the sign option.
3. `u_1 = x_1 − α` with one DOT4 (`sub = 001`), then `‖u‖` and
   `v = u/‖u‖` (FDIV, one per element), then `2v`.
4. Every trailing element is updated by one MHT operation, preceded by a
   partial sum for columns longer than 3.

These are the measured run times, including all GM traffic (GM latency 4
clocks, ready withheld at random one clock in four):

| matrix | clocks | MHT operations |
|---|---|---|
| 3x3 | 659 | 13 |
| 4x4 | 1116 | 29 |
| 5x3 | 1292 | 26 |
| 8x8 | 3975 | 203 |

Square roots and divides dominate these small sizes. Each reflection needs
two square roots, and `L` divides running one at a time. Larger matrices
spend proportionally more time in the MHT stream.

**Streaming a column at a time.** The register buffers above limit
`tb_pe_top` to small matrices. `tb/tb_pe_qr_stream.sv` shows how a matrix
larger than the register file is factorized. The matrix stays in LM for the
whole factorization, and the register file holds only a working set:

- two input column slots, one output slot, `v` and `2v` (`5L` words for the
  `L` rows still active);
- three constants and four scalars of the current reflection;
- a rotating pool of temporaries.

If `2v` does not fit (more than 47 active rows), the MHT is given `v_i` as
its multiplier. The sum it multiplies is doubled instead: the partial sum is
taken times 2, and only the last two elements of `2v` are kept. Doubling is
exact, so the result is the same. This lets a 60x60 matrix run.

Each reflection `k` is cut into column jobs `(k,k), (k,k+1), ... (k,N−1)`.
The jobs are pipelined across the two halves of the PE:

- The local LS sequencer loads column `j+1` into the free input slot while
  the FPS works on column `j`.
- It then waits for F2L, stores the output slot back over column `j` in LM,
  and signals L2F for column `j+1`.
- The FPS waits for L2F. For the pivot column it forms `‖x‖`, `α`, `u`,
  `1/‖u‖` (one divide) and `v` (DOT4 multiplications). For the other
  columns it forms `vᵀa` partial sums and the MHT updates. Then it signals
  F2L.

A straight-line program for one reflection of a 40x40 matrix is over 2000
FPS instructions, which is more than the 1024-entry instruction memory
holds. The host therefore cuts the work into phases of at most about 1000
FPS instructions. It loads three new programs for each phase and pulses
`start`. Registers and LM keep their contents between phases, so `v` and
`2v` carry over from one phase to the next. Only the last phase moves the
result to GM. Measured times, excluding program loading:

| matrix | phases | FPS instructions | clocks |
|---|---|---|---|
| 7x5 | 5 | 225 | 1622 |
| 20x20 | 19 | 4759 | 17516 |
| 40x40 | 59 | 33014 | 99184 |
| 60x60 | 147 | 105422 | 299895 |

The whole run performs 98 902 MHT operations, all four sizes together.
Every result matches the model bit for bit.

**What fits.** Capacity at the default sizes:

- A matrix must sit in the 4096-word LM, next to the three constants.
  Square matrices up to 63x63 fit.
- The column-streaming layout needs at least `4L + 12` registers plus
  temporaries. It works up to about 61 rows, so every matrix that fits in
  LM also fits the register layout.
- Matrices from 80x80 to 120x120 on one PE do not fit in LM. They would have
  to be streamed from GM in column panels by the programs. The hardware
  allows this, but no test runs it.

## 9. Verification and simulation

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul` | 20 000 random operand pairs against the simulator's doubles (bit-exact), exact halfway cases, specials |
| `tb_fp_div`, `tb_fp_sqrt` | 6 000 random cases each, specials, the 57-clock latency |
| `tb_dot4` | both configurations against a scalar model, latencies 3 and 5, order, reconfiguration count |
| `tb_fp_arith_unit` | all three units, latencies, refusals while busy, the square-root sign option |
| `tb_reg_file`, `tb_instr_mem`, `tb_local_mem` | random reads and writes against array models |
| `tb_fps_ctrl` | in-order issue, no issue over a pending register, semaphore wait and signal, halt timing, all stall kinds |
| `tb_fps` | a random program of dependent DOT4/FDIV/FSQRT operations against a program-order model |
| `tb_gls_ctrl`, `tb_lls_ctrl`, `tb_ls_cfu` | block moves with GM back-pressure, semaphore ordering, throughput |
| `tb_pe_qr_stream` | 7x5, 20x20, 40x40 and 60x60 QR streamed one column at a time through reloaded program phases (section 8); bit-exact against the model, norms preserved, zeros below the diagonal |
| `tb_pe_top` | complete QR factorizations at default parameters (section 8); the result must match the model bit for bit, preserve column norms and have zeros below the diagonal; every mechanism (hazard stall, busy stall, semaphore wait, reconfiguration, MHT, GM back-pressure) must occur |

`tb/gm_model.sv` is a behavioural global memory with configurable latency
and random back-pressure. `tb/tb_util_pkg.sv` holds random-double helpers.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/pe_pkg.sv tb/tb_util_pkg.sv tb/tb_pe_top.sv --top-module tb_pe_top -o sim
./obj_dir/sim
```

Replace `tb_pe_top` with any other testbench name. The full QR test takes a
few seconds.

## 10. Where this design departs from, or goes beyond, its source

**Taken from the source description:**

- the split of the PE into a floating-point sequencer and a Load-Store CFU;
- three instruction memories, each with its own decoder;
- the local memory, and the 256-register register file;
- the DOT4, FDIV and FSQRT units;
- the five-step operation;
- the four-multiplier, three-adder DOT4 with its inner-product and MHT
  configurations.

**This design's own choices**, because the source gives no detail:

- all instruction encodings, the opcode set and the `sync` field;
- the semaphore mechanism that orders the three sequencers;
- the scoreboarded in-order issue logic;
- the DOT4 pipeline depth, the drain-before-reconfigure rule, and passing
  `2v_i` as an operand;
- restoring division and square root with 57-clock latency;
- flush-to-zero for subnormals;
- the register-file port counts;
- the LM size (4096 words) and the instruction-memory depths (1024);
- the GM request/response protocol and the STORE rate;
- the square-root sign option.

**Departures worth knowing.**

- The source draws the divider and square-root units as multi-stage
  blocks, but gives no stage counts. Here they are iterative and accept a
  new operation only every 57 clocks. A pipelined divider would raise the
  throughput of the `v = u/‖u‖` step but changes nothing else.
- The test programs form `v = u/‖u‖` with `u = x − αe₁`. The source forms
  `v_1 = (a_11 − α)/(2r)`, `v_i = a_i1/(2r)` with
  `r = √(½(α² − a_11·α))`. These are the same vector, because
  `‖u‖ = 2r`.
- The source's formula for `α` takes the sign of `a_21`. This design uses
  the sign of `a_11`, the element that is kept. That is the usual choice,
  and it avoids cancellation in `a_11 − α`.

**Not built.**

- **The multi-tile system**: the network-on-chip routers, the tile arbiters,
  the memory tiles that form the shared global memory, and the K x K tile
  arrays. Parallel QR across tiles therefore cannot be run. A PE's GM port is
  where a router would attach.
- **Blocked (panel) QR.** The tests use only the unblocked form, which is the
  one the fused MHT operation targets.

**Performance.** The source reports performance figures (for example the
fraction of peak reached) that depend on its own latencies and compiler.
This RTL is not tuned to reproduce them.
