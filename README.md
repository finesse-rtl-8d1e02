# A programmable multi-core Fp engine for pairing-based cryptography

Bilinear pairings on elliptic curves (BN, BLS12 and BLS24 families) take
tens of thousands of arithmetic operations in the base prime field Fp.
Almost all of them are modular multiplications, additions and subtractions
on numbers a few hundred bits wide. This accelerator does not wire the
pairing algorithm into hardware. Instead it runs a *straight-line program*
of Fp instructions, produced by a compiler that has already expanded the
pairing down to Fp operations and scheduled them. The hardware is then
small and regular:

* a register bank of 256-bit field elements per core,
* one fully pipelined Montgomery multiplier (the *Long* unit, 38 cycles),
* pipelined adders and linear units (the *Short* units, 8 cycles),
* one slow iterative inverter, used once per pairing,
* in-order single issue with no data-dependent timing.

A pairing always takes the same number of cycles, and every core runs the
same program. So one instruction memory and one issue unit can drive
several cores that each work on their own data: eight pairings at once
with the default `NCORES = 8`.

The RTL is written for the BN254N curve, with a 254-bit p and
u = -(2^62 + 2^55 + 1). Operands are held in Montgomery form with
R = 2^256.

## Machine organisation

```
              host port (h_req/h_we/h_addr/h_wdata -> h_rvalid/h_rdata)
                                   |
                               host_if  ---- CSRs: CTRL START END STATUS counters
                    +--------------+-------------------+
                    |                                  |
        imem (mem_tiled 32 x 64K)            register-bank host access
                    |                                  |
                 ifetch  -- iss_valid/iss_instr --+----+-----+-- ... --+
     (queue, scoreboard, write-port               |          |         |
      reservations, minv-busy)                  core 0     core 1  .. core 7
                                                  |
                               dfetch -> dmem (2R1W) -> alu -> dfetch -> dmem
                                                     mmul | madd | mlin | minv
```

| Module | Role |
|---|---|
| `finesse_top` | Host interface, instruction memory, issue unit, `NCORES` cores. |
| `host_if` | Memory-mapped host port: CSRs, instruction-memory writes, register-bank access. |
| `ifetch` | Fetches the program and issues one instruction per cycle at most, to all cores. |
| `core` | `dfetch` + `dmem` + `alu`. |
| `dfetch` | Reads the source registers and builds the ALU operation. Returns results to the bank. |
| `dmem` | 256 x 256-bit register bank with two reads and one write per cycle. |
| `alu` | `mmul`, `madd`, `mlin` and `minv`, merged into one result stream. |
| `mmul` | Montgomery multiplier. Three `karatsuba_mul` units and a final adder. |
| `karatsuba_mul` | Three-level pipelined Karatsuba multiplier over `wallace_mul` leaves. |
| `wallace_mul` | 34 x 34-bit multiplier from 16 x 16 `base_unit`s and a carry-save tree. |
| `madd`, `mlin` | Modular add/subtract; negate, double and triple. |
| `minv` | Fixed-latency binary (Kaliski) Montgomery inverse. |
| `mem_tiled`, `mem_block` | Large memories tiled from small 1R1W blocks, registered on both sides. |
| `pipe_delay` | Register delay line used to pad latencies and carry tags. |
| `finesse_pkg` | Instruction format, opcodes, latencies and curve constants. |

## Instruction set

Every instruction is a 32-bit word:

| Bits | 31:24 | 23:16 | 15:8 | 7:0 |
|---|---|---|---|---|
| Field | opcode | dst | src1 | src2 |

All operands are registers of the core's own bank.

| Code | Op | Result | Unit | Latency |
|---|---|---|---|---|
| 00 | NOP | none (dropped at operand fetch) | none | none |
| 01 | NEG | -a | mlin | Short |
| 02 | DBL | 2a | mlin | Short |
| 03 | TPL | 3a | mlin | Short |
| 04 | ADD | a + b | madd | Short |
| 05 | SUB | a - b | madd | Short |
| 06 | SQR | a·a·R^-1 | mmul | Long |
| 07 | MUL | a·b·R^-1 | mmul | Long |
| 08 | CVT | a·R (into Montgomery form, a·R2·R^-1) | mmul | Long |
| 09 | ICV | a·R^-1 (out of Montgomery form, a·1·R^-1) | mmul | Long |
| 0a | INV | a^-1 in Montgomery form | minv | 514 |

Here a = [src1] and b = [src2]. All values are mod p.

The field layout and the codes 02, 04, 06, 07 and 0a come from
assembled program words of the original framework. The other codes fill
the gaps in the order the operations are usually listed, so they are an
assumption. A program that came from the original compiler would need its
opcodes remapped if they differ.

## Issue, hazards and timing

This is the part that most needs care when writing programs or changing
latencies. For an instruction that `ifetch` decides to issue in cycle *d*:

| Cycle | Event |
|---|---|
| d | Issue decision at the head of the fetch queue. |
| d+1 | `iss_valid`/`iss_instr` reach every core. `dfetch` sends src1/src2 to the bank. |
| d+4 | The operands, after a 3-cycle bank read, enter the ALU with the opcode and dst. |
| d+4+LAT | The result is written to the bank. LAT is 38 (Long), 8 (Short) or 514 (INV). |

There is no bypass network. An instruction that reads or overwrites the
result therefore cannot be decided before cycle d+LAT+4. The first read
sees the written value because a write is visible to reads requested one
cycle later.

`ifetch` holds the queue head, and so all later instructions, in three
cases:

1. **Dependence.** A source or the destination still has a result in
   flight. Each register has a countdown, set to LAT+3 at issue; the head
   may go when all of its registers are at zero.
2. **Write-port conflict.** Each bank has a single write port. A Short
   instruction issued 30 cycles after a Long one (38 - 8) would write back
   in the same cycle. A shift register of reserved write-back cycles
   catches this, and the later instruction waits one cycle. This is the
   conflict the compiler's *issue-slot affinity* scheduling tries to avoid.
   The hardware also checks it, so any instruction order runs correctly
   and a poorly scheduled order only runs slower.
3. **Inverter busy.** `minv` is not pipelined, so a second INV waits until
   the first has finished.

No instruction's timing depends on the data, so the hazards are the same
in every core. They are resolved once in `ifetch`, and the cores need no
handshake. The ALU asserts that two results never fall in the same cycle
and that no INV arrives while `minv` is busy.

Fetching reads the instruction memory (3-cycle latency) ahead into an
8-entry queue. Reads stop when the queue plus the reads in flight could
overflow it. A run covers addresses [START, END). `done` rises after the
last write-back and stays high until the next start. Counters report
cycles, issued instructions and the stall cycles of each kind.

## The Montgomery multiplier

`mmul` computes y = a·b·R^-1 mod p for a, b < p in these steps:

| Step | Computation | Unit | Cycles |
|---|---|---|---|
| | input register | | 1 |
| 1 | T = a·b | `karatsuba_mul` | 11 |
| 2 | m = (T mod R)·(-p^-1 mod R) mod R | `karatsuba_mul` | 11 |
| 3 | U = m·p | `karatsuba_mul` | 11 |
| 4 | t = (T + U)/R, then y = t - p if t >= p | adder | 2 |

That is 36 cycles. A 2-cycle output delay brings the total to the Long
latency of 38. T travels in a delay line beside steps 2 and 3. Because
4p < R, one conditional subtraction is enough. A new multiplication can
start every cycle.

Each `karatsuba_mul` applies Karatsuba three times. One level works like
this:

* Split a = a1·2^LO + a0 and b the same way.
* Form z0 = a0·b0, z2 = a1·b1 and z1 = (a0+a1)(b0+b1) - z0 - z2.
* Use three sub-multipliers of width LO+1.

The widths run 256 → 129 → 66 → 34 bits. At 34 bits, a `wallace_mul`
multiplies 3 x 3 limbs of 16 bits with 16 x 16 `base_unit`s and reduces
the partial products with a tree of 3:2 carry-save adders.

| Stage | Cycles |
|---|---|
| operand sums (pre) | 1 |
| sub-multiplier | 2, 5 or 8 |
| recombination (acc) | 2 |
| Wallace tree, including its final add | 2 |

This gives 2 → 5 → 8 → 11 cycles. `base_unit` is a plain `*` so that
synthesis can map it to a DSP block or a multiplier cell.

## The inverter

`minv` takes x = a·R and returns a^-1·R (0 for 0). It runs in two phases
and always takes 2·256 steps:

1. Kaliski's binary algorithm halves u or v each step until v = 0. This
   takes k steps and leaves -r = x^-1·2^k.
2. The remaining 512 - k steps double r mod p.

A final negation gives x^-1·2^512 = a^-1·R. The latency is 514 cycles from
`in_valid` to `out_valid`. It does not depend on the data, so the whole
pairing keeps its constant run time.

## Memories

`mem_tiled` builds a WIDTH x DEPTH memory out of `mem_block`s. The
blocks are 1R1W with synchronous read, standing in for BRAM or SRAM
macros. Columns of blocks make up the width and rows make up the depth.
Requests are registered before the blocks and the read word after the row
multiplexer. This gives a fixed 3-cycle read, and no long wire shares a
cycle with the block access.

| Memory | Built from | Blocks |
|---|---|---|
| Instruction memory | 32 x 4096 blocks | 16 blocks, 64K words |
| Register bank (`dmem`) | 64 x 256 blocks | 4 blocks per copy |

`dmem` keeps two copies that are written together, one for each read
port. The host can reach a bank only while the accelerator is idle
(`host_mode`).

## Host programming model

Addresses are word addresses on a simple request port. A read request
returns `h_rvalid`/`h_rdata` exactly 3 cycles later in every region.

| `addr[31:28]` | Target |
|---|---|
| 0 | CSR `addr[3:0]`. |
| 1 | Instruction memory word `addr[15:0]`. Write only. |
| 2 | Register `addr[7:0]` of core `addr[23:16]`. 256-bit data. |

| CSR | Name | Meaning |
|---|---|---|
| 0 | CTRL | Write 1 to start. |
| 1 | START | First instruction address. |
| 2 | END | One past the last instruction address. |
| 3 | STATUS | Bit 0 = busy, bit 1 = done. |
| 4 to 8 | counters | Cycles, issued instructions, dependence stalls, write-port stalls, inverter stalls. |

A register-bank access while busy is dropped: a write is ignored and a
read returns 0.

A typical run:

1. Write the program.
2. Write the inputs into each core's registers, in normal form.
3. Use CVT in the program to enter Montgomery form.
4. Write START and END, then CTRL = 1.
5. Wait for `done`.
6. Read the results back. The program should end with ICV.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NCORES` | 8 | `finesse_top` | Cores sharing one program. |
| `LONG_LAT` | 38 | top, core, alu, ifetch, mmul | Multiplier latency; must be >= 36. |
| `SHORT_LAT` | 8 | top, core, alu, ifetch, madd, mlin | Add/linear latency; must be >= 2. |
| `IMEM_DEPTH` | 65536 | `finesse_top` | Instruction words. |
| `DW`, `RAW`, `RD_LAT` | 256, 8, 3 | `finesse_pkg` | Word width, register-field width, bank read latency. |
| `P_MOD`, `P_INV`, `R2_MOD` | BN254N | `finesse_pkg` | p, -p^-1 mod 2^256, 2^512 mod p. |
| `W`, `LEVELS` | 16, 3 | karatsuba, wallace, base_unit | Base multiplier width, Karatsuba depth. |

Changing the curve means new constants in `finesse_pkg`. A p above 254
bits also needs a larger `DW` with 4p < 2^DW, and a new Karatsuba split
(`karatsuba_mul` works for any N). The issue logic reads the latencies
from the parameters, so other Long/Short pairs work as long as the
instruction stream is rescheduled for them.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
independent reference arithmetic. The reference is in `tb/tb_ref_pkg.sv`:
wide-integer modular multiplication, powers and Montgomery helpers.
Each testbench ends with `TB_RESULT checks=N failures=M`. Latencies
are checked cycle-exactly:

* 38 for `mmul`,
* 8 for `madd` and `mlin`,
* 514 for `minv`,
* 3 for the memories,
* the full issue timing of `ifetch` against a reference model of the rules
  above.

`tb_finesse_top` drives the whole accelerator at its default size,
8 cores and 64K instructions, through the host port only:

* It loads a 249-instruction program that uses every opcode, two INVs, a
  dependence chain and a forced Long/Short write-port collision.
* It fills all 256 registers of every core with different random field
  elements, 16 of which are the program's inputs, and runs the program.
* It checks every register the program uses, in every core, against a
  reference interpreter: 979 checks in all.
* It reads the stall counters and counts a failure for any mechanism that
  never occurred: dependence stall, write-port stall, inverter stall, each
  opcode, refused host write, per-core results.

A typical result is 2153 cycles with 1341 dependence, 5 write-port and
511 inverter stall cycles.

To run a testbench with Verilator (from the directory that holds `rtl/`
and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/finesse_pkg.sv tb/tb_ref_pkg.sv tb/tb_finesse_top.sv \
  --top-module tb_finesse_top -Mdir obj_top -j 8
obj_top/Vtb_finesse_top
```

Use the same command with another `tb_<module>` for a single block. The
full top takes a few minutes and about 1 GB to compile, and seconds to run.

## Departures from the original design and open points

* **Compiled programs.** No program from the original compiler is
  available. The full BN254N pairing, 55.3k instructions, has not been run.
  It fits the 64K instruction memory and the 256-bit datapath, but its
  opcode numbering and register count are not known. The end-to-end test
  uses generated programs instead.
* **Hardware checks.** The original design leaves hazard avoidance to the
  compiler. Here the hardware checks dependences and write-port conflicts
  and stalls. A correctly scheduled program should see no stalls, and an
  unscheduled one still computes correctly.
* **No write-back FIFO.** There is no write-back FIFO and no VLIW issue.
  This is the single-issue model without the FIFO.
* **Algorithms chosen here.** The algorithms inside `minv`, the Montgomery
  equations and the placement of the 2 spare Long cycles are this
  design's choices. The source gives the unit structure and the cycle
  counts.
* **Unspecified parts.** Operand choices for SQR, CVT and ICV, the split
  of operations between `madd` and `mlin`, 2R1W by replication, and the
  whole host interface are this design's choices.
* **One curve.** Only BN254N fits the defaults. BN462, BN638, BLS12-381,
  BLS12-446, BLS12-638 and BLS24-509 need a wider datapath and new
  constants. Their programs, 74k to 271k instructions, also exceed 64K
  words.
* **Curve constants and width.** The source design makes the curve
  constants and the data width parameters of the hardware. Here they are
  constants of `finesse_pkg`, so a change of curve is an edit of one file
  rather than a parameter override.
* **Memory macros.** SRAM/BRAM macros are modelled as arrays
  (`mem_block`). Replace it with the target's macro wrapper for
  implementation.

## Known lint messages

Each of these is explained in the opening comment of the file concerned:

* Verilator reports a few unused bits:
  * the upper half of m·(-p^-1) and the lower half of T + U in `mmul`,
  * the carry-save sum's spare top bits in `wallace_mul`,
  * `h_addr[27:24]` in `host_if`,
  * the inverter-busy flags of cores 1 to 7 in `finesse_top`.
* `rst_n` is flagged as used both synchronously and asynchronously,
  because it also disables the assertions.
* A false combinational loop is reported through the level-indexed row
  array of `wallace_mul`.
* When `karatsuba_mul` is linted on its own, its sub-product wires are
  reported as undriven. This comes from the module instantiating itself;
  they are driven by the sub-multipliers.
