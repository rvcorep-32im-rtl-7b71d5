# RVCoreP-32IM: a five-stage RV32IM soft core with a fork-join execute stage

A five-stage in-order RISC-V pipeline is simple as long as every stage takes one
cycle. Multiplication and division do not fit in one cycle at a good FPGA clock
rate. A common answer, used by VexRiscv for example, is to put the multiplier and
divider in stages of their own alongside the pipeline. This core does something
else: the **execute stage itself becomes a multi-cycle stage**. Execute *forks*
into three paths:

* the single-cycle ALU, branch unit (BRU) and address unit (AGU);
* an iterative or DSP-based multiplier;
* an iterative non-restoring divider.

The paths *join* again at the memory stage. A multiply or divide holds fetch,
decode and execute with a stall signal until it finishes. Everything else goes
through execute in one cycle, as in a plain RV32I pipeline.

A second idea keeps the clock rate up. The forwarding network is kept narrow:

* The multiplier and divider outputs are never forwarded from the memory stage.
  An instruction that needs such a result right away waits one extra cycle and
  takes it from write back.
* Load data is never forwarded at all. A dependent instruction right after a
  load gets two bubbles.

This RTL implements the core in SystemVerilog, with both multiplier options,
and a small evaluation system around it: instruction and data memory, an RS-232C
serial port and a cycle timer on a local bus.

## Contents

| File | Role |
|---|---|
| `rtl/rv_pkg.sv` | opcodes, ALU operations, decoded-instruction and prediction structs |
| `rtl/rvcorep32im_core.sv` | the pipeline |
| `rtl/fetch.sv`, `rtl/gshare_bp.sv` | pc register, gshare predictor and BTB |
| `rtl/decoder.sv`, `rtl/regfile.sv`, `rtl/hazard_unit.sv` | decode stage |
| `rtl/alu.sv`, `rtl/bru.sv`, `rtl/agu.sv` | single-cycle execute path |
| `rtl/mul_unit.sv`, `rtl/mul_dsp.sv`, `rtl/mul_radix4.sv` | multiplier and its two implementations |
| `rtl/div_unit.sv` | divider |
| `rtl/fork_join_control.sv` | produces the memory-stage valid bit (the join) |
| `rtl/data_aligner.sv` | load byte/halfword extraction and extension |
| `rtl/imem.sv`, `rtl/dmem.sv`, `rtl/local_bus.sv`, `rtl/timer.sv` | evaluation system |
| `rtl/uart.sv`, `rtl/uart_tx.sv`, `rtl/uart_rx.sv` | RS-232C serial device (transmitter and receiver) |
| `rtl/rvcorep32im_soc.sv` | top level: core plus evaluation system |
| `tb/` | one self-checking testbench per module, plus a reference model and program generator |
| `tb/dhrystone_*.hex` | Dhrystone 2.2 program images, RV32IM and RV32I builds |

## The fork and the join

Two signals govern execute: a *valid* bit that travels forward and a *stall*
bit that travels backward.

**Fork.** Decode marks each instruction with `mul_op` (MUL, MULH, MULHSU,
MULHU) or `div_op` (DIV, DIVU, REM, REMU). These bits sit in the ID/EX register
and drive the units' `valid_in`. In the first execute cycle of such an
instruction, the unit captures the operands *after* the forwarding
multiplexers, so it sees the same values the ALU would have seen. From the next
cycle on, its `stall_out` (`mul_stall` / `div_stall`) is high. While either is
high:

* fetch and decode hold their instructions;
* the ID/EX register takes a bubble;
* the EX/MEM register takes no ALU result.

**Join.** `fork_join_control` computes the registered `ex_valid` that enters
the memory stage:

* For an ALU/branch/load/store instruction, `ex_valid` is simply
  `id_valid & ~mul_op & ~div_op`, one cycle later.
* For a multiply or divide, `ex_valid` stays low in the cycle after issue. It
  goes high one cycle after the unit's `valid_out`, together with a flag
  `ex_from_md` saying that the result lives in the unit's own output register.

The memory stage then picks the result from the unit's output registers:
`product_L`, `product_H`, `quotient` or `reminder`. These registers keep their
value until the next operation starts, so they act as the multiply/divide half
of the EX/MEM register.

The timing at the edge of the stall matters and is easy to get wrong. Take the
DSP multiplier: `valid_in` in cycle *t*, `stall_out` high in *t+1*, `valid_out`
in *t+1*, and the product in its register at the end of *t+1*. So the MUL
spends two cycles in execute and freezes the front end for one. The radix-4
multiplier spends 18 cycles in execute (17 stall cycles). A division spends 34
or 35 (33 or 34 stall cycles), or 3 when one operand is zero.

The `valid_in` of both units is gated by a pending branch redirect. A multiply
or divide on the wrong path therefore never starts.

### The multiply example, cycle by cycle

The following sequence uses the DSP multiplier:

```
MUL x7, x5, x6
AND x8, x7, x4
SUB x9, x1, x2
```

It runs as follows (one column per cycle; `s` = held by a stall):

```
            1  2  3  4  5  6  7  8  9
MUL x7      F  D  E  E  M  W
AND x8,x7      F  D  s  s  E  M  W
SUB x9            F  s  s  D  E  M  W
```

Cycle 4 is the multiplier's stall cycle. Cycle 5 is the extra cycle that AND
waits because x7 is not forwarded from the memory stage. In cycle 6, AND picks
x7 up from write back. Had AND not used x7, it would have entered execute in
cycle 5. The core testbench measures these retirement gaps directly. MUL retires
*lat* cycles after the instruction before it (2 for DSP, 18 for radix-4). A
dependent instruction retires 2 cycles after the MUL, an independent one 1
cycle after.

## Hazards and forwarding

`hazard_unit` is purely combinational. It compares the decode-stage source
registers with the destinations further down the pipe.

| Producer in front of the consumer | Source of the value | Consumer waits |
|---|---|---|
| ALU instruction in M | memory-stage forward (`fwd = 1`) | 0 |
| ALU / MUL / DIV instruction in W | write-back forward (`fwd = 2`) | 0 |
| MUL or DIV just issued (in E) | write back, one cycle later | 1 extra cycle after the unit finishes |
| load in E | register file (write-through), two cycles later | 2 |
| load in M | register file, one cycle later | 1 |

In short:

* Forward-M covers the instruction right behind an ALU instruction.
* Forward-W covers the instruction two behind, except when the producer is a
  load.
* The register file is write-through: a read in the same cycle as the write
  returns the new value. This closes the gap left by the missing load
  forwarding.

A multiply/divide leaves its destination in a small bookkeeping register
(`md_rd`, `md_busy`) for as long as it is in execute. That way the extra
dependency cycle is also applied when the consumer has been waiting in decode
for the whole of a long division.

## The multiplier

`mul_unit` has a fixed interface: `valid_in`, `funct3`, `rs1`, `rs2`,
`stall_out`, `valid_out`, `product_L`, `product_H`. It derives the operand
signedness from `funct3` and instantiates one of two implementations, chosen
by the `MUL_TYPE` parameter. The core's memory stage selects `product_L` for
MUL and `product_H` for the three high-half forms.

**DSP (`MUL_DSP`, default).** Two registers hold the operands, sign- or
zero-extended to 33 bits. The next cycle multiplies them as signed 33x33 bits
into the 64-bit partial-product register PP. The registers in front of the
multiplier are there for the clock rate: they cut the path from the forwarding
multiplexers to the multiplier. FPGA tools map the `*` onto DSP blocks.

**Radix-4 Booth (`MUL_RADIX4`).**

* The multiplicand register holds rs1, extended to 33 bits.
* The low half of PP is loaded with rs2.
* Each of 16 cycles looks at PP[1:0] and the bit shifted out last. It adds 0,
  ±multiplicand or ±2·multiplicand to the upper half, then shifts PP right by
  two.
* One more cycle does the sign correction. It adds the multiplicand into the
  upper half when rs2 is unsigned with its top bit set, because the Booth
  recoding read it as negative.
* The correction cycle is always spent, so the latency is a constant 18 cycles
  in execute.
* The upper accumulator has four guard bits above PP[63:32] to hold the
  intermediate Booth sums.

## The divider

`div_unit` is a radix-2 non-restoring divider with the same valid/stall
handshake.

1. On `valid_in` it loads the magnitudes of dividend and divisor. It remembers
   the signs that quotient and remainder must take.
2. It runs 32 iterations. Each shifts one dividend bit into the partial
   remainder and adds or subtracts the divisor, depending on the sign of the
   partial remainder. Each produces one quotient bit.
3. A negative final remainder is corrected by adding the divisor back. This
   is done combinationally when the result is written out.
4. A sign step is spent only when a result must be negated. It takes the two's
   complement of quotient and/or remainder.

This is where the 33 versus 34 stall cycles come from.

A zero dividend or divisor skips the iterations. The stall lasts 2 cycles, and
the result follows the RISC-V rules: x/0 gives quotient all-ones and remainder
x; 0/y gives 0 and 0. Signed overflow (−2³¹ / −1) needs no special case: it
falls out of the magnitude arithmetic as quotient −2³¹, remainder 0. The
remainder output keeps the name `reminder`.

## Front end: fetch and branch prediction

`fetch` holds the pc and drives the instruction-memory address (`pc_next`)
combinationally. The memory is synchronous, so the instruction for `f_pc`
arrives one cycle after its address is presented.

`gshare_bp` is indexed with the same `pc_next`, so its prediction is ready in
the same cycle as the instruction.

* **PHT.** 8192 two-bit counters, indexed by pc[14:2] XOR a 13-bit global
  history.
* **BTB.** 512 direct-mapped entries with a tag and a jump/branch flag.
* **Prediction.** A BTB hit predicts taken for jumps, and for branches whose
  counter is 2 or 3.
* **Carried along.** The prediction travels down the pipe with the
  instruction: taken bit, target and the PHT index used.

Branches and jumps are resolved by the BRU in execute. It computes the taken
target `tkn_pc` and the sequential `seq_pc`. The comparison with the
prediction is registered into the memory stage. From there:

* fetch is redirected;
* the predictor is updated (counter, history, BTB);
* the three younger instructions (in fetch, decode and execute) are discarded;
* a store or a multiply/divide in execute is suppressed in that cycle.

A misprediction therefore costs three cycles.

A multiply or divide can have a stale BTB hit on its pc (for example after
self-modifying code). In that case the core also issues a redirect to pc+4 when
the unit finishes.

## The rest of the execute and memory stages

* **ALU.** Single-cycle, with a barrel shifter, so shifts always take one
  cycle.
* **AGU.** Computes rs1 + imm. For stores it places the data in the right byte
  lanes and produces byte strobes.
* **Data bus.** The request leaves in execute. The read word returns in the
  memory stage.
* **Data aligner.** Extracts the byte or halfword (by addr[1:0] / addr[1]) and
  sign- or zero-extends it.
* **Unsupported instructions.** Misaligned accesses are not trapped. FENCE,
  ECALL, EBREAK and CSR instructions retire as no-ops. No trap or CSR logic is
  present.

## The evaluation system

`rvcorep32im_soc` is the top level. It joins the core, a 64 KB instruction
memory, a 64 KB data memory, an RS-232C serial port and a timer through
`local_bus`.

| Data address | Device |
|---|---|
| bit 31 = 0 | data memory (byte-addressed, word-wide, byte strobes) |
| `0x8000_0000` | serial status/transmit: a write sends the low byte; a read returns bit 0 = transmitter busy, bit 1 = received byte waiting |
| `0x8000_0004` | serial receive data: a read returns the byte and clears the waiting flag |
| `0x8000_0010` / `0x8000_0014` | timer: low / high word of a 64-bit cycle counter |

The serial port sends and receives 8N1 frames, LSB first, with `CLKS_PER_BIT`
clocks per bit.

* The receiver synchronises `uart_rxd` with two flip-flops.
* It confirms the start bit half a bit time after the falling edge, then
  samples each bit in its middle.
* It keeps one byte. A frame with a bad stop bit is dropped. A byte not read
  in time is overwritten by the next.

Reading the receive register has a side effect, and that is safe here: the
core never sends a load on a mispredicted path to the bus. The instruction bus
always goes to the instruction memory.

Programs are loaded through a port at the top: `load_we`, `load_dmem`,
`load_addr`, `load_data`. It writes either memory while `rst` is held. After
reset, execution starts at address 0. The top also exposes `retire_valid` and
`retire_pc`, which pulse when an instruction leaves write back. The serial lines are
`uart_txd` and `uart_rxd`; tie `uart_rxd` high when nothing drives it.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `MUL_TYPE` | `MUL_DSP` | core, top | `MUL_DSP` (2-cycle) or `MUL_RADIX4` (18-cycle) multiplier |
| `ENABLE_M` | 1 | core, top | 0 builds an RV32I core: no multiplier or divider, M-extension encodings retire as no-ops |
| `PHT_ENTRIES` | 8192 | core, top | gshare counters (power of two) |
| `BTB_ENTRIES` | 512 | core, top | BTB entries (power of two) |
| `IMEM_BYTES`, `DMEM_BYTES` | 65536 | top | memory sizes; 4096 gives the small FPGA configuration |
| `CLKS_PER_BIT` | 1406 | top | serial bit time (115200 baud at 162 MHz) |
| `RESET_PC` | 0 | core, fetch | first fetch address |

Workloads such as Dhrystone, CoreMark and the Embench suite need the 64 KB
memories, which are the default. 4 KB instruction and data memories are
available through the size parameters.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The testbenches need
the two packages on the command line; everything else is found through `-y`:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/rv_pkg.sv tb/rv_tb_pkg.sv -y rtl -y tb \
    tb/tb_core.sv --top-module tb_core -Mdir obj_core -o sim
obj_core/sim
```

Replace `tb_core` with any testbench in `tb/`. `tb/rv_tb_pkg.sv` provides:

* a small RV32IM assembler (encoding functions);
* an instruction-set reference model;
* a random program generator. It produces loops, dependent chains, loads and
  stores, branches, and multiplies and divides with corner operands.

The main testbenches:

* **`tb_core`** runs two cores side by side, one with each multiplier, against
  the reference model. First it runs directed timing checks: the multiply
  example above, load-use, division, and independent versus dependent
  successors. Then it runs random programs and compares the final register file
  and the final data memory with the model. It counts each mechanism: load-use stall,
  multiply/divide dependency stall, multiplier stall, divider stall, redirect,
  forward-from-M, forward-from-W. A mechanism that never happens counts as a
  failure.
* **`tb_soc`** drives the top at its default parameters. It loads a random
  program plus a tail that reads the timer and prints through the serial port,
  polling the busy bit. It then waits for a byte that the testbench sends on
  the receive line. It decodes the serial line back into bytes and checks the
  registers, the memory, the printed text and the received byte against the
  reference model.

* **`tb_core_rv32i`** builds the core with `ENABLE_M = 0`. It checks that
  M-extension encodings pass through in one cycle each, with no stall and no
  register write. It also runs random programs against the reference model,
  set to the same rule.
* **`tb_workloads`** runs benchmark-style kernels on three SoCs side by
  side: one with each multiplier, and a third with the DSP multiplier and
  4 KB memories. The kernels are:
  * an 8x8 integer matrix product;
  * a bitwise CRC-32;
  * decimal conversion by DIVU/REMU, plus signed DIV/REM;
  * a 64-bit multiply-accumulate using all four multiply forms.

  It checks each result against the reference model and against values it
  computes itself. It also checks that the radix-4 core needs exactly 16 more
  cycles per multiply than the DSP core, and that the 4 KB SoC takes the same
  number of cycles as the 64 KB one. Typical cycle counts:

  | Kernel | Instructions | MUL | DIV/REM | Cycles, DSP | Cycles, radix-4 |
  |---|---|---|---|---|---|
  | matmult | 4827 | 512 | 0 | 6998 | 15190 |
  | crc32 | 3142 | 0 | 0 | 5223 | 5223 |
  | decimal | 597 | 0 | 210 | 7850 | 7850 |
  | mulacc | 526 | 192 | 0 | 1285 | 4357 |

  The division-heavy kernel shows why the divider's 33-34 stall cycles
  dominate wherever divisions occur. The matrix product shows the cost of the
  radix-4 multiplier's 17 stall cycles against one.
* **`tb_dhrystone`** runs Dhrystone 2.2 (its default 500 iterations) on three
  SoCs side by side. The first is RV32IM with the DSP multiplier and every
  parameter at its default. The second is RV32IM with the radix-4 multiplier.
  The third is RV32I (`ENABLE_M = 0`).
  * The images `tb/dhrystone_imem.hex` and `tb/dhrystone_dmem.hex` hold the
    RV32IM build. The `dhrystone_rv32i_*` pair holds the RV32I build.
  * Both were compiled with `gcc -O2` for bare metal, with no C library.
    String routines are plain byte loops. In the RV32I build, multiply and
    divide are shift-and-add and restoring-division subroutines.
  * Code sits in IMEM from address 0. Initialised data is in DMEM from
    0x4000. The stack grows down from the top of DMEM.
  * The timed loop reads the SoC timer.
  * At the end, a check routine compares every final value the benchmark
    specifies. It writes a wrong-value mask, the timed cycle count, the
    iteration count and a completion word to DMEM words 0x3ff0-0x3ffc.

  The testbench checks those words. It counts MUL and DIV/REM instructions
  among the retired instruction words and checks that the radix-4 core takes
  exactly 16 cycles more per multiply. It also checks that the RV32I core
  retires no M instruction. Results:

  | Configuration | Cycles per iteration | DMIPS/MHz | Speed-up over RV32I, same clock |
  |---|---|---|---|
  | RV32IM, DSP multiplier | 663 | 0.858 | 1.37 |
  | RV32IM, radix-4 multiplier | 679 | 0.838 | 1.34 |
  | RV32I | 909 | 0.626 | 1.00 |

  Both absolute figures are lower than the published ones (1.40, 1.25 and
  1.03 DMIPS/MHz). They depend heavily on the compiler and on the library
  string routines: here the string routines are byte loops, and the
  benchmark's functions are not inlined. The ratio of the DSP configuration
  to RV32I, 1.37, is close to the published 1.36. The radix-4 configuration
  comes out relatively better here because this build executes fewer
  multiplies: 0.17 % of instructions, against a published 0.58 %.

Block testbenches check their block against independently computed values,
including the stated cycle counts of the multiplier and the divider.

## Departures from the published design

* **Predictor.** The published core uses a pipelined (two-stage) gshare
  predictor, whose organisation is not described. Here the predictor has the
  published table sizes but predicts within the fetch cycle from
  synchronous-read tables. Counter, history and BTB formats are
  choices of this implementation.
* **Redirect point.** Redirects come from the memory stage, as the tkn_pc/seq_pc
  multiplexer after EX/MEM suggests. The resulting three-cycle penalty is not
  given in the published description.
* **Configuration.** The original is configured through a header file. Here
  the options are parameters: `MUL_TYPE` for the multiplier and `ENABLE_M` for
  the RV32I-only build. An RV32I build does not trap on M-extension encodings.
  It retires them as no-ops, since the core has no trap logic.
* **Divider latency.** The divider is described once as stalling "34 cycles"
  and once as "33 or 34 depending on the sign". This RTL follows the second,
  more detailed statement.
* **Serial device.** The system's serial device is only named. Its register
  interface, frame format, fixed bit time (no baud-rate register) and
  one-byte receive buffer are choices of this implementation. So are the
  timer's width and the address map.
* **Not implemented.** The M-extension is complete. Traps, CSRs, interrupts and
  misaligned-access exceptions are absent.
* **Not reproduced.** The FPGA-specific results (clock rate, LUT and DSP
  counts) cannot be reproduced from RTL simulation. Of the benchmark
  programs, only Dhrystone is run (see `tb_dhrystone`). CoreMark and the
  Embench suite are not included. For them, small kernels modelled on their
  inner loops stand in, and random programs exercise every pipeline
  mechanism.
