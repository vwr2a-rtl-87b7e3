# VWR2A in SystemVerilog: a very-wide-register reconfigurable array

VWR2A is a small coarse-grained reconfigurable array. It sits beside a
microcontroller in a low-power biosignal SoC and runs the signal-processing
kernels that would otherwise keep the CPU busy, such as FFTs, FIR filters
and feature extraction. Its main idea is to separate the *memory width*
from the *compute width*. The scratchpad memory (SPM) is read and written one
4096-bit line at a time, into very wide registers (VWRs). Eight small 32-bit
processing cells (RCs) then work through those registers word by word. Each
wide access moves 128 words, so memory is touched rarely and cheaply, while
the datapath stays narrow and simple.

This repository is a synthesizable RTL model of the whole accelerator:
- the array and its control units;
- the shared SPM;
- the configuration memory;
- the DMA engine;
- the host interface.

It also contains self-checking testbenches for every block and for the whole
design.

## Overall structure

```
           AHB slave (CPU)                 AHB master (system SRAM)
                 |                                   |
          +--------------+    start/len      +--------------+
   irq <--| synchronizer |------------------>|     DMA      |
          +--------------+                   +--------------+
            |  config lines                         | 32-bit port
   +-----------------+                       +---------------------+
   | config memory   |                       |  SPM  32 KiB        |
   +-----------------+                       |  64 lines x 4096 b  |
            | program load                   +---------------------+
   +-------------------------+  side links  +-------------------------+
   |  column 0               |<------------>|  column 1               |
   |  LCU  LSU  MXCU  SRF    |              |  LCU  LSU  MXCU  SRF    |
   |  VWR A/B/C, shuffle     |<== 4096b ===>|  VWR A/B/C, shuffle     |
   |  RC0..RC3               |   (shared    |  RC0..RC3               |
   +-------------------------+   SPM port)  +-------------------------+
```

| Module | Role |
|---|---|
| `vwr2a_top` | Whole accelerator. It exposes plain AHB-Lite slave and master signals and `irq`. |
| `synchronizer` | Host register interface, kernel loader and launch, completion flags, interrupt. |
| `dma` | Copies blocks of 32-bit words between system memory (AHB master) and the SPM. |
| `spm` | 32 KiB scratchpad. One 32-bit port for the DMA; one 4096-bit port with a per-word write mask for the columns. |
| `config_mem` | 256 lines of kernel code. A line is one instruction for every unit of a column. |
| `vwr2a_column` | One column: shared PC, LCU, LSU, MXCU, SRF, three VWRs, shuffle unit, four RCs. |
| `rc` / `rc_alu` / `prog_mem` | Reconfigurable cell with its 64-word program memory and its ALU. |
| `vwr` | One 4096-bit very-wide register with a wide port and four narrow ports. |
| `shuffle_unit` | Fixed permutations of VWR A and VWR B into VWR C. |
| `srf` | 8-entry scalar register file shared by all units of a column. |
| `lcu` / `lsu` / `mxcu` | Loop-control, load-store and index ("multiplexer") control units. |
| `vwr2a_pkg` | Sizes, types, opcodes and instruction formats. |

## How a column computes

A column has seven units, and each unit has its own small program memory:
- LCU
- LSU
- MXCU
- RC0..RC3

All seven are addressed by one program counter. The words at one PC together
form a wide, pre-decoded instruction, much like a VLIW bundle. Every cycle:

* **RCs.** Each RC reads two operands and computes in a single cycle. The
  result goes to its result register. It can also go to one register-file
  entry, one VWR word, or one SRF entry. The possible operands are:
  * word *k* of its quarter of VWR A, B or C;
  * the SRF;
  * its two local registers;
  * its own previous result;
  * the previous results of the RC above, the RC below and the same row in
    the other column;
  * zero.

  The ALU does add, subtract, 32-bit multiply and 16.15 fixed-point
  multiply. The fixed-point multiply keeps bits 47:16 of the 64-bit product.
  The ALU also does AND/OR/XOR and logical/arithmetic shifts. Inputs of
  unused operators are gated to zero (operand isolation).
* **VWRs are sliced.** A VWR holds 128 words, and RC *r* sees only words
  32r..32r+31. All four RCs use the same index *k*, which the **MXCU**
  holds. An MXCU instruction sets or increments *k*, or adds and masks it
  with an SRF value. The new value is used from the next cycle on.
* **LSU.** The LSU moves a whole SPM line into a VWR (LDV) or a VWR into a
  line (STV) in one cycle. It moves single words between the SPM and the
  SRF (LDS/STS). It also writes VWR C from the shuffle unit (SHUF). SPM
  addresses are an address register (line granularity) plus an immediate.
  The address register is loaded from the SRF (SETA) or incremented (ADDA).
* **Shuffle unit.** It treats A and B as one 256-word sequence and writes
  the lower or upper 128 words of one of these permutations into C:
  * word interleaving of A and B;
  * removal of even (or odd) words;
  * bit-reversed order (for FFTs);
  * rotation by 32 words.
* **LCU.** The LCU computes the next PC. It has four loop registers, and it
  can:
  * set a register (immediate or from the SRF) and add to it;
  * compare-and-branch against an immediate, a register or the SRF;
  * branch on an SRF value being zero;
  * jump;
  * execute EXIT, which ends the kernel.

A typical inner loop reads A and B at index *k*, writes C, increments *k*
and branches back. For 32 iterations it processes 128 words per VWR with
no further memory access. Example 2-cycle loop body: `C = A + B; k++`,
then `BLT i, 32`.

### The shared SPM port and stalls

Both columns use the same 4096-bit SPM port. Column 0 has fixed priority.
In a cycle where both LSUs access the SPM, column 1's whole column freezes
for that cycle: PC, registers, VWRs and SRF stay unchanged. The testbenches
measure this. Without contention, a kernel takes exactly one cycle per
executed instruction, and each stall adds exactly one cycle.

### The SRF port

The SRF has a single port. In one cycle, all units of a column may read the
same entry, and at most one unit may write it. The index used is that of
the lowest-numbered requester in this order: LCU, LSU, MXCU, RC0..RC3.
Kernels must respect this rule. Simulation assertions flag two different
indices in the same cycle, or two writers.

## Host interface and kernel launch

The CPU talks to the accelerator through the AHB slave port. The port has
zero wait states and always responds OKAY. Offsets are within the
accelerator's address window:

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | KSTART | W | [1:0] column mask, [15:8] first config line, [22:16] program length *n* (1..64) |
| 0x04 | STATUS | R | [1:0] column busy, [2] loading or starting, [3] DMA busy, [4] kernel done, [5] DMA done, [6] DMA bus error, [7] launch rejected |
| 0x08 | FLAGS | W | write 1 to clear bits 4, 5, 7 |
| 0x0C | IRQEN | RW | interrupt enables for bits 4, 5, 7 |
| 0x10 / 0x14 / 0x18 | DMA_SYS / DMA_SPM / DMA_LEN | RW | system byte address, SPM word address, length in words |
| 0x1C | DMA_CTRL | W | [0] go, [1] direction (1 = SPM to system) |
| 0x8000 + 32·line + 4·word | config memory | W | word 0 LCU, 1 LSU, 2 MXCU, 3..6 RC0..RC3 |

A launch copies *n* configuration lines into the program memories of the
selected columns, one line per cycle. When both columns are selected,
column 0 gets lines first..first+n-1 and column 1 gets the next *n* lines.
All selected columns then start in the same cycle, at PC 0. "Kernel done"
is set when every column of that launch has executed EXIT. A launch that
names a busy column, or arrives while the loader is busy, is dropped and
sets the "rejected" flag. A column that is idle can be launched while the
other one runs, which gives two independent kernels. `irq` is the OR of
the enabled flags.

The DMA performs single AHB transfers, two bus cycles per word plus any
wait states. If the bus returns an error, the error is recorded and the
transfer runs to its end.

## Instruction formats

All formats are defined in `vwr2a_pkg.sv`. The `vwr2a_tb_pkg.sv` helpers
`rc_w`, `lcu_w`, `lsu_w`, `mx_w` and `line` show how to assemble code.

| Unit | Fields, LSB first |
|---|---|
| RC (20 b) | op[3:0], src_a[3:0], src_b[3:0], vwr_dst[1:0], rf_dst[1:0], srf_we, srf_idx[2:0] |
| LCU (27 b) | op[3:0], r[1:0], srf_idx[2:0], target[5:0], imm[11:0] signed |
| LSU (25 b) | op[2:0], vwr[1:0], srf_idx[2:0], shuf[2:0], imm[12:0] |
| MXCU (11 b) | op[2:0], srf_idx[2:0], imm[4:0] |

## Where this model follows the original design and where it does not

The following come from the published architecture:
- array shape and sizes: 4 rows × 2 columns, 64-word program memories, two
  RC registers, 8-entry SRF, three 4096-bit VWRs per column, 32 KiB SPM;
- the operand sources and neighbour links;
- the ALU operation list and the 16.15 multiply;
- the shuffle operations;
- the roles of the LCU, LSU, MXCU, synchronizer and DMA;
- the one-AHB-master / one-AHB-slave / interrupt SoC interface.

The following are this model's own choices, because the published
description leaves them open:
* All instruction encodings and the unit instruction sets. This includes
  the LSU address register, the four LCU registers and the MXCU masked add.
* The exact index formulas of the shuffle modes. "Even pruning" removes the
  words at even positions. The concatenation order is A then B.
* The register map, the loader, the reject rule, and the 256-line × 7-word
  configuration memory.
* SPM reads are combinational, so a line loaded at one PC is usable at the
  next PC.
* Column 0 has fixed priority on the SPM port.
* The DMA transfer scheme.
* End rows of a column read zero from their missing neighbour. There is no
  wrap-around.

Known departures:
* **VWRs are built from flip-flops.** The original uses latches to save
  area and power. Behaviour is the same, area is not.
* **Column synchronisation.** Columns launched together start in the same
  cycle, and the launch completes only when both have finished. When column
  1 stalls on the SPM port, column 0 does not stall with it. Kernels that
  exchange data through the side links in the same cycles must therefore
  avoid SPM accesses in both columns at once, or re-align with a
  data-dependent loop. The original description says the PCs of cooperating
  columns are kept synchronised, without saying how.
* Single-cycle SPM access and no power gating. Power and energy are outside
  the scope of this RTL.
* There is no ROM of FFT twiddle factors. Kernels get constants through the
  DMA, like any other data.

## Capacity for the workloads it was designed for

The 32 KiB SPM holds:
- a 2048-point complex FFT in 32-bit real + imaginary words (16 KiB),
  together with its twiddles;
- the 2048-point real FFT (8 KiB + 8 KiB work array);
- an 11-tap FIR over 1024 samples, input and output (8 KiB).

Longer signals are processed in windows streamed by the DMA. Program memory
limits each kernel to 64 instructions per unit. Longer applications run as
a sequence of kernels, each loaded from the configuration memory at launch.

## Verification

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_rc_alu` | All operations against a reference, including random and corner operands and the fixed-point product bits. |
| `tb_shuffle_unit` | All eight modes against index formulas, on random data. |
| `tb_vwr`, `tb_srf`, `tb_spm`, `tb_config_mem` | Storage, ports, masks and priority rules. |
| `tb_rc` | Operand selection, including neighbours; write-back targets; NOP and enable behaviour. |
| `tb_lcu`, `tb_mxcu`, `tb_lsu` | Every instruction, with PC/k/address traces. |
| `tb_dma` | Both directions under random wait states, exact cycle count without waits, bus errors. |
| `tb_synchronizer` | Loading order, simultaneous start, rejects, per-launch completion, DMA registers, interrupt masking. |
| `tb_vwr2a_column` | One column runs a 13-instruction kernel: loop, multiply, bit-reversal shuffle, side links, SRF hand-off, single-word store. The kernel runs once with full SPM access, where it must take exactly 75 cycles, and once with randomly refused access, where it must give the same results in 75 cycles plus the stalls. |
| `tb_vwr2a_top` | The full-size accelerator driven as the CPU would drive it. See below. |

`tb_vwr2a_top` covers the whole flow:
1. It DMAs input data in.
2. It launches a two-column kernel: add/subtract loops, stores, interleave
   shuffle, fixed-point multiply, vertical links.
3. It checks that a second launch is rejected while the kernel runs.
4. It runs a second kernel that reads the other column's results through
   the side links.
5. It DMAs results out and compares them against values computed in the
   testbench.

The testbench counts stalls, taken branches, rejects, and kernel and DMA
interrupts, and fails if any of them never happened.

Each block was also checked against a deliberately broken copy, to confirm
that its testbench detects the fault.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/vwr2a_pkg.sv tb/vwr2a_tb_pkg.sv rtl/*.sv tb/ahb_mem_model.sv \
  tb/tb_vwr2a_top.sv --top-module tb_vwr2a_top -o sim
./obj_dir/sim
```

Replace `tb_vwr2a_top` with any other testbench name. `tb/ahb_mem_model.sv`
is a behavioural AHB memory with optional random wait states. It stands in
for the system SRAM and is not synthesizable. The full-size top-level test
builds and runs in well under a minute.
