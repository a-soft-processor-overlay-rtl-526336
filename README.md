# A RISC-V soft processor tightly coupled to an FPGA accelerator

Hardware accelerators on an FPGA are fast but rigid: a block built to process a
16 x 16 tile, or 50 outputs of a 50-tap filter, cannot handle the ragged edges of a
real input or the loop control around it. This design puts a small in-order RISC-V
processor next to the accelerator so that software does the irregular part and
hands the regular part to hardware with a single instruction. The two share one
data memory (DMEM) and one address space, so handing over control costs no data
copy: the processor writes a small argument array into DMEM, executes `BAA`
(branch to auxiliary architecture), freezes while the accelerator works on DMEM
directly, and continues with the next instruction when the accelerator drops its
stall signal.

The processor (the *primary architecture*) is a 4-stage RV32I pipeline without
CSRs. The accelerator (the *auxiliary architecture*) here is an example engine
with three kernels that cover the unrolled loop bodies of four benchmarks: strided
dot products (matrix multiplication and FIR filtering), a Sobel tile (edge
detection) and a K-means assignment step (clustering). The scheme follows the MURAC execution
model (one address space, explicit instructions to move between architectures) as
described in the paper "A Soft Processor Overlay with Tightly-coupled FPGA
Accelerator" (Ng, Liu, So). This RTL is an independent implementation of that
description; where the paper is silent, the choices are this design's own and are
listed below.

## Block diagram

```
            IF              DEC                     EXE/MEM                 WB
  +----+   +------+   +--------------------+   +-------------------+   +------+
  | PC |-->| IMEM |-->| decoder, reg. file |-->| ALU, branch cmp   |-->|  R   |--+
  +----+   +------+   | A/B operand muxes  |   | lsu  <-> DMEM port|   +------+  |
    ^  +4             | MA = base + imm    |   |                   |             |
    |                 +--------------------+   +---------+---------+   reg write <+
    +---- redirect (branch/jump/RPA target = MA) ---------+
                                                         |  cpu side
                                  sel  +-----------------v-----+     +---------+
              core control path ------>| dmem_mux (addr, data, |---->|  DMEM   |
                     ^                 | byte/write enables)   |     +----+----+
                     | Stall           +-----------^-----------+          | rdata
               +-----+---------------+             | Aux_Mem_Addr/WrData  |
               |   accelerator       |-------------+                      |
               |   (auxiliary arch.) |<---------------- Aux_Mem_RdData ----+
               +---------------------+
```

| File | Block |
|---|---|
| `rtl/rv_pkg.sv` | opcodes, BAA/RPA encodings, ALU operation enum, decoded control struct |
| `rtl/imem.sv` | instruction memory, combinational read, program-load write port |
| `rtl/decoder.sv` | RV32I + custom-0 decoder, immediate generation |
| `rtl/regfile.sv` | 32 x 32 register file, 2 read / 1 write, write-through |
| `rtl/alu.sv` | RV32I ALU |
| `rtl/lsu.sv` | byte/halfword/word store lanes and load extension |
| `rtl/dmem.sv` | data memory, combinational read, byte-enabled write |
| `rtl/dmem_mux.sv` | multiplexers that hand the DMEM port to the accelerator |
| `rtl/core.sv` | the 4-stage pipeline, hazards, BAA/RPA control |
| `rtl/accelerator.sv` | example auxiliary architecture (dot products, Sobel, K-means) |
| `rtl/overlay_top.sv` | everything wired together |

## The pipeline and why it has four stages

A classic five-stage RISC pipeline has separate execute and memory stages. Here
they are one stage, EXE/MEM, for two reasons: fewer pipeline registers on small
FPGAs, and no load-use hazard. Because a load reads DMEM in the same stage where
an ALU instruction computes, its result sits in the WB register `R` at the same
time an ALU result would, and both reach the next instruction by the same
forwarding path. A load followed by an instruction that uses the loaded value
runs back to back.

The cost is that the address must be known when the instruction *enters*
EXE/MEM. A second 32-bit adder therefore sits at the end of DEC and computes
`MA = rs1 + imm` (loads, stores, JALR, BAA, RPA) or `MA = PC + imm` (branches,
JAL). `MA` is registered and drives the DMEM address directly. This design also
uses `MA` as the branch and jump target, so the ALU is free for the branch
comparison.

Stage by stage (`rtl/core.sv`):

* **IF**: `PC` addresses IMEM; the word goes into the DEC register with its PC.
  PC advances by 4 unless the pipeline is held or redirected.
* **DEC**: decode, register-file read, operand A (rs1 or PC), operand B (rs2 or
  immediate), store data `MD` (rs2), and the `MA` adder.
* **EXE/MEM**: ALU, branch decision, DMEM read or write through `lsu`, result
  select (load data, PC+4 for JAL/JALR, or ALU result) into `R`.
* **WB**: `R` is written to the register file.

### Hazards and their costs

| Situation | Handling | Cost |
|---|---|---|
| Result of instruction *i* used by *i+1* as ALU operand, branch operand or store data | forwarded from `R` (WB) into EXE/MEM | none |
| Load result used by the next instruction | same forwarding | none |
| Result used by *i+2* | register file is write-through | none |
| *i+1* needs the result of *i* as the **base of its address** (load/store/JALR/BAA/RPA base) | *i+1* waits one cycle in DEC; a bubble enters EXE/MEM | 1 cycle |
| Taken branch, JAL, JALR, RPA | resolved in EXE/MEM; the two younger instructions are flushed | 2 cycles |

The address interlock is the price of the early adder: `MA` is computed in DEC,
so it cannot use a value still being produced in EXE/MEM. Pointer chasing
(`lw a0,0(a1); lw a2,0(a0)`) and "load the argument pointer, then BAA" pay one
cycle.

## Handing control to the accelerator

Two custom instructions in the RISC-V *custom-0* opcode space (`inst[6:0] =
0001011`), both I-type like a load:

| bits | 31:20 | 19:15 | 14:12 | 11:7 | 6:0 |
|---|---|---|---|---|---|
| BAA | offset[11:0] | base | 000 | unused | 0001011 |
| RPA | offset[11:0] | base | 001 | unused | 0001011 |

`BAA base, offset` passes the address `base + offset` of an argument array to
the accelerator. The first word of the array is its element count, like `argc`.
`RPA base, offset` jumps unconditionally to `base + offset` without saving a
link; the test programs use it as a subroutine return (`RPA x1, 0`).

What happens when a BAA reaches EXE/MEM, cycle by cycle:

1. **Launch cycle.** The core drives `aux_start = 1` and `aux_arg_addr = MA`.
   The core holds IF, DEC and EXE/MEM on its own in this cycle, even if the
   accelerator has not raised Stall yet. The register `launched` is set.
2. **Accelerator cycles.** While `aux_stall` is high the pipeline stays frozen
   and `dmem_sel_aux = launched = 1` switches the DMEM multiplexers to the
   accelerator's address, write data and write enable. DMEM read data goes to
   both sides all the time. The core issues no DMEM write while `launched` is set,
   which an assertion checks.
3. **Return.** In the first cycle with `aux_stall` low, the BAA leaves EXE/MEM
   and `launched` clears. The instruction after the BAA follows (PC+4).

If Stall is high for *H* cycles (the launch cycle included), a BAA occupies
EXE/MEM for *H* + 1 cycles. Any auxiliary architecture can be attached as long
as it keeps Stall high from the launch pulse until its last DMEM write. It may
raise Stall combinationally from `aux_start` or one cycle later.

## The example accelerator

`rtl/accelerator.sv` is a sequential engine that makes one DMEM access per cycle
through the shared port. It first reads its argument array: word 0 is the count
of words that follow, word 1 selects the kernel, and the kernel's arguments come
after that. Bases are byte addresses; strides and sizes count words. All
arithmetic is 32-bit wrap-around on signed words.

| word | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 |
|---|---|---|---|---|---|---|---|---|---|---|---|
| dot products | 10 | 0 | x_base | x_ostride | x_istride | h_base | h_ostride | h_istride | y_base | n_out | n_in |
| Sobel tile | 7 | 1 | in_base | in_stride | out_base | out_stride | rows | cols | | | |
| K-means assign | 7 | 2 | pts_base | n_pts | cent_base | n_cent | dim | label_base | | | |

**Dot products.** For `o < n_out`,

```
y[o] = sum_{k < n_in} x[x_base + o*x_ostride + k*x_istride] * h[h_base + o*h_ostride + k*h_istride]
```

written to `y_base + 4*o`. A FIR block of `n_out` outputs uses x strides (1, 1)
and h strides (0, 1). One row of A times `n_out` columns of B (N x N,
row-major) uses x strides (0, 1) and h strides (1, N).

**Sobel tile.** For each of `rows x cols` outputs, the 3 x 3 window whose
top-left pixel is `in[r][c]` gives

```
Gx = (p02 + 2 p12 + p22) - (p00 + 2 p10 + p20)
Gy = (p20 + 2 p21 + p22) - (p00 + 2 p01 + p02)
out[r][c] = |Gx| + |Gy|
```

A 16 x 16 output tile reads an 18 x 18 input window. Software points `in_base`
at the window's corner and `out_base` at the first interior output pixel. It
handles the image boundary itself.

**K-means assignment.** Each of `n_pts` points, stored as `dim` consecutive
words, gets the index of the centroid with the smallest squared Euclidean
distance. Ties go to the lower index. The label is written to
`label_base + 4*i`. The centroid update, which needs a division, stays in
software.

**Timing.** Stall covers the launch cycle, `1 + count` cycles reading the
arguments and one set-up cycle. Then the kernel runs:

| kernel | per unit of work | Stall length |
|---|---|---|
| dot products (count 10) | read x, read h and accumulate, per tap; 1 write per output | `13 + n_out*(2*n_in + 1)` |
| Sobel (count 7) | 8 reads (the centre pixel has weight 0), 1 write per pixel | `10 + 9*rows*cols` |
| K-means (count 7) | 2 reads per coordinate per centroid, 1 write per point | `10 + n_pts*(2*dim*n_cent + 1)` |

Some calls end early:

* A count of 0 ends the call after that word is read, so Stall lasts 2 cycles.
* A zero size ends the call after set-up: `n_out`, `rows`, `cols` or `n_pts`.
* An unknown kernel number also ends the call after set-up.

This engine is deliberately simple and bound by the single shared DMEM port. The
original accelerators were hand-built per application and not described in
detail, so this one stands in for them. It does their work but has none of their
unrolled parallelism. Its cycle counts are therefore much longer than a
dedicated 16 x 16 or 1 x 5 x 100 datapath would need, and cannot be compared with
published accelerated results. The Sobel kernel, the |Gx| + |Gy| magnitude, the
tie rule and all argument layouts are this design's choices.

## Memories and parameters

| Parameter | Default | Meaning |
|---|---|---|
| `overlay_top.IMEM_WORDS` | 1024 (4 KB) | instruction memory size |
| `overlay_top.DMEM_WORDS` | 4096 (16 KB) | data memory size |
| `core.RESET_PC` | 0 | first PC after reset |

The paper makes both memory sizes configurable but states no default. The
defaults come from the paper's Intel-device memory-bit count (165 888 bits =
128 Kbit + 32 Kbit + 2 Kbit), read as a 16 KB DMEM, a 4 KB IMEM and two copies of
the register file. Which share belongs to which memory is an interpretation.
Addresses wrap modulo the memory size. Both memories read combinationally, so as
written they map to distributed RAM or registers, not the block RAM the paper
reports. To use block RAM, register the read address (IMEM from the next-PC mux,
DMEM from the `MA` adder output); the pipeline timing does not change.

Programs are written into IMEM through `prog_we / prog_addr / prog_data` while
`rst_n` is low. Reset is synchronous and active low; the register file and the
memories are not reset.

## What the design does not do

* No CSRs, exceptions or interrupts. The paper removes CSRs to save area.
  FENCE, ECALL, EBREAK, CSR and unknown opcodes execute as NOPs. Misaligned
  accesses are not trapped: address bits below the access size are ignored.
* No multiplier (RV32I). Software multiplies by shift-and-add.
* Only one auxiliary architecture. The accelerator is a sequential example (see above), not a copy of the original hand-built accelerators.
* The sizes of the paper's benchmarks do not fit in the default 16 KB DMEM.
  MM 100x100 needs about 120 KB, FIR with 10 000 inputs about 80 KB,
  K-means with 5000 two-dimensional points about 60 KB, and Sobel on 130x130
  pixels at least 33 KB. Raise `DMEM_WORDS` to run them. The workload
  testbenches run scaled-down sizes that fit.

## Departures from the paper, in one place

* The funct3 values 000 (BAA) and 001 (RPA) are chosen here. The paper says only
  that funct3 tells them apart.
* Branch/jump resolution in EXE/MEM, using `MA` as target, the 2-cycle penalty
  and the 1-cycle address interlock are this design's choices. The paper gives
  the stage split and the early address adder, not the hazard logic.
* The exact launch handshake (`aux_start` pulse, `launched`/sel timing, the core
  stalling on its own in the launch cycle) is this design's. The paper gives
  the Stall signal from the accelerator and the sel of the DMEM multiplexers.
* The DMEM multiplexers switch the write enable and byte enables too. The block
  diagram shows only the address and write-data multiplexers. Accelerator writes
  are whole words.
* Asynchronous-read memories, and an IMEM program-load port.
* Memory sizes are module parameters (`IMEM_WORDS`, `DMEM_WORDS`) rather than
  text macros.
* BAA and RPA are recognised by the combinational decoder, which compares the
  opcode and funct3 (the "width" field of an I-type load). No separate decode
  registers are kept.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The program-level tests assemble RV32I code
with the encoder functions in `tb/rv_asm_pkg.sv`.

| Testbench | What it shows |
|---|---|
| `imem_tb`, `dmem_tb`, `regfile_tb` | storage against reference arrays, wrap-around, byte enables, write-through |
| `alu_tb`, `decoder_tb`, `lsu_tb`, `dmem_mux_tb` | combinational blocks against independent models |
| `accelerator_tb` | FIR- and MM-shaped dot products, n_in = 0, count = 0, wrap-around, a Sobel tile with signed pixels, zero-size Sobel, K-means with tied centroids, an unknown kernel. Each call checks every memory word and the exact Stall length |
| `core_tb` | a 64-instruction program covering every RV32I class used, BAA and RPA, with a stand-in accelerator. It checks timing: load-use costs 0 cycles, the address interlock 1, a taken branch 2, and the core stays frozen exactly while Stall is high |
| `overlay_top_tb` | whole design, small FIR (70 inputs, 5 taps, blocks of 8). It checks every output and the number and length of accelerator calls, and requires each mechanism to occur at least once: launch, freeze, DMEM hand-over, RPA, flush, address interlock, forwarding, load-use |
| `fir_workload_tb` | whole design at default sizes: FIR with 1900 inputs and 50 taps, 50 x 50 blocks (37 accelerator calls, one output in software), about 197 000 cycles |
| `mm_workload_tb` | whole design at default sizes: 36 x 36 matrix multiply, 1 x 5 x 36 blocks (252 calls, one column per row in software), about 326 000 cycles |
| `fir_sw_workload_tb` | the same FIR program with the processor alone (block size above the output count): 120 inputs, 20 taps, no accelerator call, about 367 000 cycles, which shows what the software multiply costs |
| `km_workload_tb` | whole design at default sizes: K-means assignment of 1000 two-dimensional points to 4 centroids, blocks of 125 points (8 calls), about 17 000 cycles |
| `se_workload_tb` | whole design at default sizes: Sobel on a 34 x 34 image, four 16 x 16 tiles by the accelerator, the 132 boundary pixels by software, about 9 900 cycles |

To run one with plain Verilator (5.x), from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/rv_pkg.sv tb/rv_asm_pkg.sv tb/fir_prog_pkg.sv tb/overlay_top_tb.sv \
    --top-module overlay_top_tb
./obj_dir/Voverlay_top_tb
```

For the block testbenches, list `rtl/rv_pkg.sv` and `tb/<name>_tb.sv`. For
`mm_workload_tb`, use `tb/mm_prog_pkg.sv` in place of `tb/fir_prog_pkg.sv`. The
processor-only FIR testbench uses `tb/fir_prog_pkg.sv`. The K-means and Sobel
workload testbenches need only `tb/rv_asm_pkg.sv`.
The testbenches read and write the memories hierarchically
(`dut.u_dmem.mem`) to place data and check results.

How far to trust it: the RV32I subset is checked by directed programs and
random block-level tests, not by a compliance suite. The accelerator hand-over
and all hazard paths are checked for both results and cycle counts. Nothing has
been run on an FPGA, and no timing or resource figures are claimed.
