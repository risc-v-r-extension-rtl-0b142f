# RV64R: a five-stage RISC-V core that rents its MEM stage for multiply-accumulate

Most DNN inference reduces to long chains of multiply-accumulate (MAC):
`acc += x * w`. A small in-order RISC-V core with only the F extension runs each
term with `fmul.s` and `fadd.s`. In a naive loop it also loads the partial sum from
memory and stores it back on every term, because the running sum lives in a variable
in memory. The R-extension described by W. H. Kim, H. J. Kim and T. H. Han
("RISC-V R-Extension: Advancing Efficiency with Rented-Pipeline for Edge DNN
Processing") rests on one observation. An arithmetic instruction in a classic
IF-ID-EX-MEM-WB pipeline does nothing in MEM. So the multiply can use EX, and the
add can use MEM ("renting" the stage, called R_EX). The running sum stays in one
extra 32-bit register beside the MEM/WB pipeline register, the *architectural
pipeline register* (APR). The loop then needs:

| form | inner-loop instructions per MAC term | data-memory accesses per term |
|---|---|---|
| F extension | `flw`, `flw`, `fmul.s`, `flw`, `fadd.s`, `fsw` | 4 |
| R extension | `flw`, `flw`, `rfmac.s` | 2 |

Once per output, `rfsmac.s` moves the APR into an FP register and clears the APR.

This repository holds synthesizable SystemVerilog for such a core: a 5-stage RV64
pipeline with a subset of RV64I, a subset of the F extension, and the two
R-extension instructions. It also holds self-checking testbenches, down to full
convolution layers of LeNet, ResNet-20 and a MobileNet-style network running as
RISC-V programs on the core.

## The two instructions

Both use the F-extension opcode OP-FP (`1010011`) with fmt = `00` (single
precision). They are told apart by funct5:

| bits | 31-27 funct5 | 26-25 fmt | 24-20 | 19-15 | 14-12 | 11-7 | 6-0 |
|---|---|---|---|---|---|---|---|
| `fmul.s rd, rs1, rs2` (reference) | `00010` | `00` | rs2 | rs1 | rm | rd | `1010011` |
| `rfmac.s rs1, rs2` | `01101` (0x0D) | `00` | rs2 | rs1 | rm | `00000` | `1010011` |
| `rfsmac.s rd` | `01110` (0x0E) | `00` | `00000` | `00000` | rm | rd | `1010011` |

The decoder matches them with MASK/MATCH pairs, so unused fields must be zero.

| instruction | MASK | MATCH |
|---|---|---|
| `rfmac.s` | `0xFE000FFF` | `0x68000053` |
| `rfsmac.s` | `0xFFFF807F` | `0x70000053` |

Any other rd in `rfmac.s`, or any rs1/rs2 in `rfsmac.s`, is an illegal word.
funct5 `0x0C` is the "naive" single-stage `fmac.s` that the R-extension is compared
against. It is not implemented here.

Semantics:

* `rfmac.s rs1, rs2`: APR ← round(APR + round(f[rs1] × f[rs2])). Both roundings use
  the instruction's rm field; `rm = 111` (DYN) means the mode held in the `frm` CSR.
* `rfsmac.s rd`: f[rd] ← APR; APR ← +0.

The APR is not visible to any other instruction. After reset it holds +0.

In C the instructions are reached through inline assembly:

```c
#define rfmac_s(rs1, rs2) asm volatile ("rfmac.s %0, %1" : : "f"(rs1), "f"(rs2))
#define rfsmac_s(rd)      asm volatile ("rfsmac.s %0" : "=f"(rd))
```

These macros assume a toolchain that knows the two mnemonics. The convolution inner
loop then becomes `rfmac_s(in[...], w[...])`, followed by
`rfsmac_s(out[i][j][k])` after the innermost three loops.

## How a MAC chain moves through the pipeline

This is the part worth reading slowly, because it is why the extension needs no new
stage, no longer EX stage and no new hazard logic.

```
cycle          1    2    3    4    5    6    7    8
rfmac.s a    IF   ID   EX   MEM  WB                   EX: p_a = x_a*w_a ; MEM: APR <= APR + p_a
rfmac.s b         IF   ID   EX   MEM  WB              MEM in cycle 5 reads the APR written at end of cycle 4
rfmac.s c              IF   ID   EX   MEM  WB
rfsmac.s d                  IF   ID   EX   MEM  WB    MEM in cycle 7: value <= APR (includes c), APR <= 0
fsw d                            IF   ID   EX   MEM   EX in cycle 7 takes the value forwarded from MEM
```

* **Multiply in EX, add in MEM.** `fp32_mul` sits in EX. Its rounded product
  travels in the EX/MEM register in place of an address. In MEM, `r_ex_stage` adds
  it to the APR with a second `fp32_add` instance. The data-memory port stays idle;
  an assertion in the core enforces this.
* **The APR is the only state.** It is written on the clock edge that ends the MEM
  cycle. The next `rfmac.s` reaches MEM one cycle later and reads the new value. A
  chain of back-to-back `rfmac.s` therefore issues at one per cycle with no
  forwarding and no stall. A conventional `fmac.s` that keeps its sum in a register
  would have to forward that sum from WB into EX.
* **`rfsmac.s` reads and clears in MEM.** Its value is whatever the APR holds when
  it reaches MEM. That always includes every older `rfmac.s`, even one directly in
  front of it, because that one has just finished MEM. On the same edge the APR's
  input multiplexer selects zero. The value continues to WB and is written to f[rd]
  through the normal write port of the FP register file. An instruction that reads
  f[rd] right after `rfsmac.s` gets the value through the ordinary MEM→EX forward
  path. The APR is a register, so this forward is as cheap as forwarding an ALU
  result.
* **The source operands of `rfmac.s`** are ordinary FP registers. They follow the
  usual forwarding and load-use rules. In the convolution loop, the second `flw`
  feeds `rfmac.s` directly, which costs one load-use bubble per term. The
  F-extension loop pays two such bubbles per term.

The paper gives two descriptions of where `rfsmac.s` delivers its result. The text
says the APR is written to rd "during the ID stage" and reset in MEM. The dataflow
drawing shows the APR output looping back to the register file, which sits in ID,
and the simulator description says the APR data "is stored in the destination
register and reset to zero". This RTL reads the APR in MEM and writes it back through
the register file's WB port. That is the drawing's path, and it needs no interlock.
Reading the APR in ID would force `rfsmac.s` to wait until every older `rfmac.s` had
left MEM.

## Floating-point units

`fp32_mul` and `fp32_add` are combinational IEEE 754 binary32 units. The paper
uses vendor FP IP and does not describe its insides; these two are written here.
They handle:

* all five rounding modes (RNE, RTZ, RDN, RUP, RMM);
* subnormal inputs and gradual underflow of results;
* overflow to infinity, or to the largest finite value in the directed modes;
* canonical quiet NaN for any NaN input, inf×0 and inf−inf.

Exact cancellation gives +0, or −0 in RDN. Both units share one
round-and-pack function in `rext_pkg`. It rounds by adding one to the packed
{exponent, fraction}, so a carry out of the fraction bumps the exponent, or reaches
infinity.

Exception flags are not produced: `fflags` reads as zero. `frm` lives in `fcsr`,
which implements `csrrw/csrrs/csrrc` and their immediate forms on `fflags` (0x001),
`frm` (0x002) and `fcsr` (0x003). CSR instructions execute in EX, so the next
instruction already sees a new `frm`.

## The rest of the pipeline

The surrounding core is a plain textbook design. The paper does not describe it.

* **IF**: a PC register and an instruction port with a combinational read. Fetch
  predicts not-taken.
* **ID**: `rv_decoder` fills the `ctrl_t` struct. There are two register files:
  `int_regfile` (x0 = 0) and `fp_regfile` (32 × 32 bit). Both write through, so a
  value written in WB can be read in ID in the same cycle. `hazard_unit` stalls IF
  and ID for one cycle when the instruction in ID needs the result of a load in EX.
* **EX**: `int_alu` (RV64I including the `*W` forms) and the branch compare, the
  FP multiplier, the FP adder, and `fcsr`. Operands come from the MEM stage, the WB
  stage or the register file, as `hazard_unit` selects. A taken branch or jump
  redirects fetch and squashes the two younger instructions.
* **MEM**: one of two paths.
  * An aligned data access on a 64-bit port with byte enables; the read is
    combinational.
  * The R_EX accumulator and APR, for `rfmac.s` and `rfsmac.s`.
* **WB**: writes one register file.

`ebreak` stops fetch when it reaches EX and raises `halted` when it retires.

Supported instructions:

* **RV64I**: `lui`, `auipc`, `jal`, `jalr`, all branches, all loads and stores,
  and the ALU instructions in register, immediate and `*W` forms.
* **Zicsr**: on the FP CSRs only.
* **System**: `ebreak`.
* **F extension**: `flw`, `fsw`, `fadd.s`, `fsub.s`, `fmul.s`, `fmv.x.w`,
  `fmv.w.x`.
* **R extension**: `rfmac.s`, `rfsmac.s`.

Anything else decodes as a no-op with an internal `illegal` flag. There are no traps,
interrupts or misaligned accesses.

## Files

| file | contents |
|---|---|
| `rtl/rext_pkg.sv` | encodings, MASK/MATCH constants, `ctrl_t`, rounding-mode enum, `fp_round_pack`, `lzc50` |
| `rtl/rv64r_core.sv` | the top: pipeline registers (as structs) and stage logic, assertions |
| `rtl/rv_decoder.sv` | ID decoder |
| `rtl/int_regfile.sv`, `rtl/fp_regfile.sv` | register files |
| `rtl/hazard_unit.sv` | forwarding selects, load-use stall |
| `rtl/int_alu.sv` | integer ALU and branch comparator |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | binary32 multiplier and adder |
| `rtl/fcsr.sv` | `frm` / `fcsr` CSR |
| `rtl/r_ex_stage.sv` | rented execution stage (accumulator and APR control) |
| `rtl/apr.sv` | architectural pipeline register and its zero/accumulate multiplexer |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_fp_ref.sv` | reference binary32 arithmetic via `real`, with its own rounding to binary32 |
| `tb/tb_rv_asm.sv` | instruction encoders used to write test programs |
| `tb/tb_conv_harness.sv` | the core, a behavioural memory, a convolution program generator, a checker |
| `tb/tb_rv64r_core.sv` | end-to-end test at the core's default parameters |
| `tb/tb_workload_cnn.sv` | first convolution layers of LeNet-5, ResNet-20 and a scaled MobileNet-V1 |

The core's ports:

* `imem_addr` / `imem_rdata`: instruction fetch.
* `dmem_req`, `dmem_we`, `dmem_addr`, `dmem_be[7:0]`, `dmem_wdata[63:0]`,
  `dmem_rdata[63:0]`: data access.
* `halted`, `retire`: status.

Both memory ports expect the answer in the same cycle. To place the core behind a
cache or a bus with latency, add a stall input that freezes the pipeline registers.
That input does not exist yet.

## Measured behaviour

Every test program is generated by `tb_conv_harness`. It follows the paper's loop
nest:

```
Output[i][j/S][k/S] += Input[l][j+m][k+n] * Filter[i][l][m][n]
```

The nest has no padding. Each layer is run twice: once in R-extension form (listing
(c) of the paper) and once in F form (listing (a)). Inputs are random floats. Every
output is compared bit for bit with a reference that rounds after each multiply and
each add, in the same order as the hardware. The cycle counts below come from
simulation of this RTL with the single-cycle memory model:

| layer | MACs | R: cycles / retired / mem accesses | F: cycles / retired / mem accesses |
|---|---|---|---|
| LeNet-5 conv1: 1×32×32, 6 filters 5×5 | 117,600 | 1,393,450 / 1,040,652 / 239,904 | 1,854,442 / 1,384,044 / 470,400 |
| ResNet-20 conv1: 3×32×32, 16 filters 3×3, no padding | 388,800 | 5,071,798 / 3,905,400 / 792,000 | 6,598,198 / 5,043,000 / 1,555,200 |
| MobileNet-style: 3×32×32, 8 filters 3×3, stride 2 | 48,600 | 634,390 / 488,592 / 99,000 | 825,190 / 630,792 / 194,400 |

The R form needs about 25% fewer cycles and retired instructions, and half the data
accesses. IPC is about the same for both forms (about 0.75–0.77). In this pipeline
both loops lose cycles to load-use bubbles (one per term in R form, two in F form)
and to the two bubbles of every taken branch.

The paper's own numbers come from a gem5 model with caches and DRAM (Table II of the
paper). They show an IPC gain as well: 0.666 → 0.847 on LeNet. That gain depends on
the memory system, which this RTL does not include.

The paper also reports an FPGA build (Xilinx xcvu095) that differs from its
`fmac.s` baseline by −1.76% LUTs and +1.63% flip-flops. Its pipeline and FP IP differ
from this code, so those numbers say nothing about this RTL.

## Simulating

Everything runs with plain Verilator 5 from the repository root. Packages are listed
explicitly; everything else is found with `-y`:

```sh
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rext_pkg.sv tb/tb_fp_ref.sv tb/tb_rv_asm.sv tb/tb_rv64r_core.sv \
    --top-module tb_rv64r_core
./obj_dir/Vtb_rv64r_core
```

Replace `tb_rv64r_core` with any other `tb_*` module to run that test. Each prints
`TB_RESULT checks=N failures=M` and stops on its own watchdog if it hangs.

`tb_rv64r_core` takes about a second. `tb_workload_cnn` takes about half a minute.
Both report how often each mechanism fired:

* load-use stalls and branch redirects;
* forwards from MEM and from WB;
* APR accumulates and clears;
* back-to-back `rfmac.s`, and `rfsmac.s` right behind `rfmac.s`;
* forwarding of the `rfsmac.s` value;
* `frm` changes.

A mechanism that never fires counts as a failure.

To try other layer shapes, instantiate `tb_conv_harness` with your own `M`, `C`,
`HIN`, `WIN`, `HF`, `WF` and `S`. `DIRECTED=0` skips the directed tests. The
harness's memory is 1 MiB, so inputs and outputs must fit below the fixed base
addresses in that file.

## What follows the paper, and what does not

Taken from the paper:

* the two instructions, their encodings and MASK/MATCH values;
* multiply in EX and accumulate in MEM (R_EX);
* the 32-bit APR on the MEM/WB boundary, with its multiplexer choosing the new sum
  for `rfmac.s` and zero for `rfsmac.s`, and its outputs to R_EX and to the register
  file;
* the rounding mode held in a CSR;
* the five-stage in-order organisation;
* RV64: the paper's results are for RV64R. Its FPGA table is labelled RV32R; this
  code uses XLEN = 64.

Choices made here where the paper is silent:

* the integer and FP instruction subsets;
* forwarding, load-use interlock and branch handling;
* single-cycle memory ports in place of the paper's simulated 512 KB L1 caches and
  DDR3 memory;
* the FP units' insides, no exception flags;
* `rfmac.s` rounding the accumulate step with its own rm;
* reset values: all registers, the APR and `frm` reset to zero / RNE;
* `rfsmac.s` reads the APR in MEM rather than in ID.

Not implemented:

* the caches and DRAM of the paper's simulation setup;
* the baseline `fmac.s`;
* the vector and integer-MAC variants, which the paper mentions only as possible
  extensions;
* the compiler-side changes.
