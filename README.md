# SAL-PIM logic in SystemVerilog

SAL-PIM is a processing-in-memory (PIM) scheme for HBM2 that runs the whole
of a GPT-style text generator (matrix-vector products, attention, softmax,
layer normalisation, GELU) inside the memory stack. Three ideas carry it:

* **Subarray-level ALUs.** Each bank gets several small ALUs (S-ALUs), each
  sitting on its own segment of the bank's global bit-lines (GBLs). When the
  GBL switches between segments are opened, every S-ALU reads its own group
  of subarrays in the same column cycle, so a bank delivers `P_SUB` words per
  column command instead of one.
* **Non-linear functions by table lookup and linear interpolation.** A
  function is split into 64 sections. A slope `W` and an intercept `B` per
  section are stored in four DRAM subarrays whose column-select wiring was
  changed so that every MAT can read a different column at once. Sixteen
  inputs are then turned into `W*x + B` with one multiply and one add
  command on an ordinary S-ALU.
* **A channel-level ALU on the buffer die.** The C-ALU adds up the partial
  results of the banks (or reduces a vector to a scalar) and broadcasts the
  result back to every bank, so no intermediate data leaves the stack.

This repository holds synthesizable RTL for that logic: the S-ALU, the
bank-level unit, the LUT-embedded subarray and its column driver and
selector, a bank, a pseudo-channel with its C-ALU slice, the buffer-die
channel interconnect and the top level of the stack. The ordinary DRAM cell
arrays, the DRAM periphery and the host memory controller are not part of
the RTL; the top level exposes their connections as ports.

## 1. Organisation and sizes

| Level | Default | Contents |
|---|---|---|
| stack (`salpim_top`) | 8 channels x 2 pseudo-channels = 16 | channel interconnect |
| pseudo-channel (`salpim_pch`) | 16 banks | shared 256-bit data bus, one C-ALU slice (`c_alu`) |
| bank (`salpim_bank`) | 64 subarrays of 512 rows x 1 KB | `P_SUB` = 4 S-ALUs, bank-level unit, 4 LUT-embedded subarrays |
| subarray group | 15 ordinary subarrays | one S-ALU on the group's GBL segment |
| S-ALU (`s_alu`) | 8 shared MACs | 16 x 32-bit registers |
| LUT-embedded subarray (`lut_subarray`) | 512 rows, 16 MATs x 32 columns x 16 bit | per-MAT column select |

A channel's C-ALU is the pair of slices of its two pseudo-channels, so a
channel has two 16 x 16-bit vector registers and two 16-bit scalar registers.
With the defaults there are 4 x 16 = 64 S-ALUs per pseudo-channel and 128 per
channel.

Everything moves in 256-bit words of sixteen 16-bit lanes (`vec_t` in
`salpim_pkg`): one column access of a 1 KB row through the GBLs, one load of
the bank-level register, one write of the C-ALU vector.

## 2. Fixed-point conventions

Data are 16-bit two's-complement fixed-point numbers; the position of the
binary point is not fixed by the hardware. S-ALU registers are 32 bits wide,
so a product of two Q*m* numbers keeps 2*m* fraction bits without loss. Two
command fields align the formats:

* `alu.shl` shifts the memory operand (and, for element-wise add, the
  bank-register operand) left before an add or a max, so that a 16-bit value
  with *m* fraction bits can be added to a product with 2*m*;
* `shamt` shifts a register right on write-back, and the low 16 bits are
  written ("shift and truncate"). The same field sets the bit position used
  by the LUT decoders (section 4).

All adders wrap around; nothing saturates.

## 3. The S-ALU and its shared MACs

Per lane *l* (operand 0 = memory word from the GBL, operand 1 = word from the
bank-level unit, operand 2 = the S-ALU register):

| `alu.op` | effect |
|---|---|
| `ALU_ADD`, `src_reg = 0` | `reg = (mem <<< shl) + (bank <<< shl)` |
| `ALU_ADD`, `src_reg = 1` | `reg = reg + (mem <<< shl)` (intercept step of interpolation) |
| `ALU_MUL` | `reg = mem * bank` |
| `ALU_MAC` | `reg = reg + mem * bank` |
| `ALU_MAX` | `reg = max(reg, mem <<< shl)` (for the maximum subtracted before `exp` in softmax) |

Same-bank column commands come at most every tCCDL = 4 ns (250 MHz), while a
MAC in the DRAM periphery can run at 500 MHz. The S-ALU therefore has only 8
multiply-add units for its 16 lanes and processes a word in two cycles of the
500 MHz clock: lanes 0-7 in the cycle the command arrives (straight from the
GBL), lanes 8-15 in the next cycle (from a copy taken at the first edge).
`salu_done` is high in that second cycle. A second command to the same S-ALU
may arrive two cycles after the first, which is exactly tCCDL; an assertion
catches violations.

## 4. Input feeding: two ways to multiply a matrix by a vector

The bank-level register holds 16 words. It feeds all S-ALUs of its bank in
one of two ways (`alu.bcast`):

* **broadcast** (`bcast = 1`): word `bidx` goes to every lane. With `ALU_MAC`,
  lane *l* accumulates `sum_k W[k][l] * x[k]` over successive memory words:
  the memory word holds 16 different outputs' weights for one input, so each
  register lane ends up holding one output element.
* **element-wise** (`bcast = 0`): word *l* goes to lane *l*. With `ALU_MAC`,
  lane *l* accumulates products of the same input element, the memory word
  holds 16 inputs of one output, and the 16 lanes are partial sums that the
  C-ALU's adder tree finishes.

Having both directions is what lets `Q x K^T` and `S x V` use the same
stored `K` and `V` matrices without transposing them: `K` and `V` are
appended bank by bank as tokens are generated and read in whichever
direction the product needs.

## 5. Linear interpolation through LUT-embedded subarrays

### Tables

A function's range is cut into 64 equal sections. For section *s* the
table holds a slope `W[s]` and an intercept `B[s]`, so `f(x) ~ W[s]*x + B[s]`.
The four LUT-embedded subarrays of a bank are used as two pairs:

| subarray | holds |
|---|---|
| 0 | `W[0..31]` |
| 1 | `W[32..63]` |
| 2 | `B[0..31]` |
| 3 | `B[32..63]` |

Within the chosen row, column *c* of **every** MAT holds entry *c* of the
table (each MAT row of 512 bits holds 32 entries), because each MAT serves one
lane. One row per function suffices, so a 512-row LUT subarray can hold 512
functions; GELU, `exp`, square root and reciprocal use four rows.

### Section decoding

The bank-level unit turns each register word `x` into a section number:

```
v    = x >>> shamt                    (arithmetic shift: picks the bit position)
v    = clamp(v, -32, 31)
sect = v + 32                         (0..63)
column select of MAT l  = one-hot(sect[4:0])   (16 decoders, 5 -> 32)
LUT-subarray select     = one-hot(sect[5])     (16 decoders, 1 -> 2)
```

For inputs in Q*.*8 and a table over [-4, 4) (section width 1/8 = 32 LSB),
`shamt = 5`. Inputs outside the table range use the first or last section.

### Column selects and the selector

In an ordinary subarray all MATs share one column-select bus. The LUT
column driver (`lut_column_driver`) instead drives each MAT's 32 select
lines separately: from the decoded column address for conventional reads and
writes (all MATs the same column, used to load tables) or from the bank-level
unit's decoders in LUT mode. The four LUT subarrays are open together; the
selector (`lut_selector`) connects, lane by lane, subarray 0 or 1 (multiply
step) or 2 or 3 (add step) to the GBLs, as chosen by that lane's top section
bit.

### Command sequence

One interpolation of 16 values on S-ALU `g`, with the table row open:

```
LUT_ACT   row=<function row>              (once; opens all four LUT subarrays)
BREG_LD_MEM grp=g row/col=<source>        bank register <- 16 inputs x
LUT_MUL   grp=g shamt=<bit position>      reg = W[sect(x)] * x
LUT_ADD   grp=g shamt=<bit position> alu.shl=<fraction bits>
                                          reg = reg + (B[sect(x)] <<< shl)
SALU_WB   grp=g row/col=<destination> shamt=<fraction bits>
...repeat for the next 16 inputs...
LUT_PRE
```

The source, destination and table rows are all open at the same time
(different subarrays), so activation and precharge are paid once for the
whole vector instead of once per element. Only one S-ALU of a bank
interpolates at a time because the table output uses the joined GBL.

## 6. Merging across banks: C-ALU and interconnect

All banks of a pseudo-channel execute the same command in all-bank mode
(`all_bank = 1`), so the partial results of a matrix-vector product end up
spread over the banks. The C-ALU slice has 16 adders that can be wired two
ways:

* **accumulate** (`CALU_ACC`): `vec[l] += bus[l]`. With `bus_src = BUS_BANK`
  the addressed bank reads a word onto the bus; reading the same address of
  each bank in turn sums the banks' partial results.
* **reduce-sum** (`CALU_RSUM`): 15 of the adders form a 4-level tree over the
  vector register; the sum goes to the scalar register (mean and variance of
  layer normalisation, the softmax denominator).

Either register is broadcast back by putting it on the bus (`BUS_CVEC`, or
`BUS_CSCL` for the scalar replicated in all 16 lanes) together with
`BREG_LD_BUS all_bank=1`, which loads every bank's register at once.

The channel interconnect copies the C-ALU vector of one pseudo-channel
(`ic_src`, on `ic_load`) into a register that every pseudo-channel can put on
its bus (`BUS_IC`). This is how a layer's output vector reaches all channels
before the next matrix-vector product.

## 7. Command interface

Each pseudo-channel takes one `pim_cmd_t` per clock (`salpim_pkg.sv`):

| field | use |
|---|---|
| `op` | command (below) |
| `bus_src` | what drives the data bus this cycle: host, addressed bank, C-ALU vector, C-ALU scalar, interconnect |
| `all_bank`, `bank` | all banks, or one |
| `all_grp`, `grp` | all S-ALUs in parallel (GBL segments separated) or one |
| `row`, `col` | DRAM address for the subarray groups and LUT subarrays |
| `lsub` | LUT subarray written by `LUT_WR` |
| `shamt` | write-back right shift; section decoder right shift |
| `clr_min` | `SALU_CLR` to the most negative value (before a max) |
| `alu` | `op`, `bcast`, `bidx`, `src_reg`, `shl` of the S-ALU |

| `op` | action |
|---|---|
| `BREG_LD_MEM` | bank register <- word of group `grp` at (`row`,`col`) |
| `BREG_LD_BUS` | bank register <- data bus |
| `SALU` | S-ALU operation on the word at (`row`,`col`) of each addressed group |
| `SALU_CLR` | clear S-ALU registers |
| `SALU_WB` | write S-ALU registers, shifted and truncated, to (`row`,`col`) |
| `LUT_ACT`, `LUT_PRE` | open/close `row` in all four LUT subarrays |
| `LUT_WR` | write bus word to LUT subarray `lsub` at column `col` |
| `LUT_MUL`, `LUT_ADD` | interpolation steps on S-ALU `grp` |
| `BANK_RD` | addressed bank puts group `grp`'s word on the bus (host read) |
| `CALU_CLR`, `CALU_ACC`, `CALU_RSUM` | C-ALU operations |

Every command takes effect at the next clock edge. The host must keep DRAM
timing (tRCD, tRP, tWR, ...) itself and must space S-ALU commands to the same
S-ALU by at least 2 cycles.

**DRAM cells.** Subarray group *g* of bank *b* in pseudo-channel *p* is
reached through `mem_req[p][b][g]` (`rd`, `wr`, `row`, `col`, `wdata`) and
`mem_rdata[p][b][g]`. The read word is expected in the same cycle, as from a
row already held in the sense amplifiers; writes are taken at the clock
edge. Opening and closing rows of these subarrays is left to the controller.

## 8. What follows the paper and what does not

Taken from the paper: the stack organisation and all sizes in section 1;
16-bit data and 32-bit S-ALU registers; 8 shared MACs working two passes at
twice the column rate; the four S-ALU operations and their operand sources;
the two feeding methods; 64 sections with 16 5-to-32 column decoders and 16
1-to-2 sub-select decoders; per-MAT column selects; four LUT subarrays opened
together with slopes in the first pair and intercepts in the second; the
right shifters that choose the bit position; the C-ALU's two adder
configurations and its registers; broadcast of C-ALU results to all banks.

Choices of this design, where the paper gives no detail:

* the command word, the bus multiplexer, the DRAM-cell port, and the single
  500 MHz clock for all logic;
* the second form of `ALU_ADD` (adding to the register) for the intercept
  step; the operation table lists addition with the bank register, the
  interpolation flow adds the intercept to the product;
* operand alignment `shl`, register clear, wrap-around arithmetic;
* offset-binary section numbering and clamping outside the table range;
* the interconnect as a single broadcast register;
* the LUT subarray's row buffer is written back to the cells at precharge.

Where the paper's numbers disagree, this RTL takes 16 banks per
pseudo-channel and 4 S-ALUs per bank (128 S-ALUs per channel, as in the area
table, rather than the 64 stated in the text), and 8 channels in total (one
C-ALU per channel on the buffer die).

Not built: the DRAM cell arrays, sense amplifiers, row/column decoders, write
drivers and IO sense amplifiers, TSVs, the HBM2 PHY, and the memory
controller that schedules commands. The paper's evaluation is done with a
cycle-level simulator and GPT-2 medium; this RTL provides the datapath those
commands would drive, not a model of the schedule.

## 9. Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.
With Verilator 5 (the package has to be read first):

```
verilator --binary --timing --assert rtl/salpim_pkg.sv \
    $(ls rtl/*.sv | grep -v salpim_pkg) \
    tb/tb_salpim_top.sv --top-module tb_salpim_top -o sim
./obj_dir/sim
```

For a unit test, list the files it needs in the same way and name its
testbench as the top module; the bank test also needs
`tb/dram_cells_model.sv`, a behavioural stand-in for the DRAM cells that
the S-ALUs read and write.

| testbench | size | what it checks |
|---|---|---|
| `tb_s_alu` | default | all operations against a 32-bit reference, two-cycle word timing |
| `tb_bank_level_unit` | default | register load, both feeds, section decoding including clamping |
| `tb_lut_column_driver`, `tb_lut_selector` | default | select paths |
| `tb_lut_subarray` | 8 rows | conventional writes, per-MAT reads, precharge restore |
| `tb_c_alu` | default | accumulate, reduce-sum, clear |
| `tb_channel_interconnect` | 8 sources | source selection and hold |
| `tb_salpim_bank` | 4 LUT rows | matrix-vector product on 4 parallel S-ALUs, single-group MAC, full interpolation, max, add, read |
| `tb_salpim_pch` | **full pseudo-channel**: 16 banks x 4 S-ALUs, 512-row LUTs | per-bank inputs, all-bank GEMV, C-ALU merge, reduce-sum and broadcasts |
| `tb_salpim_top` | 2 channels x 2 pseudo-channels x 2 banks x 2 S-ALUs | end-to-end layer fragment, every mechanism counted |

The arithmetic and timing do not depend on the sizes. The largest design
simulated is one full-size pseudo-channel (64 S-ALUs, about 85 s to build
with Verilator and under a second to run). The whole stack at its default
size (8 channels x 2 pseudo-channels, 1024 S-ALUs) was not simulated: its
Verilator model needed about 10 GB of memory and more than 20 minutes of C++
compilation. Since the pseudo-channels only meet in the interconnect, which
the reduced top test exercises, the missing coverage is one of scale, not of
function.
