# SPEED: a RISC-V vector processor with a multi-precision tensor unit

Quantised neural networks mix 16-, 8- and 4-bit layers. A plain RISC-V vector
processor handles them poorly for two reasons. Its lanes multiply one element
per lane slot at a fixed element width. And every convolution has to be written
as many small vector instructions that reload the same inputs and weights from
memory. SPEED keeps the RVV structure (decode, sequencer, load/store units,
lanes that each hold a slice of the vector register file) and adds two things:

* A **multi-precision tensor unit (MPTU)** in every lane. It is a small
  systolic array whose processing elements (PEs) each hold sixteen 4-bit
  multipliers. One PE does one 16-bit, four 8-bit or sixteen 4-bit
  multiply-accumulates per cycle, so throughput scales with 1/precision.
* **Four customised instructions.** `VSACFG` sets precision, kernel size and
  dataflow. `VSALD` loads one operand and broadcasts it to every lane. `VSAM`
  and `VSAC` run a whole multi-stage matrix or convolution computation. One of
  these instructions reuses inputs or weights across its stages inside the
  MPTU, instead of reloading them from the register file or from memory.

This repository holds synthesizable SystemVerilog for the vector side of such a
system. It has self-checking testbenches for every block and one end-to-end
testbench that runs a small program through the whole processor.

## Block structure

```
 scalar core ──instr, rs1, tag──▶ VIQ ──▶ VIDU ──▶ VIS ──┬──▶ VLDU ◀──┐
      ▲                                   (ID)   (IS/CO) ├──▶ VSTU ──┤ 64·LANES-bit
      └───────────── response (tag, result) ◀────────────┤           │ memory port
                                                         └──▶ lane 0..LANES-1
                                                              ├ lane_sequencer
                                                              ├ vrf (8 banks)
                                                              ├ valu
                                                              └ mptu ─ operand_requester
                                                                     ─ queues
                                                                     ─ tensor_core ─ mp_pe
```

| file | role |
|---|---|
| `speed_pkg.sv` | encodings, decoded-instruction record, VSACFG configuration, dataflow stage plans |
| `speed_top.sv` | the processor: instruction queue, decoder, sequencer, load/store units, lanes, memory-port arbiter |
| `vidu.sv` | decode unit. Holds the configuration register written by `VSACFG` and vl/vtype, and reports completions |
| `vis.sv` | sequencer. Checks register hazards, issues to units, collects per-lane completion, commits |
| `vldu.sv`, `vstu.sv` | load unit (`VLE` sequential, `VSALD` broadcast) and store unit (`VSE`) |
| `lane.sv`, `lane_sequencer.sv` | one lane, and the control that runs ALU instructions word by word |
| `vrf.sv` | one lane's 4 KiB register slice: 8 single-ported banks, fixed-priority per-bank arbitration |
| `valu.sv` | SIMD integer ALU (add, sub, logic, min/max, shifts) at 8/16/32/64-bit elements |
| `mptu.sv` | tensor unit: queues, compute control, result collector, write-back with partial-sum addition |
| `operand_requester.sv` | the MPTU's address generator and read arbiter |
| `tensor_core.sv`, `mp_pe.sv` | the systolic array and its multi-precision PE |
| `vec_fifo.sv` | generic FIFO used for the instruction queue and for the internal queues |

Default configuration: 4 lanes, a 2×2 tensor core per lane and a 16 KiB
register file in total (32 registers × 512 bytes; 512 64-bit words per lane).
`LANES`, `TILE_R` and `TILE_C` are parameters of `speed_top`. The intended
design space is 2, 4 or 8 lanes, and tiles of 2, 4 or 8 in each direction. The
most area-efficient point reported for this architecture is 4 lanes with an
8×4 tile.

## Instructions

Official RVV instructions that are decoded: `VSETVLI`; `VLE`/`VSE` with 8-,
16-, 32- and 64-bit elements; and the integer OPIVV operations `vadd`, `vsub`,
`vand`, `vor`, `vxor`, `vmin[u]`, `vmax[u]`, `vsll`, `vsrl` and `vsra`.
Anything else completes at once with the *illegal* flag in its response.

The customised instructions:

| instruction | encoding | fields |
|---|---|---|
| `VSACFG rd, zimm, uimm` | `101` · zimm[8:0] · uimm[4:0] · `111` · rd · `1010111` | zimm[1:0] precision (0: 16 b, 1: 8 b, 2: 4 b); zimm[5:2] kernel size 1..15; zimm[8:6] stages N−1; uimm[1:0] dataflow (0 MM, 1 FFCS, 2 CF, 3 FF) |
| `VSALD vd, (rs1)` | funct7 · `00100` · rs1 · width · vd · `0000111` | width as RVV (`000` 8 b … `111` 64 b); `001` = 4-bit elements |
| `VSAM vd, vs1, vs2` | `101010` · vm · vs2 · vs1 · `010` · vd · `1010111` | vs1 inputs, vs2 weights, vd results |
| `VSAC vd, vs1, vs2` | `101110` · vm · vs2 · vs1 · `010` · vd · `1010111` | matrix × vector form |

The fixed bits (the top three bits of `VSACFG`, the lumop of `VSALD`, and the
funct6/funct3 of `VSAM`/`VSAC`) follow the published encoding. How the nine
zimm bits and five uimm bits split into fields is this design's own choice,
and so is the 4-bit width code.

`VSACFG` and `VSETVLI` complete in the decoder. Their responses carry the new
configuration or the new vl. Every decoded instruction takes the configuration
with it, so a later `VSACFG` changes only later instructions. Switching
precision therefore costs no pipeline drain.

## Where data lives

**Vector registers across lanes.** Register `v` occupies local words
`v·16 … v·16+15` of every lane. A vector operand is a sequence of 64-bit words.
Word `w` lives in lane `w mod LANES`, at local word `w / LANES` of the register
group (the *sequential allocation* used by `VLE`, `VSE` and the ALU).
`VSALD` instead writes every word `j` into every lane at local word `j`, so
each lane holds the complete operand.

**MPTU operands.** An MPTU instruction works only on its own lane's registers.
Inputs are normally loaded with `VSALD` (the same in every lane) and weights
with `VLE` (each lane gets different output channels). The lanes then compute
different outputs from shared inputs. Inside a lane, with `L` steps per stage
(`L` = vl for MM/VSAC, kernel size² for the convolution dataflows), the words
are laid out as:

```
input  block b, step k, row r     : vs1·16 + b·L·TILE_R + k·TILE_R + r
weight block b, step k, column c  : vs2·16 + b·L·TILE_C + k·TILE_C + c      (VSAC: vs2·16 + k)
output block o, word j            : vd·16  + o·(TILE_R·TILE_C/2) + j        (two 32-bit results per word,
                                                                             result index p = r·TILE_C + c)
```

A 64-bit operand word packs one 16-bit element, four 8-bit elements or sixteen
4-bit elements (element `e` at bits `[e·P +: P]`). One step is therefore one
word per PE row and one word per PE column, and each PE adds the dot product of
its two words to its accumulator. All elements are signed.

**Register bank mapping.** Word `a` of a lane sits in bank `(a + a/16) mod 8`,
row `a/8`. The same offset in consecutive registers therefore falls in
different banks. An ALU instruction reads both of its operands in one cycle,
while the load unit, the store unit and the MPTU use other banks.

## The tensor unit and its dataflows

This is the core of the design. Each `VSAM` runs several *stages*. A stage is
`L` steps into the tensor core, followed by the emission of one
`TILE_R × TILE_C` tile of 32-bit results. The four dataflows differ in which
operand block each stage uses and what happens to its results. With `N` set
by `VSACFG`, the plans are:

| dataflow | use | stages | stage s reads | result |
|---|---|---|---|---|
| MM (matrix multiplication) | Transformer layers | 2N | input block ⌊s/N⌋, weight block s | output block s mod N; the second half adds the first half's partial sums |
| FFCS (feature map first, channel second) | standard CONV | 2N | input block s, weight block ⌊s/N⌋ | output block s mod N; the second half accumulates |
| CF (channel first) | point-wise CONV | N | input block s, weight block s | accumulated inside the PEs, one output block |
| FF (feature map first) | depth-wise CONV | N | input block s, weight block 0 | one output block per stage |

The reference formulas that the testbenches check are, with `P(i, w)` the tile
of dot products of input block `i` and weight block `w` over `L` steps:

```
MM   out[o] = P(in0, w[o]) + P(in1, w[N+o])
FFCS out[o] = P(in[o], w0) + P(in[N+o], w1)
CF   out    = Σs P(in[s], w[s])
FF   out[o] = P(in[o], w0)
VSAC out[r] = Σk in[k][r] · w[k]      (TILE_R results, column 0 of the array)
```

**Reuse through the operand queues.** The input queue and the weight queue
each have two banks of `QDEPTH` (32) steps. The operand requester walks the
stage plan. A stage whose inputs (or weights) are the same block as the
previous stage's reads no new data, and the compute control reads the same bank
again. This is how MM reuses its inputs over N weight blocks, and how
FFCS and FF reuse their weights over feature-map blocks. A bank is refilled
only after every stage that reads it has been consumed. While a stage
computes out of one bank, the requester fills the other bank for the next
stage, so requesting and computing overlap.

**Accumulation.** A stage that accumulates (the second half of MM and FFCS)
queues an accumulation job. The requester reads that output block's partial
sums from `vd` into the acc queue. It does this only once the earlier stage
that produced them has been written back, so no stale value is read. The read
arbiter serves accumulation reads first, then weights, then inputs. The
write-back adds the acc-queue word to the two results it writes.

**Compute control and result timing.** Step `k` of a stage enters the array as
soon as step `k` of both queue banks is present. Inside the array, row `r` is
delayed by `r` cycles and column `c` by `c` cycles, so the two operands meet in
PE(r,c). The PE registers its operands, forwards them to its right and lower
neighbours, and accumulates. PE(r,c) presents its result `r + c + 2` cycles
after the step that carried the *last* flag. The whole tile is captured in
parallel by the collector. The last step of the next tile is held back until
`TILE_R + TILE_C + 1` cycles have passed and the result queue (two tiles) has
room, so the array itself never stalls. The write-back then drains the result
queue into `vd` through the lane's MPTU write port.

**Kernel sizes.** A stage must fit into one queue bank (`L ≤ 32`). Kernels up
to 5×5 run directly. Larger kernels (7×7 and above) have to be split into
sub-kernels by software, the same way the architecture splits kernels above
15×15. An assertion in the operand requester checks that `L` is between 1
and `QDEPTH`.

## The multi-precision PE

Every multiplier takes two 4-bit digits and a *signed* flag for each. It
multiplies them as 5-bit signed numbers. A 16-bit product is the sum of the
16 digit products `x_i·w_j·2^(4(i+j))`, with only the top digit of each
operand signed. In 8-bit mode the multipliers form four 2×2 digit groups, one
per element pair. In 4-bit mode every multiplier is one element product with
both digits signed. The 16 products of a cycle are summed and added to the
32-bit accumulator (wrapping), which starts again at zero when the *first*
flag is set.

## Front end: decode, hazards, completion

The sequencer has one slot per unit: load, store, ALU and MPTU. Each slot
holds the running instruction's register read mask and write mask. The
decoder derives those masks from vl, the element width and, for MPTU
instructions, from the stage plan. An instruction issues when:

* its unit is free;
* its registers do not overlap a running instruction's with a write involved
  (RAW, WAR and WAW);
* for a load or store, no memory instruction of the other kind is running.

Lane instructions complete when every lane has reported done. One instruction
commits per cycle, and its tag goes back through the decoder to the scalar
core. So an ALU instruction can run under a long `VSAM`, and a load of the
next operands can run alongside it if the registers differ.

The scalar-core port (`acc_req_*`) takes the instruction word, the value of
its `rs1` and a 4-bit tag. Every instruction produces exactly one
`acc_resp_valid_o` pulse with that tag. Responses can come back out of order
(configuration instructions complete early).

The memory port carries one beat of `LANES` 64-bit words. Reads are answered
in order by `mem_rsp_valid_i`. Writes carry a byte strobe and get no
response. The load unit keeps up to four reads in flight.

## Departures from the described architecture

* The four-PE example of the architecture shifts results horizontally out of
  the array. Here all PE results go in parallel to a collector, which packs
  them into the result queue. The emit gap described above replaces that
  shifting.
* The acc queue is drawn as feeding the tensor core. Here its partial sums
  are added to the finished results at write-back, which gives the same sums
  and keeps the PEs free of a second accumulator input.
* The register file is banked with a skewed bank map. The architecture
  describes "three partitions" accessed concurrently.
* The split of the `VSACFG` immediate fields, the number of stages per
  `VSAM` (N), the operand layout in the registers, the queue depths and the
  memory bus are choices of this design. The architecture leaves them open.
* Operand queues hold 32 steps, so kernels above 5×5 need decomposition in
  software. The architecture decomposes only above 15×15.
* The scalar core and the external memory are not part of the RTL. Their
  interfaces are ports of `speed_top`. The testbench acts as the scalar core,
  and `tb/ext_mem_model.sv` is a behavioural memory with random latency and
  back-pressure.
* Only the integer RVV subset listed above is decoded. There are no masks,
  strides, fixed-point or floating-point operations, and no reductions
  outside the MPTU. LMUL is honoured for vl; fractional LMUL counts as 1.

## Verification

Each testbench in `tb/` checks its block against values that it computes
itself, and ends by printing `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_mp_pe` | 300 random dot products at each precision, including the most negative digits; forwarding after 1 cycle; result exactly 2 cycles after *last* |
| `tb_tensor_core` | a 3×2 array: every PE's dot product and its `r+c+2` latency |
| `tb_vec_fifo` | random push/pop/flush against a queue model |
| `tb_vrf` | grants computed from the bank map and priority; read data; bank skew |
| `tb_valu` | all operations at all element widths |
| `tb_mptu` | MM, FFCS, CF, FF and VSAC at 16/8/4 bit with random N and L against the formulas above; random VRF grant stalls; reuse and accumulation events |
| `tb_lane` | ALU over a lane's share of a vector, an instruction with no word in the lane, and MM through the lane |
| `tb_vidu` | every instruction form, masks, responses, and a commit that collides with a configuration response |
| `tb_vis` | RAW stall, ALU under MPTU, completion only when every lane is done, load/store order, random traffic with no overlapping issue |
| `tb_speed_top` | the default configuration end to end |

`tb_speed_top` runs the top at its default parameters. The program is 44
instructions. It does 8-bit MM, 16-bit FFCS with a 3×3 kernel, 4-bit CF,
8-bit FF with a 3×3 kernel, a 16-bit VSAC, a 32-bit vector add, an illegal
word, and stores all the results. It compares every stored word and every
response with its own sequential model. It also counts register hazard
stalls, instruction-queue back-pressure, input reuse, weight reuse,
accumulation, precision switches, broadcast loads and illegal instructions,
and fails if any of these never happens. The program takes about 650 cycles.

To simulate with Verilator, for example the whole processor:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb --top-module tb_speed_top \
    rtl/speed_pkg.sv tb/tb_speed_top.sv
./obj_dir/Vtb_speed_top
```

Replace the top module and the testbench file to run a block test; `-y`
finds the sub-modules by name.

## Known limits

* Cycle-level performance is not calibrated against silicon figures. The
  testbenches check correctness and the latencies of the PE and the array,
  not end-to-end throughput.
* The register file is written as an array of flip-flops. A chip would use
  SRAM macros with the same one-cycle read latency.
* Verilator reports `SYNCASYNCNET` on `rst_ni`. It is used both as the
  asynchronous reset of the flip-flops and in the `disable iff` of the
  assertions. This is intended.
