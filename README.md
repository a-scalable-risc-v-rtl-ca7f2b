# SPEED: a RISC-V vector processor with a multi-precision systolic array per lane

SPEED extends a RISC-V vector (RVV 1.0) processor for quantized DNN inference.
A standard vector lane has only an element-wise ALU. Here each lane also gets a
small systolic array whose processing elements (PEs) can split their multipliers
to run 16-bit, 8-bit or 4-bit integer MACs. Three custom instructions drive it:

* `VSACFG` sets the precision and the dataflow strategy.
* `VSALD` is a load that **broadcasts** the same data to every lane.
* `VSAM` runs one multiply-accumulate pass of the array over operands already
  in the vector register file (VRF).

A convolution is mapped like this. Input feature-map data goes to every lane
with `VSALD`. Each lane gets its own output channels' weights with an ordinary
ordered `vle`. Each lane's 4x4 array then computes a 4 (output rows) x 4
(output channels) tile of outputs. The lanes work on different output channels.

This RTL implements that processor in synthesizable SystemVerilog. Its default
size is the evaluated configuration: 4 lanes, VLEN = 4096 bits and a 4x4 PE
array per lane. The paper gives the block structure, the instruction formats,
the PE's multiplier arrangement and the two dataflow strategies. Where it leaves
the internals open, this design uses the simplest working choice, and the file
headers say so.

## Block map

```
 host core ──instr+rs1──► instruction queue (speed_fifo) ──► decode (speed_vidu)
                                                               │
                                              sequencer (speed_vseq)
                        ┌──────────────────────────┼─────────────────────────┐
                 load unit (speed_vldu)   store unit (speed_vstu)     lanes 0..3 (speed_lane)
                  broadcast / ordered          ordered                     │
                        └────── 64-bit memory port (mem_*) ─┘              │
  lane:  lane sequencer (speed_lane_seq) ─ ALU (speed_alu)
         SAU (speed_sau): address generator (speed_sau_addrgen), input/weight/acc/result
                          queues (speed_fifo), SA core (speed_sa_core of speed_pe)
         request arbiter (speed_req_arbiter) ─► banked VRF (speed_vrf, 8 banks x 64 words)
```

`speed_top` is the processor. `speed_pkg` holds the shared types and encodings.
The host scalar core and the external memory are outside the design: their
signals are the top-level ports.

## Instructions

All instructions are 32 bits wide. The three custom formats keep the standard
RISC-V field positions:

| instr  | [31:29] / [31:25]            | [24:20]  | [19:15]   | [14:12] | [11:7]    | [6:0]   |
|--------|------------------------------|----------|-----------|---------|-----------|---------|
| VSALD  | funct7 [31:25]               | `00100`  | rs1 (base)| width   | vd        | 0000111 |
| VSACFG | `101` [31:29], zimm9 [28:20] |          | uimm5     | `111`   | rd        | 1010111 |
| VSAM   | `101010` [31:26], vm [25]    | vs2      | vs1       | `010`   | Acc Addr  | 1010111 |

The paper says only that precision and dataflow live in zimm9 and uimm5. This
design uses the following bit assignment:

* `zimm9[1:0]`: precision (0 = 16 bit, 1 = 8 bit, 2 = 4 bit).
* `zimm9[2]`: dataflow (0 = feature-map first, FF; 1 = channel first, CF).
* `zimm9[8:3]`: steps per VSAM (0 means 64).
* `uimm5`: number of CF stages that form one accumulation group (0 means 1).

The rd field of VSACFG is ignored. The funct7 and width fields of VSALD are also
ignored.

The standard RVV subset decodes these instructions:

* `vsetvli`: sets vl = rs1 and SEW = vsew. LMUL is ignored.
* unit-stride `vle` / `vse`: moves ceil(vl*SEW/64) words.
* `vadd/vsub/vand/vor/vxor.vv`

Any other instruction is dropped. Registers may run on into the following
registers, as with LMUL > 1. VSALD moves the same number of words as vle.

## Data layout

A **unified element** is one 64-bit word holding 1 x 16-bit, 4 x 8-bit or
16 x 4-bit signed operands. All of them come from consecutive input channels.
Operand k sits at bits `[k*w +: w]`. One vector register holds 16 words per
lane (4096 / 64 / 4). Register v starts at lane word address 16*v.

A VSAM has three register operands: vs1 (inputs), vs2 (weights) and Acc Addr.
It works through `steps` steps. In step t, in every lane:

* PE row r takes input word `vs1*16 + 4t + r`. Each lane holds the same copy,
  loaded by VSALD.
* PE column c takes weight word `vs2*16 + 4t + c`. Each lane holds its own
  weights, loaded by vle.

So vle word i lands in lane i mod 4, and software lays the weights out
interleaved by lane.

Each PE adds the dot product of its two words to a 32-bit accumulator. The 16
accumulators of a lane live in the 8 words at `Acc Addr*16`. PE (r,c) is number
n = 4r + c. Word n/2 holds it, in bits [31:0] when n is even and [63:32] when n
is odd.

## The multi-precision PE

The PE has sixteen 4-bit multipliers. Each is built 5x5 signed, so that a 4-bit
digit can enter sign-extended (the top digit of an operand) or zero-extended
(a lower digit).

* **16 bit:** multiplier 4i+j takes digit i of x and digit j of w. Its product
  is shifted left by 4(i+j). The sum is one 16x16 product.
* **8 bit:** four groups of four multipliers. Each group computes one 8x8
  product from the digit pairs of its byte. The sum is four MACs.
* **4 bit:** multiplier m takes digit m of both words, with no shift. The sum is
  sixteen MACs.

The sixteen shifted products are added together in the same cycle, and the
accumulator updates at the clock edge. Operands are signed two's complement.
The paper does not state signedness. The accumulator is 32 bits and wraps on
overflow.

## The SA core

The SA core is a 4x4 output-stationary systolic array. Rows are output rows of
the feature map; columns are output channels.

* Row r's input enters the array r cycles late and then moves one PE to the
  right per cycle.
* Column c's weight enters c cycles late and then moves one PE down per cycle.

So PE (r,c) sees step t at cycle t+r+c, and the last step leaves the array 6
cycles after it entered. Bubbles are allowed: a step missing from the queues
just travels through the array as an invalid slot. The accumulators are
preloaded two per cycle from the acc queue and read out in parallel.

## Operand requester, arbiter and VRF banks

This is the least obvious part of the design and the main limit on its
throughput.

Each lane's VRF has 8 single-port banks. Word a lives in bank a mod 8. A
per-lane **request arbiter** has 15 requester ports:

| port(s) | user                        |
|---------|-----------------------------|
| 0       | load buffer write           |
| 1       | store read                  |
| 2, 3, 4 | ALU read A, read B, write   |
| 5 ... 14| SAU: 4 input, 4 weight, accumulator read, result write |

Each cycle the arbiter grants at most one request per bank, in round-robin
order. Read data returns one cycle after the grant.

The SAU's requester issues all 8 operand reads of a step at once. It starts the
next step only after every read of the current step has been granted. A step
whose words have all returned goes into the input and weight queues (4 entries
each). The SA core takes one step per cycle whenever both queues hold one.

With the layout above, the inputs and the weights of a step fall in the same
four banks. A step therefore costs two bank cycles, and the array runs at about
half its peak. A 16-step 16-bit VSAM takes 67 cycles, counted from the moment
it is issued:

* preload 8 accumulator words;
* about 32 cycles of streaming;
* 6 cycles of drain;
* write back 8 words.

A layout that staggers the weights by 4 banks would remove the conflict. It is
not done here, so that the addressing stays as simple as the layout rule above.

## FF and CF: where partial sums live

One VSAM is one **stage**: `steps` unified elements of the reduction.

* **FF (feature-map first):** every VSAM reads Acc Addr into the array, runs,
  and writes the sums back. Partial results go through the VRF between stages.
  Software can then reuse the input data of the next, overlapping window that
  is already in the VRF.
* **CF (channel first):** `uimm5` stages form a group. The group's first VSAM
  reads Acc Addr. Its last VSAM writes Acc Addr back. The stages in between
  leave the partial sums inside the PEs. Acc Addr is not touched in between:
  the testbench checks that it still holds the bias after stage 1.

The sequencer counts the stages and tells the lane, with first/last flags,
whether to read and whether to write.

In both modes Acc Addr is read before the first stage. Software initialises it
with zeros or a bias.

## Sequencing and the rest of the datapath

The design is strictly in order and runs one instruction at a time. There is no
chaining and no overlap of loads with computation. The sequencer:

* executes `vsetvli` and `VSACFG` in one cycle;
* hands loads to the load unit and stores to the store unit;
* sends ALU operations and VSAMs to all lanes at once.

An instruction completes when every unit it went to reports done.

The load unit holds one memory read in flight at a time.

* In broadcast mode, it writes each word to all four lanes at the same address.
* In ordered mode, it writes word i to lane i mod 4, at address dst + i/4.

The lanes' 2-entry load buffers provide back-pressure. The store unit reads the
words back in the same ordered pattern.

The lane sequencer runs ALU operations one word at a time through the arbiter.
ALU instructions process ceil(words/4) words in every lane. This is
tail-agnostic: up to 3 words past vl may be overwritten.

## Interfaces and timing

* Clock `clk_i`. All flops reset asynchronously with active-low `rst_ni`. The
  VRF and FIFO storage arrays are not reset.
* Host side: `instr_valid_i` / `instr_ready_o` with `instr_i` and `rs1_i`.
  `idle_o` is high when the queue is empty and nothing is running.
* Memory side: `mem_req_o` is held until `mem_gnt_i`, with `mem_we_o`,
  `mem_addr_o` (a byte address, 8-byte aligned words) and `mem_wdata_o`. Read
  data returns on `mem_rvalid_i` / `mem_rdata_i`, any number of cycles after the
  grant.

## Parameters

| parameter | default | meaning                               | from |
|-----------|---------|---------------------------------------|------|
| NLANES    | 4       | lanes                                 | evaluated configuration |
| VLEN      | 4096    | vector length in bits                 | evaluated configuration |
| TILE_R    | 4       | PE rows per lane (output rows)        | evaluated configuration |
| TILE_C    | 4       | PE columns per lane (output channels) | evaluated configuration |
| NBANKS    | 8       | VRF banks per lane                    | this design |
| IQ_DEPTH  | 4       | instruction queue entries             | this design |

The SAU queues hold 4 entries each (4 x 64 bits for the result queue, one step
for the input and weight queues). The acc queue holds TILE_R*TILE_C/2 words.
The accumulators are 32 bits. TILE_R*TILE_C must be even.

## Departures from the described design

The following parts are simplified or left out.

* The request arbiter sits at the lane level and is shared with the ALU, load
  and store paths. In the paper's figure it sits inside the SAU.
* There is no chaining or overlap between instructions. Memory has one
  outstanding access.
* Only the small standard RVV subset above is implemented. There is no
  scalar-result path back to the host, no masking (vm is decoded but unused),
  no floating point, and no 32/64-bit SAU precisions.
* Throughput is about half the array's peak, because of the bank conflict
  described above.
* The bit packing of VSACFG, the VRF layout, the signedness and the accumulator
  width are this design's choices.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* `tb_speed_top` runs the whole processor at the default size. It covers an RVV
  ALU program, a 16-bit FF tile, a two-stage 8-bit CF tile and a two-stage 4-bit
  FF tile, all checked against reference arithmetic.
* It also counts the mechanisms it exercised: broadcast and ordered loads, FF
  and CF stages, each precision, bank conflicts, operand starvation of the SA
  core, and memory stalls. It fails if any of them never happened.
* `tb_speed_conv` runs two small convolution layers on the full-size
  processor: a 3x3, 8-bit layer (input 6x6x8, 16 output channels) in FF mode,
  one 18-step VSAM per output column with the input windows laid out by the
  host, and a 1x1, 4-bit layer with 128 input channels in CF mode, reduced in
  two stages. Every output is compared with a direct nested-loop convolution.
  The four 18-step VSAMs of the 3x3 layer take 278 cycles.

Example with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/speed_pkg.sv tb/speed_tb_pkg.sv \
    rtl/*.sv tb/speed_mem_model.sv tb/tb_speed_top.sv --top tb_speed_top -o sim
./obj_dir/sim
```

`tb/speed_tb_pkg.sv` holds instruction encoders (`enc_vsam`, `enc_vsacfg`, …)
and a reference dot product, for writing new programs. `tb/speed_mem_model.sv`
is the external-memory model, with optional random grant stalls.
