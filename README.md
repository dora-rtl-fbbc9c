# DORA overlay in SystemVerilog

DORA is an accelerator for DNN inference. It is built for a mix of models
whose layer shapes differ widely. It has no fixed dataflow and no buffers
sized for one operand shape. Instead, it is a set of small function units
joined by a fully-connected streaming network:

* memory units (LMUs);
* matrix units (MMUs);
* non-linear units (SFUs);
* one DRAM interface (MIU).

Every unit runs its own instruction sequence. A host-side compiler writes
these sequences. They decide, per layer and per tile:

* which units hold which operand;
* how large each tile is;
* which unit sends to which;
* how many matrix units share one product.

The hardware only carries out those instructions. It synchronises units
through the streams alone: a consumer that is ready before its producer
simply waits.

This repository is a register-transfer model of that architecture. It covers
the dispatch unit, the MIU with its read-after-write protection, the LMUs,
the MMUs, the SFUs and the network. The default configuration is 14 LMUs,
6 MMUs and 3 SFUs. The design is written to be simulated with Verilator and
synthesized. Data are 32-bit Q16.16 fixed point.

## 1. Structure

```
                  instruction memory                 DRAM
                         |                          |    ^
                   +-----v-----+               +----v----+----+
   host start ---->|    IDU    |--instr------->|    MIU        |
                   +-----------+   streams     | Sync  Load  Store
                     |  |  |  (one per unit)   +---------------+
                     v  v  v                          ^ |
   +----------------------------------------------------------------+
   |              fully-connected streaming network                 |
   +----------------------------------------------------------------+
        ^ |            ^ |                 ^ |
     +--+-v--+      +--+-v--+           +--+-v--+
     | LMU x14|     | MMU x6|           | SFU x3|
     +--------+     +-------+           +-------+
```

`dora_top` instantiates everything. Each unit is one network port; the
numbers are:

| Units | Port numbers |
|---|---|
| MIU | 0 |
| LMU0..LMU13 | 1..14 |
| MMU0..MMU5 | 15..20 |
| SFU0..SFU2 | 21..23 |

Instructions name units by these numbers.

| File | Contents |
|---|---|
| `rtl/dora_pkg.sv` | unit counts, header and body layouts, op codes, Q16.16 helpers (multiply, divide, exp, square root) |
| `rtl/dora_idu.sv` | Instruction Dispatch Unit |
| `rtl/dora_instr_rx.sv` | instruction receiver in front of every unit |
| `rtl/dora_fc_network.sv` | the all-to-all crossbar |
| `rtl/dora_miu.sv` | MIU: `dora_sync_unit`, `dora_load_unit`, `dora_store_unit`, two `dora_fifo` queues |
| `rtl/dora_lmu.sv` | Local Memory Unit |
| `rtl/dora_mmu.sv` | Matrix Multiplication Unit |
| `rtl/dora_sfu.sv` | Special Function Unit |
| `rtl/dora_top.sv` | the whole overlay |

## 2. The network and why it needs no scheduler

Each unit has one output stream and one input stream:

* the output stream carries valid, a data word and a destination port;
* the input stream carries ready and the source port the unit wants to hear from.

A word moves from unit *s* to unit *d* only when two things hold at once:

* *s* names *d* as its destination;
* *d* names *s* as its source.

Both sides set these fields from their current instructions. So a transfer
happens only when the producer and the consumer have reached the matching
instructions. Until then:

* the sender sees `ready` low (back-pressure);
* the receiver sees `valid` low (it stalls).

This is the whole synchronisation mechanism on chip. There are no
semaphores and no global scheduler. The order of instructions within each
unit fixes the order of transfers.

The crossbar is combinational. A word passes in the same cycle, one word per
port per cycle. Deadlock freedom is the program's job. The IDU dispatches in
program order, and each unit buffers one instruction beyond the one it runs.
So a program must interleave the units' instructions roughly in time order
(see section 8).

## 3. Instructions

Each instruction is a 32-bit header followed by `valid_length` 32-bit body
words.

| Header bits | Field | Meaning |
|---|---|---|
| 31 | `is_last` | the unit's final instruction |
| 30:27 | `op_type` | unit-specific operation |
| 26:19 | `des_unit` | port number of the unit that runs it |
| 18:11 | `valid_length` | number of body words |
| 10:0 | | zero |

Body word 0 sits in the most significant bits of each body struct in
`dora_pkg`. The bodies are:

**MIU, 6 words; `op_type` 0 = load, 1 = store.**

* Matrix in DRAM: `ddr_addr` (the word address of element 0,0), `M` and `N`.
  The matrix is row-major with row pitch `N`.
* The rectangle to move: `start_row..end_row` and `start_col..end_col`.
* `des_lmu` for a load, `src_lmu` for a store. LMU *i* is port 1+*i*.
* `layer_id` is the layer the transfer belongs to.
* `layer_done` is set on a store that completes its layer.
* `dep0_v/dep0` and `dep1_v/dep1` name up to two layers a load must wait for.

**LMU, 4 words.**

* `load_op`, `ping_buf` and `src_pu`: load the rectangle from unit `src_pu`
  into bank `ping_buf`.
* `send_op`, `pong_buf`, `des_pu` and `count`: send the same rectangle from
  bank `pong_buf` to `des_pu`, `count` times.
* `row_len` is the tile's row length.
* The rectangle is `start_row..end_row`, `start_col..end_col`.

**MMU, 2 words.**

* `ping_op` and `pong_op`: one operation per bank. The operations are NOP,
  LOAD_LHS, LOAD_RHS, COMPUTE and STORE.
* `src_lmu` and `des_lmu`.
* `bound_i`, `bound_k` and `bound_j`.

**SFU, 2 words; `op_type` 0 = Softmax, 1 = GeLU, 2 = LayerNorm.**

* `src_lmu` and `src_num`, `des_lmu` and `des_num`.
* `count` rows of `ele_num` elements.

A unit with nothing to do still needs an `is_last` instruction, so that the
top-level `done` can rise. One of the following will do:

* an LMU instruction with neither load nor send;
* an MMU NOP/NOP;
* an SFU instruction with `count` 0.

## 4. Dispatch (IDU)

The host writes the program into instruction memory and pulses `start` with
the base word address and the length in words. The IDU then works one word
at a time:

* It fetches a word; a request is followed by an in-order response.
* For a header, it decodes `des_unit` and `valid_length`. It then passes the
  header and its body words to that unit's instruction stream.
* A unit whose receiver is full holds the IDU.
* A header naming a port that does not exist is skipped, together with its
  body.

Every word costs at least three cycles: request, response and hand-over.

Each unit's `dora_instr_rx` assembles the words into a header and a body of
up to six words. It holds one complete instruction until the unit takes it.
A unit can therefore run one instruction while the next one waits.

## 5. MIU and read-after-write safety

Intermediate results go back to DRAM between layers and are read again by
later layers. A load issued before the store it depends on has finished
would read stale data. The MIU is split into three parts:

* **Sync Unit.** It is at the head of the MIU instruction stream and keeps a
  Ready List Table, one bit per layer id (256 layers). Each cycle it does
  three things:
  1. It records any layer reported on the ready stream.
  2. It checks the waiting instruction. A store always passes. A load passes
     once every layer in `dep0`/`dep1` is marked.
  3. It passes a ready instruction on.

  A load that is not ready holds the stream and raises `sync_stall`.
* **Load Unit.** It runs loads: DRAM word `ddr_addr + r*N + c`, row by row,
  to the LMU, with one DRAM read outstanding. Stores are handed on in order
  to a 4-deep queue.
* **Store Unit.** It takes a store from the queue. It accepts the words from
  `src_lmu` and writes them to DRAM. If the store carries `layer_done`, it
  then reports `layer_id` on the ready stream, which has a 2-deep queue.

A store counts as complete when the DRAM port accepts its last word. The
compiler places a dependent load right after the producing store, and the
Sync Unit turns that program order into a safe execution order.

## 6. LMU: one buffer for every shape

An LMU has two banks of `BANK_DEPTH` words; the default is 65,536 words, one
256x256 tile. The tile's shape is not fixed in hardware. Each instruction
gives `row_len`, and element (r, c) is stored at `r*row_len + c`. So a
256x256 tile, a 128x512 tile and a 32x2048 tile each fill one bank without
padding.

The LMU's role is set only by where its data go:

* LHS, RHS or OUT of a product;
* input or output of an SFU;
* a staging buffer for DRAM.

A larger logical buffer is a group of LMUs that the program addresses one
after the other.

One instruction can load into one bank and send from the other at the same
time. This is the ping-pong overlap that hides transfer time. The send side:

* has one registered read stage;
* moves one word per cycle while the receiver is ready;
* repeats the rectangle `count` times, so that one tile can feed several
  products.

The next instruction starts when both sides have finished. A tile can be
assembled from several loads that write different rectangles of the same
bank; the end-to-end test builds one tile from two MMUs this way.

## 7. MMU: run-time loop bounds

In the original architecture an MMU is a group of vector processors. The key
idea is that the kernel's loop bounds come from the instruction
(`bound_i/k/j`) rather than being compiled in. One kernel therefore serves
every tile shape, and a matrix product can be split across any number of
MMUs by giving each a share of the rows.

This model keeps the buffers, the routing and the run-time bounds. It
replaces the vector processors with one Q16.16 multiply-accumulate per bank
and per cycle. Each bank (ping, pong) holds:

* LHS (i x k);
* RHS (k x j);
* OUT (i x j).

Each of these is up to 128 per dimension, stored row-major with the
instruction's bounds. The operations are:

| Operation | What it does |
|---|---|
| LOAD_LHS, LOAD_RHS | take i*k or k*j words from `src_lmu` |
| COMPUTE | OUT += LHS x RHS, loop order i, j, k: i*j*k cycles |
| STORE | send OUT (i*j words) to `des_lmu` |
| NOP | nothing |

A per-bank flag starts the first COMPUTE after a reset or a STORE from zero.
Later COMPUTEs accumulate. A product with K above 128 is therefore several
LOAD/LOAD/COMPUTE rounds followed by a single STORE.

The two banks run their operations at the same time. For example, ping
computes while pong loads the next operands. When both need the input port,
or both the output port, ping goes first. The instruction retires when both
banks are finished. `in_stall` is high while a loading bank waits on an
empty stream; this is the back-pressure case.

## 8. SFU: row-wise non-linear functions

Softmax, GeLU and LayerNorm all reduce along a row. So the SFU takes one row
of `ele_num` words into a line buffer of up to 4,096 words. It works on the
row, sends the results, and repeats for `count` rows.

A row may be spread over several LMUs:

* `src_num` = S gathers it as S equal segments from LMUs `src_lmu ..
  src_lmu+S-1`;
* `des_num` splits the results over LMUs in the same way.

| Function | Passes | Result |
|---|---|---|
| Softmax | receive (row maximum); exp pass (store e^(x-max), sum); send | e/sum |
| GeLU | receive; send | x * sigmoid(1.702 x) |
| LayerNorm | receive (sum); mean; variance pass; 1/sqrt | (x-mean)/sqrt(var+2^-16), no scale or shift |

The exponential is 2^t. The fractional power is 1 + f(0.6565 + 0.3435 f),
with a relative error below 0.3 %. Division and square root are single-cycle
combinational functions. This keeps the unit small but limits its clock
rate. Receive and send move one word per cycle, and each extra pass costs
`ele_num` cycles.

## 9. Top-level interface and timing

All ports are plain signals.

| Port group | Signals |
|---|---|
| Host | `start`, `base_addr`, `prog_len`, `busy`, `done` |
| Instruction memory | `imem_req_valid/ready/addr`, `imem_rvalid/rdata`; one request outstanding, in-order response |
| DRAM read | `dram_rd_valid/ready/addr`, `dram_rvalid/rdata`; one request outstanding, in-order response |
| DRAM write | `dram_wr_valid/ready/addr/data`; a write is done when accepted |
| Monitoring | `sync_stall`, `mmu_in_stall[N_MMU_P-1:0]` |

`done` is high once two things hold:

* the IDU has dispatched the whole program;
* every unit has finished its `is_last` instruction.

Reset is synchronous and active low. Memories are not reset. Any state that
is read before it is written has a valid bit or a flag.

Parameters of `dora_top`:

| Parameter | Default |
|---|---|
| `N_LMU_P` | 14 |
| `N_MMU_P` | 6 |
| `N_SFU_P` | 3 |
| `LMU_DEPTH` | 65536 |
| `MMU_MAX` | 128 |
| `SFU_MAX_ROW` | 4096 |
| `MAX_LAYERS` | 256 |

At the defaults, synthesis finds about 10,400 word-level cells, 10,400
flip-flop bits and 78 Mbit of memory. Of that memory:

* the LMUs hold 14 x 2 x 64 Ki words;
* the MMUs hold 6 x 2 x 3 x 16 Ki words;
* the SFUs hold 3 x 4 Ki words.

## 10. Writing a program

`tb/tb_dora_top.sv` is a worked example. Its tasks `miu`, `lmu`, `mmu` and
`sfu` emit one instruction each. The program has three layers.

**Layer 1: S = softmax(A x B).**

1. The MIU loads A and B into LMU0 and LMU1.
2. LMU0 sends rows 0-3 of A to MMU0 and rows 4-7 to MMU2. Two MMUs share one
   product.
3. LMU1 sends B to both MMUs.
4. Both MMUs store into LMU3, each filling half of one tile.
5. LMU3 feeds SFU0 (Softmax), which writes to LMU4.
6. LMU4 is written back by an MIU store with `layer_done`.

**Layer 2: R = S x C.**

1. The MIU reloads S from DRAM into LMU5. This load depends on layer 1, so
   the Sync Unit holds it until the write-back is done.
2. C arrives in two column halves into the two banks of LMU6. LMU6 sends the
   first half while loading the second.
3. MMU1 computes the first half in its ping bank while its pong bank loads
   the second half.
4. The result goes to LMU7, and from there to DRAM.

**Layer 3: G = GeLU(LayerNorm(R)).** SFU0 runs this layer. It switches to
LayerNorm, then to GeLU.

The instructions are listed roughly in the order they run. The rule to keep
in mind: when the IDU hands a unit a second instruction, and that unit is
still busy, the IDU waits. Meanwhile, every instruction that the unit's
current work depends on must already have been dispatched.

## 11. Simulation

Every testbench is self-checking and has a watchdog. It ends with the line
`TB_RESULT checks=N failures=M`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dora_pkg.sv tb/tb_util_pkg.sv tb/tb_dora_top.sv \
  --top-module tb_dora_top -o sim
obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_dora_top` with any other testbench. The random-reset option
fills uninitialised state with random values. The testbenches pass with it,
which shows that nothing relies on power-up values.

| Testbench | What it checks |
|---|---|
| `tb_dora_pkg` | multiply, divide, exp and square root against real math over random operands |
| `tb_dora_instr_rx` | random instructions of 0 to 6 body words, with random stalls on both sides |
| `tb_dora_idu` | a random program to every unit, with random unit stalls; order, routing, skipped headers, at most one word per 3 cycles |
| `tb_dora_fc_network` | random source and destination settings; every delivered word and every ready against a reference |
| `tb_dora_sync_unit` | loads waiting on one or two layers, stores passing, stall reporting |
| `tb_dora_load_unit`, `tb_dora_store_unit` | rectangle addressing, DRAM latency and back-pressure, store hand-over, ready reporting |
| `tb_dora_miu` | the read-after-write case: the dependent load waits for the write-back and returns the new data; `done` only after the last store |
| `tb_dora_lmu` | load, overlapped load-and-send across banks, repeated send, one word per cycle |
| `tb_dora_mmu` | two products in ping and pong with overlap, accumulation from zero, back-pressure stalls, i*j*k compute cycles |
| `tb_dora_sfu` | all three functions, rows gathered from 4 and 2 LMUs and split over 2, source and destination per word, GeLU row latency |
| `tb_dora_top` | the program of section 10 on the full default configuration |
| `tb_dora_case_study` | the three-kernel example at full size (section 13) |
| `tb_dora_bert_ffn` | a BERT-base feed-forward block at sequence length 32 (section 13) |
| `tb_dora_deit_attention` | one DeiT-Base attention head, 197 tokens, with 69-wide edge tiles (section 13) |

`tb_dora_top` checks S, R and G in DRAM against real-number math. It also
counts the events that show each mechanism at work. A count of zero is a
failure. The events are:

* a Sync Unit hold;
* an MMU input stall;
* an LMU loading and sending in the same cycle;
* an MMU computing on ping while loading pong;
* two MMUs computing one product;
* the IDU waiting on a busy unit;
* Softmax rows;
* SFU function switches;
* a tile built by two loads.

It runs with every parameter at its default, in about 4,800 cycles. The three
workload testbenches also use the default configuration. They run about 12.5,
28 and 3 million cycles, which takes 30, 70 and 8 seconds of simulation.

## 12. Where this model departs from the original architecture

**Arithmetic.**

* Data are Q16.16 fixed point, not FP32. The dataflow and control do not
  depend on the number format. Changing to floating point would touch only
  the helper functions in `dora_pkg` and the accumulators.
* The MMU computes with one multiply-accumulate per bank and cycle, not a
  4x4x4 array of vector processors. Its tile limit is 128 x 128 x 128 per
  bank, and bounds are 8-bit fields.

**Fields this model adds or gives a meaning to.** The original instruction
set names the fields but not their encodings. This model adds:

* `row_len` for the LMU;
* `layer_id`, `layer_done` and two dependencies for the MIU;
* `src_num` and `des_num` for the SFU.

It also reads `ping_op/pong_op` as one operation per bank, and `count` on
the LMU as a repeat count.
`valid_length` counts 32-bit body words. The original says the dispatcher
fetches "bytes" after the header; a word count fits the 32-bit fetch port.

**Interfaces and sizes.** These are design choices:

* the network rule "both ends must agree" and the one-word-wide streams;
* the memory ports with one outstanding request;
* the queue depths.

Buffer sizes were not given and were chosen as follows:

* LMU bank: 64 Ki words, one 256x256 tile;
* SFU row: 4,096;
* layer ids: 256.

**Not modelled.**

* The SFU implements only Softmax, GeLU and LayerNorm. The original lets
  users add functions written in a high-level synthesis language as new
  SFUs. ReLU, sigmoid and max pooling, used by NCF and PointNet, are
  therefore not available.
* The host-side compiler is not included. It partitions a model into layers,
  chooses tile sizes and the number of units per layer, schedules the layers
  and emits the instruction sequences. Programs must be written by hand or
  by a separate tool.
* The host CPU, the instruction memory and the DRAM are outside the design.
  The testbenches model them behaviourally (`tb/dram_model.sv`).

## 13. Capacity at the default parameters

Large models run tile by tile through DRAM. Take the evaluated MLP layers,
3072x4096x4096: each is 24 x 32 x 32 MMU tile products of 128 cubed, with
operands staged in 256x256 LMU banks.

A workload fits if three things hold:

* each row that a non-linear function needs fits the 4,096-word SFU buffer;
* the model has at most 256 layers;
* its non-linear functions are among the three built.

The BERT models with sequence lengths 32 to 384 and DeiT satisfy all three.
Their largest rows are 3,072 elements (GeLU) and their largest sequence is
384 (Softmax). MLP models of up to 4,096 hidden units also fit. NCF and
PointNet need ReLU, sigmoid or max pooling, which this model does not have.

The three-kernel example of the original (MM1 256x256x512, Softmax, MM2
256x512x64) fits as follows:

* its LHS fills exactly one LMU bank;
* its RHS and OUT take two banks each;
* MM1 is 16 tile products;
* its 512-element Softmax rows can be gathered from two LMUs.

Parts of three of these workloads are simulated on the default configuration.

**`tb_dora_case_study`** runs the three-kernel example. The work is spread as
follows:

* MMU0-3 each own one 128-column slice of MM1. Rows 0-127 go in the ping
  bank and rows 128-255 in the pong bank, so one bank computes while the
  other loads.
* SFU0 gathers each 512-element row from two LMUs and splits the result
  over two more.
* The Softmax output makes a round trip through DRAM, so the Sync Unit
  holds the reload. It held it for about 0.7 million cycles.
* MM2 is split by rows over the same four MMUs.

Every word of S and R is checked.

**`tb_dora_bert_ffn`** runs GeLU(LayerNorm(X) W1) W2 with BERT-base sizes:

* X is 32 x 768.
* W1 is 768 x 3,072 and W2 is 3,072 x 768.

The weights are 4.7 million words, which is more than the LMUs hold, so they
stream from DRAM. Each MMU has its own LMU, which loads the next 128 x 128
weight tile into one bank while sending the current one from the other. All
six MMUs run with `bound_i` = 32. Each MMU is busy more than 90 % of the
time.

**`tb_dora_deit_attention`** runs one attention head of DeiT-Base:
P = softmax(Q K^T) and O = P V, with 197 tokens and a head width of 64.
Because 197 is not a multiple of 128, the tiles at the edge have 69 rows,
69 columns or a depth of 69:

* MMU0-3 compute the four score tiles: 128x128, 128x69, 69x128 and 69x69.
* SFU0 applies Softmax to rows of 197 elements.
* MMU4 and MMU5 compute P V, accumulating over two K steps of 128 and 69.

The testbench checks every word of P and O. It also checks that an edge MMU
spends exactly i x k x j compute cycles on each of its tiles, so nothing is
padded.

All three testbenches generate their instruction lists in time order. Their
`build` tasks show how a larger program is put together.
