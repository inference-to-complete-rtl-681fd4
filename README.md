# Kaleidoscope: an inference co-processor beside a packet data-plane

Kaleidoscope runs small neural networks on live network traffic without
sitting in the forwarding path. The switch or NIC pipeline keeps forwarding
at line rate and sends a *copy* of every packet to the co-processor. The
co-processor classifies flows and writes one rule per flow into a
**query table**. Before a packet leaves, the data-plane looks its flow up in
that table, which costs five clock cycles. That lookup is the only way
inference results reach the data-plane. The forwarding pipeline is never
stalled, reprogrammed or clocked by the co-processor.

Traffic is split by flow size:

* **Fast path (mouse flows).** Every flow is classified once, from its
  **first packet**, by small MLPs on *Fast Process Elements* (FPEs). An FPE
  is a short-latency vector-matrix (GEMV) engine.
* **Slow path (elephant flows).** When a flow's packet count goes past
  16, the packet that does so (the 17th) is classified again by a larger
  model (CNN, RNN) on the *Heavy Process Element* (HPE). The HPE is a
  matrix-matrix (GEMM) engine built around a 32 x 32 systolic array. Its
  rule replaces the fast-path rule for that flow.

Both kinds of process element (PE) are *run-to-completion* processors. A PE
takes a job (the flow hash plus 64 bytes taken from the packet) and runs its
program to the end. Then it hands back 32 Fix-8 outputs and starts on the
next job. Models are changed at run time by rewriting instruction and
parameter memories. No new hardware is needed.

This RTL describes the configuration with four FPEs and one HPE, at full
size: 64K-entry flow and query tables, 512-deep job queues, 8 KB FPE
parameter caches and a 512 KB HPE parameter cache.

## Block structure

```
 data-plane clock                    co-processor clock
 ----------------                    ------------------
 mirror ->  bypass_if  (dual-clock FIFO, drops whole packets when full)
                 |
                 v
           traffic_monitor:  pkt_parser -> toeplitz_hash -> flow_table -> mux
                 | first packet of a flow        | 17th packet of a flow
                 v                               v
           inference_path (fast)           inference_path (slow)
             dispatcher                      dispatcher
             4 x [pkt_fifo -> fpe]           1 x [pkt_fifo -> hpe]
             round-robin collector           collector
                 |                               |
           result_parser (argmax)          result_parser (argmax)
                 \____ rule arbiter (slow first) ___/
                                 |
 query  ->  query_table  <-------'   (written on the co-processor clock,
 reply  <-  (5-cycle read pipeline)   read on the data-plane clock)
```

| File | Block |
|---|---|
| `kaleidoscope_top` | the whole co-processor, two clock domains |
| `bypass_if` | mirror input, clock crossing, packet-head truncation, drop counter |
| `traffic_monitor` | parser + hash + flow table + fast/slow selection |
| `pkt_parser` | IPv4/TCP/UDP header walk, 64-byte NN input extraction |
| `toeplitz_hash` | RSS-style Toeplitz hash of the 4-tuple |
| `flow_table` | first-seen flag and packet counter per hash index |
| `inference_path` | job dispatcher, per-PE queues, PEs, result collector |
| `pkt_fifo` | the per-PE job queue |
| `fpe` | Fast Process Element |
| `simd_lane`, `dot_unit` | the FPE vector unit: 4 lanes x 8 dot units x 8 multipliers |
| `fpe_accumulator`, `act_lut`, `fpe_regfile`, `cache_ram` | FPE accumulator, activation table, register file, iCache/pCache |
| `hpe` | Heavy Process Element |
| `systolic_array`, `mac` | the HPE's 32 x 32 weight-stationary array |
| `dp_ram` | one of the HPE's three 256-bit x 1024 dual-port banks |
| `hpe_accumulator` | add RAM2 + RAM3, activation table, max-pooling, write RAM1 |
| `result_parser` | argmax over the first *n* outputs, builds the rule |
| `query_table` | the rule table and its five-cycle read pipeline |
| `kal_pkg` | shared types (`job_t`, `pe_result_t`, `rule_t`), instruction formats, Fix-8 helpers |

## Numbers: Fix-8

All model data are 8-bit two's-complement fixed point with 5 fraction bits
(Q2.5), so they range from -4.0 to +3.96875.

* Products are exact. Sums of products are kept at full width: 19 bits in a
  dot unit, 32 bits in the FPE accumulator and 24 bits in the array's
  partial sums.
* A sum of products has 10 fraction bits. It goes back to Fix-8 by an
  arithmetic right shift of 5 (truncation towards minus infinity),
  saturated to [-128, 127]. This is `kal_pkg::requant`.
* In the HPE accumulator, two Fix-8 rows are added with saturation.
* Activation is a 256-entry, 8-bit table indexed by the requantized value.
  ReLU, sigmoid, tanh or anything else is just a table load. A `lut` bit
  per instruction selects between the table and plain requantization, for
  layers with no activation.

## The Fast Process Element

### Datapath

The vector unit has `K = 4` SIMD lanes. Each lane has `T = 8` dot units of
`N = 8` multipliers and a 7-adder tree. One step multiplies a 32-byte input
segment by a (32, 8) weight tile:

* Lane `l` takes input bytes `8l .. 8l+7` of the segment.
* Dot unit `j` of lane `l` takes the matching 8 weights of output column `j`.
* The accumulator adds the four lane results per column, giving 8 column
  sums, and adds them to its running sums.

A layer wider than 32 inputs is several steps into the same accumulator. A
layer with more than 8 outputs is repeated per group of 8 outputs.

The memories:

| Memory | Size | Layout |
|---|---|---|
| register file | 32 x 256 bits | entries 0 and 1 receive the job's 64 input bytes at START |
| pCache | 8 KB = 32 tiles of 256 bytes | tile byte `j*32 + i` holds weight `W[i][j]` (input `i`, output `j`) |
| iCache | 1 KB = 256 words of 32 bits | the program |
| activation table | 256 x 8 bits | indexed by the requantized value |

### Instruction word (32 bits, three slots issued together)

| bits | field | slot |
|---|---|---|
| 31:28 | op: NOP 0, START 1, MV 2, MVA 3, MVAA 4, FIN 5 | computation |
| 27:23 | dst: register-file entry written by MVAA / returned by FIN | computation |
| 22:21 | seg: which 8-byte segment of `dst` MVAA writes | computation |
| 20 | lut: MVAA applies the activation table (else requantize only) | computation |
| 19 / 18:14 | LDP valid / pCache tile | parameter |
| 13 / 12:8 | LDR valid / register-file entry | temporal data |
| 7:0 | reserved, ignored | |

What each operation does:

* **MV** starts a new sum with one step.
* **MVA** adds a step to the sum.
* **MVAA** adds a step, activates, and writes the 8 results into segment
  `seg` of entry `dst`. The step after an MVAA starts from zero again, so a
  one-step layer is a single MVAA.
* **LDP** and **LDR** load the weight tile and the input segment. The load
  finishes at the end of the cycle, so a computation uses the operands
  loaded by an *earlier* word.
* **START** waits for a job and writes its bytes into entries 0 and 1.
* **FIN** waits for the pipeline to drain and returns entry `dst` with the
  job's hash. After the result is taken, the FPE restarts at word 0.

### Timing and the one programming rule

A computation issued in cycle *c* moves through the pipeline as follows:

* cycle *c*+1: products;
* cycle *c*+2: dot sums;
* cycles *c*+2 to *c*+3: accumulator, and the table lookup for an MVAA;
* end of cycle *c*+3: write-back.

There are no interlocks. An LDR that reads an entry written by an MVAA must
be issued at least 4 words after that MVAA.

Example: the 64 -> 16 -> 8 MLP of the FPE testbench, with ReLU after layer 1:

```
0  START
1  LDR 0  LDP 0                 ; x[0:32],  W1 tile (in 0..31,  out 0..7)
2  MV                LDR 1 LDP 1 ; x[32:64], W1 tile (in 32..63, out 0..7)
3  MVAA dst2 seg0 lut  LDR 0 LDP 2
4  MV                LDR 1 LDP 3
5  MVAA dst2 seg1 lut
6..8 NOP                        ; write-back distance
9  LDR 2  LDP 4                 ; hidden layer, W2 (rows 16..31 zero)
10 MVAA dst3 seg0               ; no activation
11 FIN dst3
```

From job acceptance to `res_valid`, this program takes 16 cycles. One word
issues per cycle, and FIN adds the drain plus one register-file read.

## The Heavy Process Element

### Engines and memories

The HPE has three engines. Each one starts from the instruction stream and
then runs on its own:

* **Weight loader (LDP).** Copies one 32 x 32 tile (32 pCache rows of 32
  bytes) into the array's *shadow* weights, in N+2 cycles. The next MM
  switches to that tile, so tiles load while the array is still computing.
* **MM engine.** Streams `len` rows from RAM1 through the systolic array.
  Each result row is requantized to Fix-8 and written to RAM2 (`bank = 0`)
  or RAM3 (`bank = 1`). An MM of `len` rows takes `len + 2*32 + 1` cycles.
* **Accumulator engine (ACC / ACCA / ACCP).** Reads RAM2 row `a` and RAM3
  row `b` together and adds them with saturation (`bzero` treats RAM3 as
  zero). ACCA also applies the activation table. ACCP applies it too and then
  takes the maximum over 2, 4 or 8 consecutive rows (`pool` = 1, 2, 3).
  Results go to RAM1 from row `d` on, or to RAM2 when `bank = 1`; the second
  form lets more than two partial products be chained.

The engines never share a RAM port:

* The array reads RAM1 port A and writes port A of RAM2 or RAM3.
* The accumulator reads port B of RAM2 and RAM3 and writes RAM1 port B.
* An assertion checks the one case where they could meet: both writing RAM2
  port A.

The systolic array is weight-stationary:

* Cell (r, c) holds `W[c][r]`.
* Input values move down the columns and partial sums move right along the
  rows.
* Input skew and output de-skew are built in, so a row goes in and its result
  comes out aligned, 2N-1 = 63 cycles later.

### Instruction word (64 bits)

| bits | field |
|---|---|
| 63:60 | op: NOP 0, START 1, MM 2, ACC 3, ACCA 4, ACCP 5, FIN 6 |
| 59:50 / 49:40 / 39:30 | a, b, d row addresses |
| 29:22 | len: rows |
| 21 | bank |
| 20 | bzero |
| 19:18 | pool (log2 of the window) |
| 17 | barrier: wait until every engine is idle |
| 16 / 15:0 | LDP valid / tile number |

A word waits only for the engines it uses:

* MM waits for the MM engine and the loader.
* An accumulate waits for the accumulator engine.
* LDP waits for the loader.
* START and FIN wait for all three engines.

Data dependencies between engines are the program's responsibility; the
`barrier` bit handles them. START writes the 64 input bytes into RAM1 rows 0
and 1. FIN returns RAM1 row `a`.

Example: the (1,64) x (64,32) + ReLU layer of the HPE testbench takes 174
cycles per job:

```
0 START
1 LDP 0
2 MM  a=0 d=0 len=1 bank=0      LDP 1    ; x[0:32]  * W0 -> RAM2[0]
3 MM  a=1 d=0 len=1 bank=1               ; x[32:64] * W1 -> RAM3[0]
4 ACCA a=0 b=0 d=4 len=1 barrier          ; relu(RAM2[0] + RAM3[0]) -> RAM1[4]
5 FIN a=4
```

## Traffic monitor and flow table

The parser keeps the first four 64-byte beats of a packet. It accepts
Ethernet II frames carrying IPv4 with TCP or UDP; IHL and the TCP data offset
are honoured. Anything else is counted in `skip_cnt` and dropped.

The NN input is 64 bytes:

* 2 bytes source port and 2 bytes destination port, as in the packet;
* 1 byte protocol;
* the first 59 payload bytes, zero-padded.

The flow hash is a Toeplitz hash over {source IP, destination IP, source
port, destination port}, with the usual 40-byte RSS key. It reproduces the
published RSS test vectors.

The flow table is indexed by the low 16 bits of the hash. Each entry holds a
seen flag and an 8-bit saturating count. The update is a two-stage
read-modify-write that forwards the previous update, so back-to-back packets
of one flow still count correctly. After reset, the table clears itself
(`ready` is low until then). Hash collisions are not resolved: two flows
sharing an index share a counter.

The slow path gets the packet that takes the count to 17. Sentences in the
source text can be read as "at 16" or "above 16"; "above 16" was chosen.

## Queues, dispatch and rules

Each path dispatches jobs round-robin to the first PE queue that is not full.
When every queue is full, the job is dropped and counted. The data-plane
never waits. Results are collected round-robin.

The result parser picks the argmax of the first `num_classes` outputs (ties
go to the lowest index). It writes a rule {flow index, path, class} into the
query table. When both parsers have a rule in the same cycle, the slow one
goes first. A later rule for the same index overwrites the earlier one, so an
elephant's slow-path class replaces its fast-path class.

The query table answers {hit, slow, class} exactly 5 data-plane cycles after
the query: the query is registered at edge 1 and the reply is valid after
edge 5.

## Clocks, reset and configuration

There are two unrelated clocks:

* `clk_dp` runs the mirror input, the bypass drop counter and the query port.
* `clk_k` runs everything else.

The two meet only in the bypass FIFO (Gray-coded pointers, two-flop
synchronizers) and in the query table, which is a two-clock RAM whose writes
happen only on `clk_k`. Resets are asynchronous and active low, one per
domain.

Programming happens on `clk_k`, with `pe_enable` low:

| `cfg_path` | target | `cfg_pe` | `cfg_mem` | `cfg_addr` |
|---|---|---|---|---|
| 0 | fast-path PEs | PE number, 15 = all | 0 iCache, 1 pCache, 2 activation table | 32-bit word index (table: entry) |
| 1 | slow-path PEs | same | same | same |
| 2 | result parsers | — | — | 0: fast-path `num_classes`, 1: slow-path `num_classes` |

A 256-byte FPE tile is 64 words, and a 32-byte HPE row is 8 words. Raising
`pe_enable` starts every PE at word 0.

The top also brings out counters:

* packets analysed and packets skipped;
* bypass drops;
* jobs issued, dropped and completed, per path;
* rules written;
* "queue was full" flags;
* `pe_queues_empty`.

## What is this design's own

The source gives the architecture, the main sizes, the opcode names and the
Fix-8 format. It does not give the following, which are choices made here:

* all instruction bit encodings, and the exact semantics of MV / MVA / MVAA /
  START / FIN / LDP / LDR;
* the FPE pipeline depth and its no-interlock rule;
* the HPE engine concurrency and the barrier bit;
* requantization by truncation;
* requantizing MM results to Fix-8 before they are stored;
* max-pooling as the pooling kind;
* the bypass FIFO depth, head truncation to 256 bytes, and whole-packet drop;
* the parser's choice of fields;
* the Toeplitz key;
* 8-bit flow counters;
* the drop-when-full dispatch and the argmax tie rule;
* slow-before-fast rule arbitration;
* the configuration port.

Limits to be aware of:

* **No im2col.** The HPE has no convolution-to-matrix (im2col) unit. START
  puts the raw 64 bytes in RAM1 rows 0 and 1. Convolutions must be expressed
  as GEMMs on rows the program prepares itself, so whether a given CNN maps
  onto the HPE is an open question.
* **No hazard checking.** The FPE does not check data hazards.
* **Collisions.** Flows that collide in the flow or query table share an
  entry.

The data-plane pipeline, the Ethernet MAC/PHY and PCIe, the clock generator
and the model-to-instruction compiler are not part of this RTL. The mirror
and query ports and the two clocks are where they connect.

## Model sizes

| Model (parameters) | Runs on | Capacity | Fits |
|---|---|---|---|
| MLPs of 2.1, 4.4 and 6.4 KB | FPE | 8 KB pCache | yes |
| RNN of 31.4 KB | HPE | 512 KB pCache, 3 x 32 KB working RAM | yes |
| CNNs of 16.6 and 280.5 KB | HPE | 512 KB pCache | weights fit; see the im2col limit above |

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. The shared helpers are `kal_tb_pkg.sv`,
which builds instruction words and provides the Fix-8 reference functions,
and `kal_top_tasks.svh`, which holds the stimulus for the top-level tests.

With Verilator 5 (two-state, random initial values):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl -Itb \
    --top-module tb_fpe rtl/kal_pkg.sv tb/kal_tb_pkg.sv tb/tb_fpe.sv
./obj_dir/Vtb_fpe +verilator+rand+reset+2
```

The block tests compare against software models written independently in the
testbench:

* Fix-8 GEMV/GEMM reference arithmetic;
* a Toeplitz hash;
* a per-index flow counter;
* a queue model;
* argmax.

They also check cycle counts where a latency is defined:

* dot unit: 2 cycles;
* systolic array: 2N-1 cycles;
* FPE program: 16 cycles;
* query: 5 cycles;
* flow table: result two cycles after the lookup.

Two further testbenches run workload-sized programs:

* `tb_fpe_mlp` runs a 64-64-32-8 MLP on one FPE, with ReLU after the first
  two layers. Its 6400 bytes of weights fill 25 of the 32 pCache tiles, and
  the testbench generates the program from the layer shapes. A job takes 41
  cycles, or 164 ns at 250 MHz.
* `tb_hpe_cnn` runs a convolution-shaped network on the HPE. A two-row MM
  computes a 1x1 convolution over 2 positions. ACCP then applies ReLU and
  max-pools with `bzero` set. A dense layer follows, split over two weight
  tiles. Two MMs write the halves into RAM2 and RAM3. An ACC with no
  activation adds them back into RAM2 (bank 1), and an ACCA applies ReLU.
  The barriers order the steps. A job takes 250 cycles.

`tb_kaleidoscope_top` runs the whole co-processor with 1024-entry tables and
4-deep queues; every PE keeps its full size. It drives:

* a flood of non-IP frames, giving bypass drops and parser skips;
* a burst of 48 new flows, giving fast inference on all four FPEs and queue
  overflow drops;
* an elephant flow, whose fast rule is replaced by a slow rule at its 17th
  packet;
* queries that hit and miss.

It fails if any of these mechanisms never occurs.

`tb_kaleidoscope_full` runs one mouse flow and one elephant flow through the
top with every parameter at its default. It takes about 20 s in Verilator,
most of it clearing the 64K-entry tables.
