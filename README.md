# Marionette: a spatial array with its own control flow plane

Spatial (coarse-grained reconfigurable) arrays are good at straight-line
dataflow: each processing element (PE) holds one operator and data streams
through a pipeline of PEs.  They do badly with branches and with loop
nests that are not perfectly nested.  A branch decides which operators run
next, and an outer loop decides when an inner loop starts again.  In a
classic array that decision either travels with the data (as a tag) or
comes from a central sequencer.  Either way the next PE can only change its
configuration after the data has arrived, so configuration time is added
to every branch and every loop restart.

This design gives control a separate plane of its own.  Control travels
between PEs as **instruction addresses** (3-bit tokens) over a dedicated,
registered control network.  Each PE has a small control part that queues
incoming addresses, loads the instruction they point to, and can itself send
addresses to other PEs.  Because this is independent of the data path, a PE
can send the next PE its configuration *before* sending it data (proactive
configuration).  A branch PE can steer its successors one item at a time.
An outer loop can run ahead and leave its decisions in small control FIFOs,
and the inner loop picks them up when it finishes a round.

The RTL here implements that organisation for a 4x4 array with a 64-line
CS-Benes control network, eight control FIFOs, a 16 KB four-bank data
scratchpad, a 2 KB instruction scratchpad and a controller.  It is written
in synthesizable SystemVerilog and verified block by block and end to end
with Verilator.

## Array organisation

```
            host: instruction writes, data port, start/done
                 |                         |
        +--------v--------+        +-------v---------+
        | instruction     |        | memory access   |<---- 16 PE ports
        | scratchpad 2 KB |        | interconnect    |
        +--------+--------+        +-------+---------+
                 |                         |
        +--------v--------+        +-------v---------+
        |   controller    |        | data scratchpad |
        +--+-----------+--+        | 16 KB, 4 banks  |
           | 2 out     ^ 2 in      +-----------------+
   +-------v-----------+------------------------------------+
   | control network: 2 x CS(16) in front of Benes(64),     |
   | outputs registered (1 cycle)                           |
   +--+---------+-------------+-------------+---------------+
      |32 PE    ^32 PE        |24 push/pop  ^8 FIFO outputs
      |inputs   |outputs      v             |
      |         |      +------------------------+
      |         |      | 8 control FIFOs        |
      v         |      +------------------------+
   +--------------------------------------+
   |  4x4 PEs, each: scheduler, trigger,  |
   |  sender | data flow part             |<--> data mesh (N/E/S/W, registered)
   +--------------------------------------+
```

| Module | Role |
|---|---|
| `marionette_top` | the whole array; host ports, start/done, event counters' inputs |
| `marionette_pe` | one PE = `cf_scheduler` + `cf_trigger` + `cf_sender` + `df_part` |
| `control_network` | `cs_network` x2 feeding `benes_network`, registered outputs |
| `control_fifo` | pre-collected outer-loop tokens, popped on request |
| `controller` | loads the program, injects start tokens, detects completion |
| `inst_memory` | 256 x 64-bit program image |
| `data_mesh` | registered nearest-neighbour data links |
| `mem_interconnect`, `data_sram` | 16 PE ports + host onto 4 word-interleaved banks |
| `sync_fifo` | shared FIFO used for token queues and operand buffers |
| `marionette_pkg` | sizes, token / instruction / request types, port map |

## Tokens and the instruction word

A control token is `{valid, addr[2:0]}`: an index into the receiving PE's
8-entry instruction buffer.  Address 7 is reserved as the *done* address
when it reaches the controller.  Data words on the mesh are
`{valid, data[31:0]}`.

Each PE instruction is 64 bits (`inst_t`):

| bits | field | meaning |
|---|---|---|
| 4:0 | `op` | NOP, ADD, SUB, MUL, AND, OR, XOR, SHL, SHR, SRA, LT, GE, EQ, NE, MIN, MAX, PASS, LTU, LD, ST |
| 7:5 | `src_a` | N, E, S, W, local register, immediate, none |
| 10:8 | `src_b` | same encoding |
| 12:11 | `mode` | 0 DFG operator, 1 branch operator, 2 loop operator |
| 13 | `wr_lreg` | write the result into the local register |
| 14 | `out_en` | drive the result onto the mesh |
| 15 | `once` | configuration serves one firing, then is released |
| 16 | `emit` | send `addr_t` proactively (DFG) / per index (loop) |
| 17 | `prio` | which control input the scheduler serves first |
| 18 | `oport` | control output port for `addr_t` tokens |
| 21:19 | `addr_t` | branch taken / loop continue / proactive address |
| 24:22 | `addr_f` | branch not taken / loop end address |
| 27:25 | `ii` | loop initiation interval minus one |
| 31:28 | `step` | loop step |
| 47:32 | `imm` | immediate, memory offset, or loop bound |
| 63:48 | `imm2` | loop start value |

The field set and its layout belong to this design; the paper only says
that the control part has its own instruction set.

## Inside a PE

### Scheduler
Two fall-through token queues (4 entries each), one per control input.  The
arbiter offers the trigger the head of the preferred queue (`prio` of the
current instruction) if it holds a token, otherwise the other head.  A
token is removed only when the trigger takes it, so a PE that is holding a
configuration back-pressures its own queues, never the network.  Two inputs
let a PE receive the tokens of its own basic block on one input, and
outer-loop tokens (from a control FIFO) on the other.

### Trigger: check phase and configuration phase
When the trigger takes a token (cycle *t*), the **check phase** compares the
address with the last one loaded.  If they are equal, the decoded
configuration already held is reused and the buffer is not read (`reused`
pulses).  If not, the **configuration phase** reads the instruction buffer
entry into the configuration register.  Either way the configuration is in
force from cycle *t+1*, with `cfg_new` high for that first cycle.  The
configuration then stays in force until another token is taken, so a
streaming pipeline runs on one configuration for as long as it needs.

When the next token may be taken depends on the mode:

* stream (DFG or branch, `once`=0): at any time; the newest token wins;
* `once`: only after the configuration has fired one time.  This is how a
  branch-target PE executes exactly one basic block per item;
* loop operator: only after the loop has ended.

The trigger also reports which mesh links any buffered instruction reads
(`dir_used`), which the data part uses to decide what to capture.

### Data flow part
Each mesh direction has an 8-entry input buffer.  A direction is captured
whenever some instruction in the buffer reads it, *not only* while a
configuration that reads it is active.  This matters: in a real mapping the
data can overtake its control.  In the end-to-end example, the index
reaches the store PE through three plain PASS PEs well before the store PE
has heard which basic block to run.  The operand multiplexers take the head
of the selected buffer, the local register, the sign-extended immediate or
zero.

An instruction **fires** when its configuration is valid and every buffer
it reads is non-empty (dataflow firing).  Chains of PEs therefore run at one
item per cycle.  The result goes combinationally to `dout`, and the mesh
registers it.  LD/ST compute `A + imm` and must be granted by the
interconnect in the cycle they fire; otherwise the PE stalls (`mem_stall`).
Load data returns one cycle later and is then put on `dout`.  In branch
mode the result is the condition, and operand A is forwarded as data.

In **loop** mode the data part is a loop generator.  After a new
configuration, it starts at `imm2`.  Its bound is taken from `imm` or,
with `src_b` = a direction, from the first word that arrives there (a bound
computed by an outer block).  It issues one index every `ii`+1 cycles, each
index as data (with `out_en`) and as a continue event.  When the index
reaches the bound it raises loop end and releases the configuration.

### Sender: three operator modes

| mode | when a token leaves | address |
|---|---|---|
| DFG | first cycle of a new configuration (`cfg_new`), with `emit` | `addr_t` on `oport` |
| branch | when the branch fires | condition ? `addr_t` : `addr_f`, on `oport` |
| loop | every issued index (with `emit`); at loop end | `addr_t` on `oport`; `addr_f` on the other port |

DFG-mode emission is the proactive configuration.  The successor has its
configuration one cycle after the token, at the same time as or before the
data arrives, because both networks take one cycle.  Branch mode has to wait
for its result, as the paper says it must.

### PE timing summary
* token at `ctrl_in` in cycle *t* → configuration in force at *t+1*;
* DFG emit at *t+1* → successor's token at *t+2* → successor configured at *t+3*;
* data result in cycle *t* → neighbour's input buffer at *t+1* → can fire at *t+1*.

## The CS-Benes control network

64 lines with one registered stage: everything a source drives in cycle
*t* appears at its destination in cycle *t+1*.  Paths are fixed by the
configuration, so there is no arbitration and every path carries one token
per cycle.

* **CS networks** (`cs_network`, 16 lines, 4 stages).  In stage *s*, line *i*
  may take line *i*−2^*s*.  A run of stages can copy one line onto the
  lines after it, so one PE output can reach several PEs (broadcast), which
  a Benes network cannot do.  Configuration: 16 bits per stage, bit
  `s*16+i` = "line i copies line i−2^s in stage s".  Line 0 can only be a
  source, so its output is always line 0 unchanged.
* **Benes network** (`benes_network`, 64 lines, 11 columns of 2x2
  switches).  Its structure is recursive (an input column, two N/2
  subnetworks, an output column); the RTL flattens the recursion into
  levels in one combinational process.  Each switch output has its own select bit, so a switch
  may also copy one input to both outputs.  Configuration width
  64·(2·log2 64 − 1) = 704 bits.  The layout of the configuration, used
  recursively: bits [0, N) are the input column (bits 2k, 2k+1 for switch k:
  upper subnetwork input, lower subnetwork input), then the upper
  subnetwork's bits, the lower subnetwork's bits, and finally N bits for the
  output column.
* **Network configuration** (832 bits) = Benes [703:0], CS0 [767:704],
  CS1 [831:768].

Port map (`marionette_pkg`):

| Benes input | source | Benes output | destination |
|---|---|---|---|
| 0–15 | PE *p* port 0, via CS0 | 0–15 | PE *p* input 0 |
| 16–31 | PE *p* port 1, via CS1 | 16–31 | PE *p* input 1 |
| 32–33 | controller outputs | 32–33 | controller inputs |
| 34–41 | control FIFO outputs | 34–41 / 42–49 / 50–57 | FIFO push A / push B / pop |
| 42–63 | spare inputs (top ports) | 58–63 | spare outputs (top ports) |

Setting up a permutation is the classic looping algorithm.  The testbench
package `benes_route_pkg` implements it: `route_partial` takes a map from
input to output, with −1 for unused inputs.  It completes the map to a full
permutation and writes the 704 select bits.  An unused input must be routed
somewhere; send it to a spare output so it disturbs nothing.

## Control FIFOs and imperfect loops

An outer loop mapped on its own PE runs ahead of the inner loop.  Every
outer iteration pushes a "run the inner loop" token into a control FIFO,
and its loop-end pushes a "finish" token.  Two push ports allow both in the
same cycle.  When the inner loop ends, its end token goes to the FIFO's pop
port, and the FIFO sends back the next pre-collected token, which restarts
or finishes the inner loop.  A pop that arrives while the FIFO is empty is
remembered and served when a token comes in, so producer and consumer need
no timing agreement.  Depth 8, eight FIFOs; the popped token is registered.

## Memory system

`data_sram` holds 4096 32-bit words (16 KB) in four banks, word-interleaved
(bank = address[1:0]), with synchronous read.  `mem_interconnect` gives
each bank to the host if the host asks; otherwise it goes round-robin to the
requesting PEs.  Grants are combinational, and read data is steered back
one cycle later by a registered bank index.  `ev_conflict` marks a cycle in
which a request lost its bank.

## Controller and program image

The host writes the program into `inst_memory` and pulses `start`.  The
controller then reads the image one word per cycle:

| words | content |
|---|---|
| 0–127 | PE *p* instruction buffer entry *e* at word 8*p*+*e* |
| 128–140 | network configuration, least significant word first |
| 141 | start tokens: [2:0] address and [3] valid for controller output 0, [6:4] and [7] for output 1 |

A program load takes about 143 cycles.  The controller then drives the
start tokens for one cycle and counts `run_cycles` until a token with the
done address (7) reaches either controller input.  `done` stays high until
the next `start`.

## A worked example: branch divergence inside an imperfect loop

`tb_marionette_top` runs this nest at the default size:

```
for j in 0..R-1:             // PE8, loop operator, runs ahead
  for i in 0..N-1:           // PE0, loop operator, II = 1
    x = X[i]                 // PE1, LD
    if (x < 0) Y[i] = x+100  // PE2 branch; PE3 ADD / PE7 ST   (basic block 2)
    else       Z[i] = 3*x    //              PE3 MUL / PE7 ST  (basic block 3)
```

* CS0 spreads PE0's continue token onto lines 0–7, so PE1, PE2, PE4, PE5
  and PE6 are configured by one token.
* PE2 tells PE3 per item which block to run (address 1 or 2).
* PE3, in `once` mode, forwards the same address to PE7 the cycle it is
  configured (proactive).
* The index reaches PE7 through PE4→PE5→PE6.
* PE8 leaves R−1 restart tokens and one finish token in control FIFO 0.
  Each PE0 loop end pops one.  The finish token selects an empty loop
  whose end token (address 7) goes to the controller.

With R = 3 and N = 16, all 48 items complete in 67 run cycles.  The
bench checks:

* every Y/Z word, and that untouched words are unchanged;
* 48 branch tokens and 48 proactive emissions;
* 50 loop-continue and 5 loop-end events;
* 3 FIFO pushes and 3 pops;
* bank conflicts and PE stalls: the output arrays are placed so that the
  trailing stores collide with the loads;
* CS broadcast arrivals;
* no queue overflow;
* the run-time bound.

## A second program: gray-scale conversion on all 16 PEs

`tb_workload_gray` maps y = (77r + 150g + 29b) >> 8 onto the whole array
as one basic block.  PE0 is the loop.  Three columns load R, G and B
(PE1, PE5, PE9), three PEs multiply, two add, PE15 shifts, and PE14
stores.  The index is passed down column 0 and along row 3.

CS network 0 copies PE0's continue token onto lines 1 to 15, so a single
token per iteration reaches all fifteen other PEs.  From the second
iteration on, each of them finds the same address in its check phase and
keeps its configuration.

The three loads trail each other by one cycle, and the arrays are placed
so that each load and the store use a different bank.  The bench
converts 1000 pixels (4000 words of data) in 1004 run cycles and checks
every result.

## A third program: a running inner product

`tb_workload_dot` computes y[i] = a[0]b[0] + ... + a[i]b[i] for 1000
elements.  This multiply-accumulate is the inner step of matrix multiply
and 1-D convolution.  The layout follows the gray-scale program:

* PE1 and PE5 load a and b;
* PE7 multiplies them;
* PE11 adds the product to its local register and writes the sum back
  there, so the sum is carried from one iteration to the next inside the PE;
* PE15 forwards the sum to the store at PE14.

A third load stream (PE9 and PE10) keeps three loads competing for the
banks, as in a kernel with three inputs.  The bench checks all 1000
partial sums and the one-element-per-cycle rate; it takes 1004 run cycles.

## Departures from the paper and open points

* **Nonlinear-fitting PEs.** The paper's area table lists four PEs with
  nonlinear fitting but says nothing of their function.  All 16 PEs here
  are identical integer PEs.
* **Compiler and scheduler.** The paper's mapping, reshaping and bitstream
  generation are software.  Programs here are written by hand in the
  testbenches.
* **Sizes the paper does not give** are this design's own: 8-entry
  instruction buffer, 64-bit instruction word, token queues of 4, operand
  buffers of 8, 8 control FIFOs of depth 8, 4 memory banks, two control
  ports per PE, and the network port map.
* **No back-pressure on the data mesh.** A producer never waits for a
  consumer.  A full input buffer drops the word and raises `ev_overflow`.
  Mappings must keep producer/consumer skew under 8 items; the example
  runs without an overflow.
* **Own choices in timing and control:**
  * the one-cycle configuration phase;
  * the acceptance rules, including the `once` bit;
  * memory timing;
  * the controller's load / start / done protocol and the program image
    layout.
* **CS network internals.** The paper takes the CS network from earlier
  work.  The stage structure here is the simplest one that spreads a line
  onto the following lines.
* **Data capacity.** Only the scratchpad is modelled; there is no external
  memory or DMA.  Of the paper's benchmarks at their listed sizes, merge
  sort (1024), FFT (1024 points), CRC, ADPCM and LDPC fit in 4096 words.
  GEMM 64x64, NW 128x128, Hough 120x180, SC decode 2048, Viterbi,
  Conv-1d 16384 and gray processing 16384 need more data than that.

## Simulating

Every block has a self-checking testbench in `tb/`.  Each prints one
`TB_RESULT checks=N failures=M` line and stops itself with a watchdog.
Build and run any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/marionette_pkg.sv tb/benes_route_pkg.sv tb/tb_marionette_top.sv \
    --top-module tb_marionette_top -Mdir obj_top
./obj_top/Vtb_marionette_top
```

Other files are found through `-Irtl` / `-Itb`.  The top-level bench uses
every default parameter and finishes in a few seconds; building it takes
about 20 s.  The block benches are:

* `tb_cf_scheduler`, `tb_cf_trigger`, `tb_cf_sender`, `tb_df_part`,
  `tb_marionette_pe`;
* `tb_benes_network` (random full permutations at 64 lines) and
  `tb_cs_network`;
* `tb_control_network`, `tb_control_fifo`, `tb_data_mesh`,
  `tb_data_sram`, `tb_mem_interconnect`, `tb_inst_memory`,
  `tb_controller`.

The two program benches, `tb_workload_gray` and `tb_workload_dot`, also
run the top at its default parameters.

Simulation is two-state and state that is not reset starts at random
values, so every bench ignores outputs while reset is asserted.  The
instruction buffers are not reset: a program must write all eight entries
of every PE it uses (the controller always writes all 128).
