# Compressed Tsetlin Machine inference accelerator

A trained Tsetlin Machine (TM) classifies a Boolean input vector with
clauses. Each clause is the AND of a few literals, where a literal is a
feature `f` or its complement `~f`. Half of a class's clauses vote for the
class and half vote against it. The class sum is the number of true
positive clauses minus the number of true negative clauses, and the class
with the largest sum wins. A trained model decides, for every class, clause
and literal, whether that literal is *included* in the clause. Typically only
about 1 % of those decisions are "include". For MNIST, for example, about
17,000 of 3,136,000 decisions are includes.

This accelerator never stores the other 99 %. The model is sent to it as a
list of 16-bit *Include instructions*, one per included literal, in class
order and then clause order. The accelerator walks this list once per
batch, one instruction per clock. For each instruction it:

1. reads the feature the instruction points at;
2. ANDs that literal into a running clause value;
3. adds the finished clause, with its sign, to the class sum;
4. after the last class, takes the argmax.

Because the model is just data in a memory, a new model can be loaded at run
time. The new model can have a different size, a different number of
classes, or a different number of input features. The hardware does not
change.

The datapath is 32 datapoints wide (`BATCH`). Each feature memory word holds
one feature for 32 datapoints. Every instruction therefore evaluates the same
literal for all 32 datapoints in parallel, and one pass over the program
classifies a whole batch.

The RTL is in `rtl/` (SystemVerilog-2017, one module per file) and the
testbenches are in `tb/`. The top module is `tm_accelerator`.

```
            s_tdata/s_tvalid/s_tready (32-bit packets)
                          |
                   +--------------+   class counts   +---------------+
                   | tm_stream_if |----------------->|tm_class_counter|
                   +--------------+                  +---------------+
            instructions |  | feature words (to every core)  | global class no.
          (to one core)  v  v                                v
   +--------------------------------------------+     +-----------+   +----------------+
   | tm_core  (x NUM_CORES)                     |sums | tm_argmax |-->| tm_output_fifo |--> m_tdata
   |  tm_instr_mem   tm_feature_mem             |---->| (running  |   | (BATCH results)|
   |  tm_fetch_decode -> tm_literal_select ->   |     |  max)     |   +----------------+
   |  tm_clause_acc -> tm_class_sum             |     +-----------+
   +--------------------------------------------+
```

## The Include instruction

Each instruction is 16 bits, from the most significant bit down:

| bits  | field    | meaning |
|-------|----------|---------|
| 15    | `+/-`    | polarity of the clause this literal belongs to: 0 = votes for the class (+1), 1 = votes against (−1) |
| 14    | `CC`     | toggles at the first Include of every new clause |
| 13    | `E`      | toggles at the first Include of every new class |
| 12:1  | `Offset` | feature distance from the previous Include of the same clause (from feature 0 for a clause's first Include) |
| 0     | `L`      | 0 = the literal is `f`, 1 = the literal is `~f` |

Clause and class boundaries are not stored as numbers; they are signalled by
toggling a bit. The decoder compares `CC` and `E` with the previous
instruction's bits. A change in either means that a new clause starts. A
change in `E` means that a new class starts as well. The first instruction of
a program always opens a clause and a class, whatever its bits are.

The offset is relative, and it restarts at every clause. The literal
selector keeps a feature pointer:

- at a new clause, the pointer becomes `0 + offset`;
- otherwise it becomes `pointer + offset`.

Both `f` and `~f` of the same feature can be in one clause, so an offset of 0
in the middle of a clause is legal. With 12 offset bits and a restart at
every clause, a clause can reach features 0…4095. This is the size of the
default feature memory.

Below is a small example: class 0 with the clauses `+(x1 & ~x4)` and
`-(x2)`, followed by class 1 with the clause `+(~x0)`.

```
pol CC E offset L      meaning
 0  1  1    1   0      new clause, new class   literal x1
 0  1  1    3   1                              literal ~x4   (1+3)
 1  0  1    2   0      new clause (CC toggled) literal x2
 0  1  0    0   1      new clause, new class   literal ~x0
```

A clause with no Include produces no instructions. Its output is taken as 0,
the usual TM inference convention, so it contributes nothing.

A class with no Include at all would also vanish, and every later class
index would then shift down by one. A model compiler must avoid this by
emitting at least one Include per class. For example, it can emit the same
literal in one positive clause and one negative clause, which adds exactly 0.

The reference compiler is `tm_model::compile` in `tb/tm_tb_pkg.sv`. It takes
a model given as an include mask and produces exactly this format.

## The input stream and its headers

Everything enters through one valid/ready packet port (`s_tdata`,
`STREAM_W` = 32 bits, AXI4-Stream style). Each group of packets starts with
a header:

| bits     | instruction header (`[30]=1`)      | feature header (`[30]=0`) |
|----------|------------------------------------|---------------------------|
| 31       | new stream                          | new stream |
| 30       | 1                                   | 0 |
| 29:22    | number of classes in this core's program | number of feature packets that follow (bits 29:0) |
| 21:0     | number of instruction packets that follow | |

The payload packets are as follows:

- An instruction packet carries one instruction in bits `[15:0]`.
- A feature packet carries feature *i* of every datapoint in the batch, in
  bits `[BATCH-1:0]`, with datapoint 0 in bit 0. Packets arrive in feature
  order 0, 1, 2, …

The last feature packet starts inference on the batch. `s_tready` stays low
from then until all `BATCH` results have been written into the output FIFO.
The model stays loaded, so further batches need only a feature header and
their features.

The new-stream bit (31) has these effects:

- **On an instruction header**, it clears every core's program and the class
  counts. The program that follows goes to core 0.
- **On an instruction header without the bit**, the program goes to the next
  core. This is how a multi-core model is loaded: one header per core, each
  carrying a contiguous, non-overlapping range of classes.
- **On a feature header**, it empties the output FIFO and restarts the argmax.

A header may announce zero packets. An empty feature batch still runs:
every feature then reads as 0, and `BATCH` results are returned.

For reprogramming at run time, the host only has to send new headers. A new
model may be any length up to `IMEM_DEPTH`, and may have any number of classes
up to 255. A new batch may have any number of features up to `FMEM_DEPTH`.

## The pipeline and its timing

Each core has four pipeline stages. Every stage takes one clock, and each
stage works on a different instruction, so one instruction is issued per
clock. Nothing ever stalls.

| stage | module | work |
|-------|--------|------|
| Fetch | `tm_fetch_decode` | drive the instruction memory address (synchronous read) |
| Extract feature | `tm_fetch_decode`, `tm_literal_select` | decode the instruction; compare `CC`/`E` with the previous instruction; compute the feature address; start the feature memory read |
| Clause acc | `tm_literal_select`, `tm_clause_acc` | select `f` or `~f` for all 32 lanes; AND the result into the clause register (or load the register, for a clause's first literal) |
| Class sum update | `tm_class_sum` | add ±1 to each lane's class sum for each finished clause that is true |

The subtle point is *when a clause is finished*. That is only known from the
instruction **after** its last literal, because that next instruction is the
one that toggles `CC` or `E`. Waiting for it would cost a clock per clause.
Instead, `tm_clause_acc` looks one stage back, at the instruction being
decoded in Extract feature, while it accumulates the current literal. If
that next instruction opens a clause, or if there is none (end of program),
the current clause ends in this clock. The finished clause value, its
polarity and the "class ends here" flag are registered into Class sum update
on the next clock. The clause register is then reloaded, not ANDed, by the
next instruction.

Class sums accumulate in `SUM_W` = 16-bit signed registers, one per lane.
When a class ends, the 32 sums are output as one event (`ev_valid`, `ev_idx`,
`ev_sums`), together with the core-local class index. The sums then restart
at 0.

Timing, counting the clock of the last feature packet as clock 0, for a
program of N instructions:

- instruction *i* is fetched in clock *i*+1;
- the last class event leaves the core in clock N+4 (`done` pulses then);
- the first classification is in the output FIFO and on `m_tvalid` in clock
  N+7;
- the other 31 results follow, one per clock if the host keeps `m_tready`
  high.

An empty program finishes at once.

The time for a batch is therefore about N clocks. It does not depend on the
number of features, classes or clauses, only on the number of Includes. The
end-to-end testbench checks this cycle count exactly.

## Several cores: splitting by class

`NUM_CORES` (default 1, the base design) instantiates identical cores:

- every core receives the same feature packets;
- each core receives its own program, holding a different range of classes.

All cores start together. The run takes as long as the longest program,
which is why a model should be split so that its Include counts are balanced.

Two shared blocks connect the cores' local class indices to global ones:

- **`tm_class_counter`** records, for each core, the class count from that
  core's instruction header. It forms a prefix sum of these counts. Core
  *k*'s local class *c* becomes global class `sum(count[0..k-1]) + c`. The
  host's classes must therefore be assigned to cores in order: core 0 has the
  lowest classes.
- **`tm_argmax`** keeps, for each of the 32 lanes, the best sum seen so far
  and its class. In each clock it takes the class events of all cores. If two
  or more cores finish a class in the same clock, it compares them through a
  comparator chain. On equal sums the **lower global class index wins**. This
  matches "first maximum" argmax and makes the result independent of which
  core finishes first. No table of all class sums is stored.

When every core is done, the stage that pushes results copies the 32
winners into `tm_output_fifo`, lane 0 first. The FIFO holds `OUT_FIFO_DEPTH`
= 32 entries, which is one full batch. If the host does not read, the push
waits, and the input stays closed until the whole batch is pushed.

## Memories

- **`tm_instr_mem`**: 16-bit words, `IMEM_DEPTH` = 24,576 deep. Writes
  append. A clear rewinds the write pointer, and the number of words written
  is the program length. Writing beyond the depth is dropped and raises
  `imem_overflow`.
- **`tm_feature_mem`**: `BATCH`-bit words, `FMEM_DEPTH` = 4,096 deep.
  Writes append, and reads use the address from the literal selector. An
  address beyond the features written in this batch reads as 0 rather than
  as stale data.

Both memories have a synchronous read and no reset on the array, so they map
to block RAM. One core with the defaults holds 393,216 + 131,072 bits.

## Parameters (top level)

| parameter | default | notes |
|-----------|---------|-------|
| `NUM_CORES` | 1 | 1 = base design; 5 is the multi-core size used for the evaluated workloads |
| `STREAM_W` | 32 | header/packet width; must be ≥ `BATCH` and ≥ 16 |
| `BATCH` | 32 | datapoints per batch; 1 gives single-datapoint operation |
| `IMEM_DEPTH` | 24576 | Include instructions per core |
| `FMEM_DEPTH` | 4096 | Boolean features per datapoint |
| `SUM_W` | 16 | class sum width (signed) |
| `CLASS_W` | 8 | width of a class index and of each result |
| `OUT_FIFO_DEPTH` | 32 | output FIFO entries |

Reset is asynchronous and active low (`rst_n`). The new-stream header bit is
the protocol-level reset.

## What follows the original design and what does not

The following come from the published description:

- the idea of the design;
- the 16-bit instruction with fields `+/-`, `CC`, `E`, `Offset`, `L` in that
  order;
- toggling `CC` and `E` to mark clause and class changes;
- the two header flag bits (new stream, instruction/feature);
- the class number and instruction number carried in the instruction header;
- the four pipeline stages;
- 32-datapoint batching;
- argmax, then an output FIFO of up to 32 results;
- the multi-core arrangement: shared features, class-disjoint programs, one
  class counter, one argmax and one output FIFO.

The following are this design's own choices, where the description is
silent or unclear:

- **Offset width.** The instruction is described as 16 bits, but the field
  widths printed in the encoding figure add up to 17 (a 13-bit offset). This
  design keeps 16 bits and uses a 12-bit offset.
- **Offset meaning.** The description calls the offset the distance to the
  next Include, and also shows it selecting "the 4th element" of the feature
  memory. This design uses a per-clause relative offset, counted in features,
  which satisfies both readings. The exact original convention (for example,
  whether it counts literals or features) is not known.
- **Bit values.** The values of `+/-` (0 = positive) and `L` (1 = complement)
  are assumed. So is the rule that an `E` toggle also closes the clause.
- **Instruction header fields.** The text also says the instruction header
  holds "the number of clauses". This design follows the header figure
  instead (class number and instruction number). Field widths are assumed:
  8-bit class number and 22-bit instruction count.
- **Packet formats.** One instruction per packet, and one feature word per
  packet, are assumptions. Only 32-bit headers are simulated. The
  16-bit and 64-bit options are available through `STREAM_W`, which must be
  at least `BATCH`. Both elaborate and lint cleanly, but neither has been
  simulated. With 16 bits, the header's instruction count shrinks to 6 bits
  and `BATCH` to at most 16.
- **Multi-core routing.** How the stream is split among cores is not
  specified. Here it is one instruction header per core, in order.
- **Memory depths** are assumed: 24,576 instructions is 12 × 2K × 18 block
  RAMs, enough for the MNIST model; 4,096 features is the reach of the
  offset. On the original eFPGA they are a build-time option.
- **Class sums.** Their width (16 bits) and the lowest-index tie rule are
  assumed.
- **Results per batch.** All `BATCH` results are always pushed. The feature
  header counts features, not datapoints, so there is nowhere to say that a
  batch is only partly filled.
- **Clause counter.** Here it only counts finished clauses (exposed inside
  the clause accumulator). Its original use is not described.
- **Not built:** the surrounding system, that is, the model-training node,
  the sensor booleanization, and the eFPGA fabric with its BRAM primitives.
  The standalone versus AXI-Stream wrapping is also absent: both are the same
  RTL with one valid/ready port.

## How far it can be trusted

Every module has a self-checking testbench. Each compares the module against
an independent model written in the testbench, and each testbench has been
shown to fail when the module is broken on purpose. For example, the
clause testbench failed when the clause AND was replaced by OR, the core
testbench failed when the clause-end lookahead was removed, and the argmax
testbench failed when the tie rule was reversed.

The system-level tests use a software TM in `tb/tm_tb_pkg.sv`. It holds
random include masks and computes class sums and predictions directly from
the masks, not from the instructions. It then compiles the masks into the
instruction format above and checks every hardware result against its own
prediction.

| testbench | what it runs |
|-----------|--------------|
| `tb_tm_accelerator` | 3 cores, small random models: reprogramming between batches, 1–3 cores in use, idle cores, new-stream feature headers, random input and output stalls, many ties; exact latency N+7 |
| `tb_tm_accelerator_full` | all defaults, MNIST-shaped model: 784 features, 10 classes × 200 clauses, ~15,700 Includes, one full batch of 32 |
| `tb_tm_accelerator_single` | `BATCH` = 1 (single-datapoint mode), 2 cores: the same checks, plus 34 unread results that fill the output FIFO |
| `tb_tm_workloads` | 5 cores, model shapes of five sensor datasets (EMG, human activity, gesture phase, sensorless drive, gas drift) with 1.5k–16.6k Includes |
| `tb_tm_<block>` | one per module |

All of these pass, with results bit-exact against the reference model.
Verilator's lint reports only unused signals and parameters, and the
asynchronous reset used in the assertions' `disable iff`; none of these
affects the logic.

Two things are not verified:

- no comparison against a model trained on real data;
- no timing closure on an FPGA: clock frequency and resource use have not
  been measured.

The cycle counts match the published latencies in shape: about one clock per
Include per batch. For example, a sensorless-drive-sized model split over 5
cores takes about 4,600 clocks, compared with the ~5,000 implied by the
published 5-core figure at 100 MHz.

## Simulating

With Verilator 5, from the top of this tree:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/tm_pkg.sv tb/tm_tb_pkg.sv $(ls rtl/*.sv | grep -v tm_pkg) \
  tb/tb_tm_accelerator.sv --top-module tb_tm_accelerator -o sim
./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

- To run another testbench, substitute its file and its module name.
- Block testbenches that do not use `tm_tb_pkg` can leave out
  `tb/tm_tb_pkg.sv`.
- `rtl/tm_pkg.sv` must come first, because the other files import it.

The full-size testbench takes a few seconds.

To drive the accelerator from your own host or testbench:

1. Send `{1'b1, 1'b1, 8'(classes), 22'(n)}` followed by `n` instruction
   packets.
2. Send `{1'b0, 1'b1, ...}` for each further core.
3. Send `{1'b0, 1'b0, 30'(features)}` followed by one packet per feature.
4. Read `BATCH` class numbers from `m_tdata`.

To produce the instructions from a trained model, follow
`tm_model::compile`:

- walk classes, then clauses, then features in order;
- for a feature, put `f` before `~f`;
- make clause *j* positive when *j* is even;
- toggle `CC` at each clause's first Include;
- toggle `E` at each class's first Include.
