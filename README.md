# Several CNNs on one FPGA, one memory port: a slot-scheduled multi-CNN accelerator

When several convolutional networks have to run side by side on one FPGA (a
car that recognises signs, steers and labels the scene at the same time), each
network gets its own streaming hardware pipeline, a *CNN engine*, sized to its
own workload. The engines compute independently, but they all read weights and
feature maps from, and write results to, the same off-chip memory. If every
engine simply issued requests whenever it wanted, the engines would fight over
the port, and the frame rates a designer planned at compile time would not
materialise.

This design removes that contention with a **static, slot-based memory
schedule**. Time on the memory port is cut into slots of one burst each (1024
words). The engines get the port in round-robin order. Each engine holds a
compile-time number of *consecutive* slots per period. This fixes the share of
the bandwidth it receives:

    share(e) = slots(e) / (slots(0) + slots(1) + ... + slots(N-1))

Every engine is data-driven: it processes data only as fast as it arrives. So
granting an engine fewer slots slows it down in proportion, and its demand for
bandwidth falls with it. The slot counts are therefore a per-engine *slow-down
control*. A compile-time tool can use them to fit the sum of all demands under
the available bandwidth without idling the port.

The SystemVerilog in `rtl/` contains four CNN engines (one or two blocks of
convolution, ReLU and pooling) and the hardware scheduler that runs the slot schedule. This
scheduler is called MCNN-HS, for multi-CNN hardware scheduler. Each block has
a self-checking testbench in `tb/`.

## Contents

1. The schedule, by example
2. The hardware scheduler (MCNN-HS)
3. The CNN engines
4. Memory layout and the configuration table
5. Top-level interface
6. What follows the published design and what does not
7. Simulating and changing it

---

## 1. The schedule, by example

Take three engines with one subgraph each, granted 1, 2 and 4 consecutive
slots. They must read 16384, 16384 and 32768 sixteen-bit elements. The port
is 64 bits wide, so each word carries four elements, and the three engines need
4096, 4096 and 8192 words.

* One period has 1 + 2 + 4 = 7 slots of 1024 words. The order on the port is
  `E0 E1 E1 E2 E2 E2 E2`, and then it repeats.
* In each period, E0 receives 1024 words, E1 2048 and E2 4096.
* E0 finishes its input in the 4th period. E1 and E2 finish theirs in the 2nd.
* The bandwidth shares are 1/7, 2/7 and 4/7, which is 14.29 %, 28.57 % and
  57.14 %.

`tb/tb_mcnn_cu.sv` runs exactly this case through the control unit and checks
all of it:

* the burst order;
* the 10/20/40 split over ten periods;
* that each subgraph completes at burst 22, 10 and 14, which is the 4th, 2nd
  and 2nd period;
* that no burst costs more than 1024 + 8 cycles of port time.

## 2. The hardware scheduler (MCNN-HS)

```
              +------------------- mcnn_hs -------------------------+
  memory  ar  | read mem ctrl -> read staging buf --tag--> demux -> | FIFO 0..N-1 -> engines
  port    r   |      ^                                              |
          aw  |      |  control unit (subgraphs register,           |
          w   |      |  read/write round-robin)  <-> config table   |
          b   | write mem ctrl <- write staging buf <--- mux <----- | FIFO 0..N-1 <- engines
              +-----------------------------------------------------+
```

### Configuration table (`config_table.sv`)

There is one entry per (engine, subgraph). An entry holds:

* the read base address and the read size in words;
* the write base address and the write size;
* the number of consecutive slots.

A subgraph is the part of a CNN that an engine runs before moving on to the
next. An entry with a read size of 0 ends the engine's list. The table is a
parameter. `fcnnx_pkg::build_cfg_table` computes it at elaboration from the
engine shapes (section 4). A lookup returns the entry one cycle later.

### Subgraphs register and table loader (`mcnn_cu.sv`)

`sg_reg[e]` holds the subgraph each engine is currently running. A small
loader walks the engines. For each engine that has no entry loaded, it looks
up `(e, sg_reg[e])` and copies the entry into per-engine working registers:
read address and remaining words, write address and remaining words, and
slots. If the entry is an end marker, the register wraps to 0 and the engine's
inference counter is incremented.

A subgraph is *complete* when two conditions hold:

* all its input words have been read and all its output words written;
* neither the read nor the write scheduler is still busy with that engine.

Completion increments `sg_done[e]`, advances `sg_reg[e]` and frees the entry,
so the next subgraph is loaded. This keeps the precedence order: subgraph j+1
never starts before j is done. The schedule repeats for ever, because each
engine cycles through its list.

### Read side: slots

The read scheduler keeps a round-robin pointer `rr` and the number of slots
`rr` still has in this period. In each step one of two things happens:

* **Use a slot.** This requires three things: the engine has a subgraph
  loaded, it still has words to read, and it has enough *credit*. The engine's
  input FIFO must have room for the whole burst. The credit starts at the FIFO
  depth, goes down by the burst size when a read is issued, and goes up by one
  for each word the engine pops. The scheduler then issues one transfer of
  `min(BURST_LEN, remaining)` words to the read memory controller and waits
  for it to finish. That finish marks the end of the slot.
* **Give the port on.** If the engine has used all its slots, or cannot use
  the next one, the pointer moves to the next engine. When an engine with work
  left gives up slots, this is counted in `slots_skipped`.

The credit check has two consequences. A burst never waits inside the
scheduler for FIFO space, and so it never blocks the other engines. The port
is also never held for an engine that cannot accept data.

The read memory controller (`read_mem_ctrl.sv`) splits a transfer into bursts
of at most `burst_len` words and keeps one burst outstanding. It tags every
returned word with the engine index. The words pass through the read staging
buffer (`staging_buffer.sv`, a block-RAM FIFO). The demultiplexer then steers
each word to that engine's input FIFO (`sync_fifo.sv`). This FIFO turns the
bursts into a steady stream for the engine.

### Write side

Engines write their results into per-engine output FIFOs. The write scheduler
also goes round-robin, one burst at a time. It serves an engine only when the
engine's output FIFO already holds a full burst, or whatever is left of the
subgraph if that is less. It then does two things at once:

* it sends the address to the write memory controller (`write_mem_ctrl.sv`);
* it copies that many words from the FIFO into the write staging buffer.

The controller streams the words out with `w_last` on the final beat. The
scheduler moves on once the write response has come back and the copy has
finished.

### Timing

* A slot costs the burst length plus about 4 cycles of hand-over: command,
  address, first data and done.
* The read and write schedulers run independently, so reads and writes
  overlap.
* Skipping an engine that cannot use its slot costs 1 cycle.

## 3. The CNN engines

Each engine (`cnn_engine.sv`) is a fixed pipeline of one or two blocks
(`cnn_block.sv`). Every stage uses valid/ready handshakes and stalls when the
next stage does not take its output:

```
64-bit words -> word_unpack -> splitter -> [conv_layer -> relu_stage -> pool_layer] -> (second block) -> word_pack -> 64-bit words
                                  |                                                        ^
                                  +------------- second block's weights -------------------+
```

Pooling is optional in each block (`POOL = 0`). The second block exists when
`K2` is not 0, and its input is the first block's output map. The data are 16-bit Q8.8 fixed-point
values. For each subgraph, the engine's input is one stream with two parts, in
this order:

1. The **weights** of the first block: `OUT_CH x K x K x IN_CH` values,
   ordered by output map, then kernel row, then kernel column, then input
   channel.
2. The **weights** of the second block, if it exists, in the same order.
3. One **input feature map**: `H x W x IN_CH` values, row by row, with the
   channel changing fastest.

The output map uses the same channel-fastest order.

The splitter counts the elements of each subgraph's stream. It sends the
second block's weights directly to that block, and everything else to the
first block. The second block first takes its weights from the splitter. It
then switches to the first block's output until it has received a whole map.
Each convolution loads its weights before its map arrives, so this order
cannot deadlock.

### Convolution stage (`conv_layer.sv`) and C-PE (`conv_pe.sv`)

The stage has `N_PE` convolution processing elements (C-PEs). There are more
output maps than C-PEs, so the output maps are *folded* over them: map `o` is
computed by C-PE `o mod N_PE` in fold `o / N_PE`, and each window is processed
in `OUT_CH / N_PE` folds.

Each C-PE has:

* a dot-product unit of `N_OP` multipliers followed by an adder tree;
* a 48-bit accumulator;
* its own weight memory, filled from the start of the input stream.

A window's `K*K*IN_CH` taps are fed to the C-PE in chunks of `N_OP`. `N_OP`
can range from 1 (one multiply-accumulate per cycle) up to the whole window
(fully parallel). The result is shifted right by 8 and saturated to 16 bits.
It is ready two cycles after the last chunk.

Input pixels go into a line buffer of `K` rows. Once a full window is
available, the stage stops taking input and runs the folds. Each fold takes
`ceil(K*K*IN_CH / N_OP)` cycles plus a few cycles to drain the result. The
stage then accepts the next pixel. It therefore consumes input at roughly

    1 pixel per (OUT_CH/N_PE) x (ceil(K*K*IN_CH/N_OP) + ~4) cycles

which is the rate that the number of slots has to match. A window that is not
yet complete (the first K-1 rows, and columns before K-1) costs only one cycle
per pixel.

### ReLU, pooling, packing

* **ReLU** (`relu_stage.sv`) is a single register slice.
* **Pooling** (`pool_layer.sv`) processes one element per cycle, with stride
  equal to the pool size. It keeps one row of partial results, holding one
  entry per output column and channel. Each output element needs a max or a
  sum over P*P inputs. An average is the sum divided by P*P.
* **Packing** (`word_pack.sv`, `word_unpack.sv`) puts four elements in each
  64-bit word, the first element in the least significant bits.

A subgraph's input and output must each be a whole number of words. This is
checked at elaboration.

## 4. Memory layout and the configuration table

Addresses count 64-bit words. Each subgraph j of engine e has its own region:

    read  base = (e * 8 + j) * 0x10000
    write base = 0x0100_0000 + (e * 8 + j) * 0x10000
    read  size = ceil((weights + input elements) / 4)
    write size = ceil(output elements / 4)

The four default engines (`fcnnx_pkg::DEFAULT_ENGINES`) are small examples:

| engine | conv | input | out maps | N_PE x N_OP | pool | subgraphs | slots | read / write words |
|---|---|---|---|---|---|---|---|---|
| 0 | 7x7, then 3x3 | 1 x 12x12 | 4, then 4 | 2 x 7, then 2 x 6 | max 2, then none | 2 | 1 | 121 / 1 |
| 1 | 5x5 | 2 x 8x8   | 4 | 4 x 5  | max 2 | 3 | 2 | 82 / 4 |
| 2 | 5x5 | 1 x 8x8   | 4 | 1 x 25 | none  | 6 | 4 | 41 / 16 |
| 3 | 3x3 | 4 x 6x6   | 8 | 2 x 1  | avg 2 | 2 | 1 | 108 / 8 |

The slot counts 1, 2 and 4 are those of the example in section 1. The kernel
sizes 7, 5 and 5 are those of the published three-subgraph example. The
remaining shapes are this design's own, chosen to exercise every datapath
option: folding, a fully parallel dot product, a single multiply-accumulate
unit, no pooling, average pooling, and a second block.

All subgraphs of an engine use the same layer shape, with different weights
and inputs.

## 5. Top-level interface (`fcnnx_top.sv`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `run` | in | start the schedule and keep it running; while low, no new slot is granted |
| `ar_valid/ar_ready/ar_addr/ar_len` | out/in/out/out | read burst request: word address and length in words |
| `r_valid/r_ready/r_data/r_last` | in/out/in/in | read data, 64 bits per beat |
| `aw_*`, `w_*`, `b_valid/b_ready` | | write burst request, data with `w_last`, and one response per burst |
| `sg_reg[N_ENG]` | out | subgraphs register |
| `slots_used[N_ENG]`, `slots_skipped` | out | slots granted per engine, and slots given up |
| `sg_done[N_ENG]`, `inferences[N_ENG]` | out | subgraphs and whole subgraph lists completed |
| `conv_busy[N_ENG]` | out | each engine's convolution stage is computing a window |

The bus is a reduced AXI. Each channel has a valid/ready handshake. Length
counts words, there are no IDs, and one burst is outstanding per direction.
Parameters are `N_ENG` (default 4), `BURST_LEN` (1024) and `ENGINES`, the
engine shapes and slot counts.

## 6. What follows the published design and what does not

**Follows the published design:**

* engines with conv, pooling and nonlinear stages;
* output-map folding over C-PEs;
* an `N_OP`-wide dot product with an adder tree and a weight memory per C-PE;
* Q8.8 data;
* word packing on a 64-bit port;
* the MCNN-HS block structure: configuration table, control unit with
  subgraphs register, two memory controllers, two staging buffers,
  demultiplexer/multiplexer, and per-engine FIFOs;
* round-robin slots of one fixed-length burst (1024) with consecutive slots
  per subgraph;
* table entries holding transfer size, slot count and addresses;
* one subgraph after another, repeated cyclically.

**This design's own choices** (the published description is silent):

* the bus protocol and word addressing;
* the stream order of weights and pixels;
* credit-based slot admission and the skipped-slot rule;
* the write-side policy of one burst per turn, once a burst is ready;
* the end-of-list marker in the table;
* FIFO and staging-buffer depths of one burst;
* the rounding and saturation of results;
* the engine shapes.

**Not built:**

* Real network sizes. An engine here has at most two conv-ReLU-pool blocks,
  with shapes fixed at compile time. The published engines are multi-layer pipelines,
  generated per CNN by a design-space-exploration tool, for networks such as
  LeNet-5, CIFAR-10, PilotNet, ZFNet, SceneLabelCNN and VGG16. They include
  fully-connected layers, which this design lacks.
* Input-map folding (`f_in`).
* Tunable parallelism in the ReLU and pooling stages. Each handles one element
  per cycle.
* The compile-time toolflow: performance model, scheduler and search over
  slow-downs. Its result is what the `ENGINES` parameter and the configuration
  table stand for.
* Multiple memory ports, which the published evaluation uses to reach 1.7 to
  3.8 GB/s. One 64-bit port at 150 MHz gives 1.2 GB/s.

## 7. Simulating and changing it

Every testbench prints `TB_RESULT checks=<n> failures=<m>`. They compare
against reference models written in the testbench package
(`tb/tb_ref_pkg.sv`): direct convolution, pooling, and whole-engine models.
Input data come from a hash of the address, so no data files are needed. The
memory model is `tb/offchip_mem.sv`. It has latency, random handshake gaps,
and reads generated data where nothing has been written.

Build and run one testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fcnnx_top \
    -y rtl -y tb +libext+.sv rtl/fcnnx_pkg.sv tb/tb_ref_pkg.sv tb/tb_fcnnx_top.sv
./obj_dir/Vtb_fcnnx_top
```

| testbench | what it shows |
|---|---|
| `tb_fcnnx_full` | the top at its default parameters: every engine runs all its subgraphs once; every output word in memory equals the reference (about 6400 cycles) |
| `tb_fcnnx_top` | the same with 16-word bursts and a stalling memory, so that consecutive slots, skipped slots, short bursts, hand-overs, engine stalls and memory stalls all occur and are counted |
| `tb_mcnn_cu` | the 1/2/4-slot example of section 1, with exact burst order, shares and completion points; an engine whose FIFO is full gives up its slots and later resumes |
| `tb_mcnn_hs` | the scheduler with modelled engines: per-engine data order, cyclic subgraphs, output addresses, burst counts |
| `tb_cnn_engine` | a one-block engine and a two-block engine against the reference over three subgraphs each |
| `tb_lenet5_engine` | the two convolutional layers of LeNet-5 (Caffe sizes: 28x28 input, 5x5 conv to 20 maps, pool, 5x5 conv to 50 maps, pool) on one two-block engine: all 200 output words match, about 65,000 cycles |
| `tb_conv_layer`, `tb_conv_pe`, `tb_pool_layer`, `tb_relu_stage` | datapath against the reference, with random stalls |
| `tb_config_table`, `tb_read_mem_ctrl`, `tb_write_mem_ctrl`, `tb_staging_buffer`, `tb_sync_fifo`, `tb_word_pack`, `tb_word_unpack` | the remaining blocks |

To change the design:

* To map other layers, edit `DEFAULT_ENGINES` (or pass `ENGINES` to the top).
  The configuration table follows automatically.
* To change the bandwidth split, change `slots`.
* `BURST_LEN` sets the slot length. FIFO and staging-buffer depths default to
  one burst, and a burst must fit into an engine's input FIFO.
