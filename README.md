# Sidebar: a scratchpad hand-off between a host CPU and layer accelerators

Neural-network accelerators are cheapest and fastest when everything, activation
functions included, is fixed in hardware, but activation functions are exactly the
part of a network that keeps changing. The Sidebar design keeps the stable matrix
work (convolution, pooling, fully connected layers) in small fixed accelerators and
gives the activations to the host CPU. What makes that affordable is the *Sidebar*:
a small storage array placed beside the CPU at L1 level and beside the
accelerators, outside the program's address space and outside the cache hierarchy.
An accelerator that needs an activation copies its layer output into the Sidebar,
leaves the call arguments there and raises a flag. The host, which polls the flag,
reads the data with Sidebar load instructions, applies the function, writes the
results back and drops the flag. The next accelerator then continues. No cache
flush, no invalidation and no DMA through DRAM is needed between layers. DMA is used
only to load inputs and weights at the start and to fetch the result at the end.

This RTL implements the Sidebar, its ownership protocol, and a pool of five
accelerator primitives that run a small Lenet-style CIFAR-10 network:

| primitive | work | input comes from | output goes to |
|---|---|---|---|
| S1 | convolution | DMA | Sidebar, host applies activation |
| S2 | max pooling, then convolution | Sidebar | Sidebar, host applies activation |
| S3 | max pooling, then fully connected | Sidebar | Sidebar, host applies activation |
| S4 | fully connected | Sidebar | Sidebar, host applies activation |
| S5 | fully connected | Sidebar | private memory, read by DMA |

The host CPU, its caches, main memory and the DMA engine are not part of the RTL.
The host's Sidebar port and each private memory's DMA port are ports of the top
module, `sidebar_system`.

## The hand-off protocol

This is the part to understand before using the RTL. Everything else follows from it.

### One flag, one owner

At any moment the Sidebar belongs to one side: the host, or the accelerator pool.
Ownership lives in a single hardware register, the **flag**, which sits at the top
Sidebar address:

| flag | owner | who writes the flag next |
|---|---|---|
| 0 (reset value) | accelerator side | an accelerator, writing 1 to call the host |
| 1 | host | the host, writing 0 ("pulling it low") when it is done |

The Sidebar enforces ownership in hardware:

* Array reads and writes are granted only to the owner. A request from the other
  side is not refused. It waits with `gnt` low until ownership comes to its side,
  and then completes. Host software that issues an `sbLD` too early simply stalls.
* Flag writes are also granted only to the owner, so a side cannot grab the
  Sidebar.
* **Flag reads are granted to both sides in every cycle.** This is what lets each
  side poll for its turn while the other one works.

Because the two sides never touch the array in the same cycle, the array needs
only one port (`sidebar_mem`).

### Address map (Sidebar of `DEPTH` words, 32 bits each)

| address | content |
|---|---|
| 0 .. DEPTH-6 | data: one 16-bit element per word, sign-extended |
| DEPTH-5 | argument 0: function id (the host looks up its function table with it) |
| DEPTH-4 | argument 1: Sidebar address of the data |
| DEPTH-3 | argument 2: number of elements |
| DEPTH-2 | argument 3: id of the calling accelerator (1..5) |
| DEPTH-1 | flag (the ownership register, not stored in the array) |

The Sidebar does not check where data is placed. Accelerator descriptors and host
code must agree on it ahead of time.

### One call, step by step

```
accelerator k (owner)             Sidebar flag       host
---------------------------------------------------------------------------------
run layer(s) from private memory     0               polls flag: reads 0, 0, 0, ...
copy out_len results -> data area    0               (an early sbLD just stalls)
write args DEPTH-5..DEPTH-2          0
write 1 to flag  ----------------->  1  ownership -> host
done; accelerator k+1 starts         1               reads 1: reads args
k+1 polls flag: reads 1, 1, ...      1               sbLD each element, f(x), sbST
                                     0  <----------- writes 0 to flag
k+1 reads 0: copies data in          0
k+1 runs its layer(s) ...
```

The order data → arguments → flag is what makes the hand-off safe. By the time the
host can see the flag high, everything it needs is already in the array. In the
other direction, the accelerator cannot fetch data until the host's flag write has
taken effect, and the host writes the flag only after its last `sbST`. An
out-of-order host must make sure its data stores reach the Sidebar before its flag
store. Treating Sidebar accesses as ordinary memory operations of the host's
load-store queue, with a fence before the flag store, achieves that. The RTL cannot
check this, because it sees only the order in which requests arrive.

### Port handshake

Each port carries an `sb_req_t` (`req, we, addr, wdata`) in and an `sb_rsp_t`
(`gnt, rvalid, rdata`) out, both defined in `sidebar_pkg`:

* A requester holds `req` and its fields stable until it sees `gnt`. `gnt` is
  combinational from `req` and the current owner. Assertions in `sidebar` check
  that a waiting request does not change.
* A write takes effect at the clock edge at which it is granted. A flag write
  changes the owner at that edge, so a waiting request on the other side can be
  granted in the very next cycle.
* Read data returns with `rvalid` in the cycle after the grant. A flag read
  returns the flag value at the time of the grant.
* The five accelerators share the accelerator-side port through `sb_acc_arbiter`.
  The arbiter uses fixed priority (lowest index wins) and sends each read's data
  back to the requester that issued it. In the Lenet flow at most two primitives
  are busy at once: one computing or copying, the next one polling. The only
  contention is between a poll and a copy, and it costs a cycle at worst.

## The accelerator primitive (`sb_accel`)

Each primitive consists of three parts:

* a private memory (`private_mem`), with two read ports and one write port;
* a layer engine (`layer_engine`);
* the Sidebar state machine.

The host driver programs the primitive with an `acc_cfg_t` descriptor. On `start`
the state machine goes through these steps:

1. **Fetch** (if `sb_in`). It polls the flag, one read every two cycles, until the
   flag reads 0. It then copies `in_len` words from Sidebar address `sb_in_addr`
   into private memory at `pm_in_base`. The copy is pipelined at one word per
   granted cycle, and only the low 16 bits of each word are kept.
2. **Compute**. It runs `stage[0]` and, if `two_stages` is set, `stage[1]` on the
   layer engine.
3. **Call** (if `sb_out`). It copies `out_len` elements from `pm_out_base` into
   the Sidebar at `sb_out_addr`, at two cycles per word. It then writes the four
   argument words and writes 1 to the flag.
4. It pulses `done` and returns to idle.

While a primitive is idle, its private memory belongs to the DMA port: a write, or
a read whose data appears one cycle after the address. An assertion flags a DMA
write while the primitive is busy. Such a write would be lost.

In `sidebar_system`, S1 starts on the host's `start` pulse and every later
primitive starts when the previous one pulses `done`. That is, a primitive starts
right after its predecessor has called the host, and it spends the host's
activation time polling. `done` of S5 is the end of the inference.

### The layer engine

There is one multiply-accumulate unit, controlled by nested loop counters. It
computes one output per loop:

* convolution: `out[co][y][x] = sat((bias[co]·2^8 + Σ in[ci][y·s+ky][x·s+kx] · w[co][ci][ky][kx]) >> 8)`
* fully connected: the same with a 1×1 image and a 1×1 kernel (`in_h = in_w = k = 1`,
  `in_ch` = number of inputs)
* pooling: `out[c][y][x] = max in[c][y·s+ky][x·s+kx]` over a k×k window

Number format and storage:

* Elements are signed 16-bit Q8.8 (8 fraction bits).
* Sums are kept in a 40-bit accumulator, shifted right arithmetically (rounding
  toward −∞) and saturated to 16 bits.
* Tensors are stored channel, then row, then column. Weights are stored
  `[co][ci][ky][kx]`, with one bias per output channel at `b_base`.

Timing: in every cycle the engine issues an activation address on read port A and
a weight address on read port B, and adds the product of the pair that arrives one
cycle later. An output with T terms costs T+3 cycles: one to load the bias (or
preset the maximum), T to issue terms, one to drain and one to write. A layer with
N outputs takes N·(T+3) cycles. The testbenches check this formula exactly.

## The Lenet configuration and its sizes

The network is the CIFAR-10 example network of the PyTorch tutorials, which the
evaluated design was adapted from:

| layer | dimensions |
|---|---|
| conv1 | 3×32×32 → 6×28×28, 5×5 kernel |
| pool | 6×28×28 → 6×14×14 |
| conv2 | 6×14×14 → 16×10×10, 5×5 kernel |
| pool | 16×10×10 → 16×5×5 |
| fc1 | 400 → 120 |
| fc2 | 120 → 84 |
| fc3 | 84 → 10 |

The published design modified some hyper-parameters and gives only its buffer
sizes. The private memories are therefore sized from those buffer sizes:

* inputs 32768
* kernels 4096 and 32768
* weights 192512, 40960 and 4096
* output 4096

Each memory also gets 8192-element regions for activations and intermediate
results:

| parameter | default (elements) | layout used by the testbench |
|---|---|---|
| `PM1_DEPTH` | 45056 | input @0, kernel+bias @32768, conv out @36864 |
| `PM2_DEPTH` | 57344 | Sidebar input @0, kernel+bias @8192, pool out @40960, conv out @49152 |
| `PM3_DEPTH` | 217088 | Sidebar input @0, weights+bias @8192, pool out @200704, fc out @208896 |
| `PM4_DEPTH` | 57344 | Sidebar input @0, weights+bias @8192, fc out @49152 |
| `PM5_DEPTH` | 16384 | Sidebar input @0, weights+bias @8192, output @12288 |
| `SB_DEPTH` | 8192 | largest hand-off is conv1's 4704 elements |

The printed sizes are taken to count elements, which leaves ample room: fc1, for
example, needs 48000 weights + 120 biases of its 192512. Measured on the full-size
system, one inference takes 763 056 cycles from the start of the DMA load to the
last output read. Of those, 682 306 are layer-engine cycles: conv1 alone takes
366 912, conv2 244 800, and fc1 48 360.

## How far to trust it, and where it departs from the published design

What is checked:

* Every block has a self-checking testbench against an independent reference.
* `tb_sidebar_system` runs two complete inferences (ReLU, then Softplus) at the
  default sizes. It checks every element the host receives and all ten outputs
  against a model of the whole network computed in the testbench.
* It also checks the layer-engine cycle count against the N·(T+3) formula.
* It confirms that each mechanism happens: host calls, host polls of a low flag,
  accelerator polls of a high flag, host stalls on ownership, handovers, and
  convolution, pooling and fully connected stages.

Departures and choices of this implementation:

* **Compute speed.** The published accelerators were high-level models whose
  datapaths were unrolled. Their reported cycle counts are far lower; S1, for
  instance, takes about 23 000 cycles there against about 367 000 here. This
  engine uses one MAC and is meant to be correct and small, not to reproduce those
  timings. The Sidebar hand-off costs are the part this design is about. Per
  element, the host needs two accesses (an `sbLD` and an `sbST`, one cycle each
  when granted). The accelerator side needs 2 cycles to copy an element out and 1
  to copy it in.
* **Data type**: Q8.8 fixed point. The published work used C models with floating
  point.
* **One flag for both directions.** The published description also mentions the
  accelerator polling "another region" for the host's completion. Here the same
  flag, pulled low by the host, serves both directions. It doubles as the hardware
  ownership register that the description requires.
* **Stall, not error.** A non-owner access waits for ownership and is never
  rejected or reported.
* **Copy in, copy out.** The next accelerator copies activated data into its
  private memory before computing, rather than computing out of the Sidebar
  directly.
* **Chaining.** Starting each primitive from its predecessor's `done` is this
  design's choice. So are the descriptor format and the argument layout.
* **Not built.**
  * The interrupt-based notification. Only polling is described as implemented.
  * Accelerator-to-accelerator Sidebars, streaming through the Sidebar, and
    reusing it as accelerator scratchpad. These are future directions only.
  * The monolithic and DMA-only baselines the design is compared against.
* **Clock.** The evaluated system ran at 1 GHz. No timing closure has been
  attempted here.

## Simulating and changing it

Files:

* `rtl/`:
  * `sidebar_pkg.sv`: types, address map and descriptor structs.
  * `sidebar_mem.sv`, `sidebar.sv`: the Sidebar.
  * `sb_acc_arbiter.sv`: the arbiter for the accelerator-side port.
  * `private_mem.sv`, `layer_engine.sv`, `sb_accel.sv`: one primitive.
  * `sidebar_system.sv`: the top.
* `tb/`: one self-checking testbench `tb_<module>.sv` per module. Each prints
  `TB_RESULT checks=N failures=M`.

Running a testbench with Verilator 5, for example the full system:

```
verilator --binary --timing --assert -y rtl --top-module tb_sidebar_system \
    rtl/sidebar_pkg.sv tb/tb_sidebar_system.sv
./obj_dir/Vtb_sidebar_system
```

`-y rtl` lets Verilator find each module in `rtl/<module>.sv`. Use the same command
with `tb_sidebar`, `tb_sb_accel`, `tb_layer_engine` and so on. The full system test
takes about two minutes to build and run. Notes for changing it:

* Sizes are parameters of `sidebar_system`.
* A different network only needs different descriptors (`cfg[0..4]`) and memory
  depths. The descriptor fields are documented in `sidebar_pkg.sv`.
* Another activation function is purely host software: the host model in the
  system testbench chooses ReLU or Softplus by function id.
