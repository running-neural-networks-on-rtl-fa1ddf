# Binary neural-network inference in the NIC data plane

A network card sees every packet before the host does. If it can run a small
neural network itself, decisions such as "which application is this flow?",
"is this traffic an attack?" or "which queue in the fabric is congested?" can
be made at line rate and with sub-microsecond delay, and the host CPU is
spared the work. The networks that fit this budget are **binary** multi-layer
perceptrons (BNNs): every input, weight and activation is one bit. A
multiply then becomes an XNOR, and a neuron's dot product becomes a
population count compared with half its fan-in. A 256-input, 32-16-2 neuron
classifier needs about 1 KB of weights.

This repository holds synthesizable SystemVerilog for such an inference
engine, following the FPGA NN executor of the N3IC design (NetFPGA, 200 MHz).
It comprises:

* the **NN executor**: a chain of layer blocks that share one weight memory;
* an optional **pool** of several executors working in parallel, for more
  throughput (one executor by default);
* the **input selector**: it takes triggers from the packet parser and the
  forwarding module, and fetches the NN input from a packet field or from NIC
  memory;
* the **output selector**: it returns the result as a packet field or writes
  it to NIC memory.

The packet parser, forwarding module, NIC memory and Ethernet ports belong to
the host NIC. They are not included, and the top module brings out their
signals as ports.

## The neuron

For a layer with `n` inputs `x` and neuron weights `w_i` (each `n` bits),
neuron `i` outputs

    y_i = 1  if  popcount(XNOR(w_i, x)) >= n/2,   else 0

A weight bit of 1 stands for +1 and a bit of 0 for -1. XNOR counts the
agreeing positions, and `>= n/2` is the sign of the ±1 dot product (a tie
counts as positive). The description this design follows is inconsistent
here. Its pseudo-code uses `>=` against half the fan-in. Its prose says the
output is 1 when the count is *smaller* than half. Its executor diagram labels
the first stage "XOR". The RTL follows the pseudo-code with XNOR; with XNOR
as the multiply, that is the usual BNN sign. Swapping to the other reading
means inverting the comparison in `bnn_block.sv`, stage 3.

## The layer block (`bnn_block`)

One block computes one fully connected layer. Its size is fixed at
elaboration by `N_IN` (n) and `M_OUT` (m).

**Weight rows.** Weights live in 256-bit memory rows. A row holds
`NPR = floor(256/n)` weight vectors, packed from bit 0 up: neuron `r*NPR + j`
uses bits `[j*n +: n]` of row `r`. All NPR neurons of a row are evaluated in
the same pass, so a layer takes `R = ceil(m / NPR)` rows. Some examples:

| layer (n -> m) | neurons per row | rows |
|---|---|---|
| 256 -> 32  | 1  | 32 |
| 32 -> 16   | 8  | 2  |
| 16 -> 2    | 16 | 1  |
| 152 -> 128 | 1  | 128 |
| 128 -> 64  | 2  | 32 |

**Pipeline.** A row passes through three stages:

1. *Read and XNOR.* The row arrives from the memory into a weight buffer.
   Each of its NPR segments is XNORed with the layer input, which was latched
   at start.
2. *Lookup tables.* Each segment is cut into 8-bit slices, and each slice
   addresses a 256-entry popcount table (`popcnt_lut`). That makes
   `ceil(n/8)` tables per neuron, e.g. 32 for a 256-bit input. When n is not
   a multiple of 8 (152, 23, ...), the padding bits of the last slice are
   forced to 0 after the XNOR, so they never count.
3. *Sum and sign.* The table outputs are added, compared with `n/2`, and the
   resulting bits are written into the block's m-bit output register.

**Timing.** A weight row takes two clock cycles to read: one in the
registered memory and one in the weight buffer. A new row read is issued
every second cycle, and reads do not overlap. A layer of R rows therefore
raises `done` exactly **2R + 4** cycles after `start`. `out_vec` then holds
its value until the next start. `start` is only legal while the block is
idle, and an assertion enforces this.

## The executor (`nn_executor`)

`NUM_LAYERS` blocks are chained. `LAYER_SIZE` lists the input width and then
each layer's neuron count; the default `'{256, 32, 16, 2}` is the
traffic-analysis network. Block k starts when block k-1 raises `done` and
reads block k-1's output register directly.

**Memory map.** All blocks share one `weight_mem` of `DEPTH` 256-bit rows
(default 256 rows, 8 KB), which has one read port and one write port. Layer
k's rows start right after those of the layers before it. The default
network uses rows 0–31 for layer 1, rows 32–33 for layer 2 and row 34 for
layer 3. An elaboration check rejects a network whose rows exceed `DEPTH`.

**Loading weights.** The control plane writes rows through
`wr_en/wr_addr/wr_data`. Each row is laid out as described for the layer
block. For a fan-in below 256, the unused top bits of a row are don't-care.

**Flow.** A request is a valid/ready handshake carrying the input vector and
an opaque context word. `in_ready` is high only while the executor is idle.
It runs one inference at a time, layer after layer. The result is offered on
`out_valid`, is held until `out_ready`, and returns the request's context.

| network | rows | input accepted -> `out_valid` | period |
|---|---|---|---|
| 256-32-16-2 (default) | 35 | 83 cycles | 84 cycles |
| 152-128-64-2 | 161 | 335 cycles | 336 cycles |
| 256-128 (one layer) | 128 | 261 cycles | 262 cycles |

In general the latency is `1 + Σ(2·R_k + 4)`. At 200 MHz the default
network completes 2.38 M inferences/s on one executor, against about
1.8 M/s reported for the FPGA prototype inside a full NIC. One inference
takes 0.42 µs, inside the 0.5 µs reported there. Latency grows linearly with
the number of weight rows.

## Parallel executors (`exec_pool`)

One executor serves one inference at a time. For more throughput,
`exec_pool` places `NUM_EXEC` complete executors side by side. Each has its
own weight memory, and the weight-load port writes the same rows into all of
them. A request goes to the lowest-numbered idle executor, so requests are
refused only while every executor is busy. Results are collected
round-robin. A result that is waiting for `out_ready` keeps its grant, so
the result port stays stable. Results can therefore leave in a different
order from the requests, and the request's context (its tag) tells them
apart.

Dispatch and collection are combinational, so a lone request sees exactly
the single-executor latency. Throughput grows linearly: four executors on
the default network complete 80 inferences in 1687 cycles (9.5 M/s at
200 MHz). For a 256x32 layer, 24 streamed requests give 2.86, 5.70 and
11.27 M/s on 1, 2 and 4 executors. The top uses one executor by default (`NUM_EXEC = 1`), which is
the reference design's main configuration.

## Triggers, inputs and outputs (`input_selector`, `output_selector`)

An inference can be requested in two ways:

* by the **packet parser**, as soon as a packet arrives;
* by the **forwarding module**, e.g. once it has counted enough packets of a
  flow.

Each request is an `nn_req_t` (see `n3ic_pkg.sv`):

* `src`: where the input comes from. `SRC_PKT` means the 256-bit
  `pkt_field` carried in the request. `SRC_MEM` means a 256-bit vector read
  from NIC memory at `in_addr`, such as a flow's statistics.
* `ctx.dst`: where the result goes. `DST_PKT` returns it to the forwarding
  module on `pr_valid/pr_data`, with `ctx.tag` on `pr_tag` so the packet can
  be matched. `DST_MEM` writes it to NIC memory at `ctx.out_addr`.

When both input and output are packet fields, the engine works inline on the
packet; otherwise it works on memory in the background.

The input selector grants one trigger at a time, round-robin when both
sources request in the same cycle. It accepts no new trigger while its
current input waits for the executor, so a busy executor back-pressures both
sources. It expects NIC memory to return data one cycle after `mrd_en`. The
output selector takes a result in the cycle it is offered, unless a packet
result is still waiting for `pr_ready`. It writes memory results as a
one-cycle `mwr_en` pulse.

End to end, with the default network, a packet-field trigger produces its
packet result 85 cycles after it is accepted, and a memory input adds one
cycle. Back to back, a result comes out every 84 cycles.

## Parameters

| parameter | where | default | meaning |
|---|---|---|---|
| `NUM_EXEC` | top, pool | 1 | executors working in parallel |
| `NUM_LAYERS` | top, executor | 3 | layers of the MLP |
| `LAYER_SIZE` | top, executor | `'{256,32,16,2}` | input width, then neurons per layer |
| `DEPTH` | top, executor, memory | 256 | weight rows of 256 bits |
| `ROW_W` | package | 256 | row width = widest layer input |
| `MEM_AW`, `TAG_W` | package | 16, 16 | NIC memory address and tag widths |

Every layer input must be between 1 and 256 bits wide. To run another
network, override `NUM_LAYERS` and `LAYER_SIZE` on `n3ic_top` (or on
`nn_executor`), and load its rows in the order given above. Some examples:

* `'{152,128,64,2}` for the 19-probe tomography network;
* `NUM_LAYERS=1, '{256,128}` for a single 128-neuron layer.

## Where this departs from, or adds to, the reference design

* **The sign convention.** The pseudo-code and the prose disagree, and the
  RTL follows the pseudo-code (`>=`, XNOR); see "The neuron" above.
* **Parallel executors.** The reference evaluates several executors but
  does not describe how work is spread over them. The dispatch and
  collection policies here are this design's own.
* **Read timing.** The "two cycles per row" read is taken to mean one row
  every two cycles with no overlap. Fully pipelined reads would roughly halve
  the latency of large layers.
* **One memory per executor.** The reference's block diagram draws a
  memory inside each layer block, while its text says one memory is shared
  by all blocks. The RTL follows the text.
* **Memory and loading.** The weight memory is a plain RAM array. The
  reference calls it a CAM but only reads it by address. The weight write
  port is this design's addition, since the reference treats weights as
  read-only.
* **Fixed network shape.** The network shape is fixed at elaboration, as in
  the reference, where the executor is built for a given network.
* **Interfaces.** The request and result formats, the handshakes, the
  round-robin arbitration and the memory timing are this design's own.
  The reference names these parts without specifying their interfaces.
* **Not built here.** This RTL does not include the surrounding NIC (parser,
  forwarding, memory, MACs) or the other two implementations of the same
  idea, on a network processor and as a P4 pipeline.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
They build with plain Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/n3ic_pkg.sv tb/bnn_ref_pkg.sv tb/tb_n3ic_top.sv --top-module tb_n3ic_top
    ./obj_dir/Vtb_n3ic_top

| testbench | what it covers |
|---|---|
| `tb_popcnt_lut` | all 256 table entries |
| `tb_weight_mem` | write/read, one-cycle latency, read-during-write (old data) |
| `tb_bnn_block` | layers 256x32, 32x16, 152x20 and 16x2 against the reference model; every layer's latency must be 2R+4 |
| `tb_nn_executor` | default network: 40 random inferences; latency 83, period 84, back-pressure on the output |
| `tb_input_selector` | random triggers from both sources, ties, packet and memory inputs, executor back-pressure |
| `tb_output_selector` | random destinations, packet back-pressure, memory writes |
| `tb_exec_pool` | four executors: lone-request latency 83, 80 tagged requests under heavy result back-pressure (each returned once and correct), throughput of at least 4 x 1.8 M/s, all four busy at once |
| `tb_n3ic_top` | the whole engine at default parameters: inline latency 85, memory-to-memory throughput of at least 1.8 M/s at 200 MHz, then 8000 cycles of mixed random traffic. It counts that every mechanism (both triggers, ties, both input sources, both destinations, stalls on either side) occurred. |
| `tb_workloads` | tomography networks 152-32-16-2, 152-64-32-2 and 152-128-64-2 (latency under 2 µs), single 256-input layers of 32/64/128 neurons (latency linear in size), and the same layers streamed through 1, 2 and 4 executors (throughput linear in executors) |

The reference model (`tb/bnn_ref_pkg.sv`) computes each neuron directly with
`$countones`, independently of the row packing and lookup tables of the RTL.
