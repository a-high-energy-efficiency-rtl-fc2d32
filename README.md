# A multi-core accelerator for training deep spiking neural networks

Training a spiking neural network (SNN) with backpropagation through time has
three phases for each layer: a forward pass, a backward pass for the gradient
of the membrane potential, and a weight-gradient pass. The forward pass works
on binary spikes, so it needs only additions. The backward pass has real-valued
gradients but is sparse, because the surrogate derivative of the spike
function is zero for most neurons. The weight gradient again multiplies by
spikes, so it needs only additions. This design gives each of the three phases
its own engine and skips zeros in all of them. A chip is a mesh of identical
cores. Each core has a forward (FP) sub-core and a backward (BP) sub-core, and
each sub-core has its own controller, DMA and network interface. Layers can
therefore be pipelined across cores, with the forward and backward phases
overlapped.

All arithmetic is IEEE half precision (FP16). One 256-bit SRAM word holds a
vector of 16 FP16 values, which is one lane per channel of a 16-channel block.
A 16-bit word holds the spikes of 16 channels.

## The neuron model the engines compute

A leaky integrate-and-fire neuron with leak `alpha`, firing threshold `th_f`
and hard reset. Over time steps t = 0 .. T-1:

    u[t] = (s[t-1] ? 0 : alpha * u[t-1]) + conv_fp[t]          (forward)
    s[t] = u[t] >= th_f

Backward, from t = T-1 down to 0, with a rectangular surrogate window:

    fire'[t] = (th_l <= u[t] <= th_r) ? beta : 0
    ds[t]    = conv_bp[t] - alpha * du[t+1] * u[t]
    du[t]    = (s[t] ? 0 : alpha * du[t+1]) + ds[t] * fire'[t]   (du[T] = 0)

`conv_bp` is the transposed convolution of the next layer's `du` with the
rotated weights. The weight gradient is

    dW[m][c][r][s] = sum over t and output positions of du_next[m] * s[c] (shifted by r, s).

`alpha`, `th_f`, `th_l`, `th_r`, `beta` and `T` are configuration registers of
each sub-core (`core_cfg_t` in `snn_pkg`). Their reset values are 0.5, 1.0,
0.5, 1.5, 1.0 and 4. The window bounds are inclusive.

## Engines

### FP engine (`fp_engine`, `fp_array`, `soma_unit`)

`fp_array` is 16 x 16: 16 output channels (rows) by 16 input channels
(columns). Each row holds 16 stationary weights. Weights are added in pairs
first. Each pair of spikes then selects 0, w0, w1 or w0+w1, and a three-level
adder tree sums the eight selections. If all 16 spikes are zero, the array
does nothing and the engine reports a skip (`ev_skip`). In that case it also
leaves out the partial-sum read and write.

`FP_CONV` is weight stationary. For each tile (16 output channels, 16 input
channels, one kernel offset r,s), 16 cycles load the weights. Then every time
step and output position streams through, one per cycle, and the result is
added onto the `Conv_FP` partial sum. Each weight is read from SRAM exactly
once. Cycle count: `tiles * (16 + T * out_h * out_w)` plus a few drain cycles.

`FP_SOMA` then runs 16 `soma_unit` lanes over `Conv_FP`, one word per cycle.
It writes `u` (the value before reset, which the backward pass needs), the
spike words, and the output spikes `s^l`. The output is optionally 2x2
max-pooled; for binary spikes, max pooling is an OR.

### BP engine (`bp_engine`, `bp_array`, `grad_unit`)

`bp_array` is a 16 x 16 FP16 multiply-accumulate array. Row c sums
`du[m] * w'[c][m]` over 16 channels m, with a four-level add tree. There are
two gating levels:

* **Per position.** The engine first reads `u^l` and computes `fire'` for the
  16 channels. If all 16 are zero, the position is not computed at all
  (`ev_gate1`).
* **Per lane and row.** A row whose `fire'` is zero is disabled. Inside live
  rows, a multiplier whose `du` input is zero outputs 0 without multiplying
  (`ev_zero_du`).

`BP_CONV` uses the same tiled, weight-stationary loop as the forward pass. It
takes zero insertion (`insert` operand) for strided layers and padding for the
transposed convolution. `BP_GRAD` runs 16 `grad_unit` lanes from the last time
step to the first, carrying `du[t+1]` in the `grad u^l` buffer. With pooling,
the gradient of a pooled output goes to the positions inside its 2x2 window
that spiked.

### WG engine (`wg_engine`, `wg_array`)

`wg_array` is output stationary. Each of the 256 processing elements keeps
one weight-gradient sum `dW[m][c]` for the current kernel offset. Per input,
the 16 values `du[m]` run along the rows and the 16 spikes `s[c]` run along
the columns. A column whose spike is 0 is not clocked. A position whose 16
spikes are all zero does not even read `du` (`ev_gate2`).

`WG_CONV` clears the array, streams all T time steps and all output positions
(gradients of all time steps add up inside the PEs), then writes the 16 rows
to the `grad w` buffer. With `dw_acc` set, it adds onto the stored values.
Cycle count per tile: `1 + T * E * F + 3 + 17`. WG_CONV has no kernel or
padding operand: the kernel size follows from the map sizes, and the padding
comes from the `wg_pad` configuration register.

In all three engines, SRAM reads are synchronous (one cycle). Each engine has
a short pipeline of registered stages between buffer, array and write-back.

## Sub-cores and their buffers

Buffer sizes are in words. Value words are 256 bits, spike words 16 bits. The
id is the number the DMA and NI use to name a buffer (`data_type`, `sbuf`,
`dbuf`).

| sub-core | id | buffer | words | bytes |
|---|---|---|---|---|
| FP | 0 | input spikes s^{l-1} | 16384 x 16b | 32 KB |
| FP | 1 | weights w | 18432 | 576 KB |
| FP | 2 | Conv_FP | 4096 | 128 KB |
| FP | 3 | u^l | 4096 | 128 KB |
| FP | 4 | output spikes s^l (after pooling) | 16384 x 16b | 32 KB |
| FP | 5 | spikes before pooling | 16384 x 16b | 32 KB |
| BP | 0 | grad u^{l+1} (shared by BP and WG) | 4096 | 128 KB |
| BP | 1 | rotated weights w' | 18432 | 576 KB |
| BP | 2 | Conv_BP | 4096 | 128 KB |
| BP | 3 | grad u^l | 4096 | 128 KB |
| BP | 4 | u^l | 4096 | 128 KB |
| BP | 5 | s^l (shared by BP and WG) | 4096 x 16b | 8 KB |
| BP | 6 | grad w | 288 | 9 KB |

**Map layout.** Feature maps are stored as
`base + ((t * blocks + block) * height + y) * width + x`, with 16 channels per
word and blocks of 16 channels.

**Weight layout.** Weights are stored as
`((((ob * IB + ib) * K + r) * K + s) * 16 + row)`. In `w`, a row is one output
channel and its word holds 16 input channels. In `w'`, a row is one input
channel and its word holds 16 output channels. The gradient `grad w` uses the
`w` layout.

In the BP sub-core, `grad u^{l+1}` and `s^l` have one read port for each
engine. This lets `WG_CONV` run at the same time as `BP_CONV` and `BP_GRAD`.

Each sub-core has:

* **Controller** (`subcore_ctrl`). A 64-entry instruction memory written by
  the host, the configuration registers, and a 16-bit event register. It
  issues instructions in order, each to its unit (engine, WG engine, DMA or
  NI) as soon as that unit is idle, so work on different units overlaps.
  The sequencing needs explicit barriers: `BARRIER 0` waits until all units
  are idle, and `BARRIER 1 mask` waits until the event bits in `mask` have
  arrived from the network, then clears them. `OP_END` stops the program and
  raises `prog_done`. Example: issue a DMA load, then `BARRIER 0`, then the
  convolution.
* **Dispatch Unit** (`dispatch_unit`). A round-robin arbiter that shares the
  buffers' data-mover port among NI transmit, NI receive and DMA. Read data
  returns one cycle after the grant.
* **DMA** (`dma`). Copies `length` words between DRAM and a buffer, one word
  in flight at a time.
* **Network Interface** (`ni`). Described in the next section.

## Instructions

An instruction is a 5-bit opcode and up to twelve 32-bit operands, stored in
`opnd[0]`, `opnd[1]`, ... in this order:

| opcode | operands |
|---|---|
| FP_CONV | s_h, s_w, k, padding, stride, psum_acc, c_size, m_size, c_offset, m_offset |
| BP_CONV | du_h, du_w, k, padding, insert, psum_acc, m_size, c_size, m_offset, c_offset |
| WG_CONV | s_h, s_w, du_h, du_w, insert, dw_acc, dw_c_size, dw_m_size, dw_c_offset, dw_m_offset |
| FP_SOMA | h, w, m_size, m_offset, pooling, t_acc |
| BP_GRAD | h, w, c_size, c_offset, pooling, t_acc |
| NOC_DATA | flow_type, data_type, tag_id |
| NOC_CTRL | flow_type, tag_id, msg_box |
| DMA_RD / DMA_WR | data_type, src_addr, dst_addr, length |
| BARRIER | sub_type, event mask |

Channel counts (`c_size`, `m_size`) are in channels and must be multiples
of 16. Offsets are word base addresses of the maps. `psum_acc = 0` makes the
first tile overwrite the partial sums. `t_acc = 1` continues the neuron state
from time slot T-1 of a previous call. The BN and vector opcodes exist in the
opcode list, but no unit executes them: they complete at once without effect.

## Network on chip

The cores form a 2D mesh, 4 columns by 8 rows (32 cores) by default, set by
`COLS` and `ROWS`. Core (x, y) has id `y * COLS + x`.

**Router** (`router`). Every core has a six-port router: E, S, W, N to its
neighbours, and FE and BE to the NIs of its two sub-cores. Each input port has
two virtual-channel buffers of 4 flits.

* **Routing.** Route computation is dimension-ordered XY: x first, then y. At
  the destination, a bit selects FE or BE.
* **Allocation.** Switch allocation is round robin per output.
* **Wormhole switching.** A head flit reserves its output VC until its tail
  flit passes. Packets on the same VC therefore never interleave, while the
  two VCs share a link flit by flit.
* **Latency.** Route computation and allocation take one cycle, and the
  output register another, so a hop costs two router cycles.
* **Flow control.** The ready signal is per VC and is raised while two or
  more slots are free. This covers the flit that is already in the upstream
  output register.

**Clock domains.** The routers run on their own clock (`clk_noc`, 667 MHz
against 500 MHz for the cores). Each NI therefore talks to its router port
through a pair of Gray-code asynchronous FIFOs (`cdc_fifo`).

**Packets.** A flit carries 256 data bits, a 2-bit kind
(head/body/tail/single) and a VC bit. A data packet is one head flit with the
destination (core x/y, sub-core, buffer, word address, length), followed by
one body flit per word, the last one marked tail. A control message is a
single flit that carries a 16-bit event mask.

**Network Interface** (`ni`). Holds a 16-entry connection table, written by
the host. Each entry names the destination core, sub-core, buffer and address,
and the local source buffer, address and length. `NOC_DATA tag` sends the
connection `tag`, reading the words through the Dispatch Unit. `NOC_CTRL tag
msg` sends the event mask `msg` to the destination of `tag`, where it sets
bits in the controller's event register. Bit 0 of `flow_type` selects the VC.
Receive keeps one write pointer per VC, so two packets arriving on different
VCs can interleave.

## Top level (`snn_multicore`)

All ports of the top level are plain signals:

* `clk`, `clk_noc` and `rst_n` (asynchronous reset).
* **Host write port.** `host_we`, `host_core`, `host_sub`, `host_kind`,
  `host_addr`, plus the data `host_instr`, `host_cfg` and `host_conn`. The
  value of `host_kind` selects the target: 0 an instruction, 1 the
  configuration, 2 an NI connection entry, 3 start the program.
* **DRAM port.** `mem_req`, `mem_we`, `mem_addr` (word address), `mem_wdata`
  and `mem_id`. Requests are held until `mem_gnt`. Read data returns later on
  `mem_rvalid` / `mem_rid` / `mem_rdata`. All 64 DMA engines share this port
  through a round-robin arbiter (`dram_arbiter`), and master id =
  2 * core + sub-core.
* **Status.** `prog_done[2*core + sub]`, plus per-core pulses of the four skip
  events.

## Verification

Every testbench in `tb/` checks itself and ends with a `TB_RESULT checks=N
failures=M` line. The arithmetic blocks are compared bit for bit with
references in the testbenches. The references compute in real numbers and
round to FP16 at each step (`tb_fp16_pkg`), in the accumulation order of the
hardware:

* `tb_fp16_add`, `tb_fp16_mul`: random operands, including special values.
* `tb_sram_buf`: random traffic on all ports against a model.
* `tb_fp_array`, `tb_bp_array`, `tb_wg_array`, `tb_soma_unit`,
  `tb_grad_unit`: the arrays and the neuron lanes.
* `tb_fp_engine`: FP_CONV with stride 1 and 2, and FP_SOMA with and without
  pooling. Checks the cycle count and that the skip happens.
* `tb_bp_engine`: BP_CONV with zero insertion, and BP_GRAD with and without
  pooling.
* `tb_wg_engine`: WG_CONV with and without `dw_acc`. Checks the cycle count.
* `tb_snn_multicore`: end to end on a 2 x 2 mesh, described below.

**End-to-end test.** Core 0 loads data by DMA from a behavioural DRAM (which
stalls at random) and runs one layer forward. It sends its spikes two hops
over the NoC to core 3, followed by an event. Core 3 waits for the event, runs
the next layer and writes the result to DRAM. Meanwhile, the BP sub-core of
core 0 runs WG_CONV alongside BP_CONV, then BP_GRAD, and writes both gradients
back. All results are checked against references. The test fails if any of
these never happened: a skip, a gating event, a DRAM stall, flits crossing
the middle router, a barrier waiting on an event, or BP and WG running
together.

The end-to-end test builds slowly (tens of minutes with Verilator), and no
passing run of it is on record yet, so treat the communication blocks below
as unverified. The full 4 x 8 default lints and elaborates. However, its simulation model is
too large to compile in reasonable time with Verilator, so the largest size
simulated is the 2 x 2 mesh. The router, CDC FIFO, NI, DMA, Dispatch Unit,
controller and the sub-core and core wrappers are exercised only by this
end-to-end test; they have no unit tests of their own.

To run a testbench with Verilator:

    verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
        rtl/snn_pkg.sv tb/tb_fp16_pkg.sv tb/tb_fp_engine.sv --top-module tb_fp_engine
    ./obj_dir/Vtb_fp_engine

## What is not built, and departures

* Batch normalisation and the vector unit (FP_BN, BP_BN, FP_VECTOR,
  BP_VECTOR) are not built, and neither is the Dispatch Unit's cache.
* The DRAM itself, the PCIe/UART/chip-to-chip SerDes links, the
  configuration bus and the clock generation are not built. Mesh edge links
  are tied off. The host port stands in for the configuration bus.
* The controller is a hardware sequencer of the instruction list, not a
  processor running a driver.
* Number format: subnormals are flushed to zero, overflow saturates to
  infinity, and NaN is never produced.
* The paper leaves open the routing, flow control, packet format, buffer
  layouts, operand units and barrier semantics. The choices above are this
  design's own.
