# Shared Circular Delay Queue (SCDQ): a synaptic-delay accelerator in SystemVerilog

A spiking network with synaptic delays delivers each spike of neuron *i* to
its targets not only in the timestep it fires but also some timesteps later.
After training and pruning, every synapse *(i, j)* can have its own delay.
An event-driven processor core must therefore hold on to spikes and hand them
to the postsynaptic layer again at the right timesteps.

Hardware usually does this in one of two ways:

- **Ring buffer, one per postsynaptic neuron.** The buffer holds one slot per
  delay level. Memory grows with neurons × delay levels, whatever the spike
  activity.
- **Shared delay queue.** This is a chain of FIFOs, one per delay level. A
  spike enters at the FIFO of its delay and moves one FIFO along per
  timestep. Memory grows with activity, but the sizes of the chained FIFOs
  add up to about *I·D²/2* events. An event also leaves the queue only once,
  so only one delay per axon is possible.

The SCDQ keeps the shared-queue idea but needs only **two FIFOs**, whatever
the number of delay levels:

- the **PRQ** (pre-processing queue) holds the events to be looked at in the
  current timestep;
- the **POQ** (post-processing queue) collects the events to be looked at
  again in the next timestep.

At the end of every timestep the two buffers swap roles (double buffering).
An event therefore *orbits*: it passes the output once per timestep and may be
delivered at several of those passes. That gives per-synapse delays, not just
per-axon ones. Each event carries a delay counter that tells how far it is
through its delay range. A small bit matrix, **WVU** ("weight value useful"),
decides at each pass whether delivering the event is worth anything (zero
skipping) and whether it must stay in the orbit at all. The worst-case
storage is *α·I·(2D−1)* events, where *α* is the fraction of presynaptic
neurons active, *I* the number of presynaptic neurons and *D* the number of
delay levels. This grows linearly in *D*.

This repository gives RTL for the SCDQ as it was built into the Seneca
neuromorphic core (the "Delay IP"), in the configuration used there: 48
presynaptic neurons, 60 delay levels, 16-bit events and a 2048-word memory.
Every block has a self-checking testbench.

## How an event travels

Take a layer with two neurons, A and B. Delay levels are 0, 1 and 2, and
every synapse is useful. A and B spike in timestep 0; B spikes again in
timestep 1. `Xd` means "X delivered at delay d"; `|` marks the
end-of-timestep (EOT) event.

| timestep | PRQ content when the timestep starts | new input | output stream | POQ after the timestep |
|---|---|---|---|---|
| 0 | – | A B | A0 B0 \| | A(1) B(1) |
| 1 | A(1) B(1) | B | A1 B1 B0 \| | A(0) B(0) B(1) |
| 2 | A(0) B(0) B(1) | – | A2 B2 B1 \| | B(0) |
| 3 | B(0) | – | B2 \| | – |

The number in brackets is the delay counter. It starts at `NUM_DELAYS-1`
(here 2) and goes down by one each time the event is copied into the POQ.
The delay level delivered is `NUM_DELAYS-1-counter`. Events carried over
always come out before the new events of a timestep, oldest first. The
end-to-end testbench checks exactly this sequence.

## The delay counter and the WVU matrix

This is the one subtle part of the design. WVU has one row per presynaptic
neuron and one bit per delay level. `WVU[i][d] = 1` means at least one
synapse from neuron *i* with delay *d* has a non-zero weight. Row *i* is
loaded from the union, over all postsynaptic neurons, of the delays that
survived pruning.

For an event of neuron *i* with counter *c* at the head of the PRQ, the
pruning filter computes:

- `d = NUM_DELAYS-1-c`, the delay this pass corresponds to;
- `deliver = WVU[i][d]`. If this is 0, the postsynaptic layer would only
  multiply by zero weights, so the event is not sent. This is
  *zero-skipping delay forwarding*.
- `keep = c > clz(WVU[i])`. Here the row is read as a binary number with
  delay 0 as its least significant bit. `clz` (count leading zeros) is then
  the number of unused delay levels at the long end of the range. Once the
  counter has come down to that number, no useful delay lies ahead and the
  event leaves the orbit.

Example: `WVU_A = 1 1 0` and `WVU_B = 0 0 1` (delays 0 1 2) give
`clz(A) = 1` and `clz(B) = 0`. A is delivered at delays 0 and 1 and dropped at
counter 1. B is skipped at delays 0 and 1 but kept, then delivered at delay 2
and dropped at counter 0. An event whose row is all zero is neither delivered
nor kept. The same is true of an address that has no row
(`>= NUM_NEURONS`).

## Timestep boundaries and the buffer swap

The presynaptic side closes each timestep with an EOT event, encoded as
address 1023. The EOT enters the PRQ behind that timestep's spikes. When the
read controller finds it at the head, the following happens:

1. The EOT is forwarded to the output, so the postsynaptic side sees the
   timestep boundary.
2. The read controller pulses `eot_done`.
3. The write controller flips the role bit. The half of memory that was the
   POQ becomes the PRQ, and the drained PRQ becomes the empty POQ.

From the moment an EOT is accepted until it has left (`eot_pending`), input is
held off (`in_ready` low). Spikes of the next timestep must land in the new
PRQ, behind the delayed events.

## Blocks

```
                 +----------------------- scdq_delay_ip ----------------------+
 in_valid/ready  |  scdq_write_ctrl --write--> scdq_mem (2048 x 16) --read--> |
 in_addr  ------>|   (counter := D-1,           half 0 | half 1        scdq_read_ctrl --> out_valid/ready
                 |    EOT hold, role bit)          ^                    |  ^       |   out_addr, out_delay
                 |  scdq_queue x2 (pointers)       +----POQ write-------+  |       |
 cfg_we/row/bits |  scdq_pruning_filter (WVU, clz) --deliver/keep/delay----+       |
                 +------------------------------------------------------------+
```

| file | block | what it does |
|---|---|---|
| `rtl/scdq_pkg.sv` | package | event type `{addr[9:0], cnt[5:0]}`, EOT code, `clz()` |
| `rtl/scdq_mem.sv` | memory | 2048 × 16 array, one write port and one synchronous read port |
| `rtl/scdq_queue.sv` | PRQ / POQ | FIFO pointers and fill level for one half of the memory |
| `rtl/scdq_pruning_filter.sv` | pruning filter | WVU storage and the deliver / keep / delay decisions |
| `rtl/scdq_write_ctrl.sv` | write controller | takes input, sets the counter, writes the PRQ, holds input after EOT, owns the role bit |
| `rtl/scdq_read_ctrl.sv` | read controller | drains the PRQ, delivers, writes the POQ with counter−1, forwards EOT and triggers the swap |
| `rtl/scdq_delay_ip.sv` | top | wires the above; maps the two queue instances to PRQ/POQ roles |

## Interface and timing of `scdq_delay_ip`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid`, `in_ready`, `in_addr` | in/out/in | 1/1/10 | presynaptic events; `in_addr = 1023` is EOT |
| `out_valid`, `out_ready`, `out_addr`, `out_delay` | out/in/out/out | 1/1/10/6 | deliveries: neuron and delay level; EOT forwarded with delay 0 |
| `cfg_we`, `cfg_row`, `cfg_bits` | in | 1/⌈log2 N⌉/D | write WVU row `cfg_row`, bit *d* = delay level *d* |
| `prq_level`, `poq_level` | out | 11 | queue fill levels |
| `poq_overflow` | out | 1 | sticky: a kept event was dropped because the POQ was full |
| `eot_pending` | out | 1 | input held off until the pending EOT leaves |

- **Input.** An input event is taken in the cycle it is offered. The
  exception is a cycle in which the read controller writes the POQ: that
  write owns the single memory write port, and the input waits one cycle.
- **Output.** The read controller reads the PRQ head, captures it the next
  cycle and decides in the cycle after. It issues the next read in that same
  cycle, so an unstalled stream moves one event every two cycles.
- **Measured full-size run.** An inference shaped like the first hidden layer
  of a 700-48-48-20 network takes about 37,600 cycles for its 64 timesteps:
  568 spikes, 8,520 deliveries, 10 % output back-pressure. That is about
  75 µs at 500 MHz.

Parameters, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `NUM_NEURONS` | 48 | WVU rows, the presynaptic layer size |
| `NUM_DELAYS` | 60 | delay levels 0..59 (at most 64 with the 6-bit counter) |
| `DEPTH` | 2048 | memory words, power of two; each queue gets `DEPTH/2` |

## Capacity

The worst case is dense activity with nothing pruned: every neuron spikes
every timestep and every delay is useful. If nothing drains while a
timestep's spikes arrive, the two queues peak at:

- **PRQ:** *I·(D−1)* carried-over events, plus *I* new ones, minus the one
  the read controller holds, plus the EOT: *I·D* in total.
- **POQ:** *I·(D−1)*, which is every event not yet at its last useful delay.

Together that is *I·(2D−1)*. A chain of per-delay FIFOs needs *I·D(D+1)/2*
for the same traffic. `tb_scdq_capacity` measures both peaks in 32
configurations. Some of its results:

| neurons *I* | delay levels *D* | PRQ peak | POQ peak | SCDQ total | FIFO chain |
|---|---|---|---|---|---|
| 8 | 4 | 32 | 24 | 56 | 80 |
| 8 | 8 | 64 | 56 | 120 | 288 |
| 8 | 16 | 128 | 120 | 248 | 1088 |
| 16 | 8 | 128 | 112 | 240 | 576 |

Because the memory is split into fixed halves, what must fit is the larger of
the two queues. That is *I·D* ≤ `DEPTH/2`.

Under realistic, pruned traffic the queues stay far below this. The tests used
64 timesteps, the average spike counts of the hidden layers of three
spoken-digit networks (48, 32 and 24 neurons per hidden layer), and 15 useful
delay levels per neuron. Peak fill was:

- 485–502 events per queue with 48 neurons;
- 376 with 32 neurons;
- 271 with 24 neurons.

All are well inside the 1024 available per queue. The original design
reported at most 1,596 events in the queues together. That is below 2,048,
but with a fixed split it fits only if neither queue went over 1,024.

Dense activity at the limits used for comparison with other architectures
does not fit in 2,048 words: 256 neurons × 31 = 7,936 events, or
48 neurons × 127 = 6,096 events. At 48 neurons and 64 delays the SCDQ uses
less memory than a ring buffer once activity *α* ≤ 0.25.

## What follows the original design and what is this design's own

**Taken from the original design:**

- the six blocks and their jobs;
- two FIFOs in a circle, with a buffer swap triggered by an EOT event seen at
  the output;
- the counter initialised at entry and decremented on the way into the POQ;
- the WVU matrix with the deliver and `clz` removal rules and their bit order;
- 16-bit events, a 2048-word 16-bit memory, 48 neurons and 60 delay levels.

**Chosen here, because the original design does not give them:**

- **Event layout:** 10-bit address and 6-bit counter; EOT = address all ones.
- **Memory:** one write port and one synchronous read port, split into two
  fixed halves. A role bit says which half is the PRQ.
- **Handshakes:** valid/ready on both sides; the output carries the delay
  level.
- **EOT:** input is held off until the EOT leaves, and the EOT is forwarded
  to the output.
- **Write port:** the read controller's POQ write has priority over input.
- **Full PRQ:** back-pressures the input.
- **Full POQ:** drops the kept event and sets a sticky flag. Stalling would
  deadlock, because the POQ only empties after the swap.
- **WVU:** loaded one row at a time, cleared at reset. Addresses without a row
  are dropped. As a result, a core whose input layer is 700 channels wide
  with no delays needs `NUM_NEURONS = 700` or a path around the Delay IP.
- **Reset:** synchronous, active low. Memory contents are not reset.
- **Sharing between layers:** several layers mapped to one core can share the
  queue only by giving their neurons distinct addresses below `NUM_NEURONS`.
  Nothing else is provided for it.

**Not included:**

- the processor core the Delay IP serves (RISC-V controller, neural
  processing elements that apply weights and update the neurons, network on
  chip);
- the physical 22 nm SRAM macro. `scdq_mem` is its logical model, written so
  synthesis can infer a memory.

## Verification

Each block has a testbench in `tb/` that checks it against an independently
written reference and prints `TB_RESULT checks=N failures=M`:

- `tb_scdq_mem`: random reads and writes against a shadow array.
- `tb_scdq_queue`: pointers, wrap-around, fill level, full and empty.
- `tb_scdq_pruning_filter`: the two-neuron WVU example, plus all
  (address, counter) pairs of a random matrix.
- `tb_scdq_write_ctrl`: cycle-exact handshake, counter, addresses, EOT hold
  and swap.
- `tb_scdq_read_ctrl`: delivery order, POQ contents, overflow, and the
  two-cycle rate, with the rest of the queue modelled in the testbench.
- `tb_scdq_delay_ip`: end to end. It runs the A/B example above event by
  event, then a random multi-timestep run against a model that only knows
  "a spike of *i* at *t* is due at *t+d* wherever `WVU[i][d]=1`". It counts
  each mechanism and fails if one never occurs: EOT hold, PRQ-full stall,
  write-port conflict, output back-pressure, zero-skip, retirement, swap and
  POQ overflow.
- `tb_scdq_delay_ip_full`: the top at its default size, one 64-timestep
  inference with realistic spike counts and 15 useful delay levels per
  neuron.

Two more testbenches run workloads rather than single blocks:

- `tb_scdq_capacity`: the dense worst-case sweep described under Capacity.
- `tb_scdq_shd_models`: six default-size instances. Each is fed the traffic
  of one hidden layer of one of the three spoken-digit networks, and every
  delivery is checked against the reference model.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
  rtl/scdq_pkg.sv tb/tb_scdq_delay_ip.sv --top-module tb_scdq_delay_ip
./obj_dir/Vtb_scdq_delay_ip
```

Each one finishes in well under a second.
