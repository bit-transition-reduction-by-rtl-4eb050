# Bit-transition-reducing data ordering for a NoC-based DNN accelerator

Each time a link wire of a network-on-chip changes value, it costs energy.
The number of wires that flip between one flit and the next on the same link
is the flit's *bit transitions* (BT). In a NoC-based DNN accelerator, most
flits carry convolution operands: input activations and weights. A dot
product gives the same result whatever order its pairs are summed in, so the
operands can be sent in any order, as long as each input still meets its
weight. This RTL uses that freedom. Before a task leaves the memory
controller, its values are sorted by how many '1' bits they hold, and dealt
into the flits so that flits sent one after the other carry values of similar
'1'-bit count in the same lane.

The idea, and the hardware outline built here, come from "Bit Transition
Reduction by Data Transmission Ordering in NoC-based DNN Accelerator"
(Chen, Li, Zhu, Lu). That paper gives the ordering rule, its placement near
memory, the packet layout and a block diagram of the ordering unit. The
register-level details below are this implementation's own. They are marked
as such wherever they matter.

## Why sorting by '1'-bit count works

Take two `w`-bit words with `x` and `y` ones. Treat the bit positions as
independent. The expected number of differing bits is then
`x + y - 2xy/w` (for `w = 32`: `x + y - xy/16`). Now take two flits of `N`
words each. The sums of `x` and of `y` do not depend on where each word sits.
So the expected BT is lowest when `sum(x_i * y_i)` over the lanes is highest.
By the rearrangement inequality, that happens when the counts are paired in
the same order: `x1 >= y1 >= x2 >= y2 >= ...`. Sort all values by descending
count and deal them alternately into the two flits, lane by lane. For more
than two flits the same dealing runs column by column. Rank 0 goes to lane 0
of flit 0, rank 1 to lane 0 of flit 1, rank 2 to lane 0 of flit 2, rank 3 to
lane 1 of flit 0, and so on.

## Where the hardware sits

```
  off-chip memory --> memory controller --+--> [ordering_ext] --flits--> NI --> router
                                          |     prefetch_buffer
                                          |       |  ^
                                          |       v  | (sorted values written back)
                                          |     ordering_unit
                                          |       = 25 x popcount_swar + bubble_sort_unit
                                          |     half_half_flitizer
                                          |     bt_monitor (evaluation only)
```

There is one `ordering_ext` per memory controller, not one per router. An
8x8 mesh with 4 memory controllers therefore has 4 of them. Sorting takes
hundreds of cycles per task. An accelerator has slack for this: a layer's
outputs are not consumed until the layer has finished, so operands can be
ordered before the next layer needs them. The routers, network interfaces,
PEs and memory are not part of this RTL. The top brings out a memory read
stream and a flit stream where those parts connect.

## Packet format: half-half flits

One task is one output neuron of a 5x5 convolution: 25 inputs, 25 weights and
one bias. It travels as 4 flits of 16 lanes x 8 bits (a 128-bit link).
Inputs fill the left half of each flit and weights the right half:

| flit | lanes 0-7                 | lanes 8-15                 |
|------|---------------------------|----------------------------|
| 0    | inputs in slots 0-7       | weights in slots 0-7       |
| 1    | inputs in slots 8-15      | weights in slots 8-15      |
| 2    | inputs in slots 16-23     | weights in slots 16-23     |
| 3    | slot 24, bias, 6 x zero   | slot 24, 7 x zero          |

Lane `i` is bits `[8i+7:8i]` of the payload. Head and tail flags mark flits 0
and 3. The flit header is not modelled beyond these flags and the packet's
ordering mode (`flit_mode_o`). Every lane also carries a 5-bit side-band
index (`flit_pos_o`): the position (0-24) the value had in its task before
ordering. This index is not part of the 128 payload bits whose transitions
are counted.

## The three ordering modes

`mode_i` is sampled with the first memory beat of each task.

* **O0, no ordering.** Slot `s` holds input `s` and weight `s`. This is the
  baseline, and the bypass path of the design. The task goes straight from the
  buffer to the flitizer.
* **O1, affiliated ordering.** The weights are sorted by descending '1'-bit
  count. Each input moves with its weight, so the input and the weight in the
  same slot still belong together. A PE can multiply lane by lane and sum,
  with no index and no reordering. Only the weight half of the flits gains.
* **O2, separated ordering.** The weights and the inputs are each sorted by
  their own counts, so both halves gain. A PE must pair them again through
  `flit_pos_o`. The ordering unit runs twice, so the sort time doubles.

### From sort rank to slot

This is the least obvious part. The sorter produces ranks 0-24. The prefetch
buffer writes rank `r` to slot

```
slot(r) = (r mod 3) * 8 + floor(r / 3)     for r < 24   (3 full flits of 8)
slot(24) = 24                              (the tail flit)
```

This deals ranks 0, 1, 2 to lane 0 of flits 0, 1, 2, then ranks 3, 4, 5 to
lane 1, and so on. Each lane position therefore sees a slowly falling count
from one flit to the next. The last, lowest-count value stays in the tail
flit. `ord_pkg::place_slot` holds the general formula for other `N` and flit
widths. In O1 the input of slot `slot(r)` is the input whose index equals the
weight's original index.

## Ordering unit

`ordering_unit` has 25 combinational SWAR pop-count units (`popcount_swar`).
Each one adds neighbouring 1-, 2- and 4-bit fields inside the word. The
resulting 4-bit counts are the keys for `bubble_sort_unit`. The values ride
along with their keys, together with their original indices.

The bubble sorter does one compare-and-swap per clock. Counter CNT1 counts
passes (0..23). Counter CNT2 walks the compared pair (0..23-CNT1). A pair is
swapped only when the right key is strictly larger. Equal counts therefore
keep their original order (a stable sort), and the output is fully
deterministic. The sorter has no early exit, so its latency is fixed.

| step                          | cycles (N = 25) |
|-------------------------------|-----------------|
| start (values and counts loaded) | 1            |
| compare-and-swap              | N(N-1)/2 = 300  |
| done pulse, result written back to the buffer | 1 |

From the start cycle to `done_o` is 301 cycles. Measured at the top, from the
last memory beat of a task to its first flit:

| mode | cycles |
|------|--------|
| O0   | 1      |
| O1   | 303    |
| O2   | 605    |

Loading takes 51 beats (one 8-bit value per beat). Sending takes 4 cycles
(one flit per cycle) when the NI does not apply back-pressure. The buffer
holds one task, so the next task is read only after the previous one has been
sent.

## Bit-transition monitor

`bt_monitor` measures the effect; the design does not need it to work. For
each watched port it keeps the previous and the current flit. One cycle
later it adds `popcount(previous XOR current)` to a per-port total and to a
total over all ports. The link counts as all zeros after reset. In the top it
watches the 128-bit payload of the injected flits. In a full NoC it would
have one port per router output. `bt_clear_i` zeroes the totals: flits
handed in from the clear cycle on are counted.

## Top-level interface (`ordering_ext`)

| signal | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `mode_i` | in | 2 | `ORD_NONE`, `ORD_AFFILIATED`, `ORD_SEPARATED` |
| `mem_valid_i`, `mem_ready_o`, `mem_data_i` | in/out/in | 1/1/8 | task stream: 25 inputs, 25 weights, bias |
| `flit_valid_o`, `flit_ready_i` | out/in | 1 | flit handshake towards the NI |
| `flit_head_o`, `flit_tail_o` | out | 1 | packet framing |
| `flit_data_o` | out | 16 x 8 | payload |
| `flit_pos_o` | out | 16 x 5 | original index of each lane's value |
| `flit_mode_o` | out | 2 | ordering mode of the packet |
| `sort_busy_o` | out | 1 | sorter running |
| `bt_clear_i`, `bt_total_o` | in/out | 1/40 | bit-transition total on the output link |

All handshakes are valid/ready. A transfer happens on a rising edge where
both are high.

## Parameters

The defaults are the sizes used in the paper: `N = 25` values per operand,
`DATA_W = 8` (fixed-8) and `LANES = 16` (128-bit link). Setting
`DATA_W = 32` gives the float-32 configuration: 16 values on a 512-bit link,
with 6-bit counts. `DATA_W` must be a power of two, because the SWAR
pop-count and the monitor's flip count assume it. The formulas also cover other values of
`N`, but only `N = 25` has been simulated. A shorter kernel (for example 3x3)
can instead be padded with zeros, which have count 0 and sort last.

## How it was checked

Every module has a self-checking testbench in `tb/`. Each compares against
reference models written separately (`tb/ord_ref_pkg.sv`: bit-serial count,
stable insertion sort, slot table built lane by lane), and checks the cycle
counts above.

* `ordering_ext_tb` runs the top at its default sizes. It uses random memory
  gaps and NI back-pressure, all three modes, and a phase that switches mode
  on every task. For every packet it checks framing, zero padding, the bias
  position, that each value is present once and matches its index, the
  descending counts, the O1 pairing, the dot product (with and without the
  index) and the latency. It also checks the BT total against a link model.
* `lenet_conv_tb` sends the whole first convolution layer of LeNet through
  the top in each mode. That is a 32x32 image and six 5x5 kernels: 4704
  packets per mode. It runs in fixed-8 and in float-32 (`DATA_W = 32`), and a
  PE model checks every convolution output. The image and kernels are
  synthetic, not trained weights. This is what it measured on the injected
  link:

  | data | O1 (affiliated) | O2 (separated) |
  |---|---|---|
  | fixed-8, 128-bit link | -14.0 % BT | -18.3 % BT |
  | float-32, 512-bit link | -1.5 % BT | -5.6 % BT |

  These numbers are for one link with no other traffic mixed in. They are not
  comparable with whole-network figures. In a 4-flit packet only the steps
  flit 0 to 1 and flit 1 to 2 profit fully from the ordering. The mostly-zero
  tail flit, and the jump from it to the next packet's high-count head flit,
  cost about the same in every mode. That is why the float-32 gain is small
  here.
* `no_noc_study_tb` repeats the network-free weight study on the ordering
  unit alone. Each packet is one 5x5 kernel padded with 7 zeros into 4 flits
  of 8 weights. The baseline keeps kernel order; the ordered packet deals the
  sorted ranks column by column over the 4 flits. The study runs 10,000
  packets per weight set and counts BT between consecutive flits of a packet.
  The weights are synthetic, so the paper's figures (in brackets, from its
  random and trained LeNet weights) are only a reference:

  | weights | flit | BT per flit, baseline | BT per flit, ordered | reduction |
  |---|---|---|---|---|
  | fixed-8, uniform random | 8 x 8 bit | 31.96 (31.01) | 22.04 (22.42) | 31.0 % (27.7 %) |
  | fixed-8, bell-shaped ("trained-like") | 8 x 8 bit | 31.42 (30.55) | 12.36 (13.73) | 60.7 % (55.7 %) |
  | float-32, uniform random | 32 x 8 bit | 127.93 (113.27) | 95.44 (90.18) | 25.4 % (20.4 %) |
  | float-32, bell-shaped | 32 x 8 bit | 127.56 (112.80) | 94.98 (91.46) | 25.5 % (18.9 %) |

Run a testbench with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module ordering_ext_tb \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/ord_pkg.sv tb/ord_ref_pkg.sv tb/ordering_ext_tb.sv
./obj_dir/Vordering_ext_tb
```

Each testbench ends with one line, `TB_RESULT checks=<n> failures=<m>`.
`lenet_conv_tb` takes about two minutes. The others take seconds.

## What is the paper's and what is not

Taken from the paper:

* the ordering rule: descending '1'-bit count, dealt over the flits;
* the affiliated and separated modes;
* the placement at the memory controller, behind a prefetch buffer, with a
  bypass;
* the ordering unit's structure: 25 SWAR pop-counts of 8-bit values giving
  4-bit counts, feeding a bubble sorter with an FSM and two counters;
* the half-half flit layout, including the tail flit;
* the Flit_pre / Flit_current / count-flip / sum scheme for measuring BT.

Chosen here, because the paper does not specify them:

* one compare-and-swap per cycle, with stable tie handling and no early exit;
* the roles of the two counters;
* the per-value original index and how it travels (a per-lane side-band);
* keeping the lowest-ranked value in the tail flit;
* a single-task prefetch buffer fed by one value per beat;
* the valid/ready handshakes, the reset style and the counter widths;
* an all-zero link after reset.

Not included:

* the NoC (X-Y routed mesh routers with 4 virtual channels of 4 flits), the
  network interfaces, the PEs, the memory controller and the memory. These
  come from an existing accelerator platform and are not designed in the
  paper.
* any synthesis to a gate count or power figure. The paper reports 12.91 kGE
  and 2.213 mW at 125 MHz in 90 nm for its unit. No such figure has been
  reproduced for this RTL.

## Files

* `rtl/ord_pkg.sv`: sizes, the `ord_mode_e` type, the rank-to-slot function
* `rtl/popcount_swar.sv`: SWAR '1'-bit counter
* `rtl/bubble_sort_unit.sv`: sequential stable bubble sorter with index output
* `rtl/ordering_unit.sv`: pop-counts plus sorter
* `rtl/prefetch_buffer.sv`: task buffer and mode control
* `rtl/half_half_flitizer.sv`: packet layout
* `rtl/bt_monitor.sv`: bit-transition recording
* `rtl/ordering_ext.sv`: top level
* `tb/*_tb.sv`: one testbench per module
* `tb/lenet_conv_runner.sv`: the LeNet layer driver and PE model used by `lenet_conv_tb`
* `tb/no_noc_runner.sv`, `tb/no_noc_study_tb.sv`: the network-free weight study
* `tb/ord_ref_pkg.sv`: reference models shared by the testbenches
