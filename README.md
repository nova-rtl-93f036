# NOVA: a vector unit built into the network-on-chip

Attention layers need many non-linear functions: softmax exponentials, GeLU
and so on. A common cheap way to evaluate them is a piecewise-linear
approximation. The input `x` is compared with a set of breakpoints, which
gives a segment index. A small table then supplies that segment's slope `a`
and bias `b`, and a multiply-add returns `a*x + b`. With 16 segments, and
breakpoints placed well (for example by a small MLP trained offline),
network accuracy hardly changes. The catch is the table. It has to sit beside
every neuron, or be a heavily multi-ported table per core.

NOVA removes the table. The 16 (slope, bias) pairs are instead *broadcast*
on a line-topology network that passes every core once. Each neuron takes the
pair it needs as the pair goes by. The values live "on the wires": a flit
carries 8 pairs plus one tag bit (257 bits), and 16 pairs take two flits. The
network therefore runs at twice the accelerator clock, and every neuron still
gets its pair within one accelerator cycle. Repeaters let a flit cross up to
10 routers in one network cycle. The routers need no flow control, because
the route never changes.

This RTL implements that vector unit. The default size is 10 routers with
256 neurons each, which is the configuration of the REACT accelerator.

## Structure

```
 config ──► nova_broadcast_src ──flit──► node 0 ──► node 1 ──► … ──► node 9 ──► noc_tail
            (pair table,                   │
             breakpoints,          ┌───────┴─────────────────────────────┐
             base strobe)          │ nova_node (one per core)            │
                                   │  x ─► nova_comparator ─► addr       │
                                   │        addr ─► nova_router ─► a, b  │
                                   │  x, a, b ─► nova_mac ─► y           │
                                   └─────────────────────────────────────┘
```

| file | role |
|---|---|
| `rtl/nova_pkg.sv` | word, pair and flit types; constants |
| `rtl/nova_comparator.sv` | x vs. breakpoints → 4-bit segment address (one neuron) |
| `rtl/nova_router.sv` | east input register with bypass; forwards the flit west; per-neuron tag match and pair fetch |
| `rtl/nova_mac.sv` | x pipeline register, `a*x+b`, saturation, output register (one neuron) |
| `rtl/nova_node.sv` | one router plus the comparators and MACs of its core |
| `rtl/nova_broadcast_src.sv` | pair table, breakpoints, flit generator, base-clock strobe |
| `rtl/nova_noc_top.sv` | the whole unit: source plus a chain of `NUM_ROUTERS` nodes |

## The flit and the matching rule

A flit is `{tag, pairs[7:0]}`, where each pair is `{slope, bias}` of 16 bits
each. A neuron's segment address has 4 bits.

* **16 breakpoints** (`bp16 = 1`). The tag-0 flit carries segments
  0, 2, …, 14, and the tag-1 flit carries segments 1, 3, …, 15: slot *i* of
  flit *t* holds segment `2i + t`. A neuron accepts a flit when its address
  LSB equals the tag, and it takes slot `addr[3:1]`.
* **8 breakpoints** (`bp16 = 0`). One flit holds segments 0–7 in slots 0–7.
  Every flit matches, and the neuron takes slot `addr[2:0]`. The network then
  runs at the base rate.

The comparator's address is the number of breakpoints `d[1..N-1]` that `x`
reaches (`x >= d[k]`). With ascending breakpoints, segment *k* covers
`[d[k], d[k+1])`. Segment 0 also takes every value below `d[1]`, and segment
N−1 every value at or above `d[N-1]`. `d[0]` is stored but does not change
the address.

## Clocking and timing

The real design puts the network on a clock twice as fast as the
comparators and MACs. Here everything runs on the **network clock** `clk`,
and the base-rate logic uses a clock enable, `base_en`. The top exports it as
`base_tick`. It is high in the last network cycle of each base cycle: every
second cycle with 16 breakpoints, every cycle with 8. A two-clock version
would replace the enable with a 2:1 related clock.

For one base cycle *k* with 16 breakpoints:

| network cycle | on the link | neuron with address LSB 0 | neuron with LSB 1 |
|---|---|---|---|
| phase 0 | tag-0 flit | pair goes into the hold register | – |
| phase 1 (`base_tick`) | tag-1 flit | output register ← held pair | output register ← live pair |

So a value `x` presented during base cycle *k* has its pair ready at the
start of *k+1*. The MAC computes during *k+1*, and `y` is valid during base
cycle *k+2*: one cycle to fetch, one to multiply-add. Cores must hold `x` and
`in_valid` stable for the whole base cycle, changing them only after the
clock edge that ends a `base_tick` cycle.

### Register or bypass at each router

Each router's east input has a flit register and a bypass, chosen by
`bypass_en[i]`. Bypassing models the clockless repeaters: a flit crosses
bypassed routers in the same network cycle. The intended setting registers
router 0 only, so the network input is clocked there, and bypasses the rest.
Each registered router delays the flits behind it by one network cycle. To
keep tag 1 on the link in the `base_tick` cycle, the source sends its tags
one cycle early whenever an odd number of routers is registered. Routers
behind a different number of registers than the others (modulo 2) would see
the flits late. Avoiding such settings is the mapper's job: scaling beyond
about 10 routers, or adding registers, trades latency for frequency.

## Number format

`x`, slopes, biases and `y` are signed 16-bit fixed point with 8 fraction
bits (`nova_pkg::FRAC_BITS`). The MAC computes
`floor(a*x / 256) + b` and clips the result to the 16-bit range. `sat` marks
a clipped result. The 16-bit word size follows from the 257-bit link; the
fraction width is this design's choice.

## Configuration

The mapper writes the table while no neuron is valid:

* `cfg_we = 1`, `cfg_sel = CFG_PAIR`, `cfg_addr = s`,
  `cfg_wdata = {slope, bias}` writes segment *s*.
* `cfg_sel = CFG_BREAKPOINT` writes breakpoint *s*, taken from the bias
  field.
* `bp16` chooses 16 or 8 breakpoints.
* `bypass_en[]` sets each router's path.

The breakpoints travel to all comparators as one shared bus, not as copies.
How the pairs are obtained (fitting by a small MLP at compile time) is
outside the hardware.

## What follows the source description and what does not

Taken from the NOVA description:

* line topology with router 0 first;
* two-in/two-out routers with a register-or-bypass east input;
* the 257-bit flit of 8 pairs and a tag;
* LSB-to-tag matching, with the upper address bits selecting the pair;
* 16 or 8 breakpoints, the network at 2× the base rate for 16;
* comparators and MACs per neuron, with the two-cycle fetch + MAC latency;
* 10 routers × 256 neurons.

This design's own choices:

* the number format and saturation;
* the comparator's handling of values below the first breakpoint;
* the hold and output registers in the router;
* the single clock with a clock enable;
* the configuration port and where the table and breakpoints are stored;
* the tag-advance rule for registered routers;
* per-neuron valid bits;
* asynchronous active-low reset.

Not included:

* the host accelerators (REACT processing elements, TPU matrix units, NVDLA
  convolution cores) that produce `x`;
* REACT's modified 6×2 / 2×6 router crossbars;
* the physical repeaters and the clock doubler;
* the register the walkthrough figure draws on the last router's output; the
  flit simply leaves as `noc_tail`.

Other configurations from the evaluation map onto parameters:

| configuration | `NUM_ROUTERS` | `NEURONS` |
|---|---|---|
| TPU-v3-like | 4 | 128 |
| TPU-v4-like | 8 | 128 |
| NVDLA | 2 | 16 |

The default 10 × 256 can also hold each of them, with routers and neurons
left idle.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/nova_tb_pkg.sv` holds the reference
model: a top-down breakpoint search, and 64-bit multiply-add with explicit
floor and clipping.

* `tb_nova_comparator`: random ascending breakpoints; values on and just
  below each breakpoint; both modes.
* `tb_nova_mac`: random operands, saturation in both directions, valid
  handling, and the two-base-cycle latency.
* `tb_nova_router`: flit forwarding on the bypass and register paths, fetch
  of the right pair for random addresses in both modes.
* `tb_nova_broadcast_src`: tag/strobe sequence, slot mapping, tag advance,
  table rewrite, mode change.
* `tb_nova_node`: one node with 8 neurons, end to end, through a mode
  switch.
* `tb_nova_noc_top`: the full 10 × 256 unit at its default parameters.
  * Loads a 16-segment GeLU approximation on [−4, 4).
  * Checks all 2560 results of every base cycle against the reference.
  * Checks the error against real GeLU; the maximum seen is about 0.023.
  * Then runs with all routers bypassed, in 8-breakpoint mode with a steep
    table that saturates, and back again.
  * Checks the flit leaving the last router every cycle.
  * Counts each mechanism and fails if one never occurred.

To simulate with Verilator, for example the full unit:

```
verilator --binary --timing --assert --top-module tb_nova_noc_top \
  -y rtl -y tb +libext+.sv rtl/nova_pkg.sv tb/nova_tb_pkg.sv tb/tb_nova_noc_top.sv
./obj_dir/Vtb_nova_noc_top
```

The full-size build takes a few minutes, and the run takes about a second.
To change the size, pass `-GNUM_ROUTERS=… -GNEURONS=…` for a lint or
synthesis of `nova_noc_top` as top. For the testbench, edit its `NR`/`NN`
localparams and add a matching parameter list on the instance.
