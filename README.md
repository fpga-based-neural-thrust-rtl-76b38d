# Neural thrust controller: a deepsets policy accelerator for a micro-UAV FPGA deck

A nano quadrotor can be flown by a small neural network that maps what the
drone observes (its position error, velocity, attitude, body rates, and the
relative positions and velocities of nearby drones) straight to the four motor
thrusts. The drone's own microcontroller is too slow to evaluate such a network
comfortably, so the network runs on an FPGA on an expansion deck. This RTL is
the hardware part of that: an accelerator that evaluates one control step of
the network in fixed point, together with the memory system it works in (main
memory, an interconnect with a coherence broadcast, and accelerator caches).
The soft processor that feeds it is not included; its buses are ports.

## The network being evaluated

The policy is a *deepsets* network, built so that the order and the number of
neighbours do not matter:

```
 o^q (18) --> E^q: 18 -> 16 -> 16 ------------------------- e^q (16) --+
                                                                       +--> e (24) --> H: 24 -> 32 -> 4 --> a (4) --> f (4)
 o^1 (6) --> B: 6 -> 8 -> 8 --+                                        |
   ...                        +--> mean over the k neighbours -- e^k (8)+
 o^k (6) --> B: 6 -> 8 -> 8 --+
```

* `o^q` is the drone's own observation: position relative to its target (3),
  velocity (3), the 3x3 rotation matrix flattened row by row (9) and the body
  angular velocity (3) - 18 values.
* `o^l` is one neighbour's observation: relative position (3) and relative
  velocity (3).
* `E^q` (self encoder) and `B` (the per-neighbour MLP) both use ReLU after each
  of their two layers. `H` has one hidden layer of 32 with ReLU and a linear
  output layer of 4.
* The same weights of `B` are applied to every neighbour, and the neighbour
  encoding is the element-wise mean `e^k = (1/k) sum B(o^l)`.
* The outputs `a` are turned into normalised thrusts by
  `f = (clip(a, -1, 1) + 1) / 2`, so `f` is in `[0, 1]`.

### Fixed-point format

Every value is a 32-bit two's-complement integer with `FRAC_BITS` (default 12)
fractional bits: a real weight `w` is stored as `floor(w * 2^FRAC_BITS)`, and so
are inputs. A neuron is evaluated as

```
acc  = sum_i W[j][i] * x[i]              (64-bit, 2*FRAC_BITS fractional bits)
y[j] = relu( (acc >>> FRAC_BITS) + b[j] )   (back to FRAC_BITS, rounding down)
```

with the result wrapped to 32 bits. The mean divides the 8 per-element sums by
`k` with truncation toward zero (the sums are non-negative, being ReLU outputs).
The thrust map computes `(clip(a, -2^F, 2^F) + 2^F) >>> 1`.

The number of fractional bits is meant to be chosen per trained network: for
increasing `n = 1, 2, ...`, compare the outputs of the floating-point and the
fixed-point networks over random inputs, and take the `n` with the smallest
maximum error. The value 12 is a placeholder; `FRAC_BITS` in `nn_pkg` changes
it everywhere.

## How one control step runs

The processor writes the weight image and the observations into main memory,
programs three base addresses in the accelerator, writes `CTRL = 1`, and waits
for `irq`. The accelerator (`nn_accelerator`) then walks a fixed schedule:

| phase | work | cycles, no stalls |
|---|---|---|
| load `o^q` | 18 words from `IN_BASE` into the scratchpad | 20 |
| `E^q` layer 1, layer 2 | 16x(18+1), 16x(16+1) memory words | 307 + 275 |
| per neighbour (k = 6 times) | load 6 words; `B` layers 8x(6+1), 8x(8+1); each output of the second layer is added into the mean | 8 + 59 + 75 |
| mean | copy the 8 means into the scratchpad | 8 |
| `H` layer 1, layer 2 | 32x(24+1), 4x(32+1) | 803 + 135 |
| store | `a[0..3]` then `f[0..3]` to `OUT_BASE..+7` | 9 |
| **total** | | **2409** |

All six layers run on one `layer_engine`, which does one multiply-accumulate
per clock. For output neuron `j` it streams `W[j][0..IN-1]` and then `b[j]` from
memory; reads are pipelined, so a new word is requested every clock the memory
grants it, and the word returns one clock later with a registered tag telling
the engine which input (or the bias) it belongs to. A layer of `IN` inputs and
`OUT` outputs therefore takes `OUT*(IN+1) + 2` clocks, plus one to launch it.
Every withheld grant adds one clock.

The concatenation `[e^q, e^k]` costs nothing: the scratchpad places the output
of `E^q` and the mean right next to each other, and `H` reads them as one
24-word vector.

### Scratchpad layout (`nn_pkg`)

| words | contents |
|---|---|
| 0-17 | `o^q` |
| 18-23 | current `o^l` |
| 24-39 | `E^q` hidden layer |
| 40-55 | `e^q` (first part of `e`) |
| 56-63 | `e^k` (second part of `e`) |
| 64-71, 72-79 | `B` hidden layers |
| 80-111 | `H` hidden layer |
| 112-115 | `a` |

### Weight image layout

Layers follow each other from `WBASE` in the order `E^q1, E^q2, B1, B2, H1,
H2`. A layer takes `OUT*IN` words of `W`, row by row (`W[j][i]` at
`j*IN + i`), followed by `OUT` biases. Offsets: 0, 304, 576, 632, 704, 1504;
1636 words in total (`W_*` constants in `nn_pkg`).

### Register map (peripheral bus, word index on `pb_addr`)

| index | name | meaning |
|---|---|---|
| 0 | CTRL | write bit 0 = 1 to start (ignored while busy) |
| 1 | STATUS | bit 0 busy, bit 1 done (cleared by the next start) |
| 2 | WBASE | word address of the weight image |
| 3 | IN_BASE | word address of `o^q`, followed by `o^1..o^k` |
| 4 | OUT_BASE | word address where `a` and `f` are written |
| 5 | CYCLES | length of the last step in clocks |

Writes take effect at the clock edge with `pb_sel && pb_we`; reads are
combinational. The base registers can only be written while idle.

## Memory system

```
               cpu_req/cpu_rsp (core cache side)        snoop (coherence bus, out)
                        |                                     ^
   +--------------------+-------------------------------------+--------+
   |  mem_interconnect: round-robin over 4 masters, write broadcast    |
   +----+----------------------+----------------------+----------------+
        |                      |                      |
   accel_cache (weights)  accel_cache (obs)     accel_cache (results)
   2048 lines             64 lines              64 lines
        |                      |                      |
      port 0                 port 1                 port 2
   +----+----------------------+----------------------+----+
   |                   nn_accelerator                      |---- pb_* (peripheral bus)
   +-------------------------------------------------------+
                     main_memory (16384 x 32) sits behind the interconnect
```

**Bus protocol** (`mem_req_t`/`mem_rsp_t`). A master raises `req` with `we`,
`addr` and `wdata` and holds them until `gnt` is high at a clock edge. Read data
comes back with `rvalid` exactly one clock after the grant. A master may issue a
new request in the clock after a grant, so reads pipeline at one per clock.

**Interconnect.** Each clock it grants one requester, searching round-robin
from the master after the last one granted, so a master that keeps its
request up is granted within four clocks. The granted request goes to the single-ported main
memory; read data is routed back to the master granted one clock earlier.

**Coherence bus.** Every write the interconnect grants is broadcast one clock
later as `{valid, src, addr}`. A cache that holds the word and did not write it
drops its copy.

**Accelerator caches.** Direct-mapped, one word per line, write-through with
write allocate. A read hit is granted at once and answered next clock. A read
miss goes to the interconnect and keeps `gnt` low until the word is back and
filled; the waiting request then hits, so with the interconnect free a miss
costs two clocks more than a hit. Two corner cases keep stale data out: a request for a
word whose foreign write is being broadcast in that same clock is treated as a
miss, and a fill that coincides with a broadcast for its word is not marked
valid. With the default sizes the whole weight image stays in the weight cache,
so from the second control step on, all weight reads hit. The observations are
rewritten by the processor before every step; the broadcast invalidates their
cached copies, and the accelerator then reads the new values.

## Files

| file | contents |
|---|---|
| `rtl/nn_pkg.sv` | sizes, fixed-point format, layer table, scratchpad and weight layouts, bus structs |
| `rtl/relu_act.sv` | ReLU with bypass |
| `rtl/layer_engine.sv` | one fully connected layer, one MAC per clock, pipelined weight reads |
| `rtl/mean_unit.sv` | element-wise accumulation and division by `k` |
| `rtl/thrust_map.sv` | `f = (clip(a,-1,1)+1)/2` |
| `rtl/nn_accelerator.sv` | control-step sequencer, scratchpad, registers |
| `rtl/accel_cache.sv` | accelerator cache with coherence invalidation |
| `rtl/mem_interconnect.sv` | round-robin arbiter and coherence broadcast |
| `rtl/main_memory.sv` | shared synchronous RAM |
| `rtl/thrust_controller_top.sv` | everything above, wired together |
| `tb/nn_ref_pkg.sv` | behavioural reference of the network (plain loops, 64-bit integers) |
| `tb/tb_mem_model.sv` | memory slave with random grant stalls |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the flight-sequence test |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; it has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/nn_pkg.sv tb/nn_ref_pkg.sv tb/tb_thrust_controller_top.sv \
    --top-module tb_thrust_controller_top
./obj_dir/Vtb_thrust_controller_top
```

Swap the testbench name for any other `tb/tb_*.sv`; the files they use are
found through `-Irtl -Itb`. Uninitialised state is randomised
(`+verilator+rand+reset+2`) in the tests, so everything that is read is reset or
written first.

* `tb_thrust_controller_top` runs the whole subsystem at its default sizes.
  Acting as the processor it loads random weights (at most +-0.5) and runs four
  control steps, comparing all 8 result words with the reference. It also makes
  every mechanism happen and counts it: weight-cache misses (step 1) and hits
  (later steps), arbitration stalls (processor traffic during step 2),
  coherence invalidations (new observations over cached ones), ReLU clamping,
  thrust clipping at both ends (step 3 uses large inputs) and unclipped thrust.
  Each cache miss adds exactly two clocks to the 2409-clock schedule, and the
  test checks the step lengths to the clock: 5789 for the first step (1636
  weight and 54 observation misses), 2517 for later uncontended steps (only the
  54 freshly written observation words miss).
* `tb_nn_accelerator` checks that a stall-free step takes exactly the 2409
  clocks of the schedule above, and then results under random stalls.
* `tb_layer_engine` checks each layer shape, including the `OUT*(IN+1)+2`
  timing.
* `tb_flight_setpoints` drives a sequence of control steps whose observations
  come from a simple point-mass model flying to a list of setpoints.

## What follows the source design and what does not

Taken from the published description: the network structure and all its
sizes (apart from the size of the angular velocity, taken as 3), ReLU
placement, the element-wise mean over neighbours, the concatenation, the
thrust formula, weights scaled by `2^n` and rounded down, and the block
arrangement of the FPGA: main memory, an interconnect and a coherence bus
linking a core cache and three accelerator caches, and an accelerator on the
processor's peripheral bus.

Choices of this design, where the description is silent:

* the 32-bit word, 64-bit accumulator and `FRAC_BITS = 12`;
* `k = 6` neighbours (fixed at elaboration, parameter `K`);
* shifting after the dot product and before adding the bias, with wrap-around
  rather than saturation;
* the whole inner structure of the accelerator: a single MAC, the schedule,
  the scratchpad, the register map and the memory layouts. The original
  accelerator was produced by a high-level-synthesis compiler from the C
  feed-forward loops, and its architecture is not published, so this is a
  hand-written equivalent of its function, not a copy of its structure;
* the use of the three accelerator caches (one each for weights, observations
  and results), their organisation and sizes, the round-robin arbitration and
  the write-invalidate coherence broadcast;
* computing the thrust map in hardware; it could equally be done in software;
* main memory of 64 KiB; clock frequency and control rate are not specified.

Only one accelerator is built, though the architecture leaves room for
several sharing the accelerator caches. Not included: the soft processor and its cache, the processor's peripheral bus
itself, the Lighthouse positioning logic that also runs on the FPGA, its UART
link, the I2C link to the flight controller, and the compiler-generated
run-time dependence checks, bypasses and squashes that the HLS flow can add to
other loops. The trained weights are not available, so all tests use random
weights; the tests establish that the hardware computes the network exactly
as the fixed-point reference does, not how well it flies.
