# Level-0 trigger processor with an on-chip ring-counting neural network

NA62 is a kaon decay experiment. Its lowest trigger level (L0) has to decide,
within well under a millisecond, whether to keep each candidate event. It does
this from *primitives*: short summary words that a few fast detectors send for
every time slot. The L0 trigger processor combines the primitives of a slot
under user-defined *masks*. A mask is a required coincidence, such as
"detector A saw X and detector B saw Y". Each mask has a downscaling factor D:
only one of every D matches makes a trigger.

At present the RICH Cherenkov detector sends only a hit count as its
primitive. This design puts a small neural network, **RiNNgs**, on the same
device as the trigger processor. RiNNgs reads the RICH hit list of each event
and classifies it as having 0, 1, 2, or 3-or-more Cherenkov rings, which is
roughly the number of charged particles. The result becomes one more primitive,
so masks can ask for "at least two rings" directly. The network has to keep up
with a 10 MHz particle flux. At a 100 MHz clock it takes a new event every
10 cycles and answers 20 cycles later.

The SystemVerilog here has two parts:

* **RiNNgs**: a 64-16-4 fully connected ReLU network in low-precision fixed
  point, built as a pipeline of time-multiplexed multiply-accumulate layers.
* **L0 decision logic**: configuration registers, mask coincidence,
  per-mask downscaling and the trigger word.

The network links, the control processor and the GPU-based ring fitter used
elsewhere in the experiment are not included. They are listed under
"Not included" below.

## Data flow

```
             ev_hits[32] ──► rinngs ───────────── label ──► ring-count primitive ─┐
 time slot ─►                (20 cycles, one event / 10 cycles)                    ├─► l0tp_core ─► trig_*
             ev_prim[8], ev_ts ──► 20-stage delay line ───────────────────────────┘   (1 cycle)
```

`l0tpp_top` accepts one time slot per `ev_valid`/`ev_ready` handshake. A
slot carries three things:

* the RICH hit list: 32 slots, each a valid bit plus an 11-bit PMT number;
* the primitives of 8 other detector links: a 16-bit word and a valid bit
  each;
* a 32-bit timestamp.

`ev_ready` is the network's admission signal. Once a slot is accepted,
`ev_ready` stays low for the next 9 cycles. The detector primitives and the
timestamp wait in a shift register as long as the network's latency, so they
reach the trigger logic in the same cycle as the ring-count label. The label
joins them as source 8, encoded as a thermometer-like word:

| bit | meaning       |
|-----|---------------|
| 0   | label == 0    |
| 1   | label >= 1    |
| 2   | label >= 2    |
| 3   | label == 3 (three or more rings) |

A mask that requires bit 2 of source 8 therefore fires on events with two or
more rings.

## RiNNgs in detail

### Inputs

Each valid hit becomes one network input: the PMT number divided by the number
of channels (`N_CHANNELS` = 1952), which gives a value in [0, 1). Empty list
slots give 0. `rinngs_normalizer` computes this as

    x = floor(c * 2^10 / 1952) = (c * 2^10 * ceil(2^32 / 1952)) >> 32

which equals the exact floor for every 11-bit channel number. Its testbench
checks all of them. Because x < 1, the upper 8 bits of every input are
constant 0.

### Number formats

| quantity    | bits | integer bits (incl. sign) | fraction bits |
|-------------|------|---------------------------|---------------|
| activations | 18   | 8                         | 10            |
| weights     | 7    | 1                         | 6             |
| biases      | 9    | 1                         | 8             |

Weights and biases therefore lie in [-1, 1). A product has 16 fraction bits.
The bias is shifted left by 8 to match, and the sum is shifted right by 6
(floor) to return to 10 fraction bits. After that comes ReLU, then saturation
to the 18-bit range. The reference model in `tb/rinngs_model_pkg.sv` states
the same rule with integer division instead of shifts.

The published network is quantized to "7 and 9 bits with one integer bit"
without saying which width belongs to weights and which to biases. Here the
weights are 7 bits and the biases 9. The activations stay at 18 bits, because
the training flow could quantize only weights and biases. All of these widths
are localparams in `rinngs_pkg`.

### Layer schedule: how II = 10 and latency = 20 come about

A `rinngs_dense` layer latches its inputs on `start` and clears one
accumulator per neuron. Each following cycle, every neuron multiplies LANES
inputs by their weights and adds the products to its accumulator. On the last
of `STEPS = ceil(N_IN / LANES)` cycles it also adds the bias, applies the
activation and registers the outputs. `done` pulses `STEPS + 1` cycles after
`start`.

| layer | inputs -> neurons | LANES | multipliers | STEPS | cycles |
|-------|-------------------|-------|-------------|-------|--------|
| 1     | 32 -> 64          | 4     | 256         | 8     | 9      |
| 2     | 64 -> 16          | 8     | 128         | 8     | 9      |
| 3     | 16 -> 4           | 16    | 64          | 1     | 2      |

Layer *k+1* starts on layer *k*'s `done`. The normalizer in front and the
argmax behind are combinational. From acceptance to `out_valid` is therefore
9 + 9 + 2 = **20 cycles**. No layer is busy for more than 10 cycles, so an
event interval of **II = 10** lets three events be in flight at once, one in
each layer, with no layer ever restarted while busy. Assertions in
`rinngs_dense` and `rinngs` check this. These two figures match the HLS
estimates published for the quantized network: II 10 and latency 20 cycles,
for a clock of at least 100 MHz. The split into LANES is this design's own.
To trade multipliers for latency, change `L1_LANES`, `L2_LANES` and
`L3_LANES` (parameters of both `rinngs` and `l0tpp_top`). The latency is
derived from them, and the top-level delay line follows it.

### Output

The network's last layer is also ReLU-activated, and the label is the index
of the largest of its four outputs. Ties go to the lower label.
(Descriptions of the network call the outputs "probabilities". A softmax
would not change which output is largest, so none is built.) The four
scores also leave the top as `nn_scores`, next to `nn_valid` and `nn_label`,
for monitoring.

### Loading the weights

Weights and biases live in register arrays with no reset. The control
processor loads them through the `param_wr_t` port, one value per cycle:
`layer`, `is_bias`, `row` (output neuron), `col` (input index) and `data`.
A full load takes 3136 weight writes and 84 bias writes. Trained values are
not part of this design.

## The L0 decision (`l0tp_core`)

### Masks

`l0tp_mask_matcher` handles up to 16 masks over 9 sources. A mask stores, for
every source, the primitive bits it requires. A source with no required bits
is a don't-care. Mask *m* matches a slot when three conditions hold:

* the mask is enabled;
* every source it cares about delivered a valid primitive in that slot;
* each of those primitives has all of the required bits set.

### Downscaling

`l0tp_downscaler` keeps one counter per mask. The D-th, 2D-th, ... match of a
mask fires it. D = 1 passes every match. D = 0 turns the mask off for
triggering, although its matches are still reported in `trig_matched`.
Writing a new D does not clear the counter.

### Trigger word

One cycle after the slot:

* `trig_valid` is high if any mask fired;
* `trig_masks` holds the fired masks;
* `trig_matched` holds every mask that matched before downscaling, for
  offline trigger studies;
* `trig_ts` holds the slot's timestamp.

### Configuration registers

All registers reset to 0, which leaves every mask off. They are written
through `cfg_wr_t`, one write per cycle:

| kind         | fields used                  | effect                                 |
|--------------|------------------------------|----------------------------------------|
| `CFG_REQ`    | `mask`, `src`, `data[15:0]`  | required bits of that source in that mask |
| `CFG_DS`     | `mask`, `data[15:0]`         | downscaling factor (0 = off)           |
| `CFG_ENABLE` | `mask`, `data[0]`            | mask enable                            |

## Timing summary (default parameters, 100 MHz)

| path                                  | cycles | time   |
|---------------------------------------|--------|--------|
| event interval (RiNNgs II)            | 10     | 100 ns |
| hit list -> label (`rinngs`)          | 20     | 200 ns |
| slot -> trigger word (`l0tpp_top`)    | 21     | 210 ns |
| primitives -> trigger (`l0tp_core`)   | 1      | 10 ns  |

## What follows the published design and what is this design's own

**Taken from the published design:**

* three fully connected layers of 64, 16 and 4 neurons, each with ReLU;
* the hit list divided by the channel count as input;
* the four labels 0, 1, 2 and 3-or-more;
* 18-bit data with 8 integer bits;
* 7- and 9-bit parameters with one integer bit;
* II = 10 and latency = 20 cycles;
* the 1952 RICH photomultipliers;
* masks of primitive coincidences, each with a programmable downscaling
  factor;
* eight detector links;
* network and trigger processor on the same device.

**Chosen here, because the published description is silent:**

* the hit-list length (32 slots);
* which of the two parameter widths goes to weights;
* floor rounding and saturation;
* the time-multiplexed layer architecture and its LANES split;
* the handshake;
* mask semantics: required bits only, no vetoes, no time window;
* the downscaling counter phase and the meaning of D = 0;
* the numbers of masks and sources and the primitive and timestamp widths;
* the register map;
* the ring-count primitive encoding;
* the fixed delay line that aligns the slot with the network result.

**Departures and open points:**

* The published network was generated by a high-level synthesis flow. Its
  internal structure is unknown, so only its function and its published II
  and latency are reproduced here, not its structure.
* The published flow uses the tool's fixed-point types, which wrap on
  overflow by default. This design saturates instead. With real trained
  weights the two agree whenever nothing overflows.
* The channel count used for normalization is 1952, the number of PMTs. If
  the network was trained with the number of electronic channels instead,
  set `N_CHANNELS` in `rinngs_pkg` to match.
* Real L0 primitives come from several detectors with their own timestamps
  and latencies. Here all primitives of a slot arrive together, so
  timestamp-based time alignment is not modelled.
* Backpressure from the experiment's common infrastructure is not handled:
  no input inhibits triggers.

## Not included

* The GPU ring-fitting system and its FPGA network interface.
* The 1 GbE detector links and the 10 GbE output link.
* The control soft processor and the run-control interface.
* The board and mezzanine hardware.
* The RICH readout electronics.

The configuration buses (`nn_wr`, `cfg`) and the slot and trigger signals
are plain top-level ports where those parts would connect.

## Files

`rtl/`:

| file                     | content                                            |
|--------------------------|----------------------------------------------------|
| `rinngs_pkg.sv`          | number formats, sizes, hit and weight-write types  |
| `l0tp_pkg.sv`            | trigger sizes, primitive and configuration types   |
| `rinngs_normalizer.sv`   | hit list -> normalized inputs                      |
| `rinngs_dense.sv`        | one fully connected layer                          |
| `rinngs_argmax.sv`       | label from the four outputs                        |
| `rinngs.sv`              | the network: normalizer, 3 layers, argmax, II gate |
| `l0tp_mask_matcher.sv`   | mask coincidences                                  |
| `l0tp_downscaler.sv`     | per-mask downscaling                               |
| `l0tp_core.sv`           | registers + matcher + downscaler + trigger word    |
| `l0tpp_top.sv`           | top: network, delay line, trigger core             |

`tb/`: one self-checking testbench per module, `tb_<module>.sv`, plus two
more files:

* `tb_rinngs_stream.sv`: 8000 back-to-back events, checking throughput;
* `rinngs_model_pkg.sv`: the arithmetic reference model.

Every testbench ends by printing `TB_RESULT checks=N failures=M`.
`tb_l0tpp_top` runs the whole design at its default sizes and counts each
mechanism:

* source stalls;
* each of the four labels;
* mask matches;
* matches held back by downscaling;
* matches of a D = 0 mask;
* triggers;
* triggers with several masks.

It fails if any of these never occurs.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rinngs_pkg.sv rtl/l0tp_pkg.sv tb/rinngs_model_pkg.sv tb/tb_l0tpp_top.sv \
    --top-module tb_l0tpp_top -o sim
./obj_dir/sim
```

For another test, replace `tb_l0tpp_top` with that testbench's name. Each
test runs in well under a second. The testbenches use only `$urandom`, so
a different `+verilator+seed+N` gives a different stimulus. For a lint check
of a single module:

```
verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/rinngs_pkg.sv rtl/l0tp_pkg.sv rtl/l0tpp_top.sv
```

### How far to trust it

Every module is checked against an independent model with random stimulus.
The checks cover:

* bit-exact outputs;
* the 20-cycle latency and the 10-cycle event interval;
* the 21-cycle slot-to-trigger path.

For each testbench, a copy of its module with one deliberate bug was shown
to fail it. What has **not** been checked:

* classification accuracy, because the trained weights and the RICH events
  are not available;
* timing closure or resource use on any FPGA.
