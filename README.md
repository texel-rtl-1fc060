# TEXEL: a mixed-signal spiking processor with on-chip learning and a memristive-device interface

TEXEL is a neuromorphic processor with 180 adaptive exponential integrate-and-fire
neurons in two cores of 90. Each neuron has 58 input synapses:

- 4 static synapses: two excitatory and two inhibitory.
- 54 plastic synapses. Each carries its own learning circuit. The circuit changes an
  analog weight according to the timing and rate of pre- and postsynaptic spikes,
  and a bistable drift drives that weight to one of two states.

Every plastic synapse also has an interface to a pair of memristive devices that sit
off the CMOS. The interface can read the pair and use it as the synaptic efficacy. It
can also write the pair whenever learning flips the binary weight. The neurons and
synapses are continuous-time analog circuits. All routing, configuration and device
control is event-driven digital logic. Input spikes, output spikes and configuration
all travel over address-event (AER) buses.

This repository is a SystemVerilog model of that architecture:

- The digital parts are synthesizable RTL: bus handshakes, packet routing, spike
  decoding, arbitration and encoding, the register block, DAC code storage and the
  per-synapse device controllers.
- The analog parts are discrete-time integer behavioural models with the same ports
  and the same qualitative behaviour. These are the neuron, the synaptic filters, the
  learning traces, the weight circuit, the normalizer, the DAC current conversion and
  the spiking ADCs.

The RTL is parameterised at the chip's real size, 2 × 90 neurons × 58 synapses.
End-to-end simulations run at reduced neuron counts (see *Simulating*).

## Two time bases

- `clk` runs the digital logic. The real chip is asynchronous (clockless). Here every
  handshake is clocked, and every asynchronous input has a two-flop synchronizer.
- `tick` is a strobe that advances every analog model by one time step. It may be
  high on every clock, or once every N clocks to slow the analog dynamics relative to
  the bus.

Units in the analog models:

- Currents are unsigned 32-bit integers in pA (`cur_t`).
- The analog synaptic weight `V_w` is in mV, from 0 to 1800 (a 1.8 V rail).
- Time is counted in ticks.

Most analog blocks are built from one primitive, the differential-pair integrator
(DPI), a current-mode low-pass filter. It is modelled by `dpi_filter`:

    I <- I + (gain·I_in − leak·I) >> K        (K = 10, so gain/leak are in units of 1/1024)
    I <- I + jump_amp                          on an input spike

So `leak` sets the time constant, about 1024/leak ticks. `gain/leak` sets the DC gain.
A non-zero `I` always decays by at least 1 pA per tick, so that it empties.

## Hierarchy

```
texel_top
├── aer_rx                input AER bus → valid/ready stream
├── aer_demux             opcode/core → spike path or configuration path of a core
├── texel_core ×2
│   ├── spike_decoder     (neuron, synapse) → one presynaptic pulse
│   ├── register_block    64 × 23-bit configuration words
│   ├── dac_bank          94 × 12-bit bias DAC (codes + currents)
│   ├── neuron_block ×90
│   │   ├── plastic_synapse ×54    pre trace, analog weight, bistability, learning rule
│   │   ├── device_controller ×54  READ / POT / DEP / IDLE pulses, read-priority interrupt
│   │   ├── normalizer ×54         differential device read-out
│   │   ├── dpi_filter ×4          PSC filters: plastic exc/inh, static exc/inh
│   │   ├── soma                   AdExp-I&F neuron with refractory period and adaptation
│   │   └── post_traces            post trace + second-order Ca²⁺ trace, learning window
│   ├── arb_encoder       round-robin arbiter/encoder of the 90 spike requests
│   ├── monitor_mux       selected neuron/synapse → 12 sADC inputs + monitor pins
│   └── sadc ×12          spiking current-to-rate converters
├── arb_encoder (N=2)     merges the two cores' output streams
├── aer_tx                output AER bus (spikes and read results)
├── arb_encoder (N=24)    sADC encoder
└── aer_tx                5-bit sADC AER bus
```

`texel_pkg` holds the sizes, the packet formats, the register map, the DAC channel
map and the bias bundles that each core hands to its neuron blocks.

## Buses and packets

All three buses use the four-phase handshake:

1. The sender drives data and raises `req`.
2. The receiver latches the data and raises `ack`.
3. The sender lowers `req`.
4. The receiver lowers `ack`.

`aer_tx` asserts that its data is stable while `req` is high. `aer_rx` takes three
clocks from `req` to a valid word because of its synchronizer.

**Input packet (34 bits):** `[33:31]` opcode, `[30]` core, `[29:0]` payload.

| opcode | name   | payload |
|---|---|---|
| 0 | SPIKE  | `[12:6]` neuron, `[5:0]` synapse (0–53 plastic, 54–55 static excitatory, 56–57 static inhibitory) |
| 1 | REG_WR | `[28:23]` word, `[22:0]` data |
| 2 | REG_RD | `[28:23]` word |
| 3 | DAC_WR | `[18:12]` channel, `[11:0]` code |
| 4 | DAC_RD | `[18:12]` channel |
| 5 | WGT_WR | `[13]` weight, `[12:6]` neuron, `[5:0]` plastic synapse |
| 6 | WGT_RD | `[12:6]` neuron, `[5:0]` plastic synapse |
| 7 | NOP    | ignored |

**Output packet (32 bits):** `[31:30]` kind (0 spike, 1 register, 2 DAC, 3 weight),
`[29]` core, `[28:23]` address (register word or DAC channel), `[22:0]` data. For a
spike, `data[6:0]` is the neuron. For a weight read, `data[0]` is the weight and
`data[13:1]` is {neuron, synapse}.

Each core accepts one configuration command at a time. It holds the next command off
(`cfg_ready` low) until the read result of the previous one has left. A read result
overtakes neuron spikes waiting in the core's encoder. The two cores share the output
bus through a round-robin merge.

**sADC bus:** 5 bits carry the sADC index, core × 12 + channel. This bus is separate
from the spike bus.

## Configuration: registers and DAC

Each core has 64 words of 23 bits. Only the first seven have a function; the rest are
general-purpose storage.

| word | field |
|---|---|
| 0 `R_CTRL` | bit 0 plasticity enable, bit 1 device mode, bit 2 continuous read, bit 3 pre-charge (IDLE), bit 4 sADC input enable |
| 1 `R_MONITOR` | `[6:0]` monitored neuron, `[12:7]` monitored plastic synapse |
| 2 `R_READ_PW` | device read pulse width in clocks (reset 4) |
| 3 `R_WRITE_PW` | device write pulse width in clocks (reset 8) |
| 4–6 `R_SYN_TYPE*` | one bit per plastic synapse row, 1 = inhibitory (54 bits across the three words) |

Every analog parameter is a current taken from one channel of the core's 94-channel
bias DAC. All neurons of a core share it. A 12-bit code splits as follows:

- `[10:8]` selects one of six master currents: 2.2 µA, 0.29 µA, 36 nA, 4.5 nA,
  0.57 nA or 70 pA. Values 6 and 7 give zero.
- `[7:0]` divides the selected master in 256 steps.
- `[11]` picks an nFET or a pFET output branch.

The output is master × fine / 256, in pA. The full channel map is in `texel_pkg`
(`B_*`). Channels 0–7 are the neuron, 8–19 the PSC filters and static weights, 20–21
the CMOS-mode efficacies, 22–31 the learning circuit, 32–39 the post and Ca²⁺ traces,
40 the normalizer, 41–43 the sADCs, and 44 a calibration current. Channels 45–93 are
stored and read back but drive nothing.

## The neuron

`soma` integrates its net input into the membrane current `I_mem`:

    net   = max(0, I_dc + I_exc − I_inh − I_ahp)
    I_mem ← I_mem + (gain·net − leak·I_mem)>>K + (expg·I_mem²/spk_thr)>>K

The quadratic term plays the role of the exponential positive-feedback module: it
makes the final approach to threshold self-accelerating.

When `I_mem` reaches `spk_thr`, the following happens:

- the neuron emits a one-clock spike;
- `I_mem` is clamped to zero for the refractory period, which lasts until the
  refractory bias has charged to a fixed level (about 65536/`refr` ticks);
- the adaptation current `I_ahp` is kicked by `ahp_w`. It then decays with `ahp_leak`,
  and while it is non-zero it lowers the rate: spike-frequency adaptation.

Four PSC filters feed the soma:

| filter | input |
|---|---|
| plastic excitatory | plastic synapses of excitatory rows |
| plastic inhibitory | plastic synapses of inhibitory rows |
| static excitatory | static synapses 0 and 1 |
| static inhibitory | static synapses 2 and 3 |

The following table shows what a presynaptic spike adds to its synapse's filter.

| synapse | CMOS mode (`R_CTRL.1 = 0`) | device mode (`R_CTRL.1 = 1`) |
|---|---|---|
| static *k* | `st_w[k]` as a jump | same |
| plastic | `w_high` or `w_low` as a jump, chosen by its binary weight | a device read; `I_norm` flows into the filter for the read pulse |

A spike sets the neuron's request latch. The latch stays set until the core's
round-robin encoder grants it. The spike also goes back into the neuron's plastic
synapses and learning traces.

## The learning circuit

Each plastic synapse holds an analog weight `V_w` (0–1800 mV) and a presynaptic
trace `I_pre`, which is a DPI kicked by each pre spike. Each neuron holds two traces:

- a post trace `I_post`, kicked by its own spikes;
- a calcium trace, which is a second-order DPI (outputs `I_FO`, then `I_SO`). It is a
  smooth measure of the neuron's firing rate.

Learning is allowed only while plasticity is enabled and `I_SO` lies in a window
`[ca_thr_l, ca_thr_h]`. Outside that window learning stops: the neuron is too silent
or too active. Inside the window, each tick applies up to three rules:

| event | condition | change of `V_w` |
|---|---|---|
| pre spike | `I_post > post_thr` | −`pre_dep` |
| post spike | — | +`pot_gain · I_pre / 256` |
| post spike | `pre_thr_l < I_pre < pre_thr_h` | −`post_dep` |

The first and second rules together give the classic STDP window:

- post-after-pre potentiates, in proportion to how recent the pre spike was;
- pre-after-post depresses.

The third rule can add a depressive region for some positive pairings, shaped by the
biases.

Independently of learning, a bistability drift moves `V_w` every tick:

- up by `slew_up` above `bist_thr`;
- down by `slew_dn` below it.

Over time every weight settles at 0 or 1800 mV. The binary weight is
`w_bin = V_w > bist_thr`. This is what a weight read returns. In CMOS mode it also
chooses between `w_high` and `w_low`.

Writing a weight with WGT_WR sets `V_w` to a rail. That is how a trained or
hand-made weight matrix is loaded for inference.

## The device interface

Every plastic synapse can be backed by a differential pair of memristive devices: a
positive and a negative device. The devices are not on this die. The top brings out,
for every synapse (indexed `[core][neuron][synapse]`):

- four gate signals: READ, POT, DEP and IDLE;
- the interrupt flag DEV_INT;
- two returned currents: `I_pos` and `I_neg`.

**Normalizer.** During a read it outputs

    I_norm = norm_bias · (I_pos − I_neg) / (I_pos + I_neg)   if I_pos > I_neg, else 0

With a high on/off ratio, a stored 1 (positive device conductive) gives nearly
`norm_bias`. A stored 0 gives nothing. At the end of each read, the sign of `I_norm`
is latched as the synapse's device state. That state can be viewed on the monitor
pins.

**Controller.** `device_controller` has four states:

```
IDLE --pre spike-->  READ        --read ends-->   IDLE
IDLE --w_bin flips-> WRITE       --write ends-->  IDLE
WRITE --pre spike--> READ_INT    --read ends-->   WRITE (restarted, full width)
```

A flip of the binary weight requests a write:

- a flip to 1 writes POT (positive device set, negative reset);
- a flip to 0 writes DEP.

The flip can come from learning or from WGT_WR. Reads and writes share the device
terminals, so they exclude each other, and a read always wins:

- A presynaptic spike that arrives during a write suspends it. The controller raises
  DEV_INT and performs the read.
- The write then restarts from the beginning. The devices therefore always receive a
  full-width write pulse, and only after the read.
- A flip that arrives during a plain read waits and starts after the read.
- A second flip during a write replaces the pending value.

**Mode bits.**

- Continuous-read mode holds READ high except while writing. It is used to observe
  device currents.
- Pre-charge mode drives IDLE between pulses.

Pulse widths are clock counts from registers 2 and 3.

## Monitoring

Each core has 12 spiking ADCs (sADCs), one per type of monitorable current:

- the DAC calibration current;
- six neuron currents: I_SO, I_POST, I_S-EXC, I_AHP, I_FO and I_S-INH;
- five synapse currents: I_PRE, I_P-LEFT, I_P-RIGHT, I_DEV-NEG and I_DEV-NORM.

`R_MONITOR` picks the neuron and the plastic synapse. That choice fixes which currents
reach the sADCs. With 90 × 6 + 4860 × 5 + 1 = 24,841 currents per core, the chip can
observe 49,682 currents, 24 at a time.

An sADC works as follows:

1. It integrates its input current. When sADC enable is off, it integrates the
   `off_bias` current instead.
2. When the charge reaches a threshold (the comparator level plus hysteresis), it
   raises a request.
3. The acknowledge discharges it and starts a refractory period. The `pwlk` current
   sets the length of that period.

The event interval is therefore 1 + ⌈4096/pwlk⌉ + ⌈thr/I⌉ ticks, a monotonic
function of the current. The selected neuron's digital flags and the selected
synapse's state also come out on `mon`:

- neuron flags: Ca above, Ca below, post above;
- synapse state: weight, READ, write, interrupt, device state.

`mon` also carries stand-ins for the two analog outputs V_MEM and V_W.

## Where the model departs from the chip

**Asynchronous vs clocked.** The handshakes are clocked, and the device pulse
widths count clocks. On the chip they are self-timed and set by biased pulse
extenders.

**Analog behaviour.** Every analog block is a first-order Euler integer model with
ideal devices:

- there is no mismatch, noise or leakage;
- the DAC is perfectly monotonic.

Use the models to check architecture, protocol and learning-rule behaviour, not
analog accuracy.

**Formats and maps.** These are choices of this design, not the chip's:

- the input and output packet layouts;
- the register map;
- the DAC channel assignment (45 channels used);
- the DAC code bit order;
- the static-synapse order within the synapse index;
- the 4-filter PSC arrangement, with per-row excitatory/inhibitory type;
- the one-sADC-per-current-type assignment (it does reproduce the 24 channels and the
  49,682 monitorable currents).

**Formulas.** Other formulas would fit the chip's described behaviour equally well:

- the normalizer formula;
- the quadratic stand-in for the exponential feedback;
- the unit-capacitor scaling of the weight updates (bias currents applied as mV per
  tick).

**Not modelled.**

- the device-side switch network and voltage levels (the 1.8–5 V level shifters and
  transmission gates);
- the devices themselves (the testbenches use a two-state device-pair model);
- the bias reference generator;
- the pads;
- power.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=<n> failures=<m>`. The testbenches need a two-state simulator with
`--timing`. With Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_texel_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/texel_pkg.sv tb/tb_texel_top.sv -o sim
obj_dir/sim
```

Two testbenches run the whole chip:

- `tb_texel_top` uses 6 neurons × 6 plastic synapses per core. It builds and runs in
  seconds.
- `tb_texel_top_n16` uses 16 neurons per core and every other size at the chip's
  value: 54 plastic + 4 static synapses per neuron, 94 DAC channels, 24 sADCs. That
  makes 1,728 plastic synapses. With Verilator it takes about 3 minutes to compile
  and 20 seconds to run.

The full default size (2 × 90 neurons, 9,720 plastic synapses) elaborates and lints.
However, Verilator turns it into over 700 MB of C++, which takes far longer to compile
than to run. It has therefore not been simulated: 16 neurons per core is the largest
size simulated.

Both testbenches use the same environment, `tb/texel_top_env.sv`. Its `FULL` parameter
instantiates the top with no parameter overrides. The environment wraps the top in:

- an AER sender;
- a receiver that applies random back-pressure;
- an sADC-bus receiver;
- a device-pair model for every synapse.

The environment configures both cores over the bus. It counts each mechanism below,
and it fails if any of them never happened:

- register, DAC and weight read-back;
- spikes from both cores;
- device reads and writes, and an interrupted write;
- continuous read;
- a weight learned on chip and written to its devices;
- sADC events from both cores;
- output back-pressure;
- a binary weight matrix over every plastic synapse of both cores, programmed and
  read back.

`tb_stdp` reproduces the learning-circuit experiments on one synapse:

- an STDP curve over pre−post delays of −60 to +60 ticks;
- a bias setting that makes some pre-before-post delays depressive;
- an SRDP comparison of Poisson pre/post rates, in which high rates drive the weight
  to the high state in 10 of 10 trials and low rates in none.

For a weight matrix or an experiment of your own, use its helper tasks (`reg_wr`,
`dac_wr`, `spike`, `wgt_wr`, `wgt_rd`) with physical values: `dac_wr` converts pA to
the nearest code.

The parameters `NRN` (neurons per core) and `NPL` (plastic synapses per neuron)
shrink the design for quick runs. `K` (the DPI shift) changes the time resolution.
The default is the chip's size.

## Capacity

At its default parameters the model holds the following configurations:

- A full binary weight matrix: 180 neurons × 54 plastic synapses = 9,720 weights. Each
  is programmed with WGT_WR and read back with WGT_RD.
- Single-synapse STDP pairing experiments.
- Pre/post rate sweeps for SRDP. Up to 180 postsynaptic × 54 presynaptic rate
  combinations run in parallel.
- Input spike streams that address all 10,440 synapses.
