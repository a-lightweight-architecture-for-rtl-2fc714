# Purkinje-cell spike classifier: detection, classification and storage in RTL

A mouse carrying a wireless recording head stage cannot carry a large battery
or a radio, and a raw neural recording is too large to keep on the animal for a
day. Cerebellar Purkinje cells fire sparsely, around 100 spikes per second, and
the later analysis needs only two things about each spike: when it happened and
whether it was a *simple* spike or a *complex* spike. This design reduces the
stream of 10-bit samples (24.414 kHz, one channel) to a list of 32-bit records
`{spike type, sample index}` in a non-volatile STT-RAM. The chip runs at the
sample rate, one sample per clock. It works in four steps:

1. **Detect.** A nonlinear energy operator (NEO), on a smoothed copy of the
   signal, is compared with a threshold that the chip learns after reset.
2. **Capture.** The next 40 filtered samples (1.6 ms) are frozen in registers,
   reduced to 8 bits.
3. **Classify.** A small integer multilayer perceptron, [40, 16, 7, 5, 4, 3],
   labels the waveform as F (not a spike), SS (simple) or CS (complex).
4. **Store.** SS and CS results are written to the storage with the sample
   index of the detection.

The RTL follows a published architecture for real-time Purkinje-spike
classification. The block structure, the controller's states and transitions,
the 40-sample window, the 8-bit quantization and the network topology come from
that publication. The publication does not give the numerical details: filter
constants, the threshold rule, the classifier's schedule and the record format.
These are choices of this implementation and are marked as such below and in
every file header.

## Block diagram

```
 sample_i ──► IIR filter 1 ─┬─► NEO ─► IIR filter 2 ─► comparator ──detection flag──┐
  (10 bit)   (alpha = 1/2)  │                            ▲                          │
                            ├─► threshold calculator ─► threshold register ─thr flag┤
                            │                                                       ▼
                            └─► waveform registers ─► NN classifier ─class flag─► control FSM
                                (40 x 8 bit)          [40,16,7,5,4,3]                │ enables
                                                          │ spike type               ▼
                                                          └──► spike logger ─► STT-RAM (32 MB)
```

| File | Block |
|---|---|
| `rtl/spike_pkg.sv` | widths, topology constants, state and class enums, the controller's enable struct, the configuration-port struct |
| `rtl/iir_exp_filter.sv` | first-order exponential filter (IIR filters 1 and 2) |
| `rtl/neo_calc.sv` | nonlinear energy operator |
| `rtl/threshold_calc.sv` | automatic threshold calculator |
| `rtl/threshold_register.sv` | threshold register |
| `rtl/spike_comparator.sv` | comparator (detection flag) |
| `rtl/waveform_buffer.sv` | the 40 capture registers |
| `rtl/nn_classifier.sv` | quantized MLP with argmax |
| `rtl/control_fsm.sv` | INIT / RUNNING / DETECTED / CLASSIFYING controller |
| `rtl/spike_logger.sv` | sample counter, record formation, storage write pointer |
| `rtl/stt_ram.sv` | behavioural model of the STT-RAM macro (not synthesizable design) |
| `rtl/spike_classifier_top.sv` | the whole system |

## The controller and the timeline of one spike

Everything is sequenced by a four-state machine. Its outputs are decoded from
the state register, so an enable takes effect in the first cycle of its state.

| State | Enabled | Leaves when | To |
|---|---|---|---|
| INIT (after reset) | threshold calculator | threshold flag (threshold register loaded) | RUNNING |
| RUNNING | NEO, IIR filter 2, comparator | detection flag | DETECTED |
| DETECTED | waveform registers, index i = 0..39 | i = 39 written (40 samples) | CLASSIFYING |
| CLASSIFYING | classifier, storage | classification flag | RUNNING |

The timeline of one spike, in clock cycles (one cycle = 41 µs):

* Sample *n* crosses the threshold. The detection flag is seen 4 cycles later.
  These are the pipeline registers of IIR filter 1, the NEO, IIR filter 2 and
  the comparator.
* In that cycle the controller takes RUNNING → DETECTED. The logger latches
  the current sample index as the spike's timestamp.
* 40 cycles of DETECTED. Each cycle stores one filtered sample, shifted right
  by 2 (10 → 8 bits, a division by 4 rounding toward minus infinity).
* 6 cycles of CLASSIFYING: one start cycle and one cycle per layer. The
  classification flag comes with the class. In that same cycle the logger
  writes the record (SS or CS only), and the controller returns to RUNNING.

From the detection flag back to RUNNING takes 1 + 40 + 6 = **47 cycles =
1.93 ms**. No spike can be detected during this time. The publication allows
this dead time because consecutive Purkinje spikes are more than 2 ms apart.
That constraint is what sizes the classifier (next section). In RUNNING, IIR
filter 2 restarts from zero energy. Without this, the energy held from the
previous spike would re-trigger detection at once.

## The classifier

### Arithmetic

The network takes the 40 signed 8-bit samples. Four hidden layers of 16, 7, 5
and 4 neurons use ReLU, and the output layer gives three linear logits. The
class is the index of the largest logit (order F = 0, SS = 1, CS = 2; a tie
goes to the lower index). Softmax is not needed, because the largest logit is
also the most probable class. Weights are signed 8-bit, and biases and
accumulators are 32-bit. At the end of each hidden layer every accumulator is
brought back to 8 bits:

```
a = clamp( (acc * MULT[l] + 2^(SHIFT[l]-1)) >>> SHIFT[l] , 0 , 127 )
```

The lower clamp at 0 is the ReLU. This is the usual integer-only form of a
quantized network with zero points of 0: a 16-bit multiplier and a right
shift (at most 47) per layer stand in for the real-valued scale. Networks
trained with non-zero activation zero points must be converted first, or the
requantization extended.

### Schedule

Per cycle, the datapath takes `LANES` inputs of the current layer and
multiplies them against all 16 neuron columns at once (`LANES x 16`
multipliers). The first chunk of a layer starts from the bias. The last chunk
is requantized in the same cycle into a 16-entry activation buffer. After the
output layer it is reduced to the argmax instead.

The classification therefore takes `1 + sum(ceil(inputs/LANES))` cycles:

| LANES | cycles | multipliers | dead time after a detection |
|---|---|---|---|
| 40 (default) | 6 | 640 | 47 cycles, 1.93 ms |
| 16 | 10 | 256 | 51 cycles, 2.09 ms |
| 7 | 13 | 112 | 54 cycles |
| 1 | 77 | 16 | 118 cycles, 4.8 ms |

Only LANES = 40 keeps the dead time under 2 ms, so it is the default. If your
recordings tolerate a longer dead time, a smaller LANES saves area. At a
24.414 kHz clock, even the one-cycle 40-input sum of products plus
requantization has no timing difficulty.

### Loading a trained network

No trained weights are built in. All parameters sit in registers and are
written through `cfg_i = {we, addr[11:0], data[31:0]}`, one word per clock,
while no classification is running:

| addr | content |
|---|---|
| `0x000 + 16*row + col` | weight (data[7:0]). `row = ROW_BASE[l] + input`, `ROW_BASE = {0, 40, 56, 63, 68}`; `col` = neuron |
| `0x800 + 16*layer + neuron` | bias (32 bits) |
| `0xC00 + layer` | requantization multiplier (data[15:0]) |
| `0xC08 + layer` | requantization shift (data[5:0]) |

All of them must be written before the first classification; they have no
reset value. A fixed network could instead replace the registers with
constants, which turns the multipliers into constant-coefficient logic and
makes the classifier much smaller.

## Detector

* **IIR filter 1:** `y += (x - y) >>> 1`, i.e. alpha = 1/2 (cut-off about
  2.7 kHz), on 10-bit signed samples. It always runs, because its output feeds
  the threshold calculator, the NEO and the capture registers.
* **NEO:** `psi[n-1] = x[n-1]^2 - x[n]·x[n-2]`, 24-bit signed. It is zero for
  a constant input, so DC offsets in the recording do not matter.
* **IIR filter 2:** alpha = 1/8 on the energy. With uniform noise, alpha = 1/2
  here gave a false crossing about every tenth sample. Alpha = 1/8 gave none
  in 15,000 samples.
* **Threshold calculator:** it runs in INIT only. It has its own NEO on the
  filtered signal. It ignores the first 16 energies, averages the next 4096
  (168 ms), and sets threshold = 8 × mean (saturated, and never negative).
  The flag rises 4114 cycles after reset. Until then, the threshold register
  holds the largest positive value, so nothing is detected. The threshold is
  learned once per reset. To adapt to a changed noise level, reset the chip.
* **Comparator:** strict `energy > threshold`, registered.

Top-level parameters: `IIR1_K = 1`, `IIR2_K = 3`, `THR_WIN = 12` (log2 of the
averaging window), `THR_WARMUP = 16`, `THR_C = 8`, `NN_LANES = 40`, and
`DEPTH = 8388608` (storage words).

## Records and storage

Each SS or CS result becomes one 32-bit word:

```
bit 31     : 0 = simple spike, 1 = complex spike
bits 30..0 : sample index of the detection (samples since reset; wraps after 2^31 = 24.4 h)
```

The timestamp is the sample index of the cycle in which the detection flag
was taken, four samples after the crossing sample. F results are not stored.
Records go to consecutive addresses from 0. When all `DEPTH` words are used,
`full_o` is set and further records are counted in `dropped_o`. Records are
read back through `rd_en_i/rd_addr_i/rd_data_o`, with the data one cycle
later. A write in the same cycle takes precedence.

The storage is an STT-RAM macro in the intended implementation. `stt_ram.sv`
only models it: a single-port array with a chip enable that the controller
raises in CLASSIFYING (the memory is otherwise powered down), single-cycle
access, and contents kept while disabled. Replace it with the real macro
wrapper for synthesis.

**Capacity:** 2^23 records fill 32 MiB. At exactly 100 stored spikes per
second that is 23.3 h. A full 24 h session fits if the stored SS + CS rate
averages at most 97 Hz. Below 1 h the storage is never a concern: 10 min
needs 240 kB and 1 h needs 1.44 MB.

## Not included

* The amplifier, analog filter and ADC. The top takes the 10-bit samples
  directly.
* Offline post-processing. The intended analysis discards detections that
  fall in a dead zone after each simple spike. This step runs in software on
  the retrieved records, not on the chip.
* Trained weights (see above), and the recalculation of the threshold while
  running.

## Departures and uncertainties

* **The classifier's schedule:** the publication gives no schedule. The
  default of one layer per cycle was chosen so that the publication's 2 ms
  argument holds. The cost is 640 multipliers, more than a constant-weight
  design of the same speed would need.
* **The threshold rule:** the publication gives no formula. Mean NEO × 8 is a
  common rule for NEO detectors, and its constants are untuned. On real data,
  `THR_C`, `IIR2_K` and the window should be tuned against annotated
  recordings.
* **The threshold is learned once:** the publication describes a calculator
  that can recalculate the threshold, but its controller enables the
  calculator only in INIT. The RTL follows the controller.
* **The NEO chain runs in RUNNING only:** the publication also says the NEO
  and comparator run "continuously". The RTL follows the per-state
  description.
* **Record format and dropping of F results:** these are choices of this
  design.
* The accuracy figures of the publication depend on its trained network and
  cannot be reproduced without it.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_spike_classifier_top rtl/spike_pkg.sv tb/tb_spike_classifier_top.sv
./obj_dir/Vtb_spike_classifier_top
```

| Testbench | What it shows |
|---|---|
| `tb_spike_classifier_top` | End to end, with the storage cut to 16 words and a 256-sample threshold window. A synthetic recording (offset, noise, simple- and complex-spike shapes, some spikes inside the dead time) runs against a cycle-level reference model in the testbench. State, flags and classes are compared every cycle, and all records are read back. It also counts that each mechanism happened: convergence, detection, capture, all three classes, F discarded, spikes ignored while busy, storage full with drops, read-out. |
| `tb_spike_classifier_full` | The same test with every parameter at its default (32 MB storage, 4096-sample window) |
| `tb_nn_classifier` | Random networks and waveforms against a 64-bit reference forward pass, for 40 and 7 lanes, with latency checks (6 and 13 cycles) |
| `tb_control_fsm` | Transitions, enables, the 40-cycle capture, detections ignored outside RUNNING |
| `tb_threshold_calc` | Threshold and flag timing against a recomputed mean; zero threshold for a constant input |
| `tb_iir_exp_filter`, `tb_neo_calc`, `tb_spike_comparator`, `tb_threshold_register`, `tb_waveform_buffer`, `tb_spike_logger`, `tb_stt_ram` | Each block against its formula |

The two top-level testbenches share their text and differ only in the sizes
and in the storage-full check.
