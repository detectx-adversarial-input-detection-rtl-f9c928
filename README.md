# DetectX: flagging adversarial inputs from the current sum of an analog crossbar

An analog in-memory DNN accelerator computes a layer's multiply-accumulates as
column currents in a memristive crossbar: each column current is the dot product
of the input voltages with that column's conductances. Adversarial inputs carry
small, deliberately chosen perturbations, and in the first layer those
perturbations pass linearly into every column current. As a result, the sum of
the magnitudes of all first-layer column currents (the *SoI*, sum of currents) tends
to be larger for an adversarial image than for a clean one. With a network whose
first layer was trained to widen that gap, the SoI alone is enough to separate
clean from adversarial inputs. No neural-network detector is needed.

DetectX is the small digital block that does this in hardware. It sits after the
ADCs of the first-layer crossbar and does three things for each input image:

1. **SoI computing unit.** It adds up |ADC code| over every column and every
   output position of the layer.
2. **LookUp stage.** It binary-searches a trained table of sample SoI values
   `S_k` and their clean probabilities `P_k`, and finds the `P_k` whose `S_k`
   brackets the measured SoI.
3. **Confidence generator.** It draws a random number and reports *clean* when
   the number is below `P_k`. Otherwise the input is rejected as adversarial.

This RTL implements that block in SystemVerilog. The default sizes are those of
the main evaluated system: the first layer of VGG8 on CIFAR10, mapped to a
128×128 RRAM crossbar and read through sixteen 8:1 analog multiplexers into
sixteen 8-bit ADCs. One image therefore takes 32·32·8 = 8192 read cycles. The
LUT is a 512 × 16-bit SRAM and the random source delivers 8-bit samples.

```
 crossbar ──► 8:1 analog MUX ×16 ──► 8-bit ADC ×16 ──┬──► activation units (next layer)
                                                     │
            ┌────────────────────── detectx ─────────┼───────────────────────────────┐
            │ soi_computing_unit                     ▼                               │
            │   l1_accumulator ×16  (±code into a register, per ADC)                 │
            │   l2_adder_tree       (sum of the 16 registers)  ──► SoI               │
            │ lut_based_detector                                  │                │
            │   key = sat(SoI >> cfg_soi_shift)  ◄──────────────────┘                │
            │   lut_search  ◄──►  lut_sram (512 × {S_k, P_k})                        │
            │   confidence_generator ◄── sram_rng        det_clean = (rng < P_k)     │
            └────────────────────────────────────────────────────────────────────────┘
```

Only the digital part is RTL. The crossbar, the analog multiplexers, the ADCs
and the activation units sit outside `detectx`, and their signals are its ports.
The SRAM-based random number generator relies on power-up instability of SRAM
cells, which has no logic equivalent. `rtl/sram_rng.sv` is therefore a
behavioural model, not synthesizable logic.

## Computing the SoI

Each ADC lane has an *L1* adder/subtractor and a register (`l1_accumulator`).
The ADC code is taken as two's complement. When its MSB is 0 the code is added
to the register, and when the MSB is 1 it is subtracted. Subtracting a negative
code adds its magnitude, so after a frame the register holds the sum of |code|
for every column the lane read. No absolute-value circuit is needed: the sign
bit only chooses between add and subtract.

A *frame* is every read cycle that belongs to one input image. The multiplexer
steps through its 8 columns for each of the 32×32 output positions, giving
8192 cycles. The unit does not count to a fixed number. Instead, the read
sequencer marks the frame's last cycle with `adc_last`. This lets one build
serve any layer shape up to `MAX_CYCLES` read cycles, and `soi_cycles` reports
how many cycles the frame actually had (N_C). On the first valid cycle of a
frame each register is loaded with ±code instead of accumulating, so no clear
cycle is needed between images. Idle cycles (`adc_valid` low) may occur anywhere
in a frame.

After the last cycle, the *L2* adder tree (`l2_adder_tree`) sums the 16
registers. It is a balanced binary tree of 15 adders that widens by one bit per
level. Its result is registered as `soi`.

**Widths.** A lane can add at most 2^7 per cycle for 8192 cycles, so it needs
8 + 13 = 21 bits. The SoI needs 21 + 4 = 25 bits. Both widths are derived from
`ADC_W`, `MAX_CYCLES` and `N_ADC`, so nothing can overflow for a frame within
`MAX_CYCLES`. An assertion catches longer frames.

**Timing.** The registers take the last code on clock edge E. `soi_valid`
pulses after edge E+1, and `soi`/`soi_cycles` then hold until the next frame
ends.

## Looking up the SoI

### Table format

The LUT (`lut_sram`) holds 512 words of 16 bits. Word k is
`{S_k[15:8], P_k[7:0]}`:

- `S_k` is a sample SoI on an 8-bit scale.
- `P_k` is the probability that an input with that SoI is clean, as `P_k/256`.

The table is built offline from histograms of clean and adversarial SoIs as
`P(clean) = n_clean / (n_clean + n_adv)` per SoI bin. It is loaded through the
write port (`lut_we`, `lut_waddr`, `lut_wdata`), sorted so that `S_k` never
decreases with k. Repeated `S_k` values are allowed, and with 512 entries on an
8-bit scale they are unavoidable.

### Scaling the SoI to a key

The measured SoI is 25 bits wide, while `S_k` has 8. The detector therefore
forms the search key as `min(SoI >> cfg_soi_shift, 255)`. The shift is set along
with the table contents, so a table built for a given SoI range carries its own
scaling.

### Binary search

`lut_search` finds the largest k with `S_k <= key`, so that
`S_k <= key < S_{k+1}`. It builds k one bit at a time, from bit 8 down to bit 0:

- Probe entry `k | 2^b`.
- Keep the probe as the new k if its `S` is `<= key`.

Each probe is one synchronous SRAM read, so a search over 512 entries takes at
most 9 reads. Two cases change the read count:

- **Early exit.** If a probe finds `S == key`, the search stops there. This
  makes the read count N_X data dependent, and it is often below 9.
- **Key below the table.** Entry 0 is never probed. If no probe succeeds, the
  key is below `S_1`, and one extra read fetches `P_0`. This tenth read is the
  only way N_X exceeds 9.

`det_nx` reports N_X for each decision, and `det_k` reports the index that was
selected.

## Deciding

`confidence_generator` requests one 8-bit sample from the RNG for each SoI. It
outputs `det_clean = (sample < P_k)`:

- A table entry with `P_k = 0` always rejects.
- An entry with `P_k = 192` passes about 75% of inputs.

- An entry with `P_k = 255` passes all but 1 in 256 inputs.

A table with only these two values therefore acts almost as a fixed SoI
threshold. `det_rng` shows the sample that was used, so a decision can be
audited.

## Interface and timing of `detectx`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `adc_valid` | in | 1 | `adc_data` holds one read cycle |
| `adc_last` | in | 1 | this read cycle ends the frame |
| `adc_data` | in | 16 × 8 | ADC codes A1..A16, two's complement |
| `cfg_soi_shift` | in | 5 | SoI → key scaling |
| `lut_we`, `lut_waddr`, `lut_wdata` | in | 1, 9, 16 | LUT load; not during a search |
| `soi_valid`, `soi`, `soi_cycles` | out | 1, 25, 14 | SoI and N_C of the last frame |
| `ready` | out | 1 | detector idle |
| `det_valid` | out | 1 | one-cycle pulse: decision ready |
| `det_clean` | out | 1 | 1 = clean, 0 = adversarial (reject) |
| `det_p`, `det_k`, `det_nx`, `det_rng` | out | 8, 9, 4, 8 | P_k, k, LUT reads, RNG sample |

Latencies:

- `det_valid` comes N_X + 4 cycles after `soi_valid`, which is at most 14 cycles.
- The detector is busy for that long, far shorter than any real frame. An
  assertion flags a frame that ends while `ready` is low. This can only happen
  with frames a few cycles long.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_ADC` | 16 | sixteen 8-bit ADCs behind sixteen 8:1 multiplexers (128 columns) |
| `ADC_W` | 8 | ADC resolution |
| `MAX_CYCLES` | 8192 | 32×32 output positions × 8 multiplexer steps |
| `LUT_DEPTH` | 512 | 512 × 16-bit LUT |
| `S_W`, `P_W` | 8, 8 | split of the 16-bit word (this design's choice) |
| `RNG_SEED` | 1 | seed of the RNG model only |

Shared constants and the `lut_entry_t` word type are in `rtl/detectx_pkg.sv`.
Lanes, frame length and table depth can be changed freely. The table depth must
be a power of two.

## How this RTL relates to the published design

Taken from the published description:

- The two sub-units.
- The MSB-controlled add/subtract L1 stage with per-lane registers.
- The L2 adder tree.
- The binary-searched SoI/P(clean) table.
- The comparison of `P_k` with one RNG sample per SoI, and the sense of the
  output (1 = clean).
- All default sizes.

Choices made here, where the description is silent or inconsistent:

- **Register and adder width.** The published energy table lists 8-bit adders
  and registers. An 8-bit register cannot hold a sum over 8192 read cycles, so
  the accumulators are 21 bits wide and the tree output is 25 bits.
- **Number of L2 adders.** The published count for 16 lanes is 16+8+4+2+1 = 31.
  The block diagram, drawn for four lanes, shows a tree of 2+1 adders. The
  diagram is followed here: 15 adders for 16 lanes.
- **ADC code format.** The codes are read as two's complement. The description
  only says that the MSB selects subtraction.
- **Frame end.** It is signalled by `adc_last` instead of a fixed internal cycle
  count.
- **LUT word layout** and **SoI-to-key scaling** (`cfg_soi_shift`, saturating).
  Neither is specified.
- **Search details.** The bitwise search order, early exit on equality, and the
  extra read for keys below the table. The stated worst case of 9 LUT accesses
  holds for every key that is not below the table.
- **Reset, handshakes and latencies.** None of these are specified.
- **The RNG.** It is a `$urandom` model of an SRAM power-up generator.

Not covered here:

- The analog crossbar, multiplexers and ADCs, including device variation and
  non-idealities.
- The activation units.
- The addition of partial sums from the nine crossbars that hold the 3×3
  kernel. `detectx` expects final per-column codes.
- The training that produces the table contents.
- The published energy figures. They come from circuit simulation of a 32 nm
  implementation and cannot be reproduced from this RTL.

## Simulation

Every testbench is self-checking and ends with a
`TB_RESULT checks=N failures=M` line. To run one with Verilator from the
repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/detectx_pkg.sv tb/tb_detectx_full.sv --top-module tb_detectx_full
./obj_dir/Vtb_detectx_full
```

| testbench | what it exercises |
|---|---|
| `tb_l1_accumulator` | add/subtract on the MSB, frame restart, a full-length frame of −128 codes |
| `tb_l2_adder_tree` | random and extreme sums, 16 and 5 inputs |
| `tb_soi_computing_unit` | random frames with gaps, SoI, N_C, the two-edge latency, the largest possible SoI |
| `tb_lut_sram` | read/write, one-cycle latency, hold |
| `tb_lut_search` | bracketing, P_k, N_X per search, worst case 9, keys below the table, `done` timing |
| `tb_sram_rng` | request/valid timing, rough uniformity of the model |
| `tb_confidence_generator` | decision rule, P_k = 0, clean rate ≈ P_k/256, timing |
| `tb_lut_based_detector` | key scaling and saturation, selection, decision, N_X + 4 latency |
| `tb_detectx` | short frames (`MAX_CYCLES` = 64), counts every mechanism: add, subtract, accumulate, one-cycle frame, idle gap, early exit, nine reads, below table, saturated key, clean, adversarial, LUT reload |
| `tb_detectx_full` | default sizes, VGG8 first layer from a behavioural crossbar/ADC model (`tb/xbar_adc_model.sv`), clean and perturbed images |
| `tb_workloads` | the first layers of VGG16 (CIFAR100) and ResNet18 (TinyImagenet) through the same model |

The crossbar model computes exact integer convolutions with random signed
weights. It quantises each column's MAC to an 8-bit code by an arithmetic shift
and a clamp. Its "perturbed" images add ±32/255 or ±16/255 noise of random
sign. This is enough to exercise the datapath and to show that the SoI rises
under perturbation (by well under 1% with untrained weights). It is not an
adversarial attack, and it does not reproduce the detection rates of a trained
network.

## Workload sizes

- **CIFAR10 / VGG8.** The first layer has 128 channels and a 32×32 output, so it
  takes 8192 read cycles. This is exactly the default build.
- **CIFAR100 / VGG16.** The first layer has 64 channels and a 32×32 output, so
  it also takes 8192 cycles and fits.
- **TinyImagenet / ResNet18.** The first layer depends on the stem, which is not
  given:
  - A 3×3 stride-1 stem on 64×64 inputs needs 64·64·8 = 32768 read cycles per
    image. This requires `MAX_CYCLES = 32768`, two bits wider accumulators, and
    is how `tb_workloads` runs it.
  - A 7×7 stride-2 stem would give 32×32 outputs and fit the default build.
