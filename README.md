# A spiking-neuron processor with two classification units and an SPI converter interface

This is synthesizable SystemVerilog for a small neuromorphic processor. It classifies
images with spiking neural networks (SNNs). Two networks share one chip:

* the **Brain Code Unit (BCU)** sorts brain MRI images into two classes, tumour or
  no tumour;
* the **Fundamental Code Unit (FCU)** sorts CIFAR-10-sized colour images (32x32x3)
  into ten classes.

Every neuron in both units is the same leaky integrate-and-fire (LIF) neuron. It is
computed by one chain: **MUL → ACCU → THRES**. MUL weights an input spike, ACCU sums
the weighted spikes on top of a bias, and THRES applies leak, threshold, reset and
refractory time. Before that chain, pixels are turned into spike trains in **rate code**
or **latency code**. The chip connects to the analog world through two SPI
converters. An ADC supplies the image, one sample per SPI frame. A DAC receives the
decision, one SPI frame per inference.

The RTL follows a published description of the BCU/FCU architecture. That description
gives the structure (the neuron chain, the layer types, the two units, the SPI-attached
converters, the supported weight precisions) but no sizes, word widths, layer counts,
timing or trained weights. Every such number here is this design's own choice. The
section *Where this design departs from its source* lists them. Read the design as a
faithful rendering of the structure, not as a copy of a chip that was measured.

## 1. The neuron datapath

All arithmetic lives in three small modules. The layers drive them once per synapse
and once per neuron.

| Stage | Module | What it does |
|---|---|---|
| MUL | `syn_mul` | `product = act × w_eff`. `act` is the input spike (0/1). `w_eff` is the 8-bit stored weight at the selected precision. |
| ACCU | `accu` | Loads the neuron's 16-bit bias, then adds one product per clock. The 24-bit sum saturates instead of wrapping. |
| THRES | `lif_thres` | One LIF update per neuron per time step (below). |

**Weight precision** (`prec`, type `snn_pkg::prec_e`) applies to the stored 8-bit weight:

| `prec` | effective weight |
|---|---|
| `PREC_BIN` | +1 if the weight is ≥ 0, −1 if it is negative |
| `PREC_INT2` | bits [1:0], signed (−2..1) |
| `PREC_INT4` | bits [3:0], signed (−8..7) |
| `PREC_INT8` | the whole weight (−128..127) |

A weight memory therefore holds one 8-bit word per synapse, whatever the precision.
A lower precision uses the low bits of that word.

**LIF update** (`lif_thres`, combinational). It takes the stored potential `v`, the
refractory counter `r` and this step's summed input `I`. The parameters are in
`snn_pkg::lif_params_t`: `v_th`, `v_rest`, `leak_shift` and `t_ref`.

```
if r > 0:            v' = v_rest, r' = r - 1, no spike        (input ignored)
else:
  u = v - ((v - v_rest) >>> leak_shift) + I                   (leak_shift = 0: no leak)
  u = saturate to 16 bits
  if u >= v_th:      spike, v' = v_rest, r' = t_ref
  else:              v' = u, r' = 0
```

The leak pulls the potential a fixed fraction of the way back to rest each step. A
neuron that fires is reset to rest. It then ignores its input for `t_ref` steps. The
same `v_rest` serves as both rest level and reset level.

## 2. Turning pixels into spikes

`spike_encoder` is combinational. At time step `t` of `T` (default T = 8) it decides
whether an 8-bit value `x` fires:

* **rate code**: it fires when `floor((t+1)·x/256) > floor(t·x/256)`. Over T steps the
  value gives `floor(T·x/256)` evenly spaced spikes.
* **latency code**: it fires exactly once, at step `floor((255−x)·T/256)`. Bright pixels
  fire early. A value of 0 never fires.

The encoder reads the pixel buffer each time a layer asks for an input spike. The
spike trains are never stored.

## 3. The convolutional LIF layer: one neuron unit, time-multiplexed

`conv_lif_layer` is where nearly all the time goes, so its schedule matters.

The layer has `OUT_C` output channels over an `IN_C × IN_H × IN_W` input. It uses
K×K kernels, stride 1 and no padding, so OH = IN_H−K+1 and OW = IN_W−K+1. One
`start` runs **one time step** for all `OUT_C·OH·OW` neurons. There is **one** MUL/ACCU
pair, and the neurons are visited in the order channel, row, column:

```
for each neuron n = (oc, oy, ox):
    1 cycle      ACCU <= bias[oc]
    IN_C*K*K     ACCU += w_eff[oc][ic][ky][kx] * spike(ic, oy+ky, ox+kx)   (one per clock)
    1 cycle      LIF update of n from its stored (v, r); write back; emit out_spike
```

A step therefore takes `OUT_C·OH·OW·(IN_C·K·K + 2) + 1` cycles, from `start` to the
`done` pulse.

* **Input fetch.** The layer puts the flat index `ic·IN_H·IN_W + y·IN_W + x` on
  `in_addr` and expects `in_spike` back in the same cycle. The parent core builds
  that spike from its pixel buffer and the encoder, or from the stored spike map.
* **Neuron state.** The potential (16 bits) and refractory counter (4 bits) of every
  neuron stay in two internal arrays between steps. With `t_first = 1` the stored
  state is ignored and every neuron starts from `v_rest` with a zero counter. This is
  how a new image clears the layer, without a separate clearing pass.
* **Output.** Each neuron's result appears for one cycle on `out_we`, `out_addr` (flat
  `oc·OH·OW + oy·OW + ox`), `out_ch` and `out_spike`.
* **Weights** are stored at flat index `oc·IN_C·K·K + ic·K·K + ky·K + kx`. Weights and
  biases are written through `w_*` and `b_*` while the layer is idle.

`linear_layer` uses the same scheme for a fully connected layer. For each output
`o` it loads `bias[o]`, adds `w_eff[o][i]·spike[i]` over all `N_IN` inputs, and adds the
sum to a running 32-bit score. With `t_first` the score restarts. A step takes
`N_OUT·(N_IN+2) + 1` cycles.

## 4. The two units

**BCU** (`bcu_core`) contains:

* a one-channel 32×32 pixel buffer;
* the spike encoder;
* a convolutional LIF layer with **two** output channels.

For every spike of channel c it adds one to `spike_cnt[c]`, over all 8 steps. The
class is the channel with more spikes (ties go to class 0). So channel 0 votes
"no tumour" and channel 1 votes "tumour". The BCU has no layer after the LIF neurons.

**FCU** (`fcu_core`) contains:

* a 3×32×32 pixel buffer;
* the spike encoder;
* a first convolutional LIF layer with 4 output channels, writing a 4×30×30 =
  3600-bit spike map;
* a second convolutional LIF layer, 4 → 4 channels, reading that map and writing a
  4×28×28 = 3136-bit spike map;
* a linear layer with 3136 inputs and 10 outputs.

Each time step runs the first convolution, then the second, then the linear layer on
the second layer's spike map of that step. Each layer has its own MAC and its own
neuron state, and they take turns. The second layer reads the first layer's map through
the same `in_addr`/`in_spike` port that the first layer uses for encoded pixels.
The ten class scores are the linear outputs summed over all steps, and the largest
score wins.

Inference time at the default sizes, from `start` to `done`:

| unit | formula | default |
|---|---|---|
| BCU | `T·(C·OH·OW·(K²+2) + 2) + 2` | 158,418 cycles |
| FCU | `T·(C·OH·OW·(IMG_C·K²+2) + C2·OH2·OW2·(C·K²+2) + N_CLASSES·(C2·OH2·OW2+2) + 6) + 2` | 2,039,634 cycles |

Here OH2 = OH−K+1 and OW2 = OW−K+1. At an assumed 100 MHz clock this is 1.6 ms for
the BCU and 20.4 ms for the FCU. That is the same order as the 12 ms and 15 ms FPGA
latencies quoted for the original. No clock frequency was published, so the
comparison is only indicative.

## 5. Converters and SPI

`spi_master` drives SPI mode 0: the clock idles low, data is sampled on the rising
edge and changed on the falling edge. Bits go MSB first, with one 16-bit frame per
chip-select pulse. `sclk` is the system clock divided by `2·CLK_DIV` (default ÷8). A
frame takes `2·CLK_DIV·16 + 1` cycles.

* **ADC side** (`adc_reader`). One frame is sent per sample, with `ADC_CMD` (default
  0) on MOSI. Bits [11:0] of the returned word are taken as a 12-bit conversion
  result, and bits [11:4] become one 8-bit pixel. Samples fill the pixel buffer from
  address 0, in the buffer's flat order. Acquiring n samples takes
  `n·(2·CLK_DIV·16 + 3) + 1` cycles. That is 134 k cycles for a BCU image and 402 k
  for an FCU image.
* **DAC side** (in `neuro_top`). After each inference one frame
  `{DAC_CMD[3:0], class[11:0]}` is sent.

The frame formats, resolution and SPI mode are placeholders. Adapt `ADC_CMD`,
`ADC_BITS`, `DAC_CMD` and the bit selection in `adc_reader` to the converters
actually fitted.

## 6. Top level: `neuro_top`

```
            cfg bus ──────────────┬──────────────┬─────────────┐
                                  v              v             v
 ADC ──SPI──> adc_reader ──> [ BCU pixels ]  [ FCU pixels ]  weights/biases
                              bcu_core         fcu_core
                                  └──── class ───┘
                                          v
                                  spi_master ──SPI──> DAC
```

An inference runs as follows:

1. Set `unit` (`UNIT_BCU` or `UNIT_FCU`), `use_adc`, `prec`, `code` and `prm`.
2. Pulse `start`.
3. If `use_adc` is 1, the image is read from the ADC first. Otherwise the image already
   written over the configuration bus is used.
4. The selected core runs its 8 time steps.
5. The class goes to the DAC.
6. `done` pulses, with `class_out` valid. `bcu_spike_cnt` and `fcu_scores` show the
   evidence behind the decision.

**Configuration bus.** Writes are allowed only while `busy` is low; an assertion
checks this. `cfg_sel` selects the target, `cfg_addr` is the flat index inside it, and
`cfg_data` carries the value:

| `cfg_sel` | target | entries | data |
|---|---|---|---|
| `CFG_BCU_PIX` (0) | BCU pixel | 1024 | [7:0] |
| `CFG_BCU_CONV_W` (1) | BCU kernel weight | 2·9 = 18 | [7:0] signed |
| `CFG_BCU_CONV_B` (2) | BCU channel bias | 2 | [15:0] signed |
| `CFG_FCU_PIX` (3) | FCU pixel, `c·1024 + y·32 + x` | 3072 | [7:0] |
| `CFG_FCU_CONV_W` (4) | FCU kernel weight: layer 1 at 0..107, layer 2 at 108..251 | 108 + 144 | [7:0] signed |
| `CFG_FCU_CONV_B` (5) | FCU channel bias: layer 1 at 0..3, layer 2 at 4..7 | 4 + 4 | [15:0] signed |
| `CFG_FCU_LIN_W` (6) | FCU linear weight, `class·3136 + i` | 31,360 | [7:0] signed |
| `CFG_FCU_LIN_B` (7) | FCU class bias | 10 | [15:0] signed |

The chip does no training. Weights come from a network trained offline and quantised
to 8-bit integers, to match the precision in use.

Reset is active-low and asynchronous for control state. Memories are not reset: a
new inference clears the neuron state through `t_first`, and weights must be loaded
before use.

## 7. Parameters and their origin

| parameter (top) | default | origin |
|---|---|---|
| `FCU_IMG`, `FCU_IMG_C`, `N_CLASSES` | 32, 3, 10 | CIFAR-10 format |
| `BCU_IMG` | 32 | own choice (MRI images are "resized to uniform dimensions", size unstated) |
| `BCU_C` | 2 | two classes (tumour / no tumour) |
| `FCU_C`, `FCU_C2`, `K` | 4, 4, 3 | own choice |
| `T_STEPS` | 8 | own choice |
| widths: weight, bias, membrane, accumulator, score | 8, 16, 16, 24, 32 | own choice |
| `ADC_BITS`, `SPI_W`, `SPI_DIV` | 12, 16, 4 | own choice |

Storage at the defaults is about 44 kbit for the BCU and 419 kbit for the FCU. Of the
FCU's share, 251 kbit are linear weights and 135 kbit are the neuron state of its two
convolution layers. Each layer has one MAC.

## 8. Where this design departs from its source

* **Sizes.** No network dimensions were published. Channel counts, kernel size,
  image size for MRI, time-step count and all word widths are chosen here. The
  published resource use (about 150 k LUTs, 11 MB of memory and 500 DSP slices per
  unit on a Zynq UltraScale+) points to much larger and far more parallel networks
  than this design, which has one MAC per layer.
* **Layer count.** The FCU is described with convolutional layers in the plural and
  the BCU with a single one. No count is given. The FCU here has two, the smallest
  plural, and the BCU one.
* **BCU readout.** The BCU is described as convolution + LIF only. The spike-count
  vote between two channels is this design's way of getting a class out of it.
* **FCU readout.** Summing the linear layer's output over time steps is chosen here.
* **Output encoding stage.** The source's neuron chain ends with an optional encoding
  stage, for neurons whose output is a spike train rather than a spike. These
  neurons emit single spikes, so the encoder is used only at the input.
* **Not built.** The analog front end (electrodes, amplifier), the converters
  themselves, the recording unit's DSP and transmitter, and protective circuitry.
  The source gives none of them a digital function. Training, and the GPU versions
  of the networks, are outside the chip.
* **Weight formats.** The source allows integer, fixed-point and floating-point
  weights. Only integer weights are built, at the four precisions of section 1. A
  fixed-point weight can be used as an integer with a matching scale on `v_th`.
* **Where the blocks sit.** The source draws the chain sensor → readout →
  preprocessor → decoder. Here the decoder is the SNN datapath (MUL, ACCU, THRES,
  encoder) and its two units. The preprocessor stage, drawn as the LIF neuron
  model, is folded into `lif_thres`. The readout is reduced to its digital end,
  `adc_reader`.
* **GPU versions.** The networks were first run and trained on GPUs. Here only
  inference is in hardware, and weights come in over the configuration bus.
* **FCU "arithmetic logic operations".** The FCU is introduced as a unit for
  arithmetic logic operations, but the only function described for it is the
  CIFAR-10 classifier. No ALU instruction set is built.

## 9. Simulating

Every module has a self-checking testbench in `tb/`. Each prints one line,
`TB_RESULT checks=N failures=M`. The testbenches compare against an independent
integer model in `tb/snn_ref_pkg.sv`, which implements the formulas above. The
converters are modelled by `tb/spi_slave_model.sv`, a behavioural SPI slave. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_neuro_top.sv --top-module tb_neuro_top
./obj_dir/Vtb_neuro_top
```

`tb_neuro_top` runs the whole chip at its default sizes. It runs four inferences:

* BCU with the image from the ADC;
* BCU with the image from the bus, in latency code;
* FCU with the image from the bus;
* FCU with the image from the ADC.

Together they cover all four precisions and both spike codes. The testbench checks
class, counts or scores, and the DAC frame. It fails if any mechanism never occurred:
ADC path, bus path, either unit, either code, any precision, a firing, a refractory
hold, the leak, or a DAC frame. It takes about 3.1 M cycles, a few seconds of
simulation in Verilator.

Two workload testbenches run the units at their default sizes on synthetic data,
with weights set by hand:

* `tb_bcu_workload` shows the BCU as a lesion detector. The inputs are MRI-like
  slices of random tissue texture, half of them with a bright disc. Lesion windows
  spike in consecutive time steps under rate code, and tissue windows never do. All
  16 slices are classified correctly, at INT8 and at binary precision.
* `tb_fcu_workload` shows the FCU separating ten classes. Each class is a bright bar
  at its own row band and colour channel. The second convolution layer passes the
  first layer's map on, and the linear weights are templates of the bars. All ten
  images are classified correctly.

These are demonstrations of the mechanism, not accuracy figures for real MRI or
CIFAR-10 data. Real use needs weights trained offline for this network shape.

The unit testbenches use small layers so that every neuron can be checked:
`tb_syn_mul`, `tb_accu`, `tb_lif_thres`, `tb_spike_encoder`, `tb_conv_lif_layer`,
`tb_linear_layer`, `tb_bcu_core`, `tb_fcu_core`, `tb_spi_master` and `tb_adc_reader`.
They also check the cycle-count formulas given above.

## 10. Files

| file | content |
|---|---|
| `rtl/snn_pkg.sv` | widths, `prec_e`, `code_e`, `lif_params_t`, `cfg_sel_e`, `unit_e` |
| `rtl/syn_mul.sv`, `rtl/accu.sv`, `rtl/lif_thres.sv` | MUL, ACCU, THRES |
| `rtl/spike_encoder.sv` | rate / latency encoder |
| `rtl/conv_lif_layer.sv`, `rtl/linear_layer.sv`, `rtl/argmax.sv` | layers and class decision |
| `rtl/bcu_core.sv`, `rtl/fcu_core.sv` | the two units |
| `rtl/spi_master.sv`, `rtl/adc_reader.sv` | converter interface |
| `rtl/neuro_top.sv` | top level |
| `tb/snn_ref_pkg.sv` | integer reference model of both units |
| `tb/spi_slave_model.sv` | behavioural ADC / DAC on SPI |
| `tb/tb_neuro_top.sv` | whole chip at default sizes |
| `tb/tb_bcu_workload.sv`, `tb/tb_fcu_workload.sv` | synthetic classification workloads |
| `tb/tb_<module>.sv` | unit testbench of each module |
