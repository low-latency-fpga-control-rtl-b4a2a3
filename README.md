# Real-time qubit-state detection from EMCCD images on an FPGA

A trapped-ion quantum computer reads out its qubits by imaging the ions' fluorescence. A bright
ion is in one state and a dark ion in the other. The experiment controller needs that answer as
fast as possible, often in the middle of a sequence. Shipping every camera frame to a PC and
classifying it there costs hundreds of microseconds to milliseconds.

This design does the whole detection inside the FPGA that receives the camera's Cameralink
stream. Pixels are classified while they arrive. One clock cycle after the image is complete, a
neural network starts on it. The label (one bit per ion) goes to the controller on a plain
valid/data port with no handshake.

Two classifiers are provided, and the input `dnn_sel` picks which one drives the result port:

* **LUT-MLP**: a five-layer network whose neurons are nothing but truth tables. It gives a
  result 5 clock cycles (20 ns at 250 MHz) after the image is complete, and can take a new image
  every cycle.
* **Vision Transformer (ViT)**: a small one-layer transformer (8 heads, latent size 16) on 6x6
  patches. It runs on a shared multiply-accumulate array in 9389 cycles (37.6 us at 250 MHz)
  for the default three-ion 12x24 image.

Both follow a published design for 171Yb+ ion readout. That design builds one classifier at a
time with vendor IP and high-level synthesis. The RTL here is an independent, hand-written
implementation of the same structure. The places where it departs from the published design are
listed near the end.

## Signal chain

```
 camera clock domain (~17 MHz)           |  processing clock domain (250 MHz)
                                         |
 FVAL/LVAL/DVAL/DATA --> cl_deserializer ==async FIFO==> axis_broadcaster --+--> ddr_axis_*  (image archive)
                          |  tx_done                                       |
                          |  overflow                                      +--> windower --> img[288], img_valid
                                                                                         |
                                                                         +---------------+--------------+
                                                                         v                              v
                                                                      lut_mlp (5 cycles)         vit_core (9389 cycles)
                                                                         +------------ dnn_sel ---------+
                                                                                         v
                                                                                  result_output --> dnn_valid, dnn_data
```

`qubit_detector_top` wires the chain together. Three outputs copy its key events so that the
trigger-to-result delay can be measured with an oscilloscope:
- `probe_fval`: start of the frame;
- `probe_tx_done`: the last pixel has been received;
- `probe_dnn_valid`: the result is ready.

The LVDS receivers of the Cameralink link, the DDR memory controller, PCIe and the
configuration flash are outside this RTL. The decoded Cameralink signals come in as ports. The
image copy for DDR leaves as an AXI-Stream port (`ddr_axis_*`) for a memory writer.

Default sizes are those of the three-qubit case:
- 12 x 24 pixels of 16 bits;
- 8 labels (3 bits);
- MLP layers of 256, 100, 100, 100 and 10 neurons with inputs of β = 2 bits and F = 4;
- polynomial degree 2 and A = 2 sub-neurons per neuron;
- ViT with L = 1, H = 8, D = 16, P = 6.

The one-qubit case is 10 x 10 pixels, P = 5 and 2 labels. All of these are parameters of the
top.

## Receiving the camera stream (`cl_deserializer`, `async_fifo`)

The camera is the master. It frames an image with FVAL, each line with LVAL, and marks valid
pixel words with DVAL.

**Framing.** The receiver arms itself on the rising edge of FVAL. From the next camera cycle on,
it accepts a pixel when all of the following hold:
- FVAL, LVAL and DVAL are all high;
- the current line still has fewer than `IMG_W` pixels;
- fewer than `IMG_H` lines have been completed.

A falling LVAL ends a line. Extra words on a line and extra lines are dropped. Dropping them
matters because real EMCCD cameras send long dummy stretches around the useful pixels of each
line.

**Completion.** When pixel `IMG_H*IMG_W` is written, `tx_done` goes high for one camera clock,
in the cycle after that pixel was on the bus. The same pixel carries the end-of-frame flag
(`tlast`), and the first pixel carries the start-of-frame flag (`tuser`). A frame that FVAL
cuts short gives neither `tx_done` nor `tlast`.

**Clock crossing.** Pixels cross into the 250 MHz domain through a 16-entry dual-clock FIFO.
- It uses Gray-coded pointers with two-flop synchronisers.
- Its read side shows data ahead of the read, so it works directly as an AXI-Stream master.
- The pixel clock is about 15 times slower than the processing clock. So the FIFO only fills
  when the downstream side (the DDR writer) refuses data for a long time.
- If a pixel arrives while the FIFO is full, it is lost and the sticky `overflow` flag is set.

## Two copies of the stream (`axis_broadcaster`)

Every pixel goes to both the DDR port and the windower.

The broadcaster keeps a small mask of which outputs have already accepted the current beat. An
output that has taken the beat sees `tvalid` low until the source moves on, so it never sees a
beat twice. The source gets `tready` once every output has either taken the beat or is taking it
now.

There is no buffering, so the slower sink sets the pace. The windower is always ready, so in
practice only the DDR side can stall the chain. An assertion checks the AXI rule that a stalled
beat is held stable.

## Assembling the image (`windower`)

The windower is a 288-entry shift register. Each accepted pixel enters at the end.
- It counts pixels from the beat that carries `tuser`.
- When the 288th pixel of a frame arrives, `img_valid` pulses in the next cycle. At that moment
  `img[0..287]` holds the image in row-major order.
- A `tlast` at any other count raises `frame_err`.

This is why the network can start one cycle after the last pixel: it never waits for a copy. The
classifiers read `img[]` combinationally (MLP) or copy it on start (ViT).

## The LUT-MLP (`lut_mlp`, `lut_neuron`)

### Neurons as tables

A neuron with F inputs of β bits has only 2^(βF) possible input combinations. So whatever the
neuron computes, its function can be stored as a truth table, and the FPGA's LUTs can implement
it directly with no arithmetic. With β = 2 and F = 4, that is 256 entries.

What limits accuracy is the small fan-in. Each neuron here therefore has **A = 2 sub-neurons**,
each reading its own F = 4 inputs, so the neuron sees 8 inputs in total. The scheme works in
three steps:

1. Each sub-neuron evaluates a degree-2 polynomial of its four inputs. There are 15 monomials:
   1, x_i, and x_i·x_j for i ≤ j.
2. It quantises the result to a signed 3-bit code: arithmetic shift right by `SUB_SHIFT`, then
   clamp to -4..3.
3. A second table adds the two codes and the neuron's bias, then clamps the sum to 0..3. This
   is a quantised ReLU with β = 2 output bits.

The cost per neuron is two 256-entry tables of 3-bit words plus one 64-entry table of 2-bit
words. A single table over all 8 inputs would need 65,536 entries.

### Building the tables

The tables are built while the design is elaborated. In `lut_neuron`, constant functions step
through every input code, evaluate the polynomial and write the packed `localparam` tables.
After that the module is just two levels of indexing.

To use a trained network, only the parameter functions in `qd_pkg` change:
- `mlp_weight` (polynomial coefficients);
- `mlp_bias`;
- `mlp_conn` (which previous-layer node feeds which input).

### Network

The network has three stages:

1. **Input quantiser.** Each pixel becomes a 2-bit code:
   `clamp((pixel − IN_OFFSET) >> IN_SHIFT, 0, 3)`, with defaults 48 and 4.
2. **Layers.** Five layers of 256, 100, 100, 100 and 10 neurons. Each neuron's 8 inputs come from
   a fixed sparse connection map into the previous layer. The first layer reads from all 288
   pixel codes.
3. **Label.** The argmax over the first 8 outputs of the last layer, with the lowest index winning
   a tie.

Every layer has one register stage behind it, which gives the 5-cycle latency. The label is
registered together with the last layer.

### Timing

`in_valid` in cycle t gives `out_valid`, `out_class` and `out_act` in cycle t + 5. A new image
is accepted every cycle.

## The Vision Transformer engine (`vit_core`)

### Model

With N = HW/P² patches and T = N + 1 tokens:

```
z0      = [x_class ; x_p^1 E ; ... ; x_p^N E] + E_pos              (patch embedding, class token)
head h  : Q = z W_Q,h   K = z W_K,h   V = z W_V,h
          A_h = softmax(Q K^T / sqrt(D)) V
z1      = W_O [A_1 ... A_H] + b_O + z                              (attention + first shortcut)
z       = ReLU(W_1 BN(z1) + b_1) + z1                              (second shortcut)
y       = W_out BN_f(z[class token]) + b_out,   label = argmax y
```

It uses ReLU rather than SiLU, and batch norm (folded to `x*scale + shift`) rather than layer
norm, because both are cheap in hardware.

### Fixed point

All tensors are 16-bit Q8.8.
- Products of two Q8.8 values are summed exactly in 48-bit accumulators.
- Each sum is shifted right by 8 (truncation toward −∞), its bias or shortcut is added, and it is
  saturated to 16 bits once.
- Pixel counts enter as raw Q8.8 values: count 256 reads as 1.0.

### Hardware

The engine has one array of `LANES` = 16 multiply-accumulate lanes and a state machine. Every
step of the model is written as a set of dot products with a common inner index k: lane j
computes output element j, one k per clock.

| Step | Cycles |
|---|---|
| Patch embedding | P² per patch |
| Q, K, V | D per token and matrix |
| Scores of one query row | D |
| Softmax | 35 |
| Weighted sum of V | T per row |
| Head merge W_O | H·D per token |
| Batch norm | 1 per token |
| Linear layer | D per token |

Since D = 16 = `LANES`, one pass of a D-long dot product yields a whole output vector.

### Softmax

The softmax avoids exponentials and divisions per element:

1. Subtract the row maximum.
2. Compute exp(x) as 2^(x·log2 e). The fractional part comes from a 16-entry 2^(i/16) table and
   the integer part is a right shift.
3. Sum the row.
4. Compute one reciprocal 2^32/sum with a 33-cycle restoring divider.
5. Form each probability as `(e · recip) >> 24`.

The row therefore takes 1 + 33 + 1 cycles between the score and weighted-sum phases.

### Timing

With `start` high in cycle t, `out_valid` is high for one cycle in cycle t + L, where

```
L = 4 + N·P² + NL·( H·(3·T·D + T·(D + 35 + T)) + T·(H·D + 1 + D) ) + D
```

This gives:
- 12x24 image, P = 6 (N = 8, T = 9): L = 9389 cycles, 37.6 us at 250 MHz.
- 10x10 image, P = 5 (N = 4, T = 5): L = 5005 cycles, 20.0 us at 250 MHz.

The attention of each head dominates, at 7776 of the 9389 cycles. `LANES` must be at least
the largest of D, T and the number of labels. Any lanes beyond that sit idle, so the schedule
depends only on the model sizes, not on `LANES`.

The published HLS implementation needs 8797 and 4054 cycles, so this engine is 7 % and 23 %
slower. In exchange, it is a single small datapath whose cost does not grow with the number of
heads.

### Interface

- `start` copies `img[]` into the engine, so the windower may start filling with the next frame
  at once.
- A `start` while `busy` is ignored. In the top, this case is visible as `vit_skip`: that image
  gets no ViT result.

## Result port and probes (`result_output`)

The controller has no handshake.
- `dnn_data` takes the new label at the clock edge after the classifier's valid and holds it
  until the next result.
- `dnn_valid` is high for `PULSE_CYCLES` = 4 cycles (16 ns), which is long enough for a slower
  input to sample.
- A new result during a pulse restarts the pulse.

At defaults, `dnn_valid` rises 6 cycles after `img_valid` in MLP mode and 9390 cycles after it
in ViT mode.

In the top, both classifiers see every image. `dnn_sel` only chooses which valid/label pair
reaches `result_output`. Change `dnn_sel` only while the ViT is idle. Otherwise a ViT result
that was started under the other setting will appear on the port.

## Model parameters

No trained network comes with this design. `qd_pkg` derives every weight, bias, batch-norm
factor and MLP connection from a 32-bit integer hash of its tensor and index:
- ViT weights lie in ±0.25 and batch-norm scales near 1.0;
- MLP coefficients are integers in −7..7, with biases in −1..2.

They are chosen so that values stay in range and labels vary from image to image in the MLP.
With these stand-ins the ViT labels are almost constant, which is expected of untrained weights.

The labels are therefore not meaningful, but the arithmetic is. The testbenches compare every
output bit-exactly with reference models that use the same parameters. To deploy a trained
model, replace the bodies of `vit_param`, `mlp_weight`, `mlp_bias` and `mlp_conn` with tables of
trained values, quantised to the formats above. No other file changes.

## Where this implementation departs from the published design

- **Both classifiers in one top.** The published system builds one classifier at a time. Here
  both are built behind `dnn_sel`, and `vit_busy`, `vit_skip` and `frame_err` are added as status
  outputs.
- **ViT engine.** A hand-scheduled 16-lane engine takes the place of HLS pipelines with
  per-layer reuse factors. It is slower, as shown above.
- **Head merge.** The eight concatenated head outputs (128 values) are brought back to D = 16
  by a learned projection W_O with bias. The published equations leave this step implicit.
- **Fixed-point details.** Truncation, saturation, the exp2 table and reciprocal softmax, and
  reading the pixel as a Q8.8 number are choices of this implementation.
- **MLP quantisers.** The input quantiser, the sub-neuron shift-and-clamp and the adder's clamp
  are choices of this implementation. A trained network would bring its own.
- **Label width.** The MLP's last layer keeps 10 outputs, and the label is the argmax of the
  first 8.
- **Receiver FIFO.** The "double-buffered FIFO" of the receiver is one 16-entry dual-clock FIFO.
- **Receiver framing.** DVAL gating, dropping surplus pixels and lines, and the overflow flag are
  additions.
- **Result pulse.** The result pulse lasts 4 cycles, and the label is held between results.

## Simulating

Every block has a self-checking testbench. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops, and each has a watchdog. The package `qd_pkg`
must come first, and the testbenches need `tb/tb_ref_pkg.sv`, which holds loop-level reference
models of both classifiers and a synthetic ion-image generator:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/qd_pkg.sv tb/tb_ref_pkg.sv rtl/async_fifo.sv rtl/cl_deserializer.sv rtl/axis_broadcaster.sv \
  rtl/windower.sv rtl/lut_neuron.sv rtl/lut_mlp.sv rtl/vit_core.sv rtl/result_output.sv \
  rtl/qubit_detector_top.sv tb/tb_qubit_detector_top.sv --top-module tb_qubit_detector_top
./obj_dir/Vtb_qubit_detector_top
```

For a single block, list `qd_pkg`, `tb_ref_pkg`, the block's files and its testbench.

Building anything that contains `lut_mlp` takes a minute or two, because the 566 neurons'
tables are evaluated during elaboration. Simulation itself takes under a second.

| Testbench | What it covers |
|---|---|
| `tb_cl_deserializer` | Plain frames, DVAL gaps and over-long lines, a short frame (no `tx_done`, no `tlast`), a stalled sink causing overflow. Checks every pixel and that `tx_done` comes one camera cycle after the last pixel. |
| `tb_axis_broadcaster` | Random source gaps and independent random back-pressure on both outputs. Checks each beat arrives exactly once and in order, and that the masking works. |
| `tb_windower` | Complete frames with gaps, an early `tlast`, and an aborted frame followed by a new `tuser`. Checks the image and the `img_valid` timing. |
| `tb_lut_mlp` | Twelve images back to back at full size. Checks all 10 outputs and the label against the polynomial reference, and the 5-cycle latency. |
| `tb_vit_core` | Full size (12x24, P = 6) and one-qubit size (10x10, P = 5, 2 labels) side by side. Checks every logit bit-exactly, the latency formula, `busy`, an ignored second start, and that the input image may change right after start. |
| `tb_result_output` | A cycle-by-cycle model of the pulse and the held label, including restarts. |
| `tb_qubit_detector_top` | The whole design at its default parameters. See below. |

### End-to-end test

`tb_qubit_detector_top` uses a 17 MHz camera model and a DDR sink with random back-pressure. It
runs:
- MLP-mode images;
- an image with DVAL gaps;
- a short frame;
- a ViT-mode image followed by a second one while the ViT is busy;
- a switch back to MLP mode;
- a frame during which the DDR side refuses all data.

It checks:
- every DDR pixel;
- every label against the reference model of the selected classifier;
- the latency from `img_valid` to `dnn_valid`;
- the pulse width.

It also counts each mechanism (DDR stalls, DVAL gaps, short frames, ViT skips, mode switches,
overflows) and fails if any never happened.

## Changing the configuration

For the one-qubit readout, instantiate the top with:

```
qubit_detector_top #(.IMG_H(10), .IMG_W(10), .NCLS(2), .VIT_P(5)) ...
```

The MLP's first layer then connects to 100 pixel codes instead of 288. If a trained model uses
different layer widths, change `MLP_LAYER_N` (and `MLP_NUM_LAYERS`). The MLP latency is always
one cycle per layer.

`VIT_D`, `VIT_NH` and `VIT_NL` scale the transformer, and the latency formula above follows them.
`IMG_H` and `IMG_W` must be multiples of `VIT_P`. `VIT_LANES` must be at least the largest of
`VIT_D`, the token count and `NCLS`; an elaboration-time assertion checks this.
