# LWDD: a fixed-point CNN digit recogniser for a camera video stream

This RTL recognises a handwritten digit in every frame a small camera
delivers. The frame is reduced to a 28x28 grey image, and a small CNN
classifies it. The network is LWDD ("low weight digit detector"): six 3x3
convolutions, two max-pools, a global max-pool and a 16->11 dense layer,
with about 4.7 thousand weights. It gives one of ten digits or "no digit".

The design rests on two ideas:

* **Fixed-point arithmetic with one rounding per output.** Every weight and
  every activation is a 12-bit two's-complement fraction in [-1, 1). Each
  layer was scaled in advance so that its values stay in that range. A
  convolution adds all its products (over 3x3 taps and over every input
  channel) at full precision in a 32-bit accumulator. It rounds once, at the
  end. With this scheme 12 bits give the same class as floating point on
  every test image. Rounding each product instead would need 17 bits.
* **One 3x3 multiply-add block, reused for everything.** A single
  "convolution block" holds 9 multipliers and an adder tree. It serves all
  six convolution layers and also the dense layer, which is cut into blocks
  of 9 inputs. Data comes from on-chip RAM one value per clock. A shift
  window means each step of the 3x3 window fetches only the 3 new pixels.

One inference takes 247,581 clocks. At 40 MHz that is about 6 ms, so the
network keeps up with the camera's frame rate with a wide margin.

## Block map

```
 cam_pclk domain                    | clk domain
 camera_capture -> async_fifo ------+-> image_converter -> nn_core
  (RGB565 bytes)   (Gray pointers)  |   (crop, grey, 8x8)   |
                                                           +-- nn_database   image / weights / FM0 / FM1
                                                           +-- ram_controller -> ram_module (9 weights per word)
                                                           +-- nn_control    (layer table, phases)
                                                           +-- conv_layer  -- border_control, shift_window
                                                           +-- maxpool_layer
                                                           +-- dense_layer
                                                           +-- conv_block    (shared 9-tap MAC)
                                                           +-- result_module (argmax)

 disp_* bytes -> display_spi -> tft_cs / tft_dc / tft_sck / tft_sdi   (clk domain)
```

`lwdd_system` is the top. `nn_core` is the network accelerator on its own;
it can be used without the camera path. `lwdd_pkg` holds the number format,
the layer table and the rounding function.

## Number format and rounding (`lwdd_pkg`)

| Item | Value |
|---|---|
| Data and weight width `DW` | 12 bits, signed |
| Fraction bits `FRAC` | `DW-1` = 11, so the value is `x / 2048` |
| Accumulator `ACCW` | `2*DW+8` = 32 bits |
| Products | 24 bits with 22 fraction bits |
| Pixel input | 8-bit grey `p` becomes `p/256` (`p << 3`) |

`round_sat` turns an accumulator back into a data word:

1. Add `2^(FRAC-1)` and shift right by `FRAC`. This is round half up.
2. Clamp to [-2048, 2047]. Any clamp raises the `ovf_evt` output.
3. Apply ReLU if the layer uses it. The dense layer does not.

The clamp replaces an overflowed value with the largest value the layer can
hold. The layer scaling makes this rare, but random test weights trigger it
often, and the testbenches check that path.

The weights are not part of the RTL. They are written into the weight store
through a load port before the first frame. The accuracy therefore depends
on a weight set trained and scaled for this format. The layout is:

* conv layers: weight `(oc, ic, ky, kx)` at `wbase + ((oc*IC + ic)*3 + ky)*3 + kx`;
* dense layer: weight `(o, i)` at `wbase + o*16 + i`.

The `wbase` values of the layers are 0, 36, 180, 468, 1044, 2196 and 4500,
for 4676 weights in total.

## The layer schedule

`nn_control` steps through the table `layer_cfg` in `lwdd_pkg`. The table
has nine entries. Before each conv or dense layer, the RAM controller copies
that layer's weights into `ram_module`. Feature maps move back and forth
between two banks, FM0 and FM1. Each layer reads one bank and writes the
other.

| # | Layer | Map in | Map out | Notes |
|---|---|---|---|---|
| 0 | conv1 | 28x28x1 | 28x28x4 | ReLU |
| 1 | conv2 | 28x28x4 | 28x28x4 | ReLU |
| 2 | pool1 | 28x28x4 | 14x14x4 | 2x2 max |
| 3 | conv3 | 14x14x4 | 14x14x8 | ReLU |
| 4 | conv4 | 14x14x8 | 14x14x8 | ReLU |
| 5 | pool2 | 14x14x8 | 7x7x8 | 2x2 max |
| 6 | conv5 | 7x7x8 | 7x7x16 | ReLU |
| 7 | conv6 + global max | 7x7x16 | 16 | ReLU; only each channel's maximum is written |
| 8 | dense | 16 | 11 | no ReLU; then argmax |

There are no bias terms and no explicit zero-padding layers. Softmax is not
computed: the largest of the 11 dense outputs is taken as the class, and
index 10 means "no digit". The map layout is `ch*size*size + y*size + x`.

### Clock budget

Each row below counts clocks per stage. The paper's numbers come from its
reference FPGA build.

| Stage | This RTL | Formula | Reference build |
|---|---|---|---|
| Image load | 1,568 | 784 x 2 | 1,570 |
| Weights conv1 | 72 | 36 x 2 | 76 |
| conv1 | 12,995 | OC·IC·S·(S+1)·4 + 3 | 12,605 |
| Weights conv2 | 288 | | 291 |
| conv2 | 51,971 | | 50,416 |
| pool1 | 3,139 | ch·(S/2)²·4 + 3 | 3,164 |
| Weights conv3 | 576 | | 580 |
| conv3 | 26,883 | | 25,569 |
| Weights conv4 | 1,152 | | 1,155 |
| conv4 | 53,763 | | 51,136 |
| pool2 | 1,571 | | 1,623 |
| Weights conv5 | 2,304 | | 2,309 |
| conv5 | 28,675 | | 27,009 |
| Weights conv6 | 4,608 | | 4,611 |
| conv6 + global max | 57,347 | | 54,016 |
| Weights dense | 396 | 11 x 2 blocks x 9 x 2 | 356 |
| dense | 224 | out·blocks·10 + 4 | 244 |
| argmax | 13 | | 16 |
| Stage hand-over | 36 (2 per stage) | | |
| **Total** | **247,581** | | **236,746** |

The total counts from the clock edge that samples `start` to the edge that
raises `done`. It is 4.6 % above the reference build. Nearly all of the gap
is in the convolutions: each image row here costs `size+1` window steps,
because the first step only preloads column 0. The reference build seems to
spend close to `size` steps per row.

## Convolution layer (`conv_layer`, `shift_window`, `border_control`, `conv_block`)

This is the hardest part of the design. The loop order, from outermost to
innermost, is:

```
for oc in 0..OC-1:
  for ic in 0..IC-1:
    for y in 0..S-1:
      for step in 0..S:            # step 0 preloads column 0
        read 3 pixels (x+1, y-1..y+1), one per clock, through border_control
        shift them into shift_window
        if step > 0: conv_block computes window · weights(oc, ic)  -> P1
                     the next clock adds it into psum[y][x]            -> P2
```

* **Window step.** Each step takes 4 clocks: three reads from the shared
  database port, plus one clock to shift the window. The shift window keeps
  the two older columns, so only 3 of the 9 pixels are fetched.
* **Border control.** `border_control` decides for each of the 3 reads
  whether it falls outside the map. If it does, the read is skipped and a
  zero is shifted in (`edge_evt` pulses). It also forms the linear address.
  This replaces the zero padding that a software framework would add.
* **Partial sums.** A 784 x 32-bit partial-sum memory holds the sums for
  one output channel across all of its input channels. For `ic = 0` the old
  contents are ignored and the sum starts from zero, so no clearing pass is
  needed.
* **Rounding and output.** On the last input channel, the sum goes through
  `round_sat` and ReLU and is written to the output bank.
* **Global max pooling (conv6).** No map is written. A running maximum is
  kept per output channel, and only that maximum is stored. This is how the
  global max-pool layer disappears.
* **Weights.** The 9 weights of `(oc, ic)` are one 108-bit word of
  `ram_module`, read once per input channel. `conv_block` registers its sum,
  so the accumulate happens one clock after the window is complete.

## Pooling, dense and result

* **`maxpool_layer`** reads the four inputs of each 2x2 window in four
  clocks. It keeps a running maximum and writes one output.
* **`dense_layer`** treats each output neuron as `ceil(16/9) = 2` blocks of 9
  inputs. For each block it loads 9 inputs, lets `conv_block` multiply them
  with one 9-weight word, and accumulates. Each block takes 10 clocks. The
  RAM controller zero-pads the last block.
* **`result_module`** reads the 11 scores and keeps the first largest one.
  On a tie, the lowest index wins.

## Weight loading (`ram_controller`, `ram_module`, `nn_database`)

`nn_database` holds four regions behind one read port with a 1-clock read
latency:

* the 8-bit 28x28 input image;
* the 4676 x 12-bit weight store;
* the feature-map banks FM0 and FM1, 3136 words each.

The RAM controller spends 2 clocks per value: it issues the address, then
takes the data. It packs nine consecutive weights into one `ram_module`
word. It also copies the image into FM0, scaled to the data format.
`ram_module` has 256 words of 9 x 12 bits, enough for the largest layer
(conv6, 16 x 16 kernels).

## Camera front end (`camera_capture`, `async_fifo`, `image_converter`)

* **`camera_capture`** runs on the camera's pixel clock. It assembles two
  bytes into an RGB565 pixel:
  * first byte = `R4..R0 G5..G3`;
  * second byte = `G2..G0 B4..B0`.

  Bytes are sampled on the rising edge while HREF is high. VSYNC high
  separates frames. The first pixel after VSYNC is flagged.
* **`async_fifo`** (512 x 17 bits) takes the pixel and its first-of-frame
  flag into the system clock domain. It uses Gray-coded pointers and
  two-flop synchronisers, and has first-word fall-through reads. A write
  while full is dropped and raises `ovf`.
* **`image_converter`** crops the centre 224x224 of the 320x240 frame. The
  crop covers columns 48..271 and rows 8..231. For each pixel it:
  1. widens the channels to 8 bits (R<<3, G<<2, B<<3);
  2. forms grey as `(8G + 5R + 3B) / 16`;
  3. adds the grey value into one of 28 column accumulators.

  After every 8th row, each accumulator gives one output pixel: `sum >> 6`,
  the truncated mean of an 8x8 block. No frame buffer is needed.
* **`lwdd_system`** starts the network when a converted image is complete
  and the network is idle. Otherwise it skips the frame and counts it in
  `frames_dropped`. The network copies its image within its first 1,570
  clocks. The next frame's first output pixel arrives several camera rows
  later, so one image buffer is enough. An assertion checks this.

## Display writer (`display_spi`)

The TFT display takes commands and pixel data over a 4-wire serial bus:

* `tft_cs` is the chip select, active low;
* `tft_dc` says command (0) or data/parameter (1);
* `tft_sck` is the serial clock;
* `tft_sdi` is the serial data.

`display_spi` takes one byte at a time over a valid/ready handshake. It
shifts the byte out MSB first. The display samples each bit on the rising
edge of `tft_sck`, and takes D/C together with the last bit. A byte lasts
`16*SPI_HALF` system clocks. A byte offered before the current one ends
follows it with no gap, and chip select stays low. After the last byte,
chip select rises and the clock rests low. In the top, the bytes come in on
the `disp_*` ports. This is where a frame store and a screen controller
would feed the camera picture and the result.

## Departures from the reference design

* **Missing parts.** There is no SDRAM frame store (double-buffered, written
  in bursts) and no camera register set-up. The converter takes pixels
  straight from the camera FIFO. The display writer is driven from top-level
  ports, not from a stored frame. The camera's SIOC/SIOD pins are not
  driven.
* **Single convolution block.** Variants with 2 or 4 parallel convolution
  blocks are not built.
* **Word width.** The data and weight width is 12 bits, the width that
  gives zero mismatches. One storage diagram in the source shows 11-bit
  fields (99-bit words). `DW` in `lwdd_pkg` changes it, and every width
  follows from it.
* **Weight port.** Weights are loaded through a port, not built in as
  constants.
* **Author choices.** The following were not specified and were chosen
  here:
  * round half up;
  * the weight and map layouts;
  * the class index of "no digit";
  * the tie rule;
  * the FIFO depth;
  * the display byte handshake and the SCL rate;
  * the camera strobe levels;
  * the channel widening in the converter.
* **Clock count.** The count is 4.6 % higher than the reference build (see
  the clock budget).

## Simulation

Each block has a self-checking testbench in `tb/`. It ends by printing
`TB_RESULT checks=N failures=M`. `tb/lwdd_ref.svh` is a plain behavioural
model of the fixed-point network. The `nn_core` and `lwdd_system`
testbenches compare against it bit for bit. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -I. -Wno-fatal \
  rtl/lwdd_pkg.sv rtl/*.sv tb/tb_lwdd_system.sv --top-module tb_lwdd_system
./obj_dir/Vtb_lwdd_system
```

The testbenches include `tb/lwdd_ref.svh` by that path, so run from the
directory that holds `rtl/` and `tb/`. The main testbenches are:

* **`tb_lwdd_system`** runs the whole design at its default sizes. It sends
  four 320x240 camera frames with random weights. Two frames are classified
  and two are skipped because the network is busy. It checks:
  * the logits and classes against the model;
  * 247,581 clocks per inference;
  * the number of pixels the crop discards;
  * that the FIFO does not overflow;
  * the bytes a display model receives over SPI.

  It also requires that saturation and border padding each occurred. It
  runs in about a second.
* **`tb_nn_core`** runs four inferences on the accelerator alone. The
  last one uses 11-bit weights, which the 12-bit format holds exactly.

The other testbenches each exercise one block against values computed
inside the testbench.
