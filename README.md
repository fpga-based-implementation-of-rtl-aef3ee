# A fully-connected DNN with all weights in on-chip memory

A feed-forward network for handwritten digits has layers of 784-1022-1022-1022-10 units. That is
about three million weights. At 32 bits each they cannot stay on an FPGA, so a normal design fetches
them from DRAM for every image, and DRAM bandwidth limits its speed. This design holds the whole
network in block RAM instead. It can do so because the hidden-layer weights are quantised to 3 bits:
each weight is one of -3..+3 times a step size Delta for its layer. The 10-node output layer keeps
8-bit weights. The weights come from retraining a quantised network off line. For the digit network
that is 8.75 Mbit of weights, and no DRAM access happens at run time.

3-bit weights also remove the multipliers. A hidden-layer processing unit (PU) adds 0, ±x, ±2x or
±3x to an accumulator, which takes only an adder and a shift. The design is organised as follows:

* each layer is one **tile** of N/2 PUs, and each PU computes **two** nodes, one after the other
  (*parallel-serial*: nodes in parallel, inputs one per clock);
* the tiles form a **pipeline**. While tile 1 works on image n, tile 2 works on image n-1, tile 3
  on image n-2 and the output tile on image n-3;
* one image leaves the pipeline every 2051 clocks. At the default sizes a batch of 100 images
  takes 104 such slots, or 213,305 clocks.

The RTL is SystemVerilog 2017. It covers the programmable-logic part of the system: the two shared
image/result RAMs, the input multiplexer, the tiles, the output tile and the controller. The
ARM processing system, the AXI interconnect, the AXI GPIO blocks and the DDR controller are not
part of it. Their signals are ports of `dnn_top`.

## System view

```
 processing system ──AXI──┬── BRAM0 ─┐ 32   ┌─────┐   8   ┌──────┐ ┌──────┐ ┌──────┐ ┌────────┐  8
 (writes images, reads    ├── BRAM1 ─┴─────►│ mux ├──────►│TILE 1├►│TILE 2├►│TILE 3├►│ OUTPUT ├──► BRAM0/1
  classes)                ├── GPIO0 ──start,bank──┐       └──────┘ └──────┘ └──────┘ │  TILE  │  (class byte)
                          └── GPIO1 ◄──done───────┴──── controller (rstnet, selnet, enables, weBRAM)
```

The host works with the two RAMs in turn, BRAM0 and BRAM1:

1. The host writes a batch of `N_IMG` images into one RAM through port A. Image n, pixel p sits
   at byte `n*N_IN + p`, four bytes per 32-bit word, with byte 0 in bits [7:0].
2. The host sets `gpio0 = {bank, start}`. A rising edge of `start` starts the batch, and `bank`
   says which RAM holds it. While this batch runs, the host can fill the other RAM.
3. The DNN writes the class of image n (0..N_OUT-1) as one byte at byte address
   `N_IMG*N_IN + n` of the same RAM. When the last class is written, it raises `gpio1[0]`
   (done). Done stays high until the next start.

Before the first batch, the weights, biases and Delta values go in through the load port.
`ld_layer` selects the tile: 0..N_LAYERS-1 are the hidden tiles and N_LAYERS is the output tile.
`ld_kind` selects what is written:

| `ld_kind` | writes | `ld_row` | `ld_word` | `ld_data` |
|---|---|---|---|---|
| 0 | weight memory | input index k | 32-bit slice of row k | slice |
| 1 | bias | node | – | [15:0] signed |
| 2 | Delta (hidden tiles) | – | – | [7:0] unsigned |

## Number formats

| quantity | format |
|---|---|
| signal between layers (pixels, sigmoid outputs) | 8-bit unsigned fraction, value = code/256 |
| hidden weight | 3-bit sign-magnitude `{sign, |w|}`, value = ±\|w\|·Delta, \|w\| in 0..3 |
| hidden PU accumulator (`net`) | 21-bit signed; it cannot overflow over 1022 inputs |
| hidden PU output | the accumulator saturated to 16-bit signed |
| bias | 16-bit signed, in the same units as the accumulator |
| Delta | 8-bit unsigned, value = code/256 |
| sigmoid input | 8-bit signed Q4.4 = sat8((out16 · Delta) >>> 12) |
| sigmoid output | min(255, round(256 / (1 + e^(−x/16)))) |
| output weight | 8-bit two's complement |
| output PU accumulator | 26-bit signed, not saturated |

The 8-bit signals, the 3-bit and 8-bit weights, the 16-bit bias and PU output and the 21-bit
accumulator are fixed by the architecture. This design chose the rest: the fraction formats, the
weight encoding, the Delta format and the shift of 12. The shift of 12 makes the sigmoid input
equal to the real pre-activation when the accumulator is counted in units of Delta/256. To use
weights trained elsewhere, quantise them to these formats.

## The processing unit (`pu`)

Each clock that `en` is high, the PU adds w·din to its accumulator:

* `w[1:0]` selects 0, din, din<<1 or din + (din<<1);
* `w[2]` negates that term exactly.

`rstnet` loads the accumulator with `bias0` or `bias1`, chosen by `sel`. `dout` is the accumulator
saturated to 16 bits. The PU has no multiplier and no DSP block.

## The hidden tile (`hidden_tile`)

The hardest part of the design is how the tile shares 511 PUs among 1022 nodes without stalling
the pipeline.

**Weights.** Row k of the tile's weight memory (`wmem`) holds the 3-bit weights that input k
meets at all 1022 nodes: node j sits in bits [3j+2:3j], so a row is 3066 bits. A tile with M
inputs has M rows. The row is read one clock before its input arrives. `sel` passes one half
of the row (1533 bits) to the PUs:

* `sel = 0`: PU i gets the weight of node i;
* `sel = 1`: PU i gets the weight of node i+511.

**Two passes per image.**

| step | what happens |
|---|---|
| pass 0 | `rstnet` with `sel=0` loads Bias0 (node i). Then the M inputs stream in, one per clock. |
| pass 1 | `rstnet` with `sel=1` loads Bias1 (node i+511). Then the same M inputs stream in again. |

**Two output registers per PU.** The PUs start on the next image right away, so each PU keeps
its results in two registers:

* `cap0` (at the start of pass 1) copies the pass-0 result into a staging register;
* `cap1` (after pass 1) moves the staging value to `net[i]` and the pass-1 result to `net[i+511]`.

`net[0..1021]` then holds the layer's output for the whole of the next image slot. During that
slot the next tile reads it twice, once per pass, while the PUs already work on the following
image.

**Output path.** The next tile chooses a node with `out_idx`. That node's `net` value goes through
a multiplexer, a multiplication by Delta, saturation to Q4.4 and the sigmoid unit. This path is
shared by all nodes, so each tile has only one activation unit. `dout` is combinational. `dnn_top`
registers it before the next tile.

**Sigmoid (`act_sigmoid`).** The sigmoid is a 256-entry truth table read without a clock. A
constant function computes the table from the formula above at elaboration, so no data file is
needed. Synthesis reduces it to a ROM or LUT logic. The original design wrote the same function
as a minimised sum of products.

## The output tile (`out_tile`)

The output tile has one PU (`out_pu`) per output node, each a real 8×8 multiply-accumulate.
It runs once per image:

1. In pass 1 of slot s, the tile accumulates the 1022 outputs of the last hidden tile for image
   s-3.
2. `cap1` copies the sums into result registers.
3. In the first `N_OUT` clocks of the next slot's pass 0, the tile compares the sums one per clock
   and keeps the largest. A strict `>` makes the lowest index win a tie.
4. The class is written to the image RAM during that slot's pass 1.

There is no sigmoid on this path. The sigmoid is monotonic, so the comparison gives the same class
without it.

## Schedule (`controller`)

One image slot has these states:

| state | clocks | signals |
|---|---|---|
| RST0 | 1 | `rstnet`, `selnet=0` |
| RUN0 | PLEN | `cnt` = 0..PLEN-1 |
| RST1 | 1 | `rstnet`, `selnet=1`, `cap0` |
| RUN1 | PLEN | `cnt` = 0..PLEN-1 |
| NEXT | 1 | `cap1` |

`PLEN = max(N_IN, N_HID) + 2`, which is 1024 at the defaults, so a slot is 2051 clocks. The
counter `cnt` is the input index of every tile and also the `out_idx` of the tile before it. A
tile with M inputs is enabled while `cnt < M`: 784 clocks for tile 1, 1022 for the others. PLEN
has two clocks more than the longest layer for two reasons:

* the last accumulation lands one clock after the last index;
* the class write-back (`we_res`) needs a clock at `cnt = N_IN` in pass 1, after tile 1 has read
  its last pixel, so that one RAM port serves both the image reads and the class writes.

In slot s, hidden tile t (counting from 0) works on image s-t, and the output tile works on image
s-N_LAYERS. A tile with no valid image in a slot is not enabled. A batch runs N_IMG + N_LAYERS + 1
slots, so that the last class is compared and written before `fin`. At the defaults that is
104 × 2051 + 1 clocks from the start edge to done.

| slot | tile 1 | tile 2 | tile 3 | output tile (pass 1) | compare + write (next slot) |
|---|---|---|---|---|---|
| 0 | img 0 | – | – | – | – |
| 1 | img 1 | img 0 | – | – | – |
| 3 | img 3 | img 2 | img 1 | img 0 | – |
| 4 | img 4 | img 3 | img 2 | img 1 | img 0 |
| 103 | – | – | – | – | img 99 |

Two assertions in the controller check the sequencing:

* `rstnet` is never high in the same clock as a tile enable;
* the image RAM port is never read and written in the same clock.

## Parameters and sizes

`dnn_top` parameters, at their defaults:

| parameter | default | meaning |
|---|---|---|
| `N_IMG` | 100 | images per batch |
| `N_IN` | 784 | network inputs (bytes per image) |
| `N_HID` | 1022 | nodes per hidden layer (must be even) |
| `N_LAYERS` | 3 | hidden tiles |
| `N_OUT` | 10 | output nodes |
| `IDX_W` | 10 | width of the input index, at least clog2(PLEN) |
| `AW` | 15 | word-address width of each image RAM |

Memory at the defaults:

* weight memory: 784·3066 + 2·1022·3066 + 1022·80 = 8,752,408 bits;
* image RAMs: 2 × 32768 × 32 bits;
* 3·1022 biases and 3·1022·1.5 16-bit output registers in flip-flops.

The phoneme network (429-1022×4-61) uses the same RTL with `N_IN=429, N_LAYERS=4, N_OUT=61`.
The slot counter `cnt_digit` is 8 bits wide, so `N_IMG + N_LAYERS + 1` must not exceed 256.

## Where this RTL departs from or adds to the original design

* **Slot length.** This design takes 2051 clocks per image, against the original 2063. The
  original does not say how its overhead is made up.
* **Passes.** Each pass here feeds every input of the layer once. One description of the original
  speaks instead of 511 inputs per pass at two clocks per input. The 2×1022-clock count and the
  timing diagram agree with the reading used here.
* **Net register width.** The accumulator is 21 bits, as drawn in the PU diagram. The original
  text mentions a 16-bit adder; here 16 bits is the width of the PU output.
* **Done signal.** Done is on GPIO1, as in the block diagrams. One sentence of the original
  places it on GPIO0.
* **Pipeline drain.** Three extra slots drain the pipeline, plus one for the last comparison.
  `cnt_digit` counts slots, not finished images.
* **Own choices.** The load port, the GPIO bit assignment, the result address map, the register
  between tiles, the reset scheme and all number formats marked above are this design's own.
  Reset is asynchronous and active low. It clears the controller, the output registers and the
  comparator. Weights, biases and Delta are not reset.
* **Clock rate.** No clock-rate claim is made. The original ran at 172 MHz (digits) and 140 MHz
  (phonemes) on a Zynq XC7Z045.

## Verifying and simulating

Each module has a self-checking testbench in `tb/`. Each one ends with one
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_pu`, `tb_out_pu` | random weights and inputs against an integer model, including 16-bit saturation |
| `tb_act_sigmoid` | all 256 inputs against `exp()`, and that the table is monotonic |
| `tb_wmem`, `tb_dp_bram`, `tb_in_mux` | memory and multiplexer behaviour and latency |
| `tb_hidden_tile` | a 6-input, 8-node tile over three images: every node output, and that outputs stay valid while the next image runs |
| `tb_out_tile` | classes, comparison latency and ties |
| `tb_controller` | slot length, enable lengths per tile, slot and pass, pipeline offsets, write-back cycle and addresses, `fin` |
| `tb_dnn_top` | the whole design, reduced (12-8-8-8-3 network, 5 images, 3 batches alternating RAMs) |
| `tb_dnn_full` | the whole design at its defaults: 784-1022-1022-1022-10, two batches of 100 images, about 45 s in Verilator |
| `tb_dnn_phoneme` | the phoneme configuration 429-1022-1022-1022-1022-61, two batches of 10 frames (429-byte frames also exercise unaligned image starts) |

The two end-to-end testbenches share `tb/tb_dnn_body.svh`. Each of them:

* loads random weights;
* writes random images through the host port and starts batches on alternating RAMs, filling the
  next batch while the current one runs;
* checks every class read back against an integer model of the network (`tb/dnn_ref_pkg.sv`);
* checks the batch length in clocks;
* counts, and fails on any that never happens: the second pass, the captures, all tiles busy at
  once on different images, the comparisons, the write-backs, the done signals, the use of BRAM1,
  16-bit PU saturation and sigmoid saturation.

Build and run a testbench from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_dnn_full rtl/dnn_pkg.sv tb/dnn_ref_pkg.sv tb/tb_dnn_full.sv
./obj_dir/Vtb_dnn_full
```

Substitute any other testbench name. The unit testbenches that use no package can be built
without `tb/dnn_ref_pkg.sv`.

**Limits.** The tests use random weights, not a trained network, so they show that the hardware
computes the fixed-point network exactly. They say nothing about recognition accuracy. Timing
closure and resource use on an FPGA were not checked.
