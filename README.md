# A hardware fitness-evaluation loop for neuroevolution on Atari 2600 games

Deep neuroevolution trains a neural network by mutation and selection alone:
each candidate set of weights is judged only by the score it reaches when it
plays a game. Almost all of the cost sits in that judgement, a long
sequence of "emulate a frame, look at the picture, run the network, press a
button". This RTL puts that sequence into one FPGA: an Atari 2600 console
core, the image pre-processing, a 134,272-weight convolutional network and
the action selection run as one closed loop. The host only loads a cartridge
and a weight set, presses start, and reads back the score when the game is
over.

The design follows the fitness evaluation module of the IBM Neural Computer
neuroevolution work (Atari 2600 on distributed FPGAs). The parts described
there are implemented here in synthesizable SystemVerilog. A few pieces are
not included:

- the console core itself, which is an existing open-source design;
- the multi-FPGA system around the module;
- the genetic algorithm, which runs on the host.

Where the original description is silent, the choices are this design's own.
They are marked as such below and in each file's header.

## 1. The loop

```
        +----------------------------------------------------------------+
        |                                                                |
 Atari 2600 core --pixels--> color_convert --> frame_pool --> rescale_bilinear
  (outside)  ^                (palette->Y)     (max with       (160x210 ->
        |    |                                  prev. frame)     84x84)
        |    |                                                      |
        |  joystick <-- action_select <-- ann <-- frame_stack <-----+
        |               (argmax, sticky)  (4 layers) (4 frames = 4 channels)
        |
  cartridge ROM (rom_bram)     RAM read port --> game_status (score, dead)
        ^                                             |
        +------------- axi_regs (host) <--------------+      loop_ctrl sequences it all
```

`fitness_eval_module` is the top. A game runs as a fixed rhythm in one
clock domain:

1. **Play four frames.** `loop_ctrl` enables the console (`console_ce`)
   for four frames under the current joystick action. Every pixel flows
   through the pre-processing as it is produced, one pixel per enabled
   cycle. Each pre-processed 84x84 frame lands in one channel of the
   frame stack.
2. **Pause the console.**
   - `console_ce` drops in the same cycle as the fourth `frame_end`. The
     console therefore never starts a fifth frame on a stale action.
   - The pipeline drains: about 3 cycles after the last pixel.
   - Then `frame_stack` signals that the 84x84x4 input is complete.
3. **Infer.** The network runs once, in 43,264 cycles. Its 18 outputs
   stream out one per cycle. The action selection keeps a running maximum
   and presents the winning action after the 18th output.
4. **Resume.** The console continues with the next four frames. At the
   start of every frame, the sticky-action rule decides whether the new
   action or the previous one drives the joystick.

After every console frame, `game_status` reads the score and the game-over
flag from the console's RAM. The loop stops at game over, or when the host
writes the stop command. The frame counter and a 64-bit clock counter run
while the loop is active, so the host can compute frames per second.

**Throughput.** One group of four frames costs 4 x (console frame time) +
43,264 cycles + about 20 cycles of hand-over.

- The original console core produces about 2,514 frames/s at 150 MHz, which
  is about 59,700 cycles per frame.
- With the module clocked at the same 150 MHz, that gives about 282,000
  cycles per four frames, or about 2,100 frames/s.
- The reference design reached 1,450 frames/s with a layer-pipelined
  network.

**Why pause rather than overlap.** The console is stopped while the network
runs, for three reasons:

- the action for frames 5-8 depends on frames 1-4;
- a single stack buffer suffices;
- the loop stays strictly causal.

The reference design instead describes the whole loop as pipelined with
minimal buffering. Section 8 lists this as a departure.

## 2. From console pixels to network input

The console delivers a 7-bit palette index per pixel: 4 bits of hue and
3 bits of luminance, 160 visible pixels on each of 210 lines.

**Colour to grey (`color_convert`).**

- A 128-entry palette ROM (`rtl/ntsc_palette.hex`, the widely used NTSC
  palette) gives the RGB value of each index.
- The luminance uses ITU-R BT.601 weights in 8-bit fixed point:
  `Y = (77 R + 150 G + 29 B + 128) >> 8`.
- Latency is 2 cycles.
- With this palette, the 128 colours map to 95 distinct grey levels. The
  reference design, using its console core's own palette, reports 124.
- Change the table to match your console core.

**Flicker removal (`frame_pool`).**

- Many games draw some sprites only on every other frame.
- The pool keeps the whole previous frame (160x210 bytes). Each output
  pixel is the brighter of the current and the previous pixel.
- One RAM does both jobs: read-before-write returns the old pixel and
  stores the new one in the same cycle.
- After a loop reset, the first frame passes unchanged.

**Down-scaling (`rescale_bilinear`).**

- The sample positions use the pixel-centre convention,
  `src = (dst + 0.5) * IN/OUT - 0.5`.
- Positions are tracked as exact fractions with denominator `2*OUT`, so the
  stepping never drifts.
- Input arrives in raster order and never returns, so the block works as a
  streaming filter:
  - one line buffer holds input row `y0`;
  - while row `y0+1` streams in, a vertical blend is formed per column
    (multiplier 1);
  - when the column `x0+1` of an output sample arrives, the blend of that
    column and the previous one is formed horizontally (multiplier 2).
- Weights have 8 fractional bits, and results are rounded to the nearest
  integer.
- For 160x210 -> 84x84, each input row and column feeds at most one output
  row and column. This needs `IN > OUT` in both axes.
- The last output pixel comes 2 cycles after the last input pixel of the
  frame.

**Stacking (`frame_stack`).**

- Frame k (0..3) of a group is written to channel k of an 84x84 buffer.
  Each word holds the 4 channels of one pixel.
- Groups do not overlap: each console frame is seen once, and there is one
  decision per four frames.
- A luminance L becomes the activation `L >> 2` in the network's format
  (6 fractional bits). The input is therefore L/256, in [0, 1).

## 3. The network engine

| layer | operation | kernel / stride | output | ReLU | CPF | KPF | weights | cycles |
|---|---|---|---|---|---|---|---|---|
| 1 | convolution | 8x8 / 4 | 20x20x32 | yes | 4 | 32 | 8,192 | 25,600 |
| 2 | convolution | 4x4 / 2 | 9x9x64 | yes | 32 | 4 | 32,768 | 20,736 |
| 3 | convolution | 3x3 / 1 | 7x7x64 | yes | 4 | 32 | 36,864 | 14,112 |
| 4 | inner product | (7x7x64 -> 18) | 18 | no | 4 | 1 | 56,448 | 14,112 |

The network has no padding and no biases. It uses 16-bit words throughout:

- weights have 13 fractional bits;
- activations have 6 fractional bits.

A product has 19 fractional bits. An accumulator (48 bits) sums the products.
The sum is then:

1. shifted right by 13 (arithmetic shift, so it rounds towards minus
   infinity);
2. saturated to 16 bits;
3. passed through ReLU where the table says so.

**One engine per layer (`conv_layer`).** Each cycle the engine reads:

- one word of CPF input activations (CPF = input-channel parallelism);
- one word of CPF x KPF weights (KPF = output-channel parallelism).

It forms KPF sums of CPF products and adds them into KPF accumulators. The
loops, from innermost out, are:

```
cg (input-channel group) -> kx -> ky -> kg (output-channel group) -> ox -> oy
```

An output word of KPF channels is written whenever `cg, kx, ky` wrap. So a
layer takes `OUT_W * OUT_H * (OUT_C/KPF) * K * K * (IN_C/CPF)` cycles, plus
3 pipeline cycles. The inner product is a convolution whose kernel covers
the whole 7x7x64 input.

**Buffers between layers (`fmap_buffer`).** Feature maps are stored
height-width-channel.

- Because CPF and KPF alternate, each layer writes words exactly as wide as
  the next layer reads (32 -> 32, 4 -> 4). So those buffers are plain RAMs.
- Only the buffer from layer 3 to layer 4 (written 32 wide, read 4 wide)
  selects a slice.
- Each layer has its own weight RAM (`weight_ram`) and its own multipliers:
  128 + 128 + 128 + 4 = 388 in total.

**Row-by-row chaining.** All four engines start in the same cycle, and each
one follows its producer row by row.

- Each engine counts the output rows it has completed (`out_rows`). The
  next engine receives this count as `in_rows`.
- A step that would read input row `oy*S + ky` before that row is complete
  stalls the engine's loop counters, and a bubble enters its pipeline.
- Because the loops run output row by output row, layer 2 trails layer 1
  by a few rows, layer 3 trails layer 2, and so on.
- Run one after another, the layers would need 74,560 + 12 = 74,572 cycles.
  Chained, the pass is bounded by:
  - all of layer 1: 25,600 cycles;
  - the last output row of layer 2: 9 x 16 x 16 = 2,304 cycles;
  - the last output row of layer 3: 2,016 cycles;
  - the 17 inner-product outputs that need the complete layer-3 map:
    17 x 784 cycles, plus 112 for the end of the first output.
- That bound is about 43,360 cycles. Simulation gives 43,264, because a
  layer's last row partly overlaps its producer's last row.

The reference design reaches its overlap with the layer-pipelined
structures of its network generator. This design reaches it with the row
counters, and keeps whole feature maps in its buffers. That is simpler, but
it uses more block RAM: about 0.54 Mb for the three buffers.

**Weight layout.** The host writes weights one per 32-bit AXI word
(`wdata[15:0]`). The flat index is `layer_base + word * (CPF*KPF) + lane`,
where:

```
word = ((kg*K + ky)*K + kx)*(IN_C/CPF) + cg      kg = oc / KPF, kl = oc % KPF
lane = kl*CPF + cl                               cg = ic / CPF, cl = ic % CPF
```

- `oc` is the output channel, `ic` the input channel, and `ky, kx` the
  position in the kernel.
- The layer bases are 0, 8,192, 40,960 and 77,824 (total 134,272).
- For the inner product, `ky, kx` index the 7x7 input positions, and `ic` is
  the channel at that position.

The weight layout is this design's own. A weight set trained for another
layout has to be permuted once, on the host.

## 4. Choosing an action

`action_select` keeps the largest of the 18 outputs as they stream by. On a
tie it keeps the lower index. The 18 actions use the Arcade Learning
Environment numbering: NOOP, FIRE, UP, RIGHT, LEFT, DOWN, the four
diagonals, and then the same ten moves with FIRE. `fem_pkg::action_to_joy`
maps each action to the five joystick lines.

**Sticky actions.** At the start of every console frame, with probability
0.25, the previously applied action is kept instead of the newest selected
one.

- The random bits come from a 41-bit maximum-length LFSR with taps 41 and
  38. It steps every clock cycle and is never cleared, so it runs
  independently of the loop.
- "Keep" means both low bits are zero, which has probability 1/4.
- `sticky_hit` flags a frame on which the keep actually changed what the
  console saw.

## 5. Score and game over

Every game stores its score and its lives or game-over flag at different
RAM addresses. The host therefore fills a descriptor table with 64 entries,
each of two 32-bit words, and selects an entry with the game identifier.

```
word 0  [7:0]   score byte 0 (least significant): {valid, RAM address[6:0]}
        [15:8]  score byte 1
        [23:16] score byte 2
        [24]    1 = BCD bytes (two decimal digits each), 0 = binary
word 1  [6:0]   flag address     [15:8] mask     [23:16] value
        [24]    enable: the game is over when (RAM[address] & mask) == value
```

- After every console frame, `game_status` reads the bytes through the
  console's RAM read port: 4 reads, 5 cycles.
- It then updates the score (BCD: b0 + 100 b1 + 10000 b2) and the dead
  flag.
- The descriptor values for particular games are not given here. They come
  from the usual per-game RAM maps, for example those of the Arcade
  Learning Environment.

## 6. Host interface

The host uses AXI4-Lite with 24-bit addresses and 32-bit data. A write
presents AW and W together. All responses are OKAY.

| address | name | access | meaning |
|---|---|---|---|
| 0x000000 | CMD | W | bit0 reset the loop, bit1 start, bit2 stop |
| 0x000004 | GAME_ID | RW | selects the game descriptor |
| 0x000008 | STATUS | R | bit0 alive, bit1 dead, bit2 running |
| 0x00000C | SCORE | R | current score |
| 0x000010 | FRAMES | R | console frames since start |
| 0x000014 | CLOCKS_LO | R | clock cycles since start, low word |
| 0x000018 | CLOCKS_HI | R | high word |
| 0x00001C | ACTION | R | last action chosen by the network |
| 0x001000 | DESC | W | descriptor table, 2 words per game |
| 0x010000 | ROM | W | 32 KB cartridge ROM, byte strobes honoured |
| 0x100000 | WEIGHTS | W | one weight per word, flat index as in section 3 |

To evaluate one individual:

1. Write the ROM (only when the game changes).
2. Write the descriptor and GAME_ID.
3. Write the 134,272 weights.
4. Write `CMD = 1` (reset), then `CMD = 2` (start).
5. Poll STATUS until bit 2 clears, then read SCORE, FRAMES and CLOCKS.

A time limit (for example 5 minutes of game time, 18,000 frames) is applied
by the host: it watches FRAMES and writes `CMD = 4` (stop). Accesses never
stall the loop. Reads sample the counters as they run.

## 7. Connecting a console core

The console core sits outside the module. It must:

- run one emulated console clock step per cycle in which `console_ce` is
  high, and hold its state otherwise;
- stay in reset while `console_rst` is high (the loop is idle);
- read its cartridge through `console_rom_addr` (15 bits). The data arrives
  on `console_rom_data` one cycle later. Bank switching is the core's job;
- report each visible pixel with `console_pix_valid` (at most one per
  enabled cycle), `console_pix_sof` on the first pixel of a frame, and the
  7-bit palette index;
- pulse `console_frame_end` once per frame. **This must be a registered
  output**, because `console_ce` depends combinationally on it;
- offer a read port into its 128-byte RAM (`console_ram_raddr` ->
  `console_ram_rdata`, one cycle of latency).

The joystick arrives as `console_joy`: up, down, left, right and fire,
active high.

## 8. Departures from the reference design, and limits

| Topic | Reference design | This design |
|---|---|---|
| Loop schedule | Loop pipelined with minimal caching. Network is a layer-pipelined DNNBuilder design | Console paused while the network runs. Layers are chained row by row, but over whole feature-map buffers rather than the generator's small line buffers, so more block RAM is used. Throughput is still above the reported 1,450 frames/s at 150 MHz (section 1) |
| Clocking | Host traffic "asynchronous" to the loop; console at 150 MHz | One clock domain. Host accesses cannot stall the loop, but there is no clock-domain crossing, so the console core must run on the module clock with `console_ce` as its enable |
| Palette | 124 grey levels from the core's own palette | 95 grey levels from the NTSC table supplied here |
| Re-scaling and rounding | Not specified | Pixel-centre bilinear sampling, 8-bit weights, truncating requantisation of the network: all chosen here |
| Score and game-over locations | Chosen from the game identifier | A descriptor table written by the host |

Not included: the console core, the multi-node system (two modules per
FPGA, 832 in total), and the genetic algorithm.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block's outputs with values computed independently:

- **`tb_ref_pkg`** holds the reference arithmetic: floating-point BT.601
  and bilinear sampling, and an exact integer convolution model.
- **Pre-processing benches:**
  - `tb_color_convert` covers all 128 colours;
  - `tb_frame_pool` checks random frames, the first frame after a clear,
    and gaps in the stream;
  - `tb_rescale_bilinear` runs three full-size frames: random, a ramp and a
    constant. The first two must be within 2 grey levels of the
    floating-point model, and the constant must be exact. It also checks the
    output count, the flags and the latency;
  - `tb_frame_stack` checks the channel placement and group pulses.
- **Network benches:**
  - `tb_weight_ram` checks writes and reads of the weight RAM;
  - `tb_conv_layer` checks layer 1 at full size and a small strided layer
    with several channel groups and no ReLU, including the exact cycle
    count;
  - `tb_ann` runs one full network pass against the integer model, and
    checks that the chained pass takes the expected ~43,360 cycles (within
    1 %). `tb_conv_layer` also feeds an engine its input rows one at a time,
    and checks that it stalls and never reads an incomplete row.
- **Control and host benches:**
  - `tb_action_select` checks the argmax, ties and the sticky rate
    (0.25 +- 0.04);
  - `tb_game_status` checks BCD and binary scores, masks, and a game with
    game-over detection disabled;
  - `tb_rom_bram` checks byte strobes;
  - `tb_axi_regs` checks the register map and handshakes;
  - `tb_loop_ctrl` checks groups of 4, the stall, stop, dead and reset.

**End to end.** `tb_fitness_eval_module` runs the top with every parameter
at its default. The console is `tb/atari2600_model.sv`, a behavioural
stand-in. It draws 160x210 frames from the ROM, the joystick and a
flickering block, keeps a BCD score, and loses a life every few frames. The
testbench works as follows:

1. It loads a random cartridge and random weights over AXI.
2. It plays a game to its end.
3. It resets the loop and plays a second game with game-over detection
   switched off. After every decision it rewrites the last-layer weights
   so that a different action wins, which makes sticky actions visible.
   The host then stops this game with the stop command.

For every group it checks that:

- the stacked input matches a floating-point re-computation from the
  captured console pixels, within 2 grey levels;
- the selected action is the argmax of the integer network model applied
  to that input;
- the joystick shows the new action or the previous one.

It also checks the score, frame, clock and status registers. It checks the
loop rate as well: frames x 150 MHz / clock count must reach at least
1,450 frames/s, and the measured rate is about 2,180. The model's frame is
as long as a real NTSC frame. It counts the
stalls, sticky draws and hits, pooled pixels, network runs, game over, stop
and reset, and fails if any of them never occurs. The whole run covers 18
decisions, about 6 million cycles, and takes about half a minute.

Run any testbench from the repository root, so that the palette file is
found:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fem_pkg.sv tb/tb_ref_pkg.sv tb/tb_fitness_eval_module.sv \
    --top-module tb_fitness_eval_module
./obj_dir/Vtb_fitness_eval_module
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

## 10. Files

- `rtl/fem_pkg.sv`: sizes, number format, stream structs, actions and the
  register map.
- `rtl/fitness_eval_module.sv`: the top.
- `rtl/loop_ctrl.sv`: the loop sequencer.
- `rtl/axi_regs.sv`: the host interface.
- `rtl/rom_bram.sv`: the cartridge ROM.
- `rtl/game_status.sv`: score and game-over detection.
- `rtl/color_convert.sv` and `rtl/ntsc_palette.hex`: colour to grey.
- `rtl/frame_pool.sv`, `rtl/rescale_bilinear.sv` and
  `rtl/frame_stack.sv`: the rest of the pre-processing.
- `rtl/ann.sv`, `rtl/conv_layer.sv`, `rtl/weight_ram.sv` and
  `rtl/fmap_buffer.sv`: the network.
- `rtl/action_select.sv`: action selection.
- `tb/`: one `tb_<block>.sv` per block, the reference package and the
  console model.
