# A 3-D digital chaotic system and a chaos-encrypted VGA image link

Most chaotic maps are defined on real numbers. When they run in fixed-point
hardware they are rounded at every step, and their orbits collapse into short
cycles. This is called dynamical degradation. The *higher-dimensional digital
chaotic system* (HDDCS) works the other way round. It starts from an ordinary
m-dimensional map on N-bit integers and never rounds anything. The chaos comes
from outside: m random words pick, bit by bit, which state bits take the map's
new value and which keep their old one. Every operation is a bitwise AND, OR,
NOT or XOR on N-bit words, so finite precision costs nothing.

This RTL implements the FPGA example of that scheme from Wang, Yu, Li, Lü,
Fang, Guyeux and Bahi, "Theoretical Design and FPGA-Based Implementation of
Higher-Dimensional Digital Chaotic Systems", IEEE Trans. Circuits and Systems I,
63(3), 2016. That example is a 3-D, 32-bit system (3D-DCS) driven by three
ring-oscillator true random number generators (TRNGs). The RTL also implements
the application built on it: a two-board link that sends a 640 x 480 colour
picture. Each pixel is encrypted by XOR with the chaotic state, sent over a
public channel, and decrypted and displayed at the far end.

## 1. The update rule

For one dimension with state `x`, iteration function `F` and random word `s`
(all N bits wide):

    x_next = (x AND NOT s) OR (F(x, y, ...) AND s)

Where `s` has a 1, the bit takes F's value. Where it has a 0, the bit keeps
its value. Every dimension has its own random sequence: `s` for x, `u` for y,
`v` for z. The map F on its own need not be chaotic. The random selection
connects the state graph strongly: every state can reach every other state.
The source proves that this, together with the shift of the random
sequences, meets Devaney's definition of chaos. In the RTL this rule is
`dcs_bit_update`: one line of combinational logic, with width parameter `N`.

A 2-D, 2-bit example (x' = NOT x, y' = NOT x XOR y) is fully tabulated in the
source: 16 states by 16 random-word pairs. The testbench of
`dcs_bit_update` checks all 256 cells of that table.

## 2. The 3-D system

With N = 32 and no fractional bits, the 3D-DCS uses

    F1 = NOT x XOR (1 << (z mod 32))
    F2 = NOT y XOR (1 << (x mod 32))
    F3 = NOT z XOR (1 << (y mod 32))

so each dimension is inverted except for one bit. The position of that bit is
set by the low five bits of another dimension, which couples the three
dimensions in a ring: z drives x, x drives y, y drives z. `dcs3d_processing`
computes one iteration combinationally. Its port names (`in1..in3` for the
previous state, `out1_prng..out3_prng` for s, u, v, and `out1..out3` for the
new state) are those of the original block diagram.

## 3. The generator: rings, processing, feedback

`dcs3d_generator` has three parts:

```
            +-------------------+   s,u,v   +------------------+  x^n,y^n,z^n
 in*_prng ->| osc_ring_trng x3  |---------->| dcs3d_processing |--+--> out_R/G/B
   ^        +-------------------+     |     +------------------+  |
   |                                  |        ^ x^{n-1}..        |
   |        +-------------------------v--------+------------------v-+
   +--------|          dcs_feedback (registers, rising edge, en)     |
            +--------------------------------------------------------+
```

* `dcs_feedback` holds the state x^{n-1}, y^{n-1}, z^{n-1} and the last TRNG
  words. When `en` is high at a rising edge, it stores the new state and the
  new TRNG words. Reset loads the initial state from the `key` input, which is
  the shared secret of the link, and clears the TRNG registers.
* `out_R`, `out_G` and `out_B` are x^n, y^n and z^n. They are computed
  combinationally from the stored state and the current random words, and the
  next enabled edge stores them. The words used for the step are on `prng`.
  The key stream for a pixel is therefore ready in the cycle in which it is
  used, and the same edge that consumes it advances the generator.
* `EXT_PRNG = 1` builds the receiver's generator. It has no rings: it takes
  s, u, v from `ext_prng`. With the same key and the same words, it follows
  the transmitter's orbit exactly.

### The ring-oscillator TRNG is a behavioural model

A ring-oscillator TRNG gets its randomness from the phase jitter of
free-running inverter rings. That is physical, and it cannot be expressed as
RTL. `osc_ring_trng` is therefore a **simulation model**, not synthesizable
logic. It keeps the block's ports: `in`, the fed-back TRNG word, and `out`,
the next random word. Every few time units it draws a new noise word with
`$urandom`, and it outputs `in XOR noise`. The noise changes only at odd
simulation time units (1 ns units), so a clock with edges at even times never
samples it while it is changing. All testbenches here use a 20 ns clock with
edges at multiples of 10 ns. The three instances differ only in seed and
redraw period. On an FPGA, replace this file with a real TRNG that has the
same ports.

## 4. The image link

```
 board 1 (image_tx)                                      board 2 (image_rx)
 picture_ram --+--> vga_controller --> monitor 1
               |                                      chan_rx
               +--> rgb_encrypt --> chan_tx ===========> rgb_decrypt --> vga_controller --> monitor 2
 dcs3d_generator ------^   (pixel + s,u,v)                    ^
   (own TRNGs)                                   dcs3d_generator (EXT_PRNG = 1)
```

The top, `hddcs_secure_image`, holds both boards. The public channel between
them is not logic, so the transmitter's side leaves on `chan_tx` and the
receiver's side enters on `chan_rx`. A testbench, or real wiring, closes the
loop and may add whole cycles of delay.

**Transmitter.** `vga_controller` walks the standard 640 x 480 / 60 Hz raster.
That raster is 800 x 525 pixel clocks, with the pixel clock equal to the
50 MHz system clock divided by 2. In each visible pixel clock the controller
requests one pixel from `picture_ram`. The word it reads goes to two places:

* to the display pipeline of monitor 1;
* to `rgb_encrypt`, which XORs R, G and B with the low 8 bits of x^n, y^n and
  z^n.

The generator steps once per encrypted pixel. It holds during blanking. The
number of iterations therefore equals the number of pixels sent, and the
receiver can stay in step without a shared clock count.

**Channel format** (`hddcs_pkg::chan_t`): `valid`, `sof` (start of frame, set
on pixel (0, 0)), the encrypted pixel `pix`, and `prng[0..2]`, which holds the
s, u, v words used for that pixel. These words are the "control signal" that
synchronises the receiver.

**Receiver.** Each valid transfer steps the receiver's generator with the
received words and decrypts the pixel. The receiver has no frame store. Its
`vga_controller` is locked to the incoming stream instead: a transfer with
`sof` set drives `resync`, which makes that cycle the pixel clock of pixel
(0, 0), and the following pixels line up with the raster.

**Timing** (system clock cycles, taking the transmitter's request for a pixel
as cycle 0):

| cycle | event |
|------:|-------|
| 0 | `req`, `req_addr` from the VGA controller; RAM read issued |
| 1 | RAM word ready; generator steps (enabled edge); encryption register loads |
| 2 | pixel on `chan_tx` for one cycle (`valid` high) |
| 2 + d | pixel on `chan_rx` (d = channel delay); receiver steps and decrypts |
| 3 + d | `dec_pix` / `dec_valid` valid |

On both monitors the RGB and sync outputs lag their own raster counters by two
pixel clocks: one for the fetch and one for the output register.

**Mismatched key.** If the receiver's initial state differs from the
transmitter's, even in one bit, its orbit differs from the first pixel on.
The end-to-end test flips one bit of the receiver's x^0 and finds every
decrypted pixel wrong.

### A note on security

This link carries the TRNG words in the clear, next to each ciphertext pixel,
as the original system does. The secret is then only the 96-bit initial
state, and anyone who sees the channel sees the random control words. Treat
the link as a demonstration of synchronised chaotic generators, not as a
vetted cipher.

## 5. What follows the source and what is this design's own

Taken from the source:

* the update rule;
* the 3-D map and N = 32;
* the three-TRNG / processing / feedback structure, with the block and port
  names of its diagram;
* XOR encryption and decryption of R, G, B with the three dimensions;
* the two-board structure: picture RAM, VGA controller, encryption and the
  generator on one board; decryption, the generator and a VGA controller on
  the other;
* the control signal that synchronises the receiver;
* the 640 x 480 picture and the 50 MHz clock.

Own choices, because the source is silent on them:

* **Colour format.** 8 bits per component. The key stream is the low 8 bits
  of each 32-bit state word.
* **Generator pacing.** A clock enable makes the generator step once per
  pixel. The source only says that the generator updates on the rising clock
  edge.
* **Initial state and reset.** The initial state is a `key` input, loaded by a
  synchronous, active-high reset. The TRNG registers reset to 0.
* **Receiver synchronisation.** The receiver uses the received s, u, v words
  in place of its own rings (`EXT_PRNG = 1`), and its raster is restarted by
  the start-of-frame flag.
* **VGA timing.** Standard 640 x 480 @ 60 Hz, with the pixel clock equal to
  the system clock divided by 2.
* **Picture RAM.** An on-chip synchronous RAM with a load port. The original
  used the board's memory and does not say how the picture got there.
* **Clocking.** Both boards run from one clock in the top.
* **Channel format.** The channel is a plain struct, one pixel per transfer.
* **TRNG.** The ring-oscillator TRNG is a behavioural model (section 3).

Not built:

* the monitors and the physical channel;
* the ISAAC software generator, which the source used only to produce input
  sequences for statistical tests.

## 6. Files

| file | role |
|------|------|
| `rtl/hddcs_pkg.sv` | widths, VGA timing constants, `rgb_t`, `chan_t` |
| `rtl/dcs_bit_update.sv` | the random bit-selection rule |
| `rtl/dcs3d_processing.sv` | one 3D-DCS iteration |
| `rtl/dcs_feedback.sv` | state and TRNG registers |
| `rtl/osc_ring_trng.sv` | ring-oscillator TRNG, behavioural model |
| `rtl/dcs3d_generator.sv` | rings + processing + feedback |
| `rtl/picture_ram.sv` | 307200 x 24-bit frame store |
| `rtl/vga_controller.sv` | raster timing, pixel requests, display pipeline |
| `rtl/rgb_encrypt.sv`, `rtl/rgb_decrypt.sv` | XOR with the key stream |
| `rtl/image_tx.sv`, `rtl/image_rx.sv` | the two boards |
| `rtl/hddcs_secure_image.sv` | top: both boards, channel as ports |
| `tb/hddcs_ref_pkg.sv` | bit-by-bit reference model and test picture |
| `tb/tb_*.sv` | one self-checking testbench per module |

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. It also has a watchdog that counts a failure if the run hangs.
Build one with Verilator 5, for example the full-size end-to-end test:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/hddcs_pkg.sv tb/hddcs_ref_pkg.sv tb/tb_hddcs_secure_image.sv \
    --top-module tb_hddcs_secure_image -o sim
./obj_dir/sim
```

`--timing` is required because the TRNG model uses delays. To build another
test, replace the testbench file and the top-module name.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_dcs_bit_update` | the 256-cell 2-D transition table; random 32-bit vectors |
| `tb_dcs3d_processing` | 5000 random and corner iterations against the reference |
| `tb_dcs_feedback` | reset to key, load on enabled edges, hold otherwise |
| `tb_osc_ring_trng` | out = in XOR noise, noise keeps changing, bits balanced, rings differ |
| `tb_dcs3d_generator` | 2250 steps against the reference; receiver copy matches; hold when disabled |
| `tb_picture_ram` | full 307200-word fill and read-back, 1-cycle latency, hold |
| `tb_vga_controller` | two full frames: addresses, 1600-clock lines, 840000-clock frames, sync widths, display order, resync |
| `tb_rgb_encrypt`, `tb_rgb_decrypt` | XOR, valid/sof, hold, round trip |
| `tb_image_tx` | 16 x 8 picture, two frames: every ciphertext pixel against the reference, spacing, monitor 1 |
| `tb_image_rx` | 16 x 8 picture sent by the testbench: decryption, monitor 2, one-bit key mismatch |
| `tb_hddcs_secure_image` | full 640 x 480 frame end to end at default parameters (about 1.2 M cycles, a few seconds) |

The end-to-end test also counts how often each mechanism occurs: frame
starts, receiver resyncs, generator hold cycles and key-mismatch runs. A
mechanism that never occurs counts as a failure.

To change the picture size, set `HA` and `VA` on the top. The VGA porch
widths are parameters of `vga_controller`, and their defaults come from
`hddcs_pkg`. `DCS_N` in the package sets the state width, but the key-stream
slicing and the reference model assume 32 bits.
