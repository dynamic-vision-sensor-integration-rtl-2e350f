# DVS events to normalised sparsity maps: an FPGA front end for a sparse CNN accelerator

An event camera (Dynamic Vision Sensor, DVS) does not produce frames. Each pixel
reports a brightness change, on its own and when it happens, as an *address event*
(x, y, polarity). A CNN still needs frames. This circuit builds them from a fixed
number of events rather than a fixed exposure time: it counts N events (2048 by
default) into a 64x64 histogram. A fast-moving hand fills the histogram in a few
milliseconds, a slow one takes longer, so the frame rate follows the motion in the
scene.

Each histogram is then normalised with the statistics the CNN was trained with
(mean and standard deviation of the active pixels, range of ±3 sigma). It is then
re-encoded in the compressed input format of the NullHop sparse CNN accelerator, all
in hardware, at one pixel per clock. Two histogram buffers work in ping-pong:
events keep arriving in one while the other is normalised and sent, or waits for
the accelerator. When both are busy, the circuit holds back the sensor's
handshake acknowledge, so the sensor pauses.

The RTL follows the circuit described in *"Dynamic Vision Sensor integration on
FPGA-based CNN accelerators for high-speed visual classification"* (Linares-Barranco,
Rios-Navarro, Tapiador-Morales, Delbruck). That paper gives the block diagram, the
pipeline stages, the normalisation formula and the exact C++ routine of the
normalisation block, built there with high-level synthesis. It gives neither
interfaces, handshakes, encodings nor the insides of the other stages. Those are
this implementation's own and are listed under "Departures and own choices" below.
The accelerator itself, the ARM host and the AXI-DMA plumbing around it are not
included.

## Data path

```
           Data/REQ/ACK                       +-----------+   bank A / bank B
  DVS ------------------> aer_rx --> ev_collector ---------->| hist_bank |  DVSmem  4096 x 16
  (64x64)  4-phase AER                 |   S, c, full        | (x2)      |  SMarray  256 x 16
                                       v                     +-----------+
  cfg bus --> cfg_regs (Nev, rectify)  dvs2sm_top: bank control (ping-pong)
                                       |
                                       v
                         frame_proc:  DIV -> VAR -> SQRT -> NORM (22 lanes) -> HT 2 LIST -> SM STM --> ZSi* bus
                                      mean   sigma^2  sigma  write back          list of     map word   to the
                                                              to DVSmem          non-zero    + values   accelerator
```

| module | role |
|---|---|
| `aer_rx` | four-phase AER receiver with a two-flop REQ synchroniser; ACK is given only after the event has been taken |
| `cfg_regs` | register 0: Nev (events per frame, 2048 after reset); register 1 bit 0: rectify (1 after reset) |
| `ev_collector` | read-modify-write of the pixel count, SMarray mask bit, running S (sum) and c (non-zero count); `full` after Nev events |
| `hist_bank` | one buffer: DVSmem (count, later the normalised value) and SMarray (non-zero mask, 16 pixels per word) |
| `seq_div` | radix-2 restoring divider, used for the mean and the variance |
| `var_unit` | streams the histogram, sums (F - mean)^2, divides by c |
| `isqrt_unit` | bitwise integer square root |
| `norm_unit` | one NORM block: the normalisation routine for one pixel |
| `norm_array` | 22 NORM blocks fed round-robin, one pixel in and one result out per clock |
| `ht2list` | scans the normalised bank and lists the pixels whose mask bit is set; clears DVSmem behind it |
| `sm_stm` | sends map words and values on the accelerator bus; clears SMarray behind it |
| `frame_proc` | sequences DIV, VAR, DIV, SQRT, NORM, then HT 2 LIST with SM STM, on one bank |
| `dvs2sm_top` | ties it together; owns the bank state machine |
| `sync_fifo` | small FIFO between `ht2list` and `sm_stm` |
| `dvs2sm_pkg` | sizes, the event and list-item structs, the bank port structs |

## The normalisation

This is the part to read carefully, because the CNN's accuracy depends on matching
the arithmetic used when it was trained.

For a histogram F over the 64x64 pixels:

```
S     = sum of all F(a,b)
c     = number of pixels with F(a,b) != 0
mean  = S / c
sigma = sqrt( sum over all pixels of (F(a,b) - mean)^2 / c )
```

Each pixel is then mapped by the routine below, a fixed-point transcription of the
source's C++ code. `data_t` is a 24-bit word with 8 fractional bits:

```
sig = max(sigma, 0.1/255)                          -- 0.1/255 truncates to 0 in data_t
signed histograms   : halfrng = 3*sig, rng = 6*sig
rectified histograms: halfrng = 0,     rng = 3*sig
F == 0     : out = (127/255) * 256 = 127.0         -- (127/255 truncates to 127/256)
otherwise  : f = (F + halfrng) / rng, clipped to [0, 1]; out = f * 255
```

So for signed histograms `out = 255 * (F + 3 sigma) / (6 sigma)`: mean-free ±3 sigma
mapped to 0..255. The mean enters only through sigma. All divisions truncate.
`out` is a 16-bit word with 8 fractional bits.

Points that matter when you compare with a software model:

* **Zeros count in sigma.** As written, the sum for sigma runs over every pixel,
  empty ones included, each adding mean². The division is by c, the non-zero count.
  With a sparse histogram this makes sigma much larger than the spread of the
  active pixels. Example: 2048 events over about 600 pixels give mean ≈ 3.3 and
  sigma ≈ 8.3. A single hot pixel, or a frame with c = 1, drives sigma to its
  saturation value. Set `var_unit`'s parameter `ALL_PIXELS = 0` (also a parameter of
  `frame_proc`) to sum over the non-zero pixels only, as the wording "average over
  non-zero pixels" for the mean suggests.
* **Precision.** The mean has 8 fractional bits. The variance keeps 16, so that its
  integer square root has exactly the 8 of `data_t`. Sigma saturates at the largest
  positive `data_t` (32767.996).
* **Empty pixels.** An empty pixel normalises to 127.0, but its mask bit is 0, so it
  is never sent. The accelerator sees it as 0. For the same reason the list builder
  decides what is non-zero from the mask, not from the value.
* **Output range.** Results run 0..255.0. The source's return type is a signed
  16-bit word with 8 integer bits, which would wrap values of 128 and above. Here
  the same 16 bits are read as unsigned.
* **sigma = 0** (all active pixels equal, with `ALL_PIXELS = 0`) would divide by zero
  in the C++ code. Here the result is 255.0 for a positive numerator and 0
  otherwise.

### Why 22 NORM lanes

A NORM block is sequential: `norm_unit` needs 9 clocks per pixel, because it does
an 8-step restoring division for the quotient. The source's HLS block needs 470 ns
at 100 MHz. Instead of pipelining one block, the design replicates it, as the source
does: `norm_array` has 22 instances. Pixel k goes to lane k mod 22. Each lane's
result comes back 9 clocks later, so the 22 lanes together take one pixel and return
one result per clock, in order, each tagged with its address. Each result is written
over the pixel's count in DVSmem. With fewer than 9 lanes, `in_ready` would drop.
An assertion in `frame_proc` checks that it never does.

## Buffers and flow control

Each bank moves through EMPTY → COLLECTING → FULL → PROCESSING → EMPTY
(`dvs2sm_top`).

* After reset, one 4096-clock pass clears both banks. Bank A collects first.
* At `full`, the collector hands the bank over together with its S and c. It
  switches to the other bank if that bank is EMPTY. Otherwise collection stops
  (`dvs_stall`): the event waiting in `aer_rx` is not acknowledged and the sensor
  waits. The paper's oscilloscope traces show the same effect.
* The frame processor takes a FULL bank whenever it is idle. A frame can wait in its
  bank for as long as the accelerator holds `ZSien` low.
* The processor clears the bank while sending it: `ht2list` zeroes DVSmem and
  `sm_stm` zeroes the SMarray words. Both must finish before the bank becomes EMPTY.
  The sender can finish before the list builder when the last groups are empty.

Inside one bank the stages do not overlap. Overlap comes only from the two banks:
frame i+2 is collected while frame i+1 is normalised and frame i is in the
accelerator.

## Output stream (ZSi* bus)

The frame is sent as 256 groups of 16 pixels, in row-major order (pixel address =
{y[5:0], x[5:0]}). Each group is sent as:

1. a **map word** (`ZSitype = 1`): bit b is set if pixel 16·g + b is non-zero.
   `ZSiaddr` holds the group's first pixel.
2. the **values** (`ZSitype = 0`) of the set bits, lowest bit first. Each is an
   unsigned Q8.8 word, and `ZSiaddr` holds the pixel address.

A word moves in each clock where `ZSivalid` and `ZSien` are both high. Empty groups
still send their (zero) map word. This layout of interleaved map and values is
taken from NullHop's published compression scheme. The signal names come from the
block diagram. Widths and the use of `ZSiaddr` are this implementation's choice.
Check them against your accelerator's input interface before connecting one.

## Interfaces and timing of the top (`dvs2sm_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | one clock domain; asynchronous active-low reset |
| `aer_data` | in | 13 | {y[5:0], x[5:0], pol}; pol = 1 is an ON event |
| `aer_req_n`, `aer_ack_n` | in / out | 1 | four-phase handshake, active low; REQ is synchronised inside |
| `cfg_data`, `cfg_addr`, `cfg_valid` | in | 32, 4, 1 | register write in every clock with `cfg_valid` |
| `ZSidata`, `ZSitype`, `ZSivalid`, `ZSiaddr` | out | 16, 1, 1, 12 | stream to the accelerator |
| `ZSien` | in | 1 | accelerator ready |
| `busy` | out | 1 | a frame is being processed |
| `dvs_stall` | out | 1 | an event waits because no bank is free |
| `frame_done` | out | 1 | pulse: a frame has been sent and its bank freed |
| `frame_mean`, `frame_sigma` | out | 24 | Q16.8 statistics of the frame in work |

Configuration: address 0 is Nev (1..65535; a write of 0 gives 1). Address 1 bit 0
selects rectified histograms (1: every event +1) or signed ones (0: ON +1, OFF −1;
a count that returns to 0 clears its mask bit and decrements c). Counts saturate
at the int16 limits. Change the registers only between frames. A frame that is
already full is processed with the rectify setting in force when processing starts.

Clock counts:

| step | clocks |
|---|---|
| one AER event, prompt sender | 7 (REQ to REQ); the collector itself needs 3 |
| DIV (mean) | 40 |
| VAR | 4096 + 64 (stream, then the division by c) |
| SQRT | 32 |
| NORM | 4096 + 9 |
| HT 2 LIST with SM STM | about 4096 (one pixel per clock), plus waits on `ZSien` |

Measured, `ZSien` always high: 12500 to 12530 clocks per 2048-event frame (about
650 active pixels), from the start of processing to the last word sent. At the
60 MHz clock of the paper's experiments that is 209 µs. The paper's HLS pipeline
needs 409 µs, with VAR 82 µs and NORM 286 µs, so this RTL is faster per stage but
does the same work. (The text also says "half a microsecond" for normalising and
sending a 64x64 frame. That agrees with neither its own stage times nor any
implementation of 4096 pixels at one per clock; read it as half a millisecond.)

The receiver takes an event every 7 clocks from a sender that reacts at once.
That is 117 ns at 60 MHz, somewhat slower than the sensor's quoted peak of 100 ns,
and 70 ns at 100 MHz. At that rate 2048 events take about 14300 clocks to
collect, longer than processing a frame. So with a prompt accelerator this
circuit never stalls the sensor, where the paper's pipeline does. Stalls happen
only when the accelerator keeps frames waiting.

## Departures and own choices

Taken from the source: the 64x64 histogram and the ping-pong of (DVSmem, SMarray)
pairs, collection of a configured Nev (2K) events, the CFG block with Nev, the stage
sequence DIV → VAR → SQRT → NORM → HT2SM, the normalisation formula and routine, the
22-fold NORM replication fed one pixel per clock, HT 2 LIST's (X, Y, value, valid)
output, the SM STM and its ZSi* signal names, and stopping the sensor when no
buffer is free.

Chosen here, because the source does not say:

* Fixed-point formats. The source's text says "Q24.16 internal, Q16.8 output" and
  defines Qn.m as n integer bits. Its printed code uses `ap_fixed<24,16>`
  (24 bits, 8 fractional) and `ap_fixed<16,8>`. The RTL follows the code.
* The NORM input labelled "Variance IN" is fed sigma, as the code uses it and the
  pipeline puts SQRT before NORM.
* AER: active-low four-phase, 13-bit word, events already in 64x64 coordinates. The
  down-sampling from the sensor's native resolution is not part of this RTL.
* The register map, reset values, signed/rectified counting and int16 saturation.
* S and c are accumulated during collection, so the mean can be computed at once.
* The divider, square-root and list-building circuits. The source built these with
  HLS and gives only their function.
* Stream format details (see above) and the bank clearing strategy.
* Latencies: 9 clocks per NORM block, against the source's 47 at 100 MHz.

Not included: the accelerator (NullHop), the ARM processing system and its
software, the AXI-DMA and its MM2S/S2MM adapters, the debug output, and the
sensor. The testbenches contain behavioural models of the sensor and of the
accelerator's input.

The source's resource table (513 DSP slices for its HLS version) does not carry
over. This RTL uses one multiplier per lane for f·255, a 26x26 squarer and the
adders, and no DSP-heavy division.

## Verification

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. The reference arithmetic (`tb/dvs2sm_ref_pkg.sv`)
is written from the formulas: integer division for the mean, a direct sum for the
variance, binary search for the square root, and plain division with clipping for
NORM. It does not mirror the circuits.

* `dvs2sm_top_tb` runs the whole circuit at its default parameters. A behavioural
  sensor sends a moving blob plus a hot pixel. A behavioural accelerator input
  applies random `ZSien` and, at first, a long hold. Three rectified frames of 2048
  events run, then a reconfiguration to signed frames of 1000 events and two more
  frames. Every output word of all five frames is compared with the model. The
  test also requires at least one bank swap, DVS stall, back-pressure cycle,
  result clipped to 1, result clipped to 0, and frame in each polarity mode. It
  runs in well under a second.
* `dvs2sm_rate_tb` times the Roshambo operating point at the default size:
  2048-event frames from a sensor at full speed, into an accelerator that never
  waits. It checks the event period (at most 8 clocks), the frame time (below
  the 24540 clocks that 409 µs gives at 60 MHz), complete frames, and that the
  sensor is never stalled.
* The block testbenches cover the corners: division by zero, int16 saturation,
  counts returning to zero, read-during-write, latency and rate checks,
  back-pressure, and an empty frame.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dvs2sm_pkg.sv tb/dvs2sm_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) tb/dvs2sm_top_tb.sv \
  --top-module dvs2sm_top_tb -o sim && ./obj_dir/sim
```

The packages come first. For a block test, put the block's testbench name in place
of `dvs2sm_top_tb`. The build is free of warnings at Verilator's default warning
level. `-Wall` adds lint notes, mostly about struct fields on the bank ports that a
stage does not use.

Sizes come from `dvs2sm_pkg`. A different resolution means changing `X_W` and `Y_W`
there. The top has two parameters: `NEV_RESET` is the reset value of Nev, and `LANES`
is the number of NORM blocks (at least 9 to keep one pixel per clock).
