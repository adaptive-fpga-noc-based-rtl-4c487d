# RGB distance processing module for multispectral image authentication

An art object can be authenticated by photographing it with a multispectral
camera and comparing that picture, pixel by pixel, with a reference picture
of the genuine work. Each pixel is not three colour values but a whole
spectrum: up to 400 samples (380 nm to 780 nm in 1 nm steps), each an 8-bit
integer. This RTL implements the first, cheapest comparison in that process:
both pictures are projected from spectra down to RGB, the colour distance of
every pixel pair is summed into an image distance R1, and R1 is tested
against a precision threshold P1. If R1 < P1 the pictures pass this test and
the system may go on to finer (more expensive) distance measures; otherwise
the compared picture is declared dissimilar.

The hardware is one *processing module* of a modular FPGA system in which
modules (acquisition, storage, control, processing) run on their own clocks
and exchange small command/result frames over a network, while the
high-bandwidth image data flows from the storage module to the processing
modules on separate paths. Only the processing module is given here; the
other modules appear as ports.

Terms used below:

* **OI** – the original image, the trusted reference, held by the storage module.
* **CI** – the compared image, the one being authenticated.
* **reference values** – for each wavelength k, three weights r(k), g(k),
  b(k) that turn a spectrum into R, G, B (a camera or observer response).

## What is computed

For every pixel pair the module computes, with integers only:

```
R = min(255, (sum_k S(k) * r(k)) >> 8)        likewise G with g(k), B with b(k)
dE = floor( sqrt( (R_oi-R_ci)^2 + (G_oi-G_ci)^2 + (B_oi-B_ci)^2 ) )
R1 = sum over all pixels of dE
similar = (R1 < P1)
```

Points to be aware of:

* The shift by 8 assumes the reference values of each colour are normalised
  so that their sum is at most 256; then R, G, B land in 0..255. With larger
  weights a component saturates at 255 and the module flags it
  (`sat_seen`). Loading suitably scaled reference values is the user's job.
* dE is truncated to an integer (0..441). A floating-point distance would
  give slightly larger R1 values; a threshold chosen for floating-point R1
  should be lowered by up to one unit per pixel.
* R1 is a sum, not a mean, so P1 has to be given as *pixels x allowed
  mean distance*. R1 is 32 bits wide and cannot overflow for images of up to
  2^23 - 1 pixels.
* The hardware is sized for `N_BANDS` wavelengths (400 by default), but the
  number in use can be changed at run time with the `SET_NBANDS` command,
  from 1 up to `N_BANDS`. This serves the authentication procedure the
  design is meant for: start with few wavelengths and, when the comparison
  is not conclusive, repeat it with more. Reference values and image data
  must then be streamed for that number of bands; the reference values have
  to be reloaded after a change.

## Structure

```
                 st_clk domain             |            clk domain
 storage module  --st_valid/st_data-->  interface_unit --> rgb_processing_unit
 (data flow)     <--st_ready---------   (dual-clock FIFO)   |  rgb_projection
                                                            |  delta_e_rgb -> isqrt
                                                            v
 network in  --rx--> communication_unit --frames--> decode_unit --commands--> control_unit
                     (receive block)                                          |  ^
 network out <--tx-- (send block) <--result frames-- storage_unit <--results--+  |
                                                                  load_ref/start, done
```

| Unit | File | Job |
|---|---|---|
| interface unit | `rtl/interface_unit.sv` | carries the 8-bit data stream from the storage module's clock into the module clock (16-word dual-clock FIFO, Gray-coded pointers, two-flop synchronisers) |
| processing unit | `rtl/rgb_processing_unit.sv` | reference loading, projection of OI and CI pixels, per-pixel distance, R1 and the verdict |
| projection | `rtl/rgb_projection.sv` | three multiply-accumulators, one sample per cycle, reference table of N_BANDS x 24 bits |
| distance | `rtl/delta_e_rgb.sv` | squares and sum in one cycle, then the square root |
| square root | `rtl/isqrt.sv` | restoring digit-by-digit root, one result bit per cycle |
| communication unit | `rtl/communication_unit.sv` | receive block (one-frame buffer, address match) and send block (round-robin merge of passing frames and result frames) |
| decode unit | `rtl/decode_unit.sv` | opcode to command, unknown opcodes to error commands |
| control unit | `rtl/control_unit.sv` | configuration registers (pixel count, P1, wavelengths in use) and the sequencing state machine |
| storage unit | `rtl/storage_unit.sv` | 4-frame FIFO of result frames waiting for the network |
| top | `rtl/rgb_processing_module.sv` | wires the units together |
| types | `rtl/mspec_pkg.sv` | sizes, frame layout, opcodes, command type |

## The data path and its timing

The data stream is a sequence of bytes. With B wavelengths in use (B =
`N_BANDS` unless `SET_NBANDS` said otherwise), after a `LOAD_REF` command
the next 3 x B bytes are the reference values, band by band, each band as
r, g, b. After a `START` command the stream carries, for each pixel in turn,
B OI samples and then B CI samples.

A single projection unit serves both images. It takes one sample per clock
cycle into three multiply-accumulators (one per colour), looking up the
band's reference values in its table; the cycle after a pixel's last sample
it delivers R, G, B. The OI colour is kept in a register; when the CI colour
of the same pixel arrives the pair is handed to the distance unit, which
needs 1 + 9 cycles (one for squares and sum, nine for the 9-bit root). A
pixel pair therefore occupies the input for 2 x B cycles (800 with 400
bands) and the distance of one pair is computed while the next pair streams
in. Only when 2 x B is shorter than the distance latency (about five bands or
fewer) does a finished pair have to wait; the
unit then lowers its input ready until the distance unit is free. With six
or more bands the module never stalls; the input FIFO is the only limit, and at the
50 MHz processing clock an image of P pixels takes 16 µs x P (about 4.2 s for
512 x 512 pixels).

The R1 frame and the verdict frame are produced a few cycles after the last
pixel's distance.

## Commands and results

Modules talk in 40-bit frames (`mspec_pkg::frame_t`):

| bits | field |
|---|---|
| 39:36 | destination address (control module = 0, this module = `MY_ADDR`, 1 by default) |
| 35:32 | opcode |
| 31:0 | payload |

| opcode | name | meaning |
|---|---|---|
| 0 | NOP | ignored |
| 1 | SET_NPIX | pixel count of the next image (23 bits used) |
| 2 | SET_P1 | threshold P1 |
| 3 | LOAD_REF | the next 3 x B data bytes (B = wavelengths in use) are reference values |
| 4 | START | correlate the next image |
| 5 | SET_NBANDS | wavelengths per spectrum in use, 1..N_BANDS (0 or more than N_BANDS: N_BANDS) |
| 8 | RESULT_R1 | sent by the module: payload = R1 |
| 9 | RESULT_AUTH | sent by the module: payload bit 0 = 1 when R1 < P1 |
| 15 | ERROR | sent by the module: an unknown opcode (in the payload) was received |

Frames for other addresses are passed on unchanged, so modules can be chained
into a ring as the system arranges them (control -> storage -> acquisition ->
processing modules -> control). When a passing frame and a result frame both
wait for the output, the send block alternates between them. Commands that
arrive while a correlation is running wait in the decode unit (and, behind
it, in the receive buffer, which then stops taking frames).

A typical session: `SET_NPIX`, `SET_P1`, optionally `SET_NBANDS`, `LOAD_REF` (+ reference bytes on
the data port), `START` (+ image bytes), then read `RESULT_R1` and
`RESULT_AUTH`. The reference table stays loaded across images.

## Clocks and reset

`st_clk` is the storage module's clock and clocks only the write side of the
interface FIFO; `clk` clocks everything else, including the frame ports.
The two may be unrelated. All flip-flops reset asynchronously on the active-
low reset of their domain (`st_rst_n`, `rst_n`); the memory arrays (FIFO
storage, reference table, result FIFO) have no reset and are never read
before being written. Deassert both resets together, or the write side
first.

## How this relates to the published system

The overall organisation follows a published FPGA design for multispectral
image correlation (Xilinx Virtex-4, a GALS network of modules, one RGB
distance processing module): the unit set of the processing module, the
data and command paths between them, the 8-bit samples, the 400-band
spectrum, the projection by RGB reference values, the RGB colour distance
and the R1 < P1 test come from there. That publication names the units but
does not describe their circuits, so the following are choices of this RTL:

* the weighted-sum projection with shift-and-saturate scaling, done one band
  per cycle;
* the integer square-root algorithm and integer result (the publication
  treats the root as floating point);
* R1 as the sum of per-pixel distances;
* the data-stream order, the reference loading through the data stream, the
  run-time band count, the frame format, opcodes and addresses, forwarding of frames addressed
  elsewhere and the round-robin send block;
* the dual-clock FIFO in the interface unit and the FIFO depths. The
  published interface and storage units are much smaller (a handful of
  flip-flops and about 60 flip-flops), so their real circuits differ.
* in the published unit diagram the processing unit feeds the storage unit
  directly and the control unit also talks to the interface unit. Here the
  control unit collects R1 and the verdict from the processing unit and
  writes them to the storage unit as frames, and the interface unit needs
  no control (it is a plain FIFO).
* the links between modules are synchronous valid/ready here; in the
  published system the network between modules is clockless (asynchronous),
  and it is not modelled.
* the published operation count for the distance is 400 times that of one
  RGB pair per pixel; this RTL computes one RGB distance per pixel pair.

Not included: the acquisition, storage and control modules, the clockless
network, the FPGA clock managers, and the other distance algorithms the
system may host in further processing modules.

## Simulation

Every unit has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Reference arithmetic used by the testbenches
is in `tb/mspec_model_pkg.sv`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/mspec_pkg.sv tb/mspec_model_pkg.sv tb/tb_rgb_processing_module.sv \
    --top-module tb_rgb_processing_module
./obj_dir/Vtb_rgb_processing_module
```

| testbench | what it covers |
|---|---|
| `tb_isqrt` | roots of edge and random values, latency of 9 cycles |
| `tb_rgb_projection` | 16-band projection against a model (also with 5 and 1 bands in use), saturation, result one cycle after the last sample |
| `tb_delta_e_rgb` | distances of random and extreme pairs, latency |
| `tb_rgb_processing_unit` | whole algorithm at 2 bands and at 1 band (forces input stalls), both verdicts, empty image |
| `tb_interface_unit` | ordering and loss-freedom across 100/50 MHz clocks, full and empty |
| `tb_storage_unit`, `tb_decode_unit`, `tb_control_unit`, `tb_communication_unit` | the control side unit by unit |
| `tb_rgb_processing_module` | end to end at 4 bands: passing frames, error frames, reference loading, FIFO back-pressure, stalls, network back-pressure, saturation, both verdicts, a change of the number of bands |
| `tb_rgb_processing_module_full` | the same at the default 400 bands, and at 100 bands in use (no stall may occur there); runs in a few seconds |

The end-to-end testbenches stand in for the storage module (a byte source at
100 MHz with random pauses) and the control module (a frame source and
sink). Assertions in the RTL check the handshake rules (held frames and
FIFO words stay stable) and that a distance pair is never overwritten;
Verilator's `--assert` enables them.

To change the largest spectrum, set `N_BANDS` on `rgb_processing_module`;
the reference table and all counters follow. `PIX_W` sets the
largest image (R1 widens with it, but result frames carry 32 bits).
