# MIMAC strip readout: ASIC digital part and acquisition FPGA in SystemVerilog

MIMAC is a micro-TPC for directional dark-matter search. Its anode carries two
orthogonal sets of 256 pixel strips (X and Y). Every strip has its own current
preamplifier and threshold comparator. The third coordinate of a recoil track
comes from time: the 512 comparator outputs are sampled every 20 ns, so a track
becomes a stack of "time slices", and each slice holds the X strips and Y strips
that were above threshold. A pixel has fired when its X strip and its Y strip
fire in the same slice.

The readout has to turn 512 bits every 20 ns (25.6 Gbit/s) into a USB stream.
It keeps only what belongs to tracks and sends each fired strip as a short
coordinate. This RTL covers the digital parts of that chain:

* the digital half of the 64-channel front-end ASIC: channel enables, 50 MHz
  sampling, 8:1 serializers and the slow configuration link;
* the acquisition FPGA: deserialization, per-group triggering and recording,
  X/Y coincidence, staged event building, the position FIFO, the grid-signal
  energy path with its filters and slope trigger, and the USB-side arbiter;
* the board top, with eight ASICs wired to the FPGA.

The analog front end is not RTL and appears only as ports. That covers the
preamplifiers, comparators and threshold DACs. The same holds for the PLL, the
LVDS pads, the flash ADC and the USB microcontroller.

## 1. One clock, slices as enables

Everything runs on one clock, the 400 MHz serializer bit clock `clk`. The
50 MHz sampling rate is a clock enable. `mimac_fpga` counts clock phases 0..7
and raises `sample_en` for one cycle in eight. It sends this enable to all
ASICs and to the flash ADC (`adc_sample`). This stands for the common 50 MHz
reference that lets all ASICs sample the same instant.

In the real board the ASICs run from their own PLLs and the links cross LVDS
pads. Modelling that as one synchronous clock is a simplification of this
design. It assumes that the link delay is shorter than one bit, so word framing
follows `sample_en` and needs no link training.

Slice timing seen by the FPGA:

| cycle (mod 8) | event |
|---|---|
| `sample_en` | ASIC serializers load the 8 sampled bits; deserializers capture the previous slice's last bit |
| `sample_en`+1 | `slice_en`: each group's 16-bit word of the previous slice is valid; the time counter advances; the X/Y coincidence of that slice is evaluated combinationally |
| the 6 following cycles | readout FSMs, merger tree, FIFOs and USB side work at one word per clock |

The 13-bit time counter (`time_counter`) counts slices while `run` is high. It
is cleared while `run` is low and wraps after 8192 slices (163.84 µs).

## 2. Front-end ASIC, digital part (`mimac_asic_digital`)

The 64 channels form 4 groups of 16. Each channel is gated by its enable bit
(dead channels can be killed) and then sampled. Each group has two 8-bit
serializers (`asic_serializer`). The "LSB" line carries channels 0–7 of the
group and the "MSB" line channels 8–15, bit 0 first, one bit per 400 MHz cycle.
That gives 8 lines for 64 channels, the factor-of-8 saving in wiring. Line
`ser_out[2g]` is group g's LSB line and `ser_out[2g+1]` its MSB line.

**Slow control** (`asic_slow_control`) is a 384-bit shift register:
64 channels × (1 enable bit + 5-bit DAC code).

* Pins: `sc_clk`, `sc_en` (shift), `sc_din`, `sc_load` (copy to the active
  configuration) and `sc_dout`.
* Frame order: channel 63 is shifted in first. Within a channel the enable bit
  comes first, then the DAC code MSB first.
* Reset: all channels enabled, all codes 0.
* On the board the eight ASICs are daisy-chained, with ASIC 0 nearest the input
  pin. A full board frame is 8 × 384 bits, and ASIC 7's part is sent first.

The frame layout and pin set are this design's own; the source gives only the
content.

## 3. Per-group recording (`asic_interface`)

This is the heart of the auto-triggering. Each of the 32 groups on the board
has the same chain:

```
LSB/MSB lines -> deserializer -> position_fsm -> raw_position_memory (1024 x 18) -> readout_fsm
                                      |  trig (OR of 16 strips)
                                      v
                     xy_coincidence (all 16 X groups vs all 16 Y groups) -> coinc
```

**Local trigger and coincidence.**
* `trig` is the OR of the group's 16 strips in the current slice.
* `coinc` is (any X group triggered) AND (any Y group triggered) in the same
  slice.
* The coincidence is formed from all 32 triggers in the cycle of `slice_en` and
  comes back to every group in that same cycle.

**Recording rule** (`position_fsm`), one decision per slice:

1. *Idle.* The group starts a record when it has at least one hit *and*
   `coinc` is set. It writes a time-tag word with the current slice number and
   keeps the slice's 16-bit pattern in a one-slice delay register.
2. *Recording.* Every following slice writes the delayed pattern of the slice
   before. Empty patterns are written too. After the tag, word k of a record
   therefore always belongs to slice `start + k - 1`, and no per-word time is
   stored. Once a record runs, coincidence is no longer required. A track that
   leaves the X/Y overlap for a few slices is kept.
3. *Closing.* After `gap_preset` consecutive empty slices the record closes and
   the trailing empty pattern is dropped. The value 0 counts as 1. This
   tolerates gaps in a track where the primary electrons were sparse.

**Memory word** (18 bits):

| bit 17 | bit 16 | bits 15..0 |
|---|---|---|
| 1 | 0 | `{3'b000, time[12:0]}`: start of record |
| 0 | 0 | hit pattern of one slice |

**Overflow.** The memory is a circular buffer shared with the reader through
read and write pointers that are one bit wider than the address. If it is full
when a word must be written, the running record is closed, or a new one is
not started, and `ovf` pulses.
The data already in the memory is consistent, so the reader never sees half a
word.

**Decoding** (`readout_fsm`) walks the memory one word at a time. The RAM read
is registered, so each word takes a fetch and a decode cycle.
* A time-tag word sets the current slice time.
* A data word produces one 16-bit position for each set bit, lowest channel
  first, each with the current time. Then the time advances by one slice.

A pattern with k strips costs k+2 cycles, and an empty pattern 2 cycles. The
output handshake is `data_available` / `acknowledge`: the word is held while
`data_available` is high and taken in a cycle with `acknowledge` high.

**Position word** (16 bits), as in the MIMAC encoding table:

| 15..13 | 12 | 11..10 | 9..8 | 7..4 | 3..0 |
|---|---|---|---|---|---|
| 000 | X=0 / Y=1 | ASIC in side | group | 0000 | channel |

ASICs 0–3 of the board are the X side and ASICs 4–7 the Y side. The side bit
is bit 2 of the board ASIC number, and bits 11..10 are its two low bits. The
zero fields are constant outputs of the decoder.

## 4. Event building (`time_merger`, `slice_packer`)

The 32 group streams are merged in three stages of `time_merger`:
* 4 groups into one ASIC stream (8 instances);
* 4 ASICs into one side stream (2 instances);
* X and Y into the final stream (1 instance).

Each stage has one output register. Whenever that register is free it takes the
valid input with the **oldest** time tag and acknowledges it. Age is measured
as `time_now - tag` modulo 2^13, so the rule survives the counter wrap. Ties go
to the lowest input index.

Every input is already in time order. So all positions of one slice leave a
stage together, and after the last stage the stream is in slice order. This is
the staged "aggregate data of the same time slice" of the original design. The
concrete merge rule and tree shape are this design's own.

`slice_packer` writes the final stream into the position FIFO
(`sync_fifo`, 4096 × 16, first-word-fall-through). It writes a header word
`{3'b100, time}` whenever the slice changes, followed by the positions of that
slice. A header can never look like a position because positions have bits
15..13 at zero. A slice with 2 X and 2 Y strips costs 4 position words
(64 bits) plus one header, where the raw hit data are 512 bits.

**Ordering limit.** Oldest-first is exact only while all waiting data are less
than 8192 slices old. A backlog that old, for example after the USB side has
stopped for more than 164 µs with full memories, can come out of order across
groups. Each group's own data stays in order.

**Throughput.** The tree moves one position per clock, which is 8 per slice.
Short bursts of more strips are absorbed by the 32 raw memories. A sustained
rate above that fills them until they overflow.

## 5. Energy path (`cic_filter`, `fir_filter`, `csp_recorder`)

The grid charge-sensitive preamplifier is digitised by a 10-bit flash ADC at
the slice rate. The FPGA filters it in two steps:

* `cic_filter`: order 2, differential delay 4, **no decimation**, so it is two
  cascaded 4-sample moving sums. The gain is 16 and the output is 14 bits. The
  output after sample n is the filtered value of sample n−3.
* `fir_filter`: binomial taps 1, 4, 6, 4, 1. The sum is shifted right by 4 and
  stays 14 bits.

The filter types come from the source. Order, delay, taps and the choice not to
decimate are this design's own; decimating would lose the 20 ns resolution of
the recorded pulse.

`csp_recorder` follows the rule that the position trigger *arms* the recording,
but the recording starts only when the grid signal itself rises. The grid
signal arrives with a different delay from the strip signals.

* Any group's record start loads an arming window of `arm_len` samples.
* While armed, the first sample with `y[n] - y[n-4] > slope_thr` triggers. This
  is a slope condition, more robust to noise than a level threshold.
* The record is a header `{3'b100, time of trigger slice}` followed by
  `REC_LEN` = 256 filtered samples. PRE−1 = 15 of them come before the trigger
  sample.
* A 32-entry ring buffer supplies the pre-trigger samples and absorbs FIFO
  stalls. If the energy FIFO stalls long enough for the ring to overrun, the
  record is cut short and `ovf` pulses.

Records go into their own 4096 × 16 energy FIFO.

## 6. USB side (`usb_bridge`)

The two FIFOs are drained into one 16-bit valid/ready stream
(`usb_valid`, `usb_data`, `usb_ready`). When both hold data the bridge
alternates word by word. `usb_src` tells the receiver which FIFO a word came
from: 0 is position, 1 is energy.

To parse the stream, split it by `usb_src`.
* Position words: a word with bits 15..13 = 100 opens a slice, and the
  following words are its positions.
* Energy words: a header word followed by 256 samples.

Matching energy records to tracks by time tag is left to the host software.

## 7. Board top (`mimac_readout`)

The top holds eight `mimac_asic_digital` and one `mimac_fpga`. Its ports are
the boundary to the parts that are not logic:

| port | meaning |
|---|---|
| `hits[8][64]` | comparator outputs of each ASIC |
| `dac_code[8][64]` | 5-bit threshold codes to the analog DACs |
| `sc_clk`, `sc_en`, `sc_din`, `sc_load`, `sc_dout` | daisy-chained configuration link (from the microcontroller) |
| `run`, `gap_preset`, `arm_len`, `slope_thr` | acquisition settings |
| `adc_sample`, `adc_data` | flash ADC strobe and 10-bit samples |
| `usb_valid`, `usb_data`, `usb_src`, `usb_ready` | stream to the USB microcontroller |
| `coinc`, `raw_ovf`, `energy_trig` | status pulses |

The reset `rst` is synchronous and active high; it clears all state. The
configuration enables cross from `sc_clk` to `clk` as static settings, so
change them only while `run` is low.

## 8. Parameters and sizes

| module | parameter | default | origin |
|---|---|---|---|
| `mimac_readout`, `mimac_fpga` | `N_ASIC` | 8 | source (8 ASICs, 4 per side) |
| `mimac_pkg` | `TIME_BITS` | 13 | source (13-bit time counter) |
| `mimac_pkg` | groups × channels | 4 × 16 | source |
| `raw_position_memory` | depth × width | 1024 × 18 | source |
| `asic_slow_control` | `DAC_BITS` | 5 | source |
| `sync_fifo` (both FIFOs) | `DEPTH` × `WIDTH` | 4096 × 16 | own choice |
| `cic_filter` | `ORDER`, `DIFF_DELAY` | 2, 4 | own choice |
| `csp_recorder` | `PRE`, `REC_LEN`, `SLOPE_DIST`, `RING` | 16, 256, 4, 32 | own choice |

At the defaults the design holds the 2 × 256-strip prototype. The position
word has two ASIC bits per side, so it cannot address more than 4 ASICs per
side. A 1024-strip chamber would need a wider encoding and 16 ASICs.

## 9. Where this RTL departs from or adds to the source

* **Adds:** memory word layout, slice header word, record overflow handling,
  merge rule, FIFO sizes, filter coefficients, recorder window and format, USB
  arbitration and source flag, slow-control frame, status outputs. These are
  this design's own; the source names the function but not the detail.
* **Serial links:** the text speaks of "8 LVDS serial links" for the board,
  while the ASIC diagram shows 8 serializers per ASIC. Only 8 lines per ASIC can
  carry 64 channels every 20 ns at 400 Mbit/s, so that reading is used.
* **Clocking:** one synchronous clock stands in for the per-ASIC PLLs and the
  LVDS links. There is no link deskew or training.
* **Not modelled:** the analog front end, including autozero offset correction,
  the comparators and the DACs; the PLL; the pads; the ADC chip; the USB
  microcontroller and its firmware; the host-side event association and
  display.

## 10. Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
testbenches compare against independent models:

* bit timing of the serial lines;
* moving-sum formulas for the filters;
* a queue model for the FIFO;
* a reference model of the recording rule for the group and board tests.

`tb/tb_event_gen_check.sv` is the shared stimulus and checker of the two
system tests. It generates recoil-like tracks crossing ASIC boundaries, X-only
noise without coincidence, grid pulses, and continuous strips that fill the
buffers. It parses the USB stream back into (time, position) pairs and energy
records and compares them as multisets with the model.

`tb_mimac_readout` runs the whole board with every parameter at its default:
eight ASICs, 1024-word memories, 4096-word FIFOs, 256-sample records. It takes
about 20 s. It configures all ASICs over the daisy chain and checks every DAC
code. It then counts each mechanism and fails if any never happened:

* coincidence start;
* gap close;
* ignored non-coincident hits;
* masked channels;
* merges;
* USB back-pressure;
* FIFO full;
* raw memory overflow;
* energy trigger and record.

`tb_mimac_fpga` does the same on the FPGA alone with small memories.

Running a test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/mimac_pkg.sv tb/tb_mimac_readout.sv \
  --top-module tb_mimac_readout -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. The design itself is plain
synthesizable SystemVerilog with one package (`mimac_pkg`) for the shared word
formats.
