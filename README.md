# Two-channel X/Y digitiser with a 12 Mbit/s serial link

This is the FPGA logic of a small read-out for a position-sensitive
scintillation detector. A pixelated plastic scintillator (2.8 mm pixels)
sits on a 256-anode photomultiplier, of which 169 anodes (a 13 x 13 grid)
are used. A resistive charge-division network shares each anode's pulse
between 13 X lines and 13 Y lines, and shaping and summing amplifiers reduce
those 26 lines to just two analogue signals, X and Y, whose amplitudes encode
where the interaction happened. Two 14-bit ADCs sample X and Y at 150 MS/s.
The logic described here reads both ADCs and sends the samples to a host
computer through a UART-to-USB converter at 12 Mbit/s, each sample tagged with
its channel letter, `A` or `B`, as plain text (`A4087`, `B6743`, ...).

Everything before the ADC pins (scintillator, photomultiplier, resistor
network, amplifiers), the ADC chips, the USB converter and the host software
that does pulse-shape discrimination are outside this RTL.

## The rate gap, and how samples are chosen

The most important thing to understand is that the serial link is about a
thousand times slower than the ADCs:

| quantity | value |
|---|---|
| ADC output | 2 channels x 150 MS/s x 14 bit = 4.2 Gbit/s of raw data |
| one text record | 3 to 7 bytes = 30 to 70 bit times |
| one record pair (A and B) | 60 to 140 bit times = 5.0 to 11.7 us at 12 Mbit/s |
| pairs per second the link can carry | about 86 000 to 200 000 |

So only one sample instant in roughly 750 to 1750 can be sent. The design
handles this with a *snapshot*: whenever the transmit path has handed the last
byte of a pair to the UART, it asks the capture stage for a new snapshot, and
the capture stage copies **both** channels from the **same** clock edge into a
hold register. X and Y therefore always belong together, which matters
because a position is computed from the pair. Everything between two
snapshots is discarded, and a saturating counter (`samples_dropped`) shows
how much.

This choice has a clear consequence: the design does not record pulse
shapes. A scintillation pulse lasts some 30 to 100 ns, i.e. 5 to 15 samples,
and consecutive samples of one pulse are never sent. Snapshots land at
effectively random times relative to pulses. The source design leaves open
how samples are selected for the link (it also reports that this 150 MS/s
system could not separate neutrons from gamma rays). A trigger, a pulse
buffer or on-chip charge integration would be needed for pulse-shape work;
none of these is described, so none is built.

## What goes over the wire

Each snapshot becomes two text records, A first:

```
A<decimal value of channel A>\n
B<decimal value of channel B>\n
```

* The letter is ASCII `A` (0x41) or `B` (0x42). Channel A is the X signal,
  B the Y signal.
* The value is the 14-bit ADC code, 0 to 16383, in decimal ASCII, most
  significant digit first, with no leading zeros (`A0`, `A7`, `A16383`).
* Each record ends with a line feed (0x0A).

On the line, every byte is one UART frame: start bit, 8 data bits LSB first,
no parity, one stop bit, idle high. The bytes of a pair leave back to back.

The letters and the decimal text follow the published examples; the line
feed, the missing leading zeros and the frame format are this design's
choices, because none is specified.

## Bit timing: 12.5 clocks per bit

The system clock is taken to be the 150 MHz ADC sample clock. At 12 Mbit/s
one bit lasts 12.5 clocks, which an integer divider cannot produce. The
transmitter uses a phase accumulator instead: each clock adds 12 000 000, and
a bit ends when the sum reaches 150 000 000 (the remainder is kept). The
accumulator starts each frame at half a step, so bits alternate 12 and 13
clocks and every 10-bit frame lasts exactly 125 clocks, 0 % average rate
error and at most half a clock (4 %) of jitter on any edge, well inside what a
UART receiver tolerates. Other clock and line rates are set with the
`CLK_FREQ` and `BAUD_RATE` parameters.

## Blocks

```
adc_a[13:0] --+                       +------------------+                +---------+
              +--> adc_capture --snap-> sample_formatter --byte stream--> uart_tx --+--> uart_txd
adc_b[13:0] --+   (2 input regs,       | (BCD convert,    |  valid/ready   | (8N1,   |
                   snapshot, drop      |  letters, LF)    |                |  12.5   |
                   counter)            +------------------+                |  clk/bit)
```

| file | role |
|---|---|
| `rtl/digitiser_pkg.sv` | widths, clock and line rates, ASCII constants, sample types |
| `rtl/adc_capture.sv` | two register stages on each ADC bus; snapshot register with request / valid / ready; drop counter |
| `rtl/sample_formatter.sv` | requests snapshots, converts both codes to decimal (double dabble), emits the two records byte by byte |
| `rtl/uart_tx.sv` | 8N1 transmitter with accumulator-based bit timing; takes a new byte in the last clock of a stop bit |
| `rtl/digitiser_top.sv` | wires the three together; single clock, asynchronous active-low reset |

Top-level ports of `digitiser_top`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 150 MHz ADC sample clock |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `adc_a`, `adc_b` | in | 14 | ADC data buses, synchronous to `clk`, offset binary |
| `uart_txd` | out | 1 | serial data to the UART-to-USB converter |
| `link_busy` | out | 1 | a record pair is being converted or sent |
| `samples_dropped` | out | 16 | saturating count of ADC sample instants not sent |
| `records_sent` | out | 32 | records handed to the UART |

### Handshakes and latency

* **Capture.** The ADC bus is registered at edge t and reaches the second
  stage at t+1. A snapshot taken at edge t+2 holds that code.
  `snap_req` is honoured only when no snapshot is held. `snap_valid` then
  stays high, with the data frozen, until `snap_ready` (an assertion checks
  this).
* **Formatter.** It holds `snap_req` high until a snapshot is offered and
  accepts it in the same clock. Its first byte appears one clock later.
  `byte_valid`/`byte_data` stay stable until `byte_ready` (asserted).
* **UART.** `tx_ready` is high when the line is idle, and in the last clock
  of a stop bit. This lets a stream of bytes run at exactly 125 clocks per
  byte.

End to end, from the last byte of one pair being taken by the UART, a new
snapshot is taken 1 clock later. Its first frame starts on the UART's next
stop-bit boundary.

### Resources

After generic synthesis, the whole top has about 230 flip-flops and no
memories. Most of the logic is the two combinational binary-to-BCD
converters.

## What follows the source and what is this design's own

Taken from the published system: two 14-bit ADCs at 150 MS/s read by an
FPGA; samples sent to a host over a UART-to-USB link at 12 Mbit/s; each sample
carrying a channel identifier `A` or `B`, written as in `A4087`.

Chosen here, because the source says nothing on them:

* the FPGA clock equals the ADC sample clock, with a single clock domain;
* the snapshot scheme that picks which samples are sent, and the drop counter;
* straight (unsigned, offset-binary) treatment of the ADC codes;
* the record format details: decimal without leading zeros, line-feed
  terminator, A before B;
* the UART frame (8N1, no flow control) and the accumulator bit timing;
* the reset style and the two input register stages.

Not built: anything analogue, the ADC configuration interface, clock
generation for the ADCs, and host-side processing. Charge-comparison pulse-
shape discrimination (short against long integral) is done on the host in the
source and is not part of this logic. A separate 500 MS/s single-channel
digitiser is compared in the source; it is not part of this design.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_digitiser_top \
    rtl/digitiser_pkg.sv rtl/adc_capture.sv rtl/sample_formatter.sv \
    rtl/uart_tx.sv rtl/digitiser_top.sv tb/uart_rx_model.sv tb/tb_digitiser_top.sv
./obj_dir/Vtb_digitiser_top
```

| testbench | what it checks |
|---|---|
| `tb/tb_adc_capture.sv` | Random codes on both buses each clock, with random requests and releases. Checked against a reference model: the snapshot timing, that both channels come from one edge, that the snapshot holds while waiting, and the drop count. |
| `tb/tb_sample_formatter.sv` | Codes of every length from 1 to 5 digits, plus 0 and 16383, with random back-pressure. The byte text is compared with `$sformatf("A%0d\nB%0d\n")`. Also checked: one-clock latency to the first byte, and that no request is made mid-pair. |
| `tb/tb_uart_tx.sv` | 300 random bytes, in bursts and singly. An ideal-centre receiver decodes them. A burst must give exactly 125 clocks per frame. |
| `tb/tb_digitiser_top.sv` | The whole design at its default 150 MHz / 12 Mbit/s. Random ADC codes over ranges that change with time. The line is decoded and every A/B pair must have been on the two buses at the same clock. Bytes of a pair must be 125 clocks apart. Records of every length must occur, and samples must have been dropped. |

`tb/uart_rx_model.sv` is a behavioural receiver used by the last two. The
full-design testbench runs in well under a second of simulator time.

To change the line rate, override `BAUD_RATE` (and `CLK_FREQ` if the clock is
not 150 MHz) on `digitiser_top`. To change the ADC width, edit `ADC_BITS` and
`DEC_DIGITS` in the package together.
