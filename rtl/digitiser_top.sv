// digitiser_top: two-channel ADC read-out with a serial link to the host.
//
// The analogue front end reduces the 169 used anodes of an H9500
// multi-anode photomultiplier to two shaped signals, X and Y. Two 14-bit,
// 150 MS/s ADCs digitise them, and this logic reads both ADC buses and
// sends the samples to a host over a 12 Mbit/s UART (through an external
// UART-to-USB converter), each tagged with its channel letter:
//
//   adc_a, adc_b --> adc_capture --snapshot--> sample_formatter --bytes--> uart_tx --> uart_txd
//
// A full record pair ("A<value>\n" then "B<value>\n") is 6 to 14 bytes, i.e.
// 60 to 140 bit times (5 to 11.7 us at 12 Mbit/s), while the ADCs deliver a
// new pair every 6.7 ns. The serial link therefore carries a small sampled
// subset: each new snapshot of both channels is taken when the previous pair
// has been handed to the transmitter, and `samples_dropped` counts the
// samples in between.
//
// Clocking: one clock, `clk`, is taken to be the 150 MHz ADC sample clock,
// with both ADC buses synchronous to it. Reset `rst_n` is asynchronous,
// active low. The ADC count, resolution, sample rate, line rate and
// channel letters follow the published design; the single clock domain,
// the snapshot pacing and the record format are this design's choices.
module digitiser_top
  import digitiser_pkg::*;
#(
  parameter int unsigned CLK_FREQ  = CLK_HZ,
  parameter int unsigned BAUD_RATE = BAUD
) (
  input  logic                clk,
  input  logic                rst_n,
  // ADC data buses (AD9254, 14 bits each), channel A = X, channel B = Y
  input  logic [ADC_BITS-1:0] adc_a,
  input  logic [ADC_BITS-1:0] adc_b,
  // serial output to the UART-to-USB converter
  output logic                uart_txd,
  // status
  output logic                link_busy,        // a record pair is in flight
  output logic [15:0]         samples_dropped,
  output logic [31:0]         records_sent
);

  logic                snap_req, snap_valid, snap_ready;
  logic [ADC_BITS-1:0] snap_a, snap_b;
  logic                byte_valid, byte_ready;
  logic [7:0]          byte_data;

  adc_capture #(.W(ADC_BITS), .DROP_W(16)) u_capture (
    .clk, .rst_n,
    .adc_a, .adc_b,
    .snap_req, .snap_valid, .snap_ready,
    .snap_a, .snap_b,
    .dropped(samples_dropped)
  );

  sample_formatter #(.W(ADC_BITS), .DIGITS(DEC_DIGITS)) u_format (
    .clk, .rst_n,
    .snap_req, .snap_valid, .snap_ready,
    .snap_a, .snap_b,
    .byte_valid, .byte_ready, .byte_data,
    .busy(link_busy),
    .records_sent
  );

  uart_tx #(.CLK_FREQ(CLK_FREQ), .BAUD_RATE(BAUD_RATE)) u_uart (
    .clk, .rst_n,
    .tx_valid(byte_valid),
    .tx_ready(byte_ready),
    .tx_data (byte_data),
    .txd     (uart_txd)
  );

endmodule
