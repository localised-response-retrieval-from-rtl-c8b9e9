// digitiser_pkg: constants and types shared by the two-channel digitiser.
//
// The digitiser reads two 14-bit ADCs (one for the X coordinate signal, one
// for the Y coordinate signal of the resistive read-out network) and sends
// every transmitted sample to a host over a 12 Mbit/s UART, tagged with its
// channel letter, 'A' or 'B'. The ADC width, the 150 MS/s sample rate, the
// 12 Mbit/s line rate and the two letters follow the published design; the
// system clock being the ADC sample clock, the ASCII coding and the
// line-feed terminator are choices of this implementation.
package digitiser_pkg;

  // ADC resolution (AD9254: 14 bits).
  localparam int unsigned ADC_BITS = 14;
  // System clock = ADC sample clock, 150 MHz.
  localparam int unsigned CLK_HZ   = 150_000_000;
  // UART line rate towards the UART-to-USB converter.
  localparam int unsigned BAUD     = 12_000_000;

  // Decimal digits needed for the largest 14-bit value (16383).
  localparam int unsigned DEC_DIGITS = 5;

  localparam logic [7:0] CHAN_A_ID = 8'h41;  // 'A'
  localparam logic [7:0] CHAN_B_ID = 8'h42;  // 'B'
  localparam logic [7:0] REC_END   = 8'h0A;  // line feed ends a record
  localparam logic [7:0] ASCII_0   = 8'h30;  // '0'

  typedef logic [ADC_BITS-1:0] sample_t;

  // One simultaneous snapshot of both channels.
  typedef struct packed {
    sample_t a;
    sample_t b;
  } sample_pair_t;

endpackage
