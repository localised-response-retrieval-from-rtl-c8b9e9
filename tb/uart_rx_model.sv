// uart_rx_model: behavioural serial receiver for the testbenches (not
// synthesizable, not part of the design).
//
// It watches a line that idles high, takes a falling edge as a start bit and
// samples the line at the ideal centre of each of the 10 bit times
// (start, 8 data bits LSB first, stop), computed in real arithmetic from
// CLK_FREQ and BAUD_RATE. It pulses `rx_valid` for one clock with the byte in
// `rx_data`, and raises `frame_err` for that byte if the start bit is not low
// at its centre or the stop bit is not high. `start_cycle` is the clock count
// at which the start edge was seen, so a testbench can measure frame spacing.
module uart_rx_model #(
  parameter int unsigned CLK_FREQ  = 150_000_000,
  parameter int unsigned BAUD_RATE = 12_000_000
) (
  input  logic        clk,
  input  logic        rxd,
  output logic        rx_valid,
  output logic [7:0]  rx_data,
  output logic        frame_err,
  output longint      start_cycle
);
  real    bit_clks;
  longint cyc;
  logic   busy;
  longint t0;
  logic [9:0] bits;

  initial begin
    bit_clks    = real'(CLK_FREQ) / real'(BAUD_RATE);
    cyc         = 0;
    busy        = 1'b0;
    rx_valid    = 1'b0;
    rx_data     = '0;
    frame_err   = 1'b0;
    start_cycle = 0;
    t0          = 0;
    bits        = '0;
  end

  logic rxd_prev = 1'b1;

  always @(posedge clk) begin
    cyc      <= cyc + 1;
    rx_valid <= 1'b0;
    rxd_prev <= rxd;
    if (!busy) begin
      if (rxd_prev && !rxd) begin
        busy <= 1'b1;
        t0   <= cyc;
      end
    end else begin
      // bit k centre lies (k + 0.5) bit times after the start edge
      for (int k = 0; k < 10; k++) begin
        if (cyc - t0 == longint'($floor((real'(k) + 0.5) * bit_clks))) bits[k] <= rxd;
      end
      if (cyc - t0 == longint'($floor(9.5 * bit_clks))) begin
        busy        <= 1'b0;
        rx_valid    <= 1'b1;
        rx_data     <= bits[8:1];
        frame_err   <= bits[0] || !rxd;
        start_cycle <= t0;
      end
    end
  end
endmodule
