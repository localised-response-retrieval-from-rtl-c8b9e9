// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, one
// stop bit, least significant bit first, line idle high.
//
// The line rate is set by BAUD against the clock CLK_HZ. At the published
// figures (12 Mbit/s from a 150 MHz clock) one bit is 12.5 clocks, which no
// integer divider gives, so the bit timing comes from a phase accumulator:
// every clock it adds BAUD, and a bit boundary falls when it passes CLK_HZ.
// Bits then last 12 or 13 clocks in turn and a 10-bit frame lasts exactly
// 125 clocks, the exact average rate. The accumulator restarts at each
// start bit, so every frame has the same shape.
//
// Interface: a byte is taken when `tx_valid` and `tx_ready` are both high;
// `tx_ready` is high while the line is idle and also in the last clock of a
// stop bit, so back-to-back bytes follow with no idle time between the stop
// bit and the next start bit. A byte taken at clock edge t drives its start
// bit from edge t to the next bit boundary.
//
// The 12 Mbit/s rate follows the published design; the frame format and
// the accumulator-based timing are choices of this implementation.
module uart_tx
  import digitiser_pkg::*;
#(
  parameter int unsigned CLK_FREQ = CLK_HZ,
  parameter int unsigned BAUD_RATE = BAUD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_valid,
  output logic       tx_ready,
  input  logic [7:0] tx_data,
  output logic       txd
);

  localparam int unsigned ACC_W = $clog2(CLK_FREQ + BAUD_RATE) + 1;

  logic [ACC_W-1:0] acc_q;
  logic [9:0]       shreg_q;     // stop, data[7:0], start (bit 0 sent first)
  logic [3:0]       bits_left_q; // bits of the frame still to finish
  logic             active_q;
  logic [ACC_W-1:0] acc_sum;
  logic             bit_end;
  logic             last_bit;

  assign acc_sum  = acc_q + ACC_W'(BAUD_RATE);
  assign bit_end  = acc_sum >= ACC_W'(CLK_FREQ);
  assign last_bit = active_q && bit_end && (bits_left_q == 4'd1);
  assign tx_ready = !active_q || last_bit;
  assign txd      = active_q ? shreg_q[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q       <= '0;
      shreg_q     <= '1;
      bits_left_q <= '0;
      active_q    <= 1'b0;
    end else if (!active_q || last_bit) begin
      if (tx_valid) begin
        shreg_q     <= {1'b1, tx_data, 1'b0};
        bits_left_q <= 4'd10;
        active_q    <= 1'b1;
        // start half a clock step in, so 12.5-clock bits alternate 12/13
        acc_q       <= ACC_W'(BAUD_RATE / 2);
      end else begin
        // the stop bit of the last frame ends with nothing to follow
        active_q    <= 1'b0;
        shreg_q     <= '1;
        bits_left_q <= '0;
        acc_q       <= '0;
      end
    end else begin
      if (bit_end) begin
        acc_q       <= acc_sum - ACC_W'(CLK_FREQ);
        shreg_q     <= {1'b1, shreg_q[9:1]};
        bits_left_q <= bits_left_q - 4'd1;
      end else begin
        acc_q <= acc_sum;
      end
    end
  end

  // The frame can only end on a bit boundary.
  a_frame : assert property (@(posedge clk) disable iff (!rst_n)
    active_q && !bit_end |=> active_q);

endmodule
