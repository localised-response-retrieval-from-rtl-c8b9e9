// tb_uart_tx: self-checking testbench of the serial transmitter at the
// published 150 MHz clock and 12 Mbit/s line rate.
//
// Random bytes are offered in bursts (back to back) and singly (with idle
// gaps). A behavioural receiver samples each bit at its ideal centre; every
// received byte must equal the one offered, in order, with valid start and
// stop bits. The line rate is checked from the spacing of start edges in a
// burst: 10 bits at 12 Mbit/s from 150 MHz must take exactly 125 clocks.
module tb_uart_tx;
  localparam int unsigned CLK_FREQ  = 150_000_000;
  localparam int unsigned BAUD_RATE = 12_000_000;
  localparam int          N_BYTES   = 300;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic tx_valid, tx_ready, txd;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;

  always #3.333ns clk = ~clk;

  uart_tx #(.CLK_FREQ(CLK_FREQ), .BAUD_RATE(BAUD_RATE)) dut (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_data, .txd);

  logic       rx_valid, frame_err;
  logic [7:0] rx_data;
  longint     start_cycle;
  uart_rx_model #(.CLK_FREQ(CLK_FREQ), .BAUD_RATE(BAUD_RATE)) rx (
    .clk, .rxd(txd), .rx_valid, .rx_data, .frame_err, .start_cycle);

  logic [7:0] sent_q[$];
  int         received = 0;
  longint     last_start = -1;
  logic       last_b2b = 1'b0;
  logic       b2b_flag[$];
  int         spacing_checked = 0;

  // checker
  always @(posedge clk) begin
    if (rx_valid) begin
      logic [7:0] exp_b;
      logic       b2b;
      exp_b = sent_q.pop_front();
      b2b   = b2b_flag.pop_front();
      checks++;
      if (rx_data !== exp_b || frame_err) begin
        failures++;
        $display("FAIL byte %0d: got %02h exp %02h frame_err=%0b", received, rx_data, exp_b, frame_err);
      end
      if (b2b && last_start >= 0) begin
        checks++;
        spacing_checked++;
        if (start_cycle - last_start != 125) begin
          failures++;
          $display("FAIL frame spacing %0d clocks, expected 125", start_cycle - last_start);
        end
      end
      last_start = start_cycle;
      received++;
    end
  end

  // line must idle high after reset
  initial begin
    tx_valid = 1'b0;
    tx_data  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);
    checks++;
    if (txd !== 1'b1 || tx_ready !== 1'b1) begin
      failures++;
      $display("FAIL idle line txd=%0b ready=%0b", txd, tx_ready);
    end
    // inputs change on the falling edge; a byte is taken at the rising
    // edge that finds tx_valid and tx_ready both high
    for (int i = 0; i < N_BYTES; i++) begin
      logic burst;
      burst = (i % 20) < 14;           // 14 back to back, then 6 with gaps
      @(negedge clk);
      tx_data  = 8'($urandom);
      tx_valid = 1'b1;
      while (!tx_ready) @(negedge clk);
      @(posedge clk);
      sent_q.push_back(tx_data);
      b2b_flag.push_back(last_b2b);
      last_b2b = burst;
      if (!burst) begin
        @(negedge clk);
        tx_valid = 1'b0;
        repeat (130 + ($urandom % 200)) @(negedge clk);
      end
    end
    @(negedge clk);
    tx_valid = 1'b0;
    repeat (400) @(posedge clk);
    checks++;
    if (received != N_BYTES || spacing_checked < 100) begin
      failures++;
      $display("FAIL received %0d of %0d, spacing checks %0d", received, N_BYTES, spacing_checked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
