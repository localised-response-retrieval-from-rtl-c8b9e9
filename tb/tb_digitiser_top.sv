// tb_digitiser_top: end-to-end testbench of the two-channel digitiser at its
// default configuration (150 MHz ADC clock, 12 Mbit/s serial line).
//
// Both ADC buses are driven with new random codes every clock; the code
// range changes every few thousand clocks (full scale, under 10, under 100,
// under 1000, all zero) so that every text length occurs. The testbench
// keeps a history of the codes per clock. A behavioural serial receiver
// decodes the line into text; each pair of records "A<a>\n" "B<b>\n" must
// parse, and (a, b) must have been on the two ADC buses at the same clock
// edge (both channels from one instant), later than the previous pair.
// Bytes of a pair must leave back to back, one 10-bit frame per 125 clocks
// (12 Mbit/s). Counted mechanisms, each of which must occur: records of
// every length 1..5 digits, back-to-back frames, samples dropped between
// snapshots, and both channel letters.
module tb_digitiser_top;
  localparam int N_PAIRS = 250;
  localparam int HIST    = 8192;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [13:0] adc_a = '0, adc_b = '0;
  logic uart_txd, link_busy;
  logic [15:0] samples_dropped;
  logic [31:0] records_sent;
  int checks = 0, failures = 0;

  always #3.333ns clk = ~clk;

  digitiser_top dut (
    .clk, .rst_n, .adc_a, .adc_b, .uart_txd,
    .link_busy, .samples_dropped, .records_sent);

  logic       rx_valid, frame_err;
  logic [7:0] rx_data;
  longint     start_cycle;
  uart_rx_model #(.CLK_FREQ(150_000_000), .BAUD_RATE(12_000_000)) rx (
    .clk, .rxd(uart_txd), .rx_valid, .rx_data, .frame_err, .start_cycle);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // ADC stimulus and history (codes present at posedge number cyc)
  logic [13:0] hist_a [HIST];
  logic [13:0] hist_b [HIST];
  longint cyc = 0;
  int     mode = 0;

  always @(negedge clk) begin
    logic [13:0] lim;
    if (cyc % 3000 == 0) mode = int'($urandom % 5);
    unique case (mode)
      0: lim = 14'h3FFF;
      1: lim = 14'd9;
      2: lim = 14'd99;
      3: lim = 14'd999;
      default: lim = 14'd0;
    endcase
    if (mode == 0) begin
      adc_a = 14'($urandom);
      adc_b = 14'($urandom);
    end else begin
      adc_a = 14'($urandom % (int'(lim) + 1));
      adc_b = 14'($urandom % (int'(lim) + 1));
    end
    hist_a[cyc % HIST] = adc_a;
    hist_b[cyc % HIST] = adc_b;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int len_seen [1:5];
  int n_a = 0, n_b = 0, n_b2b = 0;
  int pairs = 0;
  longint last_match = -1;
  longint last_start = -1;
  int     bytes_in_pair = 0;
  string  line = "";
  int     val_a = -1;

  function automatic int parse_digits(input string s, output int v);
    v = 0;
    if (s.len() < 1 || s.len() > 5) return 0;
    for (int i = 0; i < s.len(); i++) begin
      if (s[i] < "0" || s[i] > "9") return 0;
      v = v * 10 + int'(s[i] - "0");
    end
    if (s.len() > 1 && s[0] == "0") return 0;  // no leading zeros
    return 1;
  endfunction

  always @(posedge clk) begin
    if (rx_valid) begin
      check(!frame_err, "framing error");
      // bytes of one pair leave back to back: 125 clocks per frame
      if (bytes_in_pair > 0) begin
        check(start_cycle - last_start == 125,
              $sformatf("frame spacing %0d clocks inside a pair", start_cycle - last_start));
        if (start_cycle - last_start == 125) n_b2b++;
      end
      last_start = start_cycle;
      bytes_in_pair++;
      if (rx_data != 8'h0A) begin
        line = {line, string'(rx_data)};
      end else begin
        int v;
        string digits;
        digits = line.substr(1, line.len() - 1);
        check(parse_digits(digits, v) == 1, $sformatf("bad record \"%s\"", line));
        if (line[0] == "A") begin
          check(val_a < 0, "two A records in a row");
          val_a = v;
          n_a++;
          len_seen[digits.len()]++;
        end else if (line[0] == "B") begin
          longint found;
          n_b++;
          check(val_a >= 0, "B record without A record");
          len_seen[digits.len()]++;
          // search the history for the clock at which both codes were present
          found = -1;
          // earliest clock after the previous pair's snapshot
          for (longint c = (last_match + 1 > cyc - HIST + 2) ? last_match + 1 : cyc - HIST + 2;
               c <= cyc; c++) begin
            if (int'(hist_a[c % HIST]) == val_a && int'(hist_b[c % HIST]) == v) begin
              found = c;
              break;
            end
          end
          check(found >= 0, $sformatf("pair A%0d B%0d never on the ADC buses together", val_a, v));
          if (found >= 0) last_match = found;
          val_a = -1;
          pairs++;
          bytes_in_pair = 0;
        end else begin
          check(0, $sformatf("unknown channel letter in \"%s\"", line));
        end
        line = "";
      end
    end
  end

  initial begin
    for (int l = 1; l <= 5; l++) len_seen[l] = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (pairs == N_PAIRS);
    repeat (10) @(posedge clk);
    $display("pairs=%0d A=%0d B=%0d back-to-back=%0d dropped=%0d records_sent=%0d",
             pairs, n_a, n_b, n_b2b, samples_dropped, records_sent);
    for (int l = 1; l <= 5; l++) begin
      $display("  %0d-digit records: %0d", l, len_seen[l]);
      check(len_seen[l] > 0, $sformatf("no %0d-digit record", l));
    end
    check(n_a == N_PAIRS && n_b == N_PAIRS, "channel record counts");
    check(n_b2b > 0, "no back-to-back frames");
    check(samples_dropped > 0, "no dropped samples");
    check(records_sent >= 32'(2 * N_PAIRS), $sformatf("records_sent %0d", records_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
