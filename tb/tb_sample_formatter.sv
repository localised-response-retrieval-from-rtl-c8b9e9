// tb_sample_formatter: self-checking testbench of the record formatter.
//
// The testbench plays the snapshot source: when the formatter requests a
// snapshot it offers a pair of codes after a random delay. Codes are drawn
// so that every text length from 1 to 5 digits occurs, plus 0 and the
// full-scale 16383. The byte sink accepts with a random ready. The expected
// text of every pair is built independently with $sformatf("A%0d\nB%0d\n").
// Also checked: the first byte follows the snapshot handshake by one clock,
// a new snapshot is requested only after the last byte of the previous
// pair, and the record counter.
module tb_sample_formatter;
  localparam int W = 14;
  localparam int N_PAIRS = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic snap_req, snap_ready, byte_valid, busy;
  logic snap_valid = 1'b0, byte_ready = 1'b0;
  logic [W-1:0] snap_a = '0, snap_b = '0;
  logic [7:0] byte_data;
  logic [31:0] records_sent;
  int checks = 0, failures = 0;

  always #5ns clk = ~clk;

  sample_formatter #(.W(W), .DIGITS(5)) dut (
    .clk, .rst_n, .snap_req, .snap_valid, .snap_ready, .snap_a, .snap_b,
    .byte_valid, .byte_ready, .byte_data, .busy, .records_sent);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic logic [W-1:0] pick_code(input int i);
    case (i % 8)
      0: return W'($urandom % 10);
      1: return W'(10 + $urandom % 90);
      2: return W'(100 + $urandom % 900);
      3: return W'(1000 + $urandom % 9000);
      4: return W'(10000 + $urandom % 6384);
      5: return '0;
      6: return '1;
      default: return W'($urandom);
    endcase
  endfunction

  string expected[$];   // one string per pair, in order
  string got = "";
  int    pairs_done = 0;
  int    len_seen [1:5];
  logic  in_pair = 1'b0;
  int    hs_cycle = -10, cyc = 0;
  logic  first_byte_pending = 1'b0;

  // all inputs change at the falling edge
  always @(negedge clk) begin
    byte_ready <= ($urandom % 4) != 0;
  end

  // snapshot source
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < N_PAIRS; i++) begin
      logic [W-1:0] a, b;
      string sa;
      // wait for the request
      do @(posedge clk); while (!snap_req);
      check(!in_pair, "snapshot requested while a pair is still being sent");
      repeat ($urandom % 4) @(negedge clk);
      @(negedge clk);
      a = pick_code(i);
      b = pick_code(i + 3 + ($urandom % 5));
      snap_a = a;
      snap_b = b;
      snap_valid = 1'b1;
      expected.push_back($sformatf("A%0d\nB%0d\n", a, b));
      sa = $sformatf("%0d", a);
      len_seen[sa.len()]++;
      while (!snap_ready) @(negedge clk);
      @(posedge clk);
      hs_cycle = cyc;
      in_pair = 1'b1;
      first_byte_pending = 1'b1;
      @(negedge clk);
      snap_valid = 1'b0;
      snap_a = W'($urandom);  // must not matter any more
      snap_b = W'($urandom);
    end
    do @(posedge clk); while (!snap_req);
    repeat (5) @(posedge clk);
    check(pairs_done == N_PAIRS, $sformatf("pairs done %0d", pairs_done));
    check(records_sent == 32'(2 * N_PAIRS), $sformatf("records_sent %0d", records_sent));
    for (int l = 1; l <= 5; l++) check(len_seen[l] > 10, $sformatf("%0d-digit values seen %0d", l, len_seen[l]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // byte sink: collect bytes, compare each complete pair
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (byte_valid && first_byte_pending && cyc == hs_cycle + 1) begin
      checks++;
      first_byte_pending <= 1'b0;
    end else if (first_byte_pending && cyc == hs_cycle + 1) begin
      failures++;
      checks++;
      first_byte_pending <= 1'b0;
      $display("FAIL first byte not one clock after the snapshot");
    end
    if (byte_valid && byte_ready) begin
      string s;
      s = got;
      s = {s, string'(byte_data)};
      got = s;
      if (expected.size() > 0 && got.len() == expected[0].len()) begin
        string e;
        e = expected.pop_front();
        check(got == e, $sformatf("pair %0d: got \"%s\" exp \"%s\"", pairs_done, got, e));
        got = "";
        pairs_done++;
        in_pair = 1'b0;
      end
    end
  end

  initial begin
    for (int l = 1; l <= 5; l++) len_seen[l] = 0;
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
