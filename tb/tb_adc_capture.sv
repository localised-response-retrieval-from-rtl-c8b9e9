// tb_adc_capture: self-checking testbench of the ADC input registers and the
// two-channel snapshot.
//
// Both ADC buses carry fresh random codes every clock, and the testbench
// keeps its own history of them. Snapshots are requested at random times
// and released after random hold times. Checks: a snapshot appears exactly
// one clock after its request and holds the codes both ADCs presented at the
// same clock edge, two edges before the snapshot edge (both channels from
// one instant); it stays unchanged while held; requests made while a
// snapshot is held are ignored; and the drop counter equals the number of
// samples that were not snapped.
module tb_adc_capture;
  localparam int W = 14;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [W-1:0] adc_a = '0, adc_b = '0;
  logic snap_req = 1'b0, snap_ready = 1'b0;
  logic snap_valid;
  logic [W-1:0] snap_a, snap_b;
  logic [15:0] dropped;
  int checks = 0, failures = 0;

  always #5ns clk = ~clk;

  adc_capture #(.W(W), .DROP_W(16)) dut (
    .clk, .rst_n, .adc_a, .adc_b,
    .snap_req, .snap_valid, .snap_ready, .snap_a, .snap_b, .dropped);

  // history of the codes present at each edge, indexed by edge number
  logic [W-1:0] hist_a [0:4095];
  logic [W-1:0] hist_b [0:4095];
  int edge_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  int snaps = 0, ignored = 0;

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      // drive new codes just after the edge
      adc_a = W'($urandom);
      adc_b = W'($urandom);
      hist_a[n % 4096] = adc_a;
      hist_b[n % 4096] = adc_b;
      @(posedge clk);
      #1;
      // requests and releases for the next edge
      snap_req   = ($urandom % 6) == 0;
      snap_ready = ($urandom % 3) == 0;
    end
    snap_req = 1'b0;
    snap_ready = 1'b0;
    repeat (2) @(posedge clk);
    check(snaps > 100 && ignored > 50, $sformatf("coverage snaps=%0d ignored=%0d", snaps, ignored));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model of the snapshot, evaluated at each edge before the DUT
  // state changes (values sampled with the edge)
  logic         m_valid = 1'b0;
  logic [W-1:0] m_a, m_b;
  int           m_drop = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      // at edge k the second register stage holds the codes driven for
      // edge k-2
      logic primed, take;
      primed = edge_n >= 2;
      take   = snap_req && !m_valid && primed;
      if (snap_req && m_valid) ignored++;
      if (take) begin
        m_a = hist_a[(edge_n - 2) % 4096];
        m_b = hist_b[(edge_n - 2) % 4096];
        snaps++;
      end
      if (primed && !take) m_drop++;
      if (take) m_valid = 1'b1;
      else if (m_valid && snap_ready) m_valid = 1'b0;
      #2;
      check(snap_valid == m_valid, $sformatf("snap_valid %0b exp %0b at edge %0d", snap_valid, m_valid, edge_n));
      if (m_valid) check(snap_a == m_a && snap_b == m_b,
        $sformatf("snapshot %0d/%0d exp %0d/%0d", snap_a, snap_b, m_a, m_b));
      check(dropped == 16'(m_drop), $sformatf("dropped %0d exp %0d", dropped, m_drop));
      edge_n++;
    end
  end

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
