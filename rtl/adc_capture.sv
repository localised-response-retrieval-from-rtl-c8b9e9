// adc_capture: input registers for the two 14-bit ADC buses and a snapshot
// register that freezes both channels at the same sample instant.
//
// The two ADCs run at the system clock (150 MS/s) and drive their parallel
// data buses continuously. Each bus passes through two register stages (the
// first one meant for the FPGA I/O cells), so the second stage holds the
// sample the ADCs presented two clock edges earlier. The UART can carry only
// a small fraction of the samples, so the consumer asks for a snapshot with a
// one-cycle `snap_req`; on the next edge the current registered samples of
// BOTH channels are copied into `snap` and `snap_valid` goes high. The
// snapshot is held, unchanged, until the consumer accepts it with
// `snap_ready` while `snap_valid` is high. A request that arrives while a
// snapshot is still held is ignored. All samples between two snapshots are
// dropped; `dropped` counts them (saturating) so the rate mismatch can be
// observed.
//
// Timing: ADC bus sampled at edge t -> second stage at t+1 -> snapshot at t+2 when
// snap_req was high in the cycle before edge t+2.
//
// That two 14-bit ADCs are read by the FPGA follows the published design.
// The register stages, the request/hold snapshot, the drop counter and
// the straight (offset-binary, unsigned) treatment of the ADC code are
// choices of this implementation: the published design does not describe
// how samples are picked for the slower serial link.
module adc_capture
  import digitiser_pkg::*;
#(
  parameter int unsigned W      = ADC_BITS,
  parameter int unsigned DROP_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // ADC parallel data buses (channel A = X, channel B = Y)
  input  logic [W-1:0]      adc_a,
  input  logic [W-1:0]      adc_b,
  // snapshot interface
  input  logic              snap_req,
  output logic              snap_valid,
  input  logic              snap_ready,
  output logic [W-1:0]      snap_a,
  output logic [W-1:0]      snap_b,
  // samples not snapped since reset (saturating)
  output logic [DROP_W-1:0] dropped
);

  logic [W-1:0] in_a, in_b;       // I/O register stage
  logic [W-1:0] live_a, live_b;   // second register stage
  logic         primed_q;     // live registers hold real samples
  logic [1:0]   fill_q;
  logic         take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_a   <= '0;
      in_b   <= '0;
      live_a <= '0;
      live_b <= '0;
      fill_q <= '0;
    end else begin
      in_a   <= adc_a;
      in_b   <= adc_b;
      live_a <= in_a;
      live_b <= in_b;
      if (fill_q != 2'd2) fill_q <= fill_q + 2'd1;
    end
  end

  assign primed_q = (fill_q == 2'd2);
  assign take     = snap_req && !snap_valid && primed_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap_valid <= 1'b0;
      snap_a     <= '0;
      snap_b     <= '0;
    end else begin
      if (take) begin
        snap_a     <= live_a;
        snap_b     <= live_b;
        snap_valid <= 1'b1;
      end else if (snap_valid && snap_ready) begin
        snap_valid <= 1'b0;
      end
    end
  end

  // Every primed cycle whose live sample is not copied into the snapshot
  // is a dropped sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dropped <= '0;
    end else if (primed_q && !take && (dropped != '1)) begin
      dropped <= dropped + 1'b1;
    end
  end

  // The snapshot must not change while it is offered.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
    snap_valid && !snap_ready |=> snap_valid && $stable(snap_a) && $stable(snap_b));

endmodule
