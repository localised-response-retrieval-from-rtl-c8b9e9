// sample_formatter: turns a two-channel snapshot into channel-tagged text
// records for the serial link.
//
// The published read-out sends each sample with a channel identifier, for
// example "A4087" and "B6743". This block asks the capture stage for a
// snapshot (`snap_req`, held high until a snapshot is offered), accepts it (`snap_valid`/`snap_ready`),
// converts both 14-bit values to decimal with a double-dabble converter and
// then emits, one byte per accepted handshake on the byte port:
//
//     'A', decimal digits of channel A, LF, 'B', decimal digits of B, LF
//
// Digits are ASCII, most significant first, without leading zeros (a value
// of 0 is sent as a single '0'), so a record is 3 to 7 bytes long. When the
// last byte of the B record has been accepted, the next snapshot is
// requested, so the sampling rate adapts itself to what the link can carry.
//
// Byte port: `byte_valid` stays high with `byte_data` stable until
// `byte_ready`; it advances by one byte per cycle when `byte_ready` is held
// high. From the snapshot handshake to the first byte is one clock. Every
// byte is 7-bit ASCII, so `byte_data[7]` is always 0.
//
// The channel letters and the decimal text follow the published examples;
// the terminator byte, the absence of leading zeros, the order A then B and
// the request-driven pacing are choices of this implementation.
module sample_formatter
  import digitiser_pkg::*;
#(
  parameter int unsigned W      = ADC_BITS,
  parameter int unsigned DIGITS = DEC_DIGITS
) (
  input  logic         clk,
  input  logic         rst_n,
  // snapshot side
  output logic         snap_req,
  input  logic         snap_valid,
  output logic         snap_ready,
  input  logic [W-1:0] snap_a,
  input  logic [W-1:0] snap_b,
  // byte side (to the UART transmitter)
  output logic         byte_valid,
  input  logic         byte_ready,
  output logic [7:0]   byte_data,
  // status
  output logic         busy,
  output logic [31:0]  records_sent
);

  typedef enum logic [1:0] {S_REQ, S_WAIT, S_SEND} state_t;
  typedef enum logic [1:0] {P_LETTER, P_DIGIT, P_END} pos_t;

  typedef logic [3:0] bcd_t [DIGITS];

  // Binary to BCD (shift and add 3). Digit 0 is the most significant.
  function automatic logic [4*DIGITS-1:0] to_bcd(input logic [W-1:0] bin);
    logic [4*DIGITS-1:0] bcd;
    bcd = '0;
    for (int i = W - 1; i >= 0; i--) begin
      for (int d = 0; d < DIGITS; d++) begin
        if (bcd[4*d +: 4] >= 4'd5) bcd[4*d +: 4] = bcd[4*d +: 4] + 4'd3;
      end
      bcd = {bcd[4*DIGITS-2:0], bin[i]};
    end
    return bcd;
  endfunction

  // Index (0 = most significant) of the first digit to send.
  function automatic logic [2:0] first_digit(input logic [4*DIGITS-1:0] bcd);
    logic [2:0] idx;
    idx = 3'(DIGITS - 1);
    for (int d = 1; d < DIGITS; d++) begin
      // nibble d counts from the least significant end; the last digit is
      // always sent, and the most significant non-zero digit wins
      if (bcd[4*d +: 4] != 4'd0) idx = 3'(DIGITS - 1 - d);
    end
    return idx;
  endfunction

  state_t              state_q;
  pos_t                pos_q;
  logic                chan_q;        // 0 = A, 1 = B
  logic [2:0]          dig_q;         // digit index, 0 = most significant
  logic [4*DIGITS-1:0] bcd_a_q, bcd_b_q;
  logic [2:0]          first_b_q;

  logic [4*DIGITS-1:0] bcd_a_n, bcd_b_n, bcd_cur;
  logic [3:0]          digit_cur;

  assign bcd_a_n = to_bcd(snap_a);
  assign bcd_b_n = to_bcd(snap_b);

  assign snap_req   = (state_q == S_REQ) || (state_q == S_WAIT);
  assign snap_ready = (state_q == S_WAIT);
  assign byte_valid = (state_q == S_SEND);
  assign busy       = (state_q != S_REQ);

  always_comb begin
    bcd_cur   = chan_q ? bcd_b_q : bcd_a_q;
    // digit 0 sits in the top nibble
    digit_cur = bcd_cur[4*(DIGITS-1-int'(dig_q)) +: 4];
    unique case (pos_q)
      P_LETTER: byte_data = chan_q ? CHAN_B_ID : CHAN_A_ID;
      P_DIGIT:  byte_data = ASCII_0 + {4'd0, digit_cur};
      default:  byte_data = REC_END;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_REQ;
      pos_q        <= P_LETTER;
      chan_q       <= 1'b0;
      dig_q        <= '0;
      bcd_a_q      <= '0;
      bcd_b_q      <= '0;
      first_b_q    <= '0;
      records_sent <= '0;
    end else begin
      unique case (state_q)
        S_REQ: state_q <= S_WAIT;
        S_WAIT: begin
          if (snap_valid) begin
            bcd_a_q   <= bcd_a_n;
            bcd_b_q   <= bcd_b_n;
            dig_q     <= first_digit(bcd_a_n);
            first_b_q <= first_digit(bcd_b_n);
            chan_q    <= 1'b0;
            pos_q     <= P_LETTER;
            state_q   <= S_SEND;
          end
        end
        S_SEND: begin
          if (byte_ready) begin
            unique case (pos_q)
              P_LETTER: pos_q <= P_DIGIT;
              P_DIGIT: begin
                if (dig_q == 3'(DIGITS - 1)) pos_q <= P_END;
                else dig_q <= dig_q + 3'd1;
              end
              default: begin
                records_sent <= records_sent + 32'd1;
                if (!chan_q) begin
                  chan_q <= 1'b1;
                  dig_q  <= first_b_q;
                  pos_q  <= P_LETTER;
                end else begin
                  state_q <= S_REQ;
                end
              end
            endcase
          end
        end
        default: state_q <= S_REQ;
      endcase
    end
  end

  a_stable : assert property (@(posedge clk) disable iff (!rst_n)
    byte_valid && !byte_ready |=> byte_valid && $stable(byte_data));

endmodule
