// link_ctrl: query-reply sequencing and Bluetooth packet timing.
//
// The chip has one receiver, an energy detector, whose synchronised
// output is `env`. It serves two purposes in turn:
//  * LISTEN: the downlink decoder is enabled (dec_en). A decoded query
//    whose word equals dev_id arms the chip; other queries are ignored.
//    In beacon mode (beacon_mode=1) no query is needed: the chip is
//    always armed, as in a device that answers every advertisement.
//  * ARMED: once the query packet has ended (env low for QUIET_US, longer
//    than any dip of the detector inside an OFDM packet), the next rising
//    edge of env is taken as the start of a Bluetooth advertising packet.
//    The Wi-Fi packet must ride on the payload, which starts after the
//    preamble, access address and header (HDR_US = 56 us) and the
//    advertiser address (ADV_US = 48 us); GUARD_US = 4 us is added for the
//    uncertain detection instant. If env drops during this wait, the
//    trigger is taken as false and the chip re-arms.
//  * TX: bb_start is pulsed, tx_sel switches the antenna from the
//    receiver to the backscatter modulator, and a deadline is kept: the
//    Wi-Fi packet has to end before the Bluetooth CRC, PAYLOAD_US after
//    the payload start. If the baseband has not reported done by then,
//    bb_abort is pulsed. Either way tx_sel drops and the chip returns to
//    LISTEN (or, in beacon mode, waits for the next advertisement).
// Event pulses (sent, aborted, false_trig, query_hit, query_miss) are
// one cycle wide. Timing is counted in 143 MHz cycles (CLK_PER_US).
//
// With the defaults the Wi-Fi packet may occupy 352 - 108 = 244 us, so
// frames needing the whole 248 us payload time (38, 104 and 209 bytes at
// 2, 5.5 and 11 Mbit/s) are cut at the deadline; 36, 101 and 203 bytes fit.
//
// The 56 us, the 4 us guard and the finish-before-CRC rule are the
// paper's; the 48 us advertiser-address skip, the false-trigger rule and
// the quiet time, the query word format (a bare device id) are this design's choices.
module link_ctrl #(
  parameter int unsigned CLK_PER_US = 143,
  parameter int unsigned HDR_US     = 56,
  parameter int unsigned ADV_US     = 48,
  parameter int unsigned GUARD_US   = 4,
  parameter int unsigned PAYLOAD_US = 248,
  parameter int unsigned QUIET_US   = 12,
  parameter int unsigned QW         = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          env,
  input  logic          beacon_mode,
  input  logic [QW-1:0] dev_id,
  // downlink decoder
  output logic          dec_en,
  input  logic          dec_valid,
  input  logic [QW-1:0] dec_word,
  // baseband
  output logic          bb_start,
  output logic          bb_abort,
  input  logic          bb_done,
  // front end
  output logic          tx_sel,
  // events
  output logic          sent,
  output logic          aborted,
  output logic          false_trig,
  output logic          query_hit,
  output logic          query_miss
);
  localparam int unsigned START = (HDR_US + ADV_US + GUARD_US) * CLK_PER_US;
  localparam int unsigned DEADL = (HDR_US + ADV_US + PAYLOAD_US) * CLK_PER_US;
  localparam int unsigned QUIET = QUIET_US * CLK_PER_US;
  localparam int unsigned TW    = $clog2(DEADL + 1);

  typedef enum logic [2:0] {L_LISTEN, L_ARMED, L_WAIT_BLE, L_DELAY, L_TX} lstate_e;
  lstate_e       st;
  logic [TW-1:0] t;
  logic          env_q;

  assign dec_en = (st == L_LISTEN) && !beacon_mode;
  assign tx_sel = (st == L_TX);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= L_LISTEN; t <= '0; env_q <= 1'b0;
      bb_start <= 1'b0; bb_abort <= 1'b0; sent <= 1'b0; aborted <= 1'b0;
      false_trig <= 1'b0; query_hit <= 1'b0; query_miss <= 1'b0;
    end else begin
      env_q <= env;
      bb_start <= 1'b0; bb_abort <= 1'b0; sent <= 1'b0; aborted <= 1'b0;
      false_trig <= 1'b0; query_hit <= 1'b0; query_miss <= 1'b0;
      case (st)
        L_LISTEN:
          if (beacon_mode) begin st <= L_ARMED; t <= '0; end
          else if (dec_valid) begin
            if (dec_word == dev_id) begin st <= L_ARMED; t <= '0; query_hit <= 1'b1; end
            else query_miss <= 1'b1;
          end
        L_ARMED: begin
          t <= env ? '0 : t + 1'b1;
          if (t >= TW'(QUIET)) st <= L_WAIT_BLE;
        end
        L_WAIT_BLE: if (env && !env_q) begin st <= L_DELAY; t <= TW'(1); end
        L_DELAY: begin
          t <= t + 1'b1;
          if (!env) begin st <= L_WAIT_BLE; false_trig <= 1'b1; end
          else if (t == TW'(START)) begin st <= L_TX; bb_start <= 1'b1; end
        end
        L_TX: begin
          t <= t + 1'b1;
          if (bb_done) begin
            sent <= 1'b1;
            t    <= '0;
            st   <= beacon_mode ? L_ARMED : L_LISTEN;
          end else if (t >= TW'(DEADL)) begin
            bb_abort <= 1'b1;
            aborted  <= 1'b1;
            t        <= '0;
            st       <= beacon_mode ? L_ARMED : L_LISTEN;
          end
        end
        default: st <= L_LISTEN;
      endcase
    end

  // Only one of the two outcomes of a transmission can be reported.
  a_outcome: assert property (@(posedge clk) disable iff (!rst_n) !(sent && aborted));
endmodule
