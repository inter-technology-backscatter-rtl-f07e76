// interscatter_top: digital core of a Bluetooth-to-Wi-Fi backscatter chip.
//
// Clock: `clk` is the 143 MHz output of the on-chip PLL (an analog block
// outside this RTL). phase_gen turns it into the four 35.75 MHz carrier
// phases, clk_div13 into the 11 MHz chip strobe, both from the same edge.
// Receive side: `env` is the comparator output of the energy/peak
// detector. It is synchronised by two flip-flops and drives both the
// downlink decoder (queries sent as OFDM amplitude patterns, 125 kbit/s)
// and the link controller (Bluetooth packet detection and timing).
// Transmit side: the host writes a MAC frame through the wr_* port and
// sets cfg_rate/cfg_len. When the link controller starts a packet, the
// baseband processor produces 802.11b chips and the single-sideband
// modulator turns each chip and the carrier phase into one of the four
// impedance states on `zsel`, which drive the RF switch network. `tx_sel`
// selects the backscatter path of the TX/RX switch. `clk_11m` is the
// divided chip clock for off-chip use. Event outputs are one-cycle pulses.
module interscatter_top
  import isc_pkg::*;
#(
  parameter int unsigned DEPTH = 209,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned QW    = 8
) (
  input  logic          clk,            // 143 MHz from the PLL
  input  logic          rst_n,
  input  logic          env,            // energy detector comparator
  // host side
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  rate_e         cfg_rate,
  input  logic [AW-1:0] cfg_len,        // frame bytes, FCS excluded
  input  logic          cfg_beacon_mode,
  input  logic [QW-1:0] cfg_dev_id,
  // RF front end
  output zstate_e       zsel,           // impedance state select
  output logic          tx_sel,         // 1: antenna to backscatter switch
  output logic          clk_11m,
  output logic          i_out,          // I and Q signs behind zsel
  output logic          q_out,
  // status
  output logic [QW-1:0] query_word,
  output logic          query_valid,
  output logic          query_hit,      // query addressed to this chip
  output logic          pkt_sent,
  output logic          pkt_aborted,
  output logic          false_trig,
  output logic          underrun
);
  logic [1:0] env_sync;
  logic       env_s;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) env_sync <= '0;
    else        env_sync <= {env_sync[0], env};
  assign env_s = env_sync[1];

  // ---- frequency synthesis (digital part) ----
  logic [3:0] carrier;
  logic       chip_en;
  phase_gen u_phase (.clk, .rst_n, .phase(carrier), .state());
  clk_div13 u_div   (.clk, .rst_n, .chip_en, .clk_11m);

  // ---- downlink ----
  logic dec_en;
  ofdm_am_decoder #(.CLK_PER_US(CLK_PER_US), .NBITS(QW)) u_dec (
    .clk, .rst_n, .enable(dec_en), .env(env_s),
    .word(query_word), .valid(query_valid), .busy());

  // ---- control ----
  logic bb_start, bb_abort, bb_done;
  link_ctrl #(.CLK_PER_US(CLK_PER_US), .QW(QW)) u_ctrl (
    .clk, .rst_n, .env(env_s), .beacon_mode(cfg_beacon_mode), .dev_id(cfg_dev_id),
    .dec_en, .dec_valid(query_valid), .dec_word(query_word),
    .bb_start, .bb_abort, .bb_done, .tx_sel,
    .sent(pkt_sent), .aborted(pkt_aborted), .false_trig,
    .query_hit, .query_miss());

  // ---- baseband and modulator ----
  phase_t chip_phase;
  logic   tx_active;
  baseband_processor #(.DEPTH(DEPTH), .AW(AW)) u_bb (
    .clk, .rst_n, .chip_en, .wr_en, .wr_addr, .wr_data,
    .start(bb_start), .abort(bb_abort), .rate(cfg_rate), .len(cfg_len),
    .busy(), .done(bb_done), .underrun,
    .chip_phase, .tx_active);

  ssb_modulator u_ssb (
    .clk, .rst_n, .en(tx_active), .chip_phase, .phase(carrier),
    .i_out, .q_out, .zsel);
endmodule
