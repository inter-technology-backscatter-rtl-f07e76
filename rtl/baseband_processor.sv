// baseband_processor: payload in, 802.11b baseband chip phases out.
//
// payload_buffer -> plcp_framer -> scrambler -> chip_modulator. The host
// writes the MAC frame (without FCS) into the buffer, sets `rate` and
// `len` and pulses `start`. The framer produces preamble, header, frame
// and FCS bits; the scrambler whitens them; the modulator emits one
// 2-bit chip phase on every chip_en (11 MHz) while tx_active is high.
// `done` pulses after the last chip, `underrun` if the bit supply fell
// behind (it cannot at 143 MHz, but is reported), and `abort` cancels a
// packet in flight. A whole packet at rate R and L frame bytes lasts
// 96 us + 8*(L+4)/R us, plus up to one chip period before the first chip.
//
// The chain (scrambling, DSSS/CCK, CRC, DQPSK) is the paper's list; the
// way the pieces are joined is this design's own.
module baseband_processor
  import isc_pkg::*;
#(
  parameter int unsigned DEPTH = 209,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          chip_en,
  // payload write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  // packet control
  input  logic          start,
  input  logic          abort,
  input  rate_e         rate,
  input  logic [AW-1:0] len,
  output logic          busy,
  output logic          done,
  output logic          underrun,
  // chip output
  output phase_t        chip_phase,
  output logic          tx_active
);
  logic [AW-1:0] rd_addr;
  logic [7:0]    rd_data;
  logic          scr_load, fr_busy;
  logic          f_valid, f_ready, f_bit, f_last;
  rate_e         f_rate;
  logic          s_valid, s_ready, s_bit, s_last;
  rate_e         s_rate;
  logic          fr_start;

  assign fr_start = start && !busy;

  payload_buffer #(.DEPTH(DEPTH), .AW(AW)) u_buf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  plcp_framer #(.AW(AW)) u_framer (
    .clk, .rst_n, .start(fr_start), .abort, .rate, .len, .busy(fr_busy), .scr_load,
    .rd_addr, .rd_data, .out_valid(f_valid), .out_ready(f_ready),
    .out_bit(f_bit), .out_rate(f_rate), .out_last(f_last));

  scrambler #(.SEED(7'b1101100)) u_scr (
    .clk, .rst_n, .load(scr_load),
    .in_valid(f_valid), .in_ready(f_ready), .in_bit(f_bit), .in_rate(f_rate), .in_last(f_last),
    .out_valid(s_valid), .out_ready(s_ready), .out_bit(s_bit), .out_rate(s_rate), .out_last(s_last));

  chip_modulator u_mod (
    .clk, .rst_n, .chip_en, .abort,
    .in_valid(s_valid), .in_ready(s_ready), .in_bit(s_bit), .in_rate(s_rate), .in_last(s_last),
    .chip_phase, .tx_active, .done, .underrun);

  assign busy = fr_busy || tx_active;
endmodule
