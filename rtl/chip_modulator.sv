// chip_modulator: 802.11b DSSS/CCK modulation, one chip phase per 11 MHz.
//
// Scrambled bits arrive on a valid/ready stream (with the rate of each
// bit) at the 143 MHz clock. A one-symbol holding buffer collects the bits
// of the next symbol (1, 2, 4 or 8 bits for 1, 2, 5.5, 11 Mbit/s) while
// the current symbol is sent, so bits are taken well ahead of need.
// On each chip_en strobe the next chip phase is put on chip_phase:
//   1/2 Mbit/s: DBPSK/DQPSK symbol phase (dpsk_encoder), spread by the
//               11-chip Barker code (barker_spreader): 11 chips/symbol;
//   5.5/11:     CCK code word (cck_encoder): 8 chips/symbol.
// The differential reference is the previous symbol phase (phi1 for
// CCK), carried across rate changes, so the header-to-PSDU switch is
// seamless. CCK symbols are numbered from the first CCK symbol for the
// odd-symbol 180 degree rotation. The first chip goes out on the first
// chip_en after a full symbol is buffered; tx_active is high while chips
// are valid. After the symbol whose last bit was marked `last`, done
// pulses. If the next symbol is not ready when needed, underrun pulses and
// the transmission stops. abort stops at once.
//
// The DSSS/CCK/DQPSK chain follows the paper; the buffering scheme and
// the underrun/abort handling are this design's own.
module chip_modulator
  import isc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   chip_en,
  input  logic   abort,
  input  logic   in_valid,
  output logic   in_ready,
  input  logic   in_bit,
  input  rate_e  in_rate,
  input  logic   in_last,
  output phase_t chip_phase,
  output logic   tx_active,
  output logic   done,
  output logic   underrun
);
  // ---- next-symbol buffer ----
  logic [7:0] nb_bits;
  logic [3:0] nb_cnt;
  rate_e      nb_rate;
  logic       nb_last, nb_full;
  rate_e      rate_eff;
  logic       fire;

  assign in_ready = !nb_full;
  assign fire     = in_valid && in_ready;
  assign rate_eff = (nb_cnt == 4'd0) ? in_rate : nb_rate;

  // ---- current symbol ----
  phase_t     chips [11];
  logic [3:0] sym_len, chip_idx;
  logic       running, cur_last, cck_odd;
  phase_t     ref_phase;

  // ---- symbol encoders on the buffered bits ----
  phase_t dsss_phase;
  phase_t dsss_chips [11];
  phase_t cck_chips [8];
  phase_t cck_phi1;
  logic   nb_is_cck;

  assign nb_is_cck = (nb_rate == RATE_5M5) || (nb_rate == RATE_11M);

  dpsk_encoder u_dpsk (
    .ref_phase(ref_phase), .qpsk(nb_rate == RATE_2M), .d0(nb_bits[0]), .d1(nb_bits[1]),
    .extra_pi(1'b0), .new_phase(dsss_phase));

  for (genvar i = 0; i < 11; i++) begin : g_barker
    barker_spreader u_bk (.sym_phase(dsss_phase), .chip_idx(4'(i)), .chip_phase(dsss_chips[i]));
  end

  cck_encoder u_cck (
    .d(nb_bits), .rate11(nb_rate == RATE_11M), .odd(cck_odd), .ref_phase(ref_phase),
    .chips(cck_chips), .phi1(cck_phi1));

  logic load;
  assign load = chip_en && nb_full && (!running || (chip_idx == sym_len && !cur_last));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      nb_bits <= '0; nb_cnt <= '0; nb_rate <= RATE_1M; nb_last <= 1'b0; nb_full <= 1'b0;
      for (int i = 0; i < 11; i++) chips[i] <= '0;
      sym_len <= 4'd11; chip_idx <= '0; running <= 1'b0; cur_last <= 1'b0;
      cck_odd <= 1'b0; ref_phase <= '0; chip_phase <= '0; tx_active <= 1'b0;
      done <= 1'b0; underrun <= 1'b0;
    end else begin
      done     <= 1'b0;
      underrun <= 1'b0;
      if (abort) begin
        nb_cnt <= '0; nb_full <= 1'b0; running <= 1'b0; tx_active <= 1'b0;
        ref_phase <= '0; cck_odd <= 1'b0;
      end else begin
        // intake
        if (fire) begin
          if (nb_cnt == 4'd0) nb_rate <= in_rate;
          nb_bits[nb_cnt[2:0]] <= in_bit;
          nb_cnt  <= nb_cnt + 1'b1;
          nb_last <= in_last;
          if (32'(nb_cnt) + 1 == bits_per_symbol(rate_eff) || in_last) nb_full <= 1'b1;
        end
        // chip output
        if (load) begin
          nb_full <= 1'b0;
          nb_cnt  <= '0;
          running <= 1'b1;
          tx_active <= 1'b1;
          cur_last <= nb_last;
          chip_idx <= 4'd1;
          if (nb_is_cck) begin
            for (int i = 0; i < 8; i++) chips[i] <= cck_chips[i];
            chip_phase <= cck_chips[0];
            ref_phase  <= cck_phi1;
            cck_odd    <= ~cck_odd;
            sym_len    <= 4'd8;
          end else begin
            for (int i = 0; i < 11; i++) chips[i] <= dsss_chips[i];
            chip_phase <= dsss_chips[0];
            ref_phase  <= dsss_phase;
            cck_odd    <= 1'b0;
            sym_len    <= 4'd11;
          end
        end else if (chip_en && running) begin
          if (chip_idx != sym_len) begin
            chip_phase <= chips[chip_idx];
            chip_idx   <= chip_idx + 1'b1;
          end else begin
            running   <= 1'b0;
            tx_active <= 1'b0;
            ref_phase <= '0;
            cck_odd   <= 1'b0;
            if (cur_last) done <= 1'b1;
            else          underrun <= 1'b1;
          end
        end
      end
    end
endmodule
