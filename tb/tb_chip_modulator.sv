// tb_chip_modulator: feeds bit runs at 1, 2, 5.5 and 11 Mbit/s (random
// gaps in the bit supply), captures one chip per chip_en and demodulates
// them independently (Barker despreading + differential decoding; CCK by
// exhaustive search over dot11b_ref_pkg code words). Checks the bits, the
// number of chips (11 per DSSS symbol, 8 per CCK symbol), that tx_active
// lasts exactly 13 master cycles per chip, the done pulse, and an
// underrun when the supply stops without `last`, and abort.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_chip_modulator;
  import isc_pkg::*;
  import dot11b_ref_pkg::*;
  logic clk = 0, rst_n = 0, abort = 0;
  logic chip_en, clk_11m;
  logic in_valid = 0, in_ready, in_bit = 0, in_last = 0;
  rate_e in_rate = RATE_1M;
  logic [1:0] chip_phase;
  logic tx_active, done, underrun;
  int checks = 0, failures = 0;
  logic en_d = 0;
  ph_t chips[$];
  int active_cycles = 0, done_cnt = 0, under_cnt = 0;

  clk_div13 u_div (.clk, .rst_n, .chip_en, .clk_11m);
  chip_modulator dut (.*);
  always #3.5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    en_d <= chip_en;
    if (en_d && tx_active) chips.push_back(chip_phase);
    if (tx_active) active_cycles++;
    if (done) done_cnt++;
    if (underrun) under_cnt++;
  end

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic bits[$], rate_e rates[$], bit with_last);
    foreach (bits[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_bit = bits[i]; in_rate = rates[i]; in_last = with_last && (i == bits.size() - 1);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
  endtask

  initial begin
    logic bits[$];
    rate_e rates[$];
    int nexp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    nexp = 0;
    for (int i = 0; i < 21; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_1M); end
    nexp += 21 * 11;
    for (int i = 0; i < 40; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_2M); end
    nexp += 20 * 11;
    for (int i = 0; i < 48; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_5M5); end
    nexp += 12 * 8;
    for (int i = 0; i < 96; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_11M); end
    nexp += 12 * 8;
    fork
      send(bits, rates, 1);
    join_none
    wait (done_cnt == 1);
    repeat (30) @(negedge clk);
    `CHECK(chips.size() == nexp, "chip count: 11 per DSSS symbol, 8 per CCK symbol")
    `CHECK(active_cycles == nexp * 13, "one chip per 13 master cycles")
    begin
      automatic ph_t prev = 0;
      automatic int idx = 0, bi = 0, bad = 0, nodd = 0;
      while (bi < bits.size() && idx < chips.size()) begin
        automatic rate_e r = rates[bi];
        if (r == RATE_1M || r == RATE_2M) begin
          automatic ph_t s = chips[idx], dl;
          for (int i = 0; i < 11; i++) if (chips[idx + i] != ph_t'(s + (BARKER[i] < 0 ? 2 : 0))) bad++;
          dl = s - prev;
          if (r == RATE_1M) begin if (bits[bi] != (dl == 2)) bad++; bi++; end
          else begin
            if (bits[bi] != (dl == 2 || dl == 3) || bits[bi + 1] != (dl == 1 || dl == 2)) bad++;
            bi += 2;
          end
          prev = s; idx += 11; nodd = 0;
        end else begin
          automatic bit r11 = (r == RATE_11M);
          automatic logic [7:0] v = 0;
          ph_t c[8], p1;
          automatic bit ok = 1;
          for (int i = 0; i < (r11 ? 8 : 4); i++) v[i] = bits[bi + i];
          cck_chips_ref(v, r11, nodd[0], prev, c, p1);
          for (int i = 0; i < 8; i++) if (c[i] != chips[idx + i]) ok = 0;
          if (!ok) bad++;
          prev = p1; idx += 8; bi += r11 ? 8 : 4; nodd++;
        end
      end
      `CHECK(bad == 0, "chips demodulate to the input bits")
      `CHECK(bi == bits.size(), "all bits consumed")
    end
    `CHECK(under_cnt == 0, "no underrun while supplied")
    // underrun: supply without last, then stop
    bits.delete(); rates.delete();
    for (int i = 0; i < 6; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_2M); end
    send(bits, rates, 0);
    repeat (13 * 40) @(negedge clk);
    `CHECK(under_cnt == 1, "underrun reported when bits run out")
    `CHECK(!tx_active, "transmission stops on underrun")
    // abort
    bits.delete(); rates.delete();
    for (int i = 0; i < 40; i++) begin bits.push_back(1'($urandom)); rates.push_back(RATE_1M); end
    fork send(bits, rates, 1); join_none
    repeat (13 * 5) @(negedge clk);
    `CHECK(tx_active, "transmitting before abort")
    abort = 1; @(negedge clk); abort = 0; #1;
    `CHECK(!tx_active, "abort stops at once")
    disable fork;
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
