// tb_interscatter_top: the whole chip, end to end, at its default sizes.
//
// The testbench plays the three radios around the chip:
//  * a Wi-Fi sender's queries, as the peak-detector output an 802.11g
//    packet produces when its OFDM symbols are random (high) or constant
//    (short peak, then low): start bit, then the 8-bit device id;
//  * Bluetooth advertisements on channel 38, as 376 us of energy (header,
//    advertiser address, 31-byte payload, CRC). The payload is built with
//    the whitening model so that it whitens to all zeros (a single tone);
//  * a Wi-Fi receiver: from the impedance state in each cycle it removes
//    the 35.75 MHz carrier (its own cycle count gives the carrier phase),
//    checks that the result is constant over each 13-cycle chip (single
//    sideband: no residual rotation), and feeds the chips to the reference
//    802.11b receiver, which must return the frame and its FCS. The
//    receiver searches the 13-cycle chip alignment and the symbol start,
//    as tx_sel rises a few idle chips before the first SYNC chip. The
//    length of tx_sel must be the packet's air time, 96 us + 8*bytes/rate,
//    within three chips.
// Mechanisms counted, each must happen: query for another device, query
// hit, false trigger, packets sent at 1, 2, 5.5 and 11 Mbit/s, a packet
// aborted at the Bluetooth CRC deadline, beacon mode. The largest frames
// that fit the 244 us window are sent (36, 101, 203 bytes with FCS at 2,
// 5.5, 11 Mbit/s); 37 bytes at 2 Mbit/s and 209 at 11 Mbit/s are aborted.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_interscatter_top;
  import isc_pkg::*;
  import dot11b_ref_pkg::*;
  localparam int CPU = 143;
  localparam int AW  = 8;

  logic clk = 0, rst_n = 0, env = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = 0, cfg_len = 0;
  logic [7:0] wr_data = 0, cfg_dev_id = 8'h3C;
  rate_e cfg_rate = RATE_2M;
  logic cfg_beacon_mode = 0;
  zstate_e zsel;
  logic tx_sel, clk_11m, i_out, q_out;
  logic [7:0] query_word;
  logic query_valid, query_hit, pkt_sent, pkt_aborted, false_trig, underrun;
  int checks = 0, failures = 0;

  interscatter_top dut (.*);
  always #3.5 clk = ~clk;

  // ---------------- event counters ----------------
  int m = 0;   // posedges since reset release
  int n_qvalid = 0, n_hit = 0, n_sent = 0, n_abort = 0, n_false = 0, n_under = 0;
  int n_rate_sent [4] = '{0, 0, 0, 0};
  int n_beacon = 0;

  // ---------------- Wi-Fi receiver model ----------------
  ph_t  raw[$];      // derotated reflection, one entry per 143 MHz cycle
  ph_t  chips[$];
  int   bad_windows = 0;
  int   tx_cycles = 0;  // length of the last tx_sel pulse, in clk cycles
  logic tx_q = 0;

  function automatic ph_t zval(zstate_e z);
    case (z)
      Z_3PF:   return 2'd0;   //  1+j
      Z_OPEN:  return 2'd3;   //  1-j
      Z_1PF:   return 2'd1;   // -1+j
      default: return 2'd2;   // -1-j
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    m++;
    n_qvalid += query_valid; n_hit += query_hit; n_sent += pkt_sent;
    n_abort += pkt_aborted; n_false += false_trig; n_under += underrun;
    if (pkt_sent) begin
      n_rate_sent[cfg_rate]++;
      if (cfg_beacon_mode) n_beacon++;
    end
    if (tx_sel) begin
      // zsel seen now was produced by the edge m-1 from carrier state m-2
      ph_t p;
      p = zval(zsel) - ph_t'((m - 2) % 4) + 2'd1;
      if (!tx_q) raw.delete();
      raw.push_back(p);
    end
    if (tx_sel && !tx_q) tx_cycles = 0;
    if (tx_sel) tx_cycles++;
    tx_q <= tx_sel;
  end

  initial begin
    #80000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus helpers ----------------
  task automatic hold(logic v, int cycles);
    env = v;
    repeat (cycles) @(negedge clk);
  endtask

  task automatic random_sym();
    int left = 4 * CPU;
    while (left > 0) begin
      int h = $urandom_range(40, 200);
      int l = $urandom_range(2, 25);
      if (h > left) h = left;
      hold(1, h); left -= h;
      if (left > 0) begin
        if (l > left) l = left;
        hold(0, l); left -= l;
      end
    end
  endtask

  task automatic constant_sym();
    int pk = $urandom_range(30, 60);
    hold(1, pk);
    hold(0, 4 * CPU - pk);
  endtask

  task automatic wifi_query(logic [7:0] w);
    hold(1, 20 * CPU);
    random_sym(); random_sym();
    random_sym(); constant_sym();            // start bit
    for (int i = 0; i < 8; i++) begin
      random_sym();
      if (w[i]) constant_sym(); else random_sym();
    end
    random_sym();
    hold(0, 30 * CPU);
  endtask

  // Bluetooth advertisement: energy for 376 us, then a gap
  task automatic ble_adv();
    hold(1, 376 * CPU);
    hold(0, 60 * CPU);
  endtask

  task automatic load_frame(int n, output bytes_t d);
    logic [31:0] fcs;
    d.delete();
    for (int i = 0; i < n; i++) begin
      d.push_back(8'($urandom));
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = d[i];
    end
    @(negedge clk); wr_en = 0;
    fcs = crc32_ref(d);
    for (int k = 0; k < 4; k++) d.push_back(fcs[8*k +: 8]);
    cfg_len = AW'(n);
  endtask

  // cut the cycle samples into 13-cycle chips at the alignment that
  // gives the fewest non-constant windows
  function automatic void slice_chips();
    int best = 1 << 30;
    for (int a = 0; a < 13; a++) begin
      ph_t c[$];
      int bad = 0;
      for (int k = a; k + 13 <= raw.size(); k += 13) begin
        bit same;
        same = 1;
        for (int i = 1; i < 13; i++) if (raw[k + i] != raw[k]) same = 0;
        if (same) c.push_back(raw[k]); else bad++;
      end
      if (bad < best) begin best = bad; chips = c; end
    end
    bad_windows = best;
  endfunction

  task automatic check_packet(bytes_t d, rate_e r);
    bytes_t got;
    int errs, used;
    logic [31:0] hdr;
    logic [7:0] sig [4] = '{8'h0A, 8'h14, 8'h37, 8'h6E};
    // tx_sel rises a few idle chips before the first SYNC chip: the
    // receiver, like a real one, searches for the symbol alignment
    slice_chips();
    errs = -1;
    for (int off = 0; off < 40 && off < chips.size() && errs != 0; off++) begin
      chips_t c = chips[off:$];
      got = rx_decode(c, errs, hdr, used);
    end
    if (errs != 0) $display("rx: chips=%0d errs=%0d hdr=%08h used=%0d bad=%0d got=%0d", chips.size(), errs, hdr, used, bad_windows, got.size());
    `CHECK(errs == 0, "Wi-Fi receiver: no chip/CRC-16/format errors")
    `CHECK(hdr[7:0] == sig[r], "SIGNAL field matches rate")
    `CHECK(got == d, "Wi-Fi receiver gets frame + FCS")
    `CHECK(bad_windows <= 2, "carrier removed leaves constant chips (single sideband)")
    // air time 96 us + 8*(n)/R us, n = PSDU bytes; in 143 MHz cycles
    begin
      int per_byte [4] = '{1144, 572, 208, 104};
      int want = 96 * CPU + per_byte[r] * d.size();
      `CHECK(tx_cycles >= want && tx_cycles <= want + 3 * 13 + 4, "packet air time 96 us + 8 x bytes / rate")
      if (!(tx_cycles >= want && tx_cycles <= want + 3 * 13 + 4)) $display("tx_cycles=%0d want=%0d", tx_cycles, want);
    end
  endtask

  // one query-reply exchange
  task automatic exchange(rate_e r, int n, bit expect_abort);
    bytes_t d;
    int s0 = n_sent, a0 = n_abort;
    load_frame(n, d);
    cfg_rate = r;
    wifi_query(cfg_dev_id);
    ble_adv();
    if (expect_abort) `CHECK(n_abort == a0 + 1 && n_sent == s0, "frame too long for the advertisement is aborted")
    else begin
      `CHECK(n_sent == s0 + 1, "packet sent during the advertisement")
      check_packet(d, r);
    end
  endtask

  // ---------------- the test ----------------
  initial begin
    logic bits[$];
    int ones;
    bytes_t d;
    // the Bluetooth side: payload that whitens to zeros on channel 38
    ones = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    wl_init = 1; @(negedge clk); wl_init = 0;
    for (int i = 0; i < 31 * 8; i++) begin
      wl_din = wl_bit;                      // payload bit = whitening bit
      wl_en = 1; #1;
      ones += wl_out;
      @(negedge clk);
    end
    wl_en = 0;
    `CHECK(ones == 0, "BLE payload whitens to a constant (single tone)")

    // query for another device: decoded, ignored
    wifi_query(8'h11);
    `CHECK(n_qvalid == 1 && query_word == 8'h11 && n_hit == 0, "query for another device ignored")
    ble_adv();
    `CHECK(n_sent == 0, "no reply without a query")

    // query hit, then a false trigger before the advertisement
    load_frame(32, d);                      // 36-byte PSDU at 2 Mbit/s
    cfg_rate = RATE_2M;
    wifi_query(8'h3C);
    `CHECK(n_hit == 1, "query for this device")
    hold(1, 15 * CPU); hold(0, 40 * CPU);
    `CHECK(n_false == 1, "short burst rejected")
    ble_adv();
    `CHECK(n_sent == 1, "2 Mbit/s packet sent")
    check_packet(d, RATE_2M);

    exchange(RATE_11M, 199, 0);     // 203-byte PSDU at 11 Mbit/s
    exchange(RATE_5M5, 97, 0);      // 101-byte PSDU at 5.5 Mbit/s
    exchange(RATE_1M, 10, 0);       // 14 bytes fit at 1 Mbit/s
    exchange(RATE_1M, 40, 1);       // 44 bytes do not
    exchange(RATE_2M, 33, 1);       // 37 bytes: 244 us plus chip alignment overrun
    exchange(RATE_11M, 205, 1);     // 209 bytes (248 us) overrun the window

    // beacon mode: reply to every advertisement, no query
    cfg_beacon_mode = 1;
    load_frame(27, d); cfg_rate = RATE_2M;     // 31-byte PSDU
    hold(0, 20 * CPU);                         // longer than the 12 us arming quiet time
    ble_adv();
    check_packet(d, RATE_2M);
    load_frame(73, d); cfg_rate = RATE_11M;    // 77-byte PSDU
    ble_adv();
    check_packet(d, RATE_11M);

    `CHECK(n_hit >= 1,   "mechanism: query hit")
    `CHECK(n_qvalid > n_hit, "mechanism: query for another device")
    `CHECK(n_false >= 1, "mechanism: false trigger")
    `CHECK(n_abort >= 1, "mechanism: deadline abort")
    `CHECK(n_beacon >= 2, "mechanism: beacon mode")
    for (int r = 0; r < 4; r++) `CHECK(n_rate_sent[r] >= 1, "mechanism: packet at each rate")
    `CHECK(n_under == 0, "no baseband underrun")
    $display("events: queries=%0d hits=%0d false=%0d sent=%0d (1M %0d, 2M %0d, 5.5M %0d, 11M %0d) aborted=%0d beacon=%0d",
             n_qvalid, n_hit, n_false, n_sent, n_rate_sent[0], n_rate_sent[1], n_rate_sent[2],
             n_rate_sent[3], n_abort, n_beacon);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // whitening model for BLE channel 38
  logic wl_init = 0, wl_en = 0, wl_din = 0, wl_bit, wl_out;
  ble_whitener u_white (.clk, .init(wl_init), .channel(6'd38), .en(wl_en), .din(wl_din),
                        .wbit(wl_bit), .dout(wl_out));
endmodule
