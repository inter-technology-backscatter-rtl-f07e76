// tb_plcp_framer: checks the whole unscrambled bit stream of packets at
// all four rates and random frame lengths, under random back-pressure:
// 56 SYNC zeros, SFD 0x05CF, SIGNAL/SERVICE/LENGTH, header CRC-16, frame
// bytes and CRC-32 FCS (both from dot11b_ref_pkg), the rate tag of every
// bit, the single `last` flag, and that LENGTH decodes back to the PSDU
// size. It also aborts one packet half way and checks the framer idles.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_plcp_framer;
  import isc_pkg::*;
  import dot11b_ref_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, start = 0, abort = 0;
  rate_e rate = RATE_1M;
  logic [AW-1:0] len = 0, rd_addr, wr_addr = 0;
  logic [7:0] rd_data, wr_data = 0;
  logic wr_en = 0, busy, scr_load, out_valid, out_ready = 0, out_bit, out_last;
  rate_e out_rate;
  int checks = 0, failures = 0;

  payload_buffer #(.DEPTH(209)) u_buf (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  plcp_framer #(.AW(AW)) dut (.*);
  always #3.5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(rate_e r, int n);
    bytes_t d;
    logic exp_b[$];
    rate_e exp_r[$];
    logic hb[$];
    logic [7:0] sig, srv;
    logic [15:0] L;
    logic [31:0] fcs;
    logic [15:0] hc;
    int nb, got, lasts, bad_bit, bad_rate;
    for (int i = 0; i < n; i++) begin
      d.push_back(8'($urandom));
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = d[i];
    end
    @(negedge clk); wr_en = 0;
    nb = 8 * (n + 4);
    srv = 8'h04;
    case (r)
      RATE_1M:  begin sig = 8'h0A; L = 16'(nb); end
      RATE_2M:  begin sig = 8'h14; L = 16'(nb / 2); end
      RATE_5M5: begin sig = 8'h37; L = 16'((2 * nb + 10) / 11); end
      default:  begin sig = 8'h6E; L = 16'((nb + 10) / 11); if (int'(L) * 11 - nb >= 8) srv[7] = 1; end
    endcase
    for (int i = 0; i < 56; i++) begin exp_b.push_back(0); exp_r.push_back(RATE_1M); end
    for (int i = 0; i < 16; i++) begin exp_b.push_back(16'h05CF >> i); exp_r.push_back(RATE_1M); end
    for (int i = 0; i < 8; i++)  hb.push_back(sig[i]);
    for (int i = 0; i < 8; i++)  hb.push_back(srv[i]);
    for (int i = 0; i < 16; i++) hb.push_back(L[i]);
    hc = crc16_bits_ref(hb);
    for (int i = 15; i >= 0; i--) hb.push_back(hc[i]);
    foreach (hb[i]) begin exp_b.push_back(hb[i]); exp_r.push_back(RATE_2M); end
    fcs = crc32_ref(d);
    foreach (d[i]) for (int k = 0; k < 8; k++) begin exp_b.push_back(d[i][k]); exp_r.push_back(r); end
    for (int k = 0; k < 32; k++) begin exp_b.push_back(fcs[k]); exp_r.push_back(r); end
    `CHECK(psdu_bytes(sig, L, srv[7]) == n + 4, "LENGTH field decodes to PSDU size")

    @(negedge clk); start = 1; rate = r; len = AW'(n);
    #1 `CHECK(scr_load, "scrambler load pulses with start")
    @(negedge clk); start = 0;
    got = 0; lasts = 0; bad_bit = 0; bad_rate = 0;
    while (busy) begin
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        if (got < exp_b.size()) begin
          if (out_bit != exp_b[got]) bad_bit++;
          if (out_rate != exp_r[got]) bad_rate++;
        end
        if (out_last) begin
          lasts++;
          `CHECK(got == exp_b.size() - 1, "last marks the final FCS bit")
        end
        got++;
      end
      @(negedge clk);
    end
    `CHECK(got == exp_b.size(), "number of bits in the packet")
    `CHECK(bad_bit == 0, "bit stream matches the 802.11b frame")
    `CHECK(bad_rate == 0, "rate tag of each bit")
    `CHECK(lasts == 1, "exactly one last flag")
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) run(rate_e'(t % 4), (t == 4) ? 0 : $urandom_range(1, 205));
    run(RATE_11M, 205);
    run(RATE_2M, 34);
    // abort in the middle
    @(negedge clk); start = 1; rate = RATE_2M; len = 20;
    @(negedge clk); start = 0; out_ready = 1;
    repeat (100) @(negedge clk);
    abort = 1; @(negedge clk); abort = 0; #1;
    `CHECK(!busy && !out_valid, "abort returns the framer to idle")
    run(RATE_5M5, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
