// tb_baseband_processor: end-to-end baseband test. Random frames are
// written to the buffer and sent at each rate; the captured chips go
// through the independent receiver of dot11b_ref_pkg, which must find the
// SFD, a header with a valid CRC-16 and the right SIGNAL, and the frame
// bytes followed by their CRC-32. The packet must last exactly
// 96 us + 8*(L+4)/R us (11 chips per us, 13 master cycles per chip).
// It includes the largest frames: 34+4 bytes at 2 Mbit/s, 100+4 at 5.5,
// 205+4 at 11. One packet is aborted and the next must still be clean.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_baseband_processor;
  import isc_pkg::*;
  import dot11b_ref_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, chip_en, clk_11m;
  logic wr_en = 0, start = 0, abort = 0;
  logic [AW-1:0] wr_addr = 0, len = 0;
  logic [7:0] wr_data = 0;
  rate_e rate = RATE_1M;
  logic busy, done, underrun, tx_active;
  logic [1:0] chip_phase;
  int checks = 0, failures = 0;
  logic en_d = 0;
  ph_t chips[$];
  int active_cycles = 0, done_cnt = 0, under_cnt = 0;

  clk_div13 u_div (.clk, .rst_n, .chip_en, .clk_11m);
  baseband_processor dut (.*);
  always #3.5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    en_d <= chip_en;
    if (en_d && tx_active) chips.push_back(chip_phase);
    if (tx_active) active_cycles++;
    if (done) done_cnt++;
    if (underrun) under_cnt++;
  end

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(rate_e r, int n);
    bytes_t d, got;
    int errs, used, exp_chips, d0;
    logic [31:0] hdr, fcs;
    logic [7:0] sig [4] = '{8'h0A, 8'h14, 8'h37, 8'h6E};
    for (int i = 0; i < n; i++) begin
      d.push_back(8'($urandom));
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = d[i];
    end
    @(negedge clk); wr_en = 0;
    fcs = crc32_ref(d);
    for (int k = 0; k < 4; k++) d.push_back(fcs[8*k +: 8]);
    chips.delete(); active_cycles = 0; d0 = done_cnt;
    @(negedge clk); start = 1; rate = r; len = AW'(n);
    @(negedge clk); start = 0;
    wait (done_cnt == d0 + 1);
    repeat (5) @(negedge clk);
    got = rx_decode(chips, errs, hdr, used);
    `CHECK(errs == 0, "receiver: no chip, CRC-16 or format errors")
    `CHECK(hdr[7:0] == sig[r], "SIGNAL field")
    `CHECK(got == d, "received PSDU = frame + FCS")
    case (r)
      RATE_1M:  exp_chips = 96 * 11 + (n + 4) * 8 * 11;
      RATE_2M:  exp_chips = 96 * 11 + (n + 4) * 4 * 11;
      RATE_5M5: exp_chips = 96 * 11 + (n + 4) * 2 * 8;
      default:  exp_chips = 96 * 11 + (n + 4) * 8;
    endcase
    `CHECK(chips.size() == exp_chips, "packet duration 96 us + 8(L+4)/R us")
    `CHECK(active_cycles == exp_chips * 13, "13 master cycles per chip")
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    send(RATE_2M, 34);
    send(RATE_5M5, 100);
    send(RATE_11M, 205);
    send(RATE_1M, 9);
    for (int t = 0; t < 4; t++) send(rate_e'($urandom_range(0, 3)), $urandom_range(1, 60));
    // abort
    @(negedge clk); start = 1; rate = RATE_11M; len = 50;
    @(negedge clk); start = 0;
    repeat (3000) @(negedge clk);
    abort = 1; @(negedge clk); abort = 0;
    repeat (3) @(negedge clk);
    `CHECK(!busy && !tx_active, "abort ends the packet")
    send(RATE_2M, 27);
    `CHECK(under_cnt == 0, "bit supply never falls behind")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
