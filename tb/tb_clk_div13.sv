// tb_clk_div13: checks the divide-by-13 chip timing.
// chip_en must pulse exactly once every 13 cycles of the 143 MHz clock
// (11 MHz), and clk_11m must have the same 13-cycle period.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_clk_div13;
  logic clk = 0, rst_n = 0;
  logic chip_en, clk_11m;
  int checks = 0, failures = 0;
  clk_div13 dut (.clk, .rst_n, .chip_en, .clk_11m);
  always #3.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_en = -1, last_ck = -1, n = 0, pulses = 0, highs = 0;
    logic ck_q = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ck_q = clk_11m;
    for (int c = 0; c < 13 * 40; c++) begin
      @(posedge clk); #1; n++;
      if (chip_en) begin
        if (last_en >= 0) `CHECK(n - last_en == 13, "chip_en every 13 cycles")
        last_en = n; pulses++;
      end
      if (clk_11m && !ck_q) begin
        if (last_ck >= 0) `CHECK(n - last_ck == 13, "clk_11m period 13 cycles")
        last_ck = n;
      end
      if (c >= 13 && c < 13 * 39 + 13) highs += clk_11m;
      ck_q = clk_11m;
    end
    `CHECK(pulses == 40, "40 strobes in 520 cycles")
    `CHECK(highs == 7 * 39, "clk_11m high 7 of 13 cycles")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
