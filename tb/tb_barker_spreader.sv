// tb_barker_spreader: every chip of every symbol phase against the
// Barker sequence +1 -1 +1 +1 -1 +1 +1 +1 -1 -1 -1 (a -1 chip is the
// symbol rotated by 180 degrees).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_barker_spreader;
  logic [1:0] sym_phase, chip_phase;
  logic [3:0] chip_idx;
  int checks = 0, failures = 0;
  int barker [11] = '{1, -1, 1, 1, -1, 1, 1, 1, -1, -1, -1};
  barker_spreader dut (.*);
  initial begin
    for (int p = 0; p < 4; p++)
      for (int i = 0; i < 11; i++) begin
        sym_phase = 2'(p); chip_idx = 4'(i); #1;
        `CHECK(chip_phase == 2'(p + (barker[i] > 0 ? 0 : 2)), "Barker chip")
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
