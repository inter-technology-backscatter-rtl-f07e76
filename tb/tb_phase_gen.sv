// tb_phase_gen: checks the four 35.75 MHz carrier phases.
// After reset the counter advances one state per 143 MHz cycle; phase[m]
// must be high exactly in states m and m+1 (mod 4), so every output has a
// period of 4 cycles (143/4 = 35.75 MHz), 50% duty, and neighbours are a
// quarter period (90 degrees) apart.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_phase_gen;
  logic clk = 0, rst_n = 0;
  logic [3:0] phase;
  logic [1:0] state;
  int checks = 0, failures = 0;
  phase_gen dut (.clk, .rst_n, .phase, .state);
  always #3.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    int rises [4];
    int last_rise [4];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    n = 0;
    for (int m = 0; m < 4; m++) last_rise[m] = -1;
    for (int c = 0; c < 200; c++) begin
      logic [3:0] prev;
      prev = phase;
      `CHECK(state == 2'(n % 4), "state counts cycles mod 4")
      for (int m = 0; m < 4; m++)
        `CHECK(phase[m] == ((((n - m) % 4 + 4) % 4) < 2), "phase[m] is a square wave delayed m quarters")
      `CHECK(phase[2] == ~phase[0] && phase[3] == ~phase[1], "phase 2/3 are complements of 0/1")
      @(posedge clk); #1; n++;
      for (int m = 0; m < 4; m++)
        if (!prev[m] && phase[m]) begin
          if (last_rise[m] >= 0) `CHECK(n - last_rise[m] == 4, "period is 4 master cycles (35.75 MHz)")
          last_rise[m] = n;
        end
    end
    `CHECK(last_rise[1] - last_rise[0] == 1 || last_rise[1] - last_rise[0] == -3, "phase 1 lags phase 0 by one cycle")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
