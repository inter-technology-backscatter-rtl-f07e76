// tb_ssb_modulator: checks single-sideband modulation with the real
// phase_gen carrier. For every cycle the impedance state is mapped back
// to its reflection value (3 pF: 1+j, open: 1-j, 1 pF: -1+j, 2 nH: -1-j);
// dividing out the carrier value of the previous cycle (the output is
// registered) must give back the chip phase that was applied, for random
// chip phases held for 13 cycles. The reflection must rotate by +90
// degrees per master cycle while a chip is held (a shift to +35.75 MHz
// only, no mirror), I/Q outputs must agree with zsel, and with en low the
// state rests at 3 pF.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_ssb_modulator;
  import isc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] chip_phase = 0, state;
  logic [3:0] phase;
  logic i_out, q_out;
  zstate_e zsel;
  int checks = 0, failures = 0;
  phase_gen u_pg (.clk, .rst_n, .phase, .state);
  ssb_modulator dut (.clk, .rst_n, .en, .chip_phase, .phase, .i_out, .q_out, .zsel);
  always #3.5 clk = ~clk;

  // reflection value of a state, as a phase index (0:1+j 1:-1+j 2:-1-j 3:1-j)
  function automatic logic [1:0] zval(logic [1:0] z);
    case (z)
      2'd0: return 2'd0;   // 3 pF  ->  1+j
      2'd1: return 2'd3;   // open  ->  1-j
      2'd2: return 2'd1;   // 1 pF  -> -1+j
      default: return 2'd2;// 2 nH  -> -1-j
    endcase
  endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n = 0;
    logic [1:0] applied, prev_v;
    logic [1:0] carrier;   // exp(j theta) as phase index: state k -> k-1
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(zsel == Z_3PF, "rest state with en low")
    en = 1;
    for (int c = 0; c < 13 * 60; c++) begin
      if (c % 13 == 0) chip_phase = 2'($urandom);
      applied = chip_phase;
      carrier = state - 2'd1;
      @(negedge clk);
      `CHECK(zval(zsel) == 2'(carrier + applied), "reflection = carrier x chip")
      `CHECK({i_out, q_out} == phase_to_iq(zval(zsel)), "I/Q outputs agree with zsel")
      if (c % 13 != 0) `CHECK(zval(zsel) == 2'(prev_v + 1), "reflection advances +90 degrees per cycle")
      prev_v = zval(zsel);
    end
    en = 0;
    @(negedge clk);
    `CHECK(zsel == Z_3PF, "rest state after en drops")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
