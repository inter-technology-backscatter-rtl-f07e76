// tb_dpsk_encoder: exhaustive check of the DBPSK/DQPSK phase steps
// (DBPSK 0:+0 1:+180; DQPSK 00:+0 01:+90 11:+180 10:+270; extra_pi +180).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_dpsk_encoder;
  logic [1:0] ref_phase, new_phase;
  logic qpsk, d0, d1, extra_pi;
  int checks = 0, failures = 0;
  dpsk_encoder dut (.*);
  initial begin
    int step_q [4] = '{0, 90, 270, 180};   // index {d0,d1}
    for (int v = 0; v < 32; v++) begin
      int deg;
      {ref_phase, qpsk, d0, d1} = 5'(v);
      for (int x = 0; x < 2; x++) begin
        extra_pi = 1'(x);
        #1;
        deg = qpsk ? step_q[{d0, d1}] : (d0 ? 180 : 0);
        deg = deg + (extra_pi ? 180 : 0) + 90 * ref_phase;
        `CHECK(new_phase == 2'((deg / 90) % 4), "phase step table")
      end
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
