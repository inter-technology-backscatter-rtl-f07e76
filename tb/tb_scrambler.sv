// tb_scrambler: checks the 802.11b scrambler.
//  * From the seed, the output must equal an independent additive model
//    (in ^ z^-4 ^ z^-7 of the scrambled history) started from the seed.
//  * A self-synchronising descrambler that knows no seed must recover the
//    input after its first 7 bits.
//  * With out_ready low the register must not advance (bit offered again
//    gives the same output), and valid/ready/rate/last pass through.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_scrambler;
  import isc_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic in_valid = 0, in_ready, in_bit = 0, in_last = 0;
  rate_e in_rate = RATE_1M;
  logic out_valid, out_ready = 1, out_bit, out_last;
  rate_e out_rate;
  int checks = 0, failures = 0;
  scrambler dut (.*);
  always #3.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // model state: h[k] = scrambled bit k+1 transfers ago; seed 0011011 with
    // h[0] first
    logic h [7];
    logic dh [7];
    logic seedbits [7] = '{0, 0, 1, 1, 0, 1, 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    for (int k = 0; k < 7; k++) begin h[k] = seedbits[k]; dh[k] = 0; end
    for (int n = 0; n < 2000; n++) begin
      logic b, exp_s, got, d;
      b = 1'($urandom);
      in_valid = 1; in_bit = b; in_rate = rate_e'($urandom_range(0, 3)); in_last = 1'($urandom);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      exp_s = b ^ h[3] ^ h[6];
      got = out_bit;
      `CHECK(got == exp_s, "scrambled bit matches model")
      `CHECK(out_valid && in_ready == out_ready && out_rate == in_rate && out_last == in_last, "side band passes through")
      @(negedge clk);
      if (out_ready) begin
        for (int k = 6; k > 0; k--) h[k] = h[k - 1];
        h[0] = exp_s;
        d = got ^ dh[3] ^ dh[6];
        for (int k = 6; k > 0; k--) dh[k] = dh[k - 1];
        dh[0] = got;
        if (n >= 14) `CHECK(d == b, "descrambler recovers data")
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
