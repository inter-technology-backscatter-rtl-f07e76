// tb_ofdm_am_decoder: drives the decoder with a model of the peak
// detector output for 802.11g packets whose OFDM symbols carry bits:
// a random symbol is mostly high with a few short random dips; a constant
// symbol is a short peak followed by low. Each packet: 20 us preamble,
// two uncontrolled random symbols, the start bit, 8 data bits and two
// trailing random symbols, then silence. The detector edges are jittered.
// Checks the decoded word, that `valid` comes NBITS*8 us after the end of
// the start bit (125 kbit/s), that a disabled decoder ignores a packet,
// and that a packet with no start bit yields nothing.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_ofdm_am_decoder;
  localparam int CPU = 143;           // cycles per us
  localparam int NB  = 8;
  logic clk = 0, rst_n = 0, enable = 0, env = 0;
  logic [NB-1:0] word;
  logic valid, busy;
  int checks = 0, failures = 0;
  int valid_cnt = 0, t_valid = 0, cyc = 0;
  ofdm_am_decoder #(.CLK_PER_US(CPU), .NBITS(NB)) dut (.*);
  always #3.5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (valid) begin valid_cnt++; t_valid = cyc; end
  end

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // returns the cycle at which the start bit's constant symbol ended
  task automatic packet(logic [NB-1:0] w, bit with_start, output int t_bits);
    hold(1, 20 * CPU + $urandom_range(0, 20));
    random_sym(); random_sym();
    if (with_start) begin random_sym(); constant_sym(); end
    t_bits = cyc;
    for (int i = 0; i < NB; i++) begin
      random_sym();
      if (w[i]) constant_sym(); else random_sym();
    end
    random_sym(); random_sym();
    hold(0, 30 * CPU);
  endtask

  initial begin
    int tb0, v0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enable = 1;
    for (int t = 0; t < 6; t++) begin
      logic [NB-1:0] w = (t == 0) ? 8'hFF : (t == 1) ? 8'h00 : NB'($urandom);
      v0 = valid_cnt;
      packet(w, 1, tb0);
      `CHECK(valid_cnt == v0 + 1, "one word per packet")
      `CHECK(word == w, "decoded word")
      `CHECK(t_valid - tb0 >= NB * 8 * CPU - 3 && t_valid - tb0 <= NB * 8 * CPU + 6,
             "valid after NBITS x 8 us (125 kbit/s)")
    end
    v0 = valid_cnt;
    packet(8'h00, 0, tb0);
    `CHECK(valid_cnt == v0, "only random symbols: no start bit, no word")
    enable = 0;
    packet(8'hA5, 1, tb0);
    `CHECK(valid_cnt == v0, "disabled decoder ignores packets")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
