// tb_crc_serial: checks both CRC configurations against catalogue values
// and against the reference model.
//  CRC-32 of "123456789", bytes fed LSB first: 0xCBF43926, whose bits must
//  come out LSB first (x^31 term first).
//  CRC-16 (init FFFF, complemented) of "123456789" fed MSB first: 0xD64E,
//  coming out MSB first.
// Then random bit strings are compared with dot11b_ref_pkg.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_crc_serial;
  import dot11b_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic i16 = 0, e16 = 0, d16 = 0, s16 = 0, o16;
  logic i32 = 0, e32 = 0, d32 = 0, s32 = 0, o32;
  logic [15:0] r16;
  logic [31:0] r32;
  int checks = 0, failures = 0;
  crc_serial #(.W(16), .POLY(16'h1021)) u16 (.clk, .rst_n, .init(i16), .en(e16), .din(d16), .shift(s16), .dout(o16), .crc(r16));
  crc_serial #(.W(32), .POLY(32'h04C11DB7), .INIT(32'hFFFFFFFF)) u32 (.clk, .rst_n, .init(i32), .en(e32), .din(d32), .shift(s32), .dout(o32), .crc(r32));
  always #3.5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed16(logic bits[$], output logic [15:0] res);
    @(negedge clk); i16 = 1; @(negedge clk); i16 = 0;
    foreach (bits[i]) begin e16 = 1; d16 = bits[i]; @(negedge clk); end
    e16 = 0;
    for (int i = 15; i >= 0; i--) begin res[i] = o16; s16 = 1; @(negedge clk); end
    s16 = 0;
  endtask

  task automatic feed32(logic bits[$], output logic [31:0] res);
    @(negedge clk); i32 = 1; @(negedge clk); i32 = 0;
    foreach (bits[i]) begin e32 = 1; d32 = bits[i]; @(negedge clk); end
    e32 = 0;
    for (int i = 0; i < 32; i++) begin res[i] = o32; s32 = 1; @(negedge clk); end
    s32 = 0;
  endtask

  initial begin
    string s = "123456789";
    logic b16[$], b32[$];
    logic [15:0] r;
    logic [31:0] q;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 9; i++)
      for (int k = 0; k < 8; k++) begin
        b16.push_back(s[i][7 - k]);
        b32.push_back(s[i][k]);
      end
    feed16(b16, r);
    `CHECK(r == 16'hD64E, "CRC-16 check value")
    feed32(b32, q);
    `CHECK(q == 32'hCBF43926, "CRC-32 check value")
    for (int t = 0; t < 40; t++) begin
      bytes_t d;
      logic bb[$];
      int n = 1 + $urandom_range(0, 30);
      bb.delete();
      d.delete();
      for (int i = 0; i < n; i++) begin
        d.push_back(8'($urandom));
        for (int k = 0; k < 8; k++) bb.push_back(d[i][k]);
      end
      feed32(bb, q);
      `CHECK(q == crc32_ref(d), "CRC-32 of random bytes")
      feed16(bb, r);
      `CHECK(r == crc16_bits_ref(bb), "CRC-16 of random bits")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
