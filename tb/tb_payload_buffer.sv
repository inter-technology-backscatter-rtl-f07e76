// tb_payload_buffer: writes random bytes to all 209 locations, reads them
// back in a shuffled order and checks the one-cycle read latency.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_payload_buffer;
  localparam int DEPTH = 209, AW = 8;
  logic clk = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [7:0] wr_data = 0, rd_data;
  byte unsigned ref_mem [DEPTH];
  int checks = 0, failures = 0;
  payload_buffer #(.DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #3.5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      ref_mem[i] = 8'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = ref_mem[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3 * DEPTH; i++) begin
      int a = (i * 37) % DEPTH;
      @(negedge clk); rd_addr = AW'(a);
      @(posedge clk); #1;
      `CHECK(rd_data == ref_mem[a], "read returns written byte after one cycle")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
