// tb_link_ctrl: query-reply and Bluetooth timing.
//  * a query for another id is ignored (query_miss), one for this id arms
//    once the detector has been quiet for 12 us;
//  * a 20 us energy burst after arming is rejected (false_trig);
//  * a Bluetooth packet: bb_start exactly (56+48+4) us after the rising
//    edge, tx_sel high from then until bb_done, sent pulses;
//  * a packet whose baseband never finishes is aborted exactly at the
//    Bluetooth CRC, (56+48+248) us after the rising edge;
//  * beacon mode transmits on every advertisement without a query.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_link_ctrl;
  localparam int CPU = 143;
  logic clk = 0, rst_n = 0, env = 0, beacon_mode = 0;
  logic [7:0] dev_id = 8'h3C, dec_word = 0;
  logic dec_en, dec_valid = 0, bb_start, bb_abort, bb_done = 0, tx_sel;
  logic sent, aborted, false_trig, query_hit, query_miss;
  int checks = 0, failures = 0;
  int cyc = 0, t_start = -1, t_abort = -1, n_start = 0, n_sent = 0, n_abort = 0, n_false = 0, n_hit = 0, n_miss = 0;
  link_ctrl #(.CLK_PER_US(CPU)) dut (.*);
  always #3.5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (bb_start) begin t_start = cyc; n_start++; end
    if (bb_abort) t_abort = cyc;
    n_sent += sent; n_abort += aborted; n_false += false_trig; n_hit += query_hit; n_miss += query_miss;
  end

  initial begin
    #80000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic query(logic [7:0] w);
    env = 1; repeat (100) @(negedge clk);
    dec_word = w; dec_valid = 1; @(negedge clk); dec_valid = 0;
    repeat (100) @(negedge clk); env = 0;
    repeat (15 * CPU) @(negedge clk);   // query packet over: quiet
  endtask

  // Bluetooth packet; finish_us < 0 means the baseband never says done
  task automatic ble(int finish_us, output int t_rise);
    env = 1; t_rise = cyc;
    fork
      begin
        repeat (376 * CPU) @(negedge clk);
        env = 0;
      end
      begin
        if (finish_us >= 0) begin
          wait (tx_sel);
          repeat (finish_us * CPU) begin
            @(negedge clk);
            `CHECK(tx_sel, "tx_sel held during transmission")
          end
          bb_done = 1; @(negedge clk); bb_done = 0; #1;
          `CHECK(!tx_sel, "tx_sel drops after done")
        end
      end
    join
    repeat (20 * CPU) @(negedge clk);   // gap longer than the quiet time
  endtask

  initial begin
    int tr;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(dec_en && !tx_sel, "listening after reset")
    query(8'h11);
    `CHECK(n_miss == 1 && n_hit == 0 && dec_en, "other id ignored")
    query(8'h3C);
    `CHECK(n_hit == 1 && !dec_en, "own id arms the chip")
    env = 1; repeat (20 * CPU) @(negedge clk); env = 0; repeat (50) @(negedge clk);
    `CHECK(n_false == 1 && n_start == 0, "short burst rejected as false trigger")
    ble(150, tr);
    `CHECK(n_start == 1 && t_start - tr == 108 * CPU + 2, "bb_start 108 us (+2 register cycles) after the rising edge")
    `CHECK(n_sent == 1 && dec_en, "sent, then listening again")
    query(8'h3C);
    ble(-1, tr);
    `CHECK(n_abort == 1 && t_abort - tr == 352 * CPU + 2, "abort at the Bluetooth CRC, 352 us (+2 cycles) after the edge")
    `CHECK(!tx_sel && dec_en, "idle after abort")
    beacon_mode = 1;
    repeat (15 * CPU) @(negedge clk);
    ble(100, tr);
    ble(100, tr);
    `CHECK(n_start == 4 && n_sent == 3, "beacon mode answers every advertisement")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
