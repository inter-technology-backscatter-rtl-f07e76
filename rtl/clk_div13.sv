// clk_div13: 11 MHz 802.11b chip timing from the 143 MHz master clock.
//
// A modulo-13 counter divides the master clock. chip_en is a one-cycle
// strobe once every 13 cycles, used as the clock enable of all 11 MHz
// logic, so the whole chip stays in one clock domain. clk_11m is the
// divided clock itself (high for 7 of 13 cycles) for anything outside that
// needs a real 11 MHz clock; it is registered and glitch free.
//
// The divide-by-13 follows the paper; the enable strobe and the duty cycle
// are this design's choices.
module clk_div13
  import isc_pkg::*;
#(
  parameter int unsigned DIV = CLK_PER_CHIP
) (
  input  logic clk,       // 143 MHz
  input  logic rst_n,
  output logic chip_en,   // one pulse every DIV cycles
  output logic clk_11m    // divided clock
);
  localparam int unsigned CW = $clog2(DIV);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt     <= '0;
      clk_11m <= 1'b1;
    end else begin
      cnt     <= (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;
      clk_11m <= (cnt < CW'(DIV / 2)) || (cnt == CW'(DIV - 1));
    end

  assign chip_en = (cnt == CW'(DIV - 1));
endmodule
