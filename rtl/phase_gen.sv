// phase_gen: four-phase 35.75 MHz carrier from the 143 MHz master clock.
//
// A two-stage Johnson (twisted-ring) counter steps through four states,
// one per master-clock cycle, so each stage toggles at 143/4 = 35.75 MHz.
// The two stages and their complements give four square waves, 90 degrees
// apart. phase[m] is high for the two cycles starting at state m, i.e. it
// is a square-wave cos(theta - m*90deg); phase[0] plays the role of cos and
// phase[1] of sin of the carrier. state is the counter position 0..3, which
// is the carrier angle in units of 90 degrees.
//
// The Johnson counter at 143 MHz follows the paper; the choice of which
// stage output is called phase 0 is this design's own.
module phase_gen (
  input  logic       clk,     // 143 MHz
  input  logic       rst_n,   // active-low asynchronous reset
  output logic [3:0] phase,   // four 35.75 MHz square waves, 90 degrees apart
  output logic [1:0] state    // carrier angle, advances by one (90 deg) per clk
);
  logic [1:0] q;   // Johnson counter: 00 -> 01 -> 11 -> 10 -> 00

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) q <= 2'b00;
    else        q <= {q[0], ~q[1]};

  assign phase = {~q[0], q[1], q[0], ~q[1]};

  always_comb
    case (q)
      2'b00:   state = 2'd0;
      2'b01:   state = 2'd1;
      2'b11:   state = 2'd2;
      default: state = 2'd3;
    endcase
endmodule
