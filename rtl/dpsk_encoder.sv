// dpsk_encoder: differential BPSK / QPSK phase encoder of 802.11b.
//
// Combinational. Given the phase of the previous symbol and the symbol's
// data bits, it returns the new symbol phase (units of 90 degrees).
// DBPSK (qpsk=0): d0=0 keeps the phase, d0=1 adds 180 degrees.
// DQPSK (qpsk=1), dibit (d0,d1) with d0 first in time: 00 -> +0,
// 01 -> +90, 11 -> +180, 10 -> +270 degrees. extra_pi adds 180 degrees on
// top, which CCK needs on its odd-numbered symbols.
//
// DBPSK/DQPSK is named by the paper; the phase tables are 802.11b's.
module dpsk_encoder
  import isc_pkg::*;
(
  input  phase_t ref_phase,
  input  logic   qpsk,
  input  logic   d0,
  input  logic   d1,
  input  logic   extra_pi,
  output phase_t new_phase
);
  phase_t delta;
  always_comb begin
    if (!qpsk)      delta = d0 ? 2'd2 : 2'd0;
    else
      case ({d0, d1})
        2'b00:   delta = 2'd0;
        2'b01:   delta = 2'd1;
        2'b11:   delta = 2'd2;
        default: delta = 2'd3;
      endcase
    new_phase = ref_phase + delta + (extra_pi ? 2'd2 : 2'd0);
  end
endmodule
