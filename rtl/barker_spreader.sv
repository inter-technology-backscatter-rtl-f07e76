// barker_spreader: 11-chip Barker spreading of a 1/2 Mbit/s symbol.
//
// Combinational. Chip number chip_idx (0..10, 0 first in time) of a
// symbol with phase sym_phase is the symbol phase, advanced by 180 degrees
// where the Barker sequence +1 -1 +1 +1 -1 +1 +1 +1 -1 -1 -1 is -1. This is
// the XOR of each data bit with the Barker sequence that the paper
// describes, written in phase form.
module barker_spreader
  import isc_pkg::*;
(
  input  phase_t     sym_phase,
  input  logic [3:0] chip_idx,
  output phase_t     chip_phase
);
  always_comb
    chip_phase = sym_phase + ((chip_idx < 4'd11 && BARKER_FLIP[chip_idx]) ? 2'd2 : 2'd0);
endmodule
