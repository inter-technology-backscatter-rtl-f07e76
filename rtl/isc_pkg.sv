// isc_pkg: types and constants shared by the backscatter chip.
//
// Clocking: one master clock of 143 MHz. The 35.75 MHz single-sideband
// carrier is 143/4 MHz and the 802.11b chip rate is 143/13 = 11 MHz, so
// both derive from the same edge and stay phase locked.
//
// Phases are 2-bit numbers in units of 90 degrees. Phase p stands for the
// constellation point exp(j*(pi/4 + p*pi/2)): 0 = 1+j, 1 = -1+j,
// 2 = -1-j, 3 = 1-j. The constant pi/4 offset is dropped everywhere, as a
// differential receiver cannot see it.
package isc_pkg;

  // Master clock cycles per microsecond (143 MHz).
  localparam int unsigned CLK_PER_US = 143;
  // Master clock cycles per 802.11b chip (143 MHz / 11 MHz).
  localparam int unsigned CLK_PER_CHIP = 13;

  typedef logic [1:0] phase_t;

  // 802.11b data rates.
  typedef enum logic [1:0] {
    RATE_1M  = 2'd0,   // DBPSK, Barker
    RATE_2M  = 2'd1,   // DQPSK, Barker
    RATE_5M5 = 2'd2,   // CCK, 4 bits per symbol
    RATE_11M = 2'd3    // CCK, 8 bits per symbol
  } rate_e;

  // Impedance states of the backscatter switch network, in the order the
  // reflection values 1+j, 1-j, -1+j, -1-j are listed.
  typedef enum logic [1:0] {
    Z_3PF  = 2'd0,     // reflection  1+j
    Z_OPEN = 2'd1,     // reflection  1-j
    Z_1PF  = 2'd2,     // reflection -1+j
    Z_2NH  = 2'd3      // reflection -1-j
  } zstate_e;

  // Barker sequence +1 -1 +1 +1 -1 +1 +1 +1 -1 -1 -1, first chip first;
  // a 1 here means the chip is -1 (phase advanced by 180 degrees).
  localparam logic [10:0] BARKER_FLIP = 11'b11100010010; // bit i = chip i

  // Bits carried by one symbol at each rate.
  function automatic int unsigned bits_per_symbol(rate_e r);
    case (r)
      RATE_1M:  return 1;
      RATE_2M:  return 2;
      RATE_5M5: return 4;
      default:  return 8;
    endcase
  endfunction

  // Chips per symbol: 11 for Barker (1 and 2 Mbit/s), 8 for CCK.
  function automatic int unsigned chips_per_symbol(rate_e r);
    return (r == RATE_1M || r == RATE_2M) ? 11 : 8;
  endfunction

  // Sign bits (1 = +1, 0 = -1) of the I and Q parts of a phase.
  function automatic logic [1:0] phase_to_iq(phase_t p);
    case (p)
      2'd0: return 2'b11;  // 1+j
      2'd1: return 2'b01;  // -1+j
      2'd2: return 2'b00;  // -1-j
      default: return 2'b10; // 1-j
    endcase
  endfunction

  // Impedance state for a reflection whose I and Q signs are given.
  function automatic zstate_e iq_to_z(logic i, logic q);
    case ({i, q})
      2'b11: return Z_3PF;
      2'b10: return Z_OPEN;
      2'b01: return Z_1PF;
      default: return Z_2NH;
    endcase
  endfunction

endpackage
