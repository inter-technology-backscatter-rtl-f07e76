// ssb_modulator: single-sideband backscatter modulator.
//
// The backscatter switch must present exp(j*2*pi*df*t) times the 802.11b
// baseband symbol, with df = 35.75 MHz. The carrier is approximated by
// square waves: phase[m] (from phase_gen) is a square cos(theta - m*90deg).
// Multiplying by a baseband chip of phase p (units of 90 degrees) only
// rotates the carrier, so two 4:1 multiplexers pick the rotated carrier:
//   I = cos(theta + p*90deg) = phase[(-p) mod 4]
//   Q = sin(theta + p*90deg) = phase[(1-p) mod 4]
// The pair (I,Q), each read as +1/-1, is one of 1+j, 1-j, -1+j, -1-j and
// selects one of the four impedance states (isc_pkg::iq_to_z). Outputs
// are registered on the 143 MHz clock, one cycle after their inputs. When
// `en` is low the switch rests in the state for 1+j (no modulation).
//
// The two multiplexers and the I/Q-to-impedance mapping follow the paper.
// Which impedance belongs to which reflection value is read from the
// order in which the paper lists them (see isc_pkg).
module ssb_modulator
  import isc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,          // backscatter active
  input  phase_t     chip_phase,  // baseband chip, units of 90 degrees
  input  logic [3:0] phase,       // four carrier phases from phase_gen
  output logic       i_out,       // in-phase sign (1 = +1)
  output logic       q_out,       // quadrature sign (1 = +1)
  output zstate_e    zsel         // impedance state select
);
  logic   i_mux, q_mux;
  phase_t si, sq;

  assign si    = 2'd0 - chip_phase;
  assign sq    = 2'd1 - chip_phase;
  assign i_mux = phase[si];
  assign q_mux = phase[sq];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      i_out <= 1'b1; q_out <= 1'b1; zsel <= Z_3PF;
    end else if (en) begin
      i_out <= i_mux; q_out <= q_mux; zsel <= iq_to_z(i_mux, q_mux);
    end else begin
      i_out <= 1'b1; q_out <= 1'b1; zsel <= Z_3PF;
    end
endmodule
