// cck_encoder: complementary code keying for 5.5 and 11 Mbit/s.
//
// Combinational. One CCK symbol carries d[7:0] (11 Mbit/s) or d[3:0]
// (5.5 Mbit/s), d[0] first in time. Four phases are derived:
//   phi1 = DQPSK(d0,d1) relative to the previous symbol's phi1, plus 180
//          degrees on odd-numbered symbols;
//   11 Mbit/s: phi2 = (d2,d3), phi3 = (d4,d5), phi4 = (d6,d7), each dibit
//          read as a binary number of 90-degree steps (00,01,10,11);
//   5.5 Mbit/s: phi2 = d2*180 + 90, phi3 = 0, phi4 = d3*180.
// The eight chips, c0 first in time, are
//   c0 = phi1+phi2+phi3+phi4, c1 = phi1+phi3+phi4, c2 = phi1+phi2+phi4,
//   c3 = phi1+phi4+180,       c4 = phi1+phi2+phi3, c5 = phi1+phi3,
//   c6 = phi1+phi2+180,       c7 = phi1.
// All chips are QPSK points, so they map onto the four impedance states.
//
// The paper names CCK and says 4 bits map to 8-chip code words; the
// phase equations are those of 802.11b.
module cck_encoder
  import isc_pkg::*;
(
  input  logic [7:0] d,
  input  logic       rate11,     // 1: 11 Mbit/s, 0: 5.5 Mbit/s
  input  logic       odd,        // odd-numbered CCK symbol
  input  phase_t     ref_phase,  // phi1 of the previous symbol
  output phase_t     chips [8],
  output phase_t     phi1
);
  phase_t phi2, phi3, phi4;

  dpsk_encoder u_dq (
    .ref_phase (ref_phase), .qpsk(1'b1), .d0(d[0]), .d1(d[1]),
    .extra_pi  (odd), .new_phase(phi1)
  );

  always_comb begin
    if (rate11) begin
      phi2 = {d[2], d[3]};
      phi3 = {d[4], d[5]};
      phi4 = {d[6], d[7]};
    end else begin
      phi2 = {d[2], 1'b1};
      phi3 = 2'd0;
      phi4 = {d[3], 1'b0};
    end
    chips[0] = phi1 + phi2 + phi3 + phi4;
    chips[1] = phi1 + phi3 + phi4;
    chips[2] = phi1 + phi2 + phi4;
    chips[3] = phi1 + phi4 + 2'd2;
    chips[4] = phi1 + phi2 + phi3;
    chips[5] = phi1 + phi3;
    chips[6] = phi1 + phi2 + 2'd2;
    chips[7] = phi1;
  end
endmodule
