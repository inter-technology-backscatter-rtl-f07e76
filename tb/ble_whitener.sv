// ble_whitener: model of the Bluetooth LE data-whitening circuit.
//
// Seven-stage shift register, polynomial x^7 + x^4 + 1: stage 6 is the
// whitening bit; it is XORed with the data, fed back into stage 0 and
// XORed into the input of stage 4. `init` loads stage 0 with 1 and stages
// 1..6 with the 6-bit channel number (MSB in stage 1, as Bluetooth does).
// The Bluetooth transmitter, not the backscatter chip, contains this
// circuit; testbenches use it to build an advertising payload that
// whitens to a constant and so makes the transmitter send a single tone.
module ble_whitener (
  input  logic       clk,
  input  logic       init,
  input  logic [5:0] channel,
  input  logic       en,
  input  logic       din,
  output logic       wbit,      // current whitening bit
  output logic       dout       // whitened data
);
  logic [6:0] r;
  assign wbit = r[6];
  assign dout = din ^ r[6];
  always_ff @(posedge clk)
    if (init)    r <= {channel[0], channel[1], channel[2], channel[3], channel[4], channel[5], 1'b1};
    else if (en) r <= {r[5], r[4], r[3] ^ r[6], r[2], r[1], r[0], r[6]};
endmodule
