// scrambler: 802.11b self-synchronising data scrambler, x^7 + x^4 + 1.
//
// Each accepted input bit leaves as out = in ^ s[3] ^ s[6], where s[k] is
// the scrambled bit sent k+1 bits earlier; the scrambled bit is then
// shifted into s. It sits in a valid/ready bit stream and adds no latency:
// out_valid = in_valid, in_ready = out_ready, and the register advances
// on each transfer. `load` presets the register with SEED before a packet.
// The side-band signals (rate, last) pass along with the bit.
//
// The polynomial is the paper's (the same as its whitening figure). The
// self-synchronising form is 802.11b's; the seed 0011011 (s[0] first) is
// the one 802.11b uses with the short preamble, taken from the standard.
module scrambler
  import isc_pkg::*;
#(
  parameter logic [6:0] SEED = 7'b1101100   // s[6:0]; s[0]=0,s[1]=0,s[2]=1,...
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  logic  in_valid,
  output logic  in_ready,
  input  logic  in_bit,
  input  rate_e in_rate,
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output logic  out_bit,
  output rate_e out_rate,
  output logic  out_last
);
  logic [6:0] s;

  assign out_bit   = in_bit ^ s[3] ^ s[6];
  assign out_valid = in_valid;
  assign in_ready  = out_ready;
  assign out_rate  = in_rate;
  assign out_last  = in_last;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                      s <= SEED;
    else if (load)                   s <= SEED;
    else if (in_valid && out_ready)  s <= {s[5:0], out_bit};
endmodule
