// crc_serial: bit-serial CRC generator in the 802.11b form.
//
// The register is preset to INIT on `init`. While `en` is high one data
// bit per cycle enters (feedback = crc[W-1] ^ din, then shift left and XOR
// POLY). Afterwards `shift` moves the register out one bit per cycle;
// `dout` is the ones complement of the highest bit, so the x^(W-1) term
// of the complemented remainder leaves first, as 802.11b sends its CRCs.
// With W=16, POLY=16'h1021 this is the PLCP header CRC (x^16+x^12+x^5+1);
// with W=32, POLY=32'h04C11DB7 it is the MAC frame check sequence.
//
// The paper only lists "CRC encoding"; the structure is the standard
// serial LFSR, chosen here.
module crc_serial #(
  parameter int unsigned  W    = 16,
  parameter logic [W-1:0] POLY = 16'h1021,
  parameter logic [W-1:0] INIT = '1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,    // preset register (takes priority)
  input  logic         en,      // absorb din
  input  logic         din,
  input  logic         shift,   // shift one result bit out
  output logic         dout,    // next result bit (complemented MSB)
  output logic [W-1:0] crc      // raw register
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     crc <= INIT;
    else if (init)  crc <= INIT;
    else if (en)    crc <= {crc[W-2:0], 1'b0} ^ ((crc[W-1] ^ din) ? POLY : '0);
    else if (shift) crc <= {crc[W-2:0], 1'b1};

  assign dout = ~crc[W-1];
endmodule
