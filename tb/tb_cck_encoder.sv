// tb_cck_encoder: all 256 (11 Mbit/s) and 16 (5.5 Mbit/s) inputs, both
// symbol parities and all reference phases, against the reference code
// words of dot11b_ref_pkg. Also checks that the 64 code words of one phi1
// are distinct (the code is decodable).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_cck_encoder;
  import dot11b_ref_pkg::*;
  logic [7:0] d;
  logic rate11, odd;
  logic [1:0] ref_phase, phi1;
  logic [1:0] chips [8];
  int checks = 0, failures = 0;
  cck_encoder dut (.*);
  initial begin
    ph_t c[8], p1;
    for (int r = 0; r < 2; r++)
      for (int o = 0; o < 2; o++)
        for (int p = 0; p < 4; p++)
          for (int v = 0; v < (r ? 256 : 16); v++) begin
            automatic bit same = 1;
            d = 8'(v); rate11 = 1'(r); odd = 1'(o); ref_phase = 2'(p);
            #1;
            cck_chips_ref(d, r, o, ph_t'(p), c, p1);
            for (int k = 0; k < 8; k++) if (chips[k] != c[k]) same = 0;
            `CHECK(same, "CCK code word")
            `CHECK(phi1 == p1, "phi1")
          end
    begin
      logic [15:0] seen [$];
      rate11 = 1; odd = 0; ref_phase = 0;
      for (int v = 0; v < 256; v += 4) begin
        logic [15:0] w;
        d = 8'(v); #1;
        for (int k = 0; k < 8; k++) w[2*k +: 2] = chips[k];
        foreach (seen[i]) `CHECK(seen[i] != w, "distinct code words")
        seen.push_back(w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
