// dot11b_ref_pkg: independent 802.11b reference models for the testbenches.
//
// Written from the 802.11b definitions, separately from the RTL:
//  * crc32_ref / crc16_ref: CRCs computed the textbook way (reflected
//    CRC-32 table-free loop; CRC-16 by long division, MSB first);
//  * cck_chips_ref: CCK chips from the Walsh-like inclusion pattern;
//  * rx_decode: a complete receiver on a list of chip phases (units of
//    90 degrees): Barker despreading or brute-force CCK decoding,
//    differential demodulation, self-synchronising descrambling, SFD
//    search, header parsing with CRC-16 check, PSDU extraction.
package dot11b_ref_pkg;

  typedef logic [1:0] ph_t;
  typedef byte unsigned bytes_t[$];
  typedef ph_t chips_t[$];

  localparam int BARKER[11] = '{1, -1, 1, 1, -1, 1, 1, 1, -1, -1, -1};

  function automatic logic [31:0] crc32_ref(bytes_t d);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (d[i]) begin
      c ^= 32'(d[i]);
      for (int k = 0; k < 8; k++) c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    end
    return ~c;
  endfunction

  // CRC-16 (x^16+x^12+x^5+1), preset ones, output complemented, over a
  // list of bits in transmission order.
  function automatic logic [15:0] crc16_bits_ref(logic bits[$]);
    logic [15:0] r = 16'hFFFF;
    foreach (bits[i]) begin
      logic fb;
      fb = r[15] ^ bits[i];
      r  = r << 1;
      if (fb) r = r ^ 16'h1021;
    end
    return ~r;
  endfunction

  // DQPSK phase step for dibit (d0,d1), d0 first: 00 0, 01 90, 11 180, 10 270.
  function automatic ph_t dq_step(logic d0, logic d1);
    if (!d0 && !d1) return 0;
    if (!d0 &&  d1) return 1;
    if ( d0 &&  d1) return 2;
    return 3;
  endfunction

  function automatic void cck_chips_ref(logic [7:0] d, bit r11, bit odd, ph_t prev,
                                        output ph_t c[8], output ph_t p1);
    ph_t p2, p3, p4;
    int a[8] = '{1,0,1,0,1,0,1,0};
    int b[8] = '{1,1,0,0,1,1,0,0};
    int e[8] = '{1,1,1,1,0,0,0,0};
    p1 = prev + dq_step(d[0], d[1]) + (odd ? 2 : 0);
    if (r11) begin
      p2 = 2 * d[2] + d[3];
      p3 = 2 * d[4] + d[5];
      p4 = 2 * d[6] + d[7];
    end else begin
      p2 = 2 * d[2] + 1;
      p3 = 0;
      p4 = 2 * d[3];
    end
    for (int k = 0; k < 8; k++)
      c[k] = p1 + ph_t'(a[k]) * p2 + ph_t'(b[k]) * p3 + ph_t'(e[k]) * p4 + ((k == 3 || k == 6) ? 2 : 0);
  endfunction

  // Expected PSDU bytes for a LENGTH field at a SIGNAL rate code.
  function automatic int psdu_bytes(logic [7:0] sig, logic [15:0] len, logic ext);
    case (sig)
      8'h0A: return len / 8;
      8'h14: return len / 4;
      8'h37: return (len * 11) / 16;
      8'h6E: return (len * 11) / 8 - (ext ? 1 : 0);
      default: return -1;
    endcase
  endfunction

  // Receiver. Returns the PSDU bytes; errs counts chip mismatches and
  // format errors; hdr returns {LENGTH, SERVICE, SIGNAL}; nchips_used the
  // chips the packet occupied.
  function automatic bytes_t rx_decode(chips_t ch, output int errs,
                                       output logic [31:0] hdr, output int nchips_used);
    bytes_t out;
    int idx = 0;
    ph_t prev;
    logic [6:0] dsr = 0;
    logic [15:0] sfd = 0;
    logic hb[$];
    int nb, nsym_bits, nbytes, state; // state 0 sync,1 hdr,2 psdu
    logic [7:0] cur; int bitc;
    bit odd;
    logic [15:0] hcrc;
    errs = 0; hdr = 0; nchips_used = 0;
    if (ch.size() < 11) begin errs = 1; return out; end
    prev = ch[0];
    idx = 11;
    state = 0; nb = 0; nbytes = -1; bitc = 0; cur = 0; odd = 0;
    while (1) begin
      logic rb[8];
      int k;
      string sig;
      if (state == 2 && out.size() == nbytes) break;
      if (state == 0 || state == 1 || hdr[7:0] == 8'h0A || hdr[7:0] == 8'h14) begin
        ph_t s;
        bit q = (state == 1) || (state == 2 && hdr[7:0] == 8'h14);
        if (idx + 11 > ch.size()) begin errs++; break; end
        s = ch[idx];
        for (int i = 0; i < 11; i++)
          if (ch[idx + i] != ph_t'(s + (BARKER[i] < 0 ? 2 : 0))) errs++;
        idx += 11;
        if (q) begin
          ph_t dlt = s - prev;
          rb[0] = (dlt == 2 || dlt == 3); rb[1] = (dlt == 1 || dlt == 2); k = 2;
        end else begin
          ph_t dlt = s - prev;
          rb[0] = (dlt == 2); k = 1;
          if (dlt == 1 || dlt == 3) errs++;
        end
        prev = s;
        odd = 0;
      end else begin
        bit r11 = (hdr[7:0] == 8'h6E);
        int ncand = r11 ? 256 : 16;
        int found = -1;
        ph_t c[8], p1, fp1;
        if (idx + 8 > ch.size()) begin errs++; break; end
        for (int v = 0; v < ncand; v++) begin
          bit ok = 1;
          cck_chips_ref(8'(v), r11, odd, prev, c, p1);
          for (int i = 0; i < 8; i++) if (c[i] != ch[idx + i]) ok = 0;
          if (ok) begin found = v; fp1 = p1; end
        end
        if (found < 0) begin errs++; found = 0; fp1 = ch[idx + 7]; end
        k = r11 ? 8 : 4;
        for (int i = 0; i < k; i++) rb[i] = found[i];
        prev = fp1;
        odd = !odd;
        idx += 8;
      end
      // descramble and consume bits
      for (int i = 0; i < k; i++) begin
        logic b;
        b = rb[i] ^ dsr[3] ^ dsr[6];
        dsr = {dsr[5:0], rb[i]};
        nb++;
        case (state)
          0: begin
            sfd = {b, sfd[15:1]};
            if (nb >= 16 && sfd == 16'h05CF) state = 1;
            if (nb > 400) begin errs++; return out; end
          end
          1: begin
            hb.push_back(b);
            if (hb.size() == 48) begin
              logic hbits[$];
              for (int j = 0; j < 32; j++) begin hdr[j] = hb[j]; hbits.push_back(hb[j]); end
              for (int j = 0; j < 16; j++) hcrc[15 - j] = hb[32 + j];
              if (hcrc != crc16_bits_ref(hbits)) errs++;
              nbytes = psdu_bytes(hdr[7:0], hdr[31:16], hdr[15]);
              if (nbytes < 0) begin errs++; return out; end
              state = 2;
              odd = 0;
            end
          end
          default: begin
            cur[bitc] = b;
            bitc++;
            if (bitc == 8) begin out.push_back(cur); bitc = 0; end
          end
        endcase
      end
    end
    nchips_used = idx;
    return out;
  endfunction

endpackage
