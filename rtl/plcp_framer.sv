// plcp_framer: builds the unscrambled 802.11b bit stream of one packet.
//
// On `start` it latches the PSDU rate and the frame length (bytes in the
// payload buffer, without FCS) and then offers, one bit per transfer on a
// valid/ready stream:
//   SYNC    56 zero bits                     1 Mbit/s  (short preamble)
//   SFD     16 bits of 0x05CF, LSB first     1 Mbit/s
//   header  SIGNAL, SERVICE, LENGTH (32 bits, LSB first per field),
//           then the CRC-16 of those 32 bits 2 Mbit/s
//   PSDU    the frame bytes, LSB first      `rate`
//   FCS     CRC-32 of the frame bytes       `rate`
// Each bit carries the rate at which it is to be modulated, and the FCS's
// final bit is marked `last`. `abort` returns to idle at once. scr_load pulses with `start` so the
// scrambler can be preset. The payload buffer is read with one cycle of
// latency; the stream pauses (valid low) for one cycle per byte while it
// is fetched, which is far quicker than the 11 MHz modulator takes bits.
// SIGNAL is 0x0A/0x14/0x37/0x6E for 1/2/5.5/11 Mbit/s. SERVICE has bit 2
// (locked clocks) set, as chip and carrier clocks share one source, and
// bit 7 is the 11 Mbit/s length extension. LENGTH is the PSDU duration in
// microseconds, rounded up.
//
// The short preamble is chosen because it is the one that reproduces the
// paper's packet sizes: 96 us of preamble and header leave 152 us of the
// 248 us advertising payload, i.e. 38, 104 and 209 bytes at 2, 5.5 and
// 11 Mbit/s. Field layouts are 802.11b's; the paper only says the
// baseband "generates the baseband 802.11b packet" with CRC encoding.
module plcp_framer
  import isc_pkg::*;
#(
  parameter int unsigned AW = 8              // payload buffer address width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // begin a packet (ignored while busy)
  input  logic          abort,      // drop the packet, back to idle
  input  rate_e         rate,       // PSDU rate
  input  logic [AW-1:0] len,        // frame bytes, without FCS
  output logic          busy,
  output logic          scr_load,
  output logic [AW-1:0] rd_addr,
  input  logic [7:0]    rd_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic          out_bit,
  output rate_e         out_rate,
  output logic          out_last
);
  typedef enum logic [2:0] {S_IDLE, S_SYNC, S_SFD, S_HDR, S_HCRC, S_FETCH, S_PSDU, S_FCS} state_e;
  localparam logic [15:0] SFD_SHORT = 16'h05CF;

  state_e        st;
  logic [5:0]    cnt;
  logic [AW-1:0] byte_idx, len_q;
  rate_e         rate_q;
  logic [31:0]   hdr;
  logic          fire;

  // ---- header fields ----
  logic [7:0]  signal_f, service_f;
  logic [15:0] length_f;
  logic [AW+4:0] nbits;                 // PSDU bits = 8*(len+4)
  logic [AW+4:0] l11;
  always_comb begin
    nbits = (AW+5)'(len_q + 4) << 3;
    l11   = (nbits + 10) / 11;
    service_f = 8'h04;
    case (rate_q)
      RATE_1M:  begin signal_f = 8'h0A; length_f = 16'(nbits); end
      RATE_2M:  begin signal_f = 8'h14; length_f = 16'(nbits >> 1); end
      RATE_5M5: begin signal_f = 8'h37; length_f = 16'(((32'(nbits) << 1) + 10) / 11); end
      default:  begin
        signal_f = 8'h6E;
        length_f = 16'(l11);
        service_f[7] = ((l11 * 11) - nbits) >= 8;
      end
    endcase
    hdr = {length_f, service_f, signal_f};
  end

  // ---- CRC generators ----
  logic hcrc_bit, fcs_bit;
  crc_serial #(.W(16), .POLY(16'h1021), .INIT('1)) u_crc16 (
    .clk, .rst_n, .init(start && st == S_IDLE),
    .en(fire && st == S_HDR), .din(out_bit),
    .shift(fire && st == S_HCRC), .dout(hcrc_bit), .crc());
  crc_serial #(.W(32), .POLY(32'h04C11DB7), .INIT('1)) u_crc32 (
    .clk, .rst_n, .init(start && st == S_IDLE),
    .en(fire && st == S_PSDU), .din(out_bit),
    .shift(fire && st == S_FCS), .dout(fcs_bit), .crc());

  // ---- output stream ----
  assign fire     = out_valid && out_ready;
  assign busy     = (st != S_IDLE);
  assign scr_load = start && st == S_IDLE;
  assign rd_addr  = byte_idx;

  always_comb begin
    out_valid = 1'b1;
    out_bit   = 1'b0;
    out_rate  = rate_q;
    out_last  = 1'b0;
    case (st)
      S_SYNC:  begin out_bit = 1'b0;               out_rate = RATE_1M; end
      S_SFD:   begin out_bit = SFD_SHORT[cnt[3:0]]; out_rate = RATE_1M; end
      S_HDR:   begin out_bit = hdr[cnt[4:0]];      out_rate = RATE_2M; end
      S_HCRC:  begin out_bit = hcrc_bit;           out_rate = RATE_2M; end
      S_PSDU:  out_bit = rd_data[cnt[2:0]];
      S_FCS:   begin out_bit = fcs_bit; out_last = (cnt == 6'd31); end
      default: out_valid = 1'b0;          // S_IDLE, S_FETCH
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st       <= S_IDLE;
      cnt      <= '0;
      byte_idx <= '0;
      len_q    <= '0;
      rate_q   <= RATE_1M;
    end else if (abort) begin
      st  <= S_IDLE;
      cnt <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          st <= S_SYNC; cnt <= '0; byte_idx <= '0; len_q <= len; rate_q <= rate;
        end
        S_SYNC: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 6'd55) begin st <= S_SFD; cnt <= '0; end
        end
        S_SFD: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 6'd15) begin st <= S_HDR; cnt <= '0; end
        end
        S_HDR: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 6'd31) begin st <= S_HCRC; cnt <= '0; end
        end
        S_HCRC: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 6'd15) begin
            cnt <= '0;
            st  <= (len_q == '0) ? S_FCS : S_FETCH;
          end
        end
        S_FETCH: st <= S_PSDU;
        S_PSDU: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt[2:0] == 3'd7) begin
            cnt      <= '0;
            byte_idx <= byte_idx + 1'b1;
            st       <= (byte_idx + 1'b1 == len_q) ? S_FCS : S_FETCH;
          end
        end
        S_FCS: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 6'd31) begin st <= S_IDLE; cnt <= '0; end
        end
        default: st <= S_IDLE;
      endcase
    end

  // A bit offered and not taken must be offered again unchanged.
  property p_hold;
    @(posedge clk) disable iff (!rst_n || abort)
      (out_valid && !out_ready && st != S_IDLE) |=> (out_valid && $stable(out_bit) && $stable(out_rate));
  endproperty
  a_hold: assert property (p_hold);
endmodule
