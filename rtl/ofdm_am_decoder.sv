// ofdm_am_decoder: receives bits sent by an OFDM Wi-Fi transmitter as AM.
//
// The Wi-Fi sender encodes each bit in two 4 us OFDM symbols: a "1" is a
// random symbol followed by a constant symbol (energy only in its first
// sample, so the peak detector output falls low), a "0" is two random
// symbols (detector stays high). `env` is the peak detector's comparator
// output, already synchronised to clk. Bits follow at 8 us, 125 kbit/s.
//
// Framing, this design's own: after energy appears the decoder hunts for
// a start bit, a "1" whose low stretch lasts between MIN_LOW_US and
// MAX_LOW_US. The rising edge that ends it marks the start of the first
// data bit. Each of the NBITS data bits is decided by a majority vote of
// `env` samples over its second symbol, skipping GUARD_US at the start of
// that symbol (the constant symbol's initial peak) and at its end. Many
// low samples give "1". Bits are shifted in first-bit-first into the LSB
// side of `word`; `valid` pulses for one cycle after the last bit. The
// decoder then waits until `env` has been low for QUIET_US (end of the
// Wi-Fi packet) before hunting again. If no start bit comes within
// HUNT_US the frame is dropped the same way.
module ofdm_am_decoder #(
  parameter int unsigned CLK_PER_US = 143,
  parameter int unsigned SYM_US     = 4,
  parameter int unsigned NBITS      = 8,
  parameter int unsigned MIN_LOW_US = 2,
  parameter int unsigned MAX_LOW_US = 5,
  parameter int unsigned GUARD_US   = 1,
  parameter int unsigned QUIET_US   = 12,
  parameter int unsigned HUNT_US    = 400
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic             env,
  output logic [NBITS-1:0] word,
  output logic             valid,
  output logic             busy
);
  localparam int unsigned SYM     = SYM_US * CLK_PER_US;
  localparam int unsigned BIT     = 2 * SYM;
  localparam int unsigned MINLOW  = MIN_LOW_US * CLK_PER_US;
  localparam int unsigned MAXLOW  = MAX_LOW_US * CLK_PER_US;
  localparam int unsigned W_START = SYM + GUARD_US * CLK_PER_US;
  localparam int unsigned W_END   = BIT - GUARD_US * CLK_PER_US;
  localparam int unsigned W_LEN   = W_END - W_START;
  localparam int unsigned QUIET   = QUIET_US * CLK_PER_US;
  localparam int unsigned HUNT    = HUNT_US * CLK_PER_US;
  localparam int unsigned TW      = $clog2(HUNT + BIT + 1);
  localparam int unsigned BW      = $clog2(NBITS + 1);

  typedef enum logic [1:0] {D_IDLE, D_HUNT, D_BITS, D_QUIET} dstate_e;
  dstate_e         st;
  logic [TW-1:0]   t, low_run, low_cnt, age;
  logic [BW-1:0]   nbit;
  logic            env_q;

  assign busy = (st == D_HUNT) || (st == D_BITS);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= D_IDLE; t <= '0; low_run <= '0; low_cnt <= '0; age <= '0;
      nbit <= '0; word <= '0; valid <= 1'b0; env_q <= 1'b0;
    end else begin
      valid <= 1'b0;
      env_q <= env;
      case (st)
        D_IDLE: if (enable && env) begin
          st <= D_HUNT; low_run <= '0; age <= '0;
        end
        D_HUNT: begin
          age <= age + 1'b1;
          if (!env) low_run <= low_run + 1'b1;
          else begin
            low_run <= '0;
            if (!env_q && low_run >= TW'(MINLOW) && low_run <= TW'(MAXLOW)) begin
              st <= D_BITS; t <= '0; low_cnt <= '0; nbit <= '0;
            end
          end
          if (low_run >= TW'(QUIET) || age >= TW'(HUNT)) begin
            st <= D_QUIET; low_run <= '0;
          end
        end
        D_BITS: begin
          t <= t + 1'b1;
          if (t >= TW'(W_START) && t < TW'(W_END) && !env) low_cnt <= low_cnt + 1'b1;
          if (t == TW'(BIT - 1)) begin
            t       <= '0;
            low_cnt <= '0;
            word    <= {(low_cnt > TW'(W_LEN / 2)), word[NBITS-1:1]};
            nbit    <= nbit + 1'b1;
            if (nbit == BW'(NBITS - 1)) begin
              valid <= 1'b1;
              st    <= D_QUIET;
              low_run <= '0;
            end
          end
        end
        default: begin  // D_QUIET
          low_run <= env ? '0 : low_run + 1'b1;
          if (low_run >= TW'(QUIET)) st <= D_IDLE;
        end
      endcase
    end
endmodule
