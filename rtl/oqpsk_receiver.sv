// oqpsk_receiver -- IEEE 802.15.4 2.4 GHz O-QPSK receiver: synchronisation,
// chip decisions, correlating DSSS de-spreader, byte assembly and RSS.
//
// Input is the complex baseband stream of the RX front end, one sample per
// in_valid strobe, SPC samples per chip period Tc (Tc = 0.5 us, 2 Mchip/s).
// The input is taken to be carrier-synchronous (coherent): the sign of I at the
// peak of an even chip and the sign of Q at the peak of an odd chip give the
// chips directly. Carrier frequency/phase recovery is not part of this block: a
// static phase error below 90 degrees is tolerated, a residual frequency offset
// only while the phase stays within that range over a frame (a few hundred Hz).
//
// How it works. The last 32*SPC hard decisions of I and Q are kept in shift
// registers; at every sample the 32 chips of a symbol window ending "now" are
// read out (chip k from I for even k, from Q for odd k, spaced SPC samples) and
// compared with all 16 chip sequences; the nearest sequence gives the symbol and
// its Hamming distance the quality.
//   SEARCH : wait for a window within SYNC_DIST of symbol 0 (preamble).
//   ALIGN  : over the next SPC samples note the last window still within
//            SYNC_DIST, and lock the symbol clock half-way between the first and
//            that last one (the chip peaks). Centring on the run of good timings,
//            rather than a fixed delay after the first, keeps the decisions on the
//            peaks when a static carrier phase offset narrows that run.
//   PREAMB : one decision every 32*SPC samples; zeros stay, 7 then A is the SFD
//            (0xA7, low nibble first), anything else returns to SEARCH.
//   DATA   : every symbol is a nibble, two form a byte (low nibble first) on
//            byte_valid. A symbol farther than LOST_DIST from every sequence, or
//            frame_end from the framer, returns to SEARCH (lost pulses on the former).
// RSS: the mean of I^2+Q^2 over each symbol window is converted to dB
// (3*log2 approximation with 3 fraction bits) and, when the SFD is found, latched
// as rss_dbm = dB + RSS_OFFSET_DB. RSS_OFFSET_DB stands for the front-end gain
// calibration, which the paper does not give.
// Timing: byte_valid rises one clock after the sample that carries the peak of the
// byte's last chip. The paper reports under 4 us from air to rule checker; here it
// is the half chip (0.25 us) of the last chip's tail plus one clock.
// The paper names the method (coherent O-QPSK, correlating de-spreader, preamble
// synchronisation); the state machine, thresholds and RSS estimator are this
// design's own choices.
module oqpsk_receiver
  import guardian_pkg::*;
#(
  parameter int SPC           = 2,    // samples per chip period (power of two: 1, 2, 4)
  parameter int SYNC_DIST     = 4,    // max chip errors to accept a preamble symbol
  parameter int LOST_DIST     = 8,    // chip errors above which lock is dropped
  parameter int RSS_OFFSET_DB = -140  // dBFS (1 LSB^2 power) to dBm calibration
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  sample_t           in_i,
  input  sample_t           in_q,
  input  logic              frame_end,   // framer has received the whole frame
  output logic              sfd_det,     // pulse: SFD found, frame starts
  output logic              byte_valid,
  output logic [7:0]        byte_data,
  output logic              lost,        // pulse: lock lost inside a frame
  output logic              in_frame,
  output logic signed [7:0] rss_dbm,     // latched at SFD
  output logic [3:0]        sym_out,     // last despread symbol (for monitoring)
  output logic [5:0]        sym_dist     // its Hamming distance
);

  localparam int L      = CHIPS_PER_SYM * SPC;   // samples per symbol
  localparam int LOG2L  = $clog2(L);

  typedef enum logic [1:0] {S_SEARCH, S_ALIGN, S_PREAMB, S_DATA} state_e;
  state_e state;

  logic [L-1:0] hd_i, hd_q;      // bit 0 = newest sample
  logic [LOG2L-1:0] scnt;        // sample counter inside a symbol
  localparam int AW = $clog2(SPC + 1);
  logic [AW-1:0]    acnt;        // ALIGN: samples since the first preamble hit
  logic [AW-1:0]    hit_last;    // ALIGN: offset of the latest preamble hit
  logic [AW-1:0]    hit_end;     // ALIGN: last hit including the current sample
  logic [AW-1:0]    centre;      // ALIGN: chosen offset of the chip peaks
  logic         sfd_half;        // a 7 was seen, A expected
  logic         nib_hi;          // next nibble is the high one
  logic [3:0]   nib_lo;

  // --------------------------------------------------- window and correlation
  logic [31:0] win;
  logic [3:0]  best_sym;
  logic [5:0]  best_dist;
  logic        cur_i, cur_q;
  assign cur_i = ~in_i[SAMPLE_W-1];
  assign cur_q = ~in_q[SAMPLE_W-1];

  always_comb begin
    logic [L-1:0] ni, nq;
    ni = {hd_i[L-2:0], cur_i};
    nq = {hd_q[L-2:0], cur_q};
    for (int k = 0; k < 32; k++) begin
      if (k % 2 == 0) win[k] = ni[(31-k)*SPC];
      else            win[k] = nq[(31-k)*SPC];
    end
  end

  always_comb begin
    logic [5:0] d;
    best_sym  = '0;
    best_dist = 6'd33;
    for (int s = 0; s < 16; s++) begin
      d = 6'($countones(win ^ chip_seq(4'(s))));
      if (d < best_dist) begin
        best_dist = d;
        best_sym  = 4'(s);
      end
    end
  end

  logic [5:0] dist0;
  assign dist0 = 6'($countones(win ^ chip_seq(4'd0)));

  assign hit_end = (dist0 <= 6'(SYNC_DIST)) ? AW'(SPC) : hit_last;
  assign centre  = hit_end >> 1;

  // --------------------------------------------------- RSS estimator
  logic [31:0] pwr;
  logic [31+LOG2L:0] pacc;
  logic [31:0] pavg;
  assign pwr = 32'(in_i * in_i) + 32'(in_q * in_q);

  function automatic logic [7:0] pow_db(input logic [31:0] p);
    int e;
    logic [2:0] f;
    logic [31:0] sh;
    e = 0;
    for (int b = 0; b < 32; b++) if (p[b]) e = b;
    sh = p << (31 - e);
    f  = sh[30:28];
    return 8'(((e * 8 + int'(f)) * 3) / 8);
  endfunction

  // --------------------------------------------------- control
  logic sym_tick;
  assign sym_tick = in_valid && (scnt == LOG2L'(L-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_SEARCH;
      hd_i       <= '0;
      hd_q       <= '0;
      scnt       <= '0;
      acnt       <= '0;
      hit_last   <= '0;
      sfd_half   <= 1'b0;
      nib_hi     <= 1'b0;
      nib_lo     <= '0;
      sfd_det    <= 1'b0;
      byte_valid <= 1'b0;
      byte_data  <= '0;
      lost       <= 1'b0;
      rss_dbm    <= '0;
      pacc       <= '0;
      pavg       <= '0;
      sym_out    <= '0;
      sym_dist   <= '0;
    end else begin
      sfd_det    <= 1'b0;
      byte_valid <= 1'b0;
      lost       <= 1'b0;
      if (in_valid) begin
        hd_i <= {hd_i[L-2:0], cur_i};
        hd_q <= {hd_q[L-2:0], cur_q};
        scnt <= scnt + 1'b1;
        if (scnt == LOG2L'(L-1)) begin
          pacc <= '0;
          pavg <= 32'((pacc + (32+LOG2L)'(pwr)) >> LOG2L);
        end else begin
          pacc <= pacc + (32+LOG2L)'(pwr);
        end
        unique case (state)
          S_SEARCH: begin
            if (dist0 <= 6'(SYNC_DIST)) begin
              // first hit: the earliest acceptable timing
              state    <= (SPC >= 2) ? S_ALIGN : S_PREAMB;
              scnt     <= '0;
              acnt     <= AW'(1);
              hit_last <= '0;
              pacc     <= '0;
              sfd_half <= 1'b0;
            end
          end
          S_ALIGN: begin
            // look at the SPC samples after the first hit and centre the symbol
            // clock between the first and the last acceptable timing: the next
            // decision falls at offset c + L with c = last/2, so scnt restarts
            // at SPC - c (decisions happen when scnt reaches L-1)
            if (acnt == AW'(SPC)) begin
              state <= S_PREAMB;
              scnt  <= LOG2L'(SPC) - LOG2L'(centre);
              pacc  <= '0;
            end else begin
              if (dist0 <= 6'(SYNC_DIST)) hit_last <= acnt;
              acnt <= acnt + AW'(1);
            end
          end
          default: ;
        endcase
        if (sym_tick && (state == S_PREAMB || state == S_DATA)) begin
          sym_out  <= best_sym;
          sym_dist <= best_dist;
        end
        if (sym_tick && state == S_PREAMB) begin
          if (best_dist > 6'(LOST_DIST)) begin
            state <= S_SEARCH;
          end else if (!sfd_half && best_sym == 4'h0) begin
            sfd_half <= 1'b0;
          end else if (!sfd_half && best_sym == SFD_BYTE[3:0]) begin
            sfd_half <= 1'b1;
          end else if (sfd_half && best_sym == SFD_BYTE[7:4]) begin
            state   <= S_DATA;
            sfd_det <= 1'b1;
            nib_hi  <= 1'b0;
            rss_dbm <= 8'(int'(pow_db(pavg)) + RSS_OFFSET_DB);
          end else begin
            state <= S_SEARCH;
          end
        end
        if (sym_tick && state == S_DATA) begin
          if (best_dist > 6'(LOST_DIST)) begin
            state <= S_SEARCH;
            lost  <= 1'b1;
          end else if (!nib_hi) begin
            nib_lo <= best_sym;
            nib_hi <= 1'b1;
          end else begin
            byte_data  <= {best_sym, nib_lo};
            byte_valid <= 1'b1;
            nib_hi     <= 1'b0;
          end
        end
      end
      if (frame_end && state == S_DATA) state <= S_SEARCH;
    end
  end

  assign in_frame = (state == S_DATA);

  // SPC must be a power of two so that a symbol is 2^n samples
  initial assert (SPC == 1 || SPC == 2 || SPC == 4)
    else $error("oqpsk_receiver: SPC must be 1, 2 or 4");

endmodule
