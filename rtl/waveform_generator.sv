// waveform_generator -- baseband interference waveforms for the guardian.
//
// One complex sample per sample_en strobe (the TX sample rate, SPC samples per
// 0.5 us chip period). `start` restarts the waveform (phase, chip and noise
// filter state) so that every burst begins the same way. Three modes, as in the
// paper:
//   WAVE_CW    : a continuous wave at the channel centre, i.e. a constant I = amp,
//                Q = 0 at baseband;
//   WAVE_NOISE : white noise band-limited around the centre: two 12-bit LFSR
//                uniform samples (I, Q) per strobe through a moving sum of 8
//                samples (first spectral null at fs/8 = 500 kHz for 4 MS/s), scaled
//                so that the peak is about amp;
//   WAVE_OQPSK : random 802.15.4 symbols, spread with the standard chip
//                sequences and O-QPSK modulated with half-sine pulses: even chips
//                on I, odd chips on Q, Q delayed by one chip period.
// Output samples appear one clock after sample_en (out_valid).
// The paper names the three waveforms and the 500 kHz noise bandwidth; the LFSR,
// the boxcar filter and the amplitude scaling are this design's choices. The
// paper's Fig. 2 draws the waveform generator as firmware; here it is logic.
module waveform_generator
  import guardian_pkg::*;
#(
  parameter int SPC = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        sample_en,
  input  wave_mode_e  mode,
  input  logic [14:0] amp,
  output logic        out_valid,
  output sample_t     out_i,
  output sample_t     out_q
);

  localparam int L = CHIPS_PER_SYM * SPC;   // samples per symbol
  localparam int LOG2L = $clog2(L);

  // ------------------------------------------------------------ LFSR (x^32+x^22+x^2+x+1)
  logic [31:0] lfsr;
  function automatic logic [31:0] lfsr_step(input logic [31:0] s);
    return {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction
  logic [31:0] lfsr_n;
  always_comb begin
    lfsr_n = lfsr;
    for (int k = 0; k < 24; k++) lfsr_n = lfsr_step(lfsr_n);
  end

  // ------------------------------------------------------------ noise filter
  logic signed [11:0] ni_hist [8];
  logic signed [11:0] nq_hist [8];
  logic signed [14:0] ni_sum, nq_sum;

  // ------------------------------------------------------------ O-QPSK state
  logic [LOG2L-1:0] scnt;
  logic [31:0]      chips;
  logic             chip_i, chip_q, q_started;
  logic [$clog2(2*SPC)-1:0] ph_i, ph_q;

  function automatic sample_t scale(input logic signed [15:0] x, input logic [14:0] a);
    logic signed [31:0] p;
    p = x * $signed({1'b0, a});
    return sample_t'(p >>> 14);
  endfunction

  function automatic sample_t pulse(input logic chip, input logic [14:0] shape,
                                    input logic [14:0] a);
    logic signed [15:0] s;
    s = chip ? $signed({1'b0, shape}) : -$signed({1'b0, shape});
    return scale(s, a);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr      <= 32'hACE1_2468;
      ni_sum    <= '0;
      nq_sum    <= '0;
      for (int k = 0; k < 8; k++) begin ni_hist[k] <= '0; nq_hist[k] <= '0; end
      scnt      <= '0;
      chips     <= '0;
      chip_i    <= 1'b0;
      chip_q    <= 1'b0;
      q_started <= 1'b0;
      ph_i      <= '0;
      ph_q      <= '0;
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        scnt      <= '0;
        q_started <= 1'b0;
        ni_sum    <= '0;
        nq_sum    <= '0;
        for (int k = 0; k < 8; k++) begin ni_hist[k] <= '0; nq_hist[k] <= '0; end
      end else if (sample_en) begin
        logic signed [11:0] ni, nq;
        logic signed [14:0] si, sq;
        logic [31:0]        ch;
        logic               ci, cq, qs;
        logic [$clog2(2*SPC)-1:0] pi, pq;
        lfsr      <= lfsr_n;
        out_valid <= 1'b1;
        // noise: moving sum of 8 uniform samples
        ni = $signed(lfsr_n[11:0]);
        nq = $signed(lfsr_n[23:12]);
        si = ni_sum + 15'(ni) - 15'(ni_hist[7]);
        sq = nq_sum + 15'(nq) - 15'(nq_hist[7]);
        ni_sum <= si;
        nq_sum <= sq;
        for (int k = 7; k > 0; k--) begin ni_hist[k] <= ni_hist[k-1]; nq_hist[k] <= nq_hist[k-1]; end
        ni_hist[0] <= ni;
        nq_hist[0] <= nq;
        // O-QPSK: pulse starts and phases
        ch = chips; ci = chip_i; cq = chip_q; qs = q_started;
        pi = ph_i + 1'b1; pq = ph_q + 1'b1;
        if (scnt == '0) ch = chip_seq(lfsr_n[3:0]);
        if (int'(scnt) % (2*SPC) == 0) begin
          ci = ch[int'(scnt) / SPC];
          pi = '0;
        end
        if (int'(scnt) % (2*SPC) == SPC) begin
          cq = ch[int'(scnt) / SPC];
          pq = '0;
          qs = 1'b1;
        end
        chips <= ch; chip_i <= ci; chip_q <= cq; q_started <= qs;
        ph_i <= pi; ph_q <= pq;
        scnt <= scnt + 1'b1;
        unique case (mode)
          WAVE_CW: begin
            out_i <= sample_t'({1'b0, amp});
            out_q <= '0;
          end
          WAVE_NOISE: begin
            // |si| < 2^14, so si * amp >> 14 stays within +-amp
            out_i <= scale(16'(si), amp);
            out_q <= scale(16'(sq), amp);
          end
          WAVE_OQPSK: begin
            out_i <= pulse(ci, half_sine(int'(pi), SPC), amp);
            out_q <= qs ? pulse(cq, half_sine(int'(pq), SPC), amp) : '0;
          end
          default: begin
            out_i <= '0;
            out_q <= '0;
          end
        endcase
      end
    end
  end

endmodule
