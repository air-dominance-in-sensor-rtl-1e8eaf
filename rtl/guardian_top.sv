// guardian_top -- the guardian's FPGA datapath, from baseband samples in to an
// interference burst out.
//
//   rx samples -> oqpsk_receiver -> framer -> rule_checker -> interference_tx -> tx samples
//                      (RSS) -------------------^                 ^
//                                               waveform_generator
//
// The receiver synchronises to each 802.15.4 frame and delivers its bytes; the
// framer parses the header and keeps the frame in a buffer; the rule checker
// compares buffer, header fields and RSS with the compile-time policy while the
// frame is still arriving; on the first match it raises drop_irq and the TX block
// keys the transmitter and sends INIT_CYCLES + JAM_CYCLES clocks of the selected
// waveform. Everything runs on one clock (100 MHz in the paper's platform); the
// RX front end delivers one complex sample per rx_valid at SPC samples per chip
// period, and the TX side uses the same strobe as its sample rate.
// Ports left for parts outside the FPGA logic: the baseband sample interfaces of
// the RX and TX front ends, and for the controller/administration interface the
// waveform mode and amplitude, the two interrupts, a read port into the packet
// buffer and statistics counters.
// With the defaults the time from the deciding byte to the end of the burst is
// 2 + 1 + 300 + 2600 clocks = 29.03 us (paper: t_react = 39 us with
// t_decide <= 10 us, t_init 3 us, t_interfere 26 us).
module guardian_top
  import guardian_pkg::*;
#(
  parameter int      SPC           = 2,
  parameter int      SYNC_DIST     = 4,
  parameter int      LOST_DIST     = 8,
  parameter int      RSS_OFFSET_DB = -140,
  parameter int      INIT_CYCLES   = 300,
  parameter int      JAM_CYCLES    = 2600,
  parameter policy_t POLICY        = DEFAULT_POLICY
) (
  input  logic              clk,
  input  logic              rst_n,
  // RX front end (baseband from the down-converter)
  input  logic              rx_valid,
  input  sample_t           rx_i,
  input  sample_t           rx_q,
  // TX front end (baseband to the up-converter / DAC)
  output logic              tx_en,
  output logic              tx_valid,
  output sample_t           tx_i,
  output sample_t           tx_q,
  // operation parameters from the administration interface
  input  wave_mode_e        wave_mode,
  input  logic [14:0]       wave_amp,
  // controller side
  output logic              hdr_irq,
  output logic              drop_irq,
  output logic [4:0]        drop_rule,
  output logic              frame_end,
  output logic              fcs_ok,
  output logic signed [7:0] rss_dbm,
  input  logic [6:0]        rd_addr,
  output logic [7:0]        rd_data,
  output logic [31:0]       stat_frames,
  output logic [31:0]       stat_fcs_ok,
  output logic [31:0]       stat_dropped,
  output logic [31:0]       stat_bursts,
  output logic [31:0]       stat_ignored,
  output logic [31:0]       stat_lost
);

  logic        sfd_det, byte_valid, lost, in_frame;
  logic [7:0]  byte_data;
  logic [3:0]  sym_out;
  logic [5:0]  sym_dist;

  logic        frame_active, frame_start, hdr_done, aborted;
  logic [7:0]  byte_count;
  logic [7:0]  psdu [128];
  frame_info_t info;

  logic        verdict_valid, verdict_drop;
  logic [NUM_RULES-1:0] rule_hits;

  logic        gen_start, wave_valid, jamming, burst_done, ignored;
  sample_t     wave_i, wave_q;

  oqpsk_receiver #(
    .SPC(SPC), .SYNC_DIST(SYNC_DIST), .LOST_DIST(LOST_DIST), .RSS_OFFSET_DB(RSS_OFFSET_DB)
  ) u_rx (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_i(rx_i), .in_q(rx_q),
    .frame_end(frame_end),
    .sfd_det, .byte_valid, .byte_data, .lost, .in_frame, .rss_dbm,
    .sym_out, .sym_dist
  );

  framer u_framer (
    .clk, .rst_n,
    .sfd_det, .byte_valid, .byte_data, .rx_lost(lost),
    .frame_active, .frame_start, .hdr_irq, .hdr_done, .frame_end, .fcs_ok, .aborted,
    .byte_count, .psdu, .info, .rd_addr, .rd_data
  );

  rule_checker #(.POLICY(POLICY)) u_rules (
    .clk, .rst_n,
    .frame_start, .frame_active, .frame_end, .hdr_done, .byte_count, .psdu, .info,
    .rss_dbm,
    .drop_irq, .drop_rule, .verdict_valid, .verdict_drop, .rule_hits
  );

  waveform_generator #(.SPC(SPC)) u_wave (
    .clk, .rst_n,
    .start(gen_start), .sample_en(rx_valid), .mode(wave_mode), .amp(wave_amp),
    .out_valid(wave_valid), .out_i(wave_i), .out_q(wave_q)
  );

  interference_tx #(.INIT_CYCLES(INIT_CYCLES), .JAM_CYCLES(JAM_CYCLES)) u_tx (
    .clk, .rst_n,
    .trigger(drop_irq), .wave_valid, .wave_i, .wave_q,
    .gen_start, .tx_en, .jamming, .tx_valid, .tx_i, .tx_q, .burst_done, .ignored
  );

  // statistics for the administration interface
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_frames  <= '0;
      stat_fcs_ok  <= '0;
      stat_dropped <= '0;
      stat_bursts  <= '0;
      stat_ignored <= '0;
      stat_lost    <= '0;
    end else begin
      if (frame_start)                       stat_frames  <= stat_frames + 1;
      if (frame_end && fcs_ok)               stat_fcs_ok  <= stat_fcs_ok + 1;
      if (verdict_valid && verdict_drop)     stat_dropped <= stat_dropped + 1;
      if (burst_done)                        stat_bursts  <= stat_bursts + 1;
      if (ignored)                           stat_ignored <= stat_ignored + 1;
      if (aborted)                           stat_lost    <= stat_lost + 1;
    end
  end

endmodule
