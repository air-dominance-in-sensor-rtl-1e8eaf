// tb_guardian_top -- end-to-end test of the guardian at its default parameters.
//
// A reference O-QPSK modulator turns 802.15.4 frames into 4 MS/s baseband
// (one sample every 25 clocks of 100 MHz). The frames exercise the default
// policy: the broadcast frame printed in the paper's Fig. 3, a broadcast MAC
// command, an OTA-update data frame (payload inspection), association requests
// from outside (strong) and inside (weak) the RSS threshold, a revoked source, a
// legitimate frame, one with a corrupted FCS and one that turns into garbage.
// For each frame the expected verdict and rule are fixed by hand from the policy;
// the test checks them, the FCS flag, the interference burst (start within 10 us of
// the deciding byte, 26 us of interference, end within 39 us of the deciding byte,
// starting before the frame ends), the statistics counters, and counts each
// mechanism (header drop, payload drop, RSS drop, RSS pass, accept, bad FCS,
// lock loss, each waveform) and fails if one never happened.
`timescale 1ns/1ps
module tb_guardian_top;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  localparam int SPC = 2;
  localparam int CPS = 25;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic rx_valid = 0;
  sample_t rx_i = 0, rx_q = 0;
  logic tx_en, tx_valid;
  sample_t tx_i, tx_q;
  wave_mode_e wave_mode = WAVE_CW;
  logic [14:0] wave_amp = 15'd12000;
  logic hdr_irq, drop_irq, frame_end, fcs_ok;
  logic [4:0] drop_rule;
  logic signed [7:0] rss_dbm;
  logic [6:0] rd_addr = 0;
  logic [7:0] rd_data;
  logic [31:0] stat_frames, stat_fcs_ok, stat_dropped, stat_bursts, stat_ignored, stat_lost;

  guardian_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- monitors
  longint cyc = 0;
  int drops = 0, ends = 0, hdrs = 0;
  int last_rule;
  bit last_fcs;
  longint drop_t, en_rise_t, en_fall_t;
  int tx_nonzero = 0;
  bit prev_en = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev_en <= tx_en;
    if (drop_irq) begin drops++; last_rule = int'(drop_rule); drop_t = cyc; end
    if (frame_end) begin ends++; last_fcs = fcs_ok; end
    if (hdr_irq) hdrs++;
    if (tx_en && !prev_en) en_rise_t = cyc;
    if (!tx_en && prev_en) en_fall_t = cyc;
    if (tx_valid && (tx_i != 0 || tx_q != 0)) tx_nonzero++;
  end

  // ---------------------------------------------------------------- stimulus
  longint sample_clk[$];
  task automatic send_sample(int i, int q);
    rx_i <= sample_t'(i); rx_q <= sample_t'(q); rx_valid <= 1;
    @(posedge clk);
    sample_clk.push_back(cyc);
    rx_valid <= 0;
    repeat (CPS-1) @(posedge clk);
  endtask

  task automatic idle(int n);
    for (int k = 0; k < n; k++) send_sample(int'($urandom_range(20)) - 10, int'($urandom_range(20)) - 10);
  endtask

  task automatic send(byte unsigned psdu[$], real amp, int garbage_from);
    byte unsigned ppdu[$];
    bit chips[$];
    make_ppdu(psdu, ppdu);
    to_chips(ppdu, chips);
    if (garbage_from >= 0)
      for (int k = garbage_from; k < chips.size(); k++) chips[k] = $urandom_range(1);
    sample_clk = {};
    for (int n = 0; n < (chips.size() + 1) * SPC; n++)
      send_sample(oqpsk_sample(chips, n, SPC, amp, 0), oqpsk_sample(chips, n, SPC, amp, 1));
  endtask

  function automatic void hdr(ref byte unsigned f[$], input bit [15:0] fcf, input bit [15:0] dpan,
                              input bit [15:0] daddr, input bit [15:0] saddr);
    f = {fcf[7:0], fcf[15:8], 8'($urandom), dpan[7:0], dpan[15:8], daddr[7:0], daddr[15:8],
         saddr[7:0], saddr[15:8]};
  endfunction

  int n_hdr_drop = 0, n_pay_drop = 0, n_rss_drop = 0, n_rss_pass = 0, n_accept = 0;
  int n_badfcs = 0, n_lost = 0;
  int n_wave[3] = '{0, 0, 0};

  // one frame: expected rule (-1 = accept) and PSDU byte count deciding it
  task automatic frame(string name, byte unsigned f[$], real amp, int exp_rule, int at,
                       bit corrupt, wave_mode_e wm);
    int d0, e0;
    longint dec_t, pkt_end_t;
    wave_mode = wm;
    add_fcs(f);
    if (corrupt) f[f.size()-3] ^= 8'h01;
    d0 = drops; e0 = ends;
    idle(40);
    send(f, amp, -1);
    idle(20);
    check(ends == e0 + 1, {name, ": frame received to the end"});
    check(last_fcs == !corrupt, {name, ": FCS flag"});
    if (exp_rule < 0) begin
      check(drops == d0, {name, ": accepted"});
    end else begin
      check(drops == d0 + 1, {name, ": dropped once"});
      check(last_rule == exp_rule, $sformatf("%s: rule %0d, expected %0d", name, last_rule, exp_rule));
      dec_t = sample_clk[64 * (6 + at) * SPC - 1];
      pkt_end_t = sample_clk[sample_clk.size() - 1];
      check(en_rise_t > dec_t && en_rise_t - dec_t <= 1000,
            $sformatf("%s: burst starts %0d clocks after the deciding byte", name, en_rise_t - dec_t));
      check(en_fall_t - en_rise_t == 2900, $sformatf("%s: burst length %0d", name, en_fall_t - en_rise_t));
      check(en_fall_t - dec_t <= 3900, $sformatf("%s: reaction %0d clocks", name, en_fall_t - dec_t));
      check(en_rise_t < pkt_end_t, {name, ": burst overlaps the frame"});
      n_wave[int'(wm)]++;
    end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned f[$];
    int nz0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(10);

    // Fig. 3 frame: data, PAN 0x0022, to 0xFFFF, from 0x0000 -> rule 1 on the header
    f = '{8'h41, 8'h88, 8'h6D, 8'h22, 8'h00, 8'hFF, 8'hFF, 8'h00, 8'h00, 8'h3F, 8'h00};
    for (int k = 0; k < 11; k++) f.push_back(8'h00);
    frame("fig3", f, 3000.0, 1, 9, 0, WAVE_CW);
    n_hdr_drop++;
    rd_addr <= 7'd9; @(posedge clk); #1;
    check(rd_data == 8'h3F, "packet buffer read port");

    // broadcast MAC command in PAN 0x22 -> rule 0
    hdr(f, 16'h8843, 16'h0022, 16'hFFFF, 16'h0007);
    f.push_back(8'h04);
    frame("bcast cmd", f, 3000.0, 0, 9, 0, WAVE_NOISE);
    n_hdr_drop++;

    // OTA update: NWK control 0x0008, APS command 0x01 at payload byte 10 -> rule 2
    hdr(f, 16'h8841, 16'hACAC, 16'h1001, 16'h0000);
    f = {f, 8'h08, 8'h00, 8'h01, 8'h10, 8'h00, 8'h00, 8'h1E, 8'h33, 8'h40, 8'h00, 8'h01, 8'h05, 8'h06};
    nz0 = tx_nonzero;
    frame("OTA", f, 3000.0, 2, 9 + 11, 0, WAVE_OQPSK);
    n_pay_drop++;
    check(tx_nonzero > nz0, "interference samples transmitted");

    // association request (FCF 0xC823) from outside: -62 dBm > -80 -> rule 3
    f = '{8'h23, 8'hC8, 8'h11, 8'hAC, 8'hAC, 8'h00, 8'h00, 8'hFF, 8'hFF,
          8'h01, 8'h02, 8'h03, 8'h04, 8'h05, 8'h06, 8'h07, 8'h08, 8'h01, 8'h8E};
    frame("assoc outside", f, 8000.0, 3, 17, 0, WAVE_CW);
    n_rss_drop++;
    check(rss_dbm > -80, $sformatf("strong sender measured above -80 dBm (%0d)", rss_dbm));
    // same from inside: about -90 dBm -> accepted
    frame("assoc inside", f, 300.0, -1, 0, 0, WAVE_CW);
    n_rss_pass++;
    check(rss_dbm < -80, $sformatf("weak sender measured below -80 dBm (%0d)", rss_dbm));

    // revoked mote 0x1115 in PAN 0xACAC -> rule 6
    hdr(f, 16'h8841, 16'hACAC, 16'h0000, 16'h1115);
    f = {f, 8'hDE, 8'hAD, 8'hBE, 8'hEF};
    frame("revoked", f, 3000.0, 6, 9, 0, WAVE_NOISE);
    n_hdr_drop++;

    // legitimate mote 0x1113 -> accepted; then the same with a bad FCS
    hdr(f, 16'h8841, 16'hACAC, 16'h0000, 16'h1113);
    f = {f, 8'h01, 8'h02, 8'h03, 8'h04, 8'h05};
    frame("legit", f, 3000.0, -1, 0, 0, WAVE_CW);
    n_accept++;
    hdr(f, 16'h8841, 16'hACAC, 16'h0000, 16'h1113);
    f = {f, 8'h01, 8'h02, 8'h03, 8'h04, 8'h05};
    frame("bad fcs", f, 3000.0, -1, 0, 1, WAVE_CW);
    n_badfcs++;

    // a frame that turns into garbage after 12 PPDU bytes: the receiver drops lock
    begin
      int l0;
      l0 = int'(stat_lost);
      hdr(f, 16'h8841, 16'hACAC, 16'h0000, 16'h1113);
      for (int k = 0; k < 20; k++) f.push_back(8'(k));
      add_fcs(f);
      idle(40);
      send(f, 3000.0, 64 * 12);
      idle(100);
      check(int'(stat_lost) == l0 + 1, "lock loss counted");
      if (int'(stat_lost) == l0 + 1) n_lost++;
    end

    idle(10);
    check(stat_frames == 32'd9, $sformatf("frames counted (%0d)", stat_frames));
    check(stat_fcs_ok == 32'd7, $sformatf("good FCS counted (%0d)", stat_fcs_ok));
    check(stat_dropped == 32'd5 && stat_bursts == 32'd5, $sformatf("drops %0d bursts %0d", stat_dropped, stat_bursts));
    check(stat_ignored == 32'd0, "no overlapping triggers");
    // the garbage frame breaks off before its header is complete
    check(hdrs == 8, $sformatf("header interrupts (%0d)", hdrs));

    $display("mechanisms: header-drop=%0d payload-drop=%0d rss-drop=%0d rss-pass=%0d accept=%0d bad-fcs=%0d lock-loss=%0d cw=%0d noise=%0d oqpsk=%0d",
             n_hdr_drop, n_pay_drop, n_rss_drop, n_rss_pass, n_accept, n_badfcs, n_lost,
             n_wave[0], n_wave[1], n_wave[2]);
    check(n_hdr_drop > 0 && n_pay_drop > 0 && n_rss_drop > 0 && n_rss_pass > 0 && n_accept > 0 &&
          n_badfcs > 0 && n_lost > 0 && n_wave[0] > 0 && n_wave[1] > 0 && n_wave[2] > 0,
          "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
