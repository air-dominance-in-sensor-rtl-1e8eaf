// tb_oqpsk_receiver -- self-checking test of the O-QPSK receiver.
//
// Modulates 802.15.4 PPDUs with a real-valued half-sine reference modulator,
// feeds them at 4 MS/s (one sample every 25 clocks of 100 MHz) with idle gaps,
// random start phases and a few corrupted chips, and checks: SFD detection, every
// delivered byte, the byte latency (one clock after the sample carrying the peak
// of the byte's last chip, within one sample), the RSS estimate against
// 10*log10(amp^2) - 140 (within 2 dB), that frames with a static carrier phase
// offset of up to 75 degrees are still received (the chip signs at the peaks are
// unchanged below 90 degrees, so only the timing alignment is at stake), and that
// lock is dropped (lost) when the signal turns into garbage inside a frame.
`timescale 1ns/1ps
module tb_oqpsk_receiver;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  localparam int SPC = 2;
  localparam int CPS = 25;   // clocks per sample
  localparam real ROT_DEG [4] = '{30.0, -45.0, 60.0, -75.0};

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid = 0;
  sample_t in_i = 0, in_q = 0;
  logic frame_end = 0;
  logic sfd_det, byte_valid, lost, in_frame;
  logic [7:0] byte_data;
  logic signed [7:0] rss_dbm;
  logic [3:0] sym_out;
  logic [5:0] sym_dist;

  oqpsk_receiver #(.SPC(SPC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // received bytes and their arrival clock
  byte unsigned got[$];
  longint got_t[$];
  int sfd_count = 0, lost_count = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (byte_valid) begin got.push_back(byte_data); got_t.push_back(cyc); end
    if (sfd_det) sfd_count++;
    if (lost) lost_count++;
  end

  longint sample_clk[$];   // clock at which each sample of the current burst was given

  task automatic send_sample(int i, int q);
    in_i <= sample_t'(i); in_q <= sample_t'(q); in_valid <= 1;
    @(posedge clk);
    sample_clk.push_back(cyc);
    in_valid <= 0;
    repeat (CPS-1) @(posedge clk);
  endtask

  task automatic idle(int n);
    for (int k = 0; k < n; k++) send_sample(int'($urandom_range(40)) - 20, int'($urandom_range(40)) - 20);
  endtask

  real rot = 0.0;   // static carrier phase offset of the frames, radians

  // send one frame; flips chips listed in `bad` (indices into the chip stream)
  task automatic send_frame(byte unsigned psdu[$], real amp, int nbad, int garbage_from);
    byte unsigned ppdu[$];
    bit chips[$];
    int n_samp;
    make_ppdu(psdu, ppdu);
    to_chips(ppdu, chips);
    for (int b = 0; b < nbad; b++) begin
      int k;
      k = 400 + int'($urandom_range(chips.size() - 500));
      chips[k] = !chips[k];
    end
    if (garbage_from >= 0)
      for (int k = garbage_from; k < chips.size(); k++) chips[k] = $urandom_range(1);
    got = {}; got_t = {}; sample_clk = {};
    n_samp = (chips.size() + 1) * SPC;
    for (int n = 0; n < n_samp; n++) begin
      real i, q;
      i = $itor(oqpsk_sample(chips, n, SPC, amp, 0));
      q = $itor(oqpsk_sample(chips, n, SPC, amp, 1));
      send_sample(int'(i * $cos(rot) - q * $sin(rot)), int'(i * $sin(rot) + q * $cos(rot)));
    end
    frame_end <= 1; @(posedge clk); frame_end <= 0;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      byte unsigned psdu[$];
      int len, s0, nbad;
      real amp, exp_db;
      len  = 5 + int'($urandom_range(20));
      amp  = (t % 2 == 0) ? 8000.0 : 600.0 + 100.0 * t;
      nbad = (t >= 3) ? 3 : 0;
      psdu = {};
      for (int k = 0; k < len - 2; k++) psdu.push_back(8'($urandom));
      add_fcs(psdu);
      idle(20 + int'($urandom_range(7)));
      s0 = sfd_count;
      send_frame(psdu, amp, nbad, -1);
      check(sfd_count == s0 + 1, $sformatf("frame %0d: SFD detected once", t));
      check(got.size() == len + 1, $sformatf("frame %0d: %0d bytes, expected %0d", t, got.size(), len + 1));
      if (got.size() == len + 1) begin
        bit ok;
        ok = (got[0] == 8'(len));
        for (int k = 0; k < len; k++) ok &= (got[k+1] == psdu[k]);
        check(ok, $sformatf("frame %0d: byte values", t));
        // byte b of the PHY payload (0 = length) ends with chip 64*(6+b)-1,
        // whose peak is at sample 64*(6+b)*SPC
        for (int b = 0; b <= len; b++) begin
          longint exp_t;
          exp_t = sample_clk[64 * (6 + b) * SPC - 1] + 1;
          if (!(got_t[b] >= exp_t - CPS && got_t[b] <= exp_t + CPS))
            check(0, $sformatf("frame %0d byte %0d latency: at %0d expected %0d", t, b, got_t[b], exp_t));
        end
        check(1, "latency");
      end
      exp_db = 10.0 * $log10(amp * amp) - 140.0;
      check($itor(rss_dbm) > exp_db - 2.0 && $itor(rss_dbm) < exp_db + 2.0,
            $sformatf("frame %0d: rss %0d dBm, expected %f", t, rss_dbm, exp_db));
    end
    // static carrier phase offsets below 90 degrees leave the chip signs at the
    // peaks unchanged: frames must still be received
    foreach (ROT_DEG[r]) begin
      byte unsigned psdu[$];
      bit ok;
      psdu = {};
      for (int k = 0; k < 12; k++) psdu.push_back(8'($urandom));
      add_fcs(psdu);
      rot = ROT_DEG[r] * 3.14159265358979 / 180.0;
      idle(25);
      send_frame(psdu, 6000.0, 0, -1);
      ok = (got.size() == psdu.size() + 1);
      for (int k = 0; k < psdu.size() && ok; k++) ok &= (got[k+1] == psdu[k]);
      check(ok, $sformatf("frame with a %0.0f degree carrier phase offset", ROT_DEG[r]));
    end
    rot = 0.0;
    // garbage inside a frame: lock must be lost
    begin
      byte unsigned psdu[$];
      int l0;
      psdu = {};
      for (int k = 0; k < 30; k++) psdu.push_back(8'($urandom));
      add_fcs(psdu);
      idle(30);
      l0 = lost_count;
      send_frame(psdu, 5000.0, 0, 64 * 10);   // garbage from PPDU byte 10
      check(lost_count == l0 + 1, "lock lost on garbage");
      check(got.size() >= 4 && got.size() <= 6, $sformatf("no bytes after lock lost (%0d)", got.size()));
      check(!in_frame, "back in search after loss");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
