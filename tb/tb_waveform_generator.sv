// tb_waveform_generator -- self-checking test of the interference waveforms.
//
// CW: every sample is (amp, 0). Noise: bounded by amp, zero mean, not constant,
// and low-pass (lag-1 correlation near 7/8, as an 8-sample moving sum gives).
// O-QPSK: the samples at the chip peaks (I for even chips, Q for odd chips) must
// spell a valid 802.15.4 chip sequence in every symbol, and the envelope
// I^2+Q^2 must be constant (amp^2 within 2 %), as half-sine O-QPSK is. Also checks
// that out_valid follows each sample_en by one clock.
`timescale 1ns/1ps
module tb_waveform_generator;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  localparam int SPC = 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic start = 0, sample_en = 0;
  wave_mode_e mode = WAVE_CW;
  logic [14:0] amp = 15'd10000;
  logic out_valid;
  sample_t out_i, out_q;

  waveform_generator #(.SPC(SPC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int si[$], sq[$];
  int valid_ok = 1;
  // take n samples, one every 25 clocks
  task automatic take(int n);
    si = {}; sq = {};
    for (int k = 0; k < n; k++) begin
      sample_en <= 1; @(posedge clk); sample_en <= 0;
      #1;
      if (!out_valid) valid_ok = 0;
      si.push_back(int'(out_i)); sq.push_back(int'(out_q));
      @(posedge clk); #1;
      if (out_valid) valid_ok = 0;
      repeat (23) @(posedge clk);
    end
  endtask

  task automatic restart(wave_mode_e m);
    mode <= m;
    start <= 1; @(posedge clk); start <= 0; @(posedge clk);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- CW
    restart(WAVE_CW);
    take(50);
    begin
      bit ok; ok = 1;
      foreach (si[k]) ok &= (si[k] == 10000 && sq[k] == 0);
      check(ok, "CW is a constant carrier at the channel centre");
    end
    // ---------------- noise
    restart(WAVE_NOISE);
    take(2000);
    begin
      real mi, mq, c0, c1;
      bit bounded; int distinct;
      bounded = 1; mi = 0; mq = 0; c0 = 0; c1 = 0; distinct = 0;
      for (int k = 8; k < si.size(); k++) begin
        bounded &= (si[k] <= 10000 && si[k] >= -10000 && sq[k] <= 10000 && sq[k] >= -10000);
        mi += si[k]; mq += sq[k];
        if (si[k] != si[k-1]) distinct++;
      end
      mi /= (si.size() - 8); mq /= (si.size() - 8);
      for (int k = 9; k < si.size(); k++) begin
        c0 += (si[k] - mi) * (si[k] - mi);
        c1 += (si[k] - mi) * (si[k-1] - mi);
      end
      check(bounded, "noise bounded by amp");
      check(mi < 300 && mi > -300 && mq < 300 && mq > -300, $sformatf("noise zero mean (%f %f)", mi, mq));
      check(distinct > 1500, "noise varies");
      check(c1 / c0 > 0.75 && c1 / c0 < 0.97, $sformatf("noise low-pass, lag-1 correlation %f", c1 / c0));
    end
    // ---------------- O-QPSK
    restart(WAVE_OQPSK);
    take(64 * 8 + 4);
    begin
      int bad_sym, bad_env;
      bad_sym = 0; bad_env = 0;
      for (int s = 0; s < 8; s++) begin
        int best;
        best = 99;
        for (int v = 0; v < 16; v++) begin
          int d; d = 0;
          for (int k = 0; k < 32; k++) begin
            int n; bit c;
            n = s * 64 + k * SPC + SPC;     // peak of chip k
            c = (k % 2 == 0) ? (si[n] > 0) : (sq[n] > 0);
            if (c != chip_of(v, k)) d++;
          end
          if (d < best) best = d;
        end
        if (best != 0) bad_sym++;
      end
      for (int n = SPC + 1; n < si.size(); n++) begin
        real e;
        e = real'(si[n]) * si[n] + real'(sq[n]) * sq[n];
        if (e < 0.98 * 1.0e8 || e > 1.02 * 1.0e8) bad_env++;
      end
      check(bad_sym == 0, $sformatf("O-QPSK symbols are valid chip sequences (%0d bad)", bad_sym));
      check(bad_env == 0, $sformatf("O-QPSK constant envelope (%0d bad)", bad_env));
    end
    check(valid_ok == 1, "out_valid one clock after sample_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
