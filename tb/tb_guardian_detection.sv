// tb_guardian_detection -- packet reception ratio of the guardian's receiver in
// noise.
//
// The workload is the detection experiment: an attacker sends broadcast packets
// of 48 symbols (a 24-byte PPDU, 768 us on the air) and the guardian counts the
// packets it receives with a correct FCS. Distance and multipath cannot be
// simulated here; instead the ideal O-QPSK baseband is disturbed with white
// Gaussian noise (Box-Muller from $urandom) at several signal-to-noise ratios,
// SNR = amp^2 / (2 sigma^2) per complex sample at 4 MS/s, and the guardian top at
// its default parameters receives PKTS packets per point.
// Checks: every packet at 10 dB and at least 98 % at 3 dB arrive with a good FCS;
// the reception ratio does not rise as the SNR falls; at -6 dB, where the hard
// chip decisions are wrong about one time in four, the receiver misses packets
// (the curve must have an edge); every FCS-good packet was counted in the
// frame statistics, and no packet matched the default policy.
`timescale 1ns/1ps
module tb_guardian_detection;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  localparam int SPC  = 2;
  localparam int CPS  = 25;
  localparam int PKTS = 40;
  localparam int NP   = 4;
  localparam real SNR_DB [NP] = '{10.0, 3.0, 0.0, -6.0};
  localparam real AMP = 3000.0;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic rx_valid = 0;
  sample_t rx_i = 0, rx_q = 0;
  logic tx_en, tx_valid;
  sample_t tx_i, tx_q;
  wave_mode_e wave_mode = WAVE_CW;
  logic [14:0] wave_amp = 15'd1000;
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

  int good = 0;
  always @(posedge clk) if (frame_end && fcs_ok) good++;

  real sigma = 0.0;
  function automatic real gauss();
    real u1, u2;
    u1 = ($itor($urandom) + 1.0) / 4294967296.0;
    u2 = $itor($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  function automatic int noisy(int v);
    real r;
    r = $itor(v) + sigma * gauss();
    if (r > 32767.0) r = 32767.0;
    if (r < -32768.0) r = -32768.0;
    return int'(r);
  endfunction

  task automatic send_sample(int i, int q);
    rx_i <= sample_t'(noisy(i)); rx_q <= sample_t'(noisy(q)); rx_valid <= 1;
    @(posedge clk);
    rx_valid <= 0;
    repeat (CPS-1) @(posedge clk);
  endtask

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prr [NP];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      int g0;
      sigma = AMP / $sqrt(2.0 * $pow(10.0, SNR_DB[p] / 10.0));
      g0 = good;
      for (int n = 0; n < PKTS; n++) begin
        byte unsigned f[$], ppdu[$];
        bit chips[$];
        // broadcast data frame in PAN 0x0BEE from 0x0042, 7 payload bytes
        f = '{8'h41, 8'h88, 8'(n), 8'hEE, 8'h0B, 8'hFF, 8'hFF, 8'h42, 8'h00};
        for (int k = 0; k < 7; k++) f.push_back(8'($urandom));
        add_fcs(f);
        make_ppdu(f, ppdu);
        if (n == 0 && p == 0) check(ppdu.size() * 2 == 48, "48-symbol packets");
        to_chips(ppdu, chips);
        for (int k = 0; k < 30 + int'($urandom_range(20)); k++) send_sample(0, 0);
        for (int s = 0; s < (chips.size() + 1) * SPC; s++)
          send_sample(oqpsk_sample(chips, s, SPC, AMP, 0), oqpsk_sample(chips, s, SPC, AMP, 1));
        for (int k = 0; k < 20; k++) send_sample(0, 0);
      end
      prr[p] = good - g0;
      $display("SNR %5.1f dB: %0d of %0d packets received with a good FCS", SNR_DB[p], prr[p], PKTS);
    end
    check(prr[0] == PKTS, "all packets at 10 dB");
    check(prr[1] * 100 >= PKTS * 98, "at least 98 % at 3 dB");
    for (int p = 1; p < NP; p++) check(prr[p] <= prr[p-1], $sformatf("no gain at %0.1f dB", SNR_DB[p]));
    check(prr[NP-1] < PKTS, "packets are missed at -6 dB");
    check(int'(stat_fcs_ok) == good, "FCS statistics agree");
    check(stat_dropped == 32'd0, "no packet matched the policy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
