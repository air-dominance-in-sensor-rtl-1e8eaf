// tb_interference_tx -- self-checking test of the interference burst control.
//
// With the default timing (3 us start-up, 26 us burst at 100 MHz): tx_en must rise
// one clock after the trigger and last exactly INIT_CYCLES + JAM_CYCLES clocks,
// the samples must be zero during start-up and equal to the waveform input during
// the burst (exactly JAM_CYCLES clocks), the waveform generator must be restarted
// once per burst, a trigger during a burst must be ignored and counted, and a
// later trigger must start a new burst.
`timescale 1ns/1ps
module tb_interference_tx;
  import guardian_pkg::*;

  localparam int INIT = 300, JAM = 2600;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic trigger = 0, wave_valid = 0;
  sample_t wave_i = 0, wave_q = 0;
  logic gen_start, tx_en, jamming, tx_valid, burst_done, ignored;
  sample_t tx_i, tx_q;

  interference_tx dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // waveform stimulus: a sample every 25 clocks, changing values
  always @(posedge clk) begin
    wave_valid <= ($urandom_range(24) == 0);
    wave_i <= sample_t'($urandom);
    wave_q <= sample_t'($urandom);
  end

  int en_len = 0, jam_len = 0, starts = 0, dones = 0, ign = 0, bad_init = 0, bad_burst = 0;
  always @(posedge clk) begin
    if (tx_en) en_len++;
    if (jamming) jam_len++;
    if (gen_start) starts++;
    if (burst_done) dones++;
    if (ignored) ign++;
    if (tx_en && !jamming && (tx_i != 0 || tx_q != 0)) bad_init++;
    if (jamming && (tx_i != wave_i || tx_q != wave_q || tx_valid != wave_valid)) bad_burst++;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int b = 0; b < 2; b++) begin
      en_len = 0; jam_len = 0;
      trigger <= 1; @(posedge clk); trigger <= 0;
      #1 check(tx_en, "tx_en one clock after trigger");
      // retrigger in the middle of the first burst
      if (b == 0) begin
        repeat (1000) @(posedge clk);
        trigger <= 1; @(posedge clk); trigger <= 0;
      end
      wait (!tx_en);
      repeat (10) @(posedge clk);
      check(en_len == INIT + JAM, $sformatf("burst %0d: tx_en for %0d clocks, expected %0d", b, en_len, INIT + JAM));
      check(jam_len == JAM, $sformatf("burst %0d: interference for %0d clocks", b, jam_len));
    end
    check(starts == 2, "generator restarted once per burst");
    check(dones == 2, "two bursts done");
    check(ign == 1, $sformatf("retrigger during burst ignored (%0d)", ign));
    check(bad_init == 0, "silent start-up");
    check(bad_burst == 0, "waveform passed through during burst");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
