// tb_framer -- self-checking test of the 802.15.4 framer.
//
// Builds MAC frames from chosen field values (all four address-mode
// combinations used in practice, with and without PAN ID compression, plus the
// frame printed in the paper's Fig. 3), streams them in as receiver bytes with
// random gaps, and checks the parsed fields and header length, the
// header-complete interrupt (exactly one, two clocks after the last header byte),
// the buffer and read port contents, frame_start one clock after the SFD,
// frame_end with the FCS verdict (good and
// corrupted FCS), and an abort on receiver loss.
`timescale 1ns/1ps
module tb_framer;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic sfd_det = 0, byte_valid = 0, rx_lost = 0;
  logic [7:0] byte_data = 0;
  logic frame_active, frame_start, hdr_irq, hdr_done, frame_end, fcs_ok, aborted;
  logic [7:0] byte_count;
  logic [7:0] psdu [128];
  frame_info_t info;
  logic [6:0] rd_addr = 0;
  logic [7:0] rd_data;

  framer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0;
  int hdr_irqs = 0, ends = 0, aborts = 0, starts = 0;
  longint hdr_t = 0, start_t = 0, sfd_t = 0;
  bit last_fcs;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (hdr_irq) begin hdr_irqs++; hdr_t = cyc; end
    if (frame_start) begin starts++; start_t = cyc; end
    if (sfd_det) sfd_t = cyc;
    if (frame_end) begin ends++; last_fcs = fcs_ok; end
    if (aborted) aborts++;
  end

  longint byte_t[$];
  task automatic put_byte(byte unsigned b);
    byte_data <= b; byte_valid <= 1;
    @(posedge clk);
    byte_t.push_back(cyc);
    byte_valid <= 0;
    repeat (1 + $urandom_range(3)) @(posedge clk);
  endtask

  // frame builder
  function automatic void build(input int ftype, input int dm, input int sm, input bit pc,
                                input bit [15:0] dpan, input bit [63:0] daddr,
                                input bit [15:0] span, input bit [63:0] saddr,
                                input int npay, output byte unsigned f[$], output int hl);
    bit [15:0] fcf;
    fcf = 16'(ftype) | (16'(pc) << 6) | (16'(dm) << 10) | (16'(sm) << 14) | (16'd1 << 12);
    f = {};
    f.push_back(fcf[7:0]); f.push_back(fcf[15:8]);
    f.push_back(8'h5A);
    if (dm >= 2) begin
      f.push_back(dpan[7:0]); f.push_back(dpan[15:8]);
      for (int k = 0; k < ((dm == 3) ? 8 : 2); k++) f.push_back(daddr[8*k +: 8]);
    end
    if (sm >= 2) begin
      if (!pc) begin f.push_back(span[7:0]); f.push_back(span[15:8]); end
      for (int k = 0; k < ((sm == 3) ? 8 : 2); k++) f.push_back(saddr[8*k +: 8]);
    end
    hl = f.size();
    for (int k = 0; k < npay; k++) f.push_back(8'($urandom));
    add_fcs(f);
  endfunction

  task automatic run_frame(byte unsigned f[$], int hl, bit corrupt,
                           int ftype, int dm, int sm, bit [15:0] dpan, bit [63:0] daddr,
                           bit [15:0] span, bit [63:0] saddr, string name);
    int h0, e0, s0;
    bit [63:0] dmask, smask;
    h0 = hdr_irqs; e0 = ends; s0 = starts; byte_t = {};
    if (corrupt) f[f.size()-3] ^= 8'h10;
    sfd_det <= 1; @(posedge clk); sfd_det <= 0; @(posedge clk);
    #1;
    // the frame begins at the SFD: one frame_start, one clock later, and active
    check(starts == s0 + 1 && start_t == sfd_t + 1 && frame_active, {name, ": frame start at the SFD"});
    put_byte(8'(f.size()));
    foreach (f[i]) put_byte(f[i]);
    repeat (3) @(posedge clk);
    check(hdr_irqs == h0 + 1, {name, ": one header interrupt"});
    check(hdr_t == byte_t[hl] + 2, $sformatf("%s: header irq at %0d, expected %0d", name, hdr_t, byte_t[hl] + 2));
    check(ends == e0 + 1, {name, ": frame end"});
    check(last_fcs == !corrupt, {name, ": FCS verdict"});
    check(info.hdr_len == 7'(hl), $sformatf("%s: hdr_len %0d exp %0d", name, info.hdr_len, hl));
    check(info.psdu_len == 7'(f.size()), {name, ": psdu_len"});
    check(info.frame_type == 3'(ftype), {name, ": frame type"});
    check(info.dst_mode == addr_mode_e'(dm) && info.src_mode == addr_mode_e'(sm), {name, ": address modes"});
    dmask = (dm == 3) ? '1 : 64'hFFFF;
    smask = (sm == 3) ? '1 : 64'hFFFF;
    if (dm >= 2) check(info.dst_pan == dpan && info.dst_addr == (daddr & dmask), {name, ": destination"});
    if (sm >= 2) check(info.src_pan == span && info.src_addr == (saddr & smask), {name, ": source"});
    check(info.seq == 8'h5A || f[2] == info.seq, {name, ": sequence number"});
    begin
      bit ok;
      ok = 1;
      foreach (f[i]) ok &= (psdu[i] == f[i]);
      check(ok, {name, ": buffer"});
    end
    rd_addr <= 7'(hl); @(posedge clk); #1;
    check(rd_data == f[hl], {name, ": read port"});
    repeat (5) @(posedge clk);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned f[$];
    int hl;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // frame of Fig. 3: 41 88 6D 22 00 FF FF 00 00, then 6LoWPAN/payload
    f = '{8'h41, 8'h88, 8'h6D, 8'h22, 8'h00, 8'hFF, 8'hFF, 8'h00, 8'h00, 8'h3F, 8'h00};
    for (int k = 0; k < 11; k++) f.push_back(8'h00);
    add_fcs(f);
    check(f.size() == 24, "Fig. 3 frame has length 0x18");
    run_frame(f, 9, 0, 1, 2, 2, 16'h0022, 64'hFFFF, 16'h0022, 64'h0000, "fig3");
    // association request: FCF 0xC823, dst short, src extended, src PAN 0xFFFF
    build(3, 2, 3, 0, 16'hACAC, 64'h0000, 16'hFFFF, 64'h0011_2233_4455_6677, 1, f, hl);
    run_frame(f, hl, 0, 3, 2, 3, 16'hACAC, 64'h0000, 16'hFFFF, 64'h0011_2233_4455_6677, "assoc");
    build(1, 3, 3, 1, 16'h1234, 64'h8877_6655_4433_2211, 16'h1234, 64'h0102_0304_0506_0708, 4, f, hl);
    run_frame(f, hl, 0, 1, 3, 3, 16'h1234, 64'h8877_6655_4433_2211, 16'h1234, 64'h0102_0304_0506_0708, "ext-ext");
    build(1, 0, 2, 0, 16'h0, 64'h0, 16'hACAC, 64'h1111, 6, f, hl);
    run_frame(f, hl, 1, 1, 0, 2, 16'h0, 64'h0, 16'hACAC, 64'h1111, "nodst-corrupt");
    build(1, 2, 2, 0, 16'hBEEF, 64'hCAFE, 16'hACAC, 64'h1115, 10, f, hl);
    run_frame(f, hl, 0, 1, 2, 2, 16'hBEEF, 64'hCAFE, 16'hACAC, 64'h1115, "short-nocomp");
    // receiver loss in the middle of a frame
    begin
      int a0;
      a0 = aborts;
      build(1, 2, 2, 1, 16'h22, 64'hFFFF, 16'h22, 64'h1, 10, f, hl);
      sfd_det <= 1; @(posedge clk); sfd_det <= 0;
      put_byte(8'(f.size()));
      for (int k = 0; k < 5; k++) put_byte(f[k]);
      rx_lost <= 1; @(posedge clk); rx_lost <= 0;
      repeat (3) @(posedge clk);
      check(aborts == a0 + 1 && !frame_active && !last_fcs, "abort on receiver loss");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
