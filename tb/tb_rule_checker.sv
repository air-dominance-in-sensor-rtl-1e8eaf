// tb_rule_checker -- self-checking test of the FPGA rule checker.
//
// Two instances: one with the default policy (the paper's example rules), one
// with a test policy holding a zero-match rule, a PSDU-offset byte rule on the
// last payload byte of a 32-byte PPDU (Table 2's deepest rule) and an extended
// address rule. Frames are presented as the framer would: the header fields, a
// buffer filled one byte at a time and byte_count. For every case the expected
// verdict, the matching rule and the byte count at which the decision must fall
// are worked out by hand from the rule definitions; the test checks them and that
// drop_irq comes one clock after the deciding byte, once per frame, with the
// verdict at frame_end.
`timescale 1ns/1ps
module tb_rule_checker;
  import guardian_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic frame_start = 0, frame_active = 0, frame_end = 0, hdr_done = 0;
  logic [7:0] byte_count = 0;
  logic [7:0] psdu [128];
  frame_info_t info = '0;
  logic signed [7:0] rss_dbm = 0;

  logic drop_irq, verdict_valid, verdict_drop;
  logic [4:0] drop_rule;
  logic [NUM_RULES-1:0] rule_hits;
  logic drop_irq2, verdict_valid2, verdict_drop2;
  logic [4:0] drop_rule2;
  logic [NUM_RULES-1:0] rule_hits2;

  function automatic policy_t test_policy();
    policy_t p;
    p = '0;
    p[2].enable = 1'b1;     // zero matches: every frame
    p[4].enable = 1'b1;     // last payload byte of a 26-byte PSDU is PSDU byte 23
    p[4].m[0] = mk(M_PSDU, 64'h5A, MASK8, 4'd1, 7'd23);
    p[5].enable = 1'b1;
    p[5].m[0] = mk(M_DST_ADDR, 64'h0011_2233_4455_6677, '1, 4'd8);
    return p;
  endfunction
  localparam policy_t TP = test_policy();

  rule_checker dut (.*);
  rule_checker #(.POLICY(TP)) dut2 (
    .clk, .rst_n, .frame_start, .frame_active, .frame_end, .hdr_done, .byte_count, .psdu,
    .info, .rss_dbm, .drop_irq(drop_irq2), .drop_rule(drop_rule2),
    .verdict_valid(verdict_valid2), .verdict_drop(verdict_drop2), .rule_hits(rule_hits2));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int irqs = 0, irqs2 = 0;
  int irq_count = -1, irq_count2 = -1;
  int lag = 0, lag2 = 0;
  longint upd_t = 0, cyc = 0;
  int vcount = 0; bit vdrop;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (drop_irq)  begin irqs++;  irq_count  = byte_count; lag  = int'(cyc - upd_t); end
    if (drop_irq2) begin irqs2++; irq_count2 = byte_count; lag2 = int'(cyc - upd_t); end
    if (verdict_valid) begin vcount++; vdrop = verdict_drop; end
  end

  // present a frame: fields, bytes, hdr_len; the buffer fills one byte per 4 clocks
  task automatic present(byte unsigned f[$], int hl, logic signed [7:0] rss);
    for (int k = 0; k < 128; k++) psdu[k] = 8'h00;
    byte_count = 0; hdr_done = 0; rss_dbm = rss;
    irqs = 0; irqs2 = 0; irq_count = -1; irq_count2 = -1;
    frame_start <= 1; @(posedge clk); frame_start <= 0; frame_active <= 1;
    foreach (f[i]) begin
      @(posedge clk);
      psdu[i] <= f[i];
      byte_count <= 8'(i + 1);
      hdr_done <= (i + 1 >= hl);
      upd_t = cyc;
      repeat (3) @(posedge clk);
    end
    frame_active <= 0; frame_end <= 1; @(posedge clk); frame_end <= 0;
    repeat (2) @(posedge clk);
  endtask

  task automatic set_info(int ft, addr_mode_e dm, addr_mode_e sm, bit [15:0] dpan,
                          bit [63:0] daddr, bit [15:0] span, bit [63:0] saddr, int hl, int len);
    info = '0;
    info.frame_type = 3'(ft); info.dst_mode = dm; info.src_mode = sm;
    info.dst_pan = dpan; info.dst_addr = daddr; info.src_pan = span; info.src_addr = saddr;
    info.hdr_len = 7'(hl); info.psdu_len = 7'(len);
  endtask

  // expect: drop (rule index, byte count at decision) or accept
  task automatic expect1(string name, bit drop, int rule, int at);
    if (drop) begin
      check(irqs == 1, $sformatf("%s: one drop interrupt (%0d)", name, irqs));
      check(drop_rule == 5'(rule), $sformatf("%s: rule %0d expected %0d", name, drop_rule, rule));
      check(irq_count == at, $sformatf("%s: decided at byte %0d expected %0d", name, irq_count, at));
      // the monitor samples drop_irq one edge after it rises: 2 = one clock of latency
      check(lag == 2, $sformatf("%s: one clock after the byte (%0d)", name, lag));
    end else begin
      check(irqs == 0, $sformatf("%s: no drop", name));
    end
    check(vdrop == drop, $sformatf("%s: verdict", name));
  endtask

  function automatic void frame(int n, ref byte unsigned f[$]);
    f = {};
    for (int k = 0; k < n; k++) f.push_back(8'($urandom_range(255)));
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned f[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1: broadcast data frame to PAN 0x22 (Fig. 3), header 9 bytes -> rule 1 at 9
    frame(24, f); f[23] = 8'h77;
    set_info(1, AM_SHORT, AM_SHORT, 16'h0022, 64'hFFFF, 16'h0022, 64'h0, 9, 24);
    present(f, 9, -60);
    expect1("bcast data", 1, 1, 9);
    check(irqs2 == 1 && drop_rule2 == 5'd2 && irq_count2 <= 1, $sformatf("zero-match rule fires at frame start %0d %0d %0d", irqs2, drop_rule2, irq_count2));

    // 2: MAC command to broadcast in PAN 0x22 -> rule 0
    frame(20, f);
    set_info(3, AM_SHORT, AM_SHORT, 16'h0022, 64'hFFFF, 16'h0022, 64'h5, 9, 20);
    present(f, 9, -60);
    expect1("bcast cmd", 1, 0, 9);

    // 3: OTA update: PAN 0xACAC, payload[0..1] = 08 00, payload[10] = 01; header 11
    frame(30, f); f[11] = 8'h08; f[12] = 8'h00; f[21] = 8'h01;
    set_info(1, AM_SHORT, AM_SHORT, 16'hACAC, 64'h0001, 16'hACAC, 64'h0002, 11, 30);
    present(f, 11, -60);
    expect1("OTA", 1, 2, 22);

    // 4: same with APS command 0x02 -> accept
    f[21] = 8'h02;
    present(f, 11, -60);
    expect1("OTA other cmd", 0, 0, 0);

    // 5: association request from outside (-70 dBm) -> rule 3; inside (-90) -> accept
    frame(21, f);
    set_info(3, AM_SHORT, AM_EXT, 16'hACAC, 64'h0000, 16'hFFFF, 64'h0011_2233_4455_6677, 17, 21);
    present(f, 17, -70);
    expect1("assoc outside", 1, 3, 17);
    present(f, 17, -90);
    expect1("assoc inside", 0, 0, 0);
    present(f, 17, -80);
    expect1("assoc at threshold", 0, 0, 0);

    // 6: revoked source 0x1112 -> rule 5; 0x1113 -> accept; right address, other PAN -> accept
    frame(16, f);
    set_info(1, AM_SHORT, AM_SHORT, 16'hACAC, 64'h0000, 16'hACAC, 64'h1112, 9, 16);
    present(f, 9, -60);
    expect1("revoked 1112", 1, 5, 9);
    set_info(1, AM_SHORT, AM_SHORT, 16'hACAC, 64'h0000, 16'hACAC, 64'h1113, 9, 16);
    present(f, 9, -60);
    expect1("legit 1113", 0, 0, 0);
    set_info(1, AM_SHORT, AM_SHORT, 16'hACAD, 64'h0000, 16'hACAD, 64'h1111, 9, 16);
    present(f, 9, -60);
    expect1("1111 other PAN", 0, 0, 0);
    // short-address rule must not match an extended source address
    set_info(1, AM_SHORT, AM_EXT, 16'hACAC, 64'h0000, 16'hACAC, 64'h1115, 15, 20);
    frame(20, f);
    present(f, 15, -60);
    expect1("ext 1115", 0, 0, 0);

    // 7: test policy: last payload byte; the zero-match rule fires first, so use
    //    rule_hits to see the byte rule, decided at byte 24
    frame(26, f); f[23] = 8'h5A;
    set_info(1, AM_SHORT, AM_SHORT, 16'h0001, 64'h0002, 16'h0001, 64'h0003, 9, 26);
    present(f, 9, -60);
    check(rule_hits2[4] && !rule_hits2[5], "last payload byte rule");
    f[23] = 8'h5B;
    present(f, 9, -60);
    check(!rule_hits2[4], "last payload byte rule, other value");
    set_info(1, AM_EXT, AM_SHORT, 16'h0001, 64'h0011_2233_4455_6677, 16'h0001, 64'h0003, 15, 26);
    present(f, 15, -60);
    check(rule_hits2[5], "extended destination address rule");
    check(vcount == 14, $sformatf("one verdict per frame (%0d)", vcount));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
