// tb_guardian_table2 -- how deep into a frame the guardian can look and still
// destroy it.
//
// The workload is the paper's reaction-delay table: a 32-byte PPDU (data frame,
// short addresses, PAN ID compression, 15 payload bytes) and one blocking rule
// per row, keyed on the start-of-frame delimiter (a rule with no match slots),
// the frame control field, the source address, payload byte #16 (PPDU byte 27)
// and the last payload byte (PPDU byte 30). The table's row offsets count PPDU
// bytes from 1; its maximum reaction delay for a row is the air time left after
// that byte, (32 - offset) * 32 us. A sixth guardian holds a full chain of 30
// rules with 5 matches each, of which only the last rule matches (on the last
// payload byte); because the rules are evaluated in parallel its reaction delay
// must equal that of the single-rule guardian for the same byte.
//
// Six guardian instances listen to the same 4 MS/s baseband stream. For each the
// test checks the rule that fired, that the burst starts after the deciding byte,
// that the reaction delay (end of the deciding byte to end of the burst) is within
// the paper's FPGA figure of 39 us and within the row's limit, and that the burst
// is over before the frame has left the air.
`timescale 1ns/1ps
module tb_guardian_table2;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  localparam int SPC = 2;
  localparam int CPS = 25;
  localparam int NG  = 6;

  // byte offsets (1-based PPDU bytes) of the rows, and the chain's deciding byte
  localparam int ROW_OFF [NG] = '{5, 8, 15, 27, 30, 30};
  localparam logic [15:0] SRC = 16'h1234;

  function automatic policy_t row_policy(int row);
    policy_t p;
    p = '0;
    p[0].enable = 1'b1;
    for (int m = 0; m < MATCHES_PER_RULE; m++) p[0].m[m] = NOMATCH;
    case (row)
      0: ;                                                       // every frame, at the SFD
      1: p[0].m[0] = mk(M_PSDU, 64'h8841, MASK16, 4'd2, 7'd0);    // FCF bytes
      2: p[0].m[0] = mk(M_SRC_ADDR, 64'(SRC));
      3: p[0].m[0] = mk(M_PSDU, 64'hA5, MASK8, 4'd1, 7'd20);      // payload byte #16
      default: p[0].m[0] = mk(M_PAYLOAD, 64'h3C, MASK8, 4'd1, 7'd14);  // last payload byte
    endcase
    return p;
  endfunction

  // 30 rules x 5 matches; rules 0..28 each miss on one slot, rule 29 matches
  function automatic policy_t chain_policy();
    policy_t p;
    for (int r = 0; r < NUM_RULES; r++) begin
      p[r].enable = 1'b1;
      p[r].m[0] = mk(M_FTYPE, 64'(FT_DATA), 64'h7, 4'd1);
      p[r].m[1] = mk(M_DST_PAN, 64'hACAC);
      p[r].m[2] = mk(M_SRC_ADDR, 64'(SRC));
      p[r].m[3] = mk(M_PSDU, 64'hA5, MASK8, 4'd1, 7'd20);
      p[r].m[4] = mk(M_PAYLOAD, 64'(8'h3C ^ 8'(r + 1 - NUM_RULES)), MASK8, 4'd1, 7'd14);
    end
    return p;
  endfunction

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic rx_valid = 0;
  sample_t rx_i = 0, rx_q = 0;
  wave_mode_e wave_mode = WAVE_NOISE;
  logic [14:0] wave_amp = 15'd12000;
  logic [6:0] rd_addr = 0;

  logic        tx_en [NG];
  logic        drop_irq [NG];
  logic [4:0]  drop_rule [NG];
  logic [31:0] stat_bursts [NG];

  for (genvar g = 0; g < NG; g++) begin : gd
    logic tx_valid, hdr_irq, frame_end, fcs_ok;
    sample_t tx_i, tx_q;
    logic signed [7:0] rss_dbm;
    logic [7:0] rd_data;
    logic [31:0] s_frames, s_fcs, s_drop, s_ign, s_lost;
    guardian_top #(.POLICY(g < NG - 1 ? row_policy(g) : chain_policy())) u (
      .clk, .rst_n, .rx_valid, .rx_i, .rx_q,
      .tx_en(tx_en[g]), .tx_valid, .tx_i, .tx_q,
      .wave_mode, .wave_amp,
      .hdr_irq, .drop_irq(drop_irq[g]), .drop_rule(drop_rule[g]), .frame_end, .fcs_ok, .rss_dbm,
      .rd_addr, .rd_data,
      .stat_frames(s_frames), .stat_fcs_ok(s_fcs), .stat_dropped(s_drop),
      .stat_bursts(stat_bursts[g]), .stat_ignored(s_ign), .stat_lost(s_lost));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc = 0;
  longint rise_t [NG], fall_t [NG];
  int     n_drop [NG], rule [NG];
  logic   prev_en [NG];
  initial for (int g = 0; g < NG; g++) begin
    rise_t[g] = 0; fall_t[g] = 0; n_drop[g] = 0; rule[g] = -1; prev_en[g] = 0;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int g = 0; g < NG; g++) begin
      prev_en[g] <= tx_en[g];
      if (drop_irq[g]) begin n_drop[g]++; rule[g] = int'(drop_rule[g]); end
      if (tx_en[g] && !prev_en[g]) rise_t[g] = cyc;
      if (!tx_en[g] && prev_en[g]) fall_t[g] = cyc;
    end
  end

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

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned f[$], ppdu[$];
    bit chips[$];
    longint pkt_end_t, dec_t, react [NG];
    repeat (3) @(posedge clk);
    rst_n = 1;
    idle(40);

    // data frame, PAN 0xACAC, 0x0001 -> 0x1234, 15 payload bytes, FCS
    f = '{8'h41, 8'h88, 8'h07, 8'hAC, 8'hAC, 8'h01, 8'h00, SRC[7:0], SRC[15:8]};
    for (int k = 0; k < 15; k++) f.push_back(8'(k * 17 + 3));
    f[20] = 8'hA5;           // payload byte #16 of the table (PPDU byte 27)
    f[23] = 8'h3C;           // last payload byte (PPDU byte 30)
    add_fcs(f);
    make_ppdu(f, ppdu);
    check(ppdu.size() == 32, $sformatf("PPDU is 32 bytes (%0d)", ppdu.size()));
    to_chips(ppdu, chips);
    sample_clk = {};
    for (int n = 0; n < (chips.size() + 1) * SPC; n++)
      send_sample(oqpsk_sample(chips, n, SPC, 3000.0, 0), oqpsk_sample(chips, n, SPC, 3000.0, 1));
    // the frame has left the air when its last chip has
    pkt_end_t = sample_clk[64 * 32 * SPC - 1];
    idle(200);

    for (int g = 0; g < NG; g++) begin
      dec_t = sample_clk[64 * ROW_OFF[g] * SPC - 1];
      react[g] = fall_t[g] - dec_t;
      $display("row %0d (byte %0d): burst %0d..%0d clocks after the byte, limit %0d",
               g, ROW_OFF[g], rise_t[g] - dec_t, react[g], (32 - ROW_OFF[g]) * 3200);
      check(n_drop[g] == 1 && stat_bursts[g] == 32'd1, $sformatf("row %0d: one drop, one burst", g));
      check(rule[g] == (g < NG - 1 ? 0 : NUM_RULES - 1), $sformatf("row %0d: rule %0d", g, rule[g]));
      check(rise_t[g] > dec_t, $sformatf("row %0d: burst after the deciding byte", g));
      check(react[g] <= 3900, $sformatf("row %0d: reaction %0d clocks over 39 us", g, react[g]));
      check(react[g] <= (32 - ROW_OFF[g]) * 3200, $sformatf("row %0d: reaction over the row limit", g));
      check(fall_t[g] <= pkt_end_t, $sformatf("row %0d: burst over before the frame ends", g));
    end
    check(react[NG-1] == react[NG-2], "30x5 chain reacts as fast as a single rule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
