// rule_checker -- FPGA rule checker: classifies the frame on the air against a
// compile-time rule chain and requests interference on a DROP verdict.
//
// The policy is a chain of NUM_RULES rules, each with MATCHES_PER_RULE match
// slots (guardian_pkg::policy_t, fixed when the design is built, as in the
// paper's FPGA variant). A rule matches when every used slot matches; an enabled
// rule without used slots matches every frame. The target of every rule is DROP;
// a frame no rule matches is accepted. All slots of all rules are compared with
// the framer's buffer and parsed header in parallel, every clock:
//   header-field slots (type, dst/src PAN, dst/src address) are decided once the
//     framer's hdr_done is high; an address slot also requires the address mode
//     that its width names (2 bytes: short, 8 bytes: extended);
//   byte slots (PSDU offset, or offset from the start of the MAC payload) are
//     decided as soon as the last byte they cover has been received, so a rule
//     can inspect the payload up to its last byte;
//   the RSS slot compares the receiver's signed dBm estimate (latched at SFD).
// The first clock on which some rule matches, drop_irq pulses (the interrupt to
// the interference subsystem) and drop_rule names the lowest matching rule. At
// frame_end, verdict_valid pulses with verdict_drop.
// Timing: drop_irq comes one clock after the framer's buffer holds the deciding
// byte, i.e. two clocks (20 ns at 100 MHz) after the receiver delivers it. The
// paper measured below 1 us up to 10 us for its FPGA checker.
// Paper: parallel comparison of packet bytes with a table of predefined values,
// content and RSS matches, compile-time policy, interrupt to the interference
// subsystem. The slot encoding and decision rule are this design's own.
module rule_checker
  import guardian_pkg::*;
#(
  parameter policy_t POLICY = DEFAULT_POLICY
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              frame_start,
  input  logic              frame_active,
  input  logic              frame_end,
  input  logic              hdr_done,
  input  logic [7:0]        byte_count,
  input  logic [7:0]        psdu [128],
  input  frame_info_t       info,
  input  logic signed [7:0] rss_dbm,
  output logic              drop_irq,
  output logic [4:0]        drop_rule,
  output logic              verdict_valid,
  output logic              verdict_drop,
  output logic [NUM_RULES-1:0] rule_hits    // rules matching the current frame
);

  logic [NUM_RULES-1:0] rule_match;
  logic                 dropped;

  function automatic logic [63:0] bytes_at(input logic [7:0] b [128], input logic [7:0] off,
                                           input logic [3:0] n);
    logic [63:0] v;
    v = '0;
    for (int k = 0; k < 8; k++)
      if (k < int'(n) && (int'(off) + k) < 128) v[8*k +: 8] = b[7'(int'(off) + k)];
    return v;
  endfunction

  function automatic logic addr_ok(input addr_mode_e mode, input logic [3:0] n);
    return (n == 4'd8) ? (mode == AM_EXT) : (mode == AM_SHORT);
  endfunction

  always_comb begin
    for (int r = 0; r < NUM_RULES; r++) begin
      logic all_ok;
      all_ok = POLICY[r].enable && frame_active;
      for (int m = 0; m < MATCHES_PER_RULE; m++) begin
        match_t      s;
        logic        dec, hit;
        logic [7:0]  start;
        s   = POLICY[r].m[m];
        dec = 1'b1;
        hit = 1'b1;
        start = '0;
        unique case (s.kind)
          M_NONE: ;
          M_FTYPE: begin
            dec = hdr_done;
            hit = (info.frame_type & s.mask[2:0]) == (s.value[2:0] & s.mask[2:0]);
          end
          M_DST_PAN: begin
            dec = hdr_done;
            hit = (info.dst_mode == AM_SHORT || info.dst_mode == AM_EXT) &&
                  ((info.dst_pan & s.mask[15:0]) == (s.value[15:0] & s.mask[15:0]));
          end
          M_DST_ADDR: begin
            dec = hdr_done;
            hit = addr_ok(info.dst_mode, s.nbytes) &&
                  ((info.dst_addr & s.mask) == (s.value & s.mask));
          end
          M_SRC_PAN: begin
            dec = hdr_done;
            hit = (info.src_mode == AM_SHORT || info.src_mode == AM_EXT) &&
                  ((info.src_pan & s.mask[15:0]) == (s.value[15:0] & s.mask[15:0]));
          end
          M_SRC_ADDR: begin
            dec = hdr_done;
            hit = addr_ok(info.src_mode, s.nbytes) &&
                  ((info.src_addr & s.mask) == (s.value & s.mask));
          end
          M_PSDU, M_PAYLOAD: begin
            start = {1'b0, s.offset} + ((s.kind == M_PAYLOAD) ? {1'b0, info.hdr_len} : 8'd0);
            dec = ((s.kind == M_PSDU) || hdr_done) &&
                  (byte_count >= start + {4'd0, s.nbytes});
            hit = (bytes_at(psdu, start, s.nbytes) & s.mask) == (s.value & s.mask);
          end
          M_RSS: begin
            dec = 1'b1;
            hit = rss_dbm > $signed(s.value[7:0]);
          end
          default: begin
            dec = 1'b0;
            hit = 1'b0;
          end
        endcase
        all_ok = all_ok && dec && hit;
      end
      rule_match[r] = all_ok;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dropped       <= 1'b0;
      drop_irq      <= 1'b0;
      drop_rule     <= '0;
      verdict_valid <= 1'b0;
      verdict_drop  <= 1'b0;
      rule_hits     <= '0;
    end else begin
      drop_irq      <= 1'b0;
      verdict_valid <= 1'b0;
      if (frame_start) begin
        dropped   <= 1'b0;
        rule_hits <= '0;
      end else begin
        rule_hits <= rule_hits | rule_match;
        if (!dropped && |rule_match) begin
          dropped  <= 1'b1;
          drop_irq <= 1'b1;
          for (int r = NUM_RULES-1; r >= 0; r--)
            if (rule_match[r]) drop_rule <= 5'(r);
        end
      end
      if (frame_end) begin
        verdict_valid <= 1'b1;
        verdict_drop  <= dropped;
      end
    end
  end

  // one interference request per frame
  assert property (@(posedge clk) disable iff (!rst_n) drop_irq |=> !drop_irq);

endmodule
