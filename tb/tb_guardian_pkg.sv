// tb_guardian_pkg -- checks the shared constants of the guardian package.
//
// The 16 chip sequences generated by chip_seq() are compared with the reference
// expansion of the standard's symbol-0 string; the sequences must also be
// pairwise far apart (at least 12 chip differences). The half-sine table must
// follow round(16384*sin(pi*j/(2*spc))) within 1 LSB, and the default policy must
// hold the paper's example rules in the slots documented in the package.
`timescale 1ns/1ps
module tb_guardian_pkg;
  import guardian_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    policy_t p;
    for (int s = 0; s < 16; s++) begin
      logic [31:0] c;
      bit ok;
      c = chip_seq(4'(s));
      ok = 1;
      for (int k = 0; k < 32; k++) ok &= (c[k] == chip_of(s, k));
      check(ok, $sformatf("chip sequence of symbol %0d", s));
      for (int t = 0; t < s; t++)
        check($countones(c ^ chip_seq(4'(t))) >= 12, $sformatf("distance %0d-%0d", s, t));
    end
    for (int spc = 1; spc <= 4; spc *= 2)
      for (int j = 0; j < 2 * spc; j++) begin
        int ref_v, v;
        ref_v = int'(16384.0 * $sin(3.14159265358979 * j / (2.0 * spc)));
        v = int'(half_sine(j, spc));
        check(v - ref_v <= 1 && ref_v - v <= 1, $sformatf("half-sine spc=%0d j=%0d: %0d vs %0d", spc, j, v, ref_v));
      end
    p = DEFAULT_POLICY;
    check(p[1].enable && p[1].m[0].kind == M_DST_ADDR && p[1].m[0].value[15:0] == 16'hFFFF &&
          p[1].m[1].kind == M_DST_PAN && p[1].m[1].value[15:0] == 16'h0022, "broadcast rule");
    check(p[2].m[1].kind == M_PAYLOAD && p[2].m[1].value[15:0] == 16'h0008 &&
          p[2].m[2].value[7:0] == 8'h01, "OTA rule");
    check(p[3].m[2].kind == M_RSS && $signed(p[3].m[2].value[7:0]) == -80, "RSS rule");
    check(p[4].m[0].value[15:0] == 16'h1111 && p[5].m[0].value[15:0] == 16'h1112 &&
          p[6].m[0].value[15:0] == 16'h1115, "revocation rules");
    begin
      int en;
      en = 0;
      for (int r = 0; r < NUM_RULES; r++) en += p[r].enable;
      check(en == 7, "seven example rules enabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
