// tb_util_pkg -- reference models shared by the guardian testbenches.
//
// Written independently of the RTL: chip sequences are expanded from the
// standard's symbol-0 string, CRC-16 is computed bit-serially MSB-first over a
// bit-reversed register (equivalent polynomial form, different arithmetic from the
// RTL), and the O-QPSK modulator uses real-valued half-sine pulses.
package tb_util_pkg;

  // chips c0..c31 of symbol 0, as printed in the 802.15.4 standard
  localparam string SYM0 = "11011001110000110101001000101110";

  function automatic bit chip_of(int sym, int k);
    int sh;
    bit c;
    sh = 4 * (sym % 8);
    c  = (SYM0[(k - sh + 32) % 32] == "1");
    if (sym >= 8 && (k % 2) == 1) c = !c;
    return c;
  endfunction

  // CRC-16/KERMIT-style FCS of 802.15.4, computed as the non-reflected CCITT CRC
  // over bit-reversed data with a bit-reversed result
  function automatic bit [15:0] fcs16(byte unsigned data[$]);
    bit [15:0] r;
    bit [15:0] out;
    r = 16'h0000;
    foreach (data[i]) begin
      for (int k = 0; k < 8; k++) begin
        bit fb;
        fb = r[15] ^ data[i][k];
        r  = {r[14:0], 1'b0};
        if (fb) r = r ^ 16'h1021;
      end
    end
    for (int k = 0; k < 16; k++) out[k] = r[15-k];
    return out;
  endfunction

  // append the FCS (low byte first)
  function automatic void add_fcs(ref byte unsigned psdu[$]);
    bit [15:0] f;
    f = fcs16(psdu);
    psdu.push_back(f[7:0]);
    psdu.push_back(f[15:8]);
  endfunction

  // full PPDU: 4 preamble bytes, SFD, length, PSDU
  function automatic void make_ppdu(byte unsigned psdu[$], ref byte unsigned ppdu[$]);
    ppdu = {};
    repeat (4) ppdu.push_back(8'h00);
    ppdu.push_back(8'hA7);
    ppdu.push_back(8'(psdu.size()));
    foreach (psdu[i]) ppdu.push_back(psdu[i]);
  endfunction

  // chips of a byte string, low nibble first
  function automatic void to_chips(byte unsigned ppdu[$], ref bit chips[$]);
    chips = {};
    foreach (ppdu[i]) begin
      for (int h = 0; h < 2; h++) begin
        int s;
        s = (h == 0) ? int'(ppdu[i][3:0]) : int'(ppdu[i][7:4]);
        for (int k = 0; k < 32; k++) chips.push_back(chip_of(s, k));
      end
    end
  endfunction

  // O-QPSK half-sine baseband at spc samples per chip period: sample n of I (q=0)
  // or Q (q=1); chip k's pulse starts at sample k*spc and lasts 2*spc samples
  function automatic int oqpsk_sample(ref bit chips[$], input int n, input int spc, input real amp, input bit q);
    real v;
    v = 0.0;
    for (int k = (n / spc) - 2; k <= n / spc; k++) begin
      if (k >= 0 && k < chips.size() && ((k % 2) == int'(q))) begin
        int j;
        j = n - k * spc;
        if (j >= 0 && j < 2 * spc)
          v += (chips[k] ? 1.0 : -1.0) * $sin(3.14159265358979 * j / (2.0 * spc));
      end
    end
    return int'(v * amp);
  endfunction

endpackage
