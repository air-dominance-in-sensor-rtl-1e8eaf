// framer -- interprets the receiver's byte stream as an IEEE 802.15.4 frame.
//
// After sfd_det the first byte is the PHY header (frame length, 7 bits); the
// following psdu_len bytes are the MAC frame, stored into a 128-byte packet
// buffer that is visible in full on `psdu` (for the parallel rule checker) and
// through a read port (rd_addr/rd_data, the memory mapping a controller queries).
// The frame control field selects the header layout: destination PAN and address
// are present unless the destination address mode is none, the source PAN is
// present unless PAN ID compression is set, addresses are 2 (short) or 8
// (extended) bytes. From the layout the framer derives the field offsets and the
// header length, and extracts the fields into `info` (combinationally from the
// buffer, valid once hdr_done is high).
// Events: frame_start (start-of-frame delimiter seen; frame_active stays high
// from then until frame_end, so a rule with no match slots can fire on the SFD
// alone), hdr_irq (one-clock pulse when the
// whole MAC header is in the buffer, the paper's "header available" interrupt),
// frame_end with fcs_ok (CRC-16, x^16+x^12+x^5+1, LSB first, zero residue over
// the whole PSDU). A receiver loss (rx_lost) ends the frame with fcs_ok low;
// aborted is then high for one clock.
// Timing: byte_count and the buffer are updated one clock after byte_valid.
// The paper says the framer handles the address modes, raises interrupts and
// provides a memory mapping; the buffer organisation, the header-complete rule
// and the CRC check placement are this design's choices. Security auxiliary
// headers are not parsed (the paper assumes no header encryption).
module framer
  import guardian_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sfd_det,
  input  logic        byte_valid,
  input  logic [7:0]  byte_data,
  input  logic        rx_lost,
  output logic        frame_active,
  output logic        frame_start,
  output logic        hdr_irq,
  output logic        hdr_done,
  output logic        frame_end,
  output logic        fcs_ok,
  output logic        aborted,
  output logic [7:0]  byte_count,      // PSDU bytes received so far
  output logic [7:0]  psdu [128],
  output frame_info_t info,
  input  logic [6:0]  rd_addr,
  output logic [7:0]  rd_data
);

  typedef enum logic [1:0] {F_IDLE, F_LEN, F_PSDU} fstate_e;
  fstate_e state;

  logic [6:0]  len;
  logic [15:0] crc;
  logic        hdr_seen;

  // ---------------------------------------------------------------- CRC
  function automatic logic [15:0] crc_byte(input logic [15:0] c, input logic [7:0] b);
    logic [15:0] r;
    r = c;
    for (int k = 0; k < 8; k++) begin
      if (r[0] ^ b[k]) r = (r >> 1) ^ 16'h8408;
      else             r = r >> 1;
    end
    return r;
  endfunction

  // ---------------------------------------------------------------- header layout
  logic [15:0] fcf;
  logic [6:0]  o_dpan, o_daddr, o_span, o_saddr, hlen;
  logic        dst_present, src_present, span_present;

  function automatic logic [63:0] le_bytes(input logic [7:0] b [128], input logic [6:0] off,
                                           input int unsigned n);
    logic [63:0] v;
    v = '0;
    for (int k = 0; k < 8; k++)
      if (k < int'(n)) v[8*k +: 8] = b[7'(off + 7'(k))];
    return v;
  endfunction

  function automatic logic [6:0] alen(input addr_mode_e m);
    return (m == AM_EXT) ? 7'd8 : (m == AM_SHORT) ? 7'd2 : 7'd0;
  endfunction

  always_comb begin
    addr_mode_e dm, sm;
    fcf = {psdu[1], psdu[0]};
    dm  = addr_mode_e'(fcf[11:10]);
    sm  = addr_mode_e'(fcf[15:14]);
    dst_present  = (dm == AM_SHORT) || (dm == AM_EXT);
    src_present  = (sm == AM_SHORT) || (sm == AM_EXT);
    span_present = src_present && !fcf[6];
    o_dpan  = 7'd3;
    o_daddr = o_dpan + (dst_present ? 7'd2 : 7'd0);
    o_span  = o_daddr + alen(dm);
    o_saddr = o_span + (span_present ? 7'd2 : 7'd0);
    hlen    = o_saddr + alen(sm);

    info            = '0;
    info.frame_type = fcf[2:0];
    info.sec_en     = fcf[3];
    info.pan_comp   = fcf[6];
    info.dst_mode   = dm;
    info.src_mode   = sm;
    info.seq        = psdu[2];
    info.hdr_len    = hlen;
    info.psdu_len   = len;
    if (dst_present) begin
      info.dst_pan  = {psdu[o_dpan + 7'd1], psdu[o_dpan]};
      info.dst_addr = le_bytes(psdu, o_daddr, (dm == AM_EXT) ? 8 : 2);
    end
    if (src_present) begin
      info.src_pan  = span_present ? {psdu[o_span + 7'd1], psdu[o_span]} : info.dst_pan;
      info.src_addr = le_bytes(psdu, o_saddr, (sm == AM_EXT) ? 8 : 2);
    end
  end

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= F_IDLE;
      len         <= '0;
      crc         <= '0;
      byte_count  <= '0;
      frame_start <= 1'b0;
      hdr_irq     <= 1'b0;
      hdr_seen    <= 1'b0;
      frame_end   <= 1'b0;
      fcs_ok      <= 1'b0;
      aborted     <= 1'b0;
      for (int k = 0; k < 128; k++) psdu[k] <= '0;
    end else begin
      frame_start <= 1'b0;
      hdr_irq     <= 1'b0;
      frame_end   <= 1'b0;
      aborted     <= 1'b0;
      // header complete: at least the frame control field and hlen bytes are in
      if (state == F_PSDU && !hdr_seen && byte_count >= 8'd2 &&
          byte_count >= {1'b0, hlen}) begin
        hdr_seen <= 1'b1;
        hdr_irq  <= 1'b1;
      end
      unique case (state)
        F_IDLE: if (sfd_det) begin
          state       <= F_LEN;
          frame_start <= 1'b1;
          byte_count  <= '0;
          hdr_seen   <= 1'b0;
          crc        <= '0;
          fcs_ok     <= 1'b0;
          for (int k = 0; k < 128; k++) psdu[k] <= '0;
        end
        F_LEN: if (rx_lost) begin
          state     <= F_IDLE;
          frame_end <= 1'b1;
          aborted   <= 1'b1;
        end else if (byte_valid) begin
          len <= byte_data[6:0];
          if (byte_data[6:0] < 7'd3) begin
            // shorter than a frame control field plus FCS: not a MAC frame
            state     <= F_IDLE;
            frame_end <= 1'b1;
          end else begin
            state <= F_PSDU;
          end
        end
        F_PSDU: if (rx_lost) begin
          state     <= F_IDLE;
          frame_end <= 1'b1;
          aborted   <= 1'b1;
          fcs_ok    <= 1'b0;
        end else if (byte_valid) begin
          psdu[byte_count[6:0]] <= byte_data;
          byte_count <= byte_count + 8'd1;
          crc        <= crc_byte(crc, byte_data);
          if (byte_count + 8'd1 == {1'b0, len}) begin
            state     <= F_IDLE;
            frame_end <= 1'b1;
            fcs_ok    <= (crc_byte(crc, byte_data) == 16'h0000);
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  assign frame_active = (state != F_IDLE);
  assign hdr_done     = hdr_seen;
  assign rd_data      = psdu[rd_addr];

endmodule
