// udp_tx: UDP transmit core. Packs the word stream from the buffer controller
// into Ethernet II / IPv4 / UDP frames for the 40G (QSFP+) or 10G (SFP+) MAC.
//
// Input beats carry 1..LANES 64-bit words (s_cnt says how many, lowest lanes
// first). Payload words are collected in one of two banks of PAYLOAD_WORDS
// words (ping-pong): while one bank is being sent the other fills. A bank is
// closed when it has no room for another full beat or when TIMEOUT cycles
// pass without a new word, so a slow trickle of hits still leaves promptly.
// Each bank is split into LANES word-interleaved memories (word i lives in
// memory i mod LANES), so a beat of up to LANES consecutive words writes each
// memory at most once.
// A closed bank is sent as one frame: a 42-byte header (14 Ethernet, 20 IPv4,
// 8 UDP; big-endian fields) followed by the payload words, least significant
// byte first. The output is B = 8*LANES bytes wide. Because 42 is not a
// multiple of 8 the payload is shifted by two bytes: output byte p of beat j
// is byte (p+6) mod 8 of payload word j*LANES - 6 + (p+6) div 8, so every beat
// reads LANES+1 consecutive words and the memory each one comes from is fixed
// per byte position. A frame of N words has 42 + 8N bytes in
// ceil((42 + 8N) / B) beats; tkeep marks the valid bytes of the last beat.
// The IPv4 header checksum is computed here; the UDP checksum is sent as 0
// ("not used", allowed for IPv4); the IPv4 identification field counts
// frames, so a receiver can detect lost packets.
// Output: AXI-Stream, 8*B-bit tdata, B-bit tkeep, tlast, byte 0 in
// tdata[7:0]. The MAC adds preamble and FCS. With LANES = 2 (128 bits at
// 312.5 MHz) the core keeps up with a 40 Gbps MAC.
// The paper names the 40G and 10G UDP cores; the frame layout, sizes and
// datapath width are this design's choices.
module udp_tx
  import tpx4_pkg::*;
#(
  parameter int unsigned LANES         = 2,      // words per beat, power of 2
  parameter int unsigned PAYLOAD_WORDS = 1024,   // 8 KiB jumbo frame payload
  parameter int unsigned TIMEOUT       = 1024
) (
  input  logic      clk,
  input  logic      rst,
  input  udp_cfg_t  cfg,
  // word stream in
  input  logic                           s_valid,
  input  word_t                          s_data [LANES],
  input  logic [$clog2(LANES+1)-1:0]     s_cnt,
  output logic                           s_ready,
  // frames out
  output logic                   m_tvalid,
  output logic [64*LANES-1:0]    m_tdata,
  output logic [8*LANES-1:0]     m_tkeep,
  output logic                   m_tlast,
  input  logic                   m_tready,
  // status
  output logic [31:0] frame_cnt
);

  localparam int unsigned B   = 8 * LANES;
  localparam int unsigned LL  = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned RW  = PAYLOAD_WORDS / LANES;        // rows per bank
  localparam int unsigned RA  = (RW > 1) ? $clog2(RW) : 1;
  localparam int unsigned LW  = $clog2(PAYLOAD_WORDS + 1);
  localparam int unsigned TW  = $clog2(TIMEOUT + 1);
  localparam int unsigned HDR = 42;

  initial begin
    assert ((LANES & (LANES - 1)) == 0 && PAYLOAD_WORDS % LANES == 0)
      else $fatal(1, "udp_tx: LANES must be a power of 2 dividing PAYLOAD_WORDS");
  end

  // mem[m][{bank, row}] holds payload word row*LANES + m of the bank
  word_t         mem [LANES][2*RW];
  logic [1:0]    closed;
  logic [LW-1:0] blen [2];
  logic          wb, rb;
  logic [LW-1:0] wcnt;
  logic [TW-1:0] idle;
  logic          close_now;

  // ------------------------------------------------------------ fill side
  assign s_ready   = !closed[wb] && !close_now;
  assign close_now = !closed[wb] && (wcnt != 0) &&
                     ((wcnt > LW'(PAYLOAD_WORDS - LANES)) || (idle >= TW'(TIMEOUT)));

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) begin
      for (int m = 0; m < LANES; m++) begin
        logic [LW-1:0] widx;
        int unsigned   l;
        l    = (m - int'(wcnt)) & (LANES - 1);       // lane that lands in memory m
        widx = wcnt + LW'(l);
        if (l < int'(s_cnt)) mem[m][{wb, RA'(widx / LW'(LANES))}] <= s_data[l];
      end
    end
  end

  // ------------------------------------------------------------ send side
  logic [LW:0]   beat;          // beat index within the frame
  logic [LW:0]   nbeats;
  logic [LW+3:0] nbytes;        // frame length in bytes
  logic          sending;
  logic [15:0]   ip_id;
  logic [15:0]   ip_len, udp_len, ip_sum;
  logic [7:0]    hdr_b [HDR];
  word_t         rw [LANES+1];  // payload words beat*LANES-6 .. beat*LANES-6+LANES
  logic [16+4:0] acc;

  assign nbytes  = (LW+4)'(HDR) + ((LW+4)'(blen[rb]) << 3);
  assign nbeats  = (LW+1)'((nbytes + (LW+4)'(B - 1)) / (LW+4)'(B));
  assign udp_len = 16'(8 * int'(blen[rb]) + 8);
  assign ip_len  = udp_len + 16'd20;

  always_comb begin
    acc = 21'h4500 + 21'(ip_len) + 21'(ip_id) + 21'h4000 + 21'h4011 +
          21'(cfg.src_ip[31:16]) + 21'(cfg.src_ip[15:0]) +
          21'(cfg.dst_ip[31:16]) + 21'(cfg.dst_ip[15:0]);
    acc = 21'(acc[15:0]) + 21'(acc[20:16]);
    acc = 21'(acc[15:0]) + 21'(acc[20:16]);
    ip_sum = ~acc[15:0];
  end

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      hdr_b[i]     = cfg.dst_mac[47-8*i -: 8];
      hdr_b[6 + i] = cfg.src_mac[47-8*i -: 8];
    end
    hdr_b[12] = 8'h08; hdr_b[13] = 8'h00;                 // EtherType IPv4
    hdr_b[14] = 8'h45; hdr_b[15] = 8'h00;                 // version/IHL, DSCP
    hdr_b[16] = ip_len[15:8];  hdr_b[17] = ip_len[7:0];
    hdr_b[18] = ip_id[15:8];   hdr_b[19] = ip_id[7:0];
    hdr_b[20] = 8'h40; hdr_b[21] = 8'h00;                 // don't fragment
    hdr_b[22] = 8'h40; hdr_b[23] = 8'h11;                 // TTL 64, UDP
    hdr_b[24] = ip_sum[15:8];  hdr_b[25] = ip_sum[7:0];
    for (int i = 0; i < 4; i++) begin
      hdr_b[26 + i] = cfg.src_ip[31-8*i -: 8];
      hdr_b[30 + i] = cfg.dst_ip[31-8*i -: 8];
    end
    hdr_b[34] = cfg.src_port[15:8]; hdr_b[35] = cfg.src_port[7:0];
    hdr_b[36] = cfg.dst_port[15:8]; hdr_b[37] = cfg.dst_port[7:0];
    hdr_b[38] = udp_len[15:8];      hdr_b[39] = udp_len[7:0];
    hdr_b[40] = 8'h00;              hdr_b[41] = 8'h00;    // UDP checksum unused
  end

  // word k of the read window is payload word beat*LANES - 6 + k; it lives in
  // memory (k - 6) mod LANES, row (beat*LANES - 6 + k) div LANES
  always_comb begin
    for (int k = 0; k <= LANES; k++) begin
      logic [LW+LL+1:0] idx;
      idx   = ((LW+LL+2)'(beat) * (LW+LL+2)'(LANES)) + (LW+LL+2)'(k) - (LW+LL+2)'(6);
      rw[k] = mem[(k + 8 * LANES - 6) % LANES][{rb, RA'(idx / (LW+LL+2)'(LANES))}];
    end
  end

  always_comb begin
    for (int p = 0; p < B; p++) begin
      logic [LW+3:0] g;
      g = ((LW+4)'(beat) * (LW+4)'(B)) + (LW+4)'(p);
      m_tkeep[p] = (g < nbytes);
      if (g < (LW+4)'(HDR))  m_tdata[8*p +: 8] = hdr_b[6'(g)];
      else if (g < nbytes)   m_tdata[8*p +: 8] = rw[(p + 6) / 8][8*((p + 6) % 8) +: 8];
      else                   m_tdata[8*p +: 8] = 8'h00;
    end
  end

  assign sending  = closed[rb];
  assign m_tvalid = sending;
  assign m_tlast  = (beat == nbeats - 1'b1);
  always_ff @(posedge clk) begin
    if (rst) begin
      closed    <= '0;
      blen[0]   <= '0;
      blen[1]   <= '0;
      wb        <= 1'b0;
      rb        <= 1'b0;
      wcnt      <= '0;
      idle      <= '0;
      beat      <= '0;
      ip_id     <= '0;
      frame_cnt <= '0;
    end else begin
      // fill
      if (close_now) begin
        closed[wb] <= 1'b1;
        blen[wb]   <= wcnt;
        wb         <= !wb;
        wcnt       <= '0;
        idle       <= '0;
      end else if (s_valid && s_ready) begin
        wcnt <= wcnt + LW'(s_cnt);
        idle <= '0;
      end else if (wcnt != 0 && idle < TW'(TIMEOUT)) begin
        idle <= idle + 1'b1;
      end
      // send
      if (m_tvalid && m_tready) begin
        if (m_tlast) begin
          beat       <= '0;
          closed[rb] <= 1'b0;
          rb         <= !rb;
          ip_id      <= ip_id + 1'b1;
          frame_cnt  <= frame_cnt + 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

endmodule
