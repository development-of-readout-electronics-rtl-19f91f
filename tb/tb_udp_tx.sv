// tb_udp_tx: self-checking test of udp_tx (8-word frames, 20-cycle timeout,
// 2 words per beat; input beats carry a random 1..2 words at partial load).
// The output beats are collected into byte arrays by tkeep and parsed
// independently: Ethernet addresses and type, IPv4 length, identification,
// protocol and a one's-complement check of the header checksum, UDP ports
// and length, and the payload bytes against the words sent (LSB first).
// Also checked: a full frame takes ceil((42 + 8N) / 16) beats, a
// partial frame leaves after the timeout, and random tready stalls lose
// nothing.
`timescale 1ns/1ps
module tb_udp_tx #(parameter int L = 2);
  import tpx4_pkg::*;
  localparam int PW = 8, TO = 20, B = 8 * L;

  logic clk = 0, rst = 1;
  udp_cfg_t cfg;
  logic s_valid = 0, s_ready;
  word_t s_data [L];
  logic [$clog2(L+1)-1:0] s_cnt = 1;
  logic m_tvalid, m_tlast, m_tready = 1;
  logic [8*B-1:0] m_tdata;
  logic [B-1:0] m_tkeep;
  logic [31:0] frame_cnt;
  int checks = 0, failures = 0;

  udp_tx #(.LANES(L), .PAYLOAD_WORDS(PW), .TIMEOUT(TO)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  word_t  sentq[$];
  int     nsent = 0;
  int     s_pct = 0;
  bit     rand_ready = 0;
  byte unsigned fr[$];
  int     beats = 0, frames = 0;
  int     last_beats;
  int     exp_id = 0;

  always_comb
    for (int l = 0; l < L; l++) s_data[l] = {32'hA5A5_0000, 32'(nsent + l)};

  always @(posedge clk) begin
    if (s_valid && s_ready)
      for (int l = 0; l < int'(s_cnt); l++) begin sentq.push_back(s_data[l]); nsent++; end
    if (!(s_valid && !s_ready)) begin
      s_valid <= ($urandom_range(99) < s_pct);
      s_cnt   <= (s_pct == 100) ? L : $urandom_range(L, 1);
    end
    m_tready <= !rand_ready || $urandom_range(2) != 0;
    if (!rst && m_tvalid && m_tready) begin
      beats++;
      if (!m_tlast) chk(&m_tkeep, "only the last beat is partial");
      for (int i = 0; i < B; i++) if (m_tkeep[i]) fr.push_back(m_tdata[8*i +: 8]);
      if (m_tlast) begin
        check_frame();
        if (fr.size() == 42 + 8 * PW) last_beats = beats;
        beats = 0;
        fr.delete();
      end
    end
  end

  function automatic int be16(int o);
    return (int'(fr[o]) << 8) | int'(fr[o+1]);
  endfunction

  task automatic check_frame();
    int n, sum;
    n = fr.size() - 42;
    frames++;
    chk(n > 0 && n % 8 == 0 && n <= 8 * PW, $sformatf("payload length %0d", n));
    for (int i = 0; i < 6; i++) begin
      chk(fr[i] == cfg.dst_mac[47-8*i -: 8], "dst mac");
      chk(fr[6+i] == cfg.src_mac[47-8*i -: 8], "src mac");
    end
    chk(be16(12) == 16'h0800, "ethertype");
    chk(fr[14] == 8'h45, "ip version");
    chk(be16(16) == n + 28, "ip total length");
    chk(be16(18) == (exp_id & 16'hFFFF), $sformatf("ip id %0d exp %0d", be16(18), exp_id));
    exp_id++;
    chk(fr[23] == 8'h11, "protocol udp");
    sum = 0;
    for (int o = 14; o < 34; o += 2) sum += be16(o);
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    chk(sum == 16'hFFFF, $sformatf("ip checksum (sum %h)", sum));
    chk(be16(26) == cfg.src_ip[31:16] && be16(28) == cfg.src_ip[15:0], "src ip");
    chk(be16(30) == cfg.dst_ip[31:16] && be16(32) == cfg.dst_ip[15:0], "dst ip");
    chk(be16(34) == cfg.src_port && be16(36) == cfg.dst_port, "ports");
    chk(be16(38) == n + 8, "udp length");
    for (int w = 0; w < n / 8; w++) begin
      word_t got, e;
      for (int b = 0; b < 8; b++) got[8*b +: 8] = fr[42 + 8*w + b];
      if (sentq.size() == 0) begin chk(0, "extra payload"); break; end
      e = sentq.pop_front();
      chk(got == e, $sformatf("payload word %h exp %h", got, e));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    cfg = '{src_mac: 48'h02_00_00_00_00_01, dst_mac: 48'hFF_EE_DD_CC_BB_AA,
            src_ip: 32'hC0A8_0A01, dst_ip: 32'hC0A8_0A64, src_port: 16'd4660, dst_port: 16'd8192};
    repeat (3) @(posedge clk);
    rst <= 0;
    // full frames at full rate
    s_pct = 100;
    repeat (100) @(posedge clk);
    s_pct = 0;
    repeat (60) @(posedge clk);
    chk(frames >= 8, $sformatf("%0d frames", frames));
    chk(last_beats == (42 + 8 * PW + B - 1) / B, $sformatf("beats per full frame %0d", last_beats));
    chk(sentq.size() == 0, "all words framed");
    chk(frame_cnt == 32'(frames), "frame counter");
    // partial frame after timeout
    s_pct = 100; @(posedge clk); s_pct = 0; @(posedge clk);
    t = 0;
    while (sentq.size() != 0 && t < 200) begin @(posedge clk); t++; end
    chk(sentq.size() == 0, "partial frame sent");
    chk(t >= TO && t < TO + 20, $sformatf("timeout frame after %0d", t));
    // random load and random back-pressure
    rand_ready = 1; s_pct = 60;
    repeat (3000) @(posedge clk);
    s_pct = 0;
    repeat (300) @(posedge clk);
    chk(sentq.size() == 0, "random traffic framed");
    $display("frames %0d", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
