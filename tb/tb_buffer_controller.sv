// tb_buffer_controller: self-checking test of buffer_controller with a
// behavioural SODIMM (64-line ring, 12-cycle read latency).
// Words carry their stream (bit 63: 0 TOP, 1 BOT) and a sequence number; the
// scoreboard checks that every word arrives once and in order per stream.
// Input beats carry 1..4 words, output beats up to 2.
// Phases: light load (all lines bypass the memory); a burst of full beats on
// both inputs, 8 words/cycle offered against 2 words/cycle out (lines spill
// to the memory and drain afterwards at 2 words per cycle); a stalled output
// until the ring is full (inputs are back-pressured); spill disabled; a lone
// partial line flushed after FLUSH_CYCLES; the bandwidth monitor, compared
// exactly with word counts kept by the testbench over the same windows.
`timescale 1ns/1ps
module tb_buffer_controller;
  import tpx4_pkg::*;
  localparam int AW = 6, WIN = 100, FLUSH = 16, IL = 4, OL = 2;

  logic clk = 0, rst = 1, spill_en = 1;
  logic s_top_valid = 0, s_top_ready, s_bot_valid = 0, s_bot_ready;
  word_t s_top_data [IL], s_bot_data [IL];
  logic [2:0] s_top_cnt = 1, s_bot_cnt = 1;
  logic ddr_cmd_valid, ddr_cmd_ready, ddr_cmd_we, ddr_rd_valid;
  logic [AW-1:0] ddr_cmd_addr;
  line_t ddr_wdata, ddr_rd_data;
  logic m_valid, m_ready = 1;
  word_t m_data [OL];
  logic [1:0] m_cnt;
  logic spill_active;
  logic [AW:0] ddr_level, ddr_peak;
  logic [31:0] rate_in, rate_out, spill_lines, bypass_lines, stall_cycles;
  int n_wr, n_rd;
  int checks = 0, failures = 0;

  buffer_controller #(.IN_LANES(IL), .OUT_LANES(OL), .DDR_ADDR_W(AW), .IN_DEPTH(4), .OUT_DEPTH(8),
                      .FLUSH_CYCLES(FLUSH), .RATE_WINDOW(WIN)) dut (.*);
  ddr_model #(.ADDR_W(AW), .LINE_W(LINE_W), .LATENCY(12), .RDY_GAP(8)) u_ddr (
    .clk, .cmd_valid(ddr_cmd_valid), .cmd_ready(ddr_cmd_ready), .cmd_we(ddr_cmd_we),
    .cmd_addr(ddr_cmd_addr), .wdata(ddr_wdata), .rd_valid(ddr_rd_valid),
    .rd_data(ddr_rd_data), .n_wr, .n_rd);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [2], got [2];
  int top_pct = 0, bot_pct = 0;   // offered load per stream, percent
  bit rand_ready = 0;
  int n_out = 0;

  always_comb
    for (int l = 0; l < IL; l++) begin
      s_top_data[l] = {1'b0, 31'd0, 32'(sent[0] + l)};
      s_bot_data[l] = {1'b1, 31'd0, 32'(sent[1] + l)};
    end

  int tcyc = 0, tin = 0, tout = 0, exp_rin = 0, exp_rout = 0;

  always @(posedge clk) begin
    int win_in, win_out;
    win_in = 0; win_out = 0;
    if (s_top_valid && s_top_ready) begin sent[0] += int'(s_top_cnt); win_in += int'(s_top_cnt); end
    if (s_bot_valid && s_bot_ready) begin sent[1] += int'(s_bot_cnt); win_in += int'(s_bot_cnt); end
    if (!(s_top_valid && !s_top_ready)) begin
      s_top_valid <= ($urandom_range(99) < top_pct);
      s_top_cnt   <= (top_pct == 100) ? 3'(IL) : 3'($urandom_range(IL, 1));
    end
    if (!(s_bot_valid && !s_bot_ready)) begin
      s_bot_valid <= ($urandom_range(99) < bot_pct);
      s_bot_cnt   <= (bot_pct == 100) ? 3'(IL) : 3'($urandom_range(IL, 1));
    end
    if (m_valid && m_ready) begin
      chk(m_cnt >= 1 && m_cnt <= OL, "output beat size");
      for (int l = 0; l < int'(m_cnt); l++) begin
        int s;
        s = int'(m_data[l][63]);
        n_out++;
        win_out++;
        chk(int'(m_data[l][31:0]) == got[s], $sformatf("stream %0d: got %0d exp %0d", s, m_data[l][31:0], got[s]));
        got[s]++;
      end
    end
    // reference bandwidth monitor over the same windows as the design
    if (rst) begin tcyc = 0; tin = 0; tout = 0; end
    else if (tcyc == WIN - 1) begin
      exp_rin = tin + win_in; exp_rout = tout + win_out;
      tin = 0; tout = 0; tcyc = 0;
    end else begin
      tin += win_in; tout += win_out; tcyc++;
    end
  end

  task automatic drain(int max);
    int t = 0;
    top_pct = 0; bot_pct = 0;
    while ((got[0] != sent[0] || got[1] != sent[1] || s_top_valid || s_bot_valid) && t < max) begin
      @(posedge clk); t++;
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sp0, t, n0;
    sent[0] = 0; sent[1] = 0; got[0] = 0; got[1] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // 1. light load: 30% + 30% < 1 word/cycle
    top_pct = 30; bot_pct = 30;
    repeat (2000) @(posedge clk);
    drain(1000);
    chk(got[0] == sent[0] && got[1] == sent[1], "light load delivered");
    chk(spill_lines == 0, $sformatf("no spill at light load (%0d)", spill_lines));
    chk(bypass_lines > 0, "lines bypassed");
    // 2. burst at full ingest rate
    top_pct = 100; bot_pct = 100;
    t = 0; n0 = 0;
    repeat (600) begin
      @(posedge clk);
      if (s_top_valid && s_top_ready) n0 += int'(s_top_cnt);
      if (s_bot_valid && s_bot_ready) n0 += int'(s_bot_cnt);
    end
    chk(spill_lines > 0, "burst spilled to memory");
    chk(spill_active, "spill active during burst");
    chk(n0 > 3 * 600, $sformatf("ingest above the 2 words/cycle output: %0d in 600", n0));
    top_pct = 0; bot_pct = 0;
    repeat (3) @(posedge clk);
    n0 = n_out;
    repeat (200) @(posedge clk);
    chk(n_out - n0 >= 380, $sformatf("drain at 2 words/cycle: %0d in 200", n_out - n0));
    drain(20000);
    chk(got[0] == sent[0] && got[1] == sent[1], $sformatf("burst delivered %0d/%0d %0d/%0d", got[0], sent[0], got[1], sent[1]));
    chk(ddr_level == 0 && !spill_active, "ring empty after drain");
    chk(n_wr == int'(spill_lines) && n_rd == n_wr, "every spilled line read back once");
    // 3. output stalled: ring fills, inputs back-pressured
    m_ready = 0;
    top_pct = 100; bot_pct = 100;
    repeat (1500) @(posedge clk);
    chk(ddr_level == (1 << AW), $sformatf("ring full: level %0d", ddr_level));
    chk(ddr_peak == (1 << AW), "peak level");
    sp0 = stall_cycles;
    repeat (50) @(posedge clk);
    chk(stall_cycles - sp0 == 50, "inputs stalled while full");
    m_ready = 1;
    drain(40000);
    chk(got[0] == sent[0] && got[1] == sent[1], "full-ring data delivered");
    // 4. spill disabled
    spill_en = 0;
    sp0 = spill_lines;
    top_pct = 100; bot_pct = 100;
    repeat (500) @(posedge clk);
    chk(spill_lines == sp0, "no spill when disabled");
    chk(stall_cycles > 0, "back-pressure when disabled");
    drain(5000);
    chk(got[0] == sent[0] && got[1] == sent[1], "spill-disabled data delivered");
    spill_en = 1;
    // 5. partial line flush: a few TOP words, then silence
    begin
      int s0;
      s0 = sent[0];
      top_pct = 100;
      @(posedge clk);
      top_pct = 0;
      while (s_top_valid) @(posedge clk);
      t = 0;
      while (got[0] != sent[0] && t < 200) begin @(posedge clk); t++; end
      chk(sent[0] > s0 && sent[0] - s0 < 8, $sformatf("partial line of %0d words", sent[0] - s0));
      chk(got[0] == sent[0], "partial line delivered");
      chk(t >= FLUSH - 2 && t < FLUSH + 12, $sformatf("flush after %0d cycles", t));
    end
    // 6. bandwidth monitor: TOP only at 50%
    top_pct = 50;
    repeat (5) begin
      repeat (WIN) @(posedge clk);
      #1;
      chk(rate_in == 32'(exp_rin) && rate_out == 32'(exp_rout),
          $sformatf("rates %0d/%0d exp %0d/%0d", rate_in, rate_out, exp_rin, exp_rout));
    end
    chk(exp_rin > WIN / 2, $sformatf("monitor saw traffic (%0d)", exp_rin));
    drain(2000);
    chk(got[0] == sent[0] && got[1] == sent[1], "all delivered at end");
    $display("spilled %0d lines, bypassed %0d lines", spill_lines, bypass_lines);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
