// tb_gwt_decoder: self-checking test of gwt_decoder.
// A GWT transmitter model starts 23 bits out of block alignment; the test
// checks that the decoder slips until it locks, that the decoded words equal
// the words sent, in order, one cycle after their block, that words meeting a
// full downstream are dropped and counted, and that a burst of bad sync
// headers takes the lock away.
`timescale 1ns/1ps
module tb_gwt_decoder;
  import tpx4_pkg::*;
  import gwt_model_pkg::*;

  logic clk = 0, rst = 1, en = 1;
  logic blk_valid = 0;
  logic [1:0] blk_hdr = 0;
  word_t blk_data = 0;
  logic slip, m_valid, m_ready = 1, locked;
  word_t m_data;
  logic [31:0] drop_cnt, word_cnt;
  int checks = 0, failures = 0;
  int slips = 0;
  bit corrupt = 0;

  gwt_decoder #(.LOCK_CNT(64), .BAD_MAX(16), .SLIP_WAIT(8)) dut (.*);

  always #5 clk = ~clk;

  gwt_link link;
  word_t expq[$];
  int n_sent = 0, n_got = 0, n_drop_exp = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // gearbox: one block per cycle
  always @(posedge clk) begin
    bit [1:0] h; bit [63:0] d;
    if (!rst) begin
      if (slip) begin link.slip(); slips++; end
      link.next_block(h, d);
      if (corrupt) h = 2'b11;
      blk_valid <= 1'b1;
      blk_hdr   <= h;
      blk_data  <= d;
    end
  end

  // scoreboard: compare words taken by the downstream
  always @(posedge clk) begin
    if (!rst && m_valid && m_ready) begin
      word_t e;
      n_got++;
      if (expq.size() == 0) chk(0, "unexpected word");
      else begin
        e = expq.pop_front();
        chk(m_data == e, $sformatf("word %0d: got %h exp %h", n_got, m_data, e));
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    link = new(23, 30);
    repeat (3) @(posedge clk);
    rst <= 0;
    // 1. lock acquisition
    t = 0;
    while (!locked && t < 5000) begin @(posedge clk); t++; end
    chk(locked, "lock acquired");
    chk(slips > 0, "decoder slipped");
    $display("locked after %0d cycles, %0d slips", t, slips);
    // 2. data transfer
    for (int i = 0; i < 500; i++) begin
      word_t w = {$urandom, $urandom};
      link.pending.push_back(w);
      expq.push_back(w);
    end
    n_sent = 500;
    t = 0;
    while (expq.size() != 0 && t < 5000) begin @(posedge clk); t++; end
    repeat (4) @(posedge clk);
    chk(expq.size() == 0, "all words received");
    chk(word_cnt == 32'(n_sent), "word counter");
    chk(drop_cnt == 0, "no drops while ready");
    // 3. latency: one data block in, word out one cycle later
    link.idle_pct = 0;
    begin
      word_t w = 64'hDEAD_BEEF_0123_4567;
      link.pending.push_back(w);
      expq.push_back(w);
      while (!(blk_valid && blk_hdr == SH_DATA)) @(posedge clk);
      #1;   // the block is taken at this edge: the word is out right after it
      chk(m_valid && m_data == w, "one-cycle latency");
      repeat (2) @(posedge clk);
    end
    // 4. back-pressure drops
    begin
      int d0;
      d0 = drop_cnt;
      m_ready <= 0;
      for (int i = 0; i < 10; i++) link.pending.push_back(64'(i));
      expq.push_back(64'd0);       // the first word stays in the output register
      repeat (40) @(posedge clk);
      chk(drop_cnt - d0 == 9, $sformatf("9 words dropped, got %0d", drop_cnt - d0));
      m_ready <= 1;
      repeat (4) @(posedge clk);
      chk(expq.size() == 0, "held word delivered");
    end
    // 5. loss of lock on bad headers
    corrupt = 1;
    repeat (20) @(posedge clk);
    chk(!locked, "lock lost after bad headers");
    corrupt = 0;
    t = 0;
    while (!locked && t < 5000) begin @(posedge clk); t++; end
    chk(locked, "re-lock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
