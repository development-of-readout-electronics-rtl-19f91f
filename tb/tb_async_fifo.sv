// tb_async_fifo: self-checking test of async_fifo with unrelated write and
// read clocks (6.4 ns and 4 ns). Random bursts on both sides; checks data
// order and integrity, that `full` stops writes at DEPTH words, and that the
// FIFO reports empty after draining.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 64, D = 16;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [W-1:0] s_data = 0, m_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int n_w = 0, n_r = 0;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #3.2 wclk = ~wclk;
  always #2.0 rclk = ~rclk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit wr_on = 0, rd_on = 0, rd_rand = 1;

  always @(posedge wclk) begin
    if (s_valid && s_ready) begin q.push_back(s_data); n_w++; end
    if (wr_on && (!s_valid || s_ready)) begin
      s_valid <= ($urandom_range(3) != 0);
      s_data  <= {$urandom, $urandom};
    end else if (!wr_on) s_valid <= 0;
  end

  always @(posedge rclk) begin
    if (m_valid && m_ready) begin
      logic [W-1:0] e;
      n_r++;
      if (q.size() == 0) chk(0, "read from empty");
      else begin e = q.pop_front(); chk(m_data == e, $sformatf("data %h exp %h", m_data, e)); end
    end
    m_ready <= rd_on && (!rd_rand || $urandom_range(2) != 0);
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge wclk);
    wrst = 0; rrst = 0;
    // fill without reading: exactly D words fit
    wr_on = 1;
    repeat (100) @(posedge wclk);
    wr_on = 0;
    repeat (10) @(posedge wclk);
    chk(n_w == D, $sformatf("full after %0d words", n_w));
    chk(!s_ready, "s_ready low when full");
    // drain
    rd_on = 1; rd_rand = 0;
    repeat (60) @(posedge rclk);
    chk(n_r == D, "all read back");
    chk(!m_valid, "empty after drain");
    // random traffic both sides
    rd_rand = 1; wr_on = 1;
    repeat (3000) @(posedge wclk);
    wr_on = 0;
    repeat (200) @(posedge rclk);
    chk(n_r == n_w, $sformatf("written %0d read %0d", n_w, n_r));
    chk(n_w > 1000, "traffic moved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
