// tb_t0_tdc: self-checking test of t0_tdc.
// T0 pulses are applied asynchronously (off the clock edge) at known cycle
// numbers; the test checks the latched time stamps against the cycle count
// of the test (edge + 2 synchroniser cycles), the period between pulses,
// the pulse count, the 3-cycle strobe latency, and the time-base clear.
`timescale 1ns/1ps
module tb_t0_tdc;
  logic clk = 0, rst = 1, t0_in = 0, ts_clear = 0;
  logic t0_stb;
  logic [47:0] t0_ts, t0_period, ts_now;
  logic [31:0] t0_count;
  int checks = 0, failures = 0;
  int cyc = 0;

  t0_tdc #(.TS_W(48)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= rst ? 0 : cyc + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int gaps [5] = '{137, 400, 1000, 77, 2500};
    longint prev_ts, c_edge;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    prev_ts = -1;
    for (int p = 0; p < 5; p++) begin
      int lat;
      repeat (gaps[p]) @(posedge clk);
      #2.3 t0_in = 1;
      c_edge = cyc;            // the first edge that samples the high level is c_edge + 1
      lat = 0;
      while (!t0_stb) begin @(posedge clk); #0.1; lat++; end
      chk(lat == 3, $sformatf("strobe latency %0d", lat));
      chk(t0_count == 32'(p + 1), "pulse count");
      chk(longint'(t0_ts) == c_edge + 2, $sformatf("time stamp %0d exp %0d", t0_ts, c_edge + 2));
      if (prev_ts >= 0)
        chk(longint'(t0_period) == longint'(t0_ts) - prev_ts, "period");
      prev_ts = longint'(t0_ts);
      repeat (20) @(posedge clk);
      #1.7 t0_in = 0;
    end
    // clear the time base
    @(posedge clk); ts_clear <= 1;
    @(posedge clk); ts_clear <= 0;
    @(posedge clk); #0.1;
    chk(ts_now == 1, $sformatf("time base cleared (%0d)", ts_now));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
