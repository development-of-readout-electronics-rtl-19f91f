// tb_axis_mux8: self-checking test of axis_mux8.
// Each of the 8 inputs sends numbered words (input index in the top byte).
// Checks: every word comes out once, in order per input; with all inputs
// busy and the output always ready the mux delivers LANES words per cycle
// and serves the inputs strictly in turn, lane after lane and beat after
// beat, no input ever more than one word ahead of another; with a single busy input it gets one word per cycle; random valid
// and ready patterns lose nothing.
`timescale 1ns/1ps
module tb_axis_mux8;
  import tpx4_pkg::*;
  localparam int N = 8, L = 4;
  logic clk = 0, rst = 1;
  logic [N-1:0] s_valid = '0, s_ready;
  word_t s_data [N];
  logic m_valid, m_ready = 0;
  word_t m_data [L];
  logic [2:0] m_cnt;
  logic [2:0] m_src;
  int checks = 0, failures = 0;
  int sent [N], got [N];
  int limit [N];
  bit rand_ready = 0, rand_valid = 0;

  axis_mux8 #(.N(N), .LANES(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_comb for (int i = 0; i < N; i++) s_data[i] = {8'(i), 24'd0, 32'(sent[i])};

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (s_valid[i] && s_ready[i]) sent[i]++;
    end
    for (int i = 0; i < N; i++) begin
      // a word once offered stays offered until taken
      if (!(s_valid[i] && !s_ready[i]))
        s_valid[i] <= (sent[i] + int'(s_valid[i] && s_ready[i]) < limit[i]) &&
                      (!rand_valid || $urandom_range(1) == 1);
    end
    if (m_valid && m_ready) begin
      chk(m_cnt >= 1 && m_cnt <= L, "lane count in range");
      chk(int'(m_data[0][63:56]) == int'(m_src), "m_src matches lane 0");
      for (int l = 0; l < int'(m_cnt); l++) begin
        int src;
        src = int'(m_data[l][63:56]);
        chk(int'(m_data[l][31:0]) == got[src], $sformatf("input %0d order: got %0d exp %0d", src, m_data[l][31:0], got[src]));
        got[src]++;
      end
    end
    m_ready <= !rand_ready || ($urandom_range(3) != 0);
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c0, prev, ok_rr, n;
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; limit[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    // phase 1: all inputs saturated, output always ready
    for (int i = 0; i < N; i++) limit[i] = 40;
    m_ready <= 1;
    @(posedge clk);
    while (!m_valid) @(posedge clk);
    prev = -1; ok_rr = 1; n = 0;
    repeat (60) begin
      @(posedge clk); #1;
      if (m_valid) begin
        for (int l = 0; l < int'(m_cnt); l++) begin
          n++;
          if (prev >= 0 && int'(m_data[l][63:56]) != (prev + 1) % N) ok_rr = 0;
          prev = int'(m_data[l][63:56]);
        end
      end
      // fairness: no input is more than one word ahead of another
      begin
        int mx, mn;
        mx = got[0]; mn = got[0];
        for (int i = 1; i < N; i++) begin
          if (got[i] > mx) mx = got[i];
          if (got[i] < mn) mn = got[i];
        end
        chk(mx - mn <= 1, $sformatf("fair share: inputs between %0d and %0d words", mn, mx));
      end
    end
    chk(ok_rr == 1, "strict round-robin under full load");
    chk(n >= 60 * L - 2 * L, $sformatf("%0d words per cycle: %0d in 60", L, n));
    repeat (300) @(posedge clk);
    for (int i = 0; i < N; i++) chk(got[i] == 40, $sformatf("input %0d delivered %0d", i, got[i]));
    // single busy input: one word per cycle
    limit[3] = got[3] + 100;
    repeat (5) @(posedge clk);
    n = got[3];
    repeat (50) @(posedge clk);
    chk(got[3] - n >= 49, $sformatf("single input: %0d words in 50 cycles", got[3] - n));
    repeat (100) @(posedge clk);
    // phase 2: random valid and ready
    rand_ready = 1; rand_valid = 1;
    for (int i = 0; i < N; i++) limit[i] = got[i] + 50 * (i + 1);
    repeat (5000) @(posedge clk);
    for (int i = 0; i < N; i++) chk(got[i] == limit[i] && sent[i] == limit[i], $sformatf("input %0d delivered %0d of %0d", i, got[i], limit[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
