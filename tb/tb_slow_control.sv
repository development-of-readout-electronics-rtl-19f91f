// tb_slow_control: self-checking test of slow_control.
// A model of the chip's serial port samples sc_dout on rising sc_clk edges
// and shifts a preset reply out on sc_din (changed on falling edges). The
// test queues commands over AXI4-Lite, checks that the chip receives each
// command exactly (32 bits, MSB first, framed by sc_cs_n), that the replies
// come back through RXDATA in order, the sc_clk period (2*CLK_DIV cycles),
// the transfer time per word, and the status register.
`timescale 1ns/1ps
module tb_slow_control;
  localparam int DIV = 3;
  logic clk = 0, rst = 1;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic [31:0] s_wdata = 0;
  logic [3:0] s_wstrb = 4'hF;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic sc_clk, sc_cs_n, sc_dout, sc_din;
  int checks = 0, failures = 0;

  slow_control #(.CLK_DIV(DIV), .FIFO_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- chip-side model
  logic [31:0] cmds[$];
  logic [31:0] rx_sh, tx_sh;
  int nbits = 0, nframes = 0;
  int cyc = 0, t_rise_prev = -1, period = 0, t_cs_fall = 0, frame_cycles = 0;

  function automatic logic [31:0] reply_of(int k);
    return 32'hC0DE_0000 + 32'(k * 7);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge sc_cs_n) begin
    tx_sh = reply_of(nframes);
    nbits = 0;
    t_cs_fall = cyc;
    sc_din = tx_sh[31];
  end
  always @(posedge sc_clk) if (!sc_cs_n) begin
    rx_sh = {rx_sh[30:0], sc_dout};
    nbits++;
    if (t_rise_prev >= 0) period = cyc - t_rise_prev;
    t_rise_prev = cyc;
  end
  always @(negedge sc_clk) if (!sc_cs_n) begin
    tx_sh = {tx_sh[30:0], 1'b0};
    sc_din = tx_sh[31];
  end
  always @(posedge sc_cs_n) if (!rst && cyc > 5) begin
    logic [31:0] e;
    frame_cycles = cyc - t_cs_fall;
    chk(nbits == 32, $sformatf("32 bits per frame (%0d)", nbits));
    if (cmds.size() == 0) chk(0, "unexpected frame");
    else begin
      e = cmds.pop_front();
      chk(rx_sh == e, $sformatf("chip got %h exp %h", rx_sh, e));
    end
    nframes++;
    t_rise_prev = -1;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    s_awaddr <= a; s_wdata <= d; s_awvalid <= 1; s_wvalid <= 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 0; s_wvalid <= 0;
    do @(posedge clk); while (!s_bvalid);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    sc_din = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    rd(8'h08, d); chk(d == 0, "idle status");
    for (int k = 0; k < 5; k++) begin
      logic [31:0] c = $urandom;
      cmds.push_back(c);
      wr(8'h00, c);
    end
    rd(8'h08, d); chk(d[0] == 1, "busy while sending");
    wait (nframes == 5);
    repeat (10) @(posedge clk);
    chk(period == 2 * DIV, $sformatf("sc_clk period %0d", period));
    chk(frame_cycles >= 64 * DIV && frame_cycles <= 64 * DIV + 4, $sformatf("frame %0d cycles", frame_cycles));
    rd(8'h08, d);
    chk(d[0] == 0 && d[16:12] == 5 && d[8:4] == 0, $sformatf("status %h", d));
    for (int k = 0; k < 5; k++) begin
      rd(8'h04, d);
      chk(d == reply_of(k), $sformatf("reply %0d = %h", k, d));
    end
    rd(8'h08, d); chk(d[16:12] == 0, "rx queue empty");
    rd(8'h04, d); chk(d == 0, "empty RXDATA reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
