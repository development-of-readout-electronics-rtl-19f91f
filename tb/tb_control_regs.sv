// tb_control_regs: self-checking test of control_regs over AXI4-Lite.
// Checks reset values, write/read-back of every configuration register, the
// decoded configuration outputs (channel enables, output select, spill
// enable, UDP addresses), the one-cycle soft-reset and time-clear pulses,
// the read-only status window and that unmapped addresses read as zero.
`timescale 1ns/1ps
module tb_control_regs;
  import tpx4_pkg::*;
  localparam int NS = 16;
  logic clk = 0, rst = 1;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic [31:0] s_wdata = 0;
  logic [3:0] s_wstrb = 4'hF;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic soft_rst, spill_en, ts_clear;
  out_sel_e out_sel;
  logic [N_CH-1:0] ch_en;
  udp_cfg_t udp_cfg;
  logic [31:0] status [NS];
  int checks = 0, failures = 0;
  int n_soft = 0, n_clr = 0;

  control_regs #(.N_STATUS(NS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (!rst && soft_rst) n_soft++;
    if (!rst && ts_clear) n_clr++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    s_awaddr <= a; s_wdata <= d; s_awvalid <= 1; s_wvalid <= 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    s_awvalid <= 0; s_wvalid <= 0;
    do @(posedge clk); while (!s_bvalid);
    chk(s_bresp == 2'b00, "bresp okay");
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    for (int i = 0; i < NS; i++) status[i] = 32'h1000_0000 + 32'(i * 3);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    chk(ch_en == '1 && spill_en && out_sel == OUT_40G, "reset values");
    rd(8'h00, d); chk(d == 32'h2, $sformatf("CTRL reset read %h", d));
    wr(8'h04, 32'h0000_A5C3); chk(ch_en == 16'hA5C3, "ch_en");
    rd(8'h04, d); chk(d == 32'h0000_A5C3, "ch_en read");
    wr(8'h00, 32'h4);          // 10G, spill off
    chk(out_sel == OUT_10G && !spill_en, "out_sel / spill_en");
    rd(8'h00, d); chk(d == 32'h4, "CTRL read");
    wr(8'h08, 32'h0A0B_0C0D); wr(8'h0C, 32'hFFFF_0102);
    wr(8'h10, 32'h1122_3344); wr(8'h14, 32'h0000_5566);
    wr(8'h18, 32'hC0A8_0001); wr(8'h1C, 32'hC0A8_0002); wr(8'h20, 32'h1234_5678);
    chk(udp_cfg.src_mac == 48'h0102_0A0B_0C0D, "src mac");
    chk(udp_cfg.dst_mac == 48'h5566_1122_3344, "dst mac");
    chk(udp_cfg.src_ip == 32'hC0A8_0001 && udp_cfg.dst_ip == 32'hC0A8_0002, "ips");
    chk(udp_cfg.src_port == 16'h1234 && udp_cfg.dst_port == 16'h5678, "ports");
    rd(8'h0C, d); chk(d == 32'h0000_0102, "mac high read masks to 16 bits");
    rd(8'h20, d); chk(d == 32'h1234_5678, "ports read");
    wr(8'h00, 32'h9);          // soft reset + ts clear, 40G, spill off
    repeat (3) @(posedge clk);
    chk(n_soft == 1 && n_clr == 1, $sformatf("one-cycle pulses %0d %0d", n_soft, n_clr));
    for (int i = 0; i < NS; i++) begin
      rd(8'(8'h40 + 4 * i), d);
      chk(d == 32'h1000_0000 + 32'(i * 3), $sformatf("status %0d = %h", i, d));
    end
    rd(8'h30, d); chk(d == 0, "unmapped reads 0");
    wr(8'h30, 32'hFFFF_FFFF);
    rd(8'h04, d); chk(d == 32'h0000_A5C3, "unmapped write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
