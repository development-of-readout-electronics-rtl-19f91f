// Test environment shared by the end-to-end testbenches (tb_top, tb_top_full
// through tb_top_body.svh, and tb_workloads). The including module declares
// DDR_AW (SODIMM line-address width); it instantiates tpx4_readout_top as
// `dut` on the signals declared here.
//
// Contents: a 312.5 MHz system clock; 16 GWT transmitter + gearbox models,
// each on its own clock (about 156 MHz, a 10.24 Gb/s link; data rate set by
// the percentage of idle blocks), starting out of block alignment; a
// behavioural SODIMM; two MAC sinks of 2 words per beat (40G always ready
// unless the test stalls it, 10G ready one cycle in four); a model of the
// chip's serial slow-control port that answers each command word with the
// complement of its index; AXI4-Lite master tasks for both processor ports.
// Every data word carries its channel in bits 63:60 and a per-channel
// sequence number in bits 31:0; the frame parser checks IPv4 checksum and
// lengths and that each channel's words arrive in order and, until `gap_ok`
// is set, without loss.
import tpx4_pkg::*;
import gwt_model_pkg::*;

logic clk = 0, rst = 1;
logic [N_CH-1:0] gwt_clk = '0, gwt_blk_valid = '0, gwt_slip;
logic [1:0] gwt_blk_hdr [N_CH];
word_t gwt_blk_data [N_CH];
logic ddr_cmd_valid, ddr_cmd_ready, ddr_cmd_we, ddr_rd_valid;
logic [DDR_AW-1:0] ddr_cmd_addr;
line_t ddr_wdata, ddr_rd_data;
logic m40_tvalid, m40_tlast, m40_tready = 1;
localparam int OL = 2;                     // words per output beat (default OUT_LANES)
logic [64*OL-1:0] m40_tdata; logic [8*OL-1:0] m40_tkeep;
logic m10_tvalid, m10_tlast, m10_tready = 0;
logic [64*OL-1:0] m10_tdata; logic [8*OL-1:0] m10_tkeep;
logic t0_in = 0;
logic [7:0] ctl_awaddr = 0, ctl_araddr = 0, sc_awaddr = 0, sc_araddr = 0;
logic ctl_awvalid = 0, ctl_wvalid = 0, ctl_bready = 1, ctl_arvalid = 0, ctl_rready = 1;
logic sc_awvalid = 0, sc_wvalid = 0, sc_bready = 1, sc_arvalid = 0, sc_rready = 1;
logic [31:0] ctl_wdata = 0, sc_wdata = 0;
logic [3:0] ctl_wstrb = 4'hF, sc_wstrb = 4'hF;
logic ctl_awready, ctl_wready, ctl_bvalid, ctl_arready, ctl_rvalid;
logic sc_awready, sc_wready, sc_bvalid, sc_arready, sc_rvalid;
logic [1:0] ctl_bresp, ctl_rresp, sc_bresp, sc_rresp;
logic [31:0] ctl_rdata, sc_rdata;
logic sc_clk, sc_cs_n, sc_dout, sc_din = 0;
int n_wr, n_rd;

int checks = 0, failures = 0;
bit stop_all = 0;

task automatic chk(bit ok, string what);
  checks++;
  if (!ok) begin failures++; $display("FAIL: %s", what); end
endtask

always #1.6 clk = ~clk;                    // 312.5 MHz system clock

ddr_model #(.ADDR_W(DDR_AW), .LINE_W(LINE_W), .LATENCY(20), .RDY_GAP(6)) u_ddr (
  .clk, .cmd_valid(ddr_cmd_valid), .cmd_ready(ddr_cmd_ready), .cmd_we(ddr_cmd_we),
  .cmd_addr(ddr_cmd_addr), .wdata(ddr_wdata), .rd_valid(ddr_rd_valid),
  .rd_data(ddr_rd_data), .n_wr, .n_rd);

// ------------------------------------------------------------ GWT links
gwt_link links [N_CH];
int gen [N_CH];          // words generated per channel
int n_slips = 0;

function automatic int sent_words(int c);
  return gen[c] - links[c].pending.size();
endfunction

function automatic void set_idle(int pct);
  for (int c = 0; c < N_CH; c++) links[c].idle_pct = pct;
endfunction

for (genvar c = 0; c < N_CH; c++) begin : g_link
  initial begin
    realtime half;
    half = 3.2 + 0.013 * c;
    #(0.37 * c);
    forever #(half) gwt_clk[c] = ~gwt_clk[c];
  end
  always @(posedge gwt_clk[c]) begin
    bit [1:0] h; bit [63:0] d;
    if (links[c] != null) begin
      if (gwt_slip[c]) begin links[c].slip(); n_slips++; end
      while (links[c].pending.size() < 4) begin
        links[c].pending.push_back({4'(c), 12'h0, 16'hBEEF, 32'(gen[c])});
        gen[c]++;
      end
      links[c].next_block(h, d);
      gwt_blk_valid[c] <= 1'b1;
      gwt_blk_hdr[c]   <= h;
      gwt_blk_data[c]  <= d;
    end
  end
end

// ------------------------------------------------------------ MAC sinks
int  got [N_CH];
int  frames40 = 0, frames10 = 0;
bit  gap_ok = 0;           // set once overflow is provoked
byte unsigned fr40[$], fr10[$];

function automatic int be16(ref byte unsigned f[$], input int o);
  return (int'(f[o]) << 8) | int'(f[o+1]);
endfunction

task automatic parse(ref byte unsigned f[$]);
  int n, sum;
  n = f.size() - 42;
  chk(n > 0 && n % 8 == 0, $sformatf("frame payload %0d bytes", n));
  chk(be16(f, 16) == n + 28 && be16(f, 38) == n + 8, "frame lengths");
  sum = 0;
  for (int o = 14; o < 34; o += 2) sum += be16(f, o);
  while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
  chk(sum == 16'hFFFF, "ip checksum");
  for (int w = 0; w < n / 8; w++) begin
    word_t x; int c, s;
    for (int b = 0; b < 8; b++) x[8*b +: 8] = f[42 + 8*w + b];
    c = int'(x[63:60]);
    s = int'(x[31:0]);
    if (!gap_ok) chk(s == got[c], $sformatf("ch %0d seq %0d exp %0d", c, s, got[c]));
    else         chk(s >= got[c], $sformatf("ch %0d seq %0d went back (exp >= %0d)", c, s, got[c]));
    got[c] = s + 1;
  end
endtask

always @(posedge clk) begin
  if (!rst) begin
    if (m40_tvalid && m40_tready) begin
      for (int i = 0; i < 8 * OL; i++) if (m40_tkeep[i]) fr40.push_back(m40_tdata[8*i +: 8]);
      if (m40_tlast) begin parse(fr40); fr40.delete(); frames40++; end
    end
    if (m10_tvalid && m10_tready) begin
      for (int i = 0; i < 8 * OL; i++) if (m10_tkeep[i]) fr10.push_back(m10_tdata[8*i +: 8]);
      if (m10_tlast) begin parse(fr10); fr10.delete(); frames10++; end
    end
  end
  m10_tready <= ($urandom_range(3) == 0);
end

// ------------------------------------------------------ slow-control chip
logic [31:0] sc_rx, sc_tx;
logic [31:0] sc_seen[$];
always @(negedge sc_cs_n) begin sc_tx = ~sc_seen.size(); sc_din = sc_tx[31]; end
always @(posedge sc_clk) if (!sc_cs_n) sc_rx = {sc_rx[30:0], sc_dout};
always @(negedge sc_clk) if (!sc_cs_n) begin sc_tx = {sc_tx[30:0], 1'b0}; sc_din = sc_tx[31]; end
always @(posedge sc_cs_n) if (!rst) sc_seen.push_back(sc_rx);

// ------------------------------------------------------------ AXI-Lite
task automatic ctl_wr(input logic [7:0] a, input logic [31:0] d);
  ctl_awaddr <= a; ctl_wdata <= d; ctl_awvalid <= 1; ctl_wvalid <= 1;
  do @(posedge clk); while (!(ctl_awready && ctl_wready));
  ctl_awvalid <= 0; ctl_wvalid <= 0;
  do @(posedge clk); while (!ctl_bvalid);
endtask
task automatic ctl_rd(input logic [7:0] a, output logic [31:0] d);
  ctl_araddr <= a; ctl_arvalid <= 1;
  do @(posedge clk); while (!ctl_arready);
  ctl_arvalid <= 0;
  do @(posedge clk); while (!ctl_rvalid);
  d = ctl_rdata;
endtask
task automatic st(input int i, output logic [31:0] d);
  ctl_rd(8'(8'h40 + 4 * i), d);
endtask
task automatic sc_wr(input logic [7:0] a, input logic [31:0] d);
  sc_awaddr <= a; sc_wdata <= d; sc_awvalid <= 1; sc_wvalid <= 1;
  do @(posedge clk); while (!(sc_awready && sc_wready));
  sc_awvalid <= 0; sc_wvalid <= 0;
  do @(posedge clk); while (!sc_bvalid);
endtask
task automatic sc_rd(input logic [7:0] a, output logic [31:0] d);
  sc_araddr <= a; sc_arvalid <= 1;
  do @(posedge clk); while (!sc_arready);
  sc_arvalid <= 0;
  do @(posedge clk); while (!sc_rvalid);
  d = sc_rdata;
endtask

function automatic bit all_delivered();
  for (int c = 0; c < N_CH; c++) if (got[c] != sent_words(c)) return 0;
  return 1;
endfunction

task automatic wait_delivered(int max_cycles);
  int t = 0;
  while (!all_delivered() && t < max_cycles) begin @(posedge clk); t++; end
endtask

