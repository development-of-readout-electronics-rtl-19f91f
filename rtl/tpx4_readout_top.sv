// tpx4_readout_top: FPGA data-acquisition firmware of the Timepix4 readout
// board, from the 16 GWT links to the Ethernet MACs.
//
// Data path: each GWT link (8 from the TOP half of the chip, 8 from the
// BOTTOM half) is decoded by a gwt_decoder in its own receive clock and
// crosses into the system clock through its own async_fifo. Two axis_mux8
// merge the 8 TOP and the 8 BOT channels into two streams of up to IN_LANES
// words per cycle (one word from each of up to IN_LANES channels), which the
// buffer_controller merges into one, spilling to the external DDR4 SODIMM
// whenever the output cannot keep up. The resulting stream of up to
// OUT_LANES words per cycle goes to the
// 40G UDP core (QSFP+) or the 10G UDP core (SFP+), chosen by a control bit.
// Control path: the processor reaches control_regs over one AXI4-Lite port
// and the Timepix4 slow_control block over another; t0_tdc time-stamps the
// external T0 pulse. Status (link lock, bandwidth, memory fill, frame and T0
// counters) is readable in control_regs at 0x40 + 4*i:
//   0 lock mask  1 words in/window  2 words out/window  3 SODIMM fill
//   4 SODIMM peak  5 spilled lines  6 bypassed lines  7 input stall cycles
//   8 sticky per-channel drop flags  9 40G frames  10 10G frames
//   11/12 last T0 time stamp low/high  13 T0 count  14 T0 period
//   15 [0] spill active
// Outside this module, and brought out as ports: the transceivers with their
// 64/66B gearboxes, the SODIMM memory controller, the Ethernet MACs, the
// processor system and the AXI interconnect.
// Reset: `rst` (system clock) or a soft reset from CTRL[0] resets the data
// path; the reset reaches every link clock through a two-stage synchroniser.
module tpx4_readout_top
  import tpx4_pkg::*;
#(
  parameter int unsigned IN_LANES      = 4,    // words/cycle per half into the buffer
  parameter int unsigned OUT_LANES     = 2,    // words/cycle out to the UDP cores
  parameter int unsigned CH_FIFO_DEPTH = 512,
  parameter int unsigned DDR_ADDR_W    = 29,
  parameter int unsigned OUT_DEPTH     = 64,
  parameter int unsigned FLUSH_CYCLES  = 256,
  parameter int unsigned RATE_WINDOW   = 1000000,
  parameter int unsigned PAYLOAD_WORDS = 1024,
  parameter int unsigned UDP_TIMEOUT   = 1024,
  parameter int unsigned SC_CLK_DIV    = 4
) (
  input  logic clk,
  input  logic rst,
  // GWT links from the transceivers (one 66-bit block per valid)
  input  logic [N_CH-1:0] gwt_clk,
  input  logic [N_CH-1:0] gwt_blk_valid,
  input  logic [1:0]      gwt_blk_hdr  [N_CH],
  input  word_t           gwt_blk_data [N_CH],
  output logic [N_CH-1:0] gwt_slip,
  // SODIMM memory controller user interface
  output logic                  ddr_cmd_valid,
  input  logic                  ddr_cmd_ready,
  output logic                  ddr_cmd_we,
  output logic [DDR_ADDR_W-1:0] ddr_cmd_addr,
  output line_t                 ddr_wdata,
  input  logic                  ddr_rd_valid,
  input  line_t                 ddr_rd_data,
  // 40G MAC (QSFP+)
  output logic        m40_tvalid,
  output logic [64*OUT_LANES-1:0] m40_tdata,
  output logic [8*OUT_LANES-1:0]  m40_tkeep,
  output logic        m40_tlast,
  input  logic        m40_tready,
  // 10G MAC (SFP+)
  output logic        m10_tvalid,
  output logic [64*OUT_LANES-1:0] m10_tdata,
  output logic [8*OUT_LANES-1:0]  m10_tkeep,
  output logic        m10_tlast,
  input  logic        m10_tready,
  // T0 input
  input  logic        t0_in,
  // AXI4-Lite: control registers
  input  logic [7:0]  ctl_awaddr,
  input  logic        ctl_awvalid,
  output logic        ctl_awready,
  input  logic [31:0] ctl_wdata,
  input  logic [3:0]  ctl_wstrb,
  input  logic        ctl_wvalid,
  output logic        ctl_wready,
  output logic [1:0]  ctl_bresp,
  output logic        ctl_bvalid,
  input  logic        ctl_bready,
  input  logic [7:0]  ctl_araddr,
  input  logic        ctl_arvalid,
  output logic        ctl_arready,
  output logic [31:0] ctl_rdata,
  output logic [1:0]  ctl_rresp,
  output logic        ctl_rvalid,
  input  logic        ctl_rready,
  // AXI4-Lite: Timepix4 slow control
  input  logic [7:0]  sc_awaddr,
  input  logic        sc_awvalid,
  output logic        sc_awready,
  input  logic [31:0] sc_wdata,
  input  logic [3:0]  sc_wstrb,
  input  logic        sc_wvalid,
  output logic        sc_wready,
  output logic [1:0]  sc_bresp,
  output logic        sc_bvalid,
  input  logic        sc_bready,
  input  logic [7:0]  sc_araddr,
  input  logic        sc_arvalid,
  output logic        sc_arready,
  output logic [31:0] sc_rdata,
  output logic [1:0]  sc_rresp,
  output logic        sc_rvalid,
  input  logic        sc_rready,
  // slow-control link to the Timepix4 chip
  output logic        sc_clk,
  output logic        sc_cs_n,
  output logic        sc_dout,
  input  logic        sc_din
);

  localparam int unsigned N_STATUS = 16;

  // ------------------------------------------------------------ control
  logic            soft_rst, spill_en, ts_clear;
  out_sel_e        out_sel;
  logic [N_CH-1:0] ch_en;
  udp_cfg_t        udp_cfg;
  logic [31:0]     status [N_STATUS];

  control_regs #(.N_STATUS(N_STATUS)) u_regs (
    .clk, .rst,
    .s_awaddr(ctl_awaddr), .s_awvalid(ctl_awvalid), .s_awready(ctl_awready),
    .s_wdata(ctl_wdata), .s_wstrb(ctl_wstrb), .s_wvalid(ctl_wvalid), .s_wready(ctl_wready),
    .s_bresp(ctl_bresp), .s_bvalid(ctl_bvalid), .s_bready(ctl_bready),
    .s_araddr(ctl_araddr), .s_arvalid(ctl_arvalid), .s_arready(ctl_arready),
    .s_rdata(ctl_rdata), .s_rresp(ctl_rresp), .s_rvalid(ctl_rvalid), .s_rready(ctl_rready),
    .soft_rst, .spill_en, .out_sel, .ts_clear, .ch_en, .udp_cfg, .status
  );

  slow_control #(.CLK_DIV(SC_CLK_DIV)) u_sc (
    .clk, .rst,
    .s_awaddr(sc_awaddr), .s_awvalid(sc_awvalid), .s_awready(sc_awready),
    .s_wdata(sc_wdata), .s_wstrb(sc_wstrb), .s_wvalid(sc_wvalid), .s_wready(sc_wready),
    .s_bresp(sc_bresp), .s_bvalid(sc_bvalid), .s_bready(sc_bready),
    .s_araddr(sc_araddr), .s_arvalid(sc_arvalid), .s_arready(sc_arready),
    .s_rdata(sc_rdata), .s_rresp(sc_rresp), .s_rvalid(sc_rvalid), .s_rready(sc_rready),
    .sc_clk, .sc_cs_n, .sc_dout, .sc_din
  );

  // data-path reset, stretched so that slow link clocks see it
  logic [3:0] rst_stretch;
  logic       dp_rst;

  always_ff @(posedge clk) begin
    if (rst || soft_rst) rst_stretch <= '1;
    else if (rst_stretch != 0) rst_stretch <= rst_stretch - 1'b1;
  end
  assign dp_rst = rst || (rst_stretch != 0);

  // ------------------------------------------------------ per-channel links
  logic [N_CH-1:0] lock_raw, drop_raw;
  logic [N_CH-1:0] fifo_valid, fifo_ready;
  word_t           fifo_data [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [1:0]  rsync;
    logic        lrst;
    logic        en_s1, en_s2;
    logic        dec_valid, dec_ready;
    word_t       dec_data;
    logic [31:0] drop_cnt, word_cnt;

    always_ff @(posedge gwt_clk[c]) begin
      rsync <= {rsync[0], dp_rst};
      en_s1 <= ch_en[c];
      en_s2 <= en_s1;
    end
    assign lrst = rsync[1];

    gwt_decoder u_dec (
      .clk(gwt_clk[c]), .rst(lrst), .en(en_s2),
      .blk_valid(gwt_blk_valid[c]), .blk_hdr(gwt_blk_hdr[c]), .blk_data(gwt_blk_data[c]),
      .slip(gwt_slip[c]),
      .m_valid(dec_valid), .m_data(dec_data), .m_ready(dec_ready),
      .locked(lock_raw[c]), .drop_cnt, .word_cnt
    );
    assign drop_raw[c] = (drop_cnt != 0);

    async_fifo #(.WIDTH(WORD_W), .DEPTH(CH_FIFO_DEPTH)) u_fifo (
      .wclk(gwt_clk[c]), .wrst(lrst),
      .s_valid(dec_valid), .s_data(dec_data), .s_ready(dec_ready),
      .rclk(clk), .rrst(dp_rst),
      .m_valid(fifo_valid[c]), .m_data(fifo_data[c]), .m_ready(fifo_ready[c])
    );

    logic unused_cnt;
    assign unused_cnt = ^word_cnt;
  end

  // ---------------------------------------------------------- TOP / BOT mux
  localparam int unsigned ICW = $clog2(IN_LANES + 1);
  localparam int unsigned OCW = $clog2(OUT_LANES + 1);
  logic  top_valid, top_ready, bot_valid, bot_ready;
  word_t top_data [IN_LANES];
  word_t bot_data [IN_LANES];
  logic [ICW-1:0] top_cnt, bot_cnt;
  word_t top_in [N_HALF_CH];
  word_t bot_in [N_HALF_CH];
  logic [$clog2(N_HALF_CH)-1:0] top_src, bot_src;

  for (genvar i = 0; i < N_HALF_CH; i++) begin : g_half
    assign top_in[i] = fifo_data[i];
    assign bot_in[i] = fifo_data[N_HALF_CH + i];
  end

  axis_mux8 #(.LANES(IN_LANES)) u_mux_top (
    .clk, .rst(dp_rst),
    .s_valid(fifo_valid[N_HALF_CH-1:0]), .s_data(top_in), .s_ready(fifo_ready[N_HALF_CH-1:0]),
    .m_valid(top_valid), .m_data(top_data), .m_cnt(top_cnt), .m_ready(top_ready), .m_src(top_src)
  );
  axis_mux8 #(.LANES(IN_LANES)) u_mux_bot (
    .clk, .rst(dp_rst),
    .s_valid(fifo_valid[N_CH-1:N_HALF_CH]), .s_data(bot_in), .s_ready(fifo_ready[N_CH-1:N_HALF_CH]),
    .m_valid(bot_valid), .m_data(bot_data), .m_cnt(bot_cnt), .m_ready(bot_ready), .m_src(bot_src)
  );

  // ------------------------------------------------------ buffer controller
  logic  buf_valid, buf_ready;
  word_t buf_data [OUT_LANES];
  logic [OCW-1:0] buf_cnt;
  logic  spill_active;
  logic [DDR_ADDR_W:0] ddr_level, ddr_peak;
  logic [31:0] rate_in, rate_out, spill_lines, bypass_lines, stall_cycles;

  buffer_controller #(
    .IN_LANES(IN_LANES), .OUT_LANES(OUT_LANES),
    .DDR_ADDR_W(DDR_ADDR_W), .OUT_DEPTH(OUT_DEPTH),
    .FLUSH_CYCLES(FLUSH_CYCLES), .RATE_WINDOW(RATE_WINDOW)
  ) u_buf (
    .clk, .rst(dp_rst), .spill_en,
    .s_top_valid(top_valid), .s_top_data(top_data), .s_top_cnt(top_cnt), .s_top_ready(top_ready),
    .s_bot_valid(bot_valid), .s_bot_data(bot_data), .s_bot_cnt(bot_cnt), .s_bot_ready(bot_ready),
    .ddr_cmd_valid, .ddr_cmd_ready, .ddr_cmd_we, .ddr_cmd_addr, .ddr_wdata,
    .ddr_rd_valid, .ddr_rd_data,
    .m_valid(buf_valid), .m_data(buf_data), .m_cnt(buf_cnt), .m_ready(buf_ready),
    .spill_active, .ddr_level, .ddr_peak, .rate_in, .rate_out,
    .spill_lines, .bypass_lines, .stall_cycles
  );

  // ------------------------------------------------------------ UDP cores
  logic        u40_ready, u10_ready;
  logic [31:0] frames40, frames10;

  assign buf_ready = (out_sel == OUT_40G) ? u40_ready : u10_ready;

  udp_tx #(.LANES(OUT_LANES), .PAYLOAD_WORDS(PAYLOAD_WORDS), .TIMEOUT(UDP_TIMEOUT)) u_udp40 (
    .clk, .rst(dp_rst), .cfg(udp_cfg),
    .s_valid(buf_valid && out_sel == OUT_40G), .s_data(buf_data), .s_cnt(buf_cnt), .s_ready(u40_ready),
    .m_tvalid(m40_tvalid), .m_tdata(m40_tdata), .m_tkeep(m40_tkeep),
    .m_tlast(m40_tlast), .m_tready(m40_tready), .frame_cnt(frames40)
  );
  udp_tx #(.LANES(OUT_LANES), .PAYLOAD_WORDS(PAYLOAD_WORDS), .TIMEOUT(UDP_TIMEOUT)) u_udp10 (
    .clk, .rst(dp_rst), .cfg(udp_cfg),
    .s_valid(buf_valid && out_sel == OUT_10G), .s_data(buf_data), .s_cnt(buf_cnt), .s_ready(u10_ready),
    .m_tvalid(m10_tvalid), .m_tdata(m10_tdata), .m_tkeep(m10_tkeep),
    .m_tlast(m10_tlast), .m_tready(m10_tready), .frame_cnt(frames10)
  );

  // ------------------------------------------------------------------ T0
  logic        t0_stb;
  logic [47:0] t0_ts, t0_period, ts_now;
  logic [31:0] t0_count;

  t0_tdc #(.TS_W(48)) u_tdc (
    .clk, .rst, .t0_in, .ts_clear,
    .t0_stb, .t0_ts, .t0_period, .t0_count, .ts_now
  );

  // --------------------------------------------------------------- status
  logic [N_CH-1:0] lock_s1, lock_s2, drop_s1, drop_s2;

  always_ff @(posedge clk) begin
    lock_s1 <= lock_raw;  lock_s2 <= lock_s1;
    drop_s1 <= drop_raw;  drop_s2 <= drop_s1;
  end

  assign status[0]  = 32'(lock_s2);
  assign status[1]  = rate_in;
  assign status[2]  = rate_out;
  assign status[3]  = 32'(ddr_level);
  assign status[4]  = 32'(ddr_peak);
  assign status[5]  = spill_lines;
  assign status[6]  = bypass_lines;
  assign status[7]  = stall_cycles;
  assign status[8]  = 32'(drop_s2);
  assign status[9]  = frames40;
  assign status[10] = frames10;
  assign status[11] = t0_ts[31:0];
  assign status[12] = {16'd0, t0_ts[47:32]};
  assign status[13] = t0_count;
  assign status[14] = t0_period[31:0];
  assign status[15] = {31'd0, spill_active};

  logic unused_top;
  assign unused_top = ^{top_src, bot_src, t0_stb, ts_now, t0_period[47:32]};

endmodule
