// control_regs: AXI4-Lite register file through which the processor
// configures the readout firmware and reads its status.
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL      [0] soft reset of the data path (self-clearing after one
//                  cycle), [1] spill enable (use the SODIMM overflow
//                  buffer), [2] output select (0 = 40G QSFP+, 1 = 10G SFP+),
//                  [3] clear the T0 time base (self-clearing)
//   0x04 CH_EN     [15:0] GWT channel enables, bit i = channel i
//                  (0..7 TOP, 8..15 BOT)
//   0x08 SRC_MAC_L 0x0C SRC_MAC_H[15:0]  0x10 DST_MAC_L  0x14 DST_MAC_H[15:0]
//   0x18 SRC_IP    0x1C DST_IP           0x20 PORTS {src[31:16], dst[15:0]}
//   0x40 + 4*i     read-only status word i, i < N_STATUS
// Reads of unmapped addresses return 0; writes to them are ignored.
// Every access is answered OKAY (BRESP = RRESP = 0).
// Reset values: all channels enabled, spill on, 40G output.
// The paper shows a Control Register block on AXI-Lite; its map is this
// design's choice.
module control_regs
  import tpx4_pkg::*;
#(
  parameter int unsigned N_STATUS = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // configuration out
  output logic            soft_rst,
  output logic            spill_en,
  output out_sel_e        out_sel,
  output logic            ts_clear,
  output logic [N_CH-1:0] ch_en,
  output udp_cfg_t        udp_cfg,
  // status in
  input  logic [31:0]     status [N_STATUS]
);

  logic       wr_en, rd_en;
  logic [7:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;

  axil_slave #(.ADDR_W(8)) u_bus (
    .clk, .rst,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      soft_rst <= 1'b0;
      spill_en <= 1'b1;
      out_sel  <= OUT_40G;
      ts_clear <= 1'b0;
      ch_en    <= '1;
      udp_cfg  <= '0;
    end else begin
      soft_rst <= 1'b0;
      ts_clear <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr[7:2])
          6'h00: begin
            soft_rst <= wr_data[0];
            spill_en <= wr_data[1];
            out_sel  <= out_sel_e'(wr_data[2]);
            ts_clear <= wr_data[3];
          end
          6'h01: ch_en                    <= wr_data[N_CH-1:0];
          6'h02: udp_cfg.src_mac[31:0]    <= wr_data;
          6'h03: udp_cfg.src_mac[47:32]   <= wr_data[15:0];
          6'h04: udp_cfg.dst_mac[31:0]    <= wr_data;
          6'h05: udp_cfg.dst_mac[47:32]   <= wr_data[15:0];
          6'h06: udp_cfg.src_ip           <= wr_data;
          6'h07: udp_cfg.dst_ip           <= wr_data;
          6'h08: {udp_cfg.src_port, udp_cfg.dst_port} <= wr_data;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rd_data = '0;
    if (rd_addr[7:6] != 2'b00) begin
      if (int'(rd_addr[5:2]) < N_STATUS) rd_data = status[rd_addr[5:2]];
    end else begin
      unique case (rd_addr[5:2])
        4'h0: rd_data = {28'd0, 1'b0, out_sel, spill_en, 1'b0};
        4'h1: rd_data = 32'(ch_en);
        4'h2: rd_data = udp_cfg.src_mac[31:0];
        4'h3: rd_data = {16'd0, udp_cfg.src_mac[47:32]};
        4'h4: rd_data = udp_cfg.dst_mac[31:0];
        4'h5: rd_data = {16'd0, udp_cfg.dst_mac[47:32]};
        4'h6: rd_data = udp_cfg.src_ip;
        4'h7: rd_data = udp_cfg.dst_ip;
        4'h8: rd_data = {udp_cfg.src_port, udp_cfg.dst_port};
        default: rd_data = '0;
      endcase
    end
  end

  logic unused_rd;
  assign unused_rd = rd_en;

endmodule
