// axil_slave: AXI4-Lite slave front end that turns bus transactions into
// simple register strobes for the control-register file and the slow-control
// block.
//
// Write: the address and data channels are taken together once both are
// valid and no write response is pending; `wr_en` pulses for one cycle with
// the word address and data, and BRESP = OKAY follows on the next cycle.
// Read: an address is taken when no read data is pending; `rd_en` pulses with
// the address and the value on `rd_data` in that same cycle is returned on
// the R channel one cycle later. Byte strobes are ignored: registers are
// written as whole 32-bit words.
// Every access is answered OKAY, so BRESP and RRESP are constant 0; the
// strobe address and data are the bus inputs themselves, qualified by the
// enables, and carry no logic of their own.
module axil_slave #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // register side
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [31:0]       wr_data,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [31:0]       rd_data
);

  logic wr_go, rd_go;

  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign rd_go     = s_arvalid && !s_rvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_arready = rd_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  assign wr_en   = wr_go;
  assign wr_addr = s_awaddr;
  assign wr_data = s_wdata;
  assign rd_en   = rd_go;
  assign rd_addr = s_araddr;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go)                s_bvalid <= 1'b1;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_go) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_data;
      end
    end
  end

  // unused: whole-word writes only
  logic unused_strb;
  assign unused_strb = ^s_wstrb;

endmodule
