// slow_control: serial slow-control master that carries configuration and
// commands from the processor to the Timepix4 chip and collects its replies.
//
// The processor writes 32-bit command words to TXDATA; they queue in a
// TX FIFO. The serialiser takes one word at a time and shifts it out MSB
// first on sc_dout while sc_cs_n is low, changing data on the falling edge of
// sc_clk and sampling sc_din on the rising edge, so every command word
// returns a 32-bit reply word that is queued in an RX FIFO. sc_clk runs at
// clk / (2*CLK_DIV); a 32-bit word therefore takes 64*CLK_DIV cycles plus
// two cycles of chip-select framing.
// Register map (AXI4-Lite, byte addresses):
//   0x00 TXDATA  write: queue a command word (ignored when the FIFO is full)
//   0x04 RXDATA  read: oldest reply word, removed by the read (0 if none)
//   0x08 STATUS  [0] busy, [8:4] TX level, [16:12] RX level, [31] RX overflow
// Every bus access is answered OKAY (BRESP = RRESP = 0).
// The paper shows a "Timepix4 Slow Control" block on the processor bus and a
// slow-control link to the chip but gives neither protocol nor word format;
// the SPI-style framing here is this design's choice.
module slow_control #(
  parameter int unsigned CLK_DIV    = 4,
  parameter int unsigned FIFO_DEPTH = 16
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
  // serial link to the chip
  output logic        sc_clk,
  output logic        sc_cs_n,
  output logic        sc_dout,
  input  logic        sc_din
);

  localparam int unsigned LVW = $clog2(FIFO_DEPTH) + 1;
  localparam int unsigned DW  = $clog2(CLK_DIV + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_SHIFT, S_STOP} sc_state_e;

  logic        wr_en, rd_en;
  logic [7:0]  wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;

  axil_slave #(.ADDR_W(8)) u_bus (
    .clk, .rst,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  // command and reply queues
  logic           txq_push, txq_ready, txq_valid, txq_pop;
  logic [31:0]    txq_head;
  logic [LVW-1:0] txq_level;
  logic           rxq_push, rxq_ready, rxq_valid, rxq_pop;
  logic [31:0]    rxq_head, rx_word;
  logic [LVW-1:0] rxq_level;
  logic           rx_ovf;

  assign txq_push = wr_en && (wr_addr[7:2] == 6'h00);
  assign rxq_pop  = rd_en && (rd_addr[7:2] == 6'h01) && rxq_valid;

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_txq (
    .clk, .rst, .s_valid(txq_push), .s_data(wr_data), .s_ready(txq_ready),
    .m_valid(txq_valid), .m_data(txq_head), .m_ready(txq_pop), .level(txq_level)
  );
  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_rxq (
    .clk, .rst, .s_valid(rxq_push), .s_data(rx_word), .s_ready(rxq_ready),
    .m_valid(rxq_valid), .m_data(rxq_head), .m_ready(rxq_pop), .level(rxq_level)
  );

  // serialiser
  sc_state_e   state;
  logic [DW-1:0] div;
  logic [5:0]  bitn;
  logic [31:0] sh_tx;
  logic        tick;

  assign tick    = (div == DW'(CLK_DIV - 1));
  assign txq_pop = (state == S_IDLE) && txq_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      div      <= '0;
      bitn     <= '0;
      sh_tx    <= '0;
      rx_word  <= '0;
      sc_clk   <= 1'b0;
      sc_cs_n  <= 1'b1;
      sc_dout  <= 1'b0;
      rxq_push <= 1'b0;
      rx_ovf   <= 1'b0;
    end else begin
      rxq_push <= 1'b0;
      if (rxq_push && !rxq_ready) rx_ovf <= 1'b1;
      unique case (state)
        S_IDLE: if (txq_valid) begin
          sh_tx   <= txq_head;
          sc_cs_n <= 1'b0;
          div     <= '0;
          bitn    <= '0;
          state   <= S_START;
        end
        S_START: begin              // first data bit before the first rising edge
          sc_dout <= sh_tx[31];
          sh_tx   <= {sh_tx[30:0], 1'b0};
          state   <= S_SHIFT;
        end
        S_SHIFT: begin
          div <= tick ? '0 : div + 1'b1;
          if (tick) begin
            sc_clk <= !sc_clk;
            if (!sc_clk) begin        // rising edge: sample the reply
              rx_word <= {rx_word[30:0], sc_din};
              bitn    <= bitn + 1'b1;
            end else if (bitn == 6'd32) begin
              state <= S_STOP;        // falling edge after the last bit
            end else begin            // falling edge: next bit out
              sc_dout <= sh_tx[31];
              sh_tx   <= {sh_tx[30:0], 1'b0};
            end
          end
        end
        S_STOP: begin
          sc_cs_n  <= 1'b1;
          sc_dout  <= 1'b0;
          rxq_push <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (rd_addr[7:2])
      6'h01:   rd_data = rxq_valid ? rxq_head : 32'd0;
      6'h02:   rd_data = {rx_ovf, 14'd0, 5'(rxq_level), 3'd0, 5'(txq_level), 3'd0, (state != S_IDLE)};
      default: rd_data = '0;
    endcase
  end

endmodule
