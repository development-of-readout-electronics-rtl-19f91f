// tb_top: end-to-end test of tpx4_readout_top at reduced sizes (1024-line
// SODIMM ring, 64-word frames, short timeouts); see tb_top_body.svh.
`timescale 1ns/1ps
module tb_top;
  localparam int DDR_AW = 10, PW = 64, UDP_TO = 128, SC_DIV = 2, FLUSH = 64;
  localparam int BURST_CYC = 4000;
  localparam longint WATCHDOG_NS = 64'd20_000_000;
  `include "tb_top_body.svh"

  tpx4_readout_top #(
    .CH_FIFO_DEPTH(64), .DDR_ADDR_W(DDR_AW), .OUT_DEPTH(8), .FLUSH_CYCLES(FLUSH),
    .RATE_WINDOW(1000), .PAYLOAD_WORDS(PW), .UDP_TIMEOUT(UDP_TO), .SC_CLK_DIV(SC_DIV)
  ) dut (.*);
endmodule
