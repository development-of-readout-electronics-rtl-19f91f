// tb_top_full: end-to-end test of tpx4_readout_top with every parameter at
// its default (32 GB SODIMM address space, 1024-word frames, 512-word
// channel FIFOs); see tb_top_body.svh.
`timescale 1ns/1ps
module tb_top_full;
  localparam int DDR_AW = 29, PW = 1024, UDP_TO = 1024, SC_DIV = 4, FLUSH = 256;
  localparam int BURST_CYC = 20000;
  localparam longint WATCHDOG_NS = 64'd100_000_000;
  `include "tb_top_body.svh"

  tpx4_readout_top dut (.*);
endmodule
