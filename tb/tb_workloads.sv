// tb_workloads: runs the readout at the link configurations of the detector's
// operating modes, at reduced buffer sizes and with time scaled down.
//
// The system clock is 312.5 MHz and each link model runs at about 156 MHz
// with one 66-bit block per cycle (10.24 Gb/s); a link at a lower line rate
// is modelled by the share of idle blocks (5.12 Gb/s = 50 % idle, 2.56 Gb/s
// = 75 %). Output capacity is 2 words per cycle minus the frame headers
// (64-word frames here: 64 words in 35 beats, 1.83 words/cycle).
//
//   1. X-ray imaging: links 0 and 8 only, at 2.56 Gb/s. Expected input
//      2 x 0.25 x 0.5 = 0.25 words/cycle; everything bypasses the SODIMM.
//   2. Pulsed neutron beam at 80 Gb/s: all 16 links at 5.12 Gb/s
//      (16 x 0.5 x 0.5 = 4 words/cycle) during a pulse, idle between
//      pulses, three pulses with a 1:4 duty cycle. The output must run at
//      its full rate during each pulse, the excess must go to the SODIMM,
//      and the ring must be empty again before the next pulse; nothing may
//      be lost or reordered.
//   3. Full Timepix4 rate: all 16 links at 10.24 Gb/s (8 words/cycle). The
//      SODIMM cannot take the input plus the read-back, so the buffer
//      controller back-pressures the muxes and the link FIFOs drop words;
//      the test checks that this shows up in the status (stall cycles, drop
//      flags) and that the words that arrive are still in order. (With the
//      1024-line ring of this test the ring also fills within the phase,
//      after which the input is held to the output rate.)
// Each phase checks the bandwidth monitor against the expected rates.
`timescale 1ns/1ps
module tb_workloads;
  localparam int DDR_AW = 10, PW = 64, WIN = 1000;
  localparam int PULSE = 2000, PERIOD = 8000;
  `include "tb_top_env.svh"

  tpx4_readout_top #(
    .CH_FIFO_DEPTH(64), .DDR_ADDR_W(DDR_AW), .OUT_DEPTH(8), .FLUSH_CYCLES(64),
    .RATE_WINDOW(WIN), .PAYLOAD_WORDS(PW), .UDP_TIMEOUT(128), .SC_CLK_DIV(2)
  ) dut (.*);

  initial begin
    #(64'd10_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, rin, rout, sp0, pk;
    int t;
    for (int c = 0; c < N_CH; c++) begin
      gen[c] = 0; got[c] = 0;
      links[c] = new(c * 7 + 1, 100);
    end
    repeat (10) @(posedge clk);
    rst <= 0;
    t = 0;
    do begin repeat (50) @(posedge clk); st(0, d); t++; end while (d[15:0] != 16'hFFFF && t < 200);
    chk(d[15:0] == 16'hFFFF, $sformatf("all links locked (%h)", d));

    // 1. X-ray imaging: 2 links at 2.56 Gb/s
    ctl_wr(8'h04, 32'h0000_0101);
    links[0].idle_pct = 75;
    links[8].idle_pct = 75;
    repeat (4 * WIN) @(posedge clk);
    st(1, rin);
    chk(rin >= 200 && rin <= 300, $sformatf("x-ray: %0d words in per %0d cycles, expected ~250", rin, WIN));
    links[0].idle_pct = 100;
    links[8].idle_pct = 100;
    wait_delivered(20000);
    chk(all_delivered(), "x-ray: all words delivered");
    st(5, d);
    chk(d == 0, $sformatf("x-ray: no spill (%0d lines)", d));
    $display("x-ray: %0d words in per window, %0d + %0d words delivered", rin, got[0], got[8]);
    // a disabled decoder is held in reset: the re-enabled links lock again
    ctl_wr(8'h04, 32'h0000_FFFF);
    t = 0;
    do begin repeat (50) @(posedge clk); st(0, d); t++; end while (d[15:0] != 16'hFFFF && t < 200);
    chk(d[15:0] == 16'hFFFF, $sformatf("links locked again (%h)", d));

    // 2. pulsed beam at 80 Gb/s
    for (int p = 0; p < 3; p++) begin
      st(5, sp0);
      set_idle(50);
      repeat (PULSE) @(posedge clk);
      st(1, rin); st(2, rout); st(15, d);
      chk(rin >= 3500 && rin <= 4500, $sformatf("pulse %0d: %0d words in per window, expected ~4000", p, rin));
      chk(rout >= 1700, $sformatf("pulse %0d: output at full rate (%0d words per window)", p, rout));
      chk(d[0], $sformatf("pulse %0d: spill active", p));
      set_idle(100);
      repeat (PERIOD - PULSE) @(posedge clk);
      st(3, d); st(4, pk);
      chk(d == 0, $sformatf("pulse %0d: ring drained before the next pulse (%0d lines left)", p, d));
      st(5, d);
      chk(d > sp0, $sformatf("pulse %0d: %0d lines spilled", p, d - sp0));
      chk(all_delivered(), $sformatf("pulse %0d: all words delivered", p));
      $display("pulse %0d: in %0d out %0d words/window, spilled %0d lines, ring peak %0d lines",
               p, rin, rout, d - sp0, pk);
    end
    st(8, d);
    chk(d == 0, $sformatf("80 Gb/s: no link dropped a word (%h)", d));

    // 3. full Timepix4 rate: 160 Gb/s
    st(7, sp0);
    gap_ok = 1;
    set_idle(0);
    repeat (4 * WIN) @(posedge clk);
    st(1, rin); st(7, d);
    chk(d > sp0, $sformatf("160 Gb/s: inputs back-pressured (%0d stall cycles)", d - sp0));
    chk(rin < 8 * WIN, $sformatf("160 Gb/s: accepted %0d words per window, below the 8000 offered", rin));
    set_idle(100);
    repeat (30000) @(posedge clk);
    st(8, d);
    chk(d != 0, $sformatf("160 Gb/s: link FIFOs overflowed (drop flags %h)", d));
    st(3, d);
    chk(d == 0, "160 Gb/s: ring drained afterwards");
    $display("160 Gb/s: accepted %0d of 8000 words per window", rin);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
