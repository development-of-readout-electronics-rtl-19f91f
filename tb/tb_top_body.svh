// Shared body of the end-to-end testbenches tb_top (reduced sizes) and
// tb_top_full (default sizes). The including module declares the size
// localparams (DDR_AW, PW, UDP_TO, SC_DIV, FLUSH, BURST_CYC) and instantiates
// tpx4_readout_top as `dut` on the signals declared here.
//
// Environment (links, SODIMM, MAC sinks, chip and bus models): see
// tb_top_env.svh.
//
// Phases: block lock of all links; light load (memory bypassed); a
// "neutron pulse" burst above the output rate (spill to the SODIMM, then
// drain); switch to the 10G port; T0 pulses; slow-control commands; drain
// and compare counts; finally output stalled with spill disabled so the
// channel FIFOs overflow and the decoders drop words.
`include "tb_top_env.svh"

// mechanisms seen
int m_lock = 0, m_bypass = 0, m_spill = 0, m_drain = 0, m_10g = 0, m_t0 = 0;
int m_sc = 0, m_drop = 0, m_stall = 0;

initial begin
  #(WATCHDOG_NS);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

initial begin
  logic [31:0] d, sp0, by0;
  int t, tot;
  for (int c = 0; c < N_CH; c++) begin
    gen[c] = 0; got[c] = 0;
    links[c] = new(c * 5 + 3, 100);        // start misaligned, idles only
  end
  repeat (10) @(posedge clk);
  rst <= 0;
  repeat (20) @(posedge clk);
  ctl_wr(8'h08, 32'h0000_0001); ctl_wr(8'h0C, 32'h0000_0200);
  ctl_wr(8'h10, 32'h3344_5566); ctl_wr(8'h14, 32'h0000_1122);
  ctl_wr(8'h18, 32'hC0A8_0A02); ctl_wr(8'h1C, 32'hC0A8_0A01);
  ctl_wr(8'h20, 32'h1F90_1F90);

  // 1. block lock
  t = 0;
  do begin repeat (50) @(posedge clk); st(0, d); t++; end while (d[15:0] != 16'hFFFF && t < 200);
  chk(d[15:0] == 16'hFFFF, $sformatf("all links locked (%h)", d));
  if (d[15:0] == 16'hFFFF && n_slips > 0) m_lock++;

  // 2. light load: 16 x 156 MHz x 6% ~ 150 Mword/s < 2 x 312 Mword/s out
  set_idle(94);
  repeat (BURST_CYC) @(posedge clk);
  set_idle(100);
  wait_delivered(20 * BURST_CYC + 4 * UDP_TO);
  chk(all_delivered(), "light load delivered");
  st(5, sp0); st(6, by0);
  chk(sp0 == 0, $sformatf("no spill at light load (%0d)", sp0));
  if (by0 > 0) m_bypass++;

  // 3. neutron pulse: 16 x 156 MHz x 40% ~ 1000 Mword/s, above the
  //    2 x 312 Mword/s output but below the 8 x 312 Mword/s the muxes take
  set_idle(60);
  repeat (BURST_CYC) @(posedge clk);
  st(15, d);  if (d[0]) m_spill++;
  set_idle(100);
  t = 0;
  do begin repeat (100) @(posedge clk); st(3, d); t++; end while (d != 0 && t < 2000);
  st(5, d);
  chk(d > sp0, $sformatf("burst spilled %0d lines", d));
  st(4, d);
  chk(d > 0, $sformatf("SODIMM peak %0d lines", d));
  wait_delivered(40 * BURST_CYC + 4 * UDP_TO);
  chk(all_delivered(), "burst delivered after drain");
  chk(n_rd == n_wr && n_wr > 0, $sformatf("SODIMM lines written %0d read %0d", n_wr, n_rd));
  if (n_rd == n_wr && n_wr > 0 && all_delivered()) m_drain++;

  // 4. switch to the 10G port
  t = frames10;
  ctl_wr(8'h00, 32'h6);
  set_idle(97);
  repeat (BURST_CYC) @(posedge clk);
  set_idle(100);
  wait_delivered(40 * BURST_CYC + 8 * UDP_TO);
  chk(all_delivered(), "10G traffic delivered");
  chk(frames10 > t, "frames on the 10G port");
  if (frames10 > t) m_10g++;
  ctl_wr(8'h00, 32'h2);

  // 5. T0 pulses
  for (int p = 0; p < 3; p++) begin
    repeat (500) @(posedge clk);
    #1 t0_in = 1;
    repeat (10) @(posedge clk);
    #1 t0_in = 0;
  end
  repeat (10) @(posedge clk);
  st(13, d); chk(d == 3, $sformatf("T0 count %0d", d));
  st(14, d); chk(d == 510, $sformatf("T0 period %0d", d));
  if (d == 510) m_t0++;

  // 6. slow control
  sc_wr(8'h00, 32'h8100_0001);
  sc_wr(8'h00, 32'h4200_00AB);
  repeat (80 * SC_DIV + 200) @(posedge clk);
  chk(sc_seen.size() == 2, "two slow-control frames");
  if (sc_seen.size() == 2) begin
    chk(sc_seen[0] == 32'h8100_0001 && sc_seen[1] == 32'h4200_00AB, "slow-control words");
    sc_rd(8'h04, d); chk(d == ~32'd0, $sformatf("reply 0 = %h", d));
    sc_rd(8'h04, d); chk(d == ~32'd1, $sformatf("reply 1 = %h", d));
    m_sc++;
  end

  // 7. overflow: MAC stalled, spill disabled -> the buffer controller
  //    back-pressures the muxes, channel FIFOs fill, words dropped
  st(7, sp0);
  m40_tready = 0;
  ctl_wr(8'h00, 32'h0);
  set_idle(50);
  repeat (BURST_CYC) @(posedge clk);
  st(7, d);
  chk(d > sp0, $sformatf("input stalled %0d cycles", d - sp0));
  if (d > sp0) m_stall++;
  st(8, d);
  chk(d != 0, $sformatf("drop flags %h", d));
  if (d != 0) m_drop++;
  gap_ok = 1;
  set_idle(100);
  m40_tready = 1;
  repeat (20 * BURST_CYC) @(posedge clk);

  tot = 0;
  for (int c = 0; c < N_CH; c++) tot += got[c];
  $display("words delivered %0d, frames 40G %0d 10G %0d, SODIMM lines %0d, slips %0d",
           tot, frames40, frames10, n_wr, n_slips);
  $display("mechanisms: lock %0d bypass %0d spill %0d drain %0d stall %0d 10G %0d T0 %0d sc %0d drop %0d",
           m_lock, m_bypass, m_spill, m_drain, m_stall, m_10g, m_t0, m_sc, m_drop);
  chk(m_lock > 0, "mechanism: block lock with slips");
  chk(m_bypass > 0, "mechanism: SODIMM bypass");
  chk(m_spill > 0, "mechanism: spill to SODIMM");
  chk(m_drain > 0, "mechanism: drain from SODIMM");
  chk(m_stall > 0, "mechanism: input stall");
  chk(m_10g > 0, "mechanism: 10G output select");
  chk(m_t0 > 0, "mechanism: T0 time stamp");
  chk(m_sc > 0, "mechanism: slow control");
  chk(m_drop > 0, "mechanism: link overflow drop");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
