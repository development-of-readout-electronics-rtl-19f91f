// t0_tdc: time-stamps the T0 signal of the pulsed neutron source.
//
// T0 marks the start of every neutron pulse (25 Hz at the CSNS imaging
// beamline). The asynchronous input is brought into the system clock by a
// two-flip-flop synchroniser; each rising edge latches a free-running TS_W-bit
// coarse counter into `t0_ts`, increments `t0_count`, and stores the number
// of cycles since the previous edge in `t0_period`. `t0_stb` pulses for one
// cycle when new values are in place, three cycles after the edge.
// The resolution is one system-clock period; `ts_clear` zeroes the counter so
// that the time base can be aligned with the Timepix4 time base.
// The paper shows a TDC fed by the T0 input but does not describe it; this
// coarse counter TDC is this design's choice (no fine interpolation).
module t0_tdc #(
  parameter int unsigned TS_W = 48
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            t0_in,       // asynchronous
  input  logic            ts_clear,
  output logic            t0_stb,
  output logic [TS_W-1:0] t0_ts,
  output logic [TS_W-1:0] t0_period,
  output logic [31:0]     t0_count,
  output logic [TS_W-1:0] ts_now
);

  logic [2:0] sync;
  logic       rise;

  assign rise = sync[1] && !sync[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync      <= '0;
      ts_now    <= '0;
      t0_stb    <= 1'b0;
      t0_ts     <= '0;
      t0_period <= '0;
      t0_count  <= '0;
    end else begin
      sync   <= {sync[1:0], t0_in};
      ts_now <= ts_clear ? '0 : ts_now + 1'b1;
      t0_stb <= rise;
      if (rise) begin
        t0_ts     <= ts_now;
        t0_period <= ts_now - t0_ts;
        t0_count  <= t0_count + 1'b1;
      end
    end
  end

endmodule
