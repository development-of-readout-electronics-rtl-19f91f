// axis_mux8: AXI4-Stream N-to-1 multiplexer with LANES output lanes
// (N = 8 channels of one Timepix4 half).
//
// Merges the word streams of the 8 GWT channels of one chip half. Each cycle
// the mux grants up to LANES requesting inputs, taken in round-robin order
// starting after the input granted last, and places their words in lanes
// 0, 1, ... of one output beat; m_cnt says how many lanes are filled. No
// input gets more than one word per cycle, so a single channel is limited to
// one word per system clock, which is faster than any GWT link. With LANES
// = 4 and a 312.5 MHz system clock one mux carries 8 links at 10.24 Gb/s.
// The output is a single register stage: a new beat is formed whenever the
// register is empty or is emptied in the same cycle (one cycle latency, one
// beat per cycle). Words are not tagged: a Timepix4 data packet already
// carries its pixel address; m_src gives the input of lane 0 for debugging.
// The paper gives the block (two "AXI4-stream Mux (8 to 1)"); the lane count,
// round-robin arbitration and register stage are this design's choices.
module axis_mux8
  import tpx4_pkg::*;
#(
  parameter int unsigned N     = N_HALF_CH,
  parameter int unsigned LANES = 4
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [N-1:0]  s_valid,
  input  word_t         s_data [N],
  output logic [N-1:0]  s_ready,
  output logic          m_valid,
  output word_t         m_data [LANES],
  output logic [$clog2(LANES+1)-1:0] m_cnt,
  input  logic          m_ready,
  output logic [$clog2(N)-1:0] m_src
);

  localparam int unsigned IW = $clog2(N);
  localparam int unsigned CW = $clog2(LANES + 1);

  logic [IW-1:0] last;                 // input granted last
  logic [IW-1:0] pick [LANES];
  logic [CW-1:0] npick;
  logic          take;

  // round-robin choice of up to LANES requesting inputs after `last`
  always_comb begin
    npick = '0;
    for (int l = 0; l < int'(LANES); l++) pick[l] = '0;
    for (int k = 1; k <= int'(N); k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last) + k) % int'(N));
      if (npick != CW'(LANES) && s_valid[idx]) begin
        pick[npick] = idx;
        npick = npick + 1'b1;
      end
    end
  end

  assign take = (npick != 0) && (!m_valid || m_ready);

  always_comb begin
    s_ready = '0;
    if (take)
      for (int l = 0; l < int'(LANES); l++)
        if (CW'(l) < npick) s_ready[pick[l]] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= 1'b0;
      m_cnt   <= '0;
      m_src   <= '0;
      last    <= IW'(N - 1);
      for (int l = 0; l < int'(LANES); l++) m_data[l] <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (take) begin
        m_valid <= 1'b1;
        m_cnt   <= npick;
        m_src   <= pick[0];
        last    <= pick[npick - 1'b1];
        for (int l = 0; l < int'(LANES); l++) m_data[l] <= s_data[pick[l]];
      end
    end
  end

  // AXI-Stream rule: a beat offered must stay unchanged until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (rst)
    m_valid && !m_ready |=> m_valid && $stable(m_cnt) && $stable(m_data[0]));

endmodule
