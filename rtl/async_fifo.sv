// async_fifo: dual-clock FIFO that moves one GWT channel's words from the
// link's receive clock into the system clock.
//
// Classic Gray-coded pointer design: the write and read pointers are one bit
// wider than the address, converted to Gray code and passed through two
// flip-flop synchronisers into the opposite domain. `full` and `empty` are
// therefore conservative (they clear a few cycles late) but never wrong.
// Write side: push when s_valid && s_ready (s_ready = !full). Read side is
// AXI-Stream like: m_valid = !empty, the word is popped when m_ready is high;
// the read data comes straight from the memory array (first-word fall-through).
// The paper asks for one asynchronous FIFO per channel; the depth and the
// Gray-pointer structure are this design's choices.
module async_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512   // power of two
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             s_valid,
  input  logic [WIDTH-1:0] s_data,
  output logic             s_ready,
  input  logic             rclk,
  input  logic             rrst,
  output logic             m_valid,
  output logic [WIDTH-1:0] m_data,
  input  logic             m_ready
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] wbin_nx, rbin_nx;
  logic        full, empty;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign s_ready = !full;
  assign wbin_nx = wbin + ((s_valid && !full) ? 1'b1 : 1'b0);

  always_ff @(posedge wclk) begin
    if (s_valid && !full) mem[wbin[AW-1:0]] <= s_data;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // read domain
  assign empty   = (rgray == wgray_r2);
  assign m_valid = !empty;
  assign m_data  = mem[rbin[AW-1:0]];
  assign rbin_nx = rbin + ((m_ready && !empty) ? 1'b1 : 1'b0);

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

endmodule
