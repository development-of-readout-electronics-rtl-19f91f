// sync_fifo: single-clock first-word-fall-through FIFO used inside the buffer
// controller and the UDP cores.
//
// A memory array with binary read and write pointers and an occupancy
// counter. Push when s_valid && s_ready; m_valid is high while the FIFO holds
// a word, and the word at the head is popped when m_ready is high. `level`
// gives the occupancy so that callers can reserve space ahead of time.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 64    // power of two
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    s_valid,
  input  logic [WIDTH-1:0]        s_data,
  output logic                    s_ready,
  output logic                    m_valid,
  output logic [WIDTH-1:0]        m_data,
  input  logic                    m_ready,
  output logic [$clog2(DEPTH):0]  level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic push, pop;

  assign s_ready = (level != (AW+1)'(DEPTH));
  assign m_valid = (level != '0);
  assign m_data  = mem[rptr];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= s_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
      level <= level + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

endmodule
