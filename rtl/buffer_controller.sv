// buffer_controller: merges the TOP and BOT streams, watches the incoming
// bandwidth and uses the external DDR4 SODIMM as an overflow buffer.
//
// Data path (all in the system clock):
//   packer   takes one beat of up to IN_LANES words from each half per
//            cycle (TOP first, then BOT) into a staging buffer of
//            8 + 2*IN_LANES words and cuts 8-word (512-bit) lines from it.
//            A line leaves when full, or partly filled after FLUSH_CYCLES
//            cycles without input, with a mask of the words it holds.
//   router   looks at the oldest packed line. While nothing is held in the
//            SODIMM and the output FIFO has room, the line bypasses the
//            memory straight into the output FIFO. Once the output FIFO is
//            full, i.e. the input outruns the output link, full lines are
//            written to a ring buffer in the SODIMM instead ("spill"), and
//            every later line follows them there so that order is kept.
//            A partly filled line waits until the ring has drained.
//   reader   reads lines back from the ring whenever the output FIFO has a
//            free slot not already promised to an outstanding read, so the
//            buffer drains in the idle time between neutron pulses.
//   unpacker sends the words of each output line to the UDP core in beats
//            of up to OUT_LANES words.
// With the defaults (IN_LANES = 4, OUT_LANES = 2) and a 312.5 MHz clock the
// ingest capacity is 2 x 4 x 64 bit = 160 Gb/s, the full Timepix4 output,
// and the egress 2 x 64 bit = 40 Gb/s, the real-time readout capacity. With
// spill_en low the memory is never used and a full output FIFO
// back-pressures the inputs.
//
// Memory port: a simplified DDR controller user interface. One command per
// cycle when ddr_cmd_valid && ddr_cmd_ready; a write carries its 512-bit line
// with the command; read data returns in command order on ddr_rd_valid, any
// number of cycles later. Addresses count 64-byte lines; the default of
// 2^29 lines is the 32 GB the paper gives as the largest supported SODIMM.
//
// Bandwidth monitor: words in and out are counted over windows of
// RATE_WINDOW cycles; the counts of the last window, the ring fill level and
// its peak are status outputs.
//
// The paper gives the function (monitor bandwidth, store the excess over the
// 40 Gb/s real-time capacity in the SODIMM, read it back during idle periods);
// the line format, the bypass/spill rule, the FIFO sizes and the memory
// interface are this design's choices.
module buffer_controller
  import tpx4_pkg::*;
#(
  parameter int unsigned IN_LANES     = 4,       // words per input beat and half
  parameter int unsigned OUT_LANES    = 2,       // words per output beat
  parameter int unsigned DDR_ADDR_W   = 29,      // ring size = 2**DDR_ADDR_W lines
  parameter int unsigned IN_DEPTH     = 16,      // packed-line FIFO, lines
  parameter int unsigned OUT_DEPTH    = 64,      // output FIFO, lines
  parameter int unsigned FLUSH_CYCLES = 256,
  parameter int unsigned RATE_WINDOW  = 1000000
) (
  input  logic clk,
  input  logic rst,
  input  logic spill_en,
  // TOP and BOT half streams
  input  logic  s_top_valid,
  input  word_t s_top_data [IN_LANES],
  input  logic [$clog2(IN_LANES+1)-1:0] s_top_cnt,   // words in the beat, lanes 0..cnt-1
  output logic  s_top_ready,
  input  logic  s_bot_valid,
  input  word_t s_bot_data [IN_LANES],
  input  logic [$clog2(IN_LANES+1)-1:0] s_bot_cnt,
  output logic  s_bot_ready,
  // SODIMM controller user interface
  output logic                  ddr_cmd_valid,
  input  logic                  ddr_cmd_ready,
  output logic                  ddr_cmd_we,
  output logic [DDR_ADDR_W-1:0] ddr_cmd_addr,
  output line_t                 ddr_wdata,
  input  logic                  ddr_rd_valid,
  input  line_t                 ddr_rd_data,
  // merged output stream
  output logic  m_valid,
  output word_t m_data [OUT_LANES],
  output logic [$clog2(OUT_LANES+1)-1:0] m_cnt,     // words in the beat, lanes 0..cnt-1
  input  logic  m_ready,
  // status
  output logic                  spill_active,
  output logic [DDR_ADDR_W:0]   ddr_level,
  output logic [DDR_ADDR_W:0]   ddr_peak,
  output logic [31:0]           rate_in,
  output logic [31:0]           rate_out,
  output logic [31:0]           spill_lines,
  output logic [31:0]           bypass_lines,
  output logic [31:0]           stall_cycles
);

  localparam int unsigned LW  = LINE_WORDS;
  localparam int unsigned CW  = $clog2(LW + 1);
  localparam int unsigned OLW = $clog2(OUT_DEPTH) + 1;
  localparam int unsigned FW  = $clog2(FLUSH_CYCLES + 1);
  localparam int unsigned RW  = $clog2(RATE_WINDOW + 1);

  typedef struct packed {
    line_mask_t mask;
    line_t      data;
  } mline_t;

  // ---------------------------------------------------------------- packer
  localparam int unsigned ACC = LW + 2 * IN_LANES;
  localparam int unsigned AC  = $clog2(ACC + 1);
  localparam int unsigned ICW = $clog2(IN_LANES + 1);

  word_t         acc [ACC];
  word_t         acc_nx [ACC];
  logic [AC-1:0] acc_cnt, base, after_top, after_bot;
  logic [FW-1:0] idle;
  logic          emit_full, flush, emit;
  logic          take_top, take_bot;
  logic          inq_ready;
  mline_t        acc_line;

  assign emit_full = inq_ready && (acc_cnt >= AC'(LW));
  assign flush     = inq_ready && (acc_cnt != 0) && (acc_cnt < AC'(LW)) &&
                     (idle >= FW'(FLUSH_CYCLES));
  assign emit      = emit_full || flush;
  assign base      = emit_full ? acc_cnt - AC'(LW) : (flush ? '0 : acc_cnt);
  assign take_top  = s_top_valid && (base + AC'(s_top_cnt) <= AC'(ACC));
  assign after_top = base + (take_top ? AC'(s_top_cnt) : '0);
  assign take_bot  = s_bot_valid && (after_top + AC'(s_bot_cnt) <= AC'(ACC));
  assign after_bot = after_top + (take_bot ? AC'(s_bot_cnt) : '0);
  assign s_top_ready = take_top;
  assign s_bot_ready = take_bot;

  always_comb begin
    for (int i = 0; i < LW; i++) begin
      acc_line.data[i*WORD_W +: WORD_W] = acc[i];
      acc_line.mask[i] = (AC'(i) < acc_cnt);
    end
    // shift out the emitted line, then append the new beats
    for (int i = 0; i < int'(ACC); i++)
      acc_nx[i] = !emit_full ? acc[i] : ((i + LW < ACC) ? acc[(i + LW) % ACC] : '0);
    for (int l = 0; l < int'(IN_LANES); l++) begin
      if (take_top && ICW'(l) < s_top_cnt) acc_nx[(int'(base) + l) % ACC] = s_top_data[l];
      if (take_bot && ICW'(l) < s_bot_cnt) acc_nx[(int'(after_top) + l) % ACC] = s_bot_data[l];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_cnt <= '0;
      idle    <= '0;
      for (int i = 0; i < int'(ACC); i++) acc[i] <= '0;
    end else begin
      acc     <= acc_nx;
      acc_cnt <= after_bot;
      if (take_top || take_bot || acc_cnt == 0) idle <= '0;
      else if (idle < FW'(FLUSH_CYCLES)) idle <= idle + 1'b1;
    end
  end

  // packed-line FIFO
  logic   inq_valid, inq_pop;
  mline_t inq_head;
  logic [$clog2(IN_DEPTH):0] inq_level;

  sync_fifo #(.WIDTH($bits(mline_t)), .DEPTH(IN_DEPTH)) u_inq (
    .clk, .rst,
    .s_valid(emit), .s_data(acc_line), .s_ready(inq_ready),
    .m_valid(inq_valid), .m_data(inq_head), .m_ready(inq_pop),
    .level(inq_level)
  );

  // ------------------------------------------------------- router / reader
  logic [DDR_ADDR_W:0] wr_ptr, rd_ptr;
  logic [OLW-1:0]      rd_out;       // reads issued, data not yet returned
  logic [OLW-1:0]      outq_level;
  logic [OLW:0]        credits;      // output-FIFO slots not yet promised
  logic                ring_empty, ring_full, ddr_idle;
  logic                do_bypass, want_wr, want_rd, do_wr, do_rd, rr_rd;
  logic                outq_push;
  mline_t              outq_in;

  assign ring_empty = (wr_ptr == rd_ptr);
  assign ring_full  = (wr_ptr[DDR_ADDR_W] != rd_ptr[DDR_ADDR_W]) &&
                      (wr_ptr[DDR_ADDR_W-1:0] == rd_ptr[DDR_ADDR_W-1:0]);
  assign ddr_idle   = ring_empty && (rd_out == 0);
  assign credits    = (OLW+1)'(OUT_DEPTH) - (OLW+1)'(outq_level) - (OLW+1)'(rd_out);

  assign do_bypass  = inq_valid && ddr_idle && (credits != 0);
  assign want_wr    = inq_valid && !do_bypass && spill_en && (&inq_head.mask) &&
                      !ring_full && (credits == 0 || !ddr_idle);
  assign want_rd    = !ring_empty && (credits != 0);
  assign do_rd      = ddr_cmd_ready && want_rd && (!want_wr || rr_rd);
  assign do_wr      = ddr_cmd_ready && want_wr && !do_rd;
  assign inq_pop    = do_bypass || do_wr;

  assign ddr_cmd_valid = want_wr || want_rd;
  assign ddr_cmd_we    = !(want_rd && (!want_wr || rr_rd));
  assign ddr_cmd_addr  = ddr_cmd_we ? wr_ptr[DDR_ADDR_W-1:0] : rd_ptr[DDR_ADDR_W-1:0];
  assign ddr_wdata     = inq_head.data;

  assign outq_push = do_bypass || ddr_rd_valid;
  assign outq_in   = ddr_rd_valid ? mline_t'{mask: '1, data: ddr_rd_data} : inq_head;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      rd_out       <= '0;
      rr_rd        <= 1'b0;
      ddr_peak     <= '0;
      spill_lines  <= '0;
      bypass_lines <= '0;
    end else begin
      if (do_wr) begin
        wr_ptr      <= wr_ptr + 1'b1;
        spill_lines <= spill_lines + 1'b1;
      end
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      rd_out <= rd_out + (do_rd ? 1'b1 : 1'b0) - (ddr_rd_valid ? 1'b1 : 1'b0);
      if (want_wr && want_rd && ddr_cmd_ready) rr_rd <= !rr_rd;
      if (do_bypass) bypass_lines <= bypass_lines + 1'b1;
      if (ddr_level > ddr_peak) ddr_peak <= ddr_level;
    end
  end

  assign ddr_level    = wr_ptr - rd_ptr;
  assign spill_active = !ddr_idle;

  // output FIFO
  logic   outq_valid, outq_pop;
  mline_t outq_head;

  sync_fifo #(.WIDTH($bits(mline_t)), .DEPTH(OUT_DEPTH)) u_outq (
    .clk, .rst,
    .s_valid(outq_push), .s_data(outq_in), .s_ready(),
    .m_valid(outq_valid), .m_data(outq_head), .m_ready(outq_pop),
    .level(outq_level)
  );

  // -------------------------------------------------------------- unpacker
  localparam int unsigned OCW = $clog2(OUT_LANES + 1);
  logic [CW-1:0] widx, nwords, left;
  logic          last_beat;

  always_comb begin
    nwords = '0;
    for (int i = 0; i < LW; i++) if (outq_head.mask[i]) nwords = CW'(i + 1);
  end
  assign left      = nwords - widx;
  assign last_beat = (left <= CW'(OUT_LANES));
  assign m_valid   = outq_valid;
  assign m_cnt     = last_beat ? OCW'(left) : OCW'(OUT_LANES);
  assign outq_pop  = outq_valid && m_ready && last_beat;

  always_comb begin
    for (int l = 0; l < int'(OUT_LANES); l++)
      m_data[l] = outq_head.data[((int'(widx) + l) % LW) * WORD_W +: WORD_W];
  end

  always_ff @(posedge clk) begin
    if (rst) widx <= '0;
    else if (outq_valid && m_ready) widx <= last_beat ? '0 : widx + CW'(OUT_LANES);
  end

  // ------------------------------------------------------ bandwidth monitor
  logic [RW-1:0] win;
  logic [31:0]   cnt_in, cnt_out, words_in, words_out;

  assign words_in  = (take_top ? 32'(s_top_cnt) : 32'd0) + (take_bot ? 32'(s_bot_cnt) : 32'd0);
  assign words_out = (m_valid && m_ready) ? 32'(m_cnt) : 32'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      win          <= '0;
      cnt_in       <= '0;
      cnt_out      <= '0;
      rate_in      <= '0;
      rate_out     <= '0;
      stall_cycles <= '0;
    end else begin
      if ((s_top_valid && !take_top) || (s_bot_valid && !take_bot))
        stall_cycles <= stall_cycles + 1'b1;
      if (win == RW'(RATE_WINDOW - 1)) begin
        win      <= '0;
        rate_in  <= cnt_in + words_in;
        rate_out <= cnt_out + words_out;
        cnt_in   <= '0;
        cnt_out  <= '0;
      end else begin
        win     <= win + 1'b1;
        cnt_in  <= cnt_in + words_in;
        cnt_out <= cnt_out + words_out;
      end
    end
  end

  // the output FIFO never overflows: every push was granted a credit
  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
    outq_push |-> outq_level != OLW'(OUT_DEPTH));
  a_no_ddr_return_without_read: assert property (@(posedge clk) disable iff (rst)
    ddr_rd_valid |-> rd_out != 0);

endmodule
