// gwt_decoder: 64/66B decoder for one Timepix4 GWT link.
//
// The transceiver's receive gearbox hands over one 66-bit block per valid
// cycle: a 2-bit sync header and a 64-bit scrambled payload. This module
//   1. finds block alignment: while unlocked, every block whose sync header is
//      neither 01 nor 10 makes it pulse `slip` (the gearbox then shifts by one
//      bit) and wait SLIP_WAIT cycles; LOCK_CNT good headers in a row declare
//      lock. When locked, BAD_MAX bad headers inside a window of LOCK_CNT
//      blocks drop the lock again (the block-lock rules of IEEE 802.3 cl. 49);
//   2. descrambles every payload with the self-synchronous x^58 + x^39 + 1
//      descrambler (bit 0 of the payload is the first bit on the line);
//   3. forwards the payload of each data block (header 01) as one 64-bit
//      word; control blocks (header 10, idles) are consumed here.
// The link cannot be paused, so a word that meets m_ready low is dropped and
// counted in drop_cnt. Output is registered: a word leaves one cycle after
// its block arrives. All logic runs in the link's receive clock.
//
// The paper names the 64/66B decoder per GWT channel; the lock procedure, the
// scrambler polynomial and the drop-on-full policy are this design's choices.
module gwt_decoder
  import tpx4_pkg::*;
#(
  parameter int unsigned LOCK_CNT   = 64,
  parameter int unsigned BAD_MAX    = 16,
  parameter int unsigned SLIP_WAIT  = 32,
  parameter bit          DESCRAMBLE = 1'b1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,          // channel enable
  // from the transceiver gearbox
  input  logic        blk_valid,
  input  logic [1:0]  blk_hdr,
  input  word_t       blk_data,
  output logic        slip,        // one-cycle bit-slip request
  // decoded words
  output logic        m_valid,
  output word_t       m_data,
  input  logic        m_ready,
  // status
  output logic        locked,
  output logic [31:0] drop_cnt,
  output logic [31:0] word_cnt
);

  localparam int unsigned CW = $clog2(LOCK_CNT + 1);
  localparam int unsigned WW = $clog2(SLIP_WAIT + 1);

  logic [CW-1:0] good_run;      // consecutive good headers while unlocked
  logic [CW-1:0] win_cnt;       // blocks seen in the current window (locked)
  logic [CW-1:0] bad_cnt;       // bad headers in the current window (locked)
  logic [WW-1:0] wait_cnt;
  logic [57:0]   scr_state;
  word_t         descr;
  logic [57:0]   scr_next;
  logic          hdr_ok;

  assign hdr_ok = (blk_hdr == SH_DATA) || (blk_hdr == SH_CTRL);

  // Self-synchronous descrambler, one bit at a time over the 64-bit payload.
  always_comb begin
    logic [57:0] s;
    s = scr_state;
    for (int i = 0; i < WORD_W; i++) begin
      descr[i] = DESCRAMBLE ? (blk_data[i] ^ s[38] ^ s[57]) : blk_data[i];
      s        = {s[56:0], blk_data[i]};
    end
    scr_next = s;
  end

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      locked    <= 1'b0;
      good_run  <= '0;
      win_cnt   <= '0;
      bad_cnt   <= '0;
      wait_cnt  <= '0;
      slip      <= 1'b0;
      scr_state <= '0;
      m_valid   <= 1'b0;
      m_data    <= '0;
      drop_cnt  <= '0;
      word_cnt  <= '0;
    end else begin
      slip <= 1'b0;
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;

      if (blk_valid) begin
        scr_state <= scr_next;
        if (!locked) begin
          if (wait_cnt == 0) begin
            if (!hdr_ok) begin
              slip     <= 1'b1;
              wait_cnt <= WW'(SLIP_WAIT);
              good_run <= '0;
            end else if (good_run == CW'(LOCK_CNT - 1)) begin
              locked   <= 1'b1;
              good_run <= '0;
              win_cnt  <= '0;
              bad_cnt  <= '0;
            end else begin
              good_run <= good_run + 1'b1;
            end
          end
        end else begin
          // sliding count of bad headers over windows of LOCK_CNT blocks
          if (!hdr_ok && bad_cnt == CW'(BAD_MAX - 1)) begin
            locked   <= 1'b0;
            slip     <= 1'b1;
            wait_cnt <= WW'(SLIP_WAIT);
          end else if (win_cnt == CW'(LOCK_CNT - 1)) begin
            win_cnt <= '0;
            bad_cnt <= '0;
          end else begin
            win_cnt <= win_cnt + 1'b1;
            if (!hdr_ok) bad_cnt <= bad_cnt + 1'b1;
          end
          if (blk_hdr == SH_DATA) begin
            word_cnt <= word_cnt + 1'b1;
            if (!m_valid || m_ready) begin
              m_valid <= 1'b1;
              m_data  <= descr;
            end else begin
              drop_cnt <= drop_cnt + 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
