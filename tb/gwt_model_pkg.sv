// gwt_model_pkg: behavioural model of one Timepix4 GWT transmitter plus the
// receive gearbox of the FPGA transceiver, for testbenches.
//
// The transmitter 64/66B-encodes words: a 2-bit sync header (01 data,
// 10 control/idle) and a payload scrambled with x^58 + x^39 + 1, bit 0 first.
// The bits go into a serial bit queue; the gearbox model cuts 66-bit blocks
// from it starting at an arbitrary bit offset, and each slip request drops
// one bit so that the block boundary moves by one bit.
package gwt_model_pkg;

  class gwt_link;
    bit         q[$];
    bit [57:0]  scr;
    bit [63:0]  pending[$];   // data words still to send
    int unsigned idle_pct;    // percentage of idle blocks between data

    function new(int unsigned offset, int unsigned idle_percent);
      scr      = '0;
      idle_pct = idle_percent;
      for (int i = 0; i < int'(offset); i++) q.push_back(1'b0);
    endfunction

    // encode one block into the bit queue
    function void encode(bit is_data, bit [63:0] payload);
      bit [1:0] hdr;
      bit o;
      hdr = is_data ? 2'b01 : 2'b10;
      q.push_back(hdr[0]);
      q.push_back(hdr[1]);
      for (int i = 0; i < 64; i++) begin
        o   = payload[i] ^ scr[38] ^ scr[57];
        scr = {scr[56:0], o};
        q.push_back(o);
      end
    endfunction

    function void slip();
      void'(q.pop_front());
    endfunction

    // next 66-bit block out of the gearbox
    function void next_block(output bit [1:0] hdr, output bit [63:0] data);
      while (q.size() < 132) begin
        if (pending.size() != 0 && ($urandom_range(99) >= idle_pct))
          encode(1'b1, pending.pop_front());
        else
          encode(1'b0, 64'h1E00_0000_0000_0000);  // idle control block
      end
      hdr[0] = q.pop_front();
      hdr[1] = q.pop_front();
      for (int i = 0; i < 64; i++) data[i] = q.pop_front();
    endfunction
  endclass

endpackage
