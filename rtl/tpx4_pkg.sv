// tpx4_pkg: types and constants shared by the Timepix4 readout firmware.
//
// The Timepix4 chip sends its hit data over 16 GWT (Gigabit Wireline
// Transmitter) serial links, 8 from the top half and 8 from the bottom half
// of the chip, 64/66B encoded. Inside the FPGA every link becomes a stream of
// 64-bit words carried with AXI-Stream valid/ready handshakes. The channel
// count and the top/bottom split follow the paper; the 64-bit word (one
// Timepix4 data packet, the payload of one 64/66B block) and the line size of
// the external memory are this design's choices.
package tpx4_pkg;

  // Link organisation (paper: 16 channels, TOP GWT[7:0] and BOT GWT[7:0]).
  localparam int unsigned N_HALF_CH = 8;
  localparam int unsigned N_CH      = 2 * N_HALF_CH;

  // One data word = one 64/66B block payload.
  localparam int unsigned WORD_W = 64;
  typedef logic [WORD_W-1:0] word_t;

  // 64/66B sync headers (IEEE 802.3 clause 49 convention: "01" data, "10" control).
  localparam logic [1:0] SH_DATA = 2'b01;
  localparam logic [1:0] SH_CTRL = 2'b10;

  // External memory line: 8 words = 512 bits, the user-interface width of a
  // 64-bit DDR4 SODIMM controller running at 4:1 with burst length 8.
  localparam int unsigned LINE_WORDS = 8;
  localparam int unsigned LINE_W     = LINE_WORDS * WORD_W;
  typedef logic [LINE_W-1:0]     line_t;
  typedef logic [LINE_WORDS-1:0] line_mask_t;

  // Output port selection for the two UDP cores.
  typedef enum logic {
    OUT_40G = 1'b0,   // QSFP+ 40G UDP core
    OUT_10G = 1'b1    // SFP+ 10G UDP core
  } out_sel_e;

  // Network addressing used by the UDP cores.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [47:0] dst_mac;
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
  } udp_cfg_t;

endpackage
