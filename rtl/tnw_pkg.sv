// tnw_pkg: types and constants shared by the torus network processor (NWP).
//
// The link protocol carries 32-bit words plus four per-byte control flags
// between the link module and an external XAUI transceiver (an XGMII-like
// 36-bit word). A data packet is a start-of-packet control word, a 32-bit
// header, 32 payload words (128 bytes) and a 32-bit CRC: 35 words, which at
// 32 bit x 250 MHz gives 128/140 GB/s = 0.914 GB/s per direction. Header,
// payload and CRC sizes follow the paper; the control-word layout, the K
// codes, the header field layout and the CRC polynomial are this design's
// own choices.
package tnw_pkg;

  localparam int NUM_LINKS  = 6;    // X+, X-, Y+, Y-, Z+, Z-
  localparam int NUM_VC     = 8;    // virtual channels per link
  localparam int VC_W       = 3;
  localparam int PKT_WORDS  = 32;   // 128-byte payload in 32-bit words
  localparam int PKT_BEATS  = 8;    // 128-byte payload in 128-bit beats
  localparam int SEQ_W      = 8;    // packet sequence number width
  localparam int PIDX_W     = 6;    // packet index inside an injection window
  localparam int LINK_W     = 3;

  // One word on the 32-bit link bus: ctrl[i] flags byte i as a control byte.
  typedef struct packed {
    logic [3:0]  ctrl;
    logic [31:0] data;
  } phy_word_t;

  // Control characters (byte 0 of a control word, ctrl = 4'b0001).
  localparam logic [7:0] K_IDLE    = 8'h07;
  localparam logic [7:0] K_SOP     = 8'hFB;
  localparam logic [7:0] K_FB      = 8'h9C;
  localparam logic [7:0] K_RESTART = 8'h5C;

  typedef enum logic [1:0] {FB_NONE = 2'd0, FB_ACK = 2'd1, FB_NACK = 2'd2} fb_t;

  // Packet header word.
  typedef struct packed {
    logic [SEQ_W-1:0]  seq;
    logic [VC_W-1:0]   vc;
    logic [14:0]       rsvd;
    logic [PIDX_W-1:0] pidx;
  } pkt_hdr_t;

  // Attributes stored in txFifo next to each 128-bit data entry.
  typedef struct packed {
    logic [VC_W-1:0]   vc;
    logic [PIDX_W-1:0] pidx;
  } tx_attr_t;

  // Credit passed by the CPU for one receive operation on one VC.
  typedef struct packed {
    logic [63:0] notify_addr;  // where the completion notification is written
    logic [15:0] npkts;        // message length in 128-byte packets (0 counts as 1)
    logic [47:0] dest_addr;    // 128-byte aligned destination of the first packet
  } credit_t;

  // Control word: byte0 = K code, byte1 = feedback type, byte2 = sequence
  // number, byte3 = check byte (inverted XOR of bytes 1 and 2).
  function automatic phy_word_t ctrl_word(logic [7:0] k, fb_t fb, logic [SEQ_W-1:0] seq);
    logic [7:0] b1;
    b1 = {6'd0, fb};
    return '{ctrl: 4'b0001, data: {~(b1 ^ seq), seq, b1, k}};
  endfunction

  function automatic logic ctrl_check_ok(phy_word_t w);
    return (w.ctrl == 4'b0001) && (w.data[31:24] == ~(w.data[15:8] ^ w.data[23:16]));
  endfunction

  localparam logic [31:0] CRC_INIT = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_POLY = 32'h04C1_1DB7;

  // CRC-32 (polynomial 0x04C11DB7, not reflected) advanced by one 32-bit
  // word, most significant bit first.
  function automatic logic [31:0] crc32_step(logic [31:0] crc, logic [31:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 31; i >= 0; i--) begin
      if (c[31] ^ d[i]) c = {c[30:0], 1'b0} ^ CRC_POLY;
      else              c = {c[30:0], 1'b0};
    end
    return c;
  endfunction

  // Address map of the NWP's memory window (offset inside the BAR):
  //   [20:19] region: 0 injection buffers, 1 credits, 2 registers
  //   [18:16] link (0..5 = X+, X-, Y+, Y-, Z+, Z-)
  //   injection and credits: [15:13] VC; injection: [12:7] packet index
  //   inside the VC's 8 KiB window, [6:4] 16-byte chunk inside the packet
  //   registers: [7:2] register index
  localparam int ADDR_W = 21;
  typedef enum logic [1:0] {RG_INJ = 2'd0, RG_CREDIT = 2'd1, RG_REG = 2'd2, RG_NONE = 2'd3} region_e;

  // PCIe TLP fmt/type values used by the processor interface.
  localparam logic [2:0] FMT_3DW_ND = 3'b000, FMT_4DW_ND = 3'b001,
                         FMT_3DW_D  = 3'b010, FMT_4DW_D  = 3'b011;
  localparam logic [4:0] TYPE_MEM = 5'b00000, TYPE_CPL = 5'b01010;

  // Debug event indices of a link (one counter register each).
  typedef enum int {
    EV_TX_PKT = 0, EV_TX_RESENT, EV_RESTART_SENT, EV_TIMEOUT, EV_NACK_RCVD,
    EV_RX_PKT_OK, EV_RX_CRC_ERR, EV_RX_SEQ_ERR, EV_RX_PROTO_ERR, EV_RX_BUSY,
    EV_CREDIT_OVF, EV_DELIVERED, NUM_EV
  } ev_idx_e;

endpackage
