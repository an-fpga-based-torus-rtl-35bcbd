// link_module: one of the six torus links (X+, X-, Y+, Y-, Z+, Z-).
//
// Two nearly independent halves share a register block. Send half: txFifo
// (injection buffer, filled by the processor interface with 128-bit entries
// and their VC/packet-index attributes) feeds link_tx, which frames packets,
// appends the CRC, keeps copies in txBuffer and resends on NACK. Receive
// half: link_rx checks incoming packets and writes them into one of NUM_VC
// reception FIFOs; match pairs them with credits and streams them, with
// their destination address, to the processor interface. The two halves
// meet in two places: the receiver passes the peer's ACK/NACK to the
// transmitter, and queues its own ACK/NACK for the transmitter to send.
//
// The structure follows the paper's link module diagram. The 36-bit
// PHY words (32 data bits, 4 control flags) and the single clock for both
// halves are this design's choices; on a board the PHY receive clock needs
// a clock-domain crossing in front of `phy_rx`.
//
// Register access: `reg_wr`/`reg_idx`/`reg_wdata` write in one cycle;
// `reg_rd_idx` selects `reg_rdata` combinationally (map in link_regs).
module link_module
  import tnw_pkg::*;
#(
  parameter int TXF_DEPTH = 64,
  parameter int NBUF      = 16,
  parameter int RXF_DEPTH = 32,
  parameter int CR_DEPTH  = 4
) (
  input  logic                           clk,
  input  logic                           rst,
  // injection side
  input  logic                           txf_wr,
  input  logic [127:0]                   txf_data,
  input  tx_attr_t                       txf_attr,
  output logic [$clog2(TXF_DEPTH+1)-1:0] txf_free,
  // credits
  input  logic                           cr_valid,
  input  logic [VC_W-1:0]                cr_vc,
  input  credit_t                        cr_data,
  // registers
  input  logic                           reg_wr,
  input  logic [5:0]                     reg_idx,
  input  logic [31:0]                    reg_wdata,
  input  logic [5:0]                     reg_rd_idx,
  output logic [31:0]                    reg_rdata,
  // delivery of received packets
  output logic                           dlv_valid,
  input  logic                           dlv_ready,
  output logic [127:0]                   dlv_data,
  output logic                           dlv_first,
  output logic                           dlv_last,
  output logic [63:0]                    dlv_addr,
  output logic [VC_W-1:0]                dlv_vc,
  output logic                           dlv_notify,
  output logic [63:0]                    dlv_notify_addr,
  output logic [15:0]                    dlv_npkts,
  // PHY
  output phy_word_t                      phy_tx,
  input  phy_word_t                      phy_rx
);
  // txFifo
  logic        f_rd, f_pkt;
  logic [31:0] f_word;
  tx_attr_t    f_attr;
  // feedback between the halves
  fb_t              fb_type, rfb_type;
  logic [SEQ_W-1:0] fb_seq, rfb_seq;
  logic             fb_taken, rfb_valid;
  // reception FIFOs
  logic [NUM_VC-1:0] rf_wr, rf_commit, rf_abort, rf_space, rf_rd, rf_avail;
  logic [31:0]       rf_word;
  logic [127:0]      rf_data [NUM_VC];
  // registers
  logic              cfg_en;
  logic [31:0]       cfg_to;
  logic              st_resend, st_discard;
  logic [7:0]        st_in_flight;
  logic [NUM_EV-1:0] ev;

  tx_fifo #(.DEPTH(TXF_DEPTH)) u_txfifo (
    .clk (clk), .rst (rst),
    .wr_en (txf_wr), .wr_data (txf_data), .wr_attr (txf_attr), .free (txf_free),
    .rd_en (f_rd), .rd_word (f_word), .attr (f_attr), .pkt_avail (f_pkt)
  );

  link_tx #(.NBUF(NBUF)) u_tx (
    .clk (clk), .rst (rst),
    .cfg_enable (cfg_en), .cfg_timeout (cfg_to),
    .fifo_pkt_avail (f_pkt), .fifo_word (f_word), .fifo_attr (f_attr), .fifo_rd (f_rd),
    .fb_type (fb_type), .fb_seq (fb_seq), .fb_taken (fb_taken),
    .rfb_valid (rfb_valid), .rfb_type (rfb_type), .rfb_seq (rfb_seq),
    .phy_tx (phy_tx),
    .st_resend (st_resend), .st_in_flight (st_in_flight),
    .ev_pkt (ev[EV_TX_PKT]), .ev_resent (ev[EV_TX_RESENT]), .ev_restart (ev[EV_RESTART_SENT]),
    .ev_timeout (ev[EV_TIMEOUT]), .ev_nack (ev[EV_NACK_RCVD])
  );

  link_rx u_rx (
    .clk (clk), .rst (rst), .phy_rx (phy_rx),
    .fifo_wr (rf_wr), .fifo_word (rf_word), .fifo_commit (rf_commit), .fifo_abort (rf_abort),
    .fifo_has_space (rf_space),
    .fb_type (fb_type), .fb_seq (fb_seq), .fb_taken (fb_taken),
    .rfb_valid (rfb_valid), .rfb_type (rfb_type), .rfb_seq (rfb_seq),
    .st_discard (st_discard),
    .ev_pkt_ok (ev[EV_RX_PKT_OK]), .ev_crc_err (ev[EV_RX_CRC_ERR]), .ev_seq_err (ev[EV_RX_SEQ_ERR]),
    .ev_proto_err (ev[EV_RX_PROTO_ERR]), .ev_busy (ev[EV_RX_BUSY])
  );

  for (genvar v = 0; v < NUM_VC; v++) begin : g_rxf
    rx_fifo #(.DEPTH(RXF_DEPTH)) u_rxf (
      .clk (clk), .rst (rst),
      .wr_en (rf_wr[v]), .wr_word (rf_word), .commit (rf_commit[v]), .drop (rf_abort[v]),
      .has_space (rf_space[v]),
      .rd_en (rf_rd[v]), .rd_data (rf_data[v]), .pkt_avail (rf_avail[v])
    );
  end

  match #(.CR_DEPTH(CR_DEPTH)) u_match (
    .clk (clk), .rst (rst),
    .cr_valid (cr_valid), .cr_vc (cr_vc), .cr_data (cr_data),
    .pkt_avail (rf_avail), .fifo_data (rf_data), .fifo_rd (rf_rd),
    .dlv_valid (dlv_valid), .dlv_ready (dlv_ready), .dlv_data (dlv_data),
    .dlv_first (dlv_first), .dlv_last (dlv_last), .dlv_addr (dlv_addr), .dlv_vc (dlv_vc),
    .dlv_notify (dlv_notify), .dlv_notify_addr (dlv_notify_addr), .dlv_npkts (dlv_npkts),
    .ev_credit_ovf (ev[EV_CREDIT_OVF]), .ev_delivered (ev[EV_DELIVERED])
  );

  link_regs u_regs (
    .clk (clk), .rst (rst),
    .wr_en (reg_wr), .wr_idx (reg_idx), .wr_data (reg_wdata),
    .rd_idx (reg_rd_idx), .rd_data (reg_rdata),
    .st_resend (st_resend), .st_discard (st_discard), .st_in_flight (st_in_flight),
    .st_txf_free (16'(txf_free)), .ev (ev),
    .cfg_tx_enable (cfg_en), .cfg_timeout (cfg_to)
  );
endmodule
