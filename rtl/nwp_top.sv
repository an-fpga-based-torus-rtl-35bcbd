// nwp_top: the torus network processor (NWP) of one node.
//
// The NWP connects the CPUs of a node, through PCIe, to the six links of a
// 3D torus (X+, X-, Y+, Y-, Z+, Z-). A send operation stores a message into
// the injection window of a link and virtual channel (Pput: programmed I/O,
// write-combined); the NWP cuts it into 128-byte packets and moves them in
// order and reliably (CRC, ACK/NACK, resend) to the neighbour. A receive
// operation posts a credit; when a credit and a received packet of the same
// link and VC meet, the NWP writes the packet into CPU memory and, after the
// last packet of the credit, writes a notification.
//
// Blocks: pic (inbound TLPs, with one reorder_buffer per link), poc
// (outbound TLPs) and six link_module instances. The PCIe hard IP and the
// six PHY chips are outside: the top brings out the IP's 128-bit Avalon-ST
// receive and transmit ports and, per link, the 36-bit word to and from the
// PHY. Everything runs on one 250 MHz clock with a synchronous, active-high
// reset. The block structure follows the paper's NWP diagram; the
// interfaces are this design's choices.
// Lint note: the links' `dlv_first` flags are not needed by the POC (it
// ends a packet on `dlv_last`) and are reported as unused.
module nwp_top
  import tnw_pkg::*;
#(
  parameter int TXF_DEPTH = 64,
  parameter int NBUF      = 16,
  parameter int RXF_DEPTH = 32,
  parameter int CR_DEPTH  = 4,
  parameter int RB_SLOTS  = 4
) (
  input  logic         clk,
  input  logic         rst,
  // PCIe IP, Avalon-ST receive (down-stream TLPs)
  input  logic [127:0] rx_data,
  input  logic         rx_sop,
  input  logic         rx_eop,
  input  logic         rx_valid,
  output logic         rx_ready,
  // PCIe IP, Avalon-ST transmit (up-stream TLPs)
  output logic [127:0] tx_data,
  output logic         tx_sop,
  output logic         tx_eop,
  output logic         tx_valid,
  input  logic         tx_ready,
  // PHYs, index 0..5 = X+, X-, Y+, Y-, Z+, Z-
  output phy_word_t    phy_tx [NUM_LINKS],
  input  phy_word_t    phy_rx [NUM_LINKS]
);
  localparam int FW = $clog2(TXF_DEPTH+1);

  logic [FW-1:0]        txf_free [NUM_LINKS];
  logic [NUM_LINKS-1:0] txf_wr;
  logic [127:0]         txf_data [NUM_LINKS];
  tx_attr_t             txf_attr [NUM_LINKS];
  logic [NUM_LINKS-1:0] cr_valid, reg_wr;
  logic [VC_W-1:0]      cr_vc;
  credit_t              cr_data;
  logic [5:0]           reg_idx, rd_idx;
  logic [31:0]          reg_wdata, rd_data;
  logic [31:0]          reg_rdata [NUM_LINKS];
  logic                 rd_valid, rd_ready;
  logic [LINK_W-1:0]    rd_link;
  logic [15:0]          rd_reqid;
  logic [7:0]           rd_tag;
  logic [6:0]           rd_lowaddr;

  logic [NUM_LINKS-1:0] dlv_valid, dlv_ready, dlv_first, dlv_last, dlv_notify;
  logic [127:0]         dlv_data [NUM_LINKS];
  logic [63:0]          dlv_addr [NUM_LINKS], dlv_notify_addr [NUM_LINKS];
  logic [VC_W-1:0]      dlv_vc [NUM_LINKS];
  logic [15:0]          dlv_npkts [NUM_LINKS];

  pic #(.TXF_DEPTH(TXF_DEPTH), .RB_SLOTS(RB_SLOTS)) u_pic (
    .clk (clk), .rst (rst),
    .rx_data (rx_data), .rx_sop (rx_sop), .rx_eop (rx_eop), .rx_valid (rx_valid), .rx_ready (rx_ready),
    .txf_free (txf_free), .txf_wr (txf_wr), .txf_data (txf_data), .txf_attr (txf_attr),
    .cr_valid (cr_valid), .cr_vc (cr_vc), .cr_data (cr_data),
    .reg_wr (reg_wr), .reg_idx (reg_idx), .reg_wdata (reg_wdata),
    .rd_valid (rd_valid), .rd_ready (rd_ready), .rd_link (rd_link), .rd_idx (rd_idx),
    .rd_reqid (rd_reqid), .rd_tag (rd_tag), .rd_lowaddr (rd_lowaddr)
  );

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_link
    link_module #(
      .TXF_DEPTH (TXF_DEPTH), .NBUF (NBUF), .RXF_DEPTH (RXF_DEPTH), .CR_DEPTH (CR_DEPTH)
    ) u_link (
      .clk (clk), .rst (rst),
      .txf_wr (txf_wr[l]), .txf_data (txf_data[l]), .txf_attr (txf_attr[l]), .txf_free (txf_free[l]),
      .cr_valid (cr_valid[l]), .cr_vc (cr_vc), .cr_data (cr_data),
      .reg_wr (reg_wr[l]), .reg_idx (reg_idx), .reg_wdata (reg_wdata),
      .reg_rd_idx (rd_idx), .reg_rdata (reg_rdata[l]),
      .dlv_valid (dlv_valid[l]), .dlv_ready (dlv_ready[l]), .dlv_data (dlv_data[l]),
      .dlv_first (dlv_first[l]), .dlv_last (dlv_last[l]), .dlv_addr (dlv_addr[l]), .dlv_vc (dlv_vc[l]),
      .dlv_notify (dlv_notify[l]), .dlv_notify_addr (dlv_notify_addr[l]), .dlv_npkts (dlv_npkts[l]),
      .phy_tx (phy_tx[l]), .phy_rx (phy_rx[l])
    );
  end

  assign rd_data = (rd_link < LINK_W'(NUM_LINKS)) ? reg_rdata[rd_link] : 32'd0;

  poc u_poc (
    .clk (clk), .rst (rst),
    .dlv_valid (dlv_valid), .dlv_ready (dlv_ready), .dlv_data (dlv_data), .dlv_last (dlv_last),
    .dlv_addr (dlv_addr), .dlv_vc (dlv_vc), .dlv_notify (dlv_notify),
    .dlv_notify_addr (dlv_notify_addr), .dlv_npkts (dlv_npkts),
    .rd_valid (rd_valid), .rd_ready (rd_ready), .rd_data (rd_data),
    .rd_reqid (rd_reqid), .rd_tag (rd_tag), .rd_lowaddr (rd_lowaddr),
    .tx_data (tx_data), .tx_sop (tx_sop), .tx_eop (tx_eop), .tx_valid (tx_valid), .tx_ready (tx_ready)
  );
endmodule
