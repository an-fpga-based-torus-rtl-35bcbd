// link_rx: receive logic of one link ("Rx").
//
// Decodes the word stream from the PHY. A packet (start word, header, 32
// payload words, CRC) is written into the reception FIFO of the virtual
// channel named in its header while its CRC is recomputed. If the CRC
// matches, the packet is committed to that FIFO and an ACK for its sequence
// number is queued for the local transmitter; the receiver then expects the
// next sequence number. On a CRC mismatch or any other error (unexpected
// sequence number, a control word inside a packet, a data word outside one,
// an unknown or corrupted control word) the partial packet is dropped, a
// NACK naming the expected sequence number is queued, and all further data
// is discarded until a RESTART control word arrives. A packet whose FIFO has
// no room for 128 bytes is refused the same way (counted as `ev_busy`); the
// sender then resends it until room appears, which stalls the link:
// this is how back-pressure reaches the sender.
//
// Feedback for the local transmitter (ACK/NACK from the peer) is carried in
// start words and feedback words; it is decoded in every state, discarding
// included, because its check byte protects it on its own.
//
// Following the paper: CRC check, ACK/NACK, discard until RESTART, per-VC
// reception FIFOs. This design's choices: sequence numbers, the check byte,
// the refusal of packets when the FIFO is full, and that the PHY output is
// already in the core clock domain.
//
// Timing: `phy_rx` is sampled every cycle; FIFO writes, commit and abort are
// combinational from the current input word. The queued feedback is held in
// `fb_type`/`fb_seq` until `fb_taken`; a newer one replaces it.
// Lint notes: the reserved header bits and the packet index are carried
// but not needed on receive, and the CRC unit's look-ahead output
// `crc_next` is left unused; both are reported as unused signals.
module link_rx
  import tnw_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  phy_word_t         phy_rx,
  // reception FIFOs
  output logic [NUM_VC-1:0] fifo_wr,
  output logic [31:0]       fifo_word,
  output logic [NUM_VC-1:0] fifo_commit,
  output logic [NUM_VC-1:0] fifo_abort,
  input  logic [NUM_VC-1:0] fifo_has_space,
  // feedback to send for the peer's packets
  output fb_t               fb_type,
  output logic [SEQ_W-1:0]  fb_seq,
  input  logic              fb_taken,
  // feedback received from the peer for the local transmitter
  output logic              rfb_valid,
  output fb_t               rfb_type,
  output logic [SEQ_W-1:0]  rfb_seq,
  // status and events
  output logic              st_discard,
  output logic              ev_pkt_ok,
  output logic              ev_crc_err,
  output logic              ev_seq_err,
  output logic              ev_proto_err,
  output logic              ev_busy
);
  typedef enum logic [2:0] {R_WAIT, R_HDR, R_DATA, R_CRC, R_DISC} rstate_e;
  rstate_e          state;
  logic [SEQ_W-1:0] exp_seq;
  logic [VC_W-1:0]  cur_vc;
  logic [4:0]       widx;

  logic        is_data, is_ctrl, ctrl_ok;
  logic [7:0]  k;
  fb_t         w_fb;
  logic [SEQ_W-1:0] w_seq;
  pkt_hdr_t    hdr;
  logic        crc_init, crc_en;
  logic [31:0] crc, crc_next;
  logic        error, good, accept_hdr;

  assign is_data = (phy_rx.ctrl == 4'b0000);
  assign ctrl_ok = ctrl_check_ok(phy_rx) &&
                   (phy_rx.data[7:0] inside {K_IDLE, K_SOP, K_FB, K_RESTART}) &&
                   (phy_rx.data[15:10] == 6'd0) && (phy_rx.data[9:8] != 2'd3);
  assign is_ctrl = !is_data;
  assign k       = phy_rx.data[7:0];
  assign w_fb    = fb_t'(phy_rx.data[9:8]);
  assign w_seq   = phy_rx.data[23:16];
  assign hdr     = pkt_hdr_t'(phy_rx.data);
  assign st_discard = (state == R_DISC);
  assign fifo_word  = phy_rx.data;

  tnw_crc32 u_crc (
    .clk (clk), .rst (rst), .init (crc_init), .en (crc_en),
    .data (phy_rx.data), .crc (crc), .crc_next (crc_next)
  );

  always_comb begin
    fifo_wr      = '0;
    fifo_commit  = '0;
    fifo_abort   = '0;
    crc_init     = 1'b0;
    crc_en       = 1'b0;
    error        = 1'b0;
    good         = 1'b0;
    accept_hdr   = 1'b0;
    ev_crc_err   = 1'b0;
    ev_seq_err   = 1'b0;
    ev_proto_err = 1'b0;
    ev_busy      = 1'b0;
    rfb_valid    = is_ctrl && ctrl_ok && (k == K_SOP || k == K_FB) && (w_fb != FB_NONE);
    rfb_type     = w_fb;
    rfb_seq      = w_seq;
    unique case (state)
      R_WAIT: begin
        if (is_data || !ctrl_ok) begin
          error = 1'b1; ev_proto_err = 1'b1;
        end
      end
      R_HDR: begin
        if (!is_data) begin
          error = 1'b1; ev_proto_err = 1'b1;
        end else if (hdr.seq != exp_seq) begin
          error = 1'b1; ev_seq_err = 1'b1;
        end else if (!fifo_has_space[hdr.vc]) begin
          error = 1'b1; ev_busy = 1'b1;
        end else begin
          accept_hdr = 1'b1;
          crc_init   = 1'b1;
          crc_en     = 1'b1;
        end
      end
      R_DATA: begin
        if (!is_data) begin
          error = 1'b1; ev_proto_err = 1'b1;
          fifo_abort[cur_vc] = 1'b1;
        end else begin
          fifo_wr[cur_vc] = 1'b1;
          crc_en = 1'b1;
        end
      end
      R_CRC: begin
        if (is_data && phy_rx.data == crc) begin
          good = 1'b1;
          fifo_commit[cur_vc] = 1'b1;
        end else begin
          error = 1'b1;
          if (is_data) ev_crc_err = 1'b1;
          else         ev_proto_err = 1'b1;
          fifo_abort[cur_vc] = 1'b1;
        end
      end
      R_DISC: ;
      default: ;
    endcase
  end

  assign ev_pkt_ok = good;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= R_WAIT;
      exp_seq <= '0;
      cur_vc  <= '0;
      widx    <= '0;
      fb_type <= FB_NONE;
      fb_seq  <= '0;
    end else begin
      if (fb_taken) fb_type <= FB_NONE;
      unique case (state)
        R_WAIT: if (!error && is_ctrl && k == K_SOP) state <= R_HDR;
        R_HDR: if (accept_hdr) begin
          cur_vc <= hdr.vc;
          widx   <= '0;
          state  <= R_DATA;
        end
        R_DATA: if (!error) begin
          widx <= widx + 1'b1;
          if (widx == 5'(PKT_WORDS - 1)) state <= R_CRC;
        end
        R_CRC: if (good) begin
          state   <= R_WAIT;
          exp_seq <= exp_seq + 1'b1;
          fb_type <= FB_ACK;
          fb_seq  <= exp_seq;
        end
        R_DISC: if (is_ctrl && ctrl_ok && k == K_RESTART) state <= R_WAIT;
        default: state <= R_WAIT;
      endcase
      if (error) begin
        state   <= R_DISC;
        fb_type <= FB_NACK;
        fb_seq  <= exp_seq;
      end
    end
  end
endmodule
