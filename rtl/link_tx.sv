// link_tx: transmission logic of one link (send half of the link module).
//
// Packets: as soon as txFifo holds 128 bytes, the transmitter sends a start
// control word, a header {seq, vc, pidx}, the 32 payload words popped from
// txFifo and a CRC-32 over header and payload: 35 words back to back, one
// per cycle, so a loaded link carries 128 payload bytes every 35 cycles
// (0.914 GB/s at 250 MHz). Each sent packet is also written into txBuffer
// (slot seq mod NBUF) and stays there until the peer acknowledges it.
//
// Feedback: the peer acknowledges cumulatively. ACK(s) frees every packet
// up to s; NACK(s) frees those before s and puts the transmitter in resend
// mode: it finishes the packet under way, sends a RESTART control word and
// re-sends every unacknowledged packet from txBuffer, then waits until all
// of them are acknowledged before it takes new data from txFifo. A NACK in
// resend mode starts the procedure again. If packets are outstanding and no
// feedback arrives for `cfg_timeout` cycles, the transmitter acts as if it
// had received NACK for the oldest one (covers lost packets and lost NACKs).
//
// Feedback from the local receiver for the peer's traffic is carried in the
// start word of the next packet, or in a feedback control word when no
// packet is ready, so feedback costs no bandwidth on a loaded link.
//
// Following the paper: packet format (32-bit header, 128-byte payload,
// 32-bit CRC), start at 128 bytes, txBuffer, ACK/NACK, RESTART and resend
// mode. This design's choices: the start word, cumulative sequence-number
// feedback, piggy-backing of feedback, the timeout and NBUF.
// As in the paper's diagram, txBuffer keeps header and payload only, and
// a resent packet passes through the CRC unit again.
//
// Interface timing: `phy_tx` is registered; txFifo and txBuffer are read
// combinationally. `fb_taken` pulses in the cycle the pending feedback is
// placed into the outgoing word.
// Lint note: the CRC unit's look-ahead output `crc_next` is not needed
// here and is reported as unused.
module link_tx
  import tnw_pkg::*;
#(
  parameter int NBUF = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cfg_enable,
  input  logic [31:0]      cfg_timeout,
  // txFifo read side
  input  logic             fifo_pkt_avail,
  input  logic [31:0]      fifo_word,
  input  tx_attr_t         fifo_attr,
  output logic             fifo_rd,
  // feedback to be sent for the peer's packets (from the local receiver)
  input  fb_t              fb_type,
  input  logic [SEQ_W-1:0] fb_seq,
  output logic             fb_taken,
  // feedback received from the peer (decoded by the local receiver)
  input  logic             rfb_valid,
  input  fb_t              rfb_type,
  input  logic [SEQ_W-1:0] rfb_seq,
  // to the PHY
  output phy_word_t        phy_tx,
  // status and events
  output logic             st_resend,
  output logic [7:0]       st_in_flight,
  output logic             ev_pkt,
  output logic             ev_resent,
  output logic             ev_restart,
  output logic             ev_timeout,
  output logic             ev_nack
);
  localparam int SW = $clog2(NBUF);

  typedef enum logic [1:0] {S_BOUND, S_HDR, S_DATA, S_CRC} state_e;
  state_e           state;
  logic [SEQ_W-1:0] next_seq, ack_ptr, resend_ptr, cur_seq;
  logic             resend, restart_pend, from_buf;
  logic [4:0]       widx;
  logic [31:0]      to_cnt;

  logic [SEQ_W-1:0] in_flight;
  logic             can_new, can_resend;
  phy_word_t        word;
  logic             crc_init, crc_en, start_pkt, start_buf;
  logic [31:0]      crc, crc_next;
  logic             buf_wr;
  logic [5:0]       buf_idx;
  logic [31:0]      buf_rd;
  pkt_hdr_t         new_hdr;

  assign in_flight  = next_seq - ack_ptr;
  assign can_new    = cfg_enable && fifo_pkt_avail && !resend && (in_flight < SEQ_W'(NBUF));
  assign can_resend = resend && !restart_pend && (resend_ptr != next_seq);
  assign st_resend  = resend;
  assign st_in_flight = 8'(in_flight);
  assign new_hdr    = '{seq: cur_seq, vc: fifo_attr.vc, rsvd: '0, pidx: fifo_attr.pidx};

  tx_buffer #(.NBUF(NBUF)) u_txbuf (
    .clk     (clk),
    .wr_en   (buf_wr),
    .wr_slot (cur_seq[SW-1:0]),
    .wr_idx  (buf_idx),
    .wr_data (word.data),
    .rd_slot (cur_seq[SW-1:0]),
    .rd_idx  (buf_idx),
    .rd_data (buf_rd)
  );

  tnw_crc32 u_crc (
    .clk (clk), .rst (rst), .init (crc_init), .en (crc_en),
    .data (word.data), .crc (crc), .crc_next (crc_next)
  );

  // Word selection for the current cycle.
  always_comb begin
    word       = ctrl_word(K_IDLE, FB_NONE, '0);
    fifo_rd    = 1'b0;
    fb_taken   = 1'b0;
    crc_init   = 1'b0;
    crc_en     = 1'b0;
    buf_wr     = 1'b0;
    buf_idx    = '0;
    start_pkt  = 1'b0;
    start_buf  = 1'b0;
    ev_restart = 1'b0;
    unique case (state)
      S_BOUND: begin
        if (restart_pend) begin
          word       = ctrl_word(K_RESTART, FB_NONE, '0);
          ev_restart = 1'b1;
        end else if (can_resend || can_new) begin
          word      = ctrl_word(K_SOP, fb_type, fb_seq);
          fb_taken  = (fb_type != FB_NONE);
          start_pkt = 1'b1;
          start_buf = can_resend;
        end else if (fb_type != FB_NONE) begin
          word     = ctrl_word(K_FB, fb_type, fb_seq);
          fb_taken = 1'b1;
        end
      end
      S_HDR: begin
        buf_idx  = 6'd0;
        word     = '{ctrl: 4'b0000, data: from_buf ? buf_rd : new_hdr};
        buf_wr   = !from_buf;
        crc_init = 1'b1;
        crc_en   = 1'b1;
      end
      S_DATA: begin
        buf_idx = 6'(widx) + 6'd1;
        word    = '{ctrl: 4'b0000, data: from_buf ? buf_rd : fifo_word};
        fifo_rd = !from_buf;
        buf_wr  = !from_buf;
        crc_en  = 1'b1;
      end
      S_CRC: begin
        word = '{ctrl: 4'b0000, data: crc};
      end
      default: ;
    endcase
  end

  // Feedback from the peer, and the timeout.
  logic             nack_now, ack_now, timeout_now;
  logic [SEQ_W-1:0] nack_seq, ack_next, dist_s, dist_r;

  always_comb begin
    dist_s      = rfb_seq - ack_ptr;
    timeout_now = (in_flight != 0) && !rfb_valid && (to_cnt >= cfg_timeout);
    ack_now     = rfb_valid && (rfb_type == FB_ACK)  && (dist_s <  in_flight);
    nack_now    = (rfb_valid && (rfb_type == FB_NACK) && (dist_s <= in_flight)) || timeout_now;
    nack_seq    = timeout_now ? ack_ptr : rfb_seq;
    ack_next    = ack_now ? rfb_seq + 1'b1 : nack_now ? nack_seq : ack_ptr;
    dist_r      = resend_ptr - ack_ptr;
  end

  assign ev_timeout = timeout_now;
  assign ev_nack    = rfb_valid && (rfb_type == FB_NACK);
  assign ev_pkt     = (state == S_CRC) && !from_buf;
  assign ev_resent  = (state == S_CRC) && from_buf;

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_BOUND;
      next_seq     <= '0;
      ack_ptr      <= '0;
      resend_ptr   <= '0;
      cur_seq      <= '0;
      resend       <= 1'b0;
      restart_pend <= 1'b0;
      from_buf     <= 1'b0;
      widx         <= '0;
      to_cnt       <= '0;
      phy_tx       <= ctrl_word(K_IDLE, FB_NONE, '0);
    end else begin
      phy_tx <= word;
      unique case (state)
        S_BOUND: begin
          if (restart_pend) restart_pend <= 1'b0;
          if (start_pkt) begin
            from_buf <= start_buf;
            cur_seq  <= start_buf ? resend_ptr : next_seq;
            state    <= S_HDR;
          end else if (resend && !restart_pend && resend_ptr == next_seq && in_flight == 0) begin
            resend <= 1'b0;
          end
        end
        S_HDR: begin
          widx  <= '0;
          state <= S_DATA;
        end
        S_DATA: begin
          widx <= widx + 1'b1;
          if (widx == 5'(PKT_WORDS - 1)) state <= S_CRC;
        end
        S_CRC: begin
          state <= S_BOUND;
          if (!from_buf) next_seq <= next_seq + 1'b1;
          else if (!restart_pend && !nack_now) resend_ptr <= cur_seq + 1'b1;
        end
        default: state <= S_BOUND;
      endcase

      // feedback handling (overrides the pointer updates above)
      ack_ptr <= ack_next;
      if (nack_now) begin
        resend       <= 1'b1;
        restart_pend <= 1'b1;
        resend_ptr   <= nack_seq;
      end else if (ack_now && resend && (dist_r < (ack_next - ack_ptr))) begin
        // the peer acknowledged beyond the resend point: skip ahead
        resend_ptr <= ack_next;
      end

      if (in_flight == 0 || rfb_valid || timeout_now) to_cnt <= '0;
      else to_cnt <= to_cnt + 1'b1;
    end
  end

  // The sequence window must be able to tell NBUF outstanding packets apart.
  initial assert (NBUF < (1 << SEQ_W) && (1 << SW) == NBUF)
    else $error("link_tx: NBUF must be a power of two below 2**SEQ_W");
endmodule
