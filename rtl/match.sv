// match: credit/packet matching of one link ("Match").
//
// Each virtual channel has a queue of credits (receive operations posted by
// the CPU, in order) and a reception FIFO. A VC requests delivery when its
// oldest credit is open and its FIFO holds a whole 128-byte packet. Among
// requesting VCs one is chosen round-robin; its packet is streamed out as
// 8 beats of 128 bits with the memory address where it belongs:
// dest_addr + 128 * (packets already delivered for this credit). The beat
// stream carries the credit's notification data; on the last packet of a
// credit `dlv_notify` is high, and the credit is retired when that packet's
// last beat is accepted.
//
// Following the paper: per-VC matching of credits with 128-byte packets,
// an address for the processor interface, notification on the last packet,
// round-robin arbitration of several matches. This design's choices: the
// credit fields, the credit queue depth, and that a credit that arrives
// while its queue is full is dropped and counted (`ev_credit_ovf`).
//
// Timing: a beat moves when dlv_valid && dlv_ready. A new packet can start
// in the cycle after the previous one ended.
module match
  import tnw_pkg::*;
#(
  parameter int CR_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  // credits from the processor interface
  input  logic                 cr_valid,
  input  logic [VC_W-1:0]      cr_vc,
  input  credit_t              cr_data,
  // reception FIFOs
  input  logic [NUM_VC-1:0]    pkt_avail,
  input  logic [127:0]         fifo_data [NUM_VC],
  output logic [NUM_VC-1:0]    fifo_rd,
  // delivery stream to the processor interface
  output logic                 dlv_valid,
  input  logic                 dlv_ready,
  output logic [127:0]         dlv_data,
  output logic                 dlv_first,
  output logic                 dlv_last,
  output logic [63:0]          dlv_addr,
  output logic [VC_W-1:0]      dlv_vc,
  output logic                 dlv_notify,
  output logic [63:0]          dlv_notify_addr,
  output logic [15:0]          dlv_npkts,
  // events
  output logic                 ev_credit_ovf,
  output logic                 ev_delivered
);
  localparam int CRW = $bits(credit_t);

  credit_t     cr_head [NUM_VC];
  logic [NUM_VC-1:0] cr_empty, cr_full, cr_pop;
  logic [15:0] done_cnt [NUM_VC];      // packets delivered for the open credit
  logic [NUM_VC-1:0] req;
  logic        busy;
  logic [VC_W-1:0] sel, last_grant, pick;
  logic        pick_ok;
  logic [2:0]  beat;
  logic        last_pkt;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic [$clog2(CR_DEPTH+1)-1:0] unused_cnt;
    logic [CRW-1:0] head_bits;
    tnw_fifo #(.W(CRW), .DEPTH(CR_DEPTH)) u_cr (
      .clk (clk), .rst (rst),
      .wr_en (cr_valid && cr_vc == VC_W'(v)), .wr_data (cr_data),
      .rd_en (cr_pop[v]), .rd_data (head_bits),
      .empty (cr_empty[v]), .full (cr_full[v]), .count (unused_cnt)
    );
    assign cr_head[v] = credit_t'(head_bits);
    assign req[v] = !cr_empty[v] && pkt_avail[v];
  end

  assign ev_credit_ovf = cr_valid && cr_full[cr_vc];

  // round-robin choice: first requester after the last granted VC
  always_comb begin
    pick    = last_grant;
    pick_ok = 1'b0;
    for (int i = 1; i <= NUM_VC; i++) begin
      logic [VC_W-1:0] c;
      c = last_grant + VC_W'(i);
      if (!pick_ok && req[c]) begin
        pick    = c;
        pick_ok = 1'b1;
      end
    end
  end

  assign last_pkt        = (done_cnt[sel] + 16'd1 >= cr_head[sel].npkts);
  assign dlv_valid       = busy;
  assign dlv_data        = fifo_data[sel];
  assign dlv_first       = (beat == 3'd0);
  assign dlv_last        = (beat == 3'(PKT_BEATS - 1));
  assign dlv_addr        = {16'd0, cr_head[sel].dest_addr} + {41'd0, done_cnt[sel], 7'd0};
  assign dlv_vc          = sel;
  assign dlv_notify      = last_pkt;
  assign dlv_notify_addr = cr_head[sel].notify_addr;
  assign dlv_npkts       = cr_head[sel].npkts;

  always_comb begin
    fifo_rd = '0;
    cr_pop  = '0;
    if (busy && dlv_ready) begin
      fifo_rd[sel] = 1'b1;
      if (dlv_last && last_pkt) cr_pop[sel] = 1'b1;
    end
  end
  assign ev_delivered = busy && dlv_ready && dlv_last;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy       <= 1'b0;
      sel        <= '0;
      last_grant <= VC_W'(NUM_VC - 1);
      beat       <= '0;
      for (int v = 0; v < NUM_VC; v++) done_cnt[v] <= '0;
    end else if (!busy) begin
      if (pick_ok) begin
        busy       <= 1'b1;
        sel        <= pick;
        last_grant <= pick;
        beat       <= '0;
      end
    end else if (dlv_ready) begin
      beat <= beat + 1'b1;
      if (dlv_last) begin
        busy <= 1'b0;
        done_cnt[sel] <= last_pkt ? 16'd0 : done_cnt[sel] + 16'd1;
      end
    end
  end

  // A packet is only started when the whole packet is in the FIFO.
  assert property (@(posedge clk) disable iff (rst) (busy && dlv_first) |-> pkt_avail[sel]);
endmodule
