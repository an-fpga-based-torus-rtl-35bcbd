// reorder_buffer: write-combining re-order logic of one link.
//
// With programmed I/O through write-combining buffers, the 16-byte pieces of
// a message reach the NWP as 64-byte (or smaller) writes in any order. The
// address of each write says where the piece belongs: the virtual channel,
// the packet index `pidx` inside that channel's injection window and the
// 16-byte chunk inside the 128-byte packet. For every VC this block keeps a
// ring of RB_SLOTS packet slots starting at the next packet index the link
// expects (`head`). A chunk is stored in slot pidx mod RB_SLOTS and marked
// valid; only when all 8 chunks of the head slot are present is the packet
// copied, in order and 128 bits per cycle, into txFifo, and the head moves
// on. Complete head packets of different VCs are copied round-robin, and
// only when txFifo has room for the whole packet.
//
// `wr_accept` tells the writer whether a chunk can be taken now: the packet
// index must lie inside the window [head, head + RB_SLOTS). A write outside
// it must wait (the processor interface stalls). A chunk written twice
// simply overwrites the first copy.
//
// The paper asks for re-order logic that restores the order of the data
// before it enters the injection buffer; the slot ring, the window check and
// RB_SLOTS = 4 are this design's choices.
module reorder_buffer
  import tnw_pkg::*;
#(
  parameter int RB_SLOTS  = 4,
  parameter int TXF_DEPTH = 64
) (
  input  logic                           clk,
  input  logic                           rst,
  // chunk writes from the processor input controller
  input  logic                           wr_en,
  input  logic [VC_W-1:0]                wr_vc,
  input  logic [PIDX_W-1:0]              wr_pidx,
  input  logic [2:0]                     wr_chunk,
  input  logic [127:0]                   wr_data,
  output logic                           wr_accept,
  // to txFifo
  input  logic [$clog2(TXF_DEPTH+1)-1:0] txf_free,
  output logic                           txf_wr,
  output logic [127:0]                   txf_data,
  output tx_attr_t                       txf_attr
);
  localparam int SW = $clog2(RB_SLOTS);

  logic [127:0]      mem  [NUM_VC * RB_SLOTS * PKT_BEATS];
  logic [7:0]        mask [NUM_VC][RB_SLOTS];
  logic [PIDX_W-1:0] head [NUM_VC];

  logic [PIDX_W-1:0] wdist;
  logic [SW-1:0]     wslot;
  logic [NUM_VC-1:0] ready;
  logic              busy, pick_ok;
  logic [VC_W-1:0]   sel, last, pick;
  logic [2:0]        beat;

  function automatic int unsigned maddr(logic [VC_W-1:0] v, logic [SW-1:0] s, logic [2:0] c);
    return (int'(v) * RB_SLOTS + int'(s)) * PKT_BEATS + int'(c);
  endfunction

  assign wdist      = wr_pidx - head[wr_vc];
  assign wr_accept = (wdist < PIDX_W'(RB_SLOTS));
  assign wslot     = wr_pidx[SW-1:0];

  for (genvar v = 0; v < NUM_VC; v++) begin : g_ready
    assign ready[v] = (mask[v][head[v][SW-1:0]] == 8'hFF);
  end

  always_comb begin
    pick    = last;
    pick_ok = 1'b0;
    for (int i = 1; i <= NUM_VC; i++) begin
      logic [VC_W-1:0] c;
      c = last + VC_W'(i);
      if (!pick_ok && ready[c]) begin
        pick    = c;
        pick_ok = 1'b1;
      end
    end
  end

  assign txf_wr   = busy;
  assign txf_data = mem[maddr(sel, head[sel][SW-1:0], beat)];
  assign txf_attr = '{vc: sel, pidx: head[sel]};

  always_ff @(posedge clk) begin
    if (wr_en && wr_accept) mem[maddr(wr_vc, wslot, wr_chunk)] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      sel  <= '0;
      last <= VC_W'(NUM_VC - 1);
      beat <= '0;
      for (int v = 0; v < NUM_VC; v++) begin
        head[v] <= '0;
        for (int s = 0; s < RB_SLOTS; s++) mask[v][s] <= '0;
      end
    end else begin
      if (wr_en && wr_accept) mask[wr_vc][wslot][wr_chunk] <= 1'b1;
      if (!busy) begin
        if (pick_ok && txf_free >= ($clog2(TXF_DEPTH+1))'(PKT_BEATS)) begin
          busy <= 1'b1;
          sel  <= pick;
          last <= pick;
          beat <= '0;
        end
      end else begin
        beat <= beat + 1'b1;
        if (beat == 3'(PKT_BEATS - 1)) begin
          busy <= 1'b0;
          mask[sel][head[sel][SW-1:0]] <= '0;
          head[sel] <= head[sel] + 1'b1;
        end
      end
    end
  end

  initial assert ((1 << SW) == RB_SLOTS && RB_SLOTS <= (1 << PIDX_W))
    else $error("reorder_buffer: RB_SLOTS must be a power of two");
endmodule
