// tx_fifo: injection buffer of one link ("txFifo").
//
// Stores 128-bit data entries together with their attributes (virtual
// channel and packet index) in arrival order. The processor side writes one
// 128-bit entry per cycle; the transmission logic reads 32-bit words, lowest
// word of each entry first, and the entry is released after its fourth word.
// `pkt_avail` is high while at least 128 bytes (8 entries) are stored: the
// paper starts a packet "as soon as it holds at least 128 Bytes of data".
// `attr` belongs to the entry at the head. `free` counts empty entries, so
// the writer can check room for a whole packet before it starts one.
// The depth is not given in the paper (default 64 entries = 8 packets).
module tx_fifo
  import tnw_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst,
  // write side, 128-bit entries
  input  logic                       wr_en,
  input  logic [127:0]               wr_data,
  input  tx_attr_t                   wr_attr,
  output logic [$clog2(DEPTH+1)-1:0] free,
  // read side, 32-bit words
  input  logic                       rd_en,
  output logic [31:0]                rd_word,
  output tx_attr_t                   attr,
  output logic                       pkt_avail
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);

  logic [127:0]  mem  [DEPTH];
  tx_attr_t      amem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [1:0]    wsel;
  logic [CW-1:0] count;
  logic          do_wr, pop;

  assign free      = CW'(DEPTH) - count;
  assign do_wr     = wr_en && (count != CW'(DEPTH));
  assign pop       = rd_en && (count != 0) && (wsel == 2'd3);
  assign rd_word   = mem[rp][wsel*32 +: 32];
  assign attr      = amem[rp];
  assign pkt_avail = (count >= CW'(PKT_BEATS));

  always_ff @(posedge clk) begin
    if (do_wr) begin
      mem[wp]  <= wr_data;
      amem[wp] <= wr_attr;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; wsel <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (rd_en && count != 0) wsel <= wsel + 1'b1;
      if (pop) rp <= rp + 1'b1;
      count <= count + CW'(do_wr) - CW'(pop);
    end
  end

  // DEPTH must be a power of two for the wrapping pointers.
  initial assert ((1 << AW) == DEPTH) else $error("tx_fifo: DEPTH must be a power of two");
endmodule
