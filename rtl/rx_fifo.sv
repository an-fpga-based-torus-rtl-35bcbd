// rx_fifo: reception FIFO of one virtual channel ("Rx Fifo VCn").
//
// The receive logic writes a packet one 32-bit word per cycle while its CRC
// is still being checked, so writes are speculative: four words are packed
// into one 128-bit entry at a speculative write pointer, and only `commit`
// (CRC good) makes the packet visible to the reader; `drop` (CRC bad or
// any other receive error) rewinds the speculative pointer and drops the
// partial packet. `commit` and `drop` apply to the words written up to and
// including the same cycle. The read side delivers 128-bit entries
// (first-word-fall-through). `pkt_avail` is high while a whole packet (8
// committed entries) is stored; `has_space` is high while a whole packet
// can still be written. The paper gives the per-VC FIFO organisation; the
// commit/drop mechanism and the depth (32 entries = 4 packets) are this
// design's choices.
module rx_fifo
  import tnw_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [31:0]  wr_word,
  input  logic         commit,
  input  logic         drop,
  output logic         has_space,
  input  logic         rd_en,
  output logic [127:0] rd_data,
  output logic         pkt_avail
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);

  logic [127:0]  mem [DEPTH];
  logic [95:0]   part;              // words 0..2 of the entry being packed
  logic [1:0]    wsel;
  logic [AW-1:0] wp_spec, wp, rp;
  logic [CW-1:0] count, spec_count; // committed entries, speculative entries
  logic          do_rd, entry_done;

  assign do_rd      = rd_en && (count != 0);
  assign rd_data    = mem[rp];
  assign pkt_avail  = (count >= CW'(PKT_BEATS));
  assign has_space  = (CW'(DEPTH) - count - spec_count) >= CW'(PKT_BEATS);
  assign entry_done = wr_en && (wsel == 2'd3);

  always_ff @(posedge clk) begin
    if (entry_done) mem[wp_spec] <= {wr_word, part};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel <= '0; part <= '0;
      wp_spec <= '0; wp <= '0; rp <= '0; count <= '0; spec_count <= '0;
    end else begin
      if (wr_en) begin
        part[wsel*32 +: 32] <= wr_word;
        wsel <= wsel + 1'b1;
      end
      if (do_rd) rp <= rp + 1'b1;
      if (drop) begin
        wp_spec    <= wp;
        spec_count <= '0;
        wsel       <= '0;
        count      <= count - CW'(do_rd);
      end else if (commit) begin
        wp_spec    <= wp_spec + AW'(entry_done);
        wp         <= wp_spec + AW'(entry_done);
        spec_count <= '0;
        wsel       <= '0;
        count      <= count + spec_count + CW'(entry_done) - CW'(do_rd);
      end else begin
        if (entry_done) begin
          wp_spec    <= wp_spec + 1'b1;
          spec_count <= spec_count + 1'b1;
        end
        count <= count - CW'(do_rd);
      end
    end
  end

  initial assert ((1 << AW) == DEPTH) else $error("rx_fifo: DEPTH must be a power of two");
endmodule
