// tnw_fifo: small synchronous first-word-fall-through FIFO (helper).
//
// `rd_data` shows the oldest entry whenever `empty` is low; `rd_en` removes
// it. A write to a full FIFO and a read from an empty one are ignored.
// `count` is the number of stored entries. Used for the credit queues of
// the Match block.
module tnw_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_wr, do_rd;

  assign empty   = (count == 0);
  assign full    = (count == CW'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end
endmodule
