// tnw_crc32: 32-bit CRC unit of a link (the "CRC" block of the link module).
//
// Accumulates a CRC-32 (polynomial 0x04C11DB7, initial value all ones, no
// final inversion) over one 32-bit word per cycle. `init` loads the initial
// value and folds in `data` in the same cycle when `en` is also high, so the
// first word of a packet needs no extra cycle. `crc` is the registered value
// including every word accepted so far; `crc_next` is what it becomes at the
// next edge. The paper gives only "a 32-bit CRC"; the polynomial and word
// order are this design's choice.
module tnw_crc32 (
  input  logic        clk,
  input  logic        rst,
  input  logic        init,
  input  logic        en,
  input  logic [31:0] data,
  output logic [31:0] crc,
  output logic [31:0] crc_next
);
  import tnw_pkg::*;

  always_comb begin
    crc_next = init ? CRC_INIT : crc;
    if (en) crc_next = crc32_step(crc_next, data);
  end

  always_ff @(posedge clk) begin
    if (rst) crc <= CRC_INIT;
    else if (init || en) crc <= crc_next;
  end
endmodule
