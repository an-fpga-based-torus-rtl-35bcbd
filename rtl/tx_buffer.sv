// tx_buffer: retransmission buffer of one link ("txBuffer").
//
// Every packet taken from txFifo is copied here while it is sent: slot
// `seq mod NBUF` holds its header (word 0) and 32 payload words (words
// 1..32). The transmitter reads a slot back, word by word, when it has to
// resend. The buffer itself keeps no state about which slots are in use;
// the transmitter frees a slot when the packet is acknowledged. Writes take
// effect at the clock edge; reads are combinational. The paper names the
// buffer and its role; the slot count (16 packets, 2 KiB) is this design's
// choice, sized to cover the round trip of a link at 35 cycles per packet.
module tx_buffer
  import tnw_pkg::*;
#(
  parameter int NBUF = 16
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(NBUF)-1:0] wr_slot,
  input  logic [5:0]              wr_idx,    // 0 = header, 1..32 = payload
  input  logic [31:0]             wr_data,
  input  logic [$clog2(NBUF)-1:0] rd_slot,
  input  logic [5:0]              rd_idx,
  output logic [31:0]             rd_data
);
  localparam int WPS = PKT_WORDS + 1;   // words per slot
  logic [31:0] mem [NBUF*WPS];

  function automatic int unsigned addr(logic [$clog2(NBUF)-1:0] s, logic [5:0] i);
    return int'(s) * WPS + int'(i);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && wr_idx <= 6'(PKT_WORDS)) mem[addr(wr_slot, wr_idx)] <= wr_data;
  end

  assign rd_data = (rd_idx <= 6'(PKT_WORDS)) ? mem[addr(rd_slot, rd_idx)] : 32'd0;
endmodule
