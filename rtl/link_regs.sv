// link_regs: configuration, status and debug registers of one link
// ("Config/Status/Debug Registers").
//
// 32-bit registers addressed by a 6-bit index:
//   0  CTRL     rw  bit 0: transmitter enable (reset 1)
//   1  TIMEOUT  rw  cycles without feedback before the transmitter resends
//                   (reset TIMEOUT_RST)
//   2  STATUS   ro  [0] resend mode, [1] receiver discarding,
//                   [15:8] packets in flight, [31:16] free txFifo entries
//   16+e        debug counter of event e (see tnw_pkg::ev_idx_e); a write
//                   of any value clears it
// Other indices read as zero. Reads are combinational; writes take effect
// at the clock edge, and a counter cleared in the same cycle as an event
// reads zero afterwards. The paper only names this block; the register map
// is this design's own.
module link_regs
  import tnw_pkg::*;
#(
  parameter logic [31:0] TIMEOUT_RST = 32'd4096
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  logic [5:0]        wr_idx,
  input  logic [31:0]       wr_data,
  input  logic [5:0]        rd_idx,
  output logic [31:0]       rd_data,
  // status inputs
  input  logic              st_resend,
  input  logic              st_discard,
  input  logic [7:0]        st_in_flight,
  input  logic [15:0]       st_txf_free,
  input  logic [NUM_EV-1:0] ev,
  // configuration outputs
  output logic              cfg_tx_enable,
  output logic [31:0]       cfg_timeout
);
  logic [31:0] cnt [NUM_EV];

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_tx_enable <= 1'b1;
      cfg_timeout   <= TIMEOUT_RST;
    end else if (wr_en) begin
      if (wr_idx == 6'd0) cfg_tx_enable <= wr_data[0];
      if (wr_idx == 6'd1) cfg_timeout   <= wr_data;
    end
  end

  for (genvar e = 0; e < NUM_EV; e++) begin : g_cnt
    always_ff @(posedge clk) begin
      if (rst) cnt[e] <= '0;
      else if (wr_en && wr_idx == 6'(16 + e)) cnt[e] <= '0;
      else if (ev[e]) cnt[e] <= cnt[e] + 1'b1;
    end
  end

  always_comb begin
    rd_data = '0;
    if (rd_idx == 6'd0)      rd_data = {31'd0, cfg_tx_enable};
    else if (rd_idx == 6'd1) rd_data = cfg_timeout;
    else if (rd_idx == 6'd2) rd_data = {st_txf_free, st_in_flight, 6'd0, st_discard, st_resend};
    else if (rd_idx >= 6'd16 && rd_idx < 6'(16 + NUM_EV)) rd_data = cnt[4'(rd_idx - 6'd16)];
  end
endmodule
