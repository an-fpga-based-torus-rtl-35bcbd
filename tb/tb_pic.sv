// tb_pic: sends down-stream TLPs to the processor input controller and
// checks what it does with them: injection writes (3-DW and 4-DW headers,
// 64-byte and 16-byte, second half first) reach the right link's txFifo as
// whole packets in order with VC and packet index; credit writes post the
// credit fields to the right link and VC; register writes and reads carry
// the index, data, requester ID, tag and low address; the port stalls while
// a read waits for the POC and while an injection write lies outside the
// re-order window; an unsupported TLP with payload is dropped.
module tb_pic;
  import tnw_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [127:0] rx_data = '0;
  logic rx_sop = 1'b0, rx_eop = 1'b0, rx_valid = 1'b0, rx_ready;
  logic [6:0] txf_free [NUM_LINKS];
  logic [NUM_LINKS-1:0] txf_wr, cr_valid, reg_wr;
  logic [127:0] txf_data [NUM_LINKS];
  tx_attr_t txf_attr [NUM_LINKS];
  logic [VC_W-1:0] cr_vc;
  credit_t cr_data;
  logic [5:0] reg_idx, rd_idx;
  logic [31:0] reg_wdata;
  logic rd_valid, rd_ready = 1'b0;
  logic [LINK_W-1:0] rd_link;
  logic [15:0] rd_reqid;
  logic [7:0] rd_tag;
  logic [6:0] rd_lowaddr;
  int checks = 0, failures = 0;

  pic dut (
    .clk (clk), .rst (rst), .rx_data (rx_data), .rx_sop (rx_sop), .rx_eop (rx_eop), .rx_valid (rx_valid), .rx_ready (rx_ready),
    .txf_free (txf_free), .txf_wr (txf_wr), .txf_data (txf_data), .txf_attr (txf_attr),
    .cr_valid (cr_valid), .cr_vc (cr_vc), .cr_data (cr_data),
    .reg_wr (reg_wr), .reg_idx (reg_idx), .reg_wdata (reg_wdata),
    .rd_valid (rd_valid), .rd_ready (rd_ready), .rd_link (rd_link), .rd_idx (rd_idx),
    .rd_reqid (rd_reqid), .rd_tag (rd_tag), .rd_lowaddr (rd_lowaddr)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // monitors
  logic [127:0] txq [NUM_LINKS][$];
  tx_attr_t     taq [NUM_LINKS][$];
  int n_cr = 0, n_regw = 0, stall = 0;
  credit_t last_cr; int last_cr_link, last_cr_vc;
  int last_rw_link, last_rw_idx; logic [31:0] last_rw_data;
  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < NUM_LINKS; l++) if (txf_wr[l]) begin txq[l].push_back(txf_data[l]); taq[l].push_back(txf_attr[l]); end
    for (int l = 0; l < NUM_LINKS; l++) if (cr_valid[l]) begin n_cr++; last_cr = cr_data; last_cr_link = l; last_cr_vc = int'(cr_vc); end
    for (int l = 0; l < NUM_LINKS; l++) if (reg_wr[l]) begin n_regw++; last_rw_link = l; last_rw_idx = int'(reg_idx); last_rw_data = reg_wdata; end
    if (rx_valid && !rx_ready) stall++;
  end

  realtime t_done = -1.0;
  task automatic put_beat(logic [127:0] d, logic s, logic e);
    if ($realtime != t_done) @(negedge clk);
    rx_data = d; rx_sop = s; rx_eop = e; rx_valid = 1'b1;
    while (!rx_ready) @(negedge clk);
    @(negedge clk);
    rx_valid = 1'b0; rx_sop = 1'b0; rx_eop = 1'b0;
    t_done = $realtime;
  endtask

  function automatic logic [127:0] hdr(logic [2:0] fmt, logic [4:0] typ, logic [63:0] a, int len, logic [7:0] tag);
    if (fmt[0]) return {a[31:0], a[63:32], 16'h0123, tag, 8'hFF, fmt, typ, 8'h00, 6'h00, 10'(len)};
    else        return {32'h0, a[31:0], 16'h0123, tag, 8'hFF, fmt, typ, 8'h00, 6'h00, 10'(len)};
  endfunction

  function automatic logic [127:0] chunk(int l, int v, int p, int c);
    return {32'(l), 32'(v), 32'(p), 32'(c) ^ 32'h7777_0000};
  endfunction
  function automatic logic [63:0] ia(int l, int v, int p, int c);
    return 64'hC000_0000 | (64'(l) << 16) | (64'(v) << 13) | (64'(p) << 7) | (64'(c) << 4);
  endfunction

  task automatic inj(bit four_dw, int l, int v, int p, int c0, int n);
    put_beat(hdr(four_dw ? FMT_4DW_D : FMT_3DW_D, TYPE_MEM, ia(l, v, p, c0), n * 4, 8'h0), 1'b1, 1'b0);
    for (int c = 0; c < n; c++) put_beat(chunk(l, v, p, c0 + c), 1'b0, c == n - 1);
  endtask

  initial begin
    logic [127:0] b;
    foreach (txf_free[l]) txf_free[l] = 7'd64;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // link 2, VC 6: packets 0 and 1, second half first, 4-DW headers
    for (int p = 0; p < 2; p++) begin inj(1, 2, 6, p, 4, 4); inj(1, 2, 6, p, 0, 4); end
    // link 5, VC 0: packet 0 in 16-byte writes with 3-DW headers, reversed
    for (int c = 7; c >= 0; c--) inj(0, 5, 0, 0, c, 1);
    repeat (30) @(posedge clk);
    check(txq[2].size() == 16 && txq[5].size() == 8, $sformatf("packets reached txFifo (%0d, %0d)", txq[2].size(), txq[5].size()));
    for (int i = 0; i < 16 && i < txq[2].size(); i++)
      check(txq[2][i] == chunk(2, 6, i / 8, i % 8) && taq[2][i].vc == 3'd6 && taq[2][i].pidx == 6'(i / 8), "link 2 data in order");
    for (int i = 0; i < 8 && i < txq[5].size(); i++)
      check(txq[5][i] == chunk(5, 0, 0, i) && taq[5][i].vc == 3'd0, "link 5 data in order");

    // window: packet 7 of link 1 VC 1 (head 0, 4 slots) stalls until packets 0..3 go
    fork
      inj(1, 1, 1, 7, 0, 4);
      begin
        repeat (20) @(posedge clk);
        check(stall > 10, "port stalls outside the re-order window");
      end
    join_any
    // the stalled TLP holds the port, so leave this state by reset
    disable fork;
    @(negedge clk) begin rst = 1'b1; rx_valid = 1'b0; end
    @(negedge clk) rst = 1'b0;
    t_done = -1.0;
    foreach (txq[l]) txq[l] = {};

    // credit
    b = {64'hAAAA_BBBB_CCCC_DDDD, 16'd7, 48'h1234_5678_9A80};
    put_beat(hdr(FMT_4DW_D, TYPE_MEM, 64'hC008_0000 | (64'd3 << 16) | (64'd4 << 13), 4, 8'h0), 1'b1, 1'b0);
    put_beat(b, 1'b0, 1'b1);
    repeat (2) @(posedge clk);
    check(n_cr == 1 && last_cr_link == 3 && last_cr_vc == 4 && last_cr.npkts == 16'd7 &&
          last_cr.dest_addr == 48'h1234_5678_9A80 && last_cr.notify_addr == 64'hAAAA_BBBB_CCCC_DDDD, "credit posted");

    // register write to link 4, index 1 (lane 1)
    put_beat(hdr(FMT_3DW_D, TYPE_MEM, 64'hC010_0000 | (64'd4 << 16) | (64'd1 << 2), 1, 8'h0), 1'b1, 1'b0);
    put_beat({32'h0, 32'h0, 32'd555, 32'h0}, 1'b0, 1'b1);
    repeat (2) @(posedge clk);
    check(n_regw == 1 && last_rw_link == 4 && last_rw_idx == 1 && last_rw_data == 32'd555, "register write");

    // register read: stalls until taken
    put_beat(hdr(FMT_4DW_ND, TYPE_MEM, 64'hC010_0000 | (64'd1 << 16) | (64'd18 << 2), 1, 8'h5A), 1'b1, 1'b1);
    repeat (3) @(posedge clk);
    check(rd_valid && rd_link == 3'd1 && rd_idx == 6'd18 && rd_reqid == 16'h0123 && rd_tag == 8'h5A &&
          rd_lowaddr == 7'(18 << 2), "read request fields");
    fork
      put_beat(hdr(FMT_3DW_D, TYPE_MEM, 64'hC010_0000, 1, 8'h0), 1'b1, 1'b0);
      begin repeat (10) @(posedge clk); @(negedge clk) rd_ready = 1'b1; @(negedge clk) rd_ready = 1'b0; end
    join
    put_beat('0, 1'b0, 1'b1);
    check(!rd_valid && n_regw == 2, "read taken, next TLP proceeds");

    // unsupported TLP (message with data) is dropped
    put_beat(hdr(FMT_4DW_D, 5'b10000, 64'hC000_0000, 8, 8'h0), 1'b1, 1'b0);
    put_beat('1, 1'b0, 1'b0);
    put_beat('1, 1'b0, 1'b1);
    repeat (20) @(posedge clk);
    check(txq[0].size() == 0 && n_cr == 1 && n_regw == 2, "unsupported TLP dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
