// tb_link_regs: checks reset values, writes and read-back of the
// configuration registers, the status word, that each debug counter counts
// its own event, and that writing a counter clears it.
module tb_link_regs;
  import tnw_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic wr_en = 1'b0;
  logic [5:0] wr_idx = '0, rd_idx = '0;
  logic [31:0] wr_data = '0, rd_data, cfg_timeout;
  logic st_resend = 1'b0, st_discard = 1'b0, cfg_tx_enable;
  logic [7:0] st_in_flight = '0;
  logic [15:0] st_txf_free = '0;
  logic [NUM_EV-1:0] ev = '0;
  int checks = 0, failures = 0;
  int model [NUM_EV];

  link_regs dut (
    .clk (clk), .rst (rst), .wr_en (wr_en), .wr_idx (wr_idx), .wr_data (wr_data),
    .rd_idx (rd_idx), .rd_data (rd_data),
    .st_resend (st_resend), .st_discard (st_discard), .st_in_flight (st_in_flight),
    .st_txf_free (st_txf_free), .ev (ev), .cfg_tx_enable (cfg_tx_enable), .cfg_timeout (cfg_timeout)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(int idx, logic [31:0] exp, string what);
    rd_idx = 6'(idx); #1;
    check(rd_data == exp, $sformatf("%s: %h expected %h", what, rd_data, exp));
  endtask

  initial begin
    foreach (model[e]) model[e] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    rd(0, 32'd1, "CTRL reset");
    rd(1, 32'd4096, "TIMEOUT reset");
    check(cfg_tx_enable && cfg_timeout == 32'd4096, "config outputs after reset");
    @(negedge clk) begin wr_en = 1'b1; wr_idx = 6'd1; wr_data = 32'd777; end
    @(negedge clk) begin wr_idx = 6'd0; wr_data = 32'd0; end
    @(negedge clk) wr_en = 1'b0;
    rd(1, 32'd777, "TIMEOUT written");
    rd(0, 32'd0, "CTRL written");
    check(!cfg_tx_enable && cfg_timeout == 32'd777, "config outputs after write");
    st_resend = 1'b1; st_discard = 1'b1; st_in_flight = 8'd5; st_txf_free = 16'd40;
    rd(2, {16'd40, 8'd5, 6'd0, 1'b1, 1'b1}, "STATUS");
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      ev = NUM_EV'({$urandom(), $urandom()});
      for (int e = 0; e < NUM_EV; e++) if (ev[e]) model[e]++;
    end
    @(negedge clk) ev = '0;
    for (int e = 0; e < NUM_EV; e++) rd(16 + e, 32'(model[e]), $sformatf("counter %0d", e));
    @(negedge clk) begin wr_en = 1'b1; wr_idx = 6'(16 + EV_RX_CRC_ERR); ev[EV_RX_CRC_ERR] = 1'b1; end
    @(negedge clk) begin wr_en = 1'b0; ev = '0; end
    rd(16 + EV_RX_CRC_ERR, 32'd0, "counter cleared");
    rd(16 + EV_TX_PKT, 32'(model[EV_TX_PKT]), "other counter kept");
    rd(40, 32'd0, "unused index");
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
