// tb_link_module: two link modules joined back to back through behavioural
// channels (phy_model), both sending at once. Each side injects a stream of
// packets on random virtual channels; the far side posts credits and must
// deliver every packet exactly once, in order per VC, with the right data
// and the address the credit gives (destination + 128 * packet number).
// Phase 1 runs without errors and measures the link rate (one 128-byte
// packet per 35 cycles in a burst). Phase 2 corrupts data words and, for a
// while, feedback words on one channel, and checks that everything still
// arrives and that the resend and error counters moved.
module tb_link_module;
  import tnw_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic txf_wr [2], cr_valid [2], reg_wr [2], dlv_valid [2], dlv_ready [2];
  logic dlv_first [2], dlv_last [2], dlv_notify [2];
  logic [127:0] txf_data [2], dlv_data [2];
  tx_attr_t txf_attr [2];
  logic [6:0] txf_free [2];
  logic [VC_W-1:0] cr_vc [2], dlv_vc [2];
  credit_t cr_data [2];
  logic [5:0] reg_idx [2], reg_rd_idx [2];
  logic [31:0] reg_wdata [2], reg_rdata [2];
  logic [63:0] dlv_addr [2], dlv_notify_addr [2];
  logic [15:0] dlv_npkts [2];
  phy_word_t phy_tx [2], phy_rx [2];
  logic corrupt_data [2], corrupt_fb [2];
  int n_corr [2];

  for (genvar s = 0; s < 2; s++) begin : g_side
    link_module dut (
      .clk (clk), .rst (rst),
      .txf_wr (txf_wr[s]), .txf_data (txf_data[s]), .txf_attr (txf_attr[s]), .txf_free (txf_free[s]),
      .cr_valid (cr_valid[s]), .cr_vc (cr_vc[s]), .cr_data (cr_data[s]),
      .reg_wr (reg_wr[s]), .reg_idx (reg_idx[s]), .reg_wdata (reg_wdata[s]),
      .reg_rd_idx (reg_rd_idx[s]), .reg_rdata (reg_rdata[s]),
      .dlv_valid (dlv_valid[s]), .dlv_ready (dlv_ready[s]), .dlv_data (dlv_data[s]), .dlv_first (dlv_first[s]),
      .dlv_last (dlv_last[s]), .dlv_addr (dlv_addr[s]), .dlv_vc (dlv_vc[s]), .dlv_notify (dlv_notify[s]),
      .dlv_notify_addr (dlv_notify_addr[s]), .dlv_npkts (dlv_npkts[s]),
      .phy_tx (phy_tx[s]), .phy_rx (phy_rx[s])
    );
    phy_model #(.LATENCY(30)) ch (
      .clk (clk), .link_up (!rst), .din (phy_tx[s]), .dout (phy_rx[1-s]),
      .corrupt_data (corrupt_data[s]), .corrupt_fb (corrupt_fb[s]), .n_corrupted (n_corr[s])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] pdata(int s, int v, int p, int c);
    return {32'(s), 32'(v), 32'(p), 32'(c) ^ 32'h5A00_0000 ^ 32'(p * 77)};
  endfunction

  // per side, per VC: packets injected and packets delivered
  int sent [2][NUM_VC], rcvd [2][NUM_VC], beat [2];
  int dlv_bad = 0;
  // delivery checker: side s delivers what side 1-s sent
  always @(posedge clk) if (!rst)
    for (int s = 0; s < 2; s++) if (dlv_valid[s] && dlv_ready[s]) begin
      int v, p;
      v = int'(dlv_vc[s]);
      p = rcvd[s][v];
      if (dlv_data[s] != pdata(1 - s, v, p, beat[s]) ||
          dlv_addr[s] != 64'h1000_0000 + 64'(v) * 64'h100000 + 64'(p) * 128) begin
        dlv_bad++;
        if (dlv_bad < 5) $display("bad delivery side %0d vc %0d pkt %0d beat %0d", s, v, p, beat[s]);
      end
      if (dlv_last[s]) begin beat[s] = 0; rcvd[s][v]++; end
      else beat[s]++;
    end
  always @(posedge clk) for (int s = 0; s < 2; s++) dlv_ready[s] <= $urandom_range(0, 7) != 0;

  task automatic inject(int s, int v);
    for (int c = 0; c < PKT_BEATS; c++) begin
      @(negedge clk);
      while (txf_free[s] == 0) @(negedge clk);
      txf_wr[s] = 1'b1; txf_data[s] = pdata(s, v, sent[s][v], c);
      txf_attr[s].vc = VC_W'(v); txf_attr[s].pidx = PIDX_W'(sent[s][v]);
    end
    @(negedge clk) txf_wr[s] = 1'b0;
    sent[s][v]++;
  endtask

  task automatic credit(int s, int v, int n);
    @(negedge clk);
    cr_valid[s] = 1'b1; cr_vc[s] = VC_W'(v);
    cr_data[s].npkts = 16'(n); cr_data[s].notify_addr = 64'h9000 + 64'(v);
    cr_data[s].dest_addr = 48'h1000_0000 + 48'(v) * 48'h100000;
    @(negedge clk) cr_valid[s] = 1'b0;
  endtask

  function automatic int total(int s, bit recv);
    int t = 0;
    for (int v = 0; v < NUM_VC; v++) t += recv ? rcvd[s][v] : sent[1 - s][v];
    return t;
  endfunction

  task automatic rd_reg(int s, int idx, output logic [31:0] val);
    reg_rd_idx[s] = 6'(idx);
    #1 val = reg_rdata[s];
  endtask

  // link rate: SOP words leaving side 0
  int sop_t [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst && phy_tx[0].ctrl == 4'b0001 && phy_tx[0].data[7:0] == K_SOP) sop_t.push_back(cyc);
  end

  localparam int P1 = 40;  // packets per side, phase 1
  localparam int P2 = 60;  // packets per side, phase 2

  initial begin
    logic [31:0] r;
    int min_gap, n_gap35;
    for (int s = 0; s < 2; s++) begin
      txf_wr[s] = 0; cr_valid[s] = 0; reg_wr[s] = 0; reg_idx[s] = '0; reg_wdata[s] = '0; reg_rd_idx[s] = '0;
      txf_data[s] = '0; txf_attr[s] = '0; cr_vc[s] = '0; cr_data[s] = '0;
      corrupt_data[s] = 0; corrupt_fb[s] = 0; beat[s] = 0;
      for (int v = 0; v < NUM_VC; v++) begin sent[s][v] = 0; rcvd[s][v] = 0; end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // one big credit per VC and side (the match block counts packets)
    for (int s = 0; s < 2; s++) for (int v = 0; v < NUM_VC; v++) credit(s, v, 1000);

    // phase 1: burst on VC 3 from side 0, random VCs from side 1
    fork
      for (int i = 0; i < P1; i++) inject(0, 3);
      for (int i = 0; i < P1; i++) inject(1, $urandom_range(0, NUM_VC - 1));
    join
    while (!(total(0, 1) == P1 && total(1, 1) == P1)) @(posedge clk);
    repeat (50) @(posedge clk);
    min_gap = 1000; n_gap35 = 0;
    for (int i = 1; i < sop_t.size(); i++) begin
      int g;
      g = sop_t[i] - sop_t[i - 1];
      if (g < min_gap) min_gap = g;
      if (g == 35) n_gap35++;
    end
    $display("phase 1: %0d SOPs, min gap %0d cycles, %0d gaps of 35", sop_t.size(), min_gap, n_gap35);
    rd_reg(0, 16 + EV_TX_RESENT, r);
    check(r == 0, "no resends without errors");
    rd_reg(1, 16 + EV_RX_PROTO_ERR, r);
    check(r == 0, "no protocol errors without errors");
    check(min_gap == 35, "packets 35 cycles apart (128 B / 35 words)");
    check(n_gap35 > P1 / 2, "link runs back to back");
    check(dlv_bad == 0, "phase 1 deliveries correct");

    // phase 2: errors on channel 0->1 (data) and 1->0 (feedback)
    fork
      for (int i = 0; i < P2; i++) inject(0, $urandom_range(0, NUM_VC - 1));
      for (int i = 0; i < P2; i++) inject(1, $urandom_range(0, NUM_VC - 1));
      for (int k = 0; k < 6; k++) begin
        repeat ($urandom_range(100, 400)) @(negedge clk);
        corrupt_data[0] = 1'b1; @(negedge clk) corrupt_data[0] = 1'b0;
      end
      begin repeat (600) @(negedge clk); corrupt_fb[1] = 1'b1; repeat (300) @(negedge clk); corrupt_fb[1] = 1'b0; end
    join
    while (!(total(0, 1) == P1 + P2 && total(1, 1) == P1 + P2)) @(posedge clk);
    repeat (50) @(posedge clk);
    check(n_corr[0] == 6, "six data words corrupted");
    check(dlv_bad == 0, "phase 2 deliveries correct");
    for (int s = 0; s < 2; s++) for (int v = 0; v < NUM_VC; v++)
      check(rcvd[s][v] == sent[1 - s][v], $sformatf("side %0d vc %0d count %0d/%0d", s, v, rcvd[s][v], sent[1 - s][v]));
    rd_reg(1, 16 + EV_RX_CRC_ERR, r);
    check(r >= 1, $sformatf("CRC errors counted at receiver (%0d)", r));
    rd_reg(0, 16 + EV_TX_RESENT, r);
    check(r >= 1, $sformatf("packets resent by sender (%0d)", r));
    rd_reg(0, 16 + EV_RESTART_SENT, r);
    check(r >= 1, $sformatf("RESTART sent (%0d)", r));
    rd_reg(1, 16 + EV_RX_PKT_OK, r);
    check(r == P1 + P2, $sformatf("good packets counted once (%0d)", r));
    rd_reg(0, 2, r);
    check(r[15:8] == 8'd0 && r[1:0] == 2'b00, "sender idle, nothing in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog: delivered %0d/%0d and %0d/%0d", total(0, 1), total(0, 0), total(1, 1), total(1, 0));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
