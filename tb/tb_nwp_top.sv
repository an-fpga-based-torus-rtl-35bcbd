// tb_nwp_top: end-to-end test of one network processor at its default
// sizes, wired as a one-node torus: on every axis the + link's output is
// looped through a channel model into the - link's input and back, so each
// message sent on X+ arrives on X- of the same node (and so on).
//
// The testbench plays the CPU and the PCIe IP: it sends memory-write TLPs
// into the injection windows (Pput, with write-combined fragments in and
// out of order), posts credits, reads and writes link registers with TLPs,
// and collects the up-stream TLPs into a model of host memory. It checks
// every delivered byte against the pattern that was sent, every
// notification, the completion of every register read, and the 35-cycle
// packet spacing on a loaded link (128 bytes per 35 cycles = 0.914 GB/s at
// 250 MHz). It makes each mechanism happen and counts it: re-ordering of
// fragments, stalls of the receive port, piggy-backed feedback, CRC errors
// with NACK, RESTART and resend, refusal of packets when a reception FIFO
// is full (back-pressure), round-robin matching across VCs, and the resend
// timeout.
module tb_nwp_top;
  import tnw_pkg::*;

  localparam logic [63:0] BAR = 64'h0000_0040_0000_0000;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #2 clk = ~clk;

  logic [127:0] rx_data = '0;
  logic         rx_sop = 1'b0, rx_eop = 1'b0, rx_valid = 1'b0, rx_ready;
  logic [127:0] tx_data;
  logic         tx_sop, tx_eop, tx_valid;
  logic         tx_ready = 1'b0;
  phy_word_t    phy_tx [NUM_LINKS];
  phy_word_t    phy_rx [NUM_LINKS];
  logic [NUM_LINKS-1:0] cd = '0, cf = '0;
  int           ncorr [NUM_LINKS];

  nwp_top dut (
    .clk (clk), .rst (rst),
    .rx_data (rx_data), .rx_sop (rx_sop), .rx_eop (rx_eop), .rx_valid (rx_valid), .rx_ready (rx_ready),
    .tx_data (tx_data), .tx_sop (tx_sop), .tx_eop (tx_eop), .tx_valid (tx_valid), .tx_ready (tx_ready),
    .phy_tx (phy_tx), .phy_rx (phy_rx)
  );

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_ch
    phy_model #(.LATENCY(30)) u_ch (
      .clk (clk), .link_up (!rst), .din (phy_tx[l]), .dout (phy_rx[l ^ 1]),
      .corrupt_data (cd[l]), .corrupt_fb (cf[l]), .n_corrupted (ncorr[l])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- patterns
  function automatic logic [127:0] pat(int link, int vc, int msg, int pkt, int chunk);
    logic [31:0] a;
    a = 32'(link) << 28 | 32'(vc) << 24 | 32'(msg) << 16 | 32'(pkt) << 4 | 32'(chunk);
    return {a ^ 32'hA5A5_0000, a * 32'd2654435761, ~a, a};
  endfunction

  // -------------------------------------------------------- Avalon RX driver
  int rx_stall_cycles = 0;
  always @(posedge clk) if (rx_valid && !rx_ready) rx_stall_cycles++;

  // Beats are driven just after a falling edge; rx_ready is stable there and
  // a beat seen with rx_ready high is taken at the next rising edge.
  realtime t_beat_done = -1.0;
  task automatic put_beat(input logic [127:0] d, input logic s, input logic e);
    if ($realtime != t_beat_done) @(negedge clk);
    rx_data = d; rx_sop = s; rx_eop = e; rx_valid = 1'b1;
    while (!rx_ready) @(negedge clk);
    @(negedge clk);
    rx_valid = 1'b0; rx_sop = 1'b0; rx_eop = 1'b0;
    t_beat_done = $realtime;
  endtask

  function automatic logic [127:0] hdr(logic [2:0] fmt, logic [63:0] a, int len, logic [7:0] tag);
    return {a[31:0], a[63:32], 16'h00AA, tag, 8'hFF, fmt, 5'b00000, 8'h00, 6'h00, 10'(len)};
  endfunction

  task automatic mwr(input logic [63:0] a, input logic [127:0] beats [$], input int len_dw);
    put_beat(hdr(FMT_4DW_D, a, len_dw, 8'h00), 1'b1, 1'b0);
    foreach (beats[i]) put_beat(beats[i], 1'b0, i == beats.size() - 1);
  endtask

  function automatic logic [63:0] inj_addr(int link, int vc, int pidx, int chunk);
    return BAR | (64'(link) << 16) | (64'(vc) << 13) | (64'(pidx & 63) << 7) | (64'(chunk) << 4);
  endfunction

  int next_pidx [NUM_LINKS][NUM_VC];
  int n_ooo = 0;   // fragments written before an earlier fragment of their packet

  // Send npkts packets of message `msg` on (link, vc). mode 0: two 64-byte
  // writes in order; 1: second half first; 2: eight 16-byte writes shuffled.
  task automatic send_msg(int link, int vc, int msg, int npkts, int mode);
    for (int p = 0; p < npkts; p++) begin
      int pidx;
      logic [127:0] b [$];
      pidx = next_pidx[link][vc];
      next_pidx[link][vc] = (pidx + 1) % 64;
      if (mode == 0 || mode == 1) begin
        for (int h = 0; h < 2; h++) begin
          int half;
          half = (mode == 1) ? 1 - h : h;
          b = {};
          for (int c = 0; c < 4; c++) b.push_back(pat(link, vc, msg, p, half * 4 + c));
          mwr(inj_addr(link, vc, pidx, half * 4), b, 16);
          if (mode == 1 && h == 0) n_ooo += 4;
        end
      end else begin
        int order [8];
        for (int c = 0; c < 8; c++) order[c] = c;
        order.shuffle();
        for (int c = 0; c < 8; c++) begin
          bit later;
          later = 1'b0;
          for (int j = c + 1; j < 8; j++) if (order[j] < order[c]) later = 1'b1;
          if (later) n_ooo++;
          b = {pat(link, vc, msg, p, order[c])};
          mwr(inj_addr(link, vc, pidx, order[c]), b, 4);
        end
      end
    end
  endtask

  task automatic post_credit(int link, int vc, logic [63:0] dest, int npkts, logic [63:0] naddr);
    logic [127:0] b [$];
    b = {{naddr, 16'(npkts), dest[47:0]}};
    mwr(BAR | (64'd1 << 19) | (64'(link) << 16) | (64'(vc) << 13), b, 4);
  endtask

  task automatic reg_write(int link, int idx, logic [31:0] v);
    logic [127:0] b [$];
    b = {{4{v}}};
    mwr(BAR | (64'd2 << 19) | (64'(link) << 16) | (64'(idx) << 2), b, 1);
  endtask

  // -------------------------------------------------------- Avalon TX monitor
  logic [127:0] host [longint unsigned];
  logic [127:0] notes [longint unsigned];
  logic [31:0]  cpl_q [$];
  int           n_notes = 0, n_data_tlps = 0;
  longint unsigned cur_addr;
  int           cur_len, cur_beat;
  bit           in_tlp = 1'b0;
  int           vc_trace [$];   // destination region of each data TLP, in order

  always @(negedge clk) if (!rst) tx_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    if (!rst && tx_valid && tx_ready) begin
      if (tx_sop) begin
        if (tx_data[28:24] == TYPE_CPL) begin
          cpl_q.push_back(tx_data[127:96]);
          if (!tx_eop) begin failures++; $display("FAIL: completion without eop"); end
        end else begin
          cur_addr = {tx_data[95:64], tx_data[127:96]};
          cur_len  = int'(tx_data[9:0]);
          cur_beat = 0;
          in_tlp   = 1'b1;
          if (cur_len == 32) begin
            n_data_tlps++;
            vc_trace.push_back(int'(cur_addr >> 16));
          end
        end
      end else if (in_tlp) begin
        if (cur_len == 4) begin
          notes[cur_addr] = tx_data;
          n_notes++;
        end else begin
          host[cur_addr + 64'(16 * cur_beat)] = tx_data;
        end
        cur_beat++;
        if (tx_eop) begin
          in_tlp = 1'b0;
          if (cur_beat != cur_len / 4) begin failures++; $display("FAIL: TLP length"); end
        end
      end
    end
  end

  task automatic reg_read(int link, int idx, output logic [31:0] v);
    int n;
    n = cpl_q.size();
    put_beat(hdr(FMT_4DW_ND, BAR | (64'd2 << 19) | (64'(link) << 16) | (64'(idx) << 2), 1, 8'h33), 1'b1, 1'b1);
    for (int t = 0; t < 2000 && cpl_q.size() == n; t++) @(posedge clk);
    check(cpl_q.size() == n + 1, "register read completed");
    v = (cpl_q.size() > n) ? cpl_q.pop_back() : 32'hDEAD_BEEF;
  endtask

  // ---------------------------------------------------------- link monitors
  int n_piggy = 0;
  int sop_gap_ok = 0, sop_gap_bad = 0;
  int last_sop [NUM_LINKS];
  int cyc = 0;
  bit measure = 1'b0;
  always @(posedge clk) begin
    cyc++;
    for (int l = 0; l < NUM_LINKS; l++) begin
      if (phy_tx[l].ctrl == 4'b0001 && phy_tx[l].data[7:0] == K_SOP) begin
        if (phy_tx[l].data[9:8] != 2'd0) n_piggy++;
        if (measure && l == 0) begin
          if (cyc - last_sop[0] == 35) sop_gap_ok++;
          else if (cyc - last_sop[0] < 35) sop_gap_bad++;
        end
        last_sop[l] = cyc;
      end
    end
  end

  // --------------------------------------------------------------- checking
  task automatic wait_notes(int n, int max_cycles);
    for (int t = 0; t < max_cycles && n_notes < n; t++) @(posedge clk);
    check(n_notes >= n, $sformatf("%0d notifications (have %0d)", n, n_notes));
  endtask

  task automatic check_msg(int link, int vc, int msg, int npkts, logic [63:0] dest, logic [63:0] naddr);
    int bad;
    bad = 0;
    for (int p = 0; p < npkts; p++)
      for (int c = 0; c < 8; c++) begin
        longint unsigned a;
        a = dest + 64'(p * 128 + c * 16);
        if (!host.exists(a) || host[a] !== pat(link, vc, msg, p, c)) bad++;
      end
    check(bad == 0, $sformatf("message %0d data (link %0d vc %0d): %0d bad beats", msg, link, vc, bad));
    check(notes.exists(naddr) && notes[naddr][127:96] == 32'd1 &&
          notes[naddr][47:32] == 16'(npkts) && notes[naddr][2:0] == 3'(vc) &&
          notes[naddr][18:16] == 3'(link ^ 1),
          $sformatf("message %0d notification", msg));
  endtask

  function automatic logic [63:0] dst(int msg);
    return 64'h1_0000_0000 + 64'(msg) * 64'h1_0000;
  endfunction
  function automatic logic [63:0] nad(int msg);
    return 64'h2_0000_0000 + 64'(msg) * 64'h100;
  endfunction

  logic [31:0] rv;
  int cnt_crc, cnt_resent, cnt_restart, cnt_busy, cnt_timeout, cnt_txpkt, rr_switch;

  initial begin
    foreach (next_pidx[l, v]) next_pidx[l][v] = 0;
    foreach (last_sop[l]) last_sop[l] = 0;
    repeat (5) @(posedge clk);
    #1 rst = 1'b0;
    repeat (5) @(posedge clk);
    #1;

    // Phase A: one 4-packet message on every link, traffic in both
    // directions of each axis, all three fragment orders.
    for (int l = 0; l < NUM_LINKS; l++) post_credit(l ^ 1, l, dst(l), 4, nad(l));
    for (int l = 0; l < NUM_LINKS; l++) send_msg(l, l, l, 4, l % 3);
    wait_notes(6, 20000);
    for (int l = 0; l < NUM_LINKS; l++) check_msg(l, l, l, 4, dst(l), nad(l));

    // Phase B: a long message on X+ with the credit posted first: the link
    // must send back to back, one packet every 35 cycles.
    post_credit(1, 0, dst(10), 32, nad(10));
    measure = 1'b1;
    send_msg(0, 0, 10, 32, 0);
    wait_notes(7, 20000);
    measure = 1'b0;
    check_msg(0, 0, 10, 32, dst(10), nad(10));
    check(sop_gap_ok >= 16 && sop_gap_bad == 0,
          $sformatf("packet spacing 35 cycles: %0d gaps of 35, %0d shorter", sop_gap_ok, sop_gap_bad));

    // Phase C: a damaged data word on Y+ -> Y-.
    post_credit(3, 1, dst(11), 8, nad(11));
    fork
      send_msg(2, 1, 11, 8, 0);
      begin repeat (120) @(posedge clk); #1 cd[2] = 1'b1; @(posedge clk); #1 cd[2] = 1'b0; end
    join
    wait_notes(8, 20000);
    check_msg(2, 1, 11, 8, dst(11), nad(11));
    reg_read(3, 16 + EV_RX_CRC_ERR, rv);    cnt_crc = int'(rv);
    reg_read(2, 16 + EV_TX_RESENT, rv);     cnt_resent = int'(rv);
    reg_read(2, 16 + EV_RESTART_SENT, rv);  cnt_restart = int'(rv);
    check(ncorr[2] == 1 && cnt_crc >= 1, $sformatf("CRC error detected (%0d)", cnt_crc));
    check(cnt_resent >= 1 && cnt_restart >= 1, $sformatf("resend after NACK: %0d resent, %0d restarts", cnt_resent, cnt_restart));

    // Phase D: back-pressure. Eight packets on Z+ VC 5 with no credit: the
    // reception FIFO holds four, the rest are refused until a credit drains it.
    send_msg(4, 5, 12, 8, 0);
    repeat (3000) @(posedge clk);
    reg_read(5, 16 + EV_RX_BUSY, rv);  cnt_busy = int'(rv);
    check(cnt_busy >= 1, $sformatf("refused packets while the FIFO is full (%0d)", cnt_busy));
    reg_read(4, 2, rv);
    check(rv[0] == 1'b1 && rv[15:8] != 8'd0, $sformatf("sender in resend mode with packets in flight (status %h)", rv));
    post_credit(5, 5, dst(12), 8, nad(12));
    wait_notes(9, 40000);
    check_msg(4, 5, 12, 8, dst(12), nad(12));

    // Phase E: round robin. Two VCs of X- hold packets before their credits
    // arrive; deliveries must alternate between them.
    send_msg(1, 2, 13, 4, 0);
    send_msg(1, 3, 14, 4, 0);
    repeat (1500) @(posedge clk);
    vc_trace = {};
    post_credit(0, 2, dst(13), 4, nad(13));
    post_credit(0, 3, dst(14), 4, nad(14));
    wait_notes(11, 20000);
    check_msg(1, 2, 13, 4, dst(13), nad(13));
    check_msg(1, 3, 14, 4, dst(14), nad(14));
    rr_switch = 0;
    for (int i = 1; i < vc_trace.size(); i++) if (vc_trace[i] != vc_trace[i-1]) rr_switch++;
    check(rr_switch >= 3, $sformatf("round-robin between VCs: %0d switches", rr_switch));

    // Phase F: timeout. Set a shorter timeout through the register, then
    // damage every feedback word from Z- back to Z+ while one packet goes
    // Z+ -> Z-; the sender never sees its ACK and must time out and resend.
    reg_write(4, 1, 32'd1000);
    reg_read(4, 1, rv);
    check(rv == 32'd1000, "TIMEOUT register written and read back");
    post_credit(5, 6, dst(15), 1, nad(15));
    #1 cf[5] = 1'b1;
    send_msg(4, 6, 15, 1, 2);
    repeat (400) @(posedge clk);
    #1 cf[5] = 1'b0;
    wait_notes(12, 20000);
    repeat (2000) @(posedge clk);
    check_msg(4, 6, 15, 1, dst(15), nad(15));
    reg_read(4, 16 + EV_TIMEOUT, rv);  cnt_timeout = int'(rv);
    check(cnt_timeout >= 1, $sformatf("timeout resend (%0d)", cnt_timeout));
    reg_read(4, 2, rv);
    check(rv[0] == 1'b0 && rv[15:8] == 8'd0, $sformatf("Z+ back to normal mode (status %h)", rv));

    // Final register checks: packets sent on X+ = 4 + 32.
    reg_read(0, 16 + EV_TX_PKT, rv);  cnt_txpkt = int'(rv);
    check(cnt_txpkt == 36, $sformatf("X+ sent 36 packets (%0d)", cnt_txpkt));
    reg_read(1, 16 + EV_DELIVERED, rv);
    check(rv == 32'd36, $sformatf("X- delivered 36 packets (%0d)", rv));
    reg_write(1, 16 + EV_DELIVERED, 32'd0);
    reg_read(1, 16 + EV_DELIVERED, rv);
    check(rv == 32'd0, "debug counter cleared by a write");

    // Every mechanism must have happened.
    check(n_ooo > 0, $sformatf("re-ordered fragments: %0d", n_ooo));
    check(rx_stall_cycles > 0, $sformatf("receive-port stall cycles: %0d", rx_stall_cycles));
    check(n_piggy > 0, $sformatf("feedback piggy-backed on packets: %0d", n_piggy));
    check(n_data_tlps == 4 * 6 + 32 + 8 + 8 + 8 + 1, $sformatf("data TLPs: %0d", n_data_tlps));
    $display("mechanisms: reorder=%0d rx_stall=%0d piggyback=%0d crc_err=%0d resent=%0d restart=%0d busy=%0d rr_switch=%0d timeout=%0d",
             n_ooo, rx_stall_cycles, n_piggy, cnt_crc, cnt_resent, cnt_restart, cnt_busy, rr_switch, cnt_timeout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
