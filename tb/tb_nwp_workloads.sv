// tb_nwp_workloads: runs the two measurements the NWP is judged by on the
// complete design at its default sizes, as a one-node torus (X+ looped to
// X-, Y+ to Y-, Z+ to Z-) with a channel latency of 60 cycles, i.e. the
// 0.24 us that two PHYs add at 250 MHz.
//
//  1. Aggregate bandwidth with 1, 2 and 3 links sending at once (X+, Y+,
//     Z+). The testbench writes 64-byte write-combined fragments
//     round-robin over the active links as fast as the PCIe receive port
//     takes them, with credits posted in advance. On each active link it
//     measures the spacing of packet starts on the PHY side and the rate
//     of data delivered to host memory: a link must reach its
//     theoretical 0.914 GB/s (128 bytes per 35 cycles, 4 ns per cycle),
//     and the aggregate must scale with the number of links.
//  2. Latency of a 128-byte message on an idle NWP: cycles from the last
//     injection beat accepted to the memory write of the packet leaving
//     the NWP ("NWP to NWP" time, which includes the 0.24 us channel), and
//     to the end of the notification. The first must stay below 0.6 us
//     (150 cycles).
// Every delivered byte is compared with the pattern sent.
module tb_nwp_workloads;
  import tnw_pkg::*;

  localparam logic [63:0] BAR = 64'h0000_0040_0000_0000;
  localparam int NPKT = 40;   // packets per active link in each bandwidth run

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #2 clk = ~clk;

  logic [127:0] rx_data = '0;
  logic         rx_sop = 1'b0, rx_eop = 1'b0, rx_valid = 1'b0, rx_ready;
  logic [127:0] tx_data;
  logic         tx_sop, tx_eop, tx_valid;
  logic         tx_ready = 1'b1;
  phy_word_t    phy_tx [NUM_LINKS];
  phy_word_t    phy_rx [NUM_LINKS];
  int           ncorr [NUM_LINKS];

  nwp_top dut (
    .clk (clk), .rst (rst),
    .rx_data (rx_data), .rx_sop (rx_sop), .rx_eop (rx_eop), .rx_valid (rx_valid), .rx_ready (rx_ready),
    .tx_data (tx_data), .tx_sop (tx_sop), .tx_eop (tx_eop), .tx_valid (tx_valid), .tx_ready (tx_ready),
    .phy_tx (phy_tx), .phy_rx (phy_rx)
  );

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_ch
    phy_model #(.LATENCY(60)) u_ch (
      .clk (clk), .link_up (!rst), .din (phy_tx[l]), .dout (phy_rx[l ^ 1]),
      .corrupt_data (1'b0), .corrupt_fb (1'b0), .n_corrupted (ncorr[l])
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

  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [127:0] pat(int link, int run, int pkt, int chunk);
    logic [31:0] a;
    a = 32'(link) << 28 | 32'(run) << 20 | 32'(pkt) << 4 | 32'(chunk);
    return {a ^ 32'h5A5A_0000, a * 32'd2246822519, ~a, a};
  endfunction

  // Avalon receive driver: one beat per cycle while rx_ready is high
  realtime t_beat_done = -1.0;
  int      last_beat_cyc = 0;
  task automatic put_beat(input logic [127:0] d, input logic s, input logic e);
    if ($realtime != t_beat_done) @(negedge clk);
    rx_data = d; rx_sop = s; rx_eop = e; rx_valid = 1'b1;
    while (!rx_ready) @(negedge clk);
    @(negedge clk);
    rx_valid = 1'b0; rx_sop = 1'b0; rx_eop = 1'b0;
    t_beat_done = $realtime;
    last_beat_cyc = cyc;
  endtask

  function automatic logic [127:0] hdr(logic [2:0] fmt, logic [63:0] a, int len);
    return {a[31:0], a[63:32], 16'h00AA, 8'h00, 8'hFF, fmt, 5'b00000, 8'h00, 6'h00, 10'(len)};
  endfunction

  task automatic write64(int link, int pidx, int half, int run, int pkt);
    put_beat(hdr(FMT_4DW_D, BAR | (64'(link) << 16) | (64'(pidx & 63) << 7) | (64'(half * 4) << 4), 16), 1'b1, 1'b0);
    for (int c = 0; c < 4; c++) put_beat(pat(link, run, pkt, half * 4 + c), 1'b0, c == 3);
  endtask

  task automatic post_credit(int link, logic [63:0] dest, int npkts, logic [63:0] naddr);
    put_beat(hdr(FMT_4DW_D, BAR | (64'd1 << 19) | (64'(link) << 16), 4), 1'b1, 1'b0);
    put_beat({naddr, 16'(npkts), dest[47:0]}, 1'b0, 1'b1);
  endtask

  // Avalon transmit monitor: host memory model
  logic [127:0] host [longint unsigned];
  int           n_notes = 0;
  int           wr_hdr_cyc = 0, note_cyc = 0;
  longint unsigned cur_addr;
  int           cur_len, cur_beat;
  bit           in_tlp = 1'b0;
  int           dlv_bytes [NUM_LINKS];
  int           dlv_first [NUM_LINKS], dlv_last [NUM_LINKS];

  always @(posedge clk) begin
    if (!rst && tx_valid && tx_ready) begin
      if (tx_sop) begin
        cur_addr = {tx_data[95:64], tx_data[127:96]};
        cur_len  = int'(tx_data[9:0]);
        cur_beat = 0;
        in_tlp   = 1'b1;
        if (cur_len == 32) wr_hdr_cyc = cyc;
      end else if (in_tlp) begin
        int rl;
        if (cur_len == 32) begin
          host[cur_addr + 64'(16 * cur_beat)] = tx_data;
          rl = int'((cur_addr >> 20) & 7);
          if (dlv_bytes[rl] == 0) dlv_first[rl] = cyc;
          dlv_bytes[rl] += 16;
          dlv_last[rl] = cyc;
        end
        cur_beat++;
        if (tx_eop) begin
          in_tlp = 1'b0;
          if (cur_len == 4) begin n_notes++; note_cyc = cyc; end
        end
      end
    end
  end

  // PHY-side packet starts per link
  int sop_n [NUM_LINKS], sop_first [NUM_LINKS], sop_last [NUM_LINKS];
  always @(posedge clk) if (!rst)
    for (int l = 0; l < NUM_LINKS; l++)
      if (phy_tx[l].ctrl == 4'b0001 && phy_tx[l].data[7:0] == K_SOP) begin
        if (sop_n[l] == 0) sop_first[l] = cyc;
        sop_n[l]++;
        sop_last[l] = cyc;
      end

  int pidx [NUM_LINKS];

  // destination of packets received on link r in run `run`
  function automatic logic [63:0] dest(int run, int r);
    return 64'h1_0000_0000 + 64'(run) * 64'h100_0000 + 64'(r) * 64'h10_0000;
  endfunction

  task automatic bw_run(int run, int nlinks);
    int links [3] = '{0, 2, 4};
    int t0;
    real agg, lbw, dbw;
    foreach (sop_n[l]) begin sop_n[l] = 0; dlv_bytes[l] = 0; end
    n_notes = 0;
    for (int i = 0; i < nlinks; i++)
      post_credit(links[i] ^ 1, dest(run, links[i] ^ 1), NPKT, 64'h9_0000_0000 + 64'(run * 16 + i) * 16);
    t0 = cyc;
    for (int p = 0; p < NPKT; p++)
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < nlinks; i++) begin
          write64(links[i], pidx[links[i]], h, run, p);
          if (h == 1) pidx[links[i]] = (pidx[links[i]] + 1) % 64;
        end
    while (n_notes < nlinks && cyc - t0 < 20000) @(posedge clk);
    check(n_notes == nlinks, $sformatf("run %0d: all messages notified", run));
    agg = 0.0;
    for (int i = 0; i < nlinks; i++) begin
      int l, r;
      l = links[i]; r = l ^ 1;
      // PHY rate: (NPKT-1) packet starts in (last - first) cycles, 4 ns per cycle
      lbw = real'((sop_n[l] - 1) * 128) / (real'(sop_last[l] - sop_first[l]) * 4.0);
      dbw = real'(dlv_bytes[r] - 16) / (real'(dlv_last[r] - dlv_first[r]) * 4.0);
      agg += dbw;
      $display("run %0d (%0d links): link %0d packets %0d, link rate %0.3f GB/s, delivered %0d B at %0.3f GB/s",
               run, nlinks, l, sop_n[l], lbw, dlv_bytes[r], dbw);
      check(sop_n[l] == NPKT, $sformatf("link %0d sent each packet once", l));
      check(sop_last[l] - sop_first[l] == (NPKT - 1) * 35, $sformatf("link %0d back to back at 35 cycles per packet", l));
      check(dlv_bytes[r] == NPKT * 128, $sformatf("link %0d all bytes delivered", r));
      check(dbw > 0.85, $sformatf("link %0d delivery rate %0.3f GB/s near 0.914", r, dbw));
      for (int p = 0; p < NPKT; p++)
        for (int c = 0; c < 8; c++) begin
          longint unsigned a;
          a = dest(run, r) + 64'(p * 128 + c * 16);
          check(host.exists(a) && host[a] == pat(l, run, p, c), "delivered data");
        end
    end
    $display("run %0d: aggregate delivered bandwidth %0.3f GB/s over %0d link(s)", run, agg, nlinks);
    check(agg > 0.85 * nlinks, "aggregate bandwidth scales with the number of links");
  endtask

  initial begin
    int t_in, lat_pkt, lat_note;
    foreach (pidx[l]) begin pidx[l] = 0; sop_n[l] = 0; dlv_bytes[l] = 0; end
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (10) @(posedge clk);

    bw_run(1, 1);
    bw_run(2, 2);
    bw_run(3, 3);

    // latency of one 128-byte message on an idle NWP
    repeat (200) @(posedge clk);
    n_notes = 0;
    post_credit(3, 64'h7_0000_0000, 1, 64'h7_1000_0000);
    repeat (20) @(posedge clk);
    write64(2, pidx[2], 0, 9, 0);
    write64(2, pidx[2], 1, 9, 0);
    t_in = last_beat_cyc;
    while (n_notes == 0 && cyc - t_in < 5000) @(posedge clk);
    lat_pkt  = wr_hdr_cyc - t_in;
    lat_note = note_cyc - t_in;
    $display("128-byte message: %0d cycles (%0d ns) to the memory write, %0d cycles (%0d ns) to the notification",
             lat_pkt, lat_pkt * 4, lat_note, lat_note * 4);
    check(n_notes == 1, "latency message notified");
    check(lat_pkt > 0 && lat_pkt * 4 <= 600, "NWP-to-NWP latency within 0.6 us");
    for (int c = 0; c < 8; c++)
      check(host[64'h7_0000_0000 + 64'(c * 16)] == pat(2, 9, 0, c), "latency message data");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
