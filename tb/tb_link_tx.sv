// tb_link_tx: drives the transmitter with a model of txFifo and with peer
// feedback, and decodes what it puts on the link. Reference CRC and packet
// layout are computed here. Checks: start word + header + 32 words + CRC,
// sequence numbers, back-to-back packets every 35 cycles, the in-flight
// window limit (NBUF), cumulative ACK, NACK -> RESTART -> resend of the
// unacknowledged packets with identical contents, the end of resend mode,
// feedback carried in start words and in feedback words, and the timeout.
module tb_link_tx;
  import tnw_pkg::*;
  localparam int NBUF = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic cfg_enable = 1'b1;
  logic [31:0] cfg_timeout = 32'd100000;
  logic fifo_pkt_avail, fifo_rd;
  logic [31:0] fifo_word;
  tx_attr_t fifo_attr;
  fb_t fb_type = FB_NONE, rfb_type = FB_NONE;
  logic [SEQ_W-1:0] fb_seq = '0, rfb_seq = '0;
  logic fb_taken, rfb_valid = 1'b0;
  phy_word_t phy_tx;
  logic st_resend, ev_pkt, ev_resent, ev_restart, ev_timeout, ev_nack;
  logic [7:0] st_in_flight;
  int checks = 0, failures = 0;

  link_tx #(.NBUF(NBUF)) dut (
    .clk (clk), .rst (rst), .cfg_enable (cfg_enable), .cfg_timeout (cfg_timeout),
    .fifo_pkt_avail (fifo_pkt_avail), .fifo_word (fifo_word), .fifo_attr (fifo_attr), .fifo_rd (fifo_rd),
    .fb_type (fb_type), .fb_seq (fb_seq), .fb_taken (fb_taken),
    .rfb_valid (rfb_valid), .rfb_type (rfb_type), .rfb_seq (rfb_seq),
    .phy_tx (phy_tx), .st_resend (st_resend), .st_in_flight (st_in_flight),
    .ev_pkt (ev_pkt), .ev_resent (ev_resent), .ev_restart (ev_restart), .ev_timeout (ev_timeout), .ev_nack (ev_nack)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // txFifo model
  logic [31:0] fq [$];
  tx_attr_t    aq [$];
  assign fifo_pkt_avail = (fq.size() >= 32);
  assign fifo_word = (fq.size() > 0) ? fq[0] : 32'd0;
  assign fifo_attr = (aq.size() > 0) ? aq[0] : '0;
  always @(posedge clk) if (fifo_rd) begin
    void'(fq.pop_front());
    if (fq.size() % 32 == 0) void'(aq.pop_front());
  end
  logic [31:0] sent [int][32];   // payload per packet number
  int n_loaded = 0;
  task automatic load_pkt();
    for (int i = 0; i < 32; i++) begin
      sent[n_loaded][i] = $urandom();
      fq.push_back(sent[n_loaded][i]);
    end
    aq.push_back('{vc: 3'(n_loaded), pidx: 6'(n_loaded)});
    n_loaded++;
  endtask

  function automatic logic [31:0] ref_crc(logic [31:0] w [$]);
    logic [31:0] r;
    r = 32'hFFFF_FFFF;
    foreach (w[i])
      for (int b = 31; b >= 0; b--) begin
        logic f;
        f = r[31] ^ w[i][b];
        r = r << 1;
        if (f) r = r ^ 32'h04C1_1DB7;
      end
    return r;
  endfunction

  // link decoder
  int cyc = 0, pos = -1, n_restart = 0, n_fbw = 0, n_pig = 0;
  int seqs [$];      // sequence numbers of packets seen, in order
  int sop_cyc [$];
  logic [31:0] cur [$];
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (pos < 0) begin
        if (phy_tx.ctrl == 4'b0001) begin
          if (phy_tx.data[7:0] == K_SOP) begin
            pos = 0; cur = {}; sop_cyc.push_back(cyc);
            if (phy_tx.data[9:8] != 2'd0) n_pig++;
          end else if (phy_tx.data[7:0] == K_RESTART) n_restart++;
          else if (phy_tx.data[7:0] == K_FB) n_fbw++;
          else if (phy_tx.data[7:0] != K_IDLE) begin failures++; $display("FAIL: bad K"); end
        end else begin failures++; $display("FAIL: data word outside packet"); end
      end else begin
        if (phy_tx.ctrl != 4'b0000) begin failures++; $display("FAIL: control word inside packet"); end
        if (pos < 33) cur.push_back(phy_tx.data);
        else begin
          pkt_hdr_t h;
          int n;
          h = pkt_hdr_t'(cur[0]);
          n = int'(h.pidx);
          checks++;
          if (phy_tx.data != ref_crc(cur)) begin failures++; $display("FAIL: CRC of seq %0d", h.seq); end
          checks++;
          if (!sent.exists(n) || int'(h.vc) != n % 8) begin failures++; $display("FAIL: header"); end
          else for (int i = 0; i < 32; i++) if (cur[i+1] != sent[n][i]) begin
            failures++; $display("FAIL: payload seq %0d word %0d", h.seq, i); break;
          end
          seqs.push_back(int'(h.seq));
          pos = -2;
        end
        pos++;
      end
    end
  end

  task automatic feedback(fb_t t, int s);
    @(negedge clk); rfb_valid = 1'b1; rfb_type = t; rfb_seq = SEQ_W'(s);
    @(negedge clk); rfb_valid = 1'b0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // 1: three packets back to back
    repeat (3) load_pkt();
    repeat (120) @(posedge clk);
    check(seqs.size() == 3 && seqs[0] == 0 && seqs[2] == 2, "three packets, seq 0..2");
    check(sop_cyc.size() == 3 && sop_cyc[1] - sop_cyc[0] == 35 && sop_cyc[2] - sop_cyc[1] == 35,
          "35 cycles per packet");
    check(st_in_flight == 8'd3, "three in flight");

    // 2: window limit: three more packets, only one fits (NBUF = 4)
    repeat (3) load_pkt();
    repeat (150) @(posedge clk);
    check(seqs.size() == 4 && st_in_flight == 8'd4, $sformatf("window limit (%0d sent)", seqs.size()));

    // 3: cumulative ACK of seq 0..1 frees two slots; two more go out
    feedback(FB_ACK, 1);
    repeat (100) @(posedge clk);
    check(seqs.size() == 6 && st_in_flight == 8'd4, $sformatf("after ACK: %0d sent, %0d in flight", seqs.size(), st_in_flight));

    // 4: NACK(3): RESTART, then 3, 4, 5 again
    feedback(FB_NACK, 3);
    repeat (150) @(posedge clk);
    check(n_restart == 1, "RESTART sent");
    check(seqs.size() == 9 && seqs[6] == 3 && seqs[7] == 4 && seqs[8] == 5, "packets 3..5 resent");
    check(st_resend, "in resend mode until all acknowledged");
    load_pkt();
    repeat (60) @(posedge clk);
    check(seqs.size() == 9, "no new data during resend mode");
    feedback(FB_ACK, 5);
    repeat (60) @(posedge clk);
    check(!st_resend && seqs.size() == 10 && seqs[9] == 6, "resend mode left, new packet 6 sent");
    feedback(FB_ACK, 6);

    // 5: feedback: piggy-backed in a start word, and alone in a feedback word
    @(negedge clk); fb_type = FB_ACK; fb_seq = 8'd42;
    load_pkt();
    wait (fb_taken); @(negedge clk); fb_type = FB_NONE;
    repeat (50) @(posedge clk);
    check(n_pig == 1 && n_fbw == 0, "ACK carried in start word");
    @(negedge clk); fb_type = FB_NACK; fb_seq = 8'd9;
    wait (fb_taken); @(negedge clk); fb_type = FB_NONE;
    repeat (5) @(posedge clk);
    check(n_fbw == 1, "feedback word when no packet is ready");
    feedback(FB_ACK, 7);

    // 6: timeout: no feedback for a packet
    cfg_timeout = 32'd200;
    load_pkt();
    repeat (300) @(posedge clk);
    check(n_restart == 2 && seqs[seqs.size()-1] == 8 && seqs.size() == 13, "timeout -> RESTART and resend");
    feedback(FB_ACK, 8);
    repeat (10) @(posedge clk);
    check(!st_resend && st_in_flight == 0, "idle after final ACK");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
