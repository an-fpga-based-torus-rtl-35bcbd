// tb_link_rx: feeds the receiver with hand-built link words (start word,
// header, payload, CRC computed here) and models the eight reception FIFOs.
// Checks: a good packet is written to its VC and committed and an ACK is
// queued; a bad CRC drops the packet, queues a NACK and discards
// everything, good packets included, until RESTART; wrong sequence number,
// a full FIFO and a stray data word are refused with NACK; feedback from
// the peer is decoded from start words and feedback words, also while
// discarding; fb_taken clears the queued feedback.
module tb_link_rx;
  import tnw_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  phy_word_t phy_rx;
  logic [NUM_VC-1:0] fifo_wr, fifo_commit, fifo_abort;
  logic [NUM_VC-1:0] fifo_has_space = '1;
  logic [31:0] fifo_word;
  fb_t fb_type, rfb_type;
  logic [SEQ_W-1:0] fb_seq, rfb_seq;
  logic fb_taken = 1'b0, rfb_valid;
  logic st_discard, ev_pkt_ok, ev_crc_err, ev_seq_err, ev_proto_err, ev_busy;
  int checks = 0, failures = 0;

  link_rx dut (
    .clk (clk), .rst (rst), .phy_rx (phy_rx),
    .fifo_wr (fifo_wr), .fifo_word (fifo_word), .fifo_commit (fifo_commit), .fifo_abort (fifo_abort),
    .fifo_has_space (fifo_has_space),
    .fb_type (fb_type), .fb_seq (fb_seq), .fb_taken (fb_taken),
    .rfb_valid (rfb_valid), .rfb_type (rfb_type), .rfb_seq (rfb_seq),
    .st_discard (st_discard), .ev_pkt_ok (ev_pkt_ok), .ev_crc_err (ev_crc_err),
    .ev_seq_err (ev_seq_err), .ev_proto_err (ev_proto_err), .ev_busy (ev_busy)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // FIFO models: speculative words, committed words
  logic [31:0] spec [NUM_VC][$];
  logic [31:0] comm [NUM_VC][$];
  int n_ok = 0, n_crc = 0, n_seq = 0, n_proto = 0, n_busy = 0, n_rfb = 0;
  fb_t last_rfb_t; int last_rfb_s;
  always @(posedge clk) if (!rst) begin
    for (int v = 0; v < NUM_VC; v++) begin
      if (fifo_wr[v]) spec[v].push_back(fifo_word);
      if (fifo_commit[v]) begin foreach (spec[v][i]) comm[v].push_back(spec[v][i]); spec[v] = {}; end
      if (fifo_abort[v]) spec[v] = {};
    end
    n_ok += int'(ev_pkt_ok); n_crc += int'(ev_crc_err); n_seq += int'(ev_seq_err);
    n_proto += int'(ev_proto_err); n_busy += int'(ev_busy);
    if (rfb_valid) begin n_rfb++; last_rfb_t = rfb_type; last_rfb_s = int'(rfb_seq); end
  end

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

  function automatic phy_word_t cw(logic [7:0] k, fb_t t, int s);
    logic [7:0] b1, b2;
    b1 = {6'd0, t}; b2 = 8'(s);
    return '{ctrl: 4'b0001, data: {~(b1 ^ b2), b2, b1, k}};
  endfunction

  task automatic put(phy_word_t w);
    @(negedge clk) phy_rx = w;
  endtask

  logic [31:0] last_payload [$];
  task automatic send_pkt(int seq, int vc, bit bad_crc, fb_t pfb = FB_NONE, int pseq = 0);
    logic [31:0] w [$];
    w.push_back({8'(seq), 3'(vc), 15'd0, 6'(seq)});
    for (int i = 0; i < 32; i++) w.push_back($urandom());
    last_payload = w[1:32];
    put(cw(K_SOP, pfb, pseq));
    foreach (w[i]) put('{ctrl: 4'b0000, data: w[i]});
    put('{ctrl: 4'b0000, data: ref_crc(w) ^ (bad_crc ? 32'h100 : 32'h0)});
    put(cw(K_IDLE, FB_NONE, 0));
    put(cw(K_IDLE, FB_NONE, 0));
  endtask

  initial begin
    phy_rx = cw(K_IDLE, FB_NONE, 0);
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    send_pkt(0, 3, 0);
    check(comm[3].size() == 32 && comm[3] == last_payload, "good packet committed to VC3");
    check(fb_type == FB_ACK && fb_seq == 8'd0 && n_ok == 1, "ACK 0 queued");
    send_pkt(1, 5, 1);
    check(comm[5].size() == 0 && spec[5].size() == 0 && n_crc == 1, "bad CRC dropped");
    check(fb_type == FB_NACK && fb_seq == 8'd1 && st_discard, "NACK 1, discarding");
    send_pkt(1, 5, 0, FB_ACK, 77);
    check(comm[5].size() == 0 && st_discard, "good packet ignored while discarding");
    check(n_rfb == 1 && last_rfb_t == FB_ACK && last_rfb_s == 77, "peer feedback decoded while discarding");
    put(cw(K_RESTART, FB_NONE, 0));
    put(cw(K_IDLE, FB_NONE, 0));
    check(!st_discard, "RESTART ends discarding");
    send_pkt(1, 5, 0);
    check(comm[5].size() == 32 && comm[5] == last_payload && fb_type == FB_ACK && fb_seq == 8'd1, "packet 1 after RESTART");

    // fb_taken clears the queued feedback
    @(negedge clk) fb_taken = 1'b1;
    @(negedge clk) fb_taken = 1'b0;
    check(fb_type == FB_NONE, "feedback taken");

    // wrong sequence number
    send_pkt(5, 0, 0);
    check(n_seq == 1 && comm[0].size() == 0 && fb_type == FB_NACK && fb_seq == 8'd2, "sequence error -> NACK 2");
    put(cw(K_RESTART, FB_NONE, 0));

    // full FIFO: refused (back-pressure)
    fifo_has_space[2] = 1'b0;
    send_pkt(2, 2, 0);
    check(n_busy == 1 && comm[2].size() == 0 && fb_type == FB_NACK && fb_seq == 8'd2, "full FIFO -> refused with NACK 2");
    put(cw(K_RESTART, FB_NONE, 0));
    fifo_has_space[2] = 1'b1;
    send_pkt(2, 2, 0);
    check(comm[2].size() == 32 && n_ok == 3, "accepted when space returns");

    // feedback word and a stray data word
    put(cw(K_FB, FB_NACK, 4));
    put(cw(K_IDLE, FB_NONE, 0));
    check(last_rfb_t == FB_NACK && last_rfb_s == 4 && n_rfb == 2, "feedback word decoded");
    put('{ctrl: 4'b0000, data: 32'h1234});
    put(cw(K_IDLE, FB_NONE, 0));
    check(n_proto == 1 && st_discard, "data word outside packet -> error");
    put(cw(K_RESTART, FB_NONE, 0));
    // damaged control word
    put('{ctrl: 4'b0001, data: cw(K_FB, FB_ACK, 3).data ^ 32'h0001_0000});
    put(cw(K_IDLE, FB_NONE, 0));
    check(n_proto == 2 && n_rfb == 2, "damaged feedback word rejected");
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
