// tb_match: models the eight reception FIFOs and posts credits, then reads
// the delivery stream with random stalls. Checks: data and destination
// address of every beat (dest + 128 * packet number), that nothing moves
// without both a credit and a whole packet, the notification flag on the
// last packet of each credit only, the credit fields passed along, round-
// robin alternation between VCs with pending matches, and the overflow
// event when a credit queue is full.
module tb_match;
  import tnw_pkg::*;
  localparam int CR_DEPTH = 2;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic cr_valid = 1'b0;
  logic [VC_W-1:0] cr_vc = '0;
  credit_t cr_data = '0;
  logic [NUM_VC-1:0] pkt_avail, fifo_rd;
  logic [127:0] fifo_data [NUM_VC];
  logic dlv_valid, dlv_ready = 1'b0, dlv_first, dlv_last, dlv_notify, ev_credit_ovf, ev_delivered;
  logic [127:0] dlv_data;
  logic [63:0] dlv_addr, dlv_notify_addr;
  logic [VC_W-1:0] dlv_vc;
  logic [15:0] dlv_npkts;
  int checks = 0, failures = 0;

  match #(.CR_DEPTH(CR_DEPTH)) dut (
    .clk (clk), .rst (rst), .cr_valid (cr_valid), .cr_vc (cr_vc), .cr_data (cr_data),
    .pkt_avail (pkt_avail), .fifo_data (fifo_data), .fifo_rd (fifo_rd),
    .dlv_valid (dlv_valid), .dlv_ready (dlv_ready), .dlv_data (dlv_data), .dlv_first (dlv_first),
    .dlv_last (dlv_last), .dlv_addr (dlv_addr), .dlv_vc (dlv_vc), .dlv_notify (dlv_notify),
    .dlv_notify_addr (dlv_notify_addr), .dlv_npkts (dlv_npkts),
    .ev_credit_ovf (ev_credit_ovf), .ev_delivered (ev_delivered)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] fq [NUM_VC][$];
  for (genvar v = 0; v < NUM_VC; v++) begin : g_m
    assign pkt_avail[v] = (fq[v].size() >= 8);
    assign fifo_data[v] = (fq[v].size() > 0) ? fq[v][0] : '0;
  end

  function automatic logic [127:0] beat(int vc, int pkt, int b);
    return {32'(vc), 32'(pkt), 32'(b), 32'hC0FFEE00 ^ 32'(vc * 1000 + pkt * 8 + b)};
  endfunction
  int n_pushed [NUM_VC];
  task automatic push_pkt(int vc);
    for (int b = 0; b < 8; b++) fq[vc].push_back(beat(vc, n_pushed[vc], b));
    n_pushed[vc]++;
  endtask

  // expected credits per VC
  credit_t cq [NUM_VC][$];
  int done [NUM_VC];
  int delivered [NUM_VC];
  int bcount = 0, n_ovf = 0, n_notify = 0;
  int vc_order [$];

  always @(negedge clk) dlv_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (!rst) begin
    if (ev_credit_ovf) n_ovf++;
    if (dlv_valid && dlv_ready) begin
      int v;
      v = int'(dlv_vc);
      checks++;
      if (cq[v].size() == 0) begin failures++; $display("FAIL: delivery without credit on VC %0d", v); end
      else begin
        logic [63:0] ea;
        ea = 64'(cq[v][0].dest_addr) + 64'(done[v] * 128);
        if (dlv_data != beat(v, delivered[v], bcount) || dlv_addr != ea ||
            dlv_first != (bcount == 0) || dlv_last != (bcount == 7) ||
            dlv_notify != (done[v] + 1 == int'(cq[v][0].npkts)) ||
            dlv_notify_addr != cq[v][0].notify_addr || dlv_npkts != cq[v][0].npkts) begin
          failures++;
          $display("FAIL: VC %0d packet %0d beat %0d", v, delivered[v], bcount);
        end
        if (fifo_rd != NUM_VC'(1) << v) begin failures++; $display("FAIL: FIFO read strobe"); end
        if (bcount == 0) vc_order.push_back(v);
        bcount = (bcount + 1) % 8;
        if (bcount == 0) begin
          delivered[v]++;
          done[v]++;
          if (done[v] == int'(cq[v][0].npkts)) begin done[v] = 0; void'(cq[v].pop_front()); n_notify++; end
        end
      end
    end
  end
  always @(posedge clk) for (int v = 0; v < NUM_VC; v++) if (fifo_rd[v]) void'(fq[v].pop_front());

  task automatic credit(int vc, int npkts);
    credit_t c;
    c.dest_addr = 48'h1000_0000 + 48'(vc) * 48'h10_0000 + 48'(cq[vc].size()) * 48'h1_0000;
    c.npkts = 16'(npkts);
    c.notify_addr = 64'hFEED_0000 + 64'(vc * 64);
    @(negedge clk); cr_valid = 1'b1; cr_vc = 3'(vc); cr_data = c;
    if (cq[vc].size() < CR_DEPTH) cq[vc].push_back(c);
    @(negedge clk); cr_valid = 1'b0;
  endtask

  initial begin
    foreach (n_pushed[v]) begin n_pushed[v] = 0; done[v] = 0; delivered[v] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // packets without credit do not move
    push_pkt(1); push_pkt(1);
    repeat (30) @(posedge clk);
    check(fq[1].size() == 16 && !dlv_valid, "no delivery without credit");
    // credit without packet does not move
    credit(4, 1);
    repeat (30) @(posedge clk);
    check(!dlv_valid, "no delivery without packet");
    // two-packet credit on VC1
    credit(1, 2);
    repeat (60) @(posedge clk);
    check(fq[1].size() == 0 && n_notify == 1, "VC1 credit of two packets delivered");
    // round robin: VCs 2, 5, 6 each hold 3 packets, credits for all
    for (int i = 0; i < 3; i++) begin push_pkt(2); push_pkt(5); push_pkt(6); end
    vc_order = {};
    credit(2, 3); credit(5, 3); credit(6, 3);
    repeat (200) @(posedge clk);
    check(fq[2].size() == 0 && fq[5].size() == 0 && fq[6].size() == 0 && n_notify == 4, "three VCs drained");
    check(vc_order.size() == 9, "nine packets");
    for (int i = 0; i + 2 < vc_order.size(); i++)
      check(vc_order[i] != vc_order[i+1] && vc_order[i] != vc_order[i+2], "round-robin order");
    // VC4 credit now gets its packet; credit overflow on VC7
    push_pkt(4);
    credit(7, 1); credit(7, 1); credit(7, 1);
    repeat (50) @(posedge clk);
    check(n_notify == 5, "VC4 delivered");
    check(n_ovf == 1, "credit overflow counted");
    for (int i = 0; i < 2; i++) push_pkt(7);
    repeat (80) @(posedge clk);
    check(n_notify == 7 && cq[7].size() == 0, "VC7 credits used");
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
