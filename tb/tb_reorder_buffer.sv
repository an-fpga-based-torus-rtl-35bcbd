// tb_reorder_buffer: writes the 16-byte chunks of several packets on two
// VCs in shuffled order (chunks of one packet and packets of one VC mixed)
// and checks that txFifo receives every packet whole, in packet-index order
// per VC, with the right attributes; that chunks outside the window of
// RB_SLOTS packets are refused; and that nothing is copied while txFifo has
// room for less than one packet.
module tb_reorder_buffer;
  import tnw_pkg::*;
  localparam int RB_SLOTS = 4;
  localparam int TXF_DEPTH = 64;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, wr_accept, txf_wr;
  logic [VC_W-1:0] wr_vc = '0;
  logic [PIDX_W-1:0] wr_pidx = '0;
  logic [2:0] wr_chunk = '0;
  logic [127:0] wr_data = '0, txf_data;
  logic [6:0] txf_free = 7'd64;
  tx_attr_t txf_attr;
  int checks = 0, failures = 0;

  reorder_buffer #(.RB_SLOTS(RB_SLOTS), .TXF_DEPTH(TXF_DEPTH)) dut (
    .clk (clk), .rst (rst), .wr_en (wr_en), .wr_vc (wr_vc), .wr_pidx (wr_pidx), .wr_chunk (wr_chunk),
    .wr_data (wr_data), .wr_accept (wr_accept),
    .txf_free (txf_free), .txf_wr (txf_wr), .txf_data (txf_data), .txf_attr (txf_attr)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] chunk(int vc, int p, int c);
    return {32'(vc), 32'(p), 32'(c), 32'h5EED ^ 32'(vc * 4096 + p * 16 + c)};
  endfunction

  // output monitor: per-VC expected next packet index
  int exp_p [NUM_VC];
  int beat = 0, n_pkts = 0;
  always @(posedge clk) if (!rst && txf_wr) begin
    int v;
    v = int'(txf_attr.vc);
    checks++;
    if (int'(txf_attr.pidx) != exp_p[v] % 64 || txf_data != chunk(v, exp_p[v], beat)) begin
      failures++;
      $display("FAIL: VC %0d packet %0d beat %0d (attr pidx %0d)", v, exp_p[v], beat, txf_attr.pidx);
    end
    beat++;
    if (beat == 8) begin beat = 0; exp_p[v]++; n_pkts++; end
  end

  task automatic wr(int vc, int p, int c, output bit acc);
    @(negedge clk);
    wr_en = 1'b1; wr_vc = 3'(vc); wr_pidx = 6'(p % 64); wr_chunk = 3'(c); wr_data = chunk(vc, p, c);
    #1 acc = wr_accept;
    @(negedge clk) wr_en = 1'b0;
  endtask

  initial begin
    typedef struct {int vc; int p; int c;} item_t;
    item_t items [$];
    bit acc;
    foreach (exp_p[v]) exp_p[v] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // window: packet 4 of VC0 is outside [0, 4)
    wr(0, 4, 0, acc);
    check(!acc, "chunk outside window refused");
    // txFifo nearly full: complete packet 0 of VC0 must wait
    txf_free = 7'd7;
    for (int c = 0; c < 8; c++) begin wr(0, 0, c, acc); check(acc, "chunk inside window accepted"); end
    repeat (20) @(posedge clk);
    check(n_pkts == 0 && beat == 0, "no copy while txFifo lacks room");
    txf_free = 7'd64;
    repeat (20) @(posedge clk);
    check(n_pkts == 1, "packet copied when room returns");

    // 3 rounds of 4 packets on VCs 1 and 3, all chunks shuffled together
    for (int r = 0; r < 3; r++) begin
      items = {};
      for (int v = 1; v <= 3; v += 2)
        for (int p = 0; p < RB_SLOTS; p++)
          for (int c = 0; c < 8; c++) items.push_back('{v, r * RB_SLOTS + p, c});
      items.shuffle();
      foreach (items[i]) begin
        wr(items[i].vc, items[i].p, items[i].c, acc);
        check(acc, "shuffled chunk in window");
      end
      repeat (100) @(posedge clk);
      check(exp_p[1] == (r + 1) * RB_SLOTS && exp_p[3] == (r + 1) * RB_SLOTS, $sformatf("round %0d complete", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
