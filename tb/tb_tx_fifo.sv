// tb_tx_fifo: fills the injection buffer with 128-bit entries and their
// attributes, reads 32-bit words back and compares them with a queue model:
// word order inside an entry, attribute of the head entry, the 128-byte
// packet-ready threshold, the free-entry count, and that writes to a full
// buffer are refused. Reads and writes are interleaved at random.
module tb_tx_fifo;
  import tnw_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [127:0] wr_data = '0;
  tx_attr_t wr_attr = '0, attr;
  logic [4:0] free;
  logic [31:0] rd_word;
  logic pkt_avail;
  int checks = 0, failures = 0;

  tx_fifo #(.DEPTH(DEPTH)) dut (
    .clk (clk), .rst (rst), .wr_en (wr_en), .wr_data (wr_data), .wr_attr (wr_attr), .free (free),
    .rd_en (rd_en), .rd_word (rd_word), .attr (attr), .pkt_avail (pkt_avail)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] qd [$];
  tx_attr_t     qa [$];
  int           wsel = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    check(free == 5'(DEPTH) && !pkt_avail, "empty after reset");
    // fill to full, checking the threshold on the way
    for (int i = 0; i < DEPTH + 2; i++) begin
      wr_en = 1'b1; wr_data = {$urandom(), $urandom(), $urandom(), $urandom()};
      wr_attr = '{vc: 3'(i), pidx: 6'(i)};
      if (qd.size() < DEPTH) begin qd.push_back(wr_data); qa.push_back(wr_attr); end
      @(posedge clk); #1;
      check(pkt_avail == (qd.size() >= 8), $sformatf("pkt_avail with %0d entries", qd.size()));
      check(free == 5'(DEPTH - qd.size()), "free count");
    end
    wr_en = 1'b0;
    // random traffic
    for (int t = 0; t < 2000; t++) begin
      wr_en = ($urandom_range(0, 3) == 0) && (qd.size() < DEPTH);
      rd_en = ($urandom_range(0, 1) == 0) && (qd.size() > 0);
      wr_data = {$urandom(), $urandom(), $urandom(), $urandom()};
      wr_attr = '{vc: 3'($urandom()), pidx: 6'($urandom())};
      if (rd_en) begin
        check(rd_word == qd[0][wsel*32 +: 32], $sformatf("word %0d of entry", wsel));
        check(attr == qa[0], "head attribute");
      end
      @(posedge clk); #1;
      if (rd_en) begin
        wsel = (wsel + 1) % 4;
        if (wsel == 0) begin void'(qd.pop_front()); void'(qa.pop_front()); end
      end
      if (wr_en) begin qd.push_back(wr_data); qa.push_back(wr_attr); end
      check(free == 5'(DEPTH - qd.size()), "free count under traffic");
      check(pkt_avail == (qd.size() >= 8), "pkt_avail under traffic");
    end
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
