// tb_rx_fifo: writes packets of 32 words into one reception FIFO and ends
// each with commit or drop at random. Checks that only committed packets
// become visible (pkt_avail) and are read back in order as 128-bit entries,
// that dropped packets leave no trace, and that has_space goes low when
// fewer than 8 free entries remain.
module tb_rx_fifo;
  localparam int DEPTH = 16;   // two packets
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, commit = 1'b0, drop = 1'b0, rd_en = 1'b0;
  logic [31:0] wr_word = '0;
  logic has_space, pkt_avail;
  logic [127:0] rd_data;
  int checks = 0, failures = 0;
  int n_commit = 0, n_drop = 0;

  rx_fifo #(.DEPTH(DEPTH)) dut (
    .clk (clk), .rst (rst), .wr_en (wr_en), .wr_word (wr_word), .commit (commit), .drop (drop),
    .has_space (has_space), .rd_en (rd_en), .rd_data (rd_data), .pkt_avail (pkt_avail)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] q [$];
  int stored = 0;   // committed packets in the FIFO

  task automatic write_pkt(bit keep);
    logic [127:0] e [8];
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_word = $urandom();
      e[i / 4][(i % 4) * 32 +: 32] = wr_word;
    end
    @(negedge clk);
    wr_en = 1'b0;
    check(pkt_avail == (stored > 0), "packet invisible before commit");
    if (keep) commit = 1'b1; else drop = 1'b1;
    @(negedge clk);
    commit = 1'b0; drop = 1'b0;
    if (keep) begin
      foreach (e[i]) q.push_back(e[i]);
      stored++; n_commit++;
    end else n_drop++;
    check(pkt_avail == (stored > 0), "pkt_avail after commit/drop");
  endtask

  task automatic read_pkt();
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      check(rd_data == q[0], $sformatf("entry %0d of packet", i));
      void'(q.pop_front());
      rd_en = 1'b1;
    end
    @(negedge clk) rd_en = 1'b0;
    stored--;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    check(has_space && !pkt_avail, "empty after reset");
    for (int r = 0; r < 40; r++) begin
      if (stored < 2 && has_space) write_pkt($urandom_range(0, 2) != 0);
      check(has_space == (stored < 2), $sformatf("has_space with %0d packets", stored));
      if (stored > 0 && ($urandom_range(0, 1) == 0 || stored == 2)) read_pkt();
    end
    while (stored > 0) read_pkt();
    check(n_commit > 3 && n_drop > 3, "both commit and drop exercised");
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
