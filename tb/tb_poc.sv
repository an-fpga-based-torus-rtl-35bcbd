// tb_poc: drives the processor output controller with packet streams on
// all six links (random gaps on the streams, random back-pressure from the
// PCIe transmit port) and register-read requests, parses every TLP that
// leaves and checks it against a reference model: memory write header
// (4-DW, length 32, address), the 8 payload beats, the notification write
// after the last packet of a credit, and the completion for each read.
module tb_poc;
  import tnw_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [NUM_LINKS-1:0] dlv_valid = '0, dlv_ready, dlv_last = '0, dlv_notify = '0;
  logic [127:0] dlv_data [NUM_LINKS];
  logic [63:0] dlv_addr [NUM_LINKS], dlv_notify_addr [NUM_LINKS];
  logic [VC_W-1:0] dlv_vc [NUM_LINKS];
  logic [15:0] dlv_npkts [NUM_LINKS];
  logic rd_valid = 1'b0, rd_ready;
  logic [31:0] rd_data = '0;
  logic [15:0] rd_reqid = '0;
  logic [7:0] rd_tag = '0;
  logic [6:0] rd_lowaddr = '0;
  logic [127:0] tx_data;
  logic tx_sop, tx_eop, tx_valid, tx_ready = 1'b0;
  int checks = 0, failures = 0;

  poc dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NPKT = 6;  // packets per link; a credit covers 3 packets
  // source side: each link sends NPKT packets; beat b of packet p = {l,p,b,~}
  int beat [NUM_LINKS], pkt [NUM_LINKS];
  function automatic logic [127:0] pdata(int l, int p, int b);
    return {32'(l), 32'(p), 32'(b), 32'hC0DE_0000 ^ 32'(l * 256 + p * 16 + b)};
  endfunction
  always_comb
    for (int l = 0; l < NUM_LINKS; l++) begin
      dlv_data[l]        = pdata(l, pkt[l], beat[l]);
      dlv_last[l]        = beat[l] == PKT_BEATS - 1;
      dlv_addr[l]        = 64'h1_0000_0000 + 64'(l) * 64'h10000 + 64'(pkt[l]) * 128;
      dlv_vc[l]          = VC_W'(l + 1);
      dlv_notify[l]      = (pkt[l] % 3) == 2;
      dlv_notify_addr[l] = 64'h2_0000_0000 + 64'(l) * 64'h100 + 64'(pkt[l] / 3) * 16;
      dlv_npkts[l]       = 16'd3;
    end
  always @(posedge clk) begin
    if (rst) begin
      foreach (beat[l]) begin beat[l] <= 0; pkt[l] <= 0; end
      dlv_valid <= '0;
    end else begin
      for (int l = 0; l < NUM_LINKS; l++) begin
        if (dlv_valid[l] && dlv_ready[l]) begin
          if (beat[l] == PKT_BEATS - 1) begin beat[l] <= 0; pkt[l] <= pkt[l] + 1; end
          else beat[l] <= beat[l] + 1;
        end
      end
      for (int l = 0; l < NUM_LINKS; l++) begin
        int np;
        np = (dlv_valid[l] && dlv_ready[l] && beat[l] == PKT_BEATS - 1) ? pkt[l] + 1 : pkt[l];
        dlv_valid[l] <= (np < NPKT) && ($urandom_range(0, 3) != 0);
      end
      tx_ready <= $urandom_range(0, 4) != 0;
    end
  end

  // register-read source
  int nrd = 0;
  always @(posedge clk) if (!rst) begin
    if (rd_valid && rd_ready) begin rd_valid <= 1'b0; nrd <= nrd + 1; end
    else if (!rd_valid && nrd < 10 && $urandom_range(0, 20) == 0) begin
      rd_valid <= 1'b1; rd_data <= $urandom; rd_reqid <= 16'(nrd * 3); rd_tag <= 8'(nrd); rd_lowaddr <= 7'(nrd * 4);
    end
  end
  // expected completions
  logic [31:0] exp_rd [$];
  logic [7:0]  exp_tag [$];
  always @(posedge clk) if (!rst && rd_valid && rd_ready) begin exp_rd.push_back(rd_data); exp_tag.push_back(rd_tag); end

  // sink: parse TLPs
  int got_pkt [NUM_LINKS], got_ntf [NUM_LINKS], ncpl = 0;
  int in_tlp = 0, kind = 0, bcnt = 0, cur_l = 0, cur_p = 0, n_tlp = 0;
  logic [127:0] h;
  initial foreach (got_pkt[l]) begin got_pkt[l] = 0; got_ntf[l] = 0; end
  always @(posedge clk) if (!rst && tx_valid && tx_ready) begin
    if (tx_sop) begin
      h = tx_data;
      n_tlp++;
      if (h[30:24] == {FMT_3DW_D, TYPE_CPL}) begin
        check(tx_eop && h[9:0] == 10'd1 && h[63:48] == 16'h0100 && h[79:72] == exp_tag[0] &&
              h[127:96] == exp_rd[0], "completion");
        void'(exp_rd.pop_front()); void'(exp_tag.pop_front());
        ncpl++;
      end else if (h[30:24] == {FMT_4DW_D, TYPE_MEM} && h[9:0] == 10'd32) begin
        logic [63:0] a;
        a = {h[95:64], h[127:96]};
        cur_l = int'((a - 64'h1_0000_0000) / 64'h10000);
        cur_p = int'(a[15:0] / 128);
        check(cur_l < NUM_LINKS && cur_p == got_pkt[cur_l], $sformatf("write address %h", a));
        kind = 1; bcnt = 0;
      end else if (h[30:24] == {FMT_4DW_D, TYPE_MEM} && h[9:0] == 10'd4) begin
        kind = 2; bcnt = 0;
        check({h[95:64], h[127:96]} == 64'h2_0000_0000 + 64'(cur_l) * 64'h100 + 64'(cur_p / 3) * 16,
              "notification address");
      end else begin
        check(0, "unknown TLP");
      end
    end else if (kind == 1) begin
      check(tx_data == pdata(cur_l, cur_p, bcnt) && tx_eop == (bcnt == PKT_BEATS - 1), "payload beat");
      bcnt++;
      if (tx_eop) got_pkt[cur_l]++;
    end else if (kind == 2) begin
      check(tx_eop && tx_data == {32'd1, 32'd0, 16'd0, 16'd3, 13'd0, 3'(cur_l), 13'd0, 3'(cur_l + 1)}, "notification body");
      got_ntf[cur_l]++;
    end
  end

  initial begin
    int sum;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    do begin
      @(posedge clk);
      sum = 0;
      foreach (got_pkt[l]) sum += got_pkt[l];
    end while (sum < NUM_LINKS * NPKT || ncpl < 10);
    repeat (5) @(posedge clk);
    foreach (got_pkt[l]) check(got_pkt[l] == NPKT && got_ntf[l] == NPKT / 3, $sformatf("link %0d counts %0d %0d", l, got_pkt[l], got_ntf[l]));
    check(ncpl == 10, "all reads completed");
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
