// tb_tnw_crc32: checks the link CRC unit against a bit-serial reference
// written independently here (a shift register fed one message bit at a
// time), over random packets of 33 words, including the one-cycle
// init-plus-first-word case and pauses with `en` low.
module tb_tnw_crc32;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic init = 1'b0, en = 1'b0;
  logic [31:0] data = '0, crc, crc_next;
  int checks = 0, failures = 0;

  tnw_crc32 dut (.clk (clk), .rst (rst), .init (init), .en (en), .data (data), .crc (crc), .crc_next (crc_next));

  function automatic logic [31:0] ref_crc(logic [31:0] w [$]);
    logic [31:0] r;
    r = 32'hFFFF_FFFF;
    foreach (w[i])
      for (int b = 31; b >= 0; b--) begin
        logic fb;
        fb = r[31] ^ w[i][b];
        r = r << 1;
        if (fb) r = r ^ 32'h04C1_1DB7;
      end
    return r;
  endfunction

  initial begin
    logic [31:0] words [$];
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int p = 0; p < 20; p++) begin
      words = {};
      for (int i = 0; i < 33; i++) begin
        logic [31:0] w;
        w = (p == 0) ? 32'(i) : $urandom();
        words.push_back(w);
        init = (i == 0); en = 1'b1; data = w;
        @(posedge clk); #1;
        if (i == 10) begin   // a pause must not change the value
          init = 1'b0; en = 1'b0; @(posedge clk); #1;
        end
      end
      init = 1'b0; en = 1'b0;
      checks++;
      if (crc !== ref_crc(words)) begin
        failures++;
        $display("FAIL packet %0d: crc %h expected %h", p, crc, ref_crc(words));
      end
    end
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
