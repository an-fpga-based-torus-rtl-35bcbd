// tb_tx_buffer: writes header and payload words into random slots of the
// retransmission buffer and reads every slot back, comparing with a model
// array; checks that a slot keeps its contents while others are rewritten.
module tb_tx_buffer;
  localparam int NBUF = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0;
  logic [1:0] wr_slot = '0, rd_slot = '0;
  logic [5:0] wr_idx = '0, rd_idx = '0;
  logic [31:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] model [NBUF][33];

  tx_buffer #(.NBUF(NBUF)) dut (
    .clk (clk), .wr_en (wr_en), .wr_slot (wr_slot), .wr_idx (wr_idx), .wr_data (wr_data),
    .rd_slot (rd_slot), .rd_idx (rd_idx), .rd_data (rd_data)
  );

  initial begin
    for (int r = 0; r < 6; r++) begin
      // write one whole slot (the first round writes all of them)
      for (int s = 0; s < NBUF; s++) begin
        if (r > 0 && s != r % NBUF) continue;
        for (int i = 0; i < 33; i++) begin
          @(negedge clk);
          wr_en = 1'b1; wr_slot = 2'(s); wr_idx = 6'(i); wr_data = $urandom();
          model[s][i] = wr_data;
        end
      end
      @(negedge clk) wr_en = 1'b0;
      for (int s = 0; s < NBUF; s++)
        for (int i = 0; i < 33; i++) begin
          rd_slot = 2'(s); rd_idx = 6'(i);
          #1;
          checks++;
          if (rd_data !== model[s][i]) begin
            failures++;
            $display("FAIL slot %0d word %0d: %h expected %h", s, i, rd_data, model[s][i]);
          end
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
