// tb_dynamic_buffer: a producer fills tiles into the ping-pong banks while a
// consumer with a different pace reads them; checks that tiles come out in
// order with the right data, that the producer waits while both banks are
// full, that both banks are used, and the can_fill/use_ready flags.
module tb_dynamic_buffer;
  localparam int W = 32, DEPTH = 8, TW = 4;   // tile = 4 words
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, wr_en, fill_done, can_fill, rd_en, use_done, use_ready, fill_bank, use_bank;
  logic [2:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  dynamic_buffer #(.WORD_W(W), .DEPTH(DEPTH)) u_dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [W-1:0] word(int tile, int i); return W'(tile * 1000 + i * 7 + 3); endfunction
  int waited = 0, bank1 = 0;
  localparam int NT = 10;
  // producer
  initial begin
    wr_en = 0; fill_done = 0; wr_addr = 0; wr_data = 0; clear = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    for (int t = 0; t < NT; t++) begin
      while (!can_fill) begin waited++; @(negedge clk); end
      if (fill_bank) bank1++;
      for (int i = 0; i < TW; i++) begin
        wr_en = 1; wr_addr = 3'(i); wr_data = word(t, i); fill_done = (i == TW - 1);
        @(negedge clk);
      end
      wr_en = 0; fill_done = 0;
    end
  end
  // consumer: slow, so both banks fill up
  initial begin
    rd_en = 0; use_done = 0; rd_addr = 0;
    repeat (4) @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      while (!use_ready) @(negedge clk);
      repeat (t < 5 ? 12 : 0) @(negedge clk);
      for (int i = 0; i < TW; i++) begin
        rd_en = 1; rd_addr = 3'(i); use_done = (i == TW - 1);
        @(posedge clk); #1;
        checks++;
        if (rd_data != word(t, i)) begin failures++; $display("tile %0d word %0d", t, i); end
        @(negedge clk); rd_en = 0; use_done = 0;
      end
    end
    checks++; if (waited == 0) begin failures++; $display("producer never waited"); end
    checks++; if (bank1 == 0) begin failures++; $display("bank 1 never used"); end
    @(negedge clk);
    checks++; if (use_ready) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
