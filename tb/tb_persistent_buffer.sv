// tb_persistent_buffer: loads two SubGraphs one after the other and checks
// the descriptor (invalid while loading, valid with its id and word count
// after load_done), that the stored words survive any number of reads
// (they persist across queries) and the one-cycle read latency.
module tb_persistent_buffer;
  localparam int W = 48, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_start, load_done, wr_en, rd_en, sg_valid;
  logic [15:0] load_sg_id, sg_id;
  logic [4:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [5:0] sg_words;
  int checks = 0, failures = 0;
  persistent_buffer #(.WORD_W(W), .DEPTH(DEPTH)) u_dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [W-1:0] ref_m [DEPTH];
  task automatic load(int id, int n);
    @(negedge clk) load_start = 1; load_sg_id = 16'(id);
    @(negedge clk) load_start = 0;
    checks++; if (sg_valid || sg_id != 16'(id)) begin failures++; $display("descriptor during load"); end
    for (int a = 0; a < n; a++) begin
      @(negedge clk) wr_en = 1; wr_addr = 5'(a); wr_data = {$urandom, $urandom}; ref_m[a] = wr_data;
      load_done = (a == n - 1);
    end
    @(negedge clk) wr_en = 0; load_done = 0;
    checks++;
    if (!sg_valid || sg_words != 6'(n)) begin failures++; $display("descriptor after load %0d", sg_words); end
  endtask
  task automatic readback(int n, int times);
    for (int t = 0; t < times; t++)
      for (int a = 0; a < n; a++) begin
        @(negedge clk) rd_en = 1; rd_addr = 5'(a);
        @(posedge clk); #1;
        checks++; if (rd_data != ref_m[a]) begin failures++; $display("pb word %0d", a); end
        rd_en = 0;
      end
  endtask
  initial begin
    load_start = 0; load_done = 0; wr_en = 0; rd_en = 0; load_sg_id = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (sg_valid) failures++;
    load(7, 20);
    readback(20, 3);
    load(9, 32);
    checks++; if (sg_id != 16'd9) failures++;
    readback(32, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
