// tb_streaming_buffer: writes random pixels at random addresses, reads them
// back (each several times, as for several kernel groups) and checks data
// and the one-cycle read latency.
module tb_streaming_buffer;
  localparam int CP = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en, rd_valid;
  logic [5:0] wr_addr, rd_addr;
  logic [CP*8-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  streaming_buffer #(.CP(CP), .DEPTH(DEPTH)) u_dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [CP*8-1:0] ref_m [DEPTH];
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) wr_en = 1; wr_addr = 6'(a); wr_data = $urandom; ref_m[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int pass = 0; pass < 3; pass++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk) rd_en = 1; rd_addr = 6'((a * 7 + pass) % DEPTH);
        @(posedge clk); #1;
        checks++;
        if (!rd_valid || rd_data != ref_m[(a * 7 + pass) % DEPTH]) begin
          failures++; $display("sb read %0d", (a * 7 + pass) % DEPTH);
        end
        rd_en = 0;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
