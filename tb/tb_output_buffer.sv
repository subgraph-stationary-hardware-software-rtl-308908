// tb_output_buffer: random accumulation traffic, including back-to-back and
// one-apart updates of the same word (forwarding), first-pass overwrites
// and gaps, then a drain of every word; compares with a software model.
module tb_output_buffer;
  import sushi_pkg::*;
  localparam int KP = 2, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_valid, acc_first, acc_wr, rd_en, rd_valid;
  logic [3:0] acc_addr, rd_addr;
  logic [KP*ACC_W-1:0] acc_data, rd_data;
  int checks = 0, failures = 0;
  output_buffer #(.KP(KP), .DEPTH(DEPTH)) u_dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int ref_m [DEPTH][KP];
  int nwr = 0;
  always @(posedge clk) if (acc_wr) nwr++;
  initial begin
    acc_valid = 0; acc_first = 0; acc_addr = 0; acc_data = 0; rd_en = 0; rd_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) acc_valid = 1; acc_first = 1; acc_addr = 4'(a);
      for (int k = 0; k < KP; k++) begin
        ref_m[a][k] = int'($urandom % 2000) - 1000; acc_data[k*ACC_W +: ACC_W] = ACC_W'(ref_m[a][k]);
      end
    end
    for (int n = 0; n < 600; n++) begin
      int a;
      @(negedge clk);
      a = (n % 5 == 0) ? int'(acc_addr) : ((n % 7 == 0) ? int'($urandom % 3) : int'($urandom % DEPTH));
      acc_valid = ($urandom % 6 != 0); acc_addr = 4'(a); acc_first = ($urandom % 40 == 0);
      for (int k = 0; k < KP; k++) begin
        automatic int d = int'($urandom % 2000) - 1000;
        acc_data[k*ACC_W +: ACC_W] = ACC_W'(d);
        if (acc_valid) ref_m[a][k] = acc_first ? d : ref_m[a][k] + d;
      end
    end
    @(negedge clk) acc_valid = 0;
    repeat (3) @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) rd_en = 1; rd_addr = 4'(a);
      @(posedge clk); #1;
      for (int k = 0; k < KP; k++) begin
        checks++;
        if (!rd_valid || $signed(rd_data[k*ACC_W +: ACC_W]) != ref_m[a][k]) begin
          failures++; $display("ob word %0d ch %0d got %0d exp %0d", a, k, $signed(rd_data[k*ACC_W +: ACC_W]), ref_m[a][k]);
        end
      end
      rd_en = 0;
    end
    checks++; if (nwr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
