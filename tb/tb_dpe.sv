// tb_dpe: checks the 9-wide dot-product engine against a software dot
// product for random int8 weights and windows, including weights that stay
// stationary over many windows and the one-cycle latency.
module tb_dpe;
  logic clk = 0;
  always #5 clk = ~clk;
  logic w_load, x_valid, y_valid;
  logic [71:0] w_in, x_in;
  logic signed [19:0] y;
  int checks = 0, failures = 0;
  dpe u_dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_q [$];
  int wv [9];
  initial begin
    w_load = 0; x_valid = 0; w_in = '0; x_in = '0;
    for (int t = 0; t < 6; t++) begin
      @(negedge clk);
      w_load = 1; x_valid = 0;
      for (int i = 0; i < 9; i++) begin
        wv[i] = (t == 0) ? -128 : int'($signed(8'($urandom)));
        w_in[i*8 +: 8] = 8'(wv[i]);
      end
      @(negedge clk) w_load = 0;
      for (int n = 0; n < 20; n++) begin
        automatic int e = 0;
        @(negedge clk);
        x_valid = 1;
        for (int i = 0; i < 9; i++) begin
          automatic int xv = (t == 0) ? -128 : int'($signed(8'($urandom)));
          x_in[i*8 +: 8] = 8'(xv);
          e += xv * wv[i];
        end
        @(posedge clk); #1;
        checks++;
        if (!y_valid || int'(y) != e) begin
          failures++; $display("dpe mismatch got %0d exp %0d v=%b", y, e, y_valid);
        end
        x_valid = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
