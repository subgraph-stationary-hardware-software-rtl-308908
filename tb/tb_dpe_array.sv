// tb_dpe_array: loads a weight tile through the shared store-and-forward
// bus of a 4 x 3 array, streams windows directly behind it, then a second
// tile directly behind the last window, and checks every row's partial sum,
// the tag and first flag that ride along, and the K_P+2 cycle latency.
module tb_dpe_array;
  import sushi_pkg::*;
  localparam int KP = 4, CP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_is_w, in_first, out_valid, out_first;
  logic [1:0] in_row;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [CP*RS*DW-1:0] in_data;
  logic [KP*ACC_W-1:0] out_psum;
  int checks = 0, failures = 0;
  dpe_array #(.KP(KP), .CP(CP)) u_dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int w [2][KP][CP*RS];
  typedef struct { int t; int tag; bit first; int ps[KP]; } exp_t;
  exp_t exq [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid && rst_n) begin
    exp_t e;
    checks++;
    if (exq.size() == 0) begin failures++; end
    else begin
      e = exq.pop_front();
      if (int'(cyc) - e.t != KP + 2) begin failures++; $display("latency %0d", int'(cyc) - e.t); end
      if (out_tag != TAG_W'(e.tag) || out_first != e.first) begin failures++; $display("tag/first"); end
      for (int r = 0; r < KP; r++) begin
        checks++;
        if ($signed(out_psum[r*ACC_W +: ACC_W]) != e.ps[r]) begin
          failures++; $display("row %0d got %0d exp %0d", r, $signed(out_psum[r*ACC_W +: ACC_W]), e.ps[r]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_is_w = 0; in_first = 0; in_row = 0; in_tag = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 2; tile++) begin
      for (int r = 0; r < KP; r++) begin
        @(negedge clk);
        in_valid = 1; in_is_w = 1; in_row = 2'(r);
        for (int i = 0; i < CP*RS; i++) begin
          w[tile][r][i] = int'($signed(8'($urandom)));
          in_data[i*8 +: 8] = 8'(w[tile][r][i]);
        end
      end
      for (int n = 0; n < 25; n++) begin
        exp_t e;
        @(negedge clk);
        in_valid = 1; in_is_w = 0; in_tag = TAG_W'(n + 100 * tile); in_first = (n % 2 == 0);
        e.t = int'(cyc); e.tag = n + 100 * tile; e.first = in_first;
        for (int r = 0; r < KP; r++) e.ps[r] = 0;
        for (int i = 0; i < CP*RS; i++) begin
          automatic int xv = int'($signed(8'($urandom)));
          in_data[i*8 +: 8] = 8'(xv);
          for (int r = 0; r < KP; r++) e.ps[r] += xv * w[tile][r][i];
        end
        exq.push_back(e);
        if (n == 7) begin @(negedge clk) in_valid = 0; end   // a bubble in the stream
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (KP + 6) @(posedge clk);
    checks++; if (exq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
