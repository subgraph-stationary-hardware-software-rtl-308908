// tb_zp_scale_buffer: writes random {scale, zero point} entries, pushes
// random accumulators (including large ones that must clamp) through the
// requantiser and compares with sushi_tb_pkg::requant_ref; also checks the
// two-cycle latency.
module tb_zp_scale_buffer;
  import sushi_pkg::*;
  localparam int KP = 4, DEPTH = 8, SHIFT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, in_valid, out_valid;
  logic [2:0] wr_addr, in_sel;
  logic [KP*ZS_W-1:0] wr_data;
  logic [KP*ACC_W-1:0] in_acc;
  logic [KP*DW-1:0] out_q;
  int checks = 0, failures = 0, nsat = 0;
  zp_scale_buffer #(.KP(KP), .DEPTH(DEPTH), .SHIFT(SHIFT)) u_dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int sc [DEPTH][KP], zp [DEPTH][KP];
  typedef struct { longint t; int q[KP]; } exp_t;
  exp_t exq [$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid && rst_n) begin
    exp_t e;
    if (exq.size() == 0) begin failures++; end
    else begin
      e = exq.pop_front();
      checks++; if (cyc - e.t != 2) begin failures++; $display("latency"); end
      for (int k = 0; k < KP; k++) begin
        checks++;
        if (e.q[k] == 127 || e.q[k] == -128) nsat++;
        if (int'($signed(out_q[k*8 +: 8])) != e.q[k]) begin
          failures++; $display("q got %0d exp %0d", $signed(out_q[k*8 +: 8]), e.q[k]);
        end
      end
    end
  end
  initial begin
    wr_en = 0; in_valid = 0; wr_addr = 0; in_sel = 0; wr_data = 0; in_acc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) wr_en = 1; wr_addr = 3'(a);
      for (int k = 0; k < KP; k++) begin
        sc[a][k] = (a == 0) ? 65536 : int'($urandom % 5000);
        zp[a][k] = int'($urandom % 60) - 30;
        wr_data[k*ZS_W +: ZS_W] = {32'(sc[a][k]), 8'(zp[a][k])};
      end
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      exp_t e;
      int a;
      @(negedge clk);
      a = int'($urandom % DEPTH);
      in_valid = 1; in_sel = 3'(a); e.t = cyc;
      for (int k = 0; k < KP; k++) begin
        automatic int acc = (n % 3 == 0) ? int'($urandom) : int'($urandom % 200000) - 100000;
        in_acc[k*ACC_W +: ACC_W] = ACC_W'(acc);
        e.q[k] = sushi_tb_pkg::requant_ref(longint'(acc), longint'(sc[a][k]), zp[a][k], SHIFT);
      end
      exq.push_back(e);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++; if (exq.size() != 0 || nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
