// tb_line_buffer: streams random images (stride 1 and stride 2, two widths)
// one pixel per cycle into the line buffer and checks every 3x3 window,
// its output-pixel tag, the number of windows and the one-cycle latency.
module tb_line_buffer;
  import sushi_pkg::*;
  localparam int CP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, cfg_stride2, in_valid, out_valid;
  logic [9:0] cfg_iw;
  logic [CP*DW-1:0] in_pix;
  logic [TAG_W-1:0] out_tag;
  logic [CP*RS*DW-1:0] out_win;
  int checks = 0, failures = 0;
  line_buffer #(.CP(CP), .MAX_W(16)) u_dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int img [16][16][CP];
  int ih, iw, st, nwin, last_in;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid && rst_n) begin
    int oy, ox, ow;
    ow = (iw - 3) / st + 1;
    oy = int'(out_tag) / ow; ox = int'(out_tag) % ow;
    checks++;
    if (int'(out_tag) != nwin) begin failures++; $display("tag %0d exp %0d", out_tag, nwin); end
    // the window ending at input pixel (oy*st+2, ox*st+2) came in one cycle ago
    for (int c = 0; c < CP; c++)
      for (int j = 0; j < 9; j++)
        if ($signed(out_win[(c*9+j)*8 +: 8]) != img[oy*st + j/3][ox*st + j%3][c]) begin
          failures++; $display("win (%0d,%0d) c%0d j%0d", oy, ox, c, j);
        end
    nwin++;
  end

  task automatic run(int h, int w, int s);
    ih = h; iw = w; st = s; nwin = 0;
    @(negedge clk);
    start = 1; cfg_iw = 10'(w); cfg_stride2 = (s == 2);
    @(negedge clk) start = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        @(negedge clk);
        in_valid = 1;
        for (int c = 0; c < CP; c++) begin
          img[y][x][c] = int'($signed(8'($urandom)));
          in_pix[c*8 +: 8] = 8'(img[y][x][c]);
        end
      end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nwin != ((h - 3) / s + 1) * ((w - 3) / s + 1)) begin
      failures++; $display("window count %0d", nwin);
    end
  endtask

  // latency: the window of the first output appears exactly one cycle after
  // the pixel that completes it
  longint t_pix;
  initial begin
    start = 0; cfg_iw = 0; cfg_stride2 = 0; in_valid = 0; in_pix = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(5, 7, 1);
    run(7, 9, 2);
    run(6, 16, 1);
    run(4, 3, 1);
    // timing check
    ih = 3; iw = 3; st = 1; nwin = 0;
    @(negedge clk) start = 1; cfg_iw = 3; cfg_stride2 = 0;
    @(negedge clk) start = 0;
    for (int p = 0; p < 9; p++) begin
      @(negedge clk) in_valid = 1;
      for (int c = 0; c < CP; c++) begin
        img[p/3][p%3][c] = p; in_pix[c*8 +: 8] = 8'(p);
      end
      if (p == 8) t_pix = cyc;
    end
    @(negedge clk) in_valid = 0;
    wait (out_valid);
    checks++;
    if (cyc - t_pix != 1) begin failures++; $display("latency %0d", cyc - t_pix); end
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
