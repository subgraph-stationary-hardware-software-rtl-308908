// line_buffer: turns a raster stream of pixels into 3x3 sliding windows.
//
// One pixel (C_P channels of int8) enters per cycle in row-major order over
// an image of cfg_iw x cfg_ih pixels. Two line memories of MAX_W pixels hold
// the previous two image rows; together with a 3x3 register window they
// give every window from a single read of each pixel, so pixels shared by
// overlapping windows (horizontally and vertically) are reused inside the
// buffer instead of being read again. For stride 2 the buffer skips windows
// whose top-left corner is on an odd row or column. No padding is applied:
// an ih x iw input gives ((ih-3)/s+1) x ((iw-3)/s+1) windows.
// Timing: the window that ends at a pixel is on out_win one cycle after the
// pixel; out_tag counts windows from 0 in row-major output order. start
// (a one-cycle pulse before the first pixel) clears the position counters.
// Output layout matches the DPE array bus: lane c, element 3*row+col at
// bits (c*9 + 3*row+col)*8. The serial-to-parallel role and the stride by
// window skipping are the paper's; line memories of two rows, no padding and
// the window layout are this design's choices.
module line_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned CP    = sushi_pkg::C_P,
  parameter int unsigned MAX_W = 864
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [9:0]           cfg_iw,
  input  logic                 cfg_stride2,
  input  logic                 in_valid,
  input  logic [CP*DW-1:0]     in_pix,
  output logic                 out_valid,
  output logic [TAG_W-1:0]     out_tag,
  output logic [CP*RS*DW-1:0]  out_win
);
  localparam int unsigned AW = $clog2(MAX_W);
  typedef logic [CP*DW-1:0] pix_t;

  pix_t line0 [MAX_W];   // row y-1
  pix_t line1 [MAX_W];   // row y-2
  pix_t win [3][3];      // [row][col], row 0 = oldest
  pix_t col_new [3];

  logic [9:0]       x, y;
  logic [TAG_W-1:0] n_win;
  logic             emit;

  assign col_new[0] = line1[AW'(x)];
  assign col_new[1] = line0[AW'(x)];
  assign col_new[2] = in_pix;
  assign emit = in_valid && x >= 10'd2 && y >= 10'd2 &&
                (!cfg_stride2 || (!x[0] && !y[0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; n_win <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= emit;
      if (start) begin
        x <= '0; y <= '0; n_win <= '0;
      end else if (in_valid) begin
        if (x == cfg_iw - 10'd1) begin
          x <= '0; y <= y + 10'd1;
        end else begin
          x <= x + 10'd1;
        end
        if (emit) n_win <= n_win + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      line1[AW'(x)] <= line0[AW'(x)];
      line0[AW'(x)] <= in_pix;
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
        win[r][2] <= col_new[r];
      end
    end
    if (emit) begin
      out_tag <= n_win;
      for (int c = 0; c < CP; c++)
        for (int r = 0; r < 3; r++) begin
          out_win[(c*RS + 3*r + 0)*DW +: DW] <= win[r][1][c*DW +: DW];
          out_win[(c*RS + 3*r + 1)*DW +: DW] <= win[r][2][c*DW +: DW];
          out_win[(c*RS + 3*r + 2)*DW +: DW] <= col_new[r][c*DW +: DW];
        end
    end
  end
endmodule
