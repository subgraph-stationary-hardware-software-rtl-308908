// dpe_array: K_P x C_P grid of 9-wide dot-product engines.
//
// Rows compute different kernels (kernel parallelism K_P), columns
// different input channels (channel parallelism C_P). Weights and iAct
// windows share one input bus: it enters row 0 and is passed down row by
// row through a register per row (store and forward). A word flagged
// in_is_w with in_row == r is captured by the DPEs of row r and stays there;
// an iAct word is used by every row it passes. Because weights and iActs
// travel the same pipeline in order, a new weight tile can follow the last
// window of the previous tile without a gap. Each row reduces its C_P DPE
// results with an adder tree. Row r produces its sum r cycles after row 0;
// a deskew delay of K_P-1-r cycles lines all rows up, so out_psum holds the
// K_P partial sums of one output pixel with the tag/first flag that entered
// with the window. Latency from in_valid to out_valid is K_P + 2 cycles.
// Bus data layout (weights and windows): lane c, element j (j = 3*row+col of
// the 3x3 window) at bits (c*9+j)*8 +: 8.
// The grid, the shared store-and-forward bus and the row adder tree follow
// the paper; the deskew stage and the tag that rides with each window are
// this design's choices.
module dpe_array
  import sushi_pkg::*;
#(
  parameter int unsigned KP  = sushi_pkg::K_P,
  parameter int unsigned CP  = sushi_pkg::C_P,
  parameter int unsigned RW  = (KP > 1) ? $clog2(KP) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_is_w,
  input  logic [RW-1:0]           in_row,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic                    in_first,
  input  logic [CP*RS*DW-1:0]     in_data,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic                    out_first,
  output logic [KP*ACC_W-1:0]     out_psum
);
  localparam int unsigned DPE_W = 2 * DW + $clog2(RS);
  localparam int unsigned ROW_W = DPE_W + ((CP > 1) ? $clog2(CP) : 1);

  // store-and-forward bus, one register stage per row
  logic                 b_v     [KP];
  logic                 b_w     [KP];
  logic [RW-1:0]        b_row   [KP];
  logic [TAG_W-1:0]     b_tag   [KP];
  logic                 b_first [KP];
  logic [CP*RS*DW-1:0]  b_data  [KP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < KP; r++) b_v[r] <= 1'b0;
    end else begin
      b_v[0] <= in_valid;
      for (int r = 1; r < KP; r++) b_v[r] <= b_v[r-1];
    end
  end

  always_ff @(posedge clk) begin
    b_w[0] <= in_is_w; b_row[0] <= in_row; b_tag[0] <= in_tag;
    b_first[0] <= in_first; b_data[0] <= in_data;
    for (int r = 1; r < KP; r++) begin
      b_w[r] <= b_w[r-1]; b_row[r] <= b_row[r-1]; b_tag[r] <= b_tag[r-1];
      b_first[r] <= b_first[r-1]; b_data[r] <= b_data[r-1];
    end
  end

  logic signed [ACC_W-1:0] row_aligned [KP];

  for (genvar r = 0; r < KP; r++) begin : g_row
    logic                      w_ld, x_v;
    logic                      y_v [CP];
    logic signed [ROW_W-1:0]   y_ext [CP];
    logic signed [ROW_W-1:0]   row_sum;
    logic signed [ACC_W-1:0]   row_q;

    assign w_ld = b_v[r] &  b_w[r] & (b_row[r] == RW'(r));
    assign x_v  = b_v[r] & ~b_w[r];

    for (genvar c = 0; c < CP; c++) begin : g_col
      logic signed [DPE_W-1:0] y;
      dpe #(.N(RS), .DW(DW), .OW(DPE_W)) u_dpe (
        .clk, .w_load(w_ld), .w_in(b_data[r][c*RS*DW +: RS*DW]),
        .x_valid(x_v), .x_in(b_data[r][c*RS*DW +: RS*DW]),
        .y_valid(y_v[c]), .y
      );
      assign y_ext[c] = ROW_W'(y);
    end

    adder_tree #(.N(CP), .W(ROW_W)) u_row_tree (.in(y_ext), .sum(row_sum));

    always_ff @(posedge clk)
      if (y_v[0]) row_q <= ACC_W'(row_sum);

    // deskew: row r is K_P-1-r cycles ahead of the last row
    localparam int unsigned D = KP - 1 - r;
    if (D == 0) begin : g_nd
      assign row_aligned[r] = row_q;
    end else begin : g_dl
      logic signed [ACC_W-1:0] sh [D];
      always_ff @(posedge clk) begin
        sh[0] <= row_q;
        for (int i = 1; i < D; i++) sh[i] <= sh[i-1];
      end
      assign row_aligned[r] = sh[D-1];
    end
  end

  // control of the last row, delayed by the DPE and row-tree registers
  logic             v1, v2, f1, f2;
  logic [TAG_W-1:0] t1, t2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0;
    end else begin
      v1 <= b_v[KP-1] & ~b_w[KP-1];
      v2 <= v1;
    end
  end
  always_ff @(posedge clk) begin
    t1 <= b_tag[KP-1]; f1 <= b_first[KP-1];
    t2 <= t1;          f2 <= f1;
  end

  assign out_valid = v2;
  assign out_tag   = t2;
  assign out_first = f2;
  always_comb
    for (int r = 0; r < KP; r++) out_psum[r*ACC_W +: ACC_W] = row_aligned[r];

endmodule
