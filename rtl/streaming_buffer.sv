// streaming_buffer: on-chip store for a whole layer's input activations.
//
// One word is one pixel of C_P channels (C_P x int8). The host writes the
// layer's iActs once (channel group major, then row-major pixels); the
// controller then reads the same pixels again for every kernel group, so
// each iAct is fetched from off-chip once however many kernels use it
// (multi-filter iAct reuse). Synchronous read: rd_data and rd_valid appear
// one cycle after rd_en. Role and capacity (8 KB + 576 KB) follow the paper;
// the one-pixel word width is this design's choice.
module streaming_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned CP    = sushi_pkg::C_P,
  parameter int unsigned DEPTH = 18688,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [CP*DW-1:0]  wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic              rd_valid,
  output logic [CP*DW-1:0]  rd_data
);
  logic [CP*DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;

  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> 32'(wr_addr) < DEPTH);
  a_rd_range: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> 32'(rd_addr) < DEPTH);
endmodule
