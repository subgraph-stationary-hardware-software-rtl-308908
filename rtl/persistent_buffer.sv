// persistent_buffer: SubGraph cache (PB) holding weights shared across SubNets.
//
// The PB stores weight words (one word = the 3x3 weights of C_P channels of
// one kernel) of the currently cached SubGraph. Unlike the other buffers it
// is not overwritten from query to query: it is written only when the host
// changes the cached SubGraph. load_start (with load_sg_id) opens a load:
// the descriptor turns invalid and the word counter clears; load_done closes
// it and marks the SubGraph valid. While a load is open the controller must
// not read cached weights, so sg_valid gates every PB hit. Reads are
// synchronous (one cycle). Capacity (1728 KB) follows the paper; the word
// format and the descriptor are this design's choices.
module persistent_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned WORD_W = sushi_pkg::C_P * RS * DW,
  parameter int unsigned DEPTH  = 6144,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_start,
  input  logic [15:0]       load_sg_id,
  input  logic              load_done,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data,
  output logic              sg_valid,
  output logic [15:0]       sg_id,
  output logic [AW:0]       sg_words
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sg_valid <= 1'b0; sg_id <= '0; sg_words <= '0;
    end else if (load_start) begin
      sg_valid <= 1'b0; sg_id <= load_sg_id; sg_words <= '0;
    end else begin
      if (wr_en)     sg_words <= sg_words + 1'b1;
      if (load_done) sg_valid <= 1'b1;
    end
  end

  a_no_hit_while_loading: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> sg_valid);
  a_wr_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> 32'(wr_addr) < DEPTH);
endmodule
