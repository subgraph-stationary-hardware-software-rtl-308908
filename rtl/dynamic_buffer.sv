// dynamic_buffer: ping-pong store (DB1/DB2) for the distinct weights of a SubNet.
//
// Weights that are not part of the cached SubGraph come from off-chip into
// the DB. It has two banks: the fill side writes one bank while the use side
// reads the other, so fetching the next weight tile overlaps with computing
// on the current one. Each bank has a full flag. fill_done marks the fill
// bank full and moves the fill side to the other bank; use_done marks the
// use bank empty and moves the use side on. can_fill says the fill bank is
// free, use_ready that the use bank holds a tile. Addresses are local to a
// bank; reads are synchronous (one cycle). The ping-pong organisation and
// the bank size (576 KB each) follow the paper; the full-flag handshake is
// this design's choice.
module dynamic_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned WORD_W = sushi_pkg::C_P * RS * DW,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,      // empty both banks (start of a layer)
  // fill side (from off-chip)
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              fill_done,
  output logic              can_fill,
  // use side (to the DPE array)
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data,
  input  logic              use_done,
  output logic              use_ready,
  output logic              fill_bank,
  output logic              use_bank
);
  logic [WORD_W-1:0] mem [2*DEPTH];
  logic [1:0]        full;

  always_ff @(posedge clk) begin
    if (wr_en) mem[{fill_bank, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{use_bank, rd_addr}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; fill_bank <= 1'b0; use_bank <= 1'b0;
    end else if (clear) begin
      full <= '0; fill_bank <= 1'b0; use_bank <= 1'b0;
    end else begin
      if (fill_done) begin
        full[fill_bank] <= 1'b1;
        fill_bank       <= ~fill_bank;
      end
      if (use_done) begin
        full[use_bank] <= 1'b0;
        use_bank       <= ~use_bank;
      end
    end
  end

  assign can_fill  = ~full[fill_bank];
  assign use_ready =  full[use_bank];

  a_fill_free: assert property (@(posedge clk) disable iff (!rst_n) (wr_en || fill_done) |-> can_fill);
  a_use_full:  assert property (@(posedge clk) disable iff (!rst_n) (rd_en || use_done) |-> use_ready);
endmodule
