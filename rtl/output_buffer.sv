// output_buffer: accumulates partial output activations in place (OB).
//
// A word holds the K_P int32 partial sums of one output pixel. The input
// channels of a layer are processed C_P at a time; each pass adds its
// partial sums to the stored word (acc_first = 1 overwrites it for the first
// pass), so only finished oActs leave the buffer. Accumulation is a two-stage
// read-modify-write: stage 1 reads the old word, stage 2 adds and writes. If
// stage 2 writes the address stage 1 is reading, the written value is
// forwarded, so back-to-back updates of one word are exact. acc_wr pulses
// once per completed update. The drain port (rd_en/rd_addr, synchronous,
// rd_valid one cycle later) shares the read port and must not be used while
// updates arrive. In-place accumulation follows the paper; the pipeline and
// forwarding are this design's choices.
module output_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned KP    = sushi_pkg::K_P,
  parameter int unsigned DEPTH = 5232,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 acc_valid,
  input  logic [AW-1:0]        acc_addr,
  input  logic                 acc_first,
  input  logic [KP*ACC_W-1:0]  acc_data,
  output logic                 acc_wr,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic                 rd_valid,
  output logic [KP*ACC_W-1:0]  rd_data
);
  logic [KP*ACC_W-1:0] mem [DEPTH];
  logic [KP*ACC_W-1:0] q;            // synchronous read data

  // stage 1 registers
  logic                s1_v, s1_first;
  logic [AW-1:0]       s1_addr;
  logic [KP*ACC_W-1:0] s1_data;
  // last write, for forwarding
  logic                lw_v;
  logic [AW-1:0]       lw_addr;
  logic [KP*ACC_W-1:0] lw_data;
  logic [KP*ACC_W-1:0] old_w, new_w;

  always_ff @(posedge clk) begin
    if (rd_en || acc_valid) q <= mem[rd_en ? rd_addr : acc_addr];
    if (s1_v) mem[s1_addr] <= new_w;
  end

  always_comb begin
    old_w = (lw_v && lw_addr == s1_addr) ? lw_data : q;
    for (int k = 0; k < KP; k++)
      new_w[k*ACC_W +: ACC_W] = s1_first ? s1_data[k*ACC_W +: ACC_W]
                              : old_w[k*ACC_W +: ACC_W] + s1_data[k*ACC_W +: ACC_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; lw_v <= 1'b0; rd_valid <= 1'b0;
    end else begin
      s1_v     <= acc_valid;
      lw_v     <= s1_v;
      rd_valid <= rd_en;
    end
  end

  always_ff @(posedge clk) begin
    s1_addr <= acc_addr; s1_first <= acc_first; s1_data <= acc_data;
    lw_addr <= s1_addr;  lw_data  <= new_w;
  end

  assign acc_wr  = s1_v;
  assign rd_data = q;

  a_port_conflict: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && acc_valid));
  a_acc_range: assert property (@(posedge clk) disable iff (!rst_n) acc_valid |-> 32'(acc_addr) < DEPTH);
endmodule
