// zp_scale_buffer: per-channel zero points and scales (ZSB) and requantisation.
//
// Each entry holds, for the K_P output channels of one kernel group, an
// int32 scale and an int8 zero point ({scale, zp} per channel, channel k at
// bits k*40). Finished int32 accumulators from the output buffer are turned
// into int8 oActs:  q = clamp(((acc * scale + 2^(SHIFT-1)) >>> SHIFT) + zp,
// -128, 127). Two pipeline stages: the entry for in_sel is read and the
// accumulators registered, then the product, rounding, zero point and
// clamp are computed and registered (out_valid two cycles after in_valid).
// The int8 zero point and int32 scale follow the paper; the fixed-point
// formula, SHIFT and the clamp are this design's choices.
module zp_scale_buffer
  import sushi_pkg::*;
#(
  parameter int unsigned KP    = sushi_pkg::K_P,
  parameter int unsigned DEPTH = 102,
  parameter int unsigned SHIFT = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [KP*ZS_W-1:0]   wr_data,
  input  logic                 in_valid,
  input  logic [AW-1:0]        in_sel,
  input  logic [KP*ACC_W-1:0]  in_acc,
  output logic                 out_valid,
  output logic [KP*DW-1:0]     out_q
);
  logic [KP*ZS_W-1:0]  mem [DEPTH];
  logic [KP*ZS_W-1:0]  ent;
  logic [KP*ACC_W-1:0] acc_q;
  logic                v1;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (in_valid) begin
      ent   <= mem[in_sel];
      acc_q <= in_acc;
    end
  end

  function automatic logic [DW-1:0] requant(input logic signed [ACC_W-1:0] acc,
                                            input logic signed [31:0] scale,
                                            input logic signed [7:0] zp);
    logic signed [63:0] p;
    logic signed [63:0] s;
    p = 64'(acc) * 64'(scale) + (64'sd1 <<< (SHIFT - 1));
    s = (p >>> SHIFT) + 64'(zp);
    if (s > 64'sd127)       return 8'sd127;
    else if (s < -64'sd128) return -8'sd128;
    else                    return s[DW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; out_valid <= v1;
    end
  end

  always_ff @(posedge clk)
    if (v1)
      for (int k = 0; k < KP; k++)
        out_q[k*DW +: DW] <= requant(acc_q[k*ACC_W +: ACC_W],
                                     ent[k*ZS_W + 8 +: 32], ent[k*ZS_W +: 8]);
endmodule
