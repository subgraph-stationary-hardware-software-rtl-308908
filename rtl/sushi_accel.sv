// sushi_accel: SubGraph-Stationary convolution accelerator (top level).
//
// Serves a stream of queries, each run on a SubNet of a weight-shared
// SuperNet. Weights common to recent SubNets (the cached SubGraph) stay in
// the persistent buffer (PB) across queries; only the remaining, distinct
// weights are fetched from off-chip into the ping-pong dynamic buffer (DB)
// while the array computes. Datapath: streaming buffer (SB, whole-layer
// iActs) -> line buffer (3x3 windows) -> K_P x C_P DPE array (weights from
// PB or DB on the same bus) -> output buffer (in-place accumulation over
// channel groups) -> ZP/scale requantisation -> int8 oActs. sushi_ctrl
// sequences it all.
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//  * cmd_valid/cmd_ready/cmd: CMD_LOAD_PB or CMD_RUN_LAYER; done pulses at
//    the end of each command.
//  * dram_req_*/dram_resp_*: off-chip read port, one DRAM_W-bit beat per
//    accepted request, responses in request order, no back-pressure.
//  * sb_wr_*: host writes input activations (word = one pixel of C_P
//    channels, address cg*ih*iw + y*iw + x).
//  * zsb_wr_*: host writes {scale, zp} for the K_P channels of a kernel group.
//  * oact_valid/oact_data: K_P int8 oActs of one output pixel per beat,
//    kernel group by kernel group, pixels in row-major order.
// Defaults are the paper's Alveo U50 configuration (K_P=16, C_P=32, 14.4
// GB/s) with the buffer capacities of its buffer table; widths, encodings
// and control are this design's own.
module sushi_accel
  import sushi_pkg::*;
#(
  parameter int unsigned KP        = sushi_pkg::K_P,
  parameter int unsigned CP        = sushi_pkg::C_P,
  parameter int unsigned DRAMW     = sushi_pkg::DRAM_W,
  parameter int unsigned SB_DEPTH  = 18688,
  parameter int unsigned PB_DEPTH  = 6144,
  parameter int unsigned DB_DEPTH  = 2048,
  parameter int unsigned OB_DEPTH  = 5232,
  parameter int unsigned ZSB_DEPTH = 102,
  parameter int unsigned LB_MAX_W  = 864,
  parameter int unsigned SHIFT     = 16,
  localparam int unsigned SB_AW = $clog2(SB_DEPTH),
  localparam int unsigned ZS_AW = (ZSB_DEPTH > 1) ? $clog2(ZSB_DEPTH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_t                cmd,
  output logic                done,
  output stats_t              stats,
  output logic                pb_sg_valid,
  output logic [15:0]         pb_sg_id,
  output logic                db_fill_bank,
  output logic                db_use_bank,
  output logic                dram_req_valid,
  input  logic                dram_req_ready,
  output logic [31:0]         dram_req_addr,
  input  logic                dram_resp_valid,
  input  logic [DRAMW-1:0]    dram_resp_data,
  input  logic                sb_wr_en,
  input  logic [SB_AW-1:0]    sb_wr_addr,
  input  logic [CP*DW-1:0]    sb_wr_data,
  input  logic                zsb_wr_en,
  input  logic [ZS_AW-1:0]    zsb_wr_addr,
  input  logic [KP*ZS_W-1:0]  zsb_wr_data,
  output logic                oact_valid,
  output logic [KP*DW-1:0]    oact_data
);
  localparam int unsigned WORD_W = CP * RS * DW;
  localparam int unsigned PB_AW = $clog2(PB_DEPTH);
  localparam int unsigned DB_AW = $clog2(DB_DEPTH);
  localparam int unsigned OB_AW = $clog2(OB_DEPTH);
  localparam int unsigned RW    = (KP > 1) ? $clog2(KP) : 1;

  // controller <-> buffers (pb_sg_words is a status count only used in testing)
  logic              pb_load_start, pb_load_done, pb_wr_en, pb_rd_en;
  logic [15:0]       pb_load_sg_id;
  logic [PB_AW-1:0]  pb_wr_addr, pb_rd_addr;
  logic [PB_AW:0]    pb_sg_words;
  logic [WORD_W-1:0] pb_rd_data, db_rd_data, wr_word;
  logic              db_clear, db_wr_en, db_fill_done, db_can_fill, db_rd_en, db_use_done, db_use_ready;
  logic [DB_AW-1:0]  db_wr_addr, db_rd_addr;
  logic              sb_rd_en, sb_rd_valid;
  logic [SB_AW-1:0]  sb_rd_addr;
  logic [CP*DW-1:0]  sb_rd_data;
  logic              lb_start, lb_out_valid;
  logic [TAG_W-1:0]  lb_out_tag;
  logic [WORD_W-1:0] lb_out_win;
  logic              arr_w_valid, arr_w_from_db, arr_first;
  logic [RW-1:0]     arr_w_row;
  logic              arr_out_valid, arr_out_first;
  logic [TAG_W-1:0]  arr_out_tag;
  logic [KP*ACC_W-1:0] arr_out_psum, ob_rd_data;
  logic              ob_acc_wr, ob_rd_en, ob_rd_valid;
  logic [OB_AW-1:0]  ob_rd_addr;
  logic [ZS_AW-1:0]  zsb_sel;
  layer_cfg_t        cfg_q;

  sushi_ctrl #(
    .KP(KP), .CP(CP), .DRAMW(DRAMW), .SB_AW(SB_AW), .PB_AW(PB_AW), .DB_AW(DB_AW),
    .OB_AW(OB_AW), .ZS_AW(ZS_AW)
  ) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .stats,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_resp_valid, .dram_resp_data,
    .pb_load_start, .pb_load_sg_id, .pb_load_done, .pb_wr_en, .pb_wr_addr,
    .pb_rd_en, .pb_rd_addr, .pb_sg_valid,
    .db_clear, .db_wr_en, .db_wr_addr, .db_fill_done, .db_can_fill,
    .db_rd_en, .db_rd_addr, .db_use_done, .db_use_ready,
    .wr_word, .sb_rd_en, .sb_rd_addr, .lb_start, .lb_out_valid,
    .arr_w_valid, .arr_w_from_db, .arr_w_row, .arr_first,
    .ob_acc_wr, .ob_rd_en, .ob_rd_addr, .zsb_sel, .cfg_q
  );

  persistent_buffer #(.WORD_W(WORD_W), .DEPTH(PB_DEPTH)) u_pb (
    .clk, .rst_n, .load_start(pb_load_start), .load_sg_id(pb_load_sg_id),
    .load_done(pb_load_done), .wr_en(pb_wr_en), .wr_addr(pb_wr_addr), .wr_data(wr_word),
    .rd_en(pb_rd_en), .rd_addr(pb_rd_addr), .rd_data(pb_rd_data),
    .sg_valid(pb_sg_valid), .sg_id(pb_sg_id), .sg_words(pb_sg_words)
  );

  dynamic_buffer #(.WORD_W(WORD_W), .DEPTH(DB_DEPTH)) u_db (
    .clk, .rst_n, .clear(db_clear),
    .wr_en(db_wr_en), .wr_addr(db_wr_addr), .wr_data(wr_word), .fill_done(db_fill_done),
    .can_fill(db_can_fill), .rd_en(db_rd_en), .rd_addr(db_rd_addr), .rd_data(db_rd_data),
    .use_done(db_use_done), .use_ready(db_use_ready),
    .fill_bank(db_fill_bank), .use_bank(db_use_bank)
  );

  streaming_buffer #(.CP(CP), .DEPTH(SB_DEPTH)) u_sb (
    .clk, .rst_n, .wr_en(sb_wr_en), .wr_addr(sb_wr_addr), .wr_data(sb_wr_data),
    .rd_en(sb_rd_en), .rd_addr(sb_rd_addr), .rd_valid(sb_rd_valid), .rd_data(sb_rd_data)
  );

  line_buffer #(.CP(CP), .MAX_W(LB_MAX_W)) u_lb (
    .clk, .rst_n, .start(lb_start), .cfg_iw(cfg_q.iw), .cfg_stride2(cfg_q.stride2),
    .in_valid(sb_rd_valid), .in_pix(sb_rd_data),
    .out_valid(lb_out_valid), .out_tag(lb_out_tag), .out_win(lb_out_win)
  );

  // one bus into the array: weight words from PB/DB, else windows from the LB
  logic              bus_valid;
  logic [WORD_W-1:0] bus_data;
  assign bus_valid = arr_w_valid | lb_out_valid;
  assign bus_data  = arr_w_valid ? (arr_w_from_db ? db_rd_data : pb_rd_data) : lb_out_win;

  dpe_array #(.KP(KP), .CP(CP)) u_array (
    .clk, .rst_n, .in_valid(bus_valid), .in_is_w(arr_w_valid), .in_row(arr_w_row),
    .in_tag(lb_out_tag), .in_first(arr_first), .in_data(bus_data),
    .out_valid(arr_out_valid), .out_tag(arr_out_tag), .out_first(arr_out_first),
    .out_psum(arr_out_psum)
  );

  output_buffer #(.KP(KP), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n, .acc_valid(arr_out_valid), .acc_addr(OB_AW'(arr_out_tag)),
    .acc_first(arr_out_first), .acc_data(arr_out_psum), .acc_wr(ob_acc_wr),
    .rd_en(ob_rd_en), .rd_addr(ob_rd_addr), .rd_valid(ob_rd_valid), .rd_data(ob_rd_data)
  );

  zp_scale_buffer #(.KP(KP), .DEPTH(ZSB_DEPTH), .SHIFT(SHIFT)) u_zsb (
    .clk, .rst_n, .wr_en(zsb_wr_en), .wr_addr(zsb_wr_addr), .wr_data(zsb_wr_data),
    .in_valid(ob_rd_valid), .in_sel(zsb_sel), .in_acc(ob_rd_data),
    .out_valid(oact_valid), .out_q(oact_data)
  );

endmodule
