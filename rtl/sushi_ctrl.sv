// sushi_ctrl: sequencing of SubGraph loads and convolution layers.
//
// Two commands arrive on a valid/ready port.
//  * CMD_LOAD_PB caches a SubGraph of one layer: for the pb_kg x pb_cg
//    weight tiles (kernel group kg < pb_kg, channel group cg < pb_cg) it
//    reads K_P weight words per tile from off-chip and writes them in tile
//    order into the persistent buffer from pb_base on. This happens only
//    when the host changes the cached SubGraph, not per query.
//  * CMD_RUN_LAYER runs one 3x3 convolution. Loop order: kernel group kg
//    outer, channel group cg inner. Per tile (kg, cg) the K_P weight words
//    come from the PB if the tile lies in the cached SubGraph, else from the
//    use bank of the dynamic buffer; they are sent down the array bus with
//    their row number. Then all ih x iw pixels of channel group cg are read
//    from the streaming buffer into the line buffer, whose windows follow the
//    weights down the same bus. After the last channel group the output
//    buffer is drained through the ZP/scale stage. A concurrent fetcher walks
//    the same tile order, skips PB tiles and fills the free DB bank from
//    off-chip, so distinct weights of later tiles are fetched while the
//    array computes. When a DB tile is needed and its bank is not yet full
//    the controller stalls (counted in stats.stall_cycles).
// Off-chip words are WORD_W/DRAM_W beats, packed lowest beat first. Off-chip
// tile (kg, cg) starts at beat wgt_base + (kg*cg_stride + cg)*K_P*BEATS.
// The split into PB and DB weights, ping-pong prefetch and the reuse of
// SB iActs for every kernel group are the paper's; the command set, the
// loop order, the tile addressing and all timing are this design's own.
module sushi_ctrl
  import sushi_pkg::*;
#(
  parameter int unsigned KP      = sushi_pkg::K_P,
  parameter int unsigned CP      = sushi_pkg::C_P,
  parameter int unsigned DRAMW   = sushi_pkg::DRAM_W,
  parameter int unsigned SB_AW   = 15,
  parameter int unsigned PB_AW   = 13,
  parameter int unsigned DB_AW   = 11,
  parameter int unsigned OB_AW   = 13,
  parameter int unsigned ZS_AW   = 7,
  parameter int unsigned RW      = (KP > 1) ? $clog2(KP) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command port
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic               done,
  output stats_t             stats,
  // off-chip read port: one beat per accepted request, responses in order
  output logic               dram_req_valid,
  input  logic               dram_req_ready,
  output logic [31:0]        dram_req_addr,
  input  logic               dram_resp_valid,
  input  logic [DRAMW-1:0]   dram_resp_data,
  // persistent buffer
  output logic               pb_load_start,
  output logic [15:0]        pb_load_sg_id,
  output logic               pb_load_done,
  output logic               pb_wr_en,
  output logic [PB_AW-1:0]   pb_wr_addr,
  output logic               pb_rd_en,
  output logic [PB_AW-1:0]   pb_rd_addr,
  input  logic               pb_sg_valid,
  // dynamic buffer
  output logic               db_clear,
  output logic               db_wr_en,
  output logic [DB_AW-1:0]   db_wr_addr,
  output logic               db_fill_done,
  input  logic               db_can_fill,
  output logic               db_rd_en,
  output logic [DB_AW-1:0]   db_rd_addr,
  output logic               db_use_done,
  input  logic               db_use_ready,
  // packed off-chip word for PB / DB writes
  output logic [CP*RS*DW-1:0] wr_word,
  // streaming buffer and line buffer
  output logic               sb_rd_en,
  output logic [SB_AW-1:0]   sb_rd_addr,
  output logic               lb_start,
  input  logic               lb_out_valid,
  // DPE array weight injection (windows come from the line buffer)
  output logic               arr_w_valid,
  output logic               arr_w_from_db,
  output logic [RW-1:0]      arr_w_row,
  output logic               arr_first,
  // output buffer and ZSB
  input  logic               ob_acc_wr,
  output logic               ob_rd_en,
  output logic [OB_AW-1:0]   ob_rd_addr,
  output logic [ZS_AW-1:0]   zsb_sel,
  output layer_cfg_t         cfg_q
);
  localparam int unsigned WORD_W = CP * RS * DW;
  localparam int unsigned BEATS  = WORD_W / DRAMW;
  localparam int unsigned TILE_BEATS = KP * BEATS;

  typedef enum logic [3:0] {
    S_IDLE, S_PBL, S_TILE, S_WLOAD, S_STREAM, S_FLUSH, S_WAITACC, S_DRAIN, S_DWAIT, S_DONE
  } state_e;

  state_e      st;
  logic [7:0]  kg, cg;
  logic [19:0] cnt;          // generic counter within a state
  logic [19:0] npix, nopix;  // input pixels per channel group, output pixels
  logic [9:0]  oh, ow;
  logic        tile_in_pb;
  logic [7:0]  pb_kg_eff;
  logic [15:0] inflight;     // windows on the bus not yet accumulated

  // ---------------- off-chip response packing (shared by PB load and fetcher)
  localparam int unsigned BI_W = (BEATS > 1) ? $clog2(BEATS) : 1;
  logic [BI_W-1:0] beat_i;
  logic            word_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_i <= '0;
    end else if (dram_resp_valid) begin
      beat_i <= (beat_i == BI_W'(BEATS - 1)) ? '0 : beat_i + 1'b1;
    end
  end
  if (BEATS == 1) begin : g_b1
    assign word_v  = dram_resp_valid;
    assign wr_word = dram_resp_data;
  end else begin : g_bn
    localparam int unsigned PW = (BEATS - 1) * DRAMW;
    logic [PW-1:0] pack;     // earlier beats of the word being assembled
    always_ff @(posedge clk)
      if (dram_resp_valid) pack <= PW'({dram_resp_data, pack} >> DRAMW);
    assign word_v  = dram_resp_valid && beat_i == BI_W'(BEATS - 1);
    assign wr_word = {dram_resp_data, pack};
  end

  // ---------------- derived layer sizes
  assign pb_kg_eff  = pb_sg_valid ? cfg_q.pb_kg : 8'd0;
  assign tile_in_pb = (kg < pb_kg_eff) && (cg < cfg_q.pb_cg);
  assign oh   = cfg_q.stride2 ? ((cfg_q.ih - 10'd3) >> 1) + 10'd1 : cfg_q.ih - 10'd2;
  assign ow   = cfg_q.stride2 ? ((cfg_q.iw - 10'd3) >> 1) + 10'd1 : cfg_q.iw - 10'd2;
  assign npix  = 20'(cfg_q.ih) * 20'(cfg_q.iw);
  assign nopix = 20'(oh) * 20'(ow);

  // ---------------- PB load issue side
  logic [7:0]  pl_kg, pl_cg;
  logic [15:0] pl_beat;
  logic        pl_issue_done;
  logic [PB_AW-1:0] pl_waddr;
  logic [31:0] pl_words_total, pl_words;

  // ---------------- weight fetcher (DB fill)
  logic        f_run, f_busy, f_done;
  logic [7:0]  f_kg, f_cg;
  logic [15:0] f_req, f_wr;
  logic        f_in_pb;
  logic [31:0] f_tile_base;
  assign f_in_pb     = (f_kg < pb_kg_eff) && (f_cg < cfg_q.pb_cg);
  assign f_tile_base = cfg_q.wgt_base +
                       (32'(f_kg) * 32'(cfg_q.cg_stride) + 32'(f_cg)) * 32'(TILE_BEATS);

  // off-chip request mux: PB load owns the port in S_PBL, else the fetcher
  always_comb begin
    dram_req_valid = 1'b0;
    dram_req_addr  = '0;
    if (st == S_PBL) begin
      dram_req_valid = !pl_issue_done;
      dram_req_addr  = cfg_q.wgt_base +
                       (32'(pl_kg) * 32'(cfg_q.cg_stride) + 32'(pl_cg)) * 32'(TILE_BEATS) +
                       32'(pl_beat);
    end else if (f_run && f_busy && f_req < 16'(TILE_BEATS)) begin
      dram_req_valid = 1'b1;
      dram_req_addr  = f_tile_base + 32'(f_req);
    end
  end

  assign pb_wr_en   = (st == S_PBL) && word_v;
  assign pb_wr_addr = pl_waddr;
  assign db_wr_en   = f_run && f_busy && word_v;
  assign db_wr_addr = DB_AW'(f_wr);
  assign db_fill_done = db_wr_en && (f_wr == 16'(KP - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_busy <= 1'b0; f_done <= 1'b0; f_kg <= '0; f_cg <= '0; f_req <= '0; f_wr <= '0;
    end else if (!f_run) begin
      f_busy <= 1'b0; f_done <= 1'b0; f_kg <= '0; f_cg <= '0; f_req <= '0; f_wr <= '0;
    end else if (!f_done) begin
      if (!f_busy) begin
        if (f_in_pb) begin
          // cached tile: nothing to fetch, move on
          if (f_cg == cfg_q.ncg - 8'd1) begin
            f_cg <= '0;
            if (f_kg == cfg_q.nkg - 8'd1) f_done <= 1'b1; else f_kg <= f_kg + 8'd1;
          end else f_cg <= f_cg + 8'd1;
        end else if (db_can_fill) begin
          f_busy <= 1'b1; f_req <= '0; f_wr <= '0;
        end
      end else begin
        if (dram_req_valid && dram_req_ready) f_req <= f_req + 16'd1;
        if (db_wr_en) begin
          f_wr <= f_wr + 16'd1;
          if (db_fill_done) begin
            f_busy <= 1'b0;
            if (f_cg == cfg_q.ncg - 8'd1) begin
              f_cg <= '0;
              if (f_kg == cfg_q.nkg - 8'd1) f_done <= 1'b1; else f_kg <= f_kg + 8'd1;
            end else f_cg <= f_cg + 8'd1;
          end
        end
      end
    end
  end

  // ---------------- main sequencer
  logic w_v_q, w_db_q;
  logic [RW-1:0] w_row_q;
  logic          first_q;
  logic [2:0]    flush;

  assign cmd_ready = (st == S_IDLE);
  assign lb_start  = (st == S_WLOAD) && cnt == '0;
  assign arr_w_valid   = w_v_q;
  assign arr_w_from_db = w_db_q;
  assign arr_w_row     = w_row_q;
  assign arr_first     = first_q;
  assign zsb_sel       = ZS_AW'(cfg_q.zsb_base + kg);

  always_comb begin
    pb_rd_en = 1'b0; db_rd_en = 1'b0; sb_rd_en = 1'b0; ob_rd_en = 1'b0;
    pb_rd_addr = PB_AW'(cfg_q.pb_base + (16'(kg) * 16'(cfg_q.pb_cg) + 16'(cg)) * 16'(KP)
                        + 16'(cnt));
    db_rd_addr = DB_AW'(cnt);
    sb_rd_addr = SB_AW'(32'(cg) * 32'(npix) + 32'(cnt));
    ob_rd_addr = OB_AW'(cnt);
    if (st == S_WLOAD) begin
      pb_rd_en =  tile_in_pb;
      db_rd_en = !tile_in_pb;
    end
    if (st == S_STREAM) sb_rd_en = 1'b1;
    if (st == S_DRAIN)  ob_rd_en = 1'b1;
  end
  assign db_use_done = (st == S_WLOAD) && !tile_in_pb && cnt == 20'(KP - 1);
  assign f_run       = (st inside {S_TILE, S_WLOAD, S_STREAM, S_FLUSH, S_WAITACC, S_DRAIN, S_DWAIT});
  assign db_clear    = (st == S_IDLE);
  assign pb_load_start = (st == S_IDLE) && cmd_valid && cmd.op == CMD_LOAD_PB;
  assign pb_load_sg_id = cmd.sg_id;
  assign pb_load_done  = (st == S_PBL) && pb_wr_en && pl_words == pl_words_total - 32'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; kg <= '0; cg <= '0; cnt <= '0; done <= 1'b0; cfg_q <= '0;
      w_v_q <= 1'b0; w_db_q <= 1'b0; w_row_q <= '0; first_q <= 1'b0; flush <= '0;
      pl_kg <= '0; pl_cg <= '0; pl_beat <= '0; pl_issue_done <= 1'b0; pl_waddr <= '0;
      pl_words <= '0; pl_words_total <= '0; inflight <= '0; stats <= '0;
    end else begin
      done    <= 1'b0;
      w_v_q   <= (st == S_WLOAD);
      w_db_q  <= !tile_in_pb;
      w_row_q <= RW'(cnt);
      inflight <= inflight + 16'(lb_out_valid) - 16'(ob_acc_wr);
      if (st != S_IDLE) stats.busy_cycles <= stats.busy_cycles + 32'd1;
      if (dram_req_valid && dram_req_ready) stats.dram_beats <= stats.dram_beats + 32'd1;

      unique case (st)
        S_IDLE: if (cmd_valid) begin
          cfg_q <= cmd.layer;
          kg <= '0; cg <= '0; cnt <= '0;
          if (cmd.op == CMD_LOAD_PB) begin
            st <= S_PBL;
            pl_kg <= '0; pl_cg <= '0; pl_beat <= '0; pl_waddr <= PB_AW'(cmd.layer.pb_base);
            pl_words <= '0;
            pl_words_total <= 32'(cmd.layer.pb_kg) * 32'(cmd.layer.pb_cg) * 32'(KP);
            pl_issue_done <= (cmd.layer.pb_kg == 8'd0) || (cmd.layer.pb_cg == 8'd0);
          end else if (cmd.op == CMD_RUN_LAYER) begin
            st <= S_TILE;
          end
        end
        S_PBL: begin
          if (dram_req_valid && dram_req_ready) begin
            if (pl_beat == 16'(TILE_BEATS - 1)) begin
              pl_beat <= '0;
              if (pl_cg == cfg_q.pb_cg - 8'd1) begin
                pl_cg <= '0;
                if (pl_kg == cfg_q.pb_kg - 8'd1) pl_issue_done <= 1'b1;
                else pl_kg <= pl_kg + 8'd1;
              end else pl_cg <= pl_cg + 8'd1;
            end else pl_beat <= pl_beat + 16'd1;
          end
          if (pb_wr_en) begin
            pl_waddr <= pl_waddr + 1'b1;
            pl_words <= pl_words + 32'd1;
          end
          if (pl_words_total == 32'd0 || pb_load_done) begin
            st <= S_DONE;
          end
        end
        S_TILE: begin
          cnt <= '0;
          if (tile_in_pb || db_use_ready) st <= S_WLOAD;
          else stats.stall_cycles <= stats.stall_cycles + 32'd1;
        end
        S_WLOAD: begin
          if (cnt == 20'(KP - 1)) begin
            cnt <= '0;
            st <= S_STREAM;
            first_q <= (cg == 8'd0);
            if (tile_in_pb) stats.pb_tiles <= stats.pb_tiles + 32'd1;
            else            stats.db_tiles <= stats.db_tiles + 32'd1;
          end else cnt <= cnt + 20'd1;
        end
        S_STREAM: begin
          if (cnt == npix - 20'd1) begin
            cnt <= '0; st <= S_FLUSH; flush <= 3'd3;
          end else cnt <= cnt + 20'd1;
        end
        S_FLUSH: begin
          // let the last pixels leave the SB and LB before the bus is reused
          if (flush != 3'd0) flush <= flush - 3'd1;
          else if (cg == cfg_q.ncg - 8'd1) begin
            st <= S_WAITACC;
          end else begin
            cg <= cg + 8'd1; st <= S_TILE;
          end
        end
        S_WAITACC: if (inflight == 16'd0 && !lb_out_valid) begin
          st <= S_DRAIN; cnt <= '0;
        end
        S_DRAIN: begin
          if (cnt == nopix - 20'd1) begin
            cnt <= '0; st <= S_DWAIT; flush <= 3'd3;
          end else cnt <= cnt + 20'd1;
        end
        S_DWAIT: begin
          if (flush != 3'd0) flush <= flush - 3'd1;
          else if (kg == cfg_q.nkg - 8'd1) st <= S_DONE;
          else begin
            kg <= kg + 8'd1; cg <= '0; st <= S_TILE;
          end
        end
        S_DONE: begin
          done <= 1'b1; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_bus_collision: assert property (@(posedge clk) disable iff (!rst_n) !(w_v_q && lb_out_valid));
  a_beats_fit: assert property (@(posedge clk) BEATS * DRAMW == WORD_W);
endmodule
