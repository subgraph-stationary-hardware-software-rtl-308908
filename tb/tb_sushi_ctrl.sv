// tb_sushi_ctrl: runs the controller with a real persistent buffer, dynamic
// buffer and off-chip model (line buffer and output buffer left idle) at
// K_P=2, C_P=2. Checks, for a SubGraph load: the off-chip beat addresses,
// the PB write addresses and the packed words; for a layer run: which tiles
// take their weights from the PB and which from the DB, the weight rows sent
// to the array, the SB pixel addresses read per tile, the OB drain length
// and ZSB entry per kernel group, the off-chip addresses prefetched for the
// DB tiles only, and the statistics.
module tb_sushi_ctrl;
  import sushi_pkg::*;
  localparam int KP = 2, CP = 2, DRAMW = 72, WW = CP * 9 * 8, BEATS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  cmd_t cmd;
  stats_t stats;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic [31:0] dram_req_addr;
  logic [DRAMW-1:0] dram_resp_data;
  logic pb_load_start, pb_load_done, pb_wr_en, pb_rd_en, pb_sg_valid;
  logic [15:0] pb_load_sg_id, pb_sg_id;
  logic [12:0] pb_wr_addr, pb_rd_addr;
  logic [13:0] pb_sg_words;
  logic db_clear, db_wr_en, db_fill_done, db_can_fill, db_rd_en, db_use_done, db_use_ready, fb, ub;
  logic [10:0] db_wr_addr, db_rd_addr;
  logic [WW-1:0] wr_word, pb_rd_data, db_rd_data;
  logic sb_rd_en, lb_start, arr_w_valid, arr_w_from_db, arr_first, ob_rd_en;
  logic [14:0] sb_rd_addr;
  logic [0:0] arr_w_row;
  logic [12:0] ob_rd_addr;
  logic [6:0] zsb_sel;
  layer_cfg_t cfg_q;
  logic lb_out_valid = 0, ob_acc_wr = 0;

  sushi_ctrl #(.KP(KP), .CP(CP), .DRAMW(DRAMW)) u_dut (.*);
  persistent_buffer #(.WORD_W(WW), .DEPTH(6144)) u_pb (.clk, .rst_n, .load_start(pb_load_start),
    .load_sg_id(pb_load_sg_id), .load_done(pb_load_done), .wr_en(pb_wr_en), .wr_addr(pb_wr_addr),
    .wr_data(wr_word), .rd_en(pb_rd_en), .rd_addr(pb_rd_addr), .rd_data(pb_rd_data),
    .sg_valid(pb_sg_valid), .sg_id(pb_sg_id), .sg_words(pb_sg_words));
  dynamic_buffer #(.WORD_W(WW), .DEPTH(2048)) u_db (.clk, .rst_n, .clear(db_clear), .wr_en(db_wr_en),
    .wr_addr(db_wr_addr), .wr_data(wr_word), .fill_done(db_fill_done), .can_fill(db_can_fill),
    .rd_en(db_rd_en), .rd_addr(db_rd_addr), .rd_data(db_rd_data), .use_done(db_use_done),
    .use_ready(db_use_ready), .fill_bank(fb), .use_bank(ub));
  dram_model #(.DRAMW(DRAMW), .LAT(9), .GAP(1)) u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req_addr(dram_req_addr), .resp_valid(dram_resp_valid),
    .resp_data(dram_resp_data));

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // event logs
  int req_log [$], pbw_log [$], sb_log [$], w_log [$], ob_cnt [$], zs_log [$];
  logic [WW-1:0] word_log [$];
  int ob_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && dram_req_ready) req_log.push_back(int'(dram_req_addr));
    if (pb_wr_en) begin pbw_log.push_back(int'(pb_wr_addr)); word_log.push_back(wr_word); end
    if (sb_rd_en) sb_log.push_back(int'(sb_rd_addr));
    if (arr_w_valid) w_log.push_back(int'(arr_w_row) + (arr_w_from_db ? 100 : 0));
    if (ob_rd_en) begin
      if (ob_run == 0) zs_log.push_back(int'(zsb_sel));
      ob_run++;
    end else if (ob_run != 0) begin ob_cnt.push_back(ob_run); ob_run = 0; end
  end

  function automatic logic [WW-1:0] dram_word(int beat_addr);
    logic [WW-1:0] w;
    for (int b = 0; b < BEATS; b++)
      for (int i = 0; i < DRAMW / 8; i++)
        w[(b * DRAMW / 8 + i) * 8 +: 8] = sushi_tb_pkg::dram_byte(32'(beat_addr + b), i);
    return w;
  endfunction

  task automatic issue(cmd_op_e op, layer_cfg_t L);
    @(negedge clk) cmd_valid = 1; cmd.op = op; cmd.sg_id = 16'd5; cmd.layer = L;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk) cmd_valid = 0;
    do @(posedge clk); while (!done);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  layer_cfg_t L;
  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    L = '0;
    L.ih = 4; L.iw = 5; L.ncg = 3; L.nkg = 2; L.cg_stride = 3; L.wgt_base = 32'd1000;
    L.pb_kg = 2; L.pb_cg = 2; L.pb_base = 16'd40; L.zsb_base = 8'd6;

    // ---- SubGraph load: tiles (kg<2, cg<2), K_P words of 2 beats each
    issue(CMD_LOAD_PB, L);

    begin
      automatic int n = 0;
      for (int kg = 0; kg < 2; kg++)
        for (int cg = 0; cg < 2; cg++)
          for (int b = 0; b < KP * BEATS; b++) begin
            automatic int e = 1000 + (kg * 3 + cg) * KP * BEATS + b;
            chk(req_log.size() > 0 && req_log.pop_front() == e, $sformatf("PB load beat %0d", n));
            n++;
          end
      chk(req_log.size() == 0, "no extra PB beats");
      for (int i = 0; i < 8; i++) begin
        automatic int kg = i / 4, cg = (i / 2) % 2, r = i % 2;
        chk(pbw_log.size() > 0 && pbw_log.pop_front() == 40 + i, "PB write address");
        chk(word_log.size() > 0 && word_log.pop_front() == dram_word(1000 + (kg * 3 + cg) * KP * BEATS + r * BEATS),
            $sformatf("PB word %0d", i));
      end
      chk(pb_sg_valid && pb_sg_id == 16'd5, "PB descriptor");
    end

    // ---- layer run: tiles (0,2) and (1,2) come from the DB
    issue(CMD_RUN_LAYER, L);
    for (int kg = 0; kg < 2; kg++)
      for (int cg = 0; cg < 3; cg++) begin
        for (int r = 0; r < KP; r++)
          chk(w_log.size() > 0 && w_log.pop_front() == r + (cg == 2 ? 100 : 0),
              $sformatf("weight row %0d of tile (%0d,%0d)", r, kg, cg));
        for (int i = 0; i < 20; i++)
          chk(sb_log.size() > 0 && sb_log.pop_front() == cg * 20 + i, "SB pixel address");
      end
    for (int kg = 0; kg < 2; kg++) begin
      chk(ob_cnt.size() > 0 && ob_cnt.pop_front() == 6, "OB drain length");
      chk(zs_log.size() > 0 && zs_log.pop_front() == 6 + kg, "ZSB entry");
    end
    for (int kg = 0; kg < 2; kg++)
      for (int b = 0; b < KP * BEATS; b++)
        chk(req_log.size() > 0 && req_log.pop_front() == 1000 + (kg * 3 + 2) * KP * BEATS + b,
            "DB prefetch address");
    chk(req_log.size() == 0 && w_log.size() == 0 && sb_log.size() == 0, "no extra traffic");
    chk(stats.pb_tiles == 4 && stats.db_tiles == 2, "tile statistics");
    chk(stats.dram_beats == 32'(16 + 8), "beat statistics");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
