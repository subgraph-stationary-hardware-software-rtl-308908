// sushi_env: end-to-end test environment for sushi_accel.
//
// FULL = 1 instantiates the accelerator with its default parameters
// (K_P=16, C_P=32, 1152-bit off-chip beat); FULL = 0 uses a reduced array
// (K_P=4, C_P=4, 144-bit beat) that simulates quickly. Random int8 iActs
// are written to the streaming buffer, random {scale, zp} to the ZSB, and
// the weights are whatever the off-chip model returns; every oAct is
// compared with a convolution + requantisation computed here. The sequence
// exercises: a SubGraph (PB) load, a layer with tiles from both PB and DB,
// a stride-2 layer with no PB tiles under slow off-chip memory (DB stalls),
// a SubGraph change, and repeated queries that must read no distinct
// weights from off-chip when the whole layer is cached. Each mechanism is
// counted and a mechanism that never happened counts as a failure.
module sushi_env #(
  parameter bit FULL = 0,
  parameter int unsigned NQUERY = 3
);
  import sushi_pkg::*;
  import sushi_tb_pkg::*;

  localparam int unsigned KP    = FULL ? sushi_pkg::K_P : 4;
  localparam int unsigned CP    = FULL ? sushi_pkg::C_P : 4;
  localparam int unsigned DRAMW = FULL ? sushi_pkg::DRAM_W : 144;
  localparam int unsigned BEATS = CP * RS * DW / DRAMW;
  localparam int unsigned BB    = DRAMW / 8;   // bytes per beat
  localparam int unsigned SHIFT = 16;
  localparam int unsigned SB_AW = $clog2(18688);
  localparam int unsigned ZS_AW = $clog2(102);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, pb_sg_valid, db_fill_bank, db_use_bank;
  cmd_t cmd;
  stats_t stats;
  logic [15:0] pb_sg_id;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic [31:0] dram_req_addr;
  logic [DRAMW-1:0] dram_resp_data;
  logic sb_wr_en, zsb_wr_en, oact_valid;
  logic [SB_AW-1:0] sb_wr_addr;
  logic [CP*DW-1:0] sb_wr_data;
  logic [ZS_AW-1:0] zsb_wr_addr;
  logic [KP*ZS_W-1:0] zsb_wr_data;
  logic [KP*DW-1:0] oact_data;

  if (FULL) begin : g_full
    sushi_accel u_dut (.*);
  end else begin : g_small
    sushi_accel #(.KP(KP), .CP(CP), .DRAMW(DRAMW)) u_dut (.*);
  end

  int unsigned gap = 0;
  dram_model #(.DRAMW(DRAMW), .LAT(12), .GAP(0)) u_dram_fast (
    .clk, .req_valid(dram_req_valid && gap == 0), .req_ready(ready_fast), .req_addr(dram_req_addr),
    .resp_valid(rv_fast), .resp_data(rd_fast));
  dram_model #(.DRAMW(DRAMW), .LAT(40), .GAP(3)) u_dram_slow (
    .clk, .req_valid(dram_req_valid && gap != 0), .req_ready(ready_slow), .req_addr(dram_req_addr),
    .resp_valid(rv_slow), .resp_data(rd_slow));
  logic ready_fast, ready_slow, rv_fast, rv_slow;
  logic [DRAMW-1:0] rd_fast, rd_slow;
  assign dram_req_ready  = gap == 0 ? ready_fast : ready_slow;
  assign dram_resp_valid = rv_fast | rv_slow;
  assign dram_resp_data  = rv_fast ? rd_fast : rd_slow;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (FULL ? 400000 : 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference data
  int xin [int];            // key: (c*1024 + y)*1024 + x
  int scale_of [int];       // key: output channel
  int zp_of [int];
  int expq [$];             // expected oAct bytes, in output order
  int n_sat = 0;

  function automatic int wref(layer_cfg_t L, int k, int c, int j);
    int kg, r, cg, lane, p;
    logic [31:0] a;
    kg = k / KP; r = k % KP; cg = c / CP; lane = c % CP; p = lane * RS + j;
    a = L.wgt_base + 32'((kg * L.cg_stride + cg) * KP * BEATS + r * BEATS + p / BB);
    return int'($signed(dram_byte(a, p % BB)));
  endfunction

  task automatic load_inputs(layer_cfg_t L);
    for (int c = 0; c < L.ncg * CP; c++)
      for (int y = 0; y < L.ih; y++)
        for (int x = 0; x < L.iw; x++)
          xin[(c * 1024 + y) * 1024 + x] = $signed(8'($urandom));
    for (int cg = 0; cg < L.ncg; cg++)
      for (int y = 0; y < L.ih; y++)
        for (int x = 0; x < L.iw; x++) begin
          @(negedge clk);
          sb_wr_en = 1;
          sb_wr_addr = SB_AW'(cg * L.ih * L.iw + y * L.iw + x);
          for (int l = 0; l < CP; l++)
            sb_wr_data[l*8 +: 8] = 8'(xin[((cg * CP + l) * 1024 + y) * 1024 + x]);
        end
    @(negedge clk) sb_wr_en = 0;
  endtask

  task automatic load_zsb(int nkg);
    for (int g = 0; g < nkg; g++) begin
      @(negedge clk);
      zsb_wr_en = 1; zsb_wr_addr = ZS_AW'(g);
      for (int k = 0; k < KP; k++) begin
        int s, z;
        s = 4 + int'($urandom % (1024 / CP)); z = int'($urandom % 21) - 10;
        scale_of[g * KP + k] = s; zp_of[g * KP + k] = z;
        zsb_wr_data[k*ZS_W +: ZS_W] = {32'(s), 8'(z)};
      end
    end
    @(negedge clk) zsb_wr_en = 0;
  endtask

  task automatic expect_layer(layer_cfg_t L);
    int st, oh, ow;
    st = L.stride2 ? 2 : 1;
    oh = (L.ih - 3) / st + 1; ow = (L.iw - 3) / st + 1;
    for (int kg = 0; kg < L.nkg; kg++)
      for (int oy = 0; oy < oh; oy++)
        for (int ox = 0; ox < ow; ox++)
          for (int kk = 0; kk < KP; kk++) begin
            automatic longint acc = 0;
            automatic int k = kg * KP + kk;
            for (int c = 0; c < L.ncg * CP; c++)
              for (int j = 0; j < 9; j++)
                acc += longint'(xin[(c * 1024 + oy * st + j / 3) * 1024 + ox * st + j % 3]) *
                       longint'(wref(L, k, c, j));
            expq.push_back(requant_ref(acc, scale_of[k], zp_of[k], SHIFT));
          end
  endtask

  // compare every oAct beat with the reference
  always @(posedge clk) if (oact_valid && rst_n) begin
    for (int kk = 0; kk < KP; kk++) begin
      int got, e;
      got = int'($signed(oact_data[kk*8 +: 8]));
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected oAct at %0d", cyc);
      end else begin
        e = expq.pop_front();
        if (e == 127 || e == -128) n_sat++;
        if (got != e) begin
          failures++;
          if (failures < 10) $display("oAct mismatch ch%0d: got %0d exp %0d", kk, got, e);
        end
      end
    end
  end

  task automatic issue(cmd_op_e op, logic [15:0] sg, layer_cfg_t L);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.sg_id = sg; cmd.layer = L;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk) cmd_valid = 0;
    do @(posedge clk); while (!done);
  endtask

  // mechanism counters
  int m_pb_tile = 0, m_db_tile = 0, m_stall = 0, m_stride2 = 0, m_accum = 0,
      m_multi_kg = 0, m_sg_change = 0, m_bank1 = 0, m_zero_fetch = 0, m_sat = 0;
  always @(posedge clk) if (db_fill_bank) m_bank1 = 1;

  layer_cfg_t LA, LB;
  stats_t s0, s1;

  initial begin
    cmd_valid = 0; cmd = '0; sb_wr_en = 0; zsb_wr_en = 0;
    sb_wr_addr = '0; sb_wr_data = '0; zsb_wr_addr = '0; zsb_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // layer A: 3 channel groups, 2 kernel groups, SubGraph = kg<1, cg<2
    LA = '0;
    LA.ih = 6; LA.iw = 7; LA.stride2 = 0; LA.ncg = 3; LA.nkg = 2; LA.cg_stride = 4;
    LA.wgt_base = 32'h100; LA.pb_kg = 1; LA.pb_cg = 2; LA.pb_base = 0; LA.zsb_base = 0;
    load_zsb(4);
    load_inputs(LA);

    issue(CMD_LOAD_PB, 16'd1, LA);
    checks++; if (!pb_sg_valid || pb_sg_id != 16'd1) begin failures++; $display("PB not valid after load"); end
    s0 = stats;
    expect_layer(LA);
    issue(CMD_RUN_LAYER, 16'd0, LA);
    s1 = stats;
    checks++;
    if (s1.pb_tiles - s0.pb_tiles != 2 || s1.db_tiles - s0.db_tiles != 4) begin
      failures++; $display("tile split wrong: pb %0d db %0d", s1.pb_tiles - s0.pb_tiles, s1.db_tiles - s0.db_tiles);
    end
    checks++;   // off-chip traffic = only the 4 distinct tiles
    if (s1.dram_beats - s0.dram_beats != 4 * KP * BEATS) begin
      failures++; $display("beats %0d", s1.dram_beats - s0.dram_beats);
    end
    if (s1.pb_tiles > s0.pb_tiles) m_pb_tile++;
    if (s1.db_tiles > s0.db_tiles) m_db_tile++;
    m_accum++; m_multi_kg++;
    // throughput: one window per cycle, so a stride-1 layer costs about
    // nkg*(ncg*(KP + ih*iw + overhead) + oh*ow + overhead) cycles
    checks++;
    if (s1.busy_cycles - s0.busy_cycles > 2 * (3 * (KP + 42 + 8) + 20 + KP + 14) + s1.stall_cycles - s0.stall_cycles) begin
      failures++; $display("layer A too slow: %0d cycles", s1.busy_cycles - s0.busy_cycles);
    end

    // layer B: stride 2, nothing cached, slow off-chip memory -> DB stalls
    LB = '0;
    LB.ih = 7; LB.iw = 9; LB.stride2 = 1; LB.ncg = 2; LB.nkg = 2; LB.cg_stride = 2;
    LB.wgt_base = 32'h4000; LB.pb_kg = 0; LB.pb_cg = 0; LB.zsb_base = 2;
    // ZSB entries 2,3 were written for kernel groups 2,3; remap for B
    for (int k = 0; k < 2 * KP; k++) begin
      scale_of[k + 100000] = scale_of[k]; zp_of[k + 100000] = zp_of[k];
      scale_of[k] = scale_of[k + 2 * KP]; zp_of[k] = zp_of[k + 2 * KP];
    end
    load_inputs(LB);
    expect_layer(LB);
    gap = 1;
    s0 = stats;
    issue(CMD_RUN_LAYER, 16'd0, LB);
    s1 = stats;
    gap = 0;
    if (s1.stall_cycles > s0.stall_cycles) m_stall++;
    m_stride2++;
    checks++;
    if (s1.db_tiles - s0.db_tiles != 4) begin failures++; $display("layer B db tiles"); end
    for (int k = 0; k < 2 * KP; k++) begin
      scale_of[k] = scale_of[k + 100000]; zp_of[k] = zp_of[k + 100000];
    end

    // change the cached SubGraph to the whole of layer A; queries then need
    // no off-chip weights at all
    load_inputs(LA);
    issue(CMD_LOAD_PB, 16'd2, '{ih:LA.ih, iw:LA.iw, stride2:0, ncg:3, nkg:2, cg_stride:4,
                              wgt_base:32'h100, pb_kg:2, pb_cg:3, pb_base:0, zsb_base:0});
    checks++; if (pb_sg_id != 16'd2 || !pb_sg_valid) begin failures++; $display("SubGraph id"); end
    else m_sg_change++;
    LA.pb_kg = 2; LA.pb_cg = 3;
    for (int q = 0; q < NQUERY; q++) begin
      s0 = stats;
      expect_layer(LA);
      issue(CMD_RUN_LAYER, 16'd0, LA);
      s1 = stats;
      checks++;
      if (s1.dram_beats != s0.dram_beats || s1.pb_tiles - s0.pb_tiles != 6) begin
        failures++; $display("query %0d fetched %0d beats", q, s1.dram_beats - s0.dram_beats);
      end else m_zero_fetch++;
    end

    repeat (20) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d oActs missing", expq.size()); end
    m_sat = n_sat;
    $display("mechanisms: pb_tile=%0d db_tile=%0d db_stall=%0d stride2=%0d accum=%0d multi_kg=%0d sg_change=%0d db_bank1=%0d zero_fetch_query=%0d saturate=%0d",
             m_pb_tile, m_db_tile, m_stall, m_stride2, m_accum, m_multi_kg, m_sg_change, m_bank1, m_zero_fetch, m_sat);
    if (m_pb_tile == 0) failures++;
    if (m_db_tile == 0) failures++;
    if (m_stall == 0) failures++;
    if (m_stride2 == 0) failures++;
    if (m_sg_change == 0) failures++;
    if (m_bank1 == 0) failures++;
    if (m_zero_fetch == 0) failures++;
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
