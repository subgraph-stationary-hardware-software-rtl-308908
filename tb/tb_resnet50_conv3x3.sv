// tb_resnet50_conv3x3: ResNet50 3x3 convolution layers on the accelerator at
// its default size (K_P=16, C_P=32, 1152-bit off-chip beat, full buffers).
//
// Three layer shapes of ResNet50 (torchvision v1.5 layout, where the stride
// sits in the 3x3 convolution) are run one after the other, each with the
// host-supplied zero padding (the line buffer applies none):
//  * stage 1: 64 -> 64 channels, 58x58 padded input, 56x56 output, stride 1.
//    Nothing cached: every tile is a DB tile. Largest output (3136 OB words).
//  * stage 2 entry: 128 -> 128 channels, 58x58 input, 28x28 output, stride 2.
//    Largest input (4 x 3364 = 13456 SB words); a 4 x 4-tile SubGraph cached.
//  * stage 4: 512 -> 512 channels, 9x9 input, 7x7 output. 16 x 12 of its
//    32 x 16 tiles (3072 PB words) cached, the rest streamed through the DB.
// Weights are whatever the off-chip model returns (a hash of the address);
// iActs, scales and zero points are random. Every oAct is compared with a
// software convolution + requantisation; the PB/DB tile split, the off-chip
// beats (only DB tiles are fetched) and the cycle count against the array's
// rate of one window per cycle are checked per layer.
// The layer shapes are ResNet50's; the cached SubGraph rectangles are
// chosen here to exercise the PB at several offsets.
module tb_resnet50_conv3x3;
  import sushi_pkg::*;
  import sushi_tb_pkg::*;

  localparam int KP = 16, CP = 32, DRAMW = 1152, BEATS = 2, BB = 144, SHIFT = 16;

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
  logic [14:0] sb_wr_addr;
  logic [CP*8-1:0] sb_wr_data;
  logic [6:0] zsb_wr_addr;
  logic [KP*ZS_W-1:0] zsb_wr_data;
  logic [KP*8-1:0] oact_data;

  sushi_accel u_dut (.*);
  dram_model #(.DRAMW(DRAMW), .LAT(30), .GAP(0)) u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req_addr(dram_req_addr), .resp_valid(dram_resp_valid),
    .resp_data(dram_resp_data));

  int checks = 0, failures = 0;
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference data of the current layer, allocated at run time
  byte w [];     // (k*C + c)*9 + j
  byte x [];     // (c*IH + y)*IW + x
  int  sc [], zp [];
  int  expq [$];

  always @(posedge clk) if (oact_valid && rst_n) begin
    for (int k = 0; k < KP; k++) begin
      automatic int e = expq.size() ? expq.pop_front() : 999;
      checks++;
      if (int'($signed(oact_data[k*8 +: 8])) != e) begin
        failures++;
        if (failures < 8) $display("oAct mismatch: got %0d exp %0d", $signed(oact_data[k*8 +: 8]), e);
      end
    end
  end

  task automatic issue(cmd_op_e op, layer_cfg_t L);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.sg_id = 16'd50; cmd.layer = L;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk) cmd_valid = 0;
    do @(posedge clk); while (!done);
  endtask

  task automatic run_layer(string name, int C, int K, int IH, int IW, bit s2,
                           int pkg, int pcg, int pbase);
    layer_cfg_t L;
    stats_t s0, s1;
    int ncg, nkg, st, OH, OW, npb, ndb;
    ncg = C / CP; nkg = K / KP; st = s2 ? 2 : 1;
    OH = (IH - 3) / st + 1; OW = (IW - 3) / st + 1;
    L = '0;
    L.ih = 10'(IH); L.iw = 10'(IW); L.stride2 = s2; L.ncg = 8'(ncg); L.nkg = 8'(nkg);
    L.cg_stride = 8'(ncg); L.wgt_base = 32'h0010_0000; L.pb_kg = 8'(pkg); L.pb_cg = 8'(pcg);
    L.pb_base = 16'(pbase); L.zsb_base = 0;
    // weights as the off-chip model holds them in the tile layout
    w = new[K * C * 9];
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C; c++)
        for (int j = 0; j < 9; j++) begin
          automatic int p = (c % CP) * 9 + j;
          automatic logic [31:0] a = L.wgt_base +
            32'(((k / KP) * ncg + c / CP) * KP * BEATS + (k % KP) * BEATS + p / BB);
          w[(k * C + c) * 9 + j] = byte'(dram_byte(a, p % BB));
        end
    // zero-padded input
    x = new[C * IH * IW];
    for (int c = 0; c < C; c++)
      for (int y = 0; y < IH; y++)
        for (int xx = 0; xx < IW; xx++)
          x[(c * IH + y) * IW + xx] = (y == 0 || xx == 0 || y == IH - 1 || xx == IW - 1) ?
                                      8'sd0 : byte'($urandom);
    sc = new[K]; zp = new[K];
    for (int k = 0; k < K; k++) begin
      sc[k] = 1 + int'($urandom % 12); zp[k] = int'($urandom % 11) - 5;
    end
    for (int cg = 0; cg < ncg; cg++)
      for (int p = 0; p < IH * IW; p++) begin
        @(negedge clk);
        sb_wr_en = 1; sb_wr_addr = 15'(cg * IH * IW + p);
        for (int l = 0; l < CP; l++) sb_wr_data[l*8 +: 8] = x[((cg * CP + l) * IH + p / IW) * IW + p % IW];
      end
    @(negedge clk) sb_wr_en = 0;
    for (int g = 0; g < nkg; g++) begin
      @(negedge clk);
      zsb_wr_en = 1; zsb_wr_addr = 7'(g);
      for (int k = 0; k < KP; k++) zsb_wr_data[k*ZS_W +: ZS_W] = {32'(sc[g*KP+k]), 8'(zp[g*KP+k])};
    end
    @(negedge clk) zsb_wr_en = 0;
    if (pkg * pcg > 0) begin
      issue(CMD_LOAD_PB, L);
      checks++;
      if (!pb_sg_valid) begin failures++; $display("%s: SubGraph not valid", name); end
    end
    // reference oActs, in output order
    for (int kg = 0; kg < nkg; kg++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OW; ox++)
          for (int kk = 0; kk < KP; kk++) begin
            automatic longint acc = 0;
            automatic int k = kg * KP + kk;
            for (int c = 0; c < C; c++)
              for (int j = 0; j < 9; j++)
                acc += longint'(x[(c * IH + oy * st + j / 3) * IW + ox * st + j % 3]) *
                       longint'(w[(k * C + c) * 9 + j]);
            expq.push_back(requant_ref(acc, sc[k], zp[k], SHIFT));
          end
    s0 = stats;
    issue(CMD_RUN_LAYER, L);
    repeat (4) @(posedge clk);
    s1 = stats;
    npb = pkg * pcg; ndb = nkg * ncg - npb;
    $display("%s: %0d cycles, %0d stall cycles, %0d PB tiles, %0d DB tiles, %0d off-chip beats",
             name, s1.busy_cycles - s0.busy_cycles, s1.stall_cycles - s0.stall_cycles,
             s1.pb_tiles - s0.pb_tiles, s1.db_tiles - s0.db_tiles, s1.dram_beats - s0.dram_beats);
    checks++;
    if (s1.pb_tiles - s0.pb_tiles != 32'(npb) || s1.db_tiles - s0.db_tiles != 32'(ndb)) begin
      failures++; $display("%s: PB/DB tile split", name);
    end
    checks++;
    if (s1.dram_beats - s0.dram_beats != 32'(ndb * KP * BEATS)) begin
      failures++; $display("%s: off-chip beats", name);
    end
    checks++;
    if (s1.busy_cycles - s0.busy_cycles - (s1.stall_cycles - s0.stall_cycles) >
        32'(nkg * (ncg * (KP + IH * IW + 8) + OH * OW + KP + 14) + 64)) begin
      failures++; $display("%s: slower than one window per cycle", name);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%s: %0d oActs missing", name, expq.size()); end
    expq.delete();
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; sb_wr_en = 0; zsb_wr_en = 0; sb_wr_addr = 0; sb_wr_data = 0;
    zsb_wr_addr = 0; zsb_wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer("stage1 3x3 64->64 56x56", 64, 64, 58, 58, 1'b0, 0, 0, 0);
    run_layer("stage2 3x3 128->128 stride2 28x28", 128, 128, 58, 58, 1'b1, 4, 4, 0);
    run_layer("stage4 3x3 512->512 7x7", 512, 512, 9, 9, 1'b0, 16, 12, 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
