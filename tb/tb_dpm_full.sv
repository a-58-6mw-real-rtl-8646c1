// tb_dpm_full: the detector at its full size (no parameter overrides: 1920-
// pixel line buffers, 16x16-cell templates, 6x6-cell parts, the 240x136 code
// store) on one 1920x1080 level. Engine 0 runs a 16x16 root template (the
// largest) with parts; engine 1 a 4x4 root template root-only. The thresholds
// keep few roots. Checks: 240x135 features reach the fork, a sample of the
// features and stored codes against the references, the level-done flag of
// the store, the pruning counters (kept + pruned = number of root windows)
// and one detection per kept root. The cycle count of the level is printed
// and bounded (6 cycles per pixel; the 16x16 root template, evaluated one
// weight per cycle, sets the pace at 256 cycles per feature).
module tb_dpm_full;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 1920, H = 1080;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_valid, pix_ready, pix_sof;
  logic [7:0] pix_data;
  logic [XW-1:0] img_w, img_h;
  logic [3:0] pix_level;
  logic cfg_we, cfg_eng;
  logic [3:0] cfg_target;
  logic [2:0] cfg_part;
  logic [15:0] cfg_addr;
  logic [CFGW-1:0] cfg_data;
  logic [1:0] det_valid, det_ready;
  det_t det [2];
  logic busy;
  logic [31:0] n_kept [2], n_pruned [2];

  dpm_top dut (.*);

  int checks = 0, failures = 0, nfeat = 0, ncode = 0, ndet [2] = '{0, 0};
  logic [NDIM*BW-1:0] basis [NDIM];
  feat_t cb [NCLUST];
  feat_t fr [RMAXR][RMAXC];
  rawvec_t rawq [$];

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    if (dut.hg_valid && dut.hg_ready) rawq.push_back(dut.hg_raw);
    if (dut.fork_go) begin
      rawvec_t r;
      r = rawq.pop_front();
      if (nfeat % 97 == 0)
        chk(dut.bp_out.f == ref_proj(ref_norm(r), basis), $sformatf("feature %0d", nfeat));
      fr[dut.bp_out.y][dut.bp_out.x] = dut.bp_out.f;
      nfeat++;
    end
    if (dut.vq_valid) begin
      if (ncode % 101 == 0)
        chk(int'(dut.vq_code) == ref_vq(fr[dut.vq_y][dut.vq_x], cb), $sformatf("code %0d", ncode));
      ncode++;
    end
    for (int e = 0; e < 2; e++) if (rst_n && det_valid[e]) ndet[e]++;
  end

  task automatic cfg(int e, cfg_target_e t, int part, int addr, logic [CFGW-1:0] d);
    cfg_we <= 1; cfg_eng <= 1'(e); cfg_target <= 4'(t); cfg_part <= 3'(part);
    cfg_addr <= 16'(addr); cfg_data <= d;
    @(posedge clk);
  endtask

  initial begin
    longint t0, t1;
    pix_valid = 0; pix_sof = 0; pix_data = 0; img_w = 0; img_h = 0; pix_level = 0;
    cfg_we = 0; cfg_eng = 0; cfg_target = 0; cfg_part = 0; cfg_addr = 0; cfg_data = '0;
    det_ready = 2'b11;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NDIM; k++) begin
      basis[k] = '0;
      basis[k][k*BW +: BW] = 8'sd64;
      cfg(0, CFG_BASIS, 0, k, CFGW'(basis[k]));
    end
    for (int a = 0; a < NCLUST; a++) begin
      for (int k = 0; k < NDIM; k++) cb[a][k] = fe_t'($urandom_range(0, 500));
      cfg(0, CFG_CLUSTER, 0, a, CFGW'(cb[a]));
    end
    // weights: one positive weight on dimension 0 everywhere
    for (int e = 0; e < 2; e++) begin
      for (int j = 0; j < 16; j++)
        for (int i = 0; i < 16; i++) cfg(e, CFG_ROOT_W, 0, j * 16 + i, CFGW'({13'h1, 25'd0, 5'd7}));
      for (int p = 0; p < NPARTS; p++) begin
        cfg(e, CFG_PART_G, p, 0, CFGW'({8'(2 * (p / 4)), 8'(2 * (p % 4)), 8'd6, 8'd6}));
        cfg(e, CFG_DEFORM, p, 0, CFGW'({8'd4, 8'd0, 8'd4, 8'd0}));
        for (int j = 0; j < 6; j++)
          for (int i = 0; i < 6; i++) cfg(e, CFG_PART_W, p, j * 6 + i, CFGW'({13'h1, 25'd0, 5'd3}));
      end
    end
    cfg(0, CFG_ROOT_SZ, 0, 0, CFGW'({8'd16, 8'd16}));
    cfg(0, CFG_THRESH, 0, 0, CFGW'(32'd132755));
    cfg(0, CFG_ENABLE, 0, 0, CFGW'(2'b11));
    cfg(1, CFG_ROOT_SZ, 0, 0, CFGW'({8'd4, 8'd4}));
    cfg(1, CFG_THRESH, 0, 0, CFGW'(32'd11837));
    cfg(1, CFG_ENABLE, 0, 0, CFGW'(2'b01));
    cfg_we <= 0;
    @(posedge clk);
    t0 = $time / 10;
    // a bright square on a dark background, with noise
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        pix_valid <= 1; pix_sof <= (x == 0 && y == 0);
        pix_data <= 8'(((x >= 800 && x < 960 && y >= 400 && y < 560) ? 200 : 30) + $urandom_range(0, 15));
        img_w <= XW'(W); img_h <= XW'(H); pix_level <= 0;
        @(posedge clk iff pix_ready);
      end
    pix_valid <= 0; pix_sof <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    t1 = $time / 10;
    repeat (4) @(posedge clk);
    $display("level 1920x1080: %0d cycles (%0.2f per pixel), features %0d, kept %0d/%0d, pruned %0d/%0d",
             t1 - t0, real'(t1 - t0) / real'(W * H), nfeat, n_kept[0], n_kept[1], n_pruned[0], n_pruned[1]);
    for (int e = 0; e < 2; e++) begin
      int t;
      longint sc [$];
      sc.delete();
      t = (e == 0) ? 16 : 4;
      for (int wy = 0; wy + t <= 135; wy += 1)
        for (int wx = 0; wx + t <= 240; wx += 1) begin
          longint r;
          r = 0;
          for (int j = 0; j < t; j++)
            for (int i = 0; i < t; i++) r += 7 * longint'($signed(fr[wy+j][wx+i][0]));
          sc.push_back(r);
        end
      sc.sort();
      $display("engine %0d scores: max %0d, 20th %0d, 200th %0d", e, sc[sc.size()-1], sc[sc.size()-20], sc[sc.size()-200]);
    end
    chk(nfeat == 240 * 135, "feature count");
    chk(ncode == 240 * 135, "code count");
    chk(dut.fs_level_done, "store level done");
    chk(n_kept[0] + n_pruned[0] == 32'((240 - 15) * (135 - 15)), "engine 0 windows");
    chk(n_kept[1] + n_pruned[1] == 32'((240 - 3) * (135 - 3)), "engine 1 windows");
    chk(32'(ndet[0]) == n_kept[0] && 32'(ndet[1]) == n_kept[1], "one detection per kept root");
    chk(n_kept[0] > 0 && n_kept[1] > 0, "some roots kept");
    chk(t1 - t0 < 6 * W * H, "level within 6 cycles per pixel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
