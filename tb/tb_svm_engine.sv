// tb_svm_engine: one classification engine at reduced sizes (template up to
// 4x4 cells, parts up to 2x2, a 4-deep candidate queue so that pruning output
// stalls the root classifier). The feature storage and cluster SRAM are
// modelled by arrays with one-cycle reads; the stream carries de-quantized
// features so the parts see the same values as the roots. Level 0 runs with
// parts on, level 1 with parts off (root-only bypass). Every detection is
// compared with the whole-engine reference (root sums, pruning, coarse-to-fine
// parts search with deformation costs), including the chosen displacements.
module tb_svm_engine;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int TWM = 4, THM = 4, WCM = 12, PWM = 2, PHM = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  cfg_target_e cfg_target;
  logic [2:0] cfg_part;
  logic [15:0] cfg_addr;
  logic [CFGW-1:0] cfg_data;
  logic [CW-1:0] wc, hc, fs_wr_row, fs_wr_col;
  logic [3:0] level;
  logic level_start, fs_level_done;
  logic in_valid, in_ready;
  fbeat_t in;
  logic fs_rd_en, cb_rd_en;
  logic [CW-1:0] fs_rd_x, fs_rd_y;
  logic [CODEW-1:0] fs_rd_code, cb_rd_addr;
  feat_t cb_rd_data;
  logic det_valid, det_ready, idle, parts_on;
  det_t det;
  logic [31:0] n_kept, n_pruned;

  svm_engine #(.TW_MAX(TWM), .TH_MAX(THM), .WC_MAX(WCM), .PW_MAX(PWM), .PH_MAX(PHM),
               .CQ_DEPTH(4)) dut (.*);

  feat_t cb [NCLUST];
  logic [7:0] codes [16][WCM];
  feat_t fr [RMAXR][RMAXC];
  ecfg_t c;
  rdet_t q [$];
  int checks = 0, failures = 0, ndet = 0, n_stall = 0, n_bypass = 0, n_parts = 0;

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  // memory models
  always @(posedge clk) begin
    if (fs_rd_en) fs_rd_code <= codes[fs_rd_y][fs_rd_x];
    if (cb_rd_en) cb_rd_data <= cb[cb_rd_addr];
    if (dut.rc_out_valid && !dut.rc_out_ready) n_stall++;
  end

  // detection checker
  always @(posedge clk) begin
    det_ready <= ($urandom_range(0, 3) != 0);
    if (det_valid && det_ready) begin
      rdet_t e;
      bit ok;
      e = q.pop_front();
      ok = (longint'(det.score) == e.score) && (longint'(det.root_score) == e.root) &&
           (det.x == CW'(e.x)) && (det.y == CW'(e.y)) && (det.level == level);
      for (int p = 0; p < NPARTS; p++)
        ok &= ($signed(det.pdx[p]) == e.pdx[p]) && ($signed(det.pdy[p]) == e.pdy[p]);
      chk(ok, $sformatf("det %0d (%0d,%0d) score %0d exp (%0d,%0d) %0d", ndet, det.x, det.y, det.score,
                        e.x, e.y, e.score));
      if (c.parts) n_parts++; else n_bypass++;
      ndet++;
    end
  end

  task automatic cfg(cfg_target_e t, int part, int addr, logic [CFGW-1:0] d);
    cfg_we <= 1; cfg_target <= t; cfg_part <= 3'(part); cfg_addr <= 16'(addr); cfg_data <= d;
    @(posedge clk);
  endtask

  function automatic sw_t rnd_w();
    sw_t w;
    w = '0;
    while ($countones(w.flag) < $urandom_range(1, 6)) w.flag[$urandom_range(0, 12)] = 1'b1;
    for (int s = 0; s < NNZ; s++) w.w[s] = WW'($urandom_range(0, 31));
    return w;
  endfunction

  initial begin
    int lw [2] = '{10, 9};
    int lh [2] = '{8, 7};
    cfg_we = 0; cfg_target = CFG_BASIS; cfg_part = 0; cfg_addr = 0; cfg_data = '0;
    wc = 0; hc = 0; level = 0; level_start = 0; fs_wr_row = 0; fs_wr_col = 0; fs_level_done = 0;
    in_valid = 0; in = '0; det_ready = 0; fs_rd_code = 0; cb_rd_data = '0;
    for (int a = 0; a < NCLUST; a++)
      for (int k = 0; k < NDIM; k++) cb[a][k] = fe_t'($urandom_range(0, 1200) - 400);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      // program the engine
      c.tw = 3; c.th = 3 - l; c.parts = (l == 0); c.thresh = 0;
      for (int j = 0; j < THM; j++)
        for (int i = 0; i < TWM; i++) begin
          c.rw[j][i] = rnd_w();
          cfg(CFG_ROOT_W, 0, j * TWM + i, CFGW'(c.rw[j][i]));
        end
      cfg(CFG_ROOT_SZ, 0, 0, CFGW'({8'(c.th), 8'(c.tw)}));
      for (int p = 0; p < NPARTS; p++) begin
        c.pw[p] = $urandom_range(1, 2); c.ph[p] = $urandom_range(1, 2);
        c.ax[p] = $urandom_range(0, 1); c.ay[p] = $urandom_range(0, 1);
        c.coef[p] = {8'($urandom_range(0, 8)), 8'($urandom_range(0, 60)),
                     8'($urandom_range(0, 8)), 8'($urandom_range(0, 60))};
        cfg(CFG_PART_G, p, 0, CFGW'({8'(c.ay[p]), 8'(c.ax[p]), 8'(c.ph[p]), 8'(c.pw[p])}));
        cfg(CFG_DEFORM, p, 0, CFGW'(c.coef[p]));
        for (int j = 0; j < PHM; j++)
          for (int i = 0; i < PWM; i++) begin
            c.pwt[p][j][i] = rnd_w();
            cfg(CFG_PART_W, p, j * PWM + i, CFGW'(c.pwt[p][j][i]));
          end
      end
      // data of the level; the threshold keeps about a third of the roots
      for (int y = 0; y < lh[l]; y++)
        for (int x = 0; x < lw[l]; x++) begin
          codes[y][x] = 8'($urandom_range(0, 255));
          fr[y][x] = cb[codes[y][x]];
        end
      begin
        longint sc [$];
        for (int wy = 0; wy + c.th <= lh[l]; wy++)
          for (int wx = 0; wx + c.tw <= lw[l]; wx++) begin
            longint r;
            r = 0;
            for (int j = 0; j < c.th; j++)
              for (int i = 0; i < c.tw; i++) r += ref_sdot(fr[wy+j][wx+i], c.rw[j][i]);
            sc.push_back(r);
          end
        sc.sort();
        c.thresh = sc[sc.size() * 2 / 3];
      end
      cfg(CFG_THRESH, 0, 0, CFGW'(32'(c.thresh)));
      $display("level %0d threshold %0d", l, c.thresh);
      cfg(CFG_ENABLE, 0, 0, CFGW'({c.parts, 1'b1}));
      cfg_we <= 0;
      q.delete();
      ref_detect(fr, fr, lw[l], lh[l], c, q);
      wc <= CW'(lw[l]); hc <= CW'(lh[l]); level <= 4'(l + 3);
      level_start <= 1; fs_level_done <= 0; fs_wr_row <= 0; fs_wr_col <= 0;
      @(posedge clk);
      level_start <= 0;
      // stream the level; storage progress follows the stream
      for (int y = 0; y < lh[l]; y++)
        for (int x = 0; x < lw[l]; x++) begin
          in_valid <= 1; in.f <= fr[y][x]; in.x <= CW'(x); in.y <= CW'(y);
          in.last <= (x == lw[l]-1 && y == lh[l]-1);
          @(posedge clk iff in_ready);
          fs_wr_row <= CW'(y); fs_wr_col <= CW'(x);
          if (x == lw[l]-1 && y == lh[l]-1) fs_level_done <= 1;
        end
      in_valid <= 0;
      @(posedge clk);
      while (!idle) @(posedge clk);
      repeat (3) @(posedge clk);
      chk(q.size() == 0, $sformatf("level %0d: %0d detections missing", l, q.size()));
      chk(n_kept > 0 && n_pruned > 0, "pruning counters");
    end
    chk(n_stall > 0, "candidate queue back-pressure never happened");
    chk(n_parts > 0, "no parts detection");
    chk(n_bypass > 0, "no root-only detection");
    $display("detections %0d (parts %0d, root-only %0d), queue stalls %0d", ndet, n_parts, n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
