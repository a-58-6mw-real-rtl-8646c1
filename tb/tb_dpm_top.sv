// tb_dpm_top: end-to-end test of the detector at reduced sizes (64-pixel
// line buffers, templates up to 4x4 cells, parts up to 2x2, an 8-row feature
// store). Random images of two sizes are streamed as pyramid levels. Each
// image is streamed twice: the first pass (threshold at its maximum, every
// root pruned) yields the root-score distribution, from which the threshold
// of the second pass is set so that about a third of the roots survive.
//
// Checks:
//  * every normalized-and-projected feature against the reference of the
//    cell's raw histogram (normalize + Q7 projection);
//  * every stored VQ code against an exhaustive L1 nearest-center search;
//  * the number of features per level;
//  * every detection of both engines against the whole-engine reference run
//    on the features the chip produced (roots on the projected features,
//    parts on the de-quantized codes), including part displacements;
//  * pruning counters.
// Mechanisms counted, each must occur: fork stall (VQ or an engine holds the
// feature stream), detection back-pressure, a level start held while the
// previous level drains, a VQ group of fewer than 3 features, parts
// detections on both engines, and a root-only (parts disabled) detection.
module tb_dpm_top;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int IMW = 64, TWM = 4, THM = 4, PWM = 2, PHM = 2, FSR = 8;
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

  dpm_top #(.IMG_W_MAX(IMW), .TW_MAX(TWM), .TH_MAX(THM), .PW_MAX(PWM), .PH_MAX(PHM),
            .FS_ROWS(FSR)) dut (.*);

  int checks = 0, failures = 0;
  int m_fork_stall = 0, m_det_bp = 0, m_sof_hold = 0, m_vq_short = 0;
  int m_parts [2] = '{0, 0};
  int m_bypass = 0;

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  logic [NDIM*BW-1:0] basis [NDIM];
  feat_t cb [NCLUST];
  feat_t fr [RMAXR][RMAXC];
  feat_t fp [RMAXR][RMAXC];
  ecfg_t c [2];
  det_t got [2][$];
  rawvec_t rawq [$];
  int nfeat;

  // ---------- internal taps: feature chain and VQ codes ----------
  always @(posedge clk) begin
    if (dut.hg_valid && dut.hg_ready) rawq.push_back(dut.hg_raw);
    if (dut.fork_go) begin
      feat_t e;
      e = ref_proj(ref_norm(rawq.pop_front()), basis);
      chk(dut.bp_out.f == e, $sformatf("feature (%0d,%0d)", dut.bp_out.x, dut.bp_out.y));
      fr[dut.bp_out.y][dut.bp_out.x] = dut.bp_out.f;
      nfeat++;
    end
    if (dut.vq_valid) begin
      chk(int'(dut.vq_code) == ref_vq(fr[dut.vq_y][dut.vq_x], cb),
          $sformatf("code (%0d,%0d)", dut.vq_x, dut.vq_y));
      fp[dut.vq_y][dut.vq_x] = cb[dut.vq_code];
    end
    if (dut.bp_valid && !dut.bp_ready) m_fork_stall++;
    if (pix_valid && pix_sof && !pix_ready && busy) m_sof_hold++;
    if (dut.u_vq.st == 0 && dut.u_vq.n != 0 && dut.u_vq.n < 3 && dut.u_vq.flush && !dut.fork_go) m_vq_short++;
  end

  // ---------- detection sink ----------
  always @(posedge clk) begin
    for (int e = 0; e < 2; e++) begin
      det_ready[e] <= ($urandom_range(0, 2) != 0);
      if (rst_n && det_valid[e] && !det_ready[e]) m_det_bp++;
      if (rst_n && det_valid[e] && det_ready[e]) got[e].push_back(det[e]);
    end
  end

  task automatic cfg(int e, cfg_target_e t, int part, int addr, logic [CFGW-1:0] d);
    cfg_we <= 1; cfg_eng <= 1'(e); cfg_target <= 4'(t); cfg_part <= 3'(part);
    cfg_addr <= 16'(addr); cfg_data <= d;
    @(posedge clk);
  endtask

  function automatic sw_t rnd_w();
    sw_t w;
    w = '0;
    while ($countones(w.flag) < $urandom_range(1, 6)) w.flag[$urandom_range(0, 12)] = 1'b1;
    for (int s = 0; s < NNZ; s++) w.w[s] = WW'($urandom_range(0, 31));
    return w;
  endfunction

  task automatic program_engine(int e, int tw, int th, bit parts, longint thresh);
    c[e].tw = tw; c[e].th = th; c[e].parts = parts; c[e].thresh = thresh;
    cfg(e, CFG_ROOT_SZ, 0, 0, CFGW'({8'(th), 8'(tw)}));
    cfg(e, CFG_THRESH, 0, 0, CFGW'(32'(thresh)));
    cfg(e, CFG_ENABLE, 0, 0, CFGW'({parts, 1'b1}));
  endtask

  task automatic program_weights(int e);
    for (int j = 0; j < THM; j++)
      for (int i = 0; i < TWM; i++) begin
        c[e].rw[j][i] = rnd_w();
        cfg(e, CFG_ROOT_W, 0, j * TWM + i, CFGW'(c[e].rw[j][i]));
      end
    for (int p = 0; p < NPARTS; p++) begin
      c[e].pw[p] = $urandom_range(1, 2); c[e].ph[p] = $urandom_range(1, 2);
      c[e].ax[p] = $urandom_range(0, 1); c[e].ay[p] = $urandom_range(0, 1);
      c[e].coef[p] = {8'($urandom_range(0, 8)), 8'($urandom_range(0, 60)),
                      8'($urandom_range(0, 8)), 8'($urandom_range(0, 60))};
      cfg(e, CFG_PART_G, p, 0, CFGW'({8'(c[e].ay[p]), 8'(c[e].ax[p]), 8'(c[e].ph[p]), 8'(c[e].pw[p])}));
      cfg(e, CFG_DEFORM, p, 0, CFGW'(c[e].coef[p]));
      for (int j = 0; j < PHM; j++)
        for (int i = 0; i < PWM; i++) begin
          c[e].pwt[p][j][i] = rnd_w();
          cfg(e, CFG_PART_W, p, j * PWM + i, CFGW'(c[e].pwt[p][j][i]));
        end
    end
  endtask

  // stream one image as a pyramid level; returns when the chip is idle again
  task automatic run_level(ref logic [7:0] img [64][64], input int w, int h, int lvl);
    nfeat = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        pix_valid <= 1; pix_data <= img[y][x]; pix_sof <= (x == 0 && y == 0);
        img_w <= XW'(w); img_h <= XW'(h); pix_level <= 4'(lvl);
        @(posedge clk iff pix_ready);
      end
    pix_valid <= 0; pix_sof <= 0;
    @(posedge clk);
    while (busy || det_valid != 0) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  function automatic longint quantile(int e, int wc, int hc);
    longint sc [$];
    for (int wy = 0; wy + c[e].th <= hc; wy++)
      for (int wx = 0; wx + c[e].tw <= wc; wx++) begin
        longint r;
        r = 0;
        for (int j = 0; j < c[e].th; j++)
          for (int i = 0; i < c[e].tw; i++) r += ref_sdot(fr[wy+j][wx+i], c[e].rw[j][i]);
        sc.push_back(r);
      end
    sc.sort();
    return sc[sc.size() * 2 / 3] - 1;
  endfunction

  logic [7:0] img [64][64];

  initial begin
    int lw [2] = '{56, 48};
    int lh [2] = '{48, 40};
    pix_valid = 0; pix_sof = 0; pix_data = 0; img_w = 0; img_h = 0; pix_level = 0;
    cfg_we = 0; cfg_eng = 0; cfg_target = 0; cfg_part = 0; cfg_addr = 0; cfg_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // basis near 0.5 x identity plus small mixing terms; codebook spread over
    // the feature range
    for (int k = 0; k < NDIM; k++) begin
      basis[k] = '0;
      for (int j = 0; j < NDIM; j++)
        basis[k][j*BW +: BW] = (j == k) ? 8'sd64 : 8'($urandom_range(0, 16) - 8);
      cfg(0, CFG_BASIS, 0, k, CFGW'(basis[k]));
    end
    for (int a = 0; a < NCLUST; a++) begin
      for (int k = 0; k < NDIM; k++) cb[a][k] = fe_t'($urandom_range(0, 500) - 60);
      cfg(0, CFG_CLUSTER, 0, a, CFGW'(cb[a]));
    end
    for (int e = 0; e < 2; e++) program_weights(e);
    cfg_we <= 0;
    for (int l = 0; l < 2; l++) begin
      int wc, hc;
      wc = lw[l] / CELL; hc = lh[l] / CELL;
      for (int y = 0; y < lh[l]; y++)
        for (int x = 0; x < lw[l]; x++)
          img[y][x] = ((x / 8 + y / 8) % 3 == 0) ? 8'($urandom_range(0, 255))
                                                  : 8'((x * (l + 3) + y * 5 + $urandom_range(0, 40)) & 255);
      // pass 1: everything pruned, gives the score distribution
      program_engine(0, 3, 3, 1'b1, 64'h7fffffff);
      program_engine(1, 2 + l, 3 - l, (l == 0), 64'h7fffffff);
      cfg_we <= 0;
      run_level(img, lw[l], lh[l], 2 * l);
      chk(nfeat == wc * hc, $sformatf("level %0d: %0d features", l, nfeat));
      for (int e = 0; e < 2; e++) begin
        chk(got[e].size() == 0 && n_kept[e] == 0, $sformatf("pass 1 kept nothing: engine %0d got %0d kept %0d", e, got[e].size(), n_kept[e]));
        foreach (got[e][i]) $display("  e%0d det (%0d,%0d) root %0d score %0d lvl %0d", e, got[e][i].x, got[e][i].y, got[e][i].root_score, got[e][i].score, got[e][i].level);
        got[e].delete();
        chk(n_pruned[e] == 32'((wc - c[e].tw + 1) * (hc - c[e].th + 1)), "pass 1 pruned all");
      end
      // pass 2: threshold at the 2/3 quantile; the next level start is held
      // while this level drains
      program_engine(0, 3, 3, 1'b1, quantile(0, wc, hc));
      program_engine(1, 2 + l, 3 - l, (l == 0), quantile(1, wc, hc));
      cfg_we <= 0;
      run_level(img, lw[l], lh[l], 2 * l + 1);
      for (int e = 0; e < 2; e++) begin
        rdet_t q [$];
        ref_detect(fr, fp, wc, hc, c[e], q);
        $display("level %0d engine %0d: %0d detections", l, e, q.size());
        chk(got[e].size() == q.size(), $sformatf("level %0d engine %0d: %0d detections, exp %0d",
                                                  l, e, got[e].size(), q.size()));
        chk(n_kept[e] == 32'(q.size()), "kept counter");
        while (got[e].size() > 0 && q.size() > 0) begin
          det_t d;
          rdet_t r;
          bit ok;
          d = got[e].pop_front(); r = q.pop_front();
          ok = (longint'(d.score) == r.score) && (longint'(d.root_score) == r.root) &&
               (d.x == CW'(r.x)) && (d.y == CW'(r.y)) && (d.level == 4'(2 * l + 1));
          for (int p = 0; p < NPARTS; p++)
            ok &= ($signed(d.pdx[p]) == r.pdx[p]) && ($signed(d.pdy[p]) == r.pdy[p]);
          chk(ok, $sformatf("level %0d engine %0d det (%0d,%0d) %0d exp (%0d,%0d) %0d",
                            l, e, d.x, d.y, d.score, r.x, r.y, r.score));
          if (c[e].parts) m_parts[e]++; else m_bypass++;
        end
        got[e].delete();
      end
    end
    // back-to-back levels: start the next level without waiting, so its
    // first pixel is held while the previous level drains
    fork
      begin
        for (int y = 0; y < 16; y++)
          for (int x = 0; x < 16; x++) begin
            pix_valid <= 1; pix_data <= img[y][x]; pix_sof <= (x == 0 && y == 0);
            img_w <= 16; img_h <= 16; pix_level <= 4'd5;
            @(posedge clk iff pix_ready);
          end
        for (int y = 0; y < 16; y++)
          for (int x = 0; x < 16; x++) begin
            pix_valid <= 1; pix_data <= img[y][x]; pix_sof <= (x == 0 && y == 0);
            img_w <= 16; img_h <= 16; pix_level <= 4'd6;
            @(posedge clk iff pix_ready);
          end
        pix_valid <= 0; pix_sof <= 0;
      end
    join
    @(posedge clk);
    while (busy) @(posedge clk);
    $display("mechanisms: fork stall %0d, det back-pressure %0d, level start held %0d, short VQ group %0d, parts dets %0d/%0d, root-only dets %0d",
             m_fork_stall, m_det_bp, m_sof_hold, m_vq_short, m_parts[0], m_parts[1], m_bypass);
    chk(m_fork_stall > 0, "fork stall never happened");
    chk(m_det_bp > 0, "detection back-pressure never happened");
    chk(m_sof_hold > 0, "level start never held");
    chk(m_vq_short > 0, "short VQ group never happened");
    chk(m_parts[0] > 0 && m_parts[1] > 0, "parts detections missing on an engine");
    chk(m_bypass > 0, "root-only detection never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
