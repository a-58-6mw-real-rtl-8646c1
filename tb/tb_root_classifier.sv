// tb_root_classifier: small instance (template up to 4x4 cells, 10-cell
// rows). Two levels with different template sizes (3x2 over a 7x5-cell level,
// then 4x4 over a 10x6-cell level) and random sparse weights and features.
// Every window score is checked against a direct dense sum over the window,
// in raster order of the windows, and the schedule of tw*th cycles per
// feature is checked on the second level.
module tb_root_classifier;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int TWM = 4, THM = 4, WCM = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] tw, th;
  logic w_we, in_valid, in_ready, out_valid, out_ready, idle;
  logic [$clog2(TWM*THM)-1:0] w_addr;
  sw_t w_data;
  fbeat_t in;
  root_t out;
  sw_t    wm [TWM*THM];
  feat_t  fm [8][WCM];
  int checks = 0, failures = 0;
  int ew, eh, etw, eth, nwin;

  root_classifier #(.TW_MAX(TWM), .TH_MAX(THM), .WC_MAX(WCM)) dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      longint e;
      int wx, wy;
      wx = nwin % (ew - etw + 1); wy = nwin / (ew - etw + 1);
      e = 0;
      for (int j = 0; j < eth; j++)
        for (int i = 0; i < etw; i++) e += ref_sdot(fm[wy+j][wx+i], wm[j*TWM+i]);
      chk(out.x == CW'(wx) && out.y == CW'(wy), $sformatf("window pos %0d,%0d exp %0d,%0d", out.x, out.y, wx, wy));
      chk(longint'(out.score) == e, $sformatf("score %0d exp %0d", out.score, e));
      nwin++;
    end
  end

  initial begin
    int lw [2] = '{7, 10};
    int lh [2] = '{5, 6};
    int ltw [2] = '{3, 4};
    int lth [2] = '{2, 4};
    tw = 1; th = 1; w_we = 0; w_addr = 0; w_data = '0; in_valid = 0; in = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      int t0;
      // program weights
      for (int a = 0; a < TWM*THM; a++) begin
        sw_t w;
        w = '0;
        while ($countones(w.flag) < $urandom_range(1, 6)) w.flag[$urandom_range(0, 12)] = 1'b1;
        for (int s = 0; s < NNZ; s++) w.w[s] = WW'($urandom_range(0, 31));
        wm[a] = w;
        w_we <= 1; w_addr <= 4'(a); w_data <= w;
        @(posedge clk);
      end
      w_we <= 0;
      tw <= 8'(ltw[l]); th <= 8'(lth[l]);
      ew = lw[l]; eh = lh[l]; etw = ltw[l]; eth = lth[l]; nwin = 0;
      for (int y = 0; y < lh[l]; y++)
        for (int x = 0; x < lw[l]; x++)
          for (int k = 0; k < NDIM; k++) fm[y][x][k] = fe_t'($urandom_range(0, 2047));
      @(posedge clk);
      t0 = $time;
      for (int y = 0; y < lh[l]; y++)
        for (int x = 0; x < lw[l]; x++) begin
          in_valid <= 1;
          in.f <= fm[y][x]; in.x <= CW'(x); in.y <= CW'(y);
          in.last <= (x == lw[l]-1 && y == lh[l]-1);
          @(posedge clk iff in_ready);
        end
      in_valid <= 0;
      if (l == 1) begin
        int cyc, minc;
        cyc  = int'(($time - t0) / 10);
        minc = (lw[l] * lh[l] - 1) * ltw[l] * lth[l] + 1;
        // each feature occupies tw*th cycles; stalls add a few more
        chk(cyc >= minc && cyc < minc + 3 * nwin + 40, $sformatf("cycles %0d min %0d", cyc, minc));
      end
      while (!idle) @(posedge clk);
      repeat (3) @(posedge clk);
      chk(nwin == (lw[l] - ltw[l] + 1) * (lh[l] - lth[l] + 1), $sformatf("windows %0d", nwin));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
