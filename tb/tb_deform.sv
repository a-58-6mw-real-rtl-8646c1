// tb_deform: the 8 part engines are modelled by score tables over the 5x5
// displacements that answer after a random delay. For random tables and
// deformation coefficients the total is checked against a plain loop over
// the same coarse grid and the 4 neighbours of each part's best grid point.
// A unimodal case (score peaked at a point that is on the coarse grid or next
// to it along an axis, zero cost) must also reach the exhaustive 25-point
// maximum; a peak diagonal to every grid point is not guaranteed. The number of engine starts (13) is checked.
module tb_deform;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, pe_start, busy, done;
  score_t root_score, total;
  logic [NPARTS-1:0][31:0] coef;
  disp_t pe_dx [NPARTS], pe_dy [NPARTS];
  logic [NPARTS-1:0] pe_done;
  score_t pe_score [NPARTS];
  logic [NPARTS-1:0][2:0] best_dx, best_dy;
  int tbl [NPARTS][5][5];
  int checks = 0, failures = 0, nstart = 0;

  deform dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  // behavioural part engines: answer 1..4 cycles after each start
  int cnt [NPARTS];
  int lx [NPARTS], ly [NPARTS];
  initial begin
    for (int p = 0; p < NPARTS; p++) begin cnt[p] = 0; pe_score[p] = '0; end
    pe_done = '0;
  end
  always @(posedge clk) begin
    if (pe_start) nstart++;
    for (int p = 0; p < NPARTS; p++) begin
      pe_done[p] <= 1'b0;
      if (pe_start) begin
        cnt[p] <= $urandom_range(1, 4);
        lx[p] <= pe_dx[p]; ly[p] <= pe_dy[p];
      end else if (cnt[p] > 0) begin
        cnt[p] <= cnt[p] - 1;
        if (cnt[p] == 1) begin
          pe_done[p]  <= 1'b1;
          pe_score[p] <= score_t'(tbl[p][ly[p]+2][lx[p]+2]);
        end
      end
    end
  end

  function automatic longint v(int p, int x, int y);
    return longint'(tbl[p][y+2][x+2]) - ref_cost(x, y, coef[p]);
  endfunction

  initial begin
    start = 0; root_score = '0; coef = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      longint exp_total, ex_total;
      bit unimodal;
      unimodal = (t % 2 == 1);
      for (int p = 0; p < NPARTS; p++) begin
        int px, py;
        px = $urandom_range(0, 4); py = $urandom_range(0, 4);
        if (px % 2 == 1 && py % 2 == 1) px = px - 1;  // a diagonal-only peak is out of reach
        for (int y = 0; y < 5; y++)
          for (int x = 0; x < 5; x++)
            tbl[p][y][x] = unimodal ? 1000 - 50 * (iabs(x - px) + iabs(y - py))
                                    : int'($urandom_range(0, 4000)) - 2000;
        coef[p] = unimodal ? 32'd0 : $urandom;
      end
      root_score = score_t'($urandom_range(0, 10000)) - 5000;
      // coarse-to-fine reference
      exp_total = root_score;
      ex_total  = root_score;
      for (int p = 0; p < NPARTS; p++) begin
        longint b, m;
        int cx, cy;
        int nx [4], ny [4];
        b = v(p, -2, -2); cx = -2; cy = -2;
        for (int y = -2; y <= 2; y += 2)
          for (int x = -2; x <= 2; x += 2)
            if (v(p, x, y) > b) begin b = v(p, x, y); cx = x; cy = y; end
        nx = '{clamp2(cx+1), clamp2(cx-1), cx, cx};
        ny = '{cy, cy, clamp2(cy+1), clamp2(cy-1)};
        for (int n = 0; n < 4; n++) if (v(p, nx[n], ny[n]) > b) b = v(p, nx[n], ny[n]);
        exp_total += b;
        m = v(p, -2, -2);
        for (int y = -2; y <= 2; y++)
          for (int x = -2; x <= 2; x++) if (v(p, x, y) > m) m = v(p, x, y);
        ex_total += m;
      end
      nstart = 0;
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      start <= 0;
      @(posedge clk iff done);
      #1;
      chk(longint'(total) == exp_total, $sformatf("t=%0d total %0d exp %0d", t, total, exp_total));
      if (unimodal) chk(longint'(total) == ex_total, $sformatf("t=%0d exhaustive %0d", t, ex_total));
      chk(nstart == 13, $sformatf("evaluations %0d", nstart));
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
