// tb_hog_histogram: random gradients over a 27x19-pixel frame (3x2 whole
// cells; the partial right and bottom cells must be dropped) with output
// back-pressure. Each emitted cell is compared with bin sums computed from
// $atan2 and quadrant sums computed from the pixel positions.
module tb_hog_histogram;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 27, H = 19, WC = 3, HC = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [CW-1:0] wc = CW'(WC), hc = CW'(HC);
  logic in_valid, in_ready, out_valid, out_ready, out_last, idle;
  logic signed [8:0] in_gx, in_gy;
  logic [XW-1:0] in_x, in_y;
  rawvec_t out_raw;
  logic [CW-1:0] out_x, out_y;
  int checks = 0, failures = 0, ncell = 0;
  int gxa [H][W], gya [H][W];

  hog_histogram #(.IMG_W_MAX(32)) dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && out_ready) begin
      int e [NDIM];
      int ex, ey;
      ex = ncell % WC; ey = ncell / WC;
      for (int k = 0; k < NDIM; k++) e[k] = 0;
      for (int y = ey*8; y < ey*8+8; y++)
        for (int x = ex*8; x < ex*8+8; x++) begin
          int m;
          m = iabs(gxa[y][x]) + iabs(gya[y][x]);
          e[ref_bin(gxa[y][x], gya[y][x])] += m;
          e[NBINS + ((y % 8) / 4) * 2 + (x % 8) / 4] += m;
        end
      chk(out_x == ex && out_y == ey, "pos");
      for (int k = 0; k < NDIM; k++)
        chk(out_raw[k] == e[k], $sformatf("cell %0d dim %0d %0d/%0d", ncell, k, out_raw[k], e[k]));
      chk(out_last == (ncell == WC*HC-1), "last");
      ncell++;
    end
  end

  initial begin
    in_valid = 0; in_gx = 0; in_gy = 0; in_x = 0; in_y = 0; out_ready = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        gxa[y][x] = $urandom_range(0, 510) - 255;
        gya[y][x] = $urandom_range(0, 510) - 255;
        if ($urandom_range(0, 9) == 0) gya[y][x] = 0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        in_valid <= 1; in_gx <= 9'(gxa[y][x]); in_gy <= 9'(gya[y][x]);
        in_x <= XW'(x); in_y <= XW'(y);
        @(posedge clk iff in_ready);
      end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    chk(ncell == WC * HC, $sformatf("cells %0d", ncell));
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
