// tb_filter_bank: streams two random frames (the second one smaller) with
// random input gaps and output back-pressure and checks every gradient and
// position against differences taken from the stored image. A third frame is
// streamed with no gaps to check one pixel per cycle.
module tb_filter_bank;
  import dpm_pkg::*;
  localparam int W = 20, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [XW-1:0] img_w, img_h;
  logic in_valid, in_ready, in_sof, out_valid, out_ready, out_last, idle;
  logic [7:0] in_pix;
  logic signed [8:0] out_gx, out_gy;
  logic [XW-1:0] out_x, out_y;
  int checks = 0, failures = 0;
  int img [3][H][W];
  int fw [3] = '{W, 13, W};
  int fh [3] = '{H, 4, H};
  int nout = 0, ofr = 0;

  filter_bank #(.IMG_W_MAX(32)) dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  // output checker
  int ox = 0, oy = 0;
  logic gaps = 1;
  always @(posedge clk) begin
    out_ready <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (out_valid && out_ready) begin
      int ex, ey;
      ex = (ox == 0) ? 0 : img[ofr][oy][ox] - img[ofr][oy][ox-1];
      ey = (oy == 0) ? 0 : img[ofr][oy][ox] - img[ofr][oy-1][ox];
      chk(out_gx == ex && out_gy == ey && out_x == ox && out_y == oy,
          $sformatf("f%0d (%0d,%0d) gx=%0d/%0d gy=%0d/%0d", ofr, ox, oy, out_gx, ex, out_gy, ey));
      chk(out_last == (ox == fw[ofr]-1 && oy == fh[ofr]-1), "last");
      if (ox == fw[ofr]-1) begin
        ox = 0;
        if (oy == fh[ofr]-1) begin oy = 0; ofr++; end else oy++;
      end else ox++;
      nout++;
    end
  end

  initial begin
    int t0, t1;
    in_valid = 0; in_sof = 0; in_pix = 0; img_w = 0; img_h = 0; out_ready = 0;
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = $urandom_range(0, 255);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      gaps = (f < 2);
      if (f == 2) t0 = $time;
      for (int y = 0; y < fh[f]; y++)
        for (int x = 0; x < fw[f]; x++) begin
          while (gaps && $urandom_range(0, 2) == 0) begin
            in_valid <= 0; @(posedge clk);
          end
          in_valid <= 1; in_pix <= 8'(img[f][y][x]); in_sof <= (x == 0 && y == 0);
          img_w <= XW'(fw[f]); img_h <= XW'(fh[f]);
          @(posedge clk iff in_ready);
        end
      in_valid <= 0;
      if (f == 2) begin
        t1 = $time;
        // one pixel per cycle when nothing stalls
        chk((t1 - t0) / 10 == W * H, $sformatf("rate: %0d cycles for %0d pixels", (t1 - t0) / 10, W * H));
      end
      repeat (5) @(posedge clk);
    end
    chk(nout == W * H * 2 + 13 * 4, "count");
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
