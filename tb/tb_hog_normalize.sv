// tb_hog_normalize: random raw cell vectors (including an all-zero cell and
// cells with one dominant bin) against a reference that divides with real
// arithmetic; also checks the 27-cycle per-cell latency.
module tb_hog_normalize;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, out_valid, out_ready, idle;
  rawvec_t in_raw;
  logic [CW-1:0] in_x, in_y;
  fbeat_t out;
  int checks = 0, failures = 0;

  hog_normalize dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    in_valid = 0; in_raw = '0; in_x = 0; in_y = 0; in_last = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      rawvec_t r;
      feat_t   e;
      int      tot, t0;
      r = '0;
      tot = 0;
      if (t > 0) begin
        for (int k = 0; k < NBINS; k++) begin
          r[k] = RAWW'((t % 7 == 0 && k != 2) ? $urandom_range(0, 3) : $urandom_range(0, 3600));
          tot += r[k];
        end
        for (int q = 0; q < 4; q++) r[NBINS+q] = RAWW'($urandom_range(0, tot / 4));
      end
      e = ref_norm(r);
      @(posedge clk);
      in_valid <= 1; in_raw <= r; in_x <= CW'(t); in_y <= CW'(t / 3); in_last <= (t == 199);
      @(posedge clk iff in_ready);
      t0 = $time;
      in_valid <= 0;
      while (!out_valid) @(posedge clk);
      chk(($time - t0) / 10 == 26, $sformatf("latency %0d", ($time - t0) / 10));
      for (int k = 0; k < NDIM; k++)
        chk(out.f[k] == e[k], $sformatf("t=%0d k=%0d %0d/%0d", t, k, out.f[k], e[k]));
      chk(out.x == CW'(t) && out.y == CW'(t / 3) && out.last == (t == 199), "pass-through");
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
