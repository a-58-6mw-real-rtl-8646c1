// tb_basis_projection: programs 13 random basis vectors, streams random
// features (including extreme values that saturate) with random output
// back-pressure and checks every projected dimension and the 13-cycle
// dot-product schedule (14 cycles from acceptance to output).
module tb_basis_projection;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, in_valid, in_ready, out_valid, out_ready, idle;
  logic [3:0] cfg_k;
  logic [NDIM*BW-1:0] cfg_row;
  fbeat_t in, out;
  logic [NDIM*BW-1:0] basis [NDIM];
  int checks = 0, failures = 0;

  basis_projection dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    cfg_we = 0; cfg_k = 0; cfg_row = 0; in_valid = 0; in = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NDIM; k++) begin
      for (int j = 0; j < NDIM; j++) basis[k][j*BW +: BW] = BW'($urandom_range(0, 255));
      cfg_we <= 1; cfg_k <= 4'(k); cfg_row <= basis[k];
      @(posedge clk);
    end
    cfg_we <= 0;
    for (int t = 0; t < 100; t++) begin
      fbeat_t b;
      feat_t  e;
      int     t0;
      for (int k = 0; k < NDIM; k++)
        b.f[k] = (t % 10 == 0) ? fe_t'(1023) : fe_t'($urandom_range(0, 2047));
      b.x = CW'(t); b.y = CW'(t * 3); b.last = (t == 99);
      e = ref_proj(b.f, basis);
      in_valid <= 1; in <= b; out_ready <= 0;
      @(posedge clk iff in_ready);
      t0 = $time;
      in_valid <= 0;
      while (!out_valid) @(posedge clk);
      chk(($time - t0) / 10 == 14, $sformatf("latency %0d", ($time - t0) / 10));
      repeat ($urandom_range(0, 3)) @(posedge clk);
      chk(out.f == e && out.x == b.x && out.y == b.y && out.last == b.last,
          $sformatf("t=%0d", t));
      out_ready <= 1;
      @(posedge clk);
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
