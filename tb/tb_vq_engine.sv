// tb_vq_engine: a random 256-center codebook (served by a one-cycle-latency
// memory model), two levels of 7 and 3 features, the level's last feature
// closing a partial group. Some features are copies of centers (distance 0),
// and one center is duplicated so the lower index must win. Checks every
// code, position and last mark, and the 256-cycle sweep per group.
module tb_vq_engine;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush, in_valid, in_ready, cb_rd_en, out_valid, out_ready, out_last, idle;
  fbeat_t in;
  logic [CODEW-1:0] cb_rd_addr, out_code;
  feat_t cb_rd_data;
  logic [CW-1:0] out_x, out_y;
  feat_t cb [NCLUST];
  fbeat_t sent [$];
  int checks = 0, failures = 0, nout = 0, nrd = 0;

  vq_engine #(.N_ENG(3)) dut (.*);

  always @(posedge clk) begin
    if (cb_rd_en) begin cb_rd_data <= cb[cb_rd_addr]; nrd++; end
  end

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 1) == 1);
    if (out_valid && out_ready) begin
      fbeat_t b;
      b = sent.pop_front();
      chk(int'(out_code) == ref_vq(b.f, cb), $sformatf("code %0d exp %0d", out_code, ref_vq(b.f, cb)));
      chk(out_x == b.x && out_y == b.y && out_last == b.last, "pos/last");
      nout++;
    end
  end

  initial begin
    in_valid = 0; in = '0; flush = 0; out_ready = 0; cb_rd_data = '0;
    for (int c = 0; c < NCLUST; c++)
      for (int k = 0; k < NDIM; k++) cb[c][k] = fe_t'($urandom_range(0, 2047));
    cb[200] = cb[17];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      fbeat_t b;
      for (int k = 0; k < NDIM; k++) b.f[k] = fe_t'($urandom_range(0, 2047));
      if (t == 2) b.f = cb[17];
      if (t == 5) b.f = cb[99];
      b.x = CW'(t); b.y = CW'(t + 1); b.last = (t == 6 || t == 9);
      sent.push_back(b);
      in_valid <= 1; in <= b;
      @(posedge clk iff in_ready);
    end
    in_valid <= 0;
    while (nout < 10) @(posedge clk);
    chk(nrd == 4 * NCLUST, $sformatf("codebook reads %0d", nrd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
