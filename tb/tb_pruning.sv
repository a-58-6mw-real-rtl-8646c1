// tb_pruning: random root scores around a threshold (including scores equal
// to it, which must be pruned) with random downstream stalls; checks that
// exactly the roots with score > threshold come out, in order, and the
// kept/pruned counters.
module tb_pruning;
  import dpm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  score_t thresh;
  logic cnt_clr, in_valid, in_ready, out_valid, out_ready;
  root_t in, out;
  logic [31:0] n_kept, n_pruned;
  root_t exp_q [$];
  int checks = 0, failures = 0, ek = 0, ep = 0;

  pruning dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 2) != 0);
    if (out_valid && out_ready) begin
      root_t e;
      e = exp_q.pop_front();
      chk(out == e, "candidate");
    end
  end

  initial begin
    thresh = -32'sd50; cnt_clr = 0; in_valid = 0; in = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      root_t r;
      r.score = score_t'($urandom_range(0, 200)) - 32'sd150;
      if (t % 17 == 0) r.score = thresh;
      r.x = CW'(t); r.y = CW'(t >> 3); r.last = 0;
      if (r.score > thresh) begin exp_q.push_back(r); ek++; end else ep++;
      in_valid <= 1; in <= r;
      @(posedge clk iff in_ready);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    chk(exp_q.size() == 0, "all candidates out");
    chk(n_kept == ek && n_pruned == ep, $sformatf("counters %0d/%0d %0d/%0d", n_kept, ek, n_pruned, ep));
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
