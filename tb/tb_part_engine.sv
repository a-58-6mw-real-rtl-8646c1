// tb_part_engine: loads random part weights (3x3 maximum, 3x2 used) and a
// random 7x6 local feature patch, then computes the part score at all 25
// displacements and compares each with a dense sum over the displaced
// template; checks the pw*ph+1 cycle latency. A second round uses 2x3.
module tb_part_engine;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  localparam int PWM = 3, PHM = 3, LW = PWM + 4, LH = PHM + 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] pw, ph;
  logic w_we, lf_we, start, busy, done;
  logic [$clog2(PWM*PHM)-1:0] w_addr;
  logic [$clog2(LW*LH)-1:0] lf_addr;
  sw_t w_data;
  feat_t lf_data;
  disp_t dx, dy;
  score_t score;
  sw_t   wm [PWM*PHM];
  feat_t lm [LW*LH];
  int checks = 0, failures = 0;

  part_engine #(.PW_MAX(PWM), .PH_MAX(PHM)) dut (.*);

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    int sw [2] = '{3, 2};
    int sh [2] = '{2, 3};
    pw = 1; ph = 1; w_we = 0; lf_we = 0; start = 0; w_addr = 0; lf_addr = 0;
    w_data = '0; lf_data = '0; dx = 0; dy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      for (int a = 0; a < PWM*PHM; a++) begin
        sw_t w;
        w = '0;
        while ($countones(w.flag) < $urandom_range(1, 6)) w.flag[$urandom_range(0, 12)] = 1'b1;
        for (int s = 0; s < NNZ; s++) w.w[s] = WW'($urandom_range(0, 31));
        wm[a] = w;
        w_we <= 1; w_addr <= 4'(a); w_data <= w;
        @(posedge clk);
      end
      w_we <= 0;
      for (int a = 0; a < LW*LH; a++) begin
        for (int k = 0; k < NDIM; k++) lm[a][k] = fe_t'($urandom_range(0, 2047));
        lf_we <= 1; lf_addr <= 6'(a); lf_data <= lm[a];
        @(posedge clk);
      end
      lf_we <= 0;
      pw <= 8'(sw[r]); ph <= 8'(sh[r]);
      for (int ddy = -2; ddy <= 2; ddy++)
        for (int ddx = -2; ddx <= 2; ddx++) begin
          longint e;
          int t0;
          e = 0;
          for (int j = 0; j < sh[r]; j++)
            for (int i = 0; i < sw[r]; i++)
              e += ref_sdot(lm[(ddy+2+j)*LW + ddx+2+i], wm[j*PWM+i]);
          start <= 1; dx <= 3'(ddx); dy <= 3'(ddy);
          @(posedge clk);
          t0 = $time;
          start <= 0;
          @(posedge clk iff done);
          chk(($time - t0) / 10 == sw[r] * sh[r] + 1, $sformatf("latency %0d", ($time - t0) / 10));
          #1 chk(longint'(score) == e, $sformatf("(%0d,%0d) %0d exp %0d", ddx, ddy, score, e));
        end
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
