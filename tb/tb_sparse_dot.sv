// tb_sparse_dot: random features and sparse weight words (0..6 flags set and
// a few words with more than six) against a dense dot product.
module tb_sparse_dot;
  import dpm_pkg::*;
  import tb_ref_pkg::*;
  feat_t  f;
  sw_t    w;
  score_t y;
  int checks = 0, failures = 0;

  sparse_dot dut (.f, .w, .y);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int nset;
      for (int k = 0; k < NDIM; k++) f[k] = fe_t'($urandom_range(0, 2047));
      w = '0;
      nset = (t < 1900) ? $urandom_range(0, 6) : $urandom_range(7, 13);
      while ($countones(w.flag) < nset) w.flag[$urandom_range(0, NDIM-1)] = 1'b1;
      for (int s = 0; s < NNZ; s++) w.w[s] = WW'($urandom_range(0, 31));
      #1;
      checks++;
      if (longint'(y) != ref_sdot(f, w)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d y=%0d exp=%0d", t, y, ref_sdot(f, w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
