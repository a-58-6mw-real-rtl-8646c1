// tb_cluster_sram: writes all 256 centers, then reads random addresses on
// all three ports at once and checks the data one cycle later; overwrites a
// few entries and reads them back.
module tb_cluster_sram;
  import dpm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [CODEW-1:0] wr_addr;
  feat_t wr_data;
  logic [2:0] rd_en;
  logic [CODEW-1:0] rd_addr [3];
  feat_t rd_data [3];
  feat_t model [NCLUST];
  int checks = 0, failures = 0;

  cluster_sram #(.N_RD(3)) dut (.*);

  function automatic feat_t rnd();
    feat_t f;
    for (int k = 0; k < NDIM; k++) f[k] = fe_t'($urandom_range(0, 2047));
    return f;
  endfunction

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = '0; rd_en = 0;
    for (int p = 0; p < 3; p++) rd_addr[p] = 0;
    @(posedge clk);
    for (int a = 0; a < NCLUST; a++) begin
      model[a] = rnd();
      wr_en <= 1; wr_addr <= CODEW'(a); wr_data <= model[a];
      @(posedge clk);
    end
    wr_en <= 0;
    for (int t = 0; t < 300; t++) begin
      int a [3];
      if (t % 50 == 0) begin
        a[0] = $urandom_range(0, 255);
        model[a[0]] = rnd();
        wr_en <= 1; wr_addr <= CODEW'(a[0]); wr_data <= model[a[0]];
        @(posedge clk);
        wr_en <= 0;
      end
      for (int p = 0; p < 3; p++) begin
        a[p] = $urandom_range(0, 255);
        rd_addr[p] <= CODEW'(a[p]);
      end
      rd_en <= 3'b111;
      @(posedge clk);
      rd_en <= 3'b000;
      #1;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rd_data[p] != model[a[p]]) begin
          failures++;
          if (failures < 5) $display("FAIL port %0d addr %0d", p, a[p]);
        end
      end
    end
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
