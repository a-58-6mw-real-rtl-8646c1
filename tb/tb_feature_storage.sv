// tb_feature_storage: writes two levels of codes in raster order (a small
// one and a 240x135 one at full size), checks the write-progress row and
// level-done flag as the rows fill, and reads back random positions on both
// ports.
module tb_feature_storage;
  import dpm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic level_start, wr_en, wr_last, level_done;
  logic [CW-1:0] wr_x, wr_y, wr_row, wr_col;
  logic [CODEW-1:0] wr_code;
  logic [1:0] rd_en;
  logic [CW-1:0] rd_x [2], rd_y [2];
  logic [CODEW-1:0] rd_code [2];
  int checks = 0, failures = 0;

  feature_storage dut (.*);

  function automatic logic [7:0] code_of(int x, int y, int l);
    return 8'(x * 7 + y * 13 + l * 101);
  endfunction

  task automatic chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    int wl [2] = '{9, 240};
    int hl [2] = '{5, 135};
    level_start = 0; wr_en = 0; wr_last = 0; wr_x = 0; wr_y = 0; wr_code = 0; rd_en = 0;
    rd_x[0] = 0; rd_x[1] = 0; rd_y[0] = 0; rd_y[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 2; l++) begin
      level_start <= 1;
      @(posedge clk);
      level_start <= 0;
      @(posedge clk);
      chk(!level_done && wr_row == 0, "cleared");
      for (int y = 0; y < hl[l]; y++)
        for (int x = 0; x < wl[l]; x++) begin
          wr_en <= 1; wr_x <= CW'(x); wr_y <= CW'(y); wr_code <= code_of(x, y, l);
          wr_last <= (x == wl[l]-1 && y == hl[l]-1);
          @(posedge clk);
          if (x == 0 && y > 0) begin
            #1 chk(wr_row == CW'(y) && wr_col == wr_x && !level_done, $sformatf("row %0d", wr_row));
          end
        end
      wr_en <= 0; wr_last <= 0;
      @(posedge clk);
      chk(level_done, "level_done");
      for (int t = 0; t < 200; t++) begin
        int x [2], y [2];
        for (int p = 0; p < 2; p++) begin
          x[p] = $urandom_range(0, wl[l]-1); y[p] = $urandom_range(0, hl[l]-1);
          rd_x[p] <= CW'(x[p]); rd_y[p] <= CW'(y[p]);
        end
        rd_en <= 2'b11;
        @(posedge clk);
        rd_en <= 2'b00;
        #1;
        for (int p = 0; p < 2; p++)
          chk(rd_code[p] == code_of(x[p], y[p], l), $sformatf("read l%0d (%0d,%0d)", l, x[p], y[p]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
