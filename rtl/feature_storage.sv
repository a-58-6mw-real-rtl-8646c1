// feature_storage: the 32 KB feature SRAM that keeps the VQ codes of the
// current pyramid level, so the part engines can fetch the features of a
// candidate root after pruning without recomputing them.
//
// Codes are written in raster order as the VQ produces them, at address
// y*FS_COLS + x. With 8x8-pixel cells a 1920x1080 level is 240x135 cells,
// which fits the 240x136 array (32,640 bytes), so a whole level is held and
// no ring addressing is needed. The module tracks how far the level has been
// written: (wr_col, wr_row) is the position of the last code written (codes
// arrive in raster order, so everything before it is stored) and level_done
// is set by the level's last code. level_start
// clears both. The 32 KB size and 8-bit codes follow the paper; the
// organization and the progress signals are this design's own.
//
// Timing: write port always ready; N_RD synchronous read ports, code one
// cycle after rd_en.
module feature_storage
  import dpm_pkg::*;
#(
  parameter int FS_COLS = 240,
  parameter int FS_ROWS = 136,
  parameter int N_RD    = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              level_start,
  input  logic              wr_en,
  input  logic [CW-1:0]     wr_x,
  input  logic [CW-1:0]     wr_y,
  input  logic [CODEW-1:0]  wr_code,
  input  logic              wr_last,
  output logic [CW-1:0]     wr_row,
  output logic [CW-1:0]     wr_col,
  output logic              level_done,
  input  logic [N_RD-1:0]   rd_en,
  input  logic [CW-1:0]     rd_x [N_RD],
  input  logic [CW-1:0]     rd_y [N_RD],
  output logic [CODEW-1:0]  rd_code [N_RD]
);
  localparam int DEPTH = FS_COLS * FS_ROWS;
  localparam int AW    = $clog2(DEPTH);

  logic [CODEW-1:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr(logic [CW-1:0] x, logic [CW-1:0] y);
    return AW'(y) * AW'(FS_COLS) + AW'(x);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && wr_x < CW'(FS_COLS) && wr_y < CW'(FS_ROWS))
      mem[addr(wr_x, wr_y)] <= wr_code;
    for (int p = 0; p < N_RD; p++)
      if (rd_en[p]) rd_code[p] <= mem[addr(rd_x[p], rd_y[p])];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_row     <= '0;
      wr_col     <= '0;
      level_done <= 1'b0;
    end else if (level_start) begin
      wr_row     <= '0;
      wr_col     <= '0;
      level_done <= 1'b0;
    end else if (wr_en) begin
      wr_row <= wr_y;
      wr_col <= wr_x;
      if (wr_last) level_done <= 1'b1;
    end
  end
endmodule
