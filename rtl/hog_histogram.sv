// hog_histogram: orientation histograms of 8x8-pixel cells.
//
// Each gradient (gx, gy) is folded to the upper half plane (unsigned
// orientation, 0..180 degrees) and assigned to one of 9 bins of 20 degrees by
// comparing it with the 8 bin boundaries through cross products
// (C_k*gy - S_k*gx >= 0 means "at or past boundary k"; C_k, S_k are
// cos/sin(20k deg) in Q20, fine enough that no
// 9-bit gradient lands on the wrong side of a boundary). Its weight is the L1 magnitude |gx|+|gy|. The
// 13 raw values of a cell are the 9 bin sums plus the gradient energy of each
// of its four 4x4 quadrants (index 9 + {y[2],x[2]}). One accumulator word per
// cell column of the current cell row is kept (read-modify-write per pixel).
// Only whole cells are produced: wc = img_w/8 by hc = img_h/8 cells.
//
// The paper names a histogram stage and a 13-D feature; bin count, cell size,
// magnitude and the 4 quadrant energies are this design's own choices.
//
// Interface: valid/ready streams. A cell is emitted when its bottom-right
// pixel is accepted; out_last marks the last cell of the level. Input is
// stalled while an emitted cell waits.
module hog_histogram
  import dpm_pkg::*;
#(
  parameter int IMG_W_MAX = 1920
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CW-1:0]     wc,        // whole cells per row
  input  logic [CW-1:0]     hc,        // whole cell rows
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [8:0] in_gx,
  input  logic signed [8:0] in_gy,
  input  logic [XW-1:0]     in_x,
  input  logic [XW-1:0]     in_y,
  output logic              out_valid,
  input  logic              out_ready,
  output rawvec_t           out_raw,
  output logic [CW-1:0]     out_x,
  output logic [CW-1:0]     out_y,
  output logic              out_last,
  output logic              idle
);
  localparam int NCOL = IMG_W_MAX / CELL;
  localparam logic signed [21:0] CK [8] = '{22'sd985339, 22'sd803256, 22'sd524288, 22'sd182083,
                                           -22'sd182083, -22'sd524288, -22'sd803256, -22'sd985339};
  localparam logic signed [21:0] SK [8] = '{22'sd358634, 22'sd674012, 22'sd908093, 22'sd1032646,
                                           22'sd1032646, 22'sd908093, 22'sd674012, 22'sd358634};

  rawvec_t acc_mem [NCOL];

  logic signed [9:0]  fx, fy;
  logic [3:0]         bin;
  logic [9:0]         mag;
  logic [CW-1:0]      ccol, crow;
  logic               in_cells, first_px, last_px, acc;
  logic [3:0]         qidx;
  rawvec_t            cur, nxt;

  assign in_ready = !out_valid || out_ready;
  assign idle     = !out_valid;
  assign acc      = in_valid && in_ready;

  always_comb begin
    // fold to unsigned orientation
    if (in_gy < 0 || (in_gy == 0 && in_gx < 0)) begin
      fx = -10'(in_gx);
      fy = -10'(in_gy);
    end else begin
      fx = 10'(in_gx);
      fy = 10'(in_gy);
    end
    bin = '0;
    for (int k = 0; k < 8; k++) begin
      logic signed [33:0] cr;
      cr = 34'(CK[k]) * 34'(fy) - 34'(SK[k]) * 34'(fx);
      if (cr >= 0) bin = 4'(k + 1);
    end
    mag = 10'((fx < 0) ? -fx : fx) + 10'(fy);
  end

  always_comb begin
    ccol     = CW'(in_x >> 3);
    crow     = CW'(in_y >> 3);
    in_cells   = (ccol < wc) && (crow < hc);
    first_px = (in_x[2:0] == 3'd0) && (in_y[2:0] == 3'd0);
    last_px  = (in_x[2:0] == 3'd7) && (in_y[2:0] == 3'd7);
    qidx     = 4'(NBINS) + {2'b00, in_y[2], in_x[2]};
    cur      = first_px ? '0 : acc_mem[ccol];
    nxt      = cur;
    nxt[bin]  = cur[bin] + RAWW'(mag);
    nxt[qidx] = cur[qidx] + RAWW'(mag);
  end

  always_ff @(posedge clk) begin
    if (acc && in_cells) acc_mem[ccol] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_raw   <= '0;
      out_x     <= '0;
      out_y     <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (acc && in_cells && last_px) begin
        out_valid <= 1'b1;
        out_raw   <= nxt;
        out_x     <= ccol;
        out_y     <= crow;
        out_last  <= (ccol == wc - 1) && (crow == hc - 1);
      end
    end
  end
endmodule
