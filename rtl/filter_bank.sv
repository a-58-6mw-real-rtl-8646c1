// filter_bank: gradient filters at the head of the HOG feature pipeline.
//
// Takes a raster-order 8-bit pixel stream and produces, for every pixel, the
// horizontal and vertical gradients gx = p(x,y) - p(x-1,y) and
// gy = p(x,y) - p(x,y-1), taken as zero on the first column and first row.
// One line buffer holds the previous row. The paper only names a filter bank
// in front of the histogram; the backward-difference taps are this design's
// own choice, picked so that no look-ahead row is needed.
//
// Interface: valid/ready stream in and out. in_sof marks the first pixel of a
// frame (a pyramid level) and latches img_w/img_h. The output is registered:
// one pixel per cycle, latency one cycle. out_last marks the frame's last pixel.
module filter_bank
  import dpm_pkg::*;
#(
  parameter int IMG_W_MAX = 1920
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [XW-1:0]       img_w,
  input  logic [XW-1:0]       img_h,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [7:0]          in_pix,
  input  logic                in_sof,
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [8:0]   out_gx,
  output logic signed [8:0]   out_gy,
  output logic [XW-1:0]       out_x,
  output logic [XW-1:0]       out_y,
  output logic                out_last,
  output logic                idle
);
  logic [7:0]    linebuf [IMG_W_MAX];
  logic [7:0]    left;
  logic [XW-1:0] x, y, w_r, h_r;
  logic [XW-1:0] cx, cy, cw, ch;
  logic          acc;

  assign in_ready = !out_valid || out_ready;
  assign idle     = !out_valid;
  assign acc      = in_valid && in_ready;

  // position of the incoming pixel (in_sof restarts the frame)
  always_comb begin
    cx = in_sof ? '0 : x;
    cy = in_sof ? '0 : y;
    cw = in_sof ? img_w : w_r;
    ch = in_sof ? img_h : h_r;
  end

  // line buffer of the previous row
  always_ff @(posedge clk) begin
    if (acc) linebuf[cx] <= in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x <= '0; y <= '0; w_r <= '0; h_r <= '0; left <= '0;
      out_gx <= '0; out_gy <= '0; out_x <= '0; out_y <= '0; out_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (acc) begin
        out_valid <= 1'b1;
        out_gx    <= (cx == 0) ? 9'sd0 : $signed({1'b0, in_pix}) - $signed({1'b0, left});
        out_gy    <= (cy == 0) ? 9'sd0 : $signed({1'b0, in_pix}) - $signed({1'b0, linebuf[cx]});
        out_x     <= cx;
        out_y     <= cy;
        out_last  <= (cx == cw - 1) && (cy == ch - 1);
        left      <= in_pix;
        w_r <= cw; h_r <= ch;
        if (cx == cw - 1) begin
          x <= '0;
          y <= cy + 1'b1;
        end else begin
          x <= cx + 1'b1;
          y <= cy;
        end
      end
    end
  end
endmodule
