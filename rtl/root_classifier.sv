// root_classifier: on-the-fly root SVM classification of every window
// position of a pyramid level.
//
// Features arrive once, in raster order. A feature at cell (x,y) belongs to
// every window whose template covers it: for template cell (i,j) that is the
// window with top-left (x-i, y-j). The classifier visits the tw*th template
// cells of each incoming feature, one per cycle, computes the sparse partial
// dot product of the feature with weight (i,j) and adds it to that window's
// partial sum in the accumulation SRAM. The window's first contribution
// (i=j=0) overwrites the stale sum; its last one (i=tw-1, j=th-1) completes
// it and the score is emitted. Windows are kept in TH_MAX rows of WC_MAX
// entries, indexed by (top row mod TH_MAX, left column).
//
// The paper states that root classification runs on the fly with partial dot
// products accumulated in SRAM and that templates reach 128x128 pixels
// (16x16 cells); this visiting schedule is this design's own.
//
// Interface: feature stream in (valid/ready), root_t stream out. tw, th (1..16)
// are set between levels. Weights are written at address j*TW_MAX+i.
// Timing: tw*th cycles per feature, plus stalls while an emitted score waits.
module root_classifier
  import dpm_pkg::*;
#(
  parameter int TW_MAX = 16,
  parameter int TH_MAX = 16,
  parameter int WC_MAX = 240
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [7:0]                        tw,
  input  logic [7:0]                        th,
  input  logic                              w_we,
  input  logic [$clog2(TW_MAX*TH_MAX)-1:0]  w_addr,
  input  sw_t                               w_data,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  fbeat_t                            in,
  output logic                              out_valid,
  input  logic                              out_ready,
  output root_t                             out,
  output logic                              idle
);
  localparam int WA = $clog2(TW_MAX * TH_MAX);
  localparam int AA = $clog2(TH_MAX * WC_MAX);

  sw_t    wmem [TW_MAX * TH_MAX];
  score_t amem [TH_MAX * WC_MAX];

  fbeat_t        cur;
  logic          busy;
  logic [7:0]    i, j;
  logic          contrib, first, final_c, stall, step;
  logic [CW-1:0] wx, wy;
  logic [AA-1:0] aaddr;
  score_t        pd, sum;
  sw_t           wcur;

  assign wcur = wmem[WA'(j) * WA'(TW_MAX) + WA'(i)];

  sparse_dot u_dot (.f(cur.f), .w(wcur), .y(pd));

  always_comb begin
    contrib = (cur.x >= CW'(i)) && (cur.y >= CW'(j));
    wx      = cur.x - CW'(i);
    wy      = cur.y - CW'(j);
    aaddr   = AA'(wy % CW'(TH_MAX)) * AA'(WC_MAX) + AA'(wx);
    first   = (i == 8'd0) && (j == 8'd0);
    final_c = (i == tw - 8'd1) && (j == th - 8'd1);
    sum     = (first ? '0 : amem[aaddr]) + pd;
    stall   = final_c && contrib && out_valid && !out_ready;
    step    = busy && !stall;
  end

  assign in_ready = !busy;
  assign idle     = !busy && !out_valid;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (step && contrib && wx < CW'(WC_MAX)) amem[aaddr] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; i <= '0; j <= '0;
      out_valid <= 1'b0; out <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        cur  <= in;
        busy <= 1'b1;
        i    <= '0;
        j    <= '0;
      end else if (step) begin
        if (final_c && contrib) begin
          out_valid <= 1'b1;
          out.score <= sum;
          out.x     <= wx;
          out.y     <= wy;
          out.last  <= cur.last;
        end
        if (i == tw - 8'd1) begin
          i <= '0;
          if (j == th - 8'd1) busy <= 1'b0;
          else                j <= j + 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
