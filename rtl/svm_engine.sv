// svm_engine: one SVM classification engine of the detector (the chip has
// two, sharing the same feature stream to detect two object classes).
//
// Data flow: the projected feature stream enters the root classifier, whose
// window scores pass through pruning (score > threshold). Kept roots wait in
// a candidate queue. For each candidate the engine loads, for all 8 parts,
// the (pw+4)x(ph+4) features around the part's anchor from the shared feature
// storage: each 8-bit code is read, de-quantized by a lookup in the cluster
// SRAM, and written into that part engine's local feature SRAM (a 3-stage
// pipeline, one feature per cycle). The deform unit then drives the 8 part
// engines through its coarse-to-fine search and returns the DPM score. With
// parts disabled (energy-saving mode) a candidate skips loading and deform and
// is reported with its root score.
//
// A candidate is started once the feature storage holds its window's
// bottom-right feature (codes are written in raster order) or the level is
// complete. The part search is confined to the root window: features outside
// it read as zero. Both rules make sure a candidate never waits for a
// feature that the root classifier has not yet taken, so a full candidate
// queue, which holds the feature stream, cannot deadlock the engine. These rules, the queue depth and the programming
// registers are this design's own; the block structure follows the paper.
//
// Interface: fbeat_t stream in, det_t stream out (valid/ready); one read port
// into feature storage and one into the cluster SRAM (both one-cycle
// latency); programming through cfg_* (already selected for this engine).
module svm_engine
  import dpm_pkg::*;
#(
  parameter int TW_MAX = 16,
  parameter int TH_MAX = 16,
  parameter int WC_MAX = 240,
  parameter int PW_MAX = 6,
  parameter int PH_MAX = 6,
  parameter int CQ_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // programming
  input  logic              cfg_we,
  input  cfg_target_e       cfg_target,
  input  logic [2:0]        cfg_part,
  input  logic [15:0]       cfg_addr,
  input  logic [CFGW-1:0]   cfg_data,
  // level information
  input  logic [CW-1:0]     wc,
  input  logic [CW-1:0]     hc,
  input  logic [3:0]        level,
  input  logic              level_start,
  input  logic [CW-1:0]     fs_wr_row,
  input  logic [CW-1:0]     fs_wr_col,
  input  logic              fs_level_done,
  // feature stream
  input  logic              in_valid,
  output logic              in_ready,
  input  fbeat_t            in,
  // feature storage read port
  output logic              fs_rd_en,
  output logic [CW-1:0]     fs_rd_x,
  output logic [CW-1:0]     fs_rd_y,
  input  logic [CODEW-1:0]  fs_rd_code,
  // cluster SRAM (de-quantization) read port
  output logic              cb_rd_en,
  output logic [CODEW-1:0]  cb_rd_addr,
  input  feat_t             cb_rd_data,
  // detections
  output logic              det_valid,
  input  logic              det_ready,
  output det_t              det,
  // status
  output logic              idle,
  output logic              parts_on,
  output logic [31:0]       n_kept,
  output logic [31:0]       n_pruned
);
  localparam int LW  = PW_MAX + 4;
  localparam int LA  = $clog2(LW * (PH_MAX + 4));
  localparam int RWA = $clog2(TW_MAX * TH_MAX);
  localparam int PWA = $clog2(PW_MAX * PH_MAX);

  // ---------------- programming registers ----------------
  score_t                  thresh;
  logic [7:0]              tw, th;
  logic                    eng_on;
  logic [NPARTS-1:0][31:0] geom;     // {ay, ax, ph, pw}
  logic [NPARTS-1:0][31:0] coef;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thresh <= '0; tw <= 8'd1; th <= 8'd1; eng_on <= 1'b0; parts_on <= 1'b0;
      geom <= '0; coef <= '0;
    end else if (cfg_we) begin
      case (cfg_target)
        CFG_ROOT_SZ: begin tw <= cfg_data[7:0]; th <= cfg_data[15:8]; end
        CFG_THRESH:  thresh <= score_t'(cfg_data[31:0]);
        CFG_PART_G:  geom[cfg_part] <= cfg_data[31:0];
        CFG_DEFORM:  coef[cfg_part] <= cfg_data[31:0];
        CFG_ENABLE:  begin eng_on <= cfg_data[0]; parts_on <= cfg_data[1]; end
        default: ;
      endcase
    end
  end

  // ---------------- root classification and pruning ----------------
  logic   rc_in_ready, rc_idle, rc_out_valid, rc_out_ready;
  root_t  rc_out;
  logic   pr_valid, pr_ready;
  root_t  pr_out;

  root_classifier #(.TW_MAX(TW_MAX), .TH_MAX(TH_MAX), .WC_MAX(WC_MAX)) u_root (
    .clk, .rst_n, .tw, .th,
    .w_we   (cfg_we && cfg_target == CFG_ROOT_W),
    .w_addr (RWA'(cfg_addr)),
    .w_data (sw_t'(cfg_data[$bits(sw_t)-1:0])),
    .in_valid (in_valid && eng_on), .in_ready (rc_in_ready), .in,
    .out_valid (rc_out_valid), .out_ready (rc_out_ready), .out (rc_out),
    .idle (rc_idle)
  );
  assign in_ready = eng_on ? rc_in_ready : 1'b1;

  pruning u_prune (
    .clk, .rst_n, .thresh, .cnt_clr (level_start),
    .in_valid (rc_out_valid), .in_ready (rc_out_ready), .in (rc_out),
    .out_valid (pr_valid), .out_ready (pr_ready), .out (pr_out),
    .n_kept, .n_pruned
  );

  logic  cq_valid, cq_ready, cq_empty;
  root_t cand;
  logic [$bits(root_t)-1:0] cq_data;

  sync_fifo #(.W($bits(root_t)), .DEPTH(CQ_DEPTH)) u_cq (
    .clk, .rst_n,
    .in_valid (pr_valid), .in_ready (pr_ready), .in_data (pr_out),
    .out_valid (cq_valid), .out_ready (cq_ready), .out_data (cq_data),
    .empty (cq_empty)
  );
  assign cand = root_t'(cq_data);
  root_t cr;                // candidate being processed

  // ---------------- part engines and deform ----------------
  logic                    pe_start;
  disp_t                   pe_dx [NPARTS], pe_dy [NPARTS];
  logic [NPARTS-1:0]       pe_done, pe_busy;
  score_t                  pe_score [NPARTS];
  logic                    df_start, df_busy, df_done;
  score_t                  df_total;
  logic [NPARTS-1:0][2:0]  df_bdx, df_bdy;

  // loader pipeline stage registers
  logic                    s1_v, s1_z, s2_v, s2_z;
  logic [2:0]              s1_p, s2_p;
  logic [LA-1:0]           s1_a, s2_a;

  for (genvar p = 0; p < NPARTS; p++) begin : g_part
    part_engine #(.PW_MAX(PW_MAX), .PH_MAX(PH_MAX)) u_pe (
      .clk, .rst_n,
      .pw (geom[p][7:0]), .ph (geom[p][15:8]),
      .w_we    (cfg_we && cfg_target == CFG_PART_W && cfg_part == 3'(p)),
      .w_addr  (PWA'(cfg_addr)),
      .w_data  (sw_t'(cfg_data[$bits(sw_t)-1:0])),
      .lf_we   (s2_v && s2_p == 3'(p)),
      .lf_addr (s2_a),
      .lf_data (s2_z ? feat_t'('0) : cb_rd_data),
      .start   (pe_start), .dx (pe_dx[p]), .dy (pe_dy[p]),
      .busy    (pe_busy[p]), .done (pe_done[p]), .score (pe_score[p])
    );
  end

  deform u_deform (
    .clk, .rst_n, .start (df_start), .root_score (cr.score), .coef,
    .pe_start, .pe_dx, .pe_dy, .pe_done, .pe_score,
    .busy (df_busy), .done (df_done), .total (df_total),
    .best_dx (df_bdx), .best_dy (df_bdy)
  );

  // ---------------- candidate sequencer ----------------
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_DRAIN, C_DEFORM, C_OUT} cst_e;
  cst_e        cst;
  logic [2:0]  lp;          // part being loaded
  logic [7:0]  lr, lc;      // row / column within the part's patch
  logic        gate_ok;
  logic signed [9:0] fx, fy;
  logic        in_lvl;
  logic [7:0]  pw_l, ph_l, ax_l, ay_l;

  assign pw_l = geom[lp][7:0];
  assign ph_l = geom[lp][15:8];
  assign ax_l = geom[lp][23:16];
  assign ay_l = geom[lp][31:24];

  always_comb begin
    // the window's last feature (bottom-right) is in the feature storage
    gate_ok = fs_level_done ||
              (9'(fs_wr_row) > 9'(cand.y) + 9'(th) - 9'd1) ||
              ((9'(fs_wr_row) == 9'(cand.y) + 9'(th) - 9'd1) &&
               (9'(fs_wr_col) >= 9'(cand.x) + 9'(tw) - 9'd1));
    fx      = 10'(cr.x) + 10'(ax_l) - 10'sd2 + 10'(lc);
    fy      = 10'(cr.y) + 10'(ay_l) - 10'sd2 + 10'(lr);
    // features outside the root window (or the level) read as zero
    in_lvl  = (fx >= 10'(cr.x)) && (fy >= 10'(cr.y)) &&
              (fx < 10'(cr.x) + 10'(tw)) && (fy < 10'(cr.y) + 10'(th)) &&
              (fx < 10'(wc)) && (fy < 10'(hc));
  end

  assign fs_rd_en   = (cst == C_LOAD) && in_lvl;
  assign fs_rd_x    = CW'(fx);
  assign fs_rd_y    = CW'(fy);
  assign cb_rd_en   = s1_v && !s1_z;
  assign cb_rd_addr = fs_rd_code;
  assign cq_ready   = (cst == C_IDLE) && gate_ok && !det_valid && !df_busy;
  assign df_start   = (cst == C_DEFORM) && !df_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; lp <= '0; lr <= '0; lc <= '0;
      s1_v <= 1'b0; s1_z <= 1'b0; s1_p <= '0; s1_a <= '0;
      s2_v <= 1'b0; s2_z <= 1'b0; s2_p <= '0; s2_a <= '0;
      det_valid <= 1'b0; det <= '0; cr <= '0;
    end else begin
      if (det_valid && det_ready) det_valid <= 1'b0;
      // loader pipeline
      s1_v <= (cst == C_LOAD);
      s1_z <= !in_lvl;
      s1_p <= lp;
      s1_a <= LA'(lr) * LA'(LW) + LA'(lc);
      s2_v <= s1_v; s2_z <= s1_z; s2_p <= s1_p; s2_a <= s1_a;

      case (cst)
        C_IDLE: if (cq_valid && cq_ready) begin
          cr <= cand;
          if (parts_on) begin
            cst <= C_LOAD;
            lp <= '0; lr <= '0; lc <= '0;
          end else begin
            // parts disabled: report the root detection directly
            det_valid      <= 1'b1;
            det.score      <= cand.score;
            det.root_score <= cand.score;
            det.x          <= cand.x;
            det.y          <= cand.y;
            det.level      <= level;
            det.pdx        <= '0;
            det.pdy        <= '0;
          end
        end
        C_LOAD: begin
          if (lc == pw_l + 8'd3) begin
            lc <= '0;
            if (lr == ph_l + 8'd3) begin
              lr <= '0;
              if (lp == 3'(NPARTS - 1)) cst <= C_DRAIN;
              else                      lp  <= lp + 1'b1;
            end else begin
              lr <= lr + 1'b1;
            end
          end else begin
            lc <= lc + 1'b1;
          end
        end
        C_DRAIN: if (!s1_v && !s2_v) cst <= C_DEFORM;
        C_DEFORM: if (df_done) begin
          det_valid      <= 1'b1;
          det.score      <= df_total;
          det.root_score <= cr.score;
          det.x          <= cr.x;
          det.y          <= cr.y;
          det.level      <= level;
          det.pdx        <= df_bdx;
          det.pdy        <= df_bdy;
          cst            <= C_OUT;
        end
        C_OUT: begin
          cst <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  assign idle = rc_idle && !rc_out_valid && cq_empty && (cst == C_IDLE) &&
                !det_valid && !df_busy && (pe_busy == '0);
endmodule
