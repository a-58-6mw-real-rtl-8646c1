// dpm_top: deformable-parts-model object detector.
//
// One pyramid level at a time enters as a raster pixel stream. The feature
// pyramid generation path (filter bank -> cell histograms -> normalization ->
// basis projection) turns it into one 13-D projected HOG feature per 8x8
// cell. That feature stream is shared three ways: the two SVM classification
// engines (two object classes at once) classify root windows on the fly,
// while the VQ engines compress each feature to an 8-bit code that is kept in
// the feature storage. After pruning, each engine fetches the codes around a
// candidate, de-quantizes them through the shared cluster SRAM and runs its 8
// part engines and the deform search. Detections leave per engine.
//
// Following the paper: the block set and their connections, two engines, 8
// parts, 5x5 deformation search, 256-entry codebook, 3 VQ engines sharing it,
// a 32 KB code store, sparse 43-bit weights. This design's own: a single
// feature lane (the paper runs three histogram/normalize lanes in parallel),
// levels entered as separate frames (the image scaler is not part of this
// RTL), and the programming bus below.
//
// Interface:
//  * pixel stream pix_valid/pix_ready/pix_data; pix_sof on a level's first
//    pixel, with img_w/img_h/pix_level valid then. A new level is accepted
//    only once the previous one has been fully processed (pix_ready stays low).
//  * programming bus cfg_we/cfg_target (cfg_target_e)/cfg_eng/cfg_part/
//    cfg_addr/cfg_data, one word per cycle, used between levels.
//  * det_valid/det_ready/det per engine.
module dpm_top
  import dpm_pkg::*;
#(
  parameter int IMG_W_MAX = 1920,
  parameter int TW_MAX    = 16,
  parameter int TH_MAX    = 16,
  parameter int PW_MAX    = 6,
  parameter int PH_MAX    = 6,
  parameter int FS_ROWS   = 136,
  parameter int N_ENGINES = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // pixels
  input  logic                 pix_valid,
  output logic                 pix_ready,
  input  logic [7:0]           pix_data,
  input  logic                 pix_sof,
  input  logic [XW-1:0]        img_w,
  input  logic [XW-1:0]        img_h,
  input  logic [3:0]           pix_level,
  // programming
  input  logic                 cfg_we,
  input  logic [3:0]           cfg_target,
  input  logic                 cfg_eng,
  input  logic [2:0]           cfg_part,
  input  logic [15:0]          cfg_addr,
  input  logic [CFGW-1:0]      cfg_data,
  // detections
  output logic [N_ENGINES-1:0] det_valid,
  input  logic [N_ENGINES-1:0] det_ready,
  output det_t                 det [N_ENGINES],
  // status
  output logic                 busy,
  output logic [31:0]          n_kept [N_ENGINES],
  output logic [31:0]          n_pruned [N_ENGINES]
);
  localparam int WC_MAX = IMG_W_MAX / CELL;

  cfg_target_e tgt;
  assign tgt = cfg_target_e'(cfg_target);

  // ---------------- level bookkeeping ----------------
  logic          all_idle, sof_acc, level_start;
  logic [CW-1:0] wc_r, hc_r;
  logic [3:0]    level_r;
  logic          fb_in_ready;

  assign pix_ready = fb_in_ready && !(pix_sof && !all_idle);
  assign sof_acc   = pix_valid && pix_ready && pix_sof;
  assign level_start = sof_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc_r <= '0; hc_r <= '0; level_r <= '0;
    end else if (sof_acc) begin
      wc_r    <= CW'(img_w >> 3);
      hc_r    <= CW'(img_h >> 3);
      level_r <= pix_level;
    end
  end

  // ---------------- feature pyramid generation ----------------
  logic                fb_valid, fb_ready, fb_last, fb_idle;
  logic signed [8:0]   fb_gx, fb_gy;
  logic [XW-1:0]       fb_x, fb_y;

  filter_bank #(.IMG_W_MAX(IMG_W_MAX)) u_fb (
    .clk, .rst_n, .img_w, .img_h,
    .in_valid (pix_valid && pix_ready), .in_ready (fb_in_ready), .in_pix (pix_data),
    .in_sof (pix_sof),
    .out_valid (fb_valid), .out_ready (fb_ready), .out_gx (fb_gx), .out_gy (fb_gy),
    .out_x (fb_x), .out_y (fb_y), .out_last (fb_last), .idle (fb_idle)
  );

  logic          hg_valid, hg_ready, hg_last, hg_idle;
  rawvec_t       hg_raw;
  logic [CW-1:0] hg_x, hg_y;

  hog_histogram #(.IMG_W_MAX(IMG_W_MAX)) u_hist (
    .clk, .rst_n, .wc (wc_r), .hc (hc_r),
    .in_valid (fb_valid), .in_ready (fb_ready), .in_gx (fb_gx), .in_gy (fb_gy),
    .in_x (fb_x), .in_y (fb_y),
    .out_valid (hg_valid), .out_ready (hg_ready), .out_raw (hg_raw),
    .out_x (hg_x), .out_y (hg_y), .out_last (hg_last), .idle (hg_idle)
  );

  logic   nm_valid, nm_ready, nm_idle;
  fbeat_t nm_out;

  hog_normalize u_norm (
    .clk, .rst_n,
    .in_valid (hg_valid), .in_ready (hg_ready), .in_raw (hg_raw),
    .in_x (hg_x), .in_y (hg_y), .in_last (hg_last),
    .out_valid (nm_valid), .out_ready (nm_ready), .out (nm_out), .idle (nm_idle)
  );

  logic   bp_valid, bp_ready, bp_idle;
  fbeat_t bp_out;

  basis_projection u_proj (
    .clk, .rst_n,
    .cfg_we (cfg_we && tgt == CFG_BASIS), .cfg_k (cfg_addr[3:0]),
    .cfg_row (cfg_data[NDIM*BW-1:0]),
    .in_valid (nm_valid), .in_ready (nm_ready), .in (nm_out),
    .out_valid (bp_valid), .out_ready (bp_ready), .out (bp_out), .idle (bp_idle)
  );

  // ---------------- fork of the feature stream ----------------
  logic [N_ENGINES-1:0] e_ready, e_idle;
  logic                 vq_ready, fork_go;

  assign fork_go  = bp_valid && (&e_ready) && vq_ready;
  assign bp_ready = (&e_ready) && vq_ready;

  // ---------------- feature storage path ----------------
  logic              vq_valid, vq_last, vq_idle;
  logic [CODEW-1:0]  vq_code;
  logic [CW-1:0]     vq_x, vq_y;
  logic [N_ENGINES:0]   cb_en;
  logic [CODEW-1:0]     cb_addr [N_ENGINES+1];
  feat_t                cb_data [N_ENGINES+1];

  vq_engine #(.N_ENG(3)) u_vq (
    .clk, .rst_n,
    .in_valid (fork_go), .in_ready (vq_ready), .in (bp_out),
    .flush (!(&e_ready)),
    .cb_rd_en (cb_en[0]), .cb_rd_addr (cb_addr[0]), .cb_rd_data (cb_data[0]),
    .out_valid (vq_valid), .out_ready (1'b1), .out_code (vq_code),
    .out_x (vq_x), .out_y (vq_y), .out_last (vq_last), .idle (vq_idle)
  );

  cluster_sram #(.N_RD(N_ENGINES + 1)) u_cb (
    .clk,
    .wr_en (cfg_we && tgt == CFG_CLUSTER), .wr_addr (cfg_addr[CODEW-1:0]),
    .wr_data (feat_t'(cfg_data)),
    .rd_en (cb_en), .rd_addr (cb_addr), .rd_data (cb_data)
  );

  logic [CW-1:0]        fs_wr_row, fs_wr_col;
  logic                 fs_level_done;
  logic [N_ENGINES-1:0] fs_en;
  logic [CW-1:0]        fs_x [N_ENGINES], fs_y [N_ENGINES];
  logic [CODEW-1:0]     fs_code [N_ENGINES];

  feature_storage #(.FS_COLS(WC_MAX), .FS_ROWS(FS_ROWS), .N_RD(N_ENGINES)) u_fs (
    .clk, .rst_n, .level_start,
    .wr_en (vq_valid), .wr_x (vq_x), .wr_y (vq_y), .wr_code (vq_code), .wr_last (vq_last),
    .wr_row (fs_wr_row), .wr_col (fs_wr_col), .level_done (fs_level_done),
    .rd_en (fs_en), .rd_x (fs_x), .rd_y (fs_y), .rd_code (fs_code)
  );

  // ---------------- SVM classification engines ----------------
  for (genvar e = 0; e < N_ENGINES; e++) begin : g_eng
    svm_engine #(.TW_MAX(TW_MAX), .TH_MAX(TH_MAX), .WC_MAX(WC_MAX),
                 .PW_MAX(PW_MAX), .PH_MAX(PH_MAX)) u_eng (
      .clk, .rst_n,
      .cfg_we (cfg_we && cfg_eng == 1'(e)), .cfg_target (tgt), .cfg_part, .cfg_addr, .cfg_data,
      .wc (wc_r), .hc (hc_r), .level (level_r), .level_start,
      .fs_wr_row, .fs_wr_col, .fs_level_done,
      .in_valid (fork_go), .in_ready (e_ready[e]), .in (bp_out),
      .fs_rd_en (fs_en[e]), .fs_rd_x (fs_x[e]), .fs_rd_y (fs_y[e]), .fs_rd_code (fs_code[e]),
      .cb_rd_en (cb_en[e+1]), .cb_rd_addr (cb_addr[e+1]), .cb_rd_data (cb_data[e+1]),
      .det_valid (det_valid[e]), .det_ready (det_ready[e]), .det (det[e]),
      .idle (e_idle[e]), .parts_on (), .n_kept (n_kept[e]), .n_pruned (n_pruned[e])
    );
  end

  assign all_idle = fb_idle && hg_idle && nm_idle && bp_idle && vq_idle && (&e_idle);
  assign busy     = !all_idle;
endmodule
