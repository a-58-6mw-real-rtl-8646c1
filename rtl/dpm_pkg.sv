// dpm_pkg: shared constants and types of the deformable-parts-model detector.
//
// A HOG feature is 13 dimensions of 11 bits (143 bits). SVM weights are
// stored sparse: a 13-bit flag marks the nonzero dimensions and at most six
// 5-bit signed weights follow (43 bits). These sizes follow the paper; the
// score width, coordinate widths and the programming-bus encoding are this
// design's own choices.
package dpm_pkg;
  localparam int NDIM   = 13;   // feature dimensions
  localparam int FW     = 11;   // bits per feature dimension
  localparam int WW     = 5;    // bits per SVM weight (-16..15)
  localparam int NNZ    = 6;    // nonzero weights per sparse word
  localparam int NPARTS = 8;    // deformable parts per model
  localparam int NCLUST = 256;  // VQ cluster centers
  localparam int CODEW  = 8;    // VQ code width
  localparam int SCW    = 32;   // score width
  localparam int CELL   = 8;    // pixels per HOG cell side
  localparam int NBINS  = 9;    // orientation bins
  localparam int CW     = 8;    // cell coordinate width
  localparam int XW     = 11;   // pixel coordinate width
  localparam int RAWW   = 16;   // raw histogram sum width
  localparam int BW     = 8;    // basis coefficient width
  localparam int CFGW   = NDIM * FW; // programming data width

  typedef logic signed [FW-1:0] fe_t;
  typedef fe_t [NDIM-1:0] feat_t;
  typedef logic signed [WW-1:0] wt_t;
  typedef logic signed [SCW-1:0] score_t;
  typedef logic [RAWW-1:0] raw_t;
  typedef raw_t [NDIM-1:0] rawvec_t;

  // Sparse weight word: flag[k]=1 marks a nonzero weight on dimension k; w[s]
  // is the s-th nonzero weight, counted from dimension 0 upwards.
  typedef struct packed {
    logic [NDIM-1:0]        flag;
    logic [NNZ-1:0][WW-1:0] w;
  } sw_t;

  // One feature of the stream, with its cell position and end-of-level mark.
  typedef struct packed {
    feat_t          f;
    logic [CW-1:0]  x;
    logic [CW-1:0]  y;
    logic           last;
  } fbeat_t;

  // A root window: its top-left cell and score.
  typedef struct packed {
    score_t         score;
    logic [CW-1:0]  x;
    logic [CW-1:0]  y;
    logic           last;   // last window of the level
  } root_t;

  typedef logic signed [2:0] disp_t;  // displacement -2..2

  // Detection result of one candidate.
  typedef struct packed {
    score_t                 score;
    score_t                 root_score;
    logic [CW-1:0]          x;
    logic [CW-1:0]          y;
    logic [3:0]             level;
    logic [NPARTS-1:0][2:0] pdx;    // chosen displacement per part
    logic [NPARTS-1:0][2:0] pdy;
  } det_t;

  // Programming bus targets.
  typedef enum logic [3:0] {
    CFG_BASIS   = 4'd0,  // addr = basis vector k, data = 13 x 8-bit coefficients
    CFG_CLUSTER = 4'd1,  // addr = center index, data = feat_t
    CFG_ROOT_W  = 4'd2,  // addr = j*TW_MAX+i, data[42:0] = sw_t
    CFG_ROOT_SZ = 4'd3,  // data = {th[7:0], tw[7:0]}
    CFG_THRESH  = 4'd4,  // data[31:0] = pruning threshold
    CFG_PART_W  = 4'd5,  // part, addr = j*PW_MAX+i, data = sw_t
    CFG_PART_G  = 4'd6,  // part, data = {ay, ax, ph, pw} 8 bits each
    CFG_DEFORM  = 4'd7,  // part, data = {a4, a3, a2, a1} 8-bit signed each
    CFG_ENABLE  = 4'd8   // data[0] engine on, data[1] parts on
  } cfg_target_e;
endpackage
