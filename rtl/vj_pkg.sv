// vj_pkg: cascade-classifier data types of the Viola-Jones face detector.
//
// A cascade is a list of stages; each stage is a run of features in the
// feature memory plus a stage threshold; each feature is up to three weighted
// rectangles in the base window, a feature threshold and the two values it
// votes with. Field widths are this implementation's choice; the base window
// of 20x20 matches the largest input of the authentication network.
package vj_pkg;

  localparam int unsigned WIN       = 20;   // base window edge, pixels
  localparam int unsigned N_RECT    = 3;    // rectangles per feature
  localparam int unsigned FEAT_AW   = 10;   // feature memory address width

  typedef struct packed {
    logic [4:0]         x, y, w, h;   // in base-window pixels
    logic signed [3:0]  weight;       // 0 = rectangle unused
  } rect_t;                           // 24 bits

  typedef struct packed {
    rect_t [N_RECT-1:0]  rect;
    logic signed [15:0]  thr;          // feature threshold, base-window scale
    logic signed [11:0]  left;         // vote when feature value < threshold
    logic signed [11:0]  right;        // vote otherwise
  } feat_t;                            // 112 bits

  typedef struct packed {
    logic [FEAT_AW-1:0]  first;        // first feature of the stage
    logic [5:0]          nfeat;        // features in the stage (1..63)
    logic signed [15:0]  thr;          // stage threshold on the vote sum
  } stage_t;                           // 32 bits

  typedef enum logic [1:0] {
    VJ_CFG_FEAT    = 2'd0,
    VJ_CFG_STAGE   = 2'd1,
    VJ_CFG_NSTAGES = 2'd2
  } vj_cfg_e;

endpackage
