// odl_pkg: types and constants shared by the ODL core.
//
// Numbers are 32-bit two's-complement fixed point. The 32-bit width follows
// the published core; the split into 16 integer and 16 fraction bits (Q16.16)
// is this design's choice. Memories are addressed by a common request struct
// so that the controller and the SRAM banks agree on one bundle of signals.
package odl_pkg;

  localparam int unsigned W    = 32;  // data word width
  localparam int unsigned FRAC = 16;  // fraction bits (Q16.16)
  localparam int unsigned AW   = 16;  // address width of any memory port

  typedef logic signed [W-1:0] fxp_t;

  localparam fxp_t FXP_ONE = fxp_t'(1) <<< FRAC;
  localparam fxp_t FXP_MAX = {1'b0, {(W-1){1'b1}}};
  localparam fxp_t FXP_MIN = {1'b1, {(W-1){1'b0}}};

  // One memory request: enable, write enable, word address, write data.
  typedef struct packed {
    logic          en;
    logic          we;
    logic [AW-1:0] addr;
    logic [W-1:0]  wdata;
  } mem_req_t;

  // Memories a host can reach while the core is idle.
  typedef enum logic [1:0] {
    MEM_X    = 2'd0,  // input vector x (n words)
    MEM_BETA = 2'd1,  // output weights beta (N x m)
    MEM_P    = 2'd2   // the current P matrix (N x N)
  } mem_sel_t;

  // Operation mode of Algorithm 1.
  typedef enum logic {
    MODE_PREDICT = 1'b0,
    MODE_TRAIN   = 1'b1
  } mode_t;

  // Confidence thresholds for automatic tuning, highest first: 1, 0.64,
  // 0.32, 0.16, 0.08 (values rounded to Q16.16).
  localparam int unsigned NUM_THETA = 5;
  localparam fxp_t THETA_TAB [NUM_THETA] = '{
    32'sd65536, 32'sd41943, 32'sd20972, 32'sd10486, 32'sd5243
  };

  // Run-time configuration of the core.
  typedef struct packed {
    logic [15:0] n_in;       // input nodes n (<= N_IN_MAX)
    logic [15:0] n_hid;      // hidden nodes N (<= N_HID_MAX)
    logic [7:0]  n_out;      // output nodes m (<= N_OUT_MAX)
    logic [7:0]  x_consec;   // X: consecutive successes before theta drops
    logic [15:0] min_train;  // samples trained before pruning may start
    logic [15:0] train_len;  // training-mode events before IsTrainDone
    logic [15:0] seed;       // xorshift seed for alpha and b
    logic        auto_theta; // 1: auto-tune theta, 0: keep theta_fixed
    fxp_t        theta_fixed;// fixed threshold when auto_theta = 0
  } odl_cfg_t;

  // Signed fixed-point product a*b scaled back by FRAC bits, rounded to
  // nearest (halves upward) and saturated. Rounding to nearest keeps the
  // recursive P update free of the downward drift that truncation causes.
  function automatic fxp_t fxp_mul(fxp_t a, fxp_t b);
    logic signed [2*W-1:0] p;
    logic signed [2*W-1:0] s;
    p = a * b;
    s = (p + (64'sd1 <<< (FRAC - 1))) >>> FRAC;   // round to nearest
    if (s > 64'sh7FFF_FFFF)                      return FXP_MAX;
    else if (s < -64'sh8000_0000)                return FXP_MIN;
    else                                         return fxp_t'(s);
  endfunction

  // Saturating signed addition.
  function automatic fxp_t fxp_add(fxp_t a, fxp_t b);
    logic signed [W:0] s;
    s = {a[W-1], a} + {b[W-1], b};
    if (s[W] != s[W-1]) return s[W] ? FXP_MIN : FXP_MAX;
    else                return s[W-1:0];
  endfunction

endpackage
