// sfmmcn_pkg: types and constants shared by the SF-MMCN accelerator.
//
// Data are 16-bit signed fixed point (Q8.8 by default: FRAC_W fraction bits).
// The 16-bit width is the paper's; the split into 8 integer and 8 fraction
// bits is this design's choice. The mode codes 1..4 are the ones printed in
// the architecture figure (convolution, max pooling, convolution + max
// pooling, dense); they need a 3-bit field. The SF ("server flow") modes say
// what the ninth PE of each core does: nothing, pass the previous layer's
// output to the residual registers, or compute a 1x1 residual convolution.
//
// Lint of a module that does no fixed-point rescaling reports FRAC_W as
// unused; it is used by the PEs, and the warning stands for the others.
package sfmmcn_pkg;

  localparam int unsigned DATA_W  = 16;   // feature / weight / bias width
  localparam int unsigned FRAC_W  = 8;    // fraction bits of the fixed-point format
  localparam int unsigned ACC_W   = 40;   // PE accumulator width
  localparam int unsigned TAP_W   = 16;   // tap-counter width
  localparam int unsigned LANES   = 8;    // PE_1..PE_8 of one core
  localparam int unsigned N_CORES = 8;    // SF-MMCN cores in the accelerator
  localparam int unsigned IN_AW   = 10;   // input buffer address width
  localparam int unsigned W_AW    = 10;   // weight buffer address width
  localparam int unsigned OUT_AW  = 8;    // output buffer address width

  typedef logic signed [DATA_W-1:0] data_t;

  typedef enum logic [2:0] {
    MODE_IDLE     = 3'd0,
    MODE_CONV     = 3'd1,
    MODE_POOL     = 3'd2,
    MODE_CONVPOOL = 3'd3,
    MODE_DENSE    = 3'd4
  } mode_e;

  typedef enum logic [1:0] {
    SF_OFF  = 2'd0,   // PE_9 idle, conv_k = MAC_k
    SF_PASS = 2'd1,   // PE_9 forwards the previous conv output as residual
    SF_CONV = 2'd2    // PE_9 computes the residual convolution itself
  } sf_mode_e;

  // Layer descriptor written by the host and used by TOP CTRL and the cores.
  typedef struct packed {
    mode_e                mode;
    sf_mode_e             sf_mode;
    logic                 split;     // small-map mode: PE_5..PE_8 use weight B
    logic                 act_en;    // ReLU in the activation unit
    logic                 add_en;    // post adder adds the per-core addend
    logic [TAP_W-1:0]     taps;      // taps per PE_1..PE_8 output
    logic [TAP_W-1:0]     res_taps;  // taps per PE_9 output (SF_CONV)
    logic [TAP_W-1:0]     n_ops;     // outputs (per lane) in this layer
    logic [IN_AW-1:0]     in_base;
    logic [W_AW-1:0]      w_base;
    logic [OUT_AW-1:0]    out_base;
  } layer_cfg_t;

  // One input-buffer word: what all cores consume in one cycle.
  typedef struct packed {
    logic [LANES-1:0]             reuse_cap;  // lane k: keep this feature in R_c(k)
    logic [LANES-1:0]             reuse_use;  // lane k: take the feature from R_c(k)
    logic [N_CORES-1:0][DATA_W-1:0] res_feat; // PE_9 input of each core (residual / previous conv)
    logic [LANES-1:0][DATA_W-1:0] feat;       // PE_1..PE_8 input features
  } in_word_t;

  // The weights of one core for one tap.
  typedef struct packed {
    data_t addend;   // post-adder operand, latched with the first tap
    data_t w9;       // PE_9 weight
    data_t wb;       // PE_5..PE_8 weight in split mode
    data_t wa;       // PE_1..PE_8 weight (PE_1..PE_4 in split mode)
  } core_w_t;

  typedef core_w_t [N_CORES-1:0] w_word_t;

  typedef logic [LANES-1:0][DATA_W-1:0] lane_vec_t;
  typedef lane_vec_t [N_CORES-1:0] out_word_t;

  // Event counts of one core for one cycle (used for statistics/coverage).
  typedef struct packed {
    logic [3:0] zero_skips;   // PEs whose multiplier the zero gate turned off
    logic       res_write;    // PE_9 path wrote an R_c register
    logic       res_add;      // an output took the residual adder
    logic [3:0] reuse_uses;   // lanes fed from the reuse half of R_c
    logic       pool;         // pooling unit produced the output
  } core_stat_t;

  // Saturate a wide signed value to DATA_W bits.
  function automatic data_t sat16(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = 32767;
    localparam logic signed [ACC_W-1:0] MINV = -32768;
    if (v > MAXV)      return data_t'(16'sh7fff);
    else if (v < MINV) return data_t'(16'sh8000);
    else                         return data_t'(v[DATA_W-1:0]);
  endfunction

endpackage
