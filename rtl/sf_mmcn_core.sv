// sf_mmcn_core: one SF-MMCN ("server flow multi-mode CNN") core.
//
// Nine PEs: PE_1..PE_8 each compute one output value of the current layer
// from the same stream of taps (one input feature per lane per cycle, one
// weight shared by the lanes), so eight outputs of one output channel finish
// together, every `taps` cycles. The ninth PE, PE_9, is the server. In SF_OFF
// it is idle. In SF_PASS it forwards the previous layer's output (the
// identity branch of a residual block) and in SF_CONV it computes the 1x1
// residual convolution (or any short dot product, e.g. the U-net time dense
// layer) with its own weight. "Mode select 1" picks which of the two reaches
// the R_c registers; PE_9's results are written to R_c1..R_c8 in turn, one
// per result, while PE_1..PE_8 are still accumulating, and each lane adds its
// residual to its MAC output ("Mode select 2") without extra cycles.
//
// After the lanes, the mode MUX sends the lane values straight to the
// activation unit (convolution, dense) or through the 2x2 max-pooling unit
// (max pooling, convolution + max pooling; results in lanes 0 and 1, other
// lanes zero); then the post adder adds the per-core addend if add_en is set.
// In max-pooling mode the PEs are bypassed and the lane input features,
// registered once, are pooled.
//
// Small-map (split) mode: PE_5..PE_8 take weight B, so the two halves of the
// array work on two channels at once.
//
// Each core takes its own PE_9 input from the input word (field CORE_ID),
// so an identity residual can differ per output channel; for a residual
// convolution the host writes the same input feature to every field.
//
// Data reuse: with reuse_cap[k] the lane's input feature is kept in the low
// half of R_c(k); with reuse_use[k] the lane's PE takes its feature from there
// instead of the input word.
//
// Timing: with valid_i high on the taps cycles of one output (tap counter
// restarting at clear_i), out_valid_o is high in the cycle after the last
// tap, and out_o is valid in that cycle only; the next output's taps may
// follow without a gap. The addend is latched with each output's first tap.
//
// Following the paper: the nine PEs, PE_9 as server with the two-input MUX,
// R_c registers with a residual adder and MUX per lane, the order pooling ->
// activation -> adder, mode codes, the one-residual-per-cycle delivery and
// the split into two channels. This design's choices: the exact control
// signals, the residual write order/wrap, the pooling window, the addend and
// the max-pooling bypass.
//
// Lint notes: the core does not use the buffer base addresses and n_ops of
// the layer descriptor (those belong to TOP CTRL), and rst_n is also read
// by the lockstep assertion, which lint reports as a synchronous use.
module sf_mmcn_core
  import sfmmcn_pkg::*;
#(
  parameter int unsigned CORE_ID = 0   // selects this core's PE_9 input field
) (
  input  logic       clk,
  input  logic       rst_n,
  input  layer_cfg_t cfg_i,
  input  logic       clear_i,
  input  logic       valid_i,
  input  in_word_t   in_i,
  input  core_w_t    w_i,
  output logic       out_valid_o,
  output lane_vec_t  out_o,
  output core_stat_t stat_o
);
  localparam int unsigned TW = TAP_W;

  logic pe_mode, pool_mode, conv_pool;
  assign pe_mode   = (cfg_i.mode == MODE_CONV) || (cfg_i.mode == MODE_CONVPOOL) || (cfg_i.mode == MODE_DENSE);
  assign pool_mode = (cfg_i.mode == MODE_POOL);
  assign conv_pool = (cfg_i.mode == MODE_CONVPOOL);

  // ---- op-local tap index (mirrors the PE counters) ----
  logic [TW-1:0] tap_q;
  logic          tap_last;
  assign tap_last = (tap_q == cfg_i.taps - TW'(1)) || (cfg_i.taps <= TW'(1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    tap_q <= '0;
    else if (clear_i)              tap_q <= '0;
    else if (valid_i && pe_mode)   tap_q <= tap_last ? '0 : tap_q + TW'(1);
  end

  // ---- lane inputs: feature (input word or reused), weight (A or B) ----
  logic signed [DATA_W-1:0] lane_feat [LANES];
  logic signed [DATA_W-1:0] lane_w    [LANES];
  logic signed [DATA_W-1:0] reuse_d   [LANES];
  logic signed [DATA_W-1:0] mac_d     [LANES];
  logic                     mac_v     [LANES];
  logic                     mul_act   [LANES];
  lane_vec_t                conv_vec;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      lane_feat[k] = in_i.reuse_use[k] ? reuse_d[k] : $signed(in_i.feat[k]);
      lane_w[k]    = (cfg_i.split && k >= LANES/2) ? w_i.wb : w_i.wa;
    end
  end

  // ---- PE_9 (server) and Mode select 1 ----
  logic signed [DATA_W-1:0] res_feat;
  assign res_feat = $signed(in_i.res_feat[CORE_ID]);

  logic [TW+2:0] res_items;   // PE_9 input taps per op
  logic          pe9_in_v;
  logic          pe9_v, pass_v_q, res_v;
  logic signed [DATA_W-1:0] pe9_d, pass_q, res_d;
  logic [2:0]    widx_q;
  logic          pe9_act;

  assign res_items = (cfg_i.sf_mode == SF_CONV) ? {cfg_i.res_taps, 3'b000} : (TW+3)'(8);
  assign pe9_in_v  = valid_i && pe_mode && (cfg_i.sf_mode != SF_OFF) && ((TW+3)'(tap_q) < res_items);

  sf_pe u_pe9 (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear_i    (clear_i),
    .taps_i     (cfg_i.res_taps),
    .valid_i    (pe9_in_v && (cfg_i.sf_mode == SF_CONV)),
    .feature_i  (res_feat),
    .weight_i   (w_i.w9),
    .mac_valid_o(pe9_v),
    .mac_o      (pe9_d),
    .mul_active_o(pe9_act)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass_q   <= '0;
      pass_v_q <= 1'b0;
    end else begin
      pass_v_q <= pe9_in_v && (cfg_i.sf_mode == SF_PASS);
      if (pe9_in_v) pass_q <= res_feat;
    end
  end

  // Mode select 1: previous conv output (pass) or PE_9's MAC output.
  assign res_v = (cfg_i.sf_mode == SF_PASS) ? pass_v_q : ((cfg_i.sf_mode == SF_CONV) && pe9_v);
  assign res_d = (cfg_i.sf_mode == SF_PASS) ? pass_q : pe9_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       widx_q <= '0;
    else if (clear_i) widx_q <= '0;
    else if (res_v)   widx_q <= widx_q + 3'd1;
  end

  // ---- PE_1..PE_8 with their R_c lanes ----
  for (genvar k = 0; k < LANES; k++) begin : g_lane
    logic [2*DATA_W-1:0] rc_unused;
    sf_pe u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .clear_i    (clear_i),
      .taps_i     (cfg_i.taps),
      .valid_i    (valid_i && pe_mode),
      .feature_i  (lane_feat[k]),
      .weight_i   (lane_w[k]),
      .mac_valid_o(mac_v[k]),
      .mac_o      (mac_d[k]),
      .mul_active_o(mul_act[k])
    );
    rc_lane u_rc (
      .clk       (clk),
      .rst_n     (rst_n),
      .res_we_i  (res_v && (widx_q == 3'(k))),
      .res_i     (res_d),
      .reuse_we_i(valid_i && in_i.reuse_cap[k]),
      .reuse_i   ($signed(in_i.feat[k])),
      .reuse_o   (reuse_d[k]),
      .rc_o      (rc_unused),
      .res_sel_i (cfg_i.sf_mode != SF_OFF),
      .mac_i     (mac_d[k]),
      .conv_o    (conv_vec[k])
    );
  end

  // ---- max-pooling-only path: lane features registered once ----
  lane_vec_t pool_in_q;
  logic      pool_v_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_in_q <= '0;
      pool_v_q  <= 1'b0;
    end else begin
      pool_v_q <= valid_i && pool_mode;
      if (valid_i && pool_mode) begin
        for (int k = 0; k < LANES; k++) pool_in_q[k] <= lane_feat[k];
      end
    end
  end

  // ---- addend latched with the first tap of each output ----
  logic signed [DATA_W-1:0] addend_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) addend_q <= '0;
    else if (valid_i && (pool_mode || (pe_mode && tap_q == '0))) addend_q <= w_i.addend;
  end

  // ---- mode MUX -> pooling -> activation -> post adder ----
  lane_vec_t          pool_src, pre_act, post_act;
  logic [1:0][DATA_W-1:0] pooled;
  logic               use_pool;

  assign use_pool = pool_mode || conv_pool;
  assign pool_src = pool_mode ? pool_in_q : conv_vec;

  pooling_unit u_pool (.in_i(pool_src), .max_o(pooled));

  always_comb begin
    pre_act = '0;
    if (use_pool) begin
      pre_act[0] = pooled[0];
      pre_act[1] = pooled[1];
    end else begin
      pre_act = conv_vec;
    end
  end

  activation_unit u_act (.en_i(cfg_i.act_en), .in_i(pre_act), .out_o(post_act));

  always_comb begin
    logic signed [DATA_W:0] s;
    out_o = '0;
    for (int k = 0; k < LANES; k++) begin
      if (!use_pool || k < 2) begin
        s = {post_act[k][DATA_W-1], post_act[k]} + (cfg_i.add_en ? {addend_q[DATA_W-1], addend_q} : '0);
        if (s[DATA_W] != s[DATA_W-1]) out_o[k] = s[DATA_W] ? {1'b1, {(DATA_W-1){1'b0}}} : {1'b0, {(DATA_W-1){1'b1}}};
        else                          out_o[k] = s[DATA_W-1:0];
      end
    end
  end

  assign out_valid_o = pool_mode ? pool_v_q : (pe_mode && mac_v[0]);

  // ---- event strobes ----
  always_comb begin
    int unsigned z, r;
    z = 0;
    r = 0;
    for (int k = 0; k < LANES; k++) begin
      if (valid_i && pe_mode && !mul_act[k]) z++;
      if (valid_i && in_i.reuse_use[k]) r++;
    end
    if (pe9_in_v && (cfg_i.sf_mode == SF_CONV) && !pe9_act) z++;
    stat_o.zero_skips = 4'(z);
    stat_o.reuse_uses = 4'(r);
    stat_o.res_write  = res_v;
    stat_o.res_add    = out_valid_o && (cfg_i.sf_mode != SF_OFF) && pe_mode;
    stat_o.pool       = out_valid_o && use_pool;
  end

  // The eight lane PEs run in lockstep.
  for (genvar k = 1; k < LANES; k++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) mac_v[k] == mac_v[0]);
  end
endmodule
