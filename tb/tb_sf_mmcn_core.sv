// tb_sf_mmcn_core: drives one SF-MMCN core through every mode and checks each
// output word against a software model written from the design rules:
//   lane MAC   = sat16(floor(sum(feature * weight) / 2^8)), per lane
//   residual   = SF_PASS: the residual feature of tap k goes to R_c(k)
//                SF_CONV: R_c(k) = sat16(floor(sum over res_taps of res*w9 / 2^8))
//   conv_k     = sat16(MAC_k + R_c(k)) when SF is on, MAC_k otherwise
//   pooling    = max of lanes 0..3 and of lanes 4..7 (lanes 0, 1; rest 0)
//   activation = ReLU when act_en; post adder adds the addend of tap 0.
// It also checks the timing: the first output of a layer comes `taps` cycles
// after the first load (cycle 10 for a 3x3 kernel with the first load in
// cycle 1), later ones every `taps` cycles, and residual modes take no
// extra cycle. PE_9 must finish its 8 results at least one cycle before the
// lanes (8 * res_taps < taps), as in the 3x3 case (8 results in 9 cycles).
// Event counts (residual writes, zero-gated MACs, reuse, pool
// outputs, split mode) must all be seen.
module tb_sf_mmcn_core;
  import sfmmcn_pkg::*;

  logic       clk = 0, rst_n = 0, clear = 0, valid = 0;
  layer_cfg_t cfg;
  in_word_t   in;
  core_w_t    w;
  logic       ov;
  lane_vec_t  out;
  core_stat_t st;
  int checks = 0, failures = 0, cyc = 0;
  int n_res_write = 0, n_zero = 0, n_reuse = 0, n_pool = 0, n_split = 0;

  sf_mmcn_core dut (.clk, .rst_n, .cfg_i(cfg), .clear_i(clear), .valid_i(valid),
                    .in_i(in), .w_i(w), .out_valid_o(ov), .out_o(out), .stat_o(st));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  lane_vec_t exp_q[$];
  int        due_q[$];

  always @(negedge clk) begin
    if (rst_n) begin
      if (st.res_write) n_res_write++;
      n_zero  += int'(st.zero_skips);
      n_reuse += int'(st.reuse_uses);
      if (st.pool) n_pool++;
    end
    if (rst_n && ov) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output @%0d", cyc);
      end else begin
        if (out !== exp_q[0] || cyc != due_q[0]) begin
          failures++;
          $display("FAIL @%0d (due %0d) mode=%0d sf=%0d", cyc, due_q[0], cfg.mode, cfg.sf_mode);
          for (int k = 0; k < 8; k++) $display("   lane %0d got %0d exp %0d", k, int'($signed(out[k])), int'($signed(exp_q[0][k])));
        end
        void'(exp_q.pop_front()); void'(due_q.pop_front());
      end
    end
  end

  logic signed [15:0] reuse_m [8];

  // Run one layer of n_ops outputs with the given configuration.
  task automatic run_layer(input mode_e mode, input sf_mode_e sf, input int taps, input int rtaps,
                           input int n_ops, input bit split, input bit act, input bit add,
                           input bit zeros, input bit reuse);
    int first;
    int t_eff;
    cfg = '0;
    cfg.mode = mode; cfg.sf_mode = sf; cfg.split = split; cfg.act_en = act; cfg.add_en = add;
    cfg.taps = 16'(taps); cfg.res_taps = 16'(rtaps); cfg.n_ops = 16'(n_ops);
    if (split) n_split++;
    t_eff = (mode == MODE_POOL) ? 1 : taps;
    @(posedge clk); #1 clear = 1;
    @(posedge clk); #1 clear = 0;
    first = 0;
    for (int o = 0; o < n_ops; o++) begin
      longint acc [8];
      longint racc [8];
      logic signed [15:0] rc [8];
      logic signed [15:0] addend;
      lane_vec_t pre, e;
      for (int k = 0; k < 8; k++) begin acc[k] = 0; racc[k] = 0; rc[k] = 0; end
      for (int t = 0; t < t_eff; t++) begin
        @(posedge clk); #1;
        if (o == 0 && t == 0) first = cyc;
        valid = 1;
        w.wa = 16'(($urandom % 1024) - 512);
        w.wb = split ? 16'(($urandom % 1024) - 512) : w.wa;
        w.w9 = 16'(($urandom % 1024) - 512);
        w.addend = 16'(($urandom % 512) - 256);
        for (int c = 0; c < 8; c++) in.res_feat[c] = 16'(($urandom % 2048) - 1024);
        in.reuse_cap = '0; in.reuse_use = '0;
        if (reuse) begin
          in.reuse_cap = (t == t_eff - 1) ? 8'($urandom) : 8'h00;
          in.reuse_use = (o > 0 && t == 0) ? 8'hff : 8'h00;
        end
        for (int k = 0; k < 8; k++)
          in.feat[k] = (zeros && $urandom % 3 == 0) ? 16'd0 : 16'(($urandom % 2048) - 1024);
        if (t == 0) addend = w.addend;
        for (int k = 0; k < 8; k++) begin
          logic signed [15:0] fk, wk;
          fk = in.reuse_use[k] ? reuse_m[k] : $signed(in.feat[k]);
          wk = (split && k >= 4) ? w.wb : w.wa;
          acc[k] += longint'(fk) * longint'(wk);
          pre[k] = fk;
        end
        for (int k = 0; k < 8; k++) if (in.reuse_cap[k]) reuse_m[k] = $signed(in.feat[k]);
        if (sf == SF_PASS && t < 8) rc[t] = $signed(in.res_feat[0]);
        if (sf == SF_CONV && t < 8 * rtaps) begin
          racc[t / rtaps] += longint'($signed(in.res_feat[0])) * longint'(w.w9);
          if (t % rtaps == rtaps - 1) rc[t / rtaps] = sat(racc[t / rtaps] >>> 8);
        end
      end
      // expected word
      if (mode != MODE_POOL) begin
        for (int k = 0; k < 8; k++) begin
          pre[k] = sat(acc[k] >>> 8);
          if (sf != SF_OFF) pre[k] = sat(longint'($signed(pre[k])) + longint'(rc[k]));
        end
      end
      e = '0;
      if (mode == MODE_POOL || mode == MODE_CONVPOOL) begin
        for (int g = 0; g < 2; g++) begin
          logic signed [15:0] m;
          m = pre[4*g];
          for (int k = 1; k < 4; k++) if ($signed(pre[4*g+k]) > m) m = pre[4*g+k];
          e[g] = m;
        end
      end else e = pre;
      for (int k = 0; k < 8; k++) begin
        logic signed [15:0] v;
        if ((mode == MODE_POOL || mode == MODE_CONVPOOL) && k >= 2) continue;
        v = e[k];
        if (act && v < 0) v = 0;
        if (add) v = sat(longint'(v) + longint'(addend));
        e[k] = v;
      end
      exp_q.push_back(e);
      due_q.push_back(first + t_eff * (o + 1));
    end
    @(posedge clk); #1 valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++; $display("FAIL %0d outputs missing (mode=%0d sf=%0d)", exp_q.size(), mode, sf);
      exp_q.delete(); due_q.delete();
    end
  endtask

  initial begin
    cfg = '0; in = '0; w = '0;
    for (int k = 0; k < 8; k++) reuse_m[k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    //        mode           sf       taps rtaps ops split act add zeros reuse
    run_layer(MODE_CONV,     SF_OFF,  9,   1,    4,  0,    0,  0,  0,    0);
    run_layer(MODE_CONV,     SF_PASS, 9,   1,    4,  0,    0,  0,  0,    0);
    run_layer(MODE_CONV,     SF_CONV, 9,   1,    4,  0,    1,  0,  0,    0);
    run_layer(MODE_CONV,     SF_CONV, 18,  2,    3,  0,    0,  1,  1,    0);
    run_layer(MODE_CONV,     SF_OFF,  9,   1,    3,  1,    0,  0,  0,    0);
    run_layer(MODE_CONV,     SF_PASS, 9,   1,    3,  1,    1,  0,  1,    1);
    run_layer(MODE_CONVPOOL, SF_OFF,  9,   1,    3,  0,    1,  1,  0,    0);
    run_layer(MODE_CONVPOOL, SF_PASS, 9,   1,    2,  0,    0,  0,  0,    0);
    run_layer(MODE_POOL,     SF_OFF,  1,   1,    6,  0,    0,  1,  0,    0);
    run_layer(MODE_DENSE,    SF_OFF,  40,  1,    2,  0,    1,  0,  1,    0);
    run_layer(MODE_DENSE,    SF_CONV, 40,  4,    2,  0,    0,  0,  0,    0);
    run_layer(MODE_CONV,     SF_OFF,  4,   1,    3,  0,    0,  0,  0,    1);
    // every mechanism must have happened
    checks++; if (n_res_write == 0) begin failures++; $display("FAIL no residual writes"); end
    checks++; if (n_zero == 0)      begin failures++; $display("FAIL no zero-gated MACs"); end
    checks++; if (n_reuse == 0)     begin failures++; $display("FAIL no reuse"); end
    checks++; if (n_pool == 0)      begin failures++; $display("FAIL no pooling"); end
    checks++; if (n_split == 0)     begin failures++; $display("FAIL no split mode"); end
    $display("events: residual writes %0d, zero-gated MACs %0d, reused features %0d, pooled outputs %0d, split layers %0d",
             n_res_write, n_zero, n_reuse, n_pool, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
