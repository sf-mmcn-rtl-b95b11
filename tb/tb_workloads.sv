// tb_workloads: runs the layer patterns of the networks the accelerator is
// meant for, chained through the host bus at the default (full) size, with
// each layer's input laid out from the previous layer's read-back output:
//   ResNet-18 basic block: h = ReLU(conv3x3(x)),
//                          y = ReLU(conv3x3(h) + x)            (SF_PASS)
//   ResNet-18 downsampling-style block, 1x1 projection shortcut on PE_9:
//                          z = ReLU(conv3x3(h) + conv1x1(x))   (SF_CONV)
//   U-net diffusion block: a = ReLU(conv3x3(x) + dense(temb))  (PE_9 runs
//                          the time-step dense layer, SF_CONV),
//                          b = conv3x3(a) + x                  (no ReLU, the
//                          final add as an identity branch, SF_PASS)
// Each tensor has 8 channels on a 4x8 map (one pass of the eight cores,
// four 2x4 tiles); the 3x3 convolutions use zero padding 1, so padded taps
// also exercise the zero gate. The channel counts and map sizes are far
// below the real networks' (which do not fit the buffers in one pass); the
// dataflow per layer is the same. Outputs are compared with a direct
// tensor computation in the same 16-bit fixed point (Q8.8, floor, saturate).
// Lane k covers row (k%4)/2, column 2*(k/4)+k%2 of a tile. Output timing is
// checked as in tb_sfmmcn_top (one output every `taps` cycles).
module tb_workloads;
  import sfmmcn_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        host_we = 0, host_re = 0;
  logic [23:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  logic        host_rvalid, done, busy;
  int checks = 0, failures = 0, cyc = 0;

  sfmmcn_top dut (.clk, .rst_n, .host_we_i(host_we), .host_re_i(host_re), .host_addr_i(host_addr),
                  .host_wdata_i(host_wdata), .host_rdata_o(host_rdata), .host_rvalid_o(host_rvalid),
                  .done_o(done), .busy_o(busy));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_zero = 0, n_res_write = 0, n_res_add = 0, n_reuse = 0, n_pool = 0;
  int n_split = 0, n_mode_sw = 0, n_relu = 0, n_add = 0, n_b2b = 0;
  int first_valid, last_out, n_out, cur_taps;
  bit seen_valid;

  always @(negedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < N_CORES; c++) begin
        n_zero      += int'(dut.core_stat[c].zero_skips);
        n_reuse     += int'(dut.core_stat[c].reuse_uses);
        n_res_write += int'(dut.core_stat[c].res_write);
        n_res_add   += int'(dut.core_stat[c].res_add);
        n_pool      += int'(dut.core_stat[c].pool);
      end
      if (dut.core_valid && !seen_valid) begin seen_valid = 1; first_valid = cyc; end
      if (dut.out_we) begin
        // output o must come exactly taps*(o+1) cycles after the first tap
        checks++;
        if (cyc - first_valid != cur_taps * (n_out + 1)) begin
          failures++;
          $display("FAIL output %0d at cycle %0d, expected %0d", n_out, cyc - first_valid, cur_taps * (n_out + 1));
        end
        if (n_out > 0 && cyc - last_out == cur_taps) n_b2b++;
        last_out = cyc;
        n_out++;
      end
    end
  end

  // ---------------- host bus ----------------
  task automatic hw(input int region, input int entry, input int chunk, input logic [31:0] d);
    @(posedge clk); #1;
    host_we = 1; host_addr = {4'(region), 15'(entry), 5'(chunk)}; host_wdata = d;
    @(posedge clk); #1;
    host_we = 0;
  endtask

  task automatic hr(input int region, input int entry, input int chunk, output logic [31:0] d);
    @(posedge clk); #1;
    host_re = 1; host_addr = {4'(region), 15'(entry), 5'(chunk)};
    @(posedge clk); #1;
    host_re = 0;
    while (!host_rvalid) @(posedge clk);
    d = host_rdata;
    #1;
  endtask

  localparam int IN_CH = ($bits(in_word_t) + 31) / 32;
  localparam int W_CH  = $bits(w_word_t) / 32;
  localparam int O_CH  = $bits(out_word_t) / 32;

  task automatic put_in(input int a, input in_word_t v);
    logic [IN_CH-1:0][31:0] chunks;
    chunks = (IN_CH*32)'(v);
    for (int i = 0; i < IN_CH; i++) hw(1, a, i, chunks[i]);
  endtask

  task automatic put_w(input int a, input w_word_t v);
    logic [W_CH-1:0][31:0] chunks;
    chunks = v;
    for (int i = 0; i < W_CH; i++) hw(2, a, i, chunks[i]);
  endtask

  task automatic get_out(input int a, output out_word_t v);
    logic [31:0] d;
    logic [O_CH-1:0][31:0] chunks;
    for (int i = 0; i < O_CH; i++) begin
      hr(3, a, i, d);
      chunks[i] = d;
    end
    v = out_word_t'(chunks);
  endtask

  mode_e last_mode = MODE_IDLE;

  // Program the layer registers, start, and wait for done (status polled).
  task automatic run(input mode_e mode, input sf_mode_e sf, input bit split, input bit act, input bit add,
                     input int taps, input int rtaps, input int n_ops, input int in_base, input int w_base,
                     input int out_base);
    logic [31:0] st;
    int guard;
    if (mode != last_mode) n_mode_sw++;
    last_mode = mode;
    if (split) n_split++;
    hw(0, 1, 0, 32'({add, act, split, 2'b00, sf, 1'b0, mode}));
    hw(0, 2, 0, taps);
    hw(0, 3, 0, rtaps);
    hw(0, 4, 0, n_ops);
    hw(0, 5, 0, in_base);
    hw(0, 6, 0, w_base);
    hw(0, 7, 0, out_base);
    seen_valid = 0; n_out = 0;
    cur_taps = (mode == MODE_POOL) ? 1 : taps;
    hw(0, 0, 0, 1);
    st = '0; guard = 0;
    while (!st[0] && guard < 20000) begin hr(0, 8, 0, st); guard++; end
    checks++;
    if (!st[0] || st[1] || n_out != n_ops) begin
      failures++;
      $display("FAIL layer mode=%0d sf=%0d: status %b, %0d of %0d outputs", mode, sf, st[1:0], n_out, n_ops);
    end
  endtask

  function automatic logic signed [15:0] sat(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  function automatic int rnd(input int span);
    return int'($urandom % (2 * span)) - span;
  endfunction

  // post-processing: optional ReLU, then optional addend
  function automatic logic signed [15:0] post(input logic signed [15:0] v, input bit act, input bit add,
                                              input logic signed [15:0] addend);
    logic signed [15:0] r;
    r = v;
    if (act && r < 0) begin r = 0; n_relu++; end
    if (add) begin r = sat(longint'(r) + longint'(addend)); n_add++; end
    return r;
  endfunction

  // lane -> position inside a 2x4 output tile
  function automatic int ly(input int k); return (k % 4) / 2; endfunction
  function automatic int lx(input int k); return 2 * (k / 4) + k % 2; endfunction

  task automatic compare(input int a, input out_word_t e, input string what);
    out_word_t g;
    get_out(a, g);
    checks++;
    if (g !== e) begin
      failures++;
      $display("FAIL %s word %0d", what, a);
      for (int c = 0; c < N_CORES; c++)
        for (int k = 0; k < LANES; k++)
          if (g[c][k] !== e[c][k])
            $display("   core %0d lane %0d got %0d exp %0d", c, k, int'($signed(g[c][k])), int'($signed(e[c][k])));
    end
  endtask


  // ---------------- tensors: [channel][y][x], 8 x 4 x 8 ----------------
  typedef logic signed [15:0] ten_t [8][4][8];
  typedef logic signed [15:0] wgt_t [8][8][3][3];   // [out ch][in ch][dy][dx]
  typedef logic signed [15:0] w9_t  [8][8];         // [out ch][PE_9 input]

  int in_ptr = 0, w_ptr = 0, out_ptr = 0, n_layers = 0;

  function automatic logic signed [15:0] pad(input ten_t x, input int c, input int y, input int xx);
    if (y < 0 || y > 3 || xx < 0 || xx > 7) return 16'sd0;
    return x[c][y][xx];
  endfunction

  // One 3x3 'same' convolution layer, 8 -> 8 channels, on the accelerator.
  //   sf = SF_OFF : y = act(conv(x))
  //   sf = SF_PASS: y = act(conv(x) + p)
  //   sf = SF_CONV: y = act(conv(x) + sat(sum_i r[i][pos] * w9[j][i] >> 8)), rt inputs
  // The hardware result is read back into y and compared with the model.
  task automatic conv_layer(input ten_t x, input wgt_t w, input bit act, input sf_mode_e sf,
                            input ten_t p, input ten_t r, input w9_t w9, input int rt,
                            output ten_t y);
    int taps, ib, wb, ob;
    taps = 72;
    ib = in_ptr; wb = w_ptr; ob = out_ptr;
    in_ptr += 4 * taps; w_ptr += taps; out_ptr += 4;
    if (in_ptr > 1024) in_ptr = 0;
    n_layers++;
    for (int o = 0; o < 4; o++)
      for (int t = 0; t < taps; t++) begin
        in_word_t iw;
        int c, dy, dx;
        iw = '0;
        c = t / 9; dy = (t % 9) / 3; dx = t % 3;
        for (int k = 0; k < 8; k++)
          iw.feat[k] = pad(x, c, 2 * (o / 2) + ly(k) + dy - 1, 4 * (o % 2) + lx(k) + dx - 1);
        if (sf == SF_PASS && t < 8)
          for (int j = 0; j < 8; j++) iw.res_feat[j] = p[j][2 * (o / 2) + ly(t)][4 * (o % 2) + lx(t)];
        if (sf == SF_CONV && t < 8 * rt)
          for (int j = 0; j < 8; j++) iw.res_feat[j] = r[t % rt][2 * (o / 2) + ly(t / rt)][4 * (o % 2) + lx(t / rt)];
        put_in(ib + o * taps + t, iw);
      end
    for (int t = 0; t < taps; t++) begin
      w_word_t ww;
      ww = '0;
      for (int j = 0; j < 8; j++) begin
        ww[j].wa = w[j][t / 9][(t % 9) / 3][t % 3];
        if (sf == SF_CONV && t < 8 * rt) ww[j].w9 = w9[j][t % rt];
      end
      put_w(wb + t, ww);
    end
    run(MODE_CONV, sf, 0, act, 0, taps, (sf == SF_CONV) ? rt : 1, 4, ib, wb, ob);
    for (int o = 0; o < 4; o++) begin
      out_word_t g;
      get_out(ob + o, g);
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 8; k++) begin
          int yy, xx;
          longint s, rs;
          logic signed [15:0] e;
          yy = 2 * (o / 2) + ly(k); xx = 4 * (o % 2) + lx(k);
          s = 0;
          for (int c = 0; c < 8; c++)
            for (int dy = 0; dy < 3; dy++)
              for (int dx = 0; dx < 3; dx++)
                s += longint'(pad(x, c, yy + dy - 1, xx + dx - 1)) * longint'(w[j][c][dy][dx]);
          e = sat(s >>> 8);
          if (sf == SF_PASS) e = sat(longint'(e) + longint'(p[j][yy][xx]));
          if (sf == SF_CONV) begin
            rs = 0;
            for (int i = 0; i < rt; i++) rs += longint'(r[i][yy][xx]) * longint'(w9[j][i]);
            e = sat(longint'(e) + longint'(sat(rs >>> 8)));
          end
          e = post(e, act, 0, 0);
          y[j][yy][xx] = $signed(g[j][k]);
          checks++;
          if (g[j][k] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL layer %0d ch %0d (%0d,%0d) got %0d exp %0d", n_layers, j, yy, xx,
                                        int'($signed(g[j][k])), int'(e));
          end
        end
    end
  endtask

  task automatic rand_ten(output ten_t x, input int span);
    for (int c = 0; c < 8; c++) for (int y = 0; y < 4; y++) for (int xx = 0; xx < 8; xx++) x[c][y][xx] = 16'(rnd(span));
  endtask

  task automatic rand_w(output wgt_t w, input int span);
    for (int j = 0; j < 8; j++) for (int c = 0; c < 8; c++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++)
      w[j][c][dy][dx] = 16'(rnd(span));
  endtask

  ten_t x, h, yb, z, none, temb_map, a, b;
  wgt_t w1, w2, w3, wu1, wu2;
  w9_t  wproj, wt, w9none;

  initial begin
    for (int c = 0; c < 8; c++) for (int y = 0; y < 4; y++) for (int xx = 0; xx < 8; xx++) none[c][y][xx] = 0;
    for (int j = 0; j < 8; j++) for (int i = 0; i < 8; i++) w9none[j][i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- ResNet-18 basic block ----
    rand_ten(x, 256);
    rand_w(w1, 40); rand_w(w2, 40); rand_w(w3, 40);
    conv_layer(x, w1, 1, SF_OFF, none, none, w9none, 1, h);
    conv_layer(h, w2, 1, SF_PASS, x, none, w9none, 1, yb);
    // ---- projection shortcut: 1x1 conv of x on PE_9, 8 inputs per result ----
    for (int j = 0; j < 8; j++) for (int i = 0; i < 8; i++) wproj[j][i] = 16'(rnd(80));
    conv_layer(h, w3, 1, SF_CONV, none, x, wproj, 8, z);

    // ---- U-net block: time-step dense layer on PE_9, final add ----
    begin
      logic signed [15:0] temb [8];
      for (int i = 0; i < 8; i++) temb[i] = 16'(rnd(256));
      // the time embedding is the same at every position
      for (int i = 0; i < 8; i++) for (int y = 0; y < 4; y++) for (int xx = 0; xx < 8; xx++) temb_map[i][y][xx] = temb[i];
      for (int j = 0; j < 8; j++) for (int i = 0; i < 8; i++) wt[j][i] = 16'(rnd(80));
      rand_w(wu1, 40); rand_w(wu2, 40);
      conv_layer(yb, wu1, 1, SF_CONV, none, temb_map, wt, 8, a);
      conv_layer(a, wu2, 0, SF_PASS, yb, none, w9none, 1, b);
    end

    checks++; if (n_zero == 0)      begin failures++; $display("FAIL no zero-gated multiplies (padding)"); end
    checks++; if (n_res_write == 0) begin failures++; $display("FAIL no residual writes"); end
    checks++; if (n_res_add == 0)   begin failures++; $display("FAIL no residual adds"); end
    checks++; if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clamps"); end
    checks++; if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back outputs"); end
    $display("workloads: %0d layers; zero-gated %0d, residual writes %0d, residual adds %0d, ReLU clamps %0d, back-to-back outputs %0d",
             n_layers, n_zero, n_res_write, n_res_add, n_relu, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
