// tb_sfmmcn_top: end-to-end test of the whole accelerator at its default
// size (8 cores x 9 PEs, full-size buffers), driven only through the 32-bit
// host bus. For each layer the testbench lays a small tensor out in input
// words (lane k of an output tile covers the 2x4 position block
// row (k%4)/2, column 2*(k/4) + k%2, so lanes 0..3 and 4..7 are 2x2 pooling
// windows), writes the per-tap weight words, programs the layer registers,
// writes start, waits for done, reads the output words back and compares
// them with a direct tensor-level computation:
//   L1 3x3 convolution, 2 input channels, zeros in the image, ReLU + bias
//   L2 residual block, identity branch (SF_PASS) taken from L1's outputs
//      as read back from the chip, ReLU
//   L3 residual block with a 1x1 residual convolution (SF_CONV) on PE_9
//   L4 3x3 convolution + 2x2 max pooling
//   L5 2x2 max pooling only
//   L6 dense layer, 40 inputs, batch of 8 in the lanes, data reuse:
//      the second batch's first input comes from R_c, not the input word
//   L7 small-map (split) mode: 4x4 image, lanes 0..3 and 4..7 compute two
//      output channels per core with weights A and B
// Timing checked: the first output of a layer arrives `taps` cycles after
// the first tap enters the cores (cycle 10 for a 3x3 kernel) and later
// ones every `taps` cycles (9 cycles per 3x3 convolution). Counted, and a
// failure if never seen: zero-gated multiplies, residual writes from PE_9,
// residual adds, reused features, pooled outputs, split layers, mode
// switches, ReLU clamps, post adds and back-to-back outputs.
module tb_sfmmcn_top;
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
    repeat (200000) @(posedge clk);
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

  // ---------------- tensors ----------------
  // images: [channel][y][x], at most 2 x 6 x 10
  logic signed [15:0] img  [2][6][10];
  logic signed [15:0] wt   [8][2][3][3];   // [out ch][in ch][dy][dx]
  logic signed [15:0] bias [8];
  out_word_t          l1_out [4];

  task automatic new_image(input int ch, input int h, input int w, input bit zeros);
    for (int c = 0; c < ch; c++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++)
          img[c][y][x] = (zeros && $urandom % 4 == 0) ? 16'sd0 : 16'(rnd(600));
  endtask

  task automatic new_weights(input int ch);
    for (int j = 0; j < 8; j++) begin
      bias[j] = 16'(rnd(200));
      for (int c = 0; c < ch; c++)
        for (int dy = 0; dy < 3; dy++)
          for (int dx = 0; dx < 3; dx++) wt[j][c][dy][dx] = 16'(rnd(150));
    end
  endtask

  // weights for a 3x3 conv layer: tap t = c*9 + dy*3 + dx
  task automatic load_conv_weights(input int ch, input int w_base);
    for (int c = 0; c < ch; c++)
      for (int t9 = 0; t9 < 9; t9++) begin
        w_word_t ww;
        ww = '0;
        for (int j = 0; j < 8; j++) begin
          ww[j].wa = wt[j][c][t9 / 3][t9 % 3];
          ww[j].addend = bias[j];
        end
        put_w(w_base + c * 9 + t9, ww);
      end
  endtask

  function automatic longint conv_at(input int j, input int ch, input int oy, input int ox);
    longint s;
    s = 0;
    for (int c = 0; c < ch; c++)
      for (int dy = 0; dy < 3; dy++)
        for (int dx = 0; dx < 3; dx++)
          s += longint'(img[c][oy + dy][ox + dx]) * longint'(wt[j][c][dy][dx]);
    return s;
  endfunction

  // input words for a 3x3 conv over a 6x10 image: 4 tiles of 2x4 outputs
  task automatic load_conv_inputs(input int ch, input int in_base, input bit pass_src);
    for (int o = 0; o < 4; o++)
      for (int c = 0; c < ch; c++)
        for (int t9 = 0; t9 < 9; t9++) begin
          in_word_t iw;
          int t;
          iw = '0;
          t = c * 9 + t9;
          for (int k = 0; k < 8; k++)
            iw.feat[k] = img[c][2 * (o / 2) + ly(k) + t9 / 3][4 * (o % 2) + lx(k) + t9 % 3];
          // identity residual of lane t, one per core, from L1's outputs
          if (pass_src && t < 8)
            for (int j = 0; j < 8; j++) iw.res_feat[j] = l1_out[o][j][t];
          put_in(in_base + o * ch * 9 + t, iw);
        end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- L1: 3x3 conv, 2 input channels, zeros, ReLU + bias ----
    new_image(2, 6, 10, 1);
    new_weights(2);
    load_conv_inputs(2, 0, 0);
    load_conv_weights(2, 0);
    run(MODE_CONV, SF_OFF, 0, 1, 1, 18, 1, 4, 0, 0, 0);
    for (int o = 0; o < 4; o++) begin
      out_word_t e;
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 8; k++)
          e[j][k] = post(sat(conv_at(j, 2, 2 * (o / 2) + ly(k), 4 * (o % 2) + lx(k)) >>> 8), 1, 1, bias[j]);
      l1_out[o] = e;
      compare(o, e, "L1 conv");
    end

    // ---- L2: residual block, identity branch = L1 output, ReLU ----
    new_image(2, 6, 10, 0);
    new_weights(2);
    load_conv_inputs(2, 100, 1);
    load_conv_weights(2, 40);
    run(MODE_CONV, SF_PASS, 0, 1, 0, 18, 1, 4, 100, 40, 10);
    for (int o = 0; o < 4; o++) begin
      out_word_t e;
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < 8; k++)
          e[j][k] = post(sat(longint'(sat(conv_at(j, 2, 2 * (o / 2) + ly(k), 4 * (o % 2) + lx(k)) >>> 8))
                             + longint'($signed(l1_out[o][j][k]))), 1, 0, 0);
      compare(10 + o, e, "L2 residual pass");
    end

    // ---- L3: residual block with a 1x1 conv of a 2-channel map on PE_9 ----
    begin
      logic signed [15:0] rmap [2][4][8];   // residual input [ch][y][x]
      logic signed [15:0] w9   [8][2];
      new_image(2, 6, 10, 0);
      new_weights(2);
      for (int c = 0; c < 2; c++) for (int y = 0; y < 4; y++) for (int x = 0; x < 8; x++) rmap[c][y][x] = 16'(rnd(800));
      for (int j = 0; j < 8; j++) for (int c = 0; c < 2; c++) w9[j][c] = 16'(rnd(300));
      load_conv_inputs(2, 200, 0);
      // PE_9 input at tap t: lane t/2, channel t%2 (same value for every core)
      for (int o = 0; o < 4; o++)
        for (int t = 0; t < 16; t++) begin
          in_word_t iw;
          int k;
          iw = '0;
          k = t / 2;
          for (int c = 0; c < 2; c++)
            for (int t9 = 0; t9 < 9; t9++)
              if (c * 9 + t9 == t)
                for (int kk = 0; kk < 8; kk++)
                  iw.feat[kk] = img[c][2 * (o / 2) + ly(kk) + t9 / 3][4 * (o % 2) + lx(kk) + t9 % 3];
          for (int j = 0; j < 8; j++) iw.res_feat[j] = rmap[t % 2][2 * (o / 2) + ly(k)][4 * (o % 2) + lx(k)];
          put_in(200 + o * 18 + t, iw);
        end
      for (int t = 0; t < 18; t++) begin
        w_word_t ww;
        ww = '0;
        for (int j = 0; j < 8; j++) begin
          ww[j].wa = wt[j][t / 9][(t % 9) / 3][t % 3];
          ww[j].w9 = (t < 16) ? w9[j][t % 2] : 16'sd0;
        end
        put_w(80 + t, ww);
      end
      run(MODE_CONV, SF_CONV, 0, 0, 0, 18, 2, 4, 200, 80, 20);
      for (int o = 0; o < 4; o++) begin
        out_word_t e;
        for (int j = 0; j < 8; j++)
          for (int k = 0; k < 8; k++) begin
            int y, x;
            longint r;
            y = 2 * (o / 2) + ly(k); x = 4 * (o % 2) + lx(k);
            r = longint'(rmap[0][y][x]) * w9[j][0] + longint'(rmap[1][y][x]) * w9[j][1];
            e[j][k] = sat(longint'(sat(conv_at(j, 2, y, x) >>> 8)) + longint'(sat(r >>> 8)));
          end
        compare(20 + o, e, "L3 residual conv");
      end
    end

    // ---- L4: 3x3 conv (1 input channel) + 2x2 max pooling, ReLU ----
    new_image(1, 6, 10, 1);
    new_weights(1);
    load_conv_inputs(1, 300, 0);
    load_conv_weights(1, 120);
    run(MODE_CONVPOOL, SF_OFF, 0, 1, 0, 9, 1, 4, 300, 120, 30);
    for (int o = 0; o < 4; o++) begin
      out_word_t e;
      e = '0;
      for (int j = 0; j < 8; j++)
        for (int g = 0; g < 2; g++) begin
          logic signed [15:0] m, v;
          for (int k = 4 * g; k < 4 * g + 4; k++) begin
            v = sat(conv_at(j, 1, 2 * (o / 2) + ly(k), 4 * (o % 2) + lx(k)) >>> 8);
            if (k == 4 * g || v > m) m = v;
          end
          e[j][g] = post(m, 1, 0, 0);
        end
      compare(30 + o, e, "L4 conv+pool");
    end

    // ---- L5: 2x2 max pooling of a 4x8 map, addend per core ----
    begin
      w_word_t ww;
      new_image(1, 6, 10, 0);
      new_weights(1);
      for (int o = 0; o < 4; o++) begin
        in_word_t iw;
        iw = '0;
        for (int k = 0; k < 8; k++) iw.feat[k] = img[0][2 * (o / 2) + ly(k)][4 * (o % 2) + lx(k)];
        put_in(400 + o, iw);
      end
      ww = '0;
      for (int j = 0; j < 8; j++) ww[j].addend = bias[j];
      put_w(140, ww);
      run(MODE_POOL, SF_OFF, 0, 0, 1, 9, 1, 4, 400, 140, 40);
      for (int o = 0; o < 4; o++) begin
        out_word_t e;
        e = '0;
        for (int j = 0; j < 8; j++)
          for (int g = 0; g < 2; g++) begin
            logic signed [15:0] m, v;
            for (int k = 4 * g; k < 4 * g + 4; k++) begin
              v = img[0][2 * (o / 2) + ly(k)][4 * (o % 2) + lx(k)];
              if (k == 4 * g || v > m) m = v;
            end
            e[j][g] = post(m, 0, 1, bias[j]);
          end
        compare(40 + o, e, "L5 pool");
      end
    end

    // ---- L6: dense 40 -> 8 per core, batch 16 in two ops, data reuse ----
    begin
      logic signed [15:0] x  [2][8][40];   // [op][batch lane][input]
      logic signed [15:0] wd [8][40];
      for (int o = 0; o < 2; o++) for (int b = 0; b < 8; b++) for (int i = 0; i < 40; i++) x[o][b][i] = 16'(rnd(500));
      // the second batch's first input repeats the first batch's last one
      for (int b = 0; b < 8; b++) x[1][b][0] = x[0][b][39];
      for (int j = 0; j < 8; j++) for (int i = 0; i < 40; i++) wd[j][i] = 16'(rnd(200));
      for (int o = 0; o < 2; o++)
        for (int i = 0; i < 40; i++) begin
          in_word_t iw;
          iw = '0;
          for (int b = 0; b < 8; b++) iw.feat[b] = x[o][b][i];
          if (o == 0 && i == 39) iw.reuse_cap = 8'hff;
          if (o == 1 && i == 0) begin
            iw.reuse_use = 8'hff;
            for (int b = 0; b < 8; b++) iw.feat[b] = 16'h7777;   // must not be used
          end
          put_in(500 + o * 40 + i, iw);
        end
      for (int i = 0; i < 40; i++) begin
        w_word_t ww;
        ww = '0;
        for (int j = 0; j < 8; j++) ww[j].wa = wd[j][i];
        put_w(200 + i, ww);
      end
      run(MODE_DENSE, SF_OFF, 0, 1, 0, 40, 1, 2, 500, 200, 50);
      for (int o = 0; o < 2; o++) begin
        out_word_t e;
        for (int j = 0; j < 8; j++)
          for (int b = 0; b < 8; b++) begin
            longint s;
            s = 0;
            for (int i = 0; i < 40; i++) s += longint'(x[o][b][i]) * longint'(wd[j][i]);
            e[j][b] = post(sat(s >>> 8), 1, 0, 0);
          end
        compare(50 + o, e, "L6 dense");
      end
    end

    // ---- L7: split mode, 4x4 image -> 2x2 outputs, 16 output channels ----
    begin
      logic signed [15:0] wb [8][3][3];
      new_image(1, 4, 4, 0);
      new_weights(1);
      for (int j = 0; j < 8; j++) for (int dy = 0; dy < 3; dy++) for (int dx = 0; dx < 3; dx++) wb[j][dy][dx] = 16'(rnd(150));
      for (int t9 = 0; t9 < 9; t9++) begin
        in_word_t iw;
        w_word_t  ww;
        iw = '0;
        ww = '0;
        // lanes k and k+4 see the same position of the 2x2 output map
        for (int k = 0; k < 8; k++) iw.feat[k] = img[0][(k % 4) / 2 + t9 / 3][k % 2 + t9 % 3];
        for (int j = 0; j < 8; j++) begin
          ww[j].wa = wt[j][0][t9 / 3][t9 % 3];
          ww[j].wb = wb[j][t9 / 3][t9 % 3];
        end
        put_in(600 + t9, iw);
        put_w(260 + t9, ww);
      end
      run(MODE_CONV, SF_OFF, 1, 0, 0, 9, 1, 1, 600, 260, 60);
      begin
        out_word_t e;
        for (int j = 0; j < 8; j++)
          for (int k = 0; k < 8; k++) begin
            longint s;
            s = 0;
            for (int dy = 0; dy < 3; dy++)
              for (int dx = 0; dx < 3; dx++)
                s += longint'(img[0][(k % 4) / 2 + dy][k % 2 + dx]) * (k < 4 ? longint'(wt[j][0][dy][dx]) : longint'(wb[j][dy][dx]));
            e[j][k] = sat(s >>> 8);
          end
        compare(60, e, "L7 split");
      end
    end

    // ---- every mechanism must have happened ----
    checks++; if (n_zero == 0)      begin failures++; $display("FAIL no zero-gated multiplies"); end
    checks++; if (n_res_write == 0) begin failures++; $display("FAIL no residual writes"); end
    checks++; if (n_res_add == 0)   begin failures++; $display("FAIL no residual adds"); end
    checks++; if (n_reuse == 0)     begin failures++; $display("FAIL no reused features"); end
    checks++; if (n_pool == 0)      begin failures++; $display("FAIL no pooled outputs"); end
    checks++; if (n_split == 0)     begin failures++; $display("FAIL no split layer"); end
    checks++; if (n_mode_sw < 4)    begin failures++; $display("FAIL too few mode switches"); end
    checks++; if (n_relu == 0)      begin failures++; $display("FAIL no ReLU clamps"); end
    checks++; if (n_add == 0)       begin failures++; $display("FAIL no post adds"); end
    checks++; if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back outputs"); end
    $display("events: zero-gated %0d, residual writes %0d, residual adds %0d, reused %0d, pooled %0d, split layers %0d, mode switches %0d, ReLU clamps %0d, post adds %0d, back-to-back outputs %0d",
             n_zero, n_res_write, n_res_add, n_reuse, n_pool, n_split, n_mode_sw, n_relu, n_add, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
