// tb_top_ctrl: runs TOP CTRL against a stand-in for the cores that reports
// one output after every `taps` valid words (one cycle later, like the PEs).
// Checks the read address sequences of both buffers, the one-cycle delay
// from read to core_valid, the clear pulse ahead of the first word, the
// output-buffer write addresses, the done pulse and busy, for several
// layer shapes including max pooling (one word per output).
module tb_top_ctrl;
  import sfmmcn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg, cfg_run;
  logic busy, done, in_re, w_re, clr, cv, cov = 0, out_we;
  logic [IN_AW-1:0] in_ra;
  logic [W_AW-1:0] w_ra;
  logic [OUT_AW-1:0] out_wa;
  int checks = 0, failures = 0;

  top_ctrl dut (.clk, .rst_n, .start_i(start), .cfg_i(cfg), .cfg_o(cfg_run), .busy_o(busy), .done_o(done),
                .in_re_o(in_re), .in_raddr_o(in_ra), .w_re_o(w_re), .w_raddr_o(w_ra),
                .core_clear_o(clr), .core_valid_o(cv), .core_out_valid_i(cov),
                .out_we_o(out_we), .out_waddr_o(out_wa));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in cores
  int vcount = 0;
  logic re_d = 0;
  always @(posedge clk) begin
    re_d <= in_re;
    cov  <= 1'b0;
    if (clr) vcount <= 0;
    else if (cv) begin
      int te;
      te = (cfg_run.mode == MODE_POOL) ? 1 : int'(cfg_run.taps);
      if (vcount + 1 == te) begin vcount <= 0; cov <= 1'b1; end
      else vcount <= vcount + 1;
    end
  end

  task automatic run(input mode_e mode, input int taps, input int nops, input int ib, input int wb, input int ob);
    int n_rd, n_wr, te, cyc, clr_seen, done_seen;
    cfg = '0; cfg.mode = mode; cfg.taps = 16'(taps); cfg.n_ops = 16'(nops);
    cfg.in_base = IN_AW'(ib); cfg.w_base = W_AW'(wb); cfg.out_base = OUT_AW'(ob);
    te = (mode == MODE_POOL) ? 1 : taps;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    cfg = '0;  // descriptor must have been latched
    n_rd = 0; n_wr = 0; cyc = 0; clr_seen = 0; done_seen = 0;
    while (!done_seen && cyc < 5000) begin
      @(negedge clk);
      cyc++;
      if (clr) clr_seen = 1;
      if (in_re) begin
        checks++;
        if (!clr_seen || in_ra !== IN_AW'(ib + n_rd) || !w_re || w_ra !== W_AW'(wb + n_rd % te)) begin
          failures++; $display("FAIL read %0d: in %0d w %0d", n_rd, in_ra, w_ra);
        end
        n_rd++;
      end
      checks++;
      if (cv !== re_d) begin failures++; $display("FAIL core_valid timing"); end
      if (out_we) begin
        checks++;
        if (out_wa !== OUT_AW'(ob + n_wr)) begin failures++; $display("FAIL out addr %0d", out_wa); end
        n_wr++;
      end
      if (done) done_seen = 1;
      checks++;
      if (!done_seen && !busy) begin failures++; $display("FAIL busy low while running"); end
    end
    @(negedge clk);
    checks++;
    if (n_rd != te * nops || n_wr != nops || !done_seen || busy) begin
      failures++; $display("FAIL totals rd=%0d wr=%0d done=%0d busy=%0b", n_rd, n_wr, done_seen, busy);
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(MODE_CONV, 9, 5, 10, 3, 7);
    run(MODE_DENSE, 30, 2, 100, 50, 0);
    run(MODE_POOL, 9, 6, 0, 0, 20);
    run(MODE_CONV, 1, 4, 1020, 1022, 254);   // addresses wrap
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
