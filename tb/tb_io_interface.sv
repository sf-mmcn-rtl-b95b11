// tb_io_interface: checks the host bus of the I/O interface: configuration
// register writes and read-back, the start pulse, the done/busy status bits,
// assembly of 32-bit chunks into input (9 chunks) and weight (16 chunks)
// buffer words with the write strobe after the last chunk, and chunked
// reads of an output word with the two-cycle read latency.
module tb_io_interface;
  import sfmmcn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0;
  logic [23:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic rvalid, start, busy = 0, done = 0;
  layer_cfg_t cfg;
  logic in_we, w_we, out_re;
  logic [IN_AW-1:0] in_wa;
  logic [W_AW-1:0] w_wa;
  logic [OUT_AW-1:0] out_ra;
  in_word_t in_wd;
  w_word_t w_wd;
  out_word_t out_rd;
  int checks = 0, failures = 0;

  io_interface dut (.clk, .rst_n, .host_we_i(we), .host_re_i(re), .host_addr_i(addr), .host_wdata_i(wdata),
                    .host_rdata_o(rdata), .host_rvalid_o(rvalid), .cfg_o(cfg), .start_o(start),
                    .busy_i(busy), .done_i(done), .in_we_o(in_we), .in_waddr_o(in_wa), .in_wdata_o(in_wd),
                    .w_we_o(w_we), .w_waddr_o(w_wa), .w_wdata_o(w_wd), .out_re_o(out_re),
                    .out_raddr_o(out_ra), .out_rdata_i(out_rd));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output buffer stand-in: one-cycle read of a word derived from the address
  function automatic out_word_t oword(input logic [OUT_AW-1:0] a);
    logic [$bits(out_word_t)-1:0] v;
    for (int i = 0; i < $bits(out_word_t) / 32; i++) v[i*32 +: 32] = {8'(a), 8'(i), 16'hbeef ^ 16'(a * 7 + i)};
    return out_word_t'(v);
  endfunction
  always @(posedge clk) if (out_re) out_rd <= oword(out_ra);

  // write strobes seen
  int n_in_we = 0, n_w_we = 0, n_start = 0;
  in_word_t last_in; w_word_t last_w;
  logic [IN_AW-1:0] last_in_a; logic [W_AW-1:0] last_w_a;
  always @(negedge clk) begin
    if (in_we) begin n_in_we++; last_in = in_wd; last_in_a = in_wa; end
    if (w_we)  begin n_w_we++;  last_w = w_wd;   last_w_a = w_wa; end
    if (start) n_start++;
  end

  task automatic hw(input int region, input int entry, input int chunk, input logic [31:0] d);
    @(posedge clk); #1;
    we = 1; addr = {4'(region), 15'(entry), 5'(chunk)}; wdata = d;
    @(posedge clk); #1 we = 0;
  endtask

  task automatic hr(input int region, input int entry, input int chunk, output logic [31:0] d);
    @(posedge clk); #1;
    re = 1; addr = {4'(region), 15'(entry), 5'(chunk)};
    @(posedge clk); #1 re = 0;
    checks++;
    if (rvalid) begin failures++; $display("FAIL rvalid too early"); end
    @(posedge clk); #1;
    checks++;
    if (!rvalid) begin failures++; $display("FAIL rvalid missing"); end
    d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [$bits(in_word_t)-1:0] iv;
    logic [$bits(w_word_t)-1:0] wv;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // configuration registers
    hw(0, 1, 0, 32'h0000_0713);     // add, act, split, sf=1, mode=3
    hw(0, 2, 0, 9); hw(0, 3, 0, 2); hw(0, 4, 0, 77); hw(0, 5, 0, 300); hw(0, 6, 0, 40); hw(0, 7, 0, 12);
    checks++;
    if (cfg.mode != MODE_CONVPOOL || cfg.sf_mode != SF_PASS || !cfg.split || !cfg.act_en || !cfg.add_en ||
        cfg.taps != 9 || cfg.res_taps != 2 || cfg.n_ops != 77 || cfg.in_base != 300 || cfg.w_base != 40 || cfg.out_base != 12) begin
      failures++; $display("FAIL config fields");
    end
    hr(0, 1, 0, d); checks++; if (d !== 32'h713) begin failures++; $display("FAIL reg1 %h", d); end
    hr(0, 4, 0, d); checks++; if (d !== 32'd77) begin failures++; $display("FAIL reg4 %h", d); end
    hr(0, 5, 0, d); checks++; if (d !== 32'd300) begin failures++; $display("FAIL reg5 %h", d); end
    // start pulse and status
    hw(0, 0, 0, 1);
    @(negedge clk); #1;
    checks++; if (n_start != 1) begin failures++; $display("FAIL start count %0d", n_start); end
    busy = 1;
    hr(0, 8, 0, d); checks++; if (d !== 32'b10) begin failures++; $display("FAIL status busy %h", d); end
    @(posedge clk); #1 done = 1; busy = 0; @(posedge clk); #1 done = 0;
    hr(0, 8, 0, d); checks++; if (d !== 32'b01) begin failures++; $display("FAIL status done %h", d); end
    hw(0, 0, 0, 1);
    hr(0, 8, 0, d); checks++; if (d !== 32'b00) begin failures++; $display("FAIL done not cleared %h", d); end
    // input buffer word: 5 chunks, last chunk commits
    for (int i = 0; i < $bits(in_word_t); i++) iv[i] = 1'($urandom);
    for (int i = 0; i < ($bits(in_word_t) + 31) / 32; i++) begin
      checks++; if (n_in_we != 0) begin failures++; $display("FAIL early input write"); end
      hw(1, 513, i, 32'(iv >> (i*32)));
    end
    @(posedge clk);
    checks++;
    if (n_in_we != 1 || last_in !== in_word_t'(iv) || last_in_a != 513) begin failures++; $display("FAIL input word"); end
    // weight buffer word: 16 chunks in reverse order
    for (int i = 0; i < $bits(w_word_t) / 32; i++) wv[i*32 +: 32] = $urandom;
    for (int i = $bits(w_word_t) / 32 - 2; i >= 0; i--) hw(2, 77, i, wv[i*32 +: 32]);
    checks++; if (n_w_we != 0) begin failures++; $display("FAIL early weight write"); end
    hw(2, 77, 15, wv[15*32 +: 32]);
    @(posedge clk);
    checks++;
    if (n_w_we != 1 || last_w !== w_word_t'(wv) || last_w_a != 77) begin failures++; $display("FAIL weight word"); end
    // output word chunks
    for (int a = 0; a < 3; a++) begin
      for (int i = 0; i < 32; i += 5) begin
        logic [$bits(out_word_t)-1:0] ov;
        ov = oword(OUT_AW'(a * 50 + 3));
        hr(3, a * 50 + 3, i, d);
        checks++;
        if (d !== ov[i*32 +: 32]) begin failures++; $display("FAIL out chunk %0d got %h exp %h", i, d, ov[i*32 +: 32]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
