// tb_sf_pe: checks a PE against a software dot product.
// Streams back-to-back 3x3 outputs (9 taps each) and a few dense outputs
// with other tap counts; checks every MAC output value, that the first result
// of a 3x3 convolution appears in cycle 10 counted from the first load, that
// results then follow every 9 cycles, and that zero features switch the
// multiplier off.
module tb_sf_pe;
  import sfmmcn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [15:0] taps;
  logic signed [15:0] f, w, mac;
  logic mv, act;
  int checks = 0, failures = 0;
  int cyc = 0;

  sf_pe dut (.clk, .rst_n, .clear_i(clear), .taps_i(taps), .valid_i(valid),
             .feature_i(f), .weight_i(w), .mac_valid_o(mv), .mac_o(mac), .mul_active_o(act));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] ref_out(input longint s);
    longint q;
    q = s >>> 8;
    if (q > 32767) return 16'sh7fff;
    if (q < -32768) return 16'sh8000;
    return 16'(q);
  endfunction

  // expected results queue with the cycle in which each is due
  logic signed [15:0] exp_q[$];
  int                 due_q[$];
  int                 first_load_cyc;

  always @(negedge clk) begin
    if (rst_n && mv) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output %0d", mac);
      end else begin
        if (mac !== exp_q[0] || cyc != due_q[0]) begin
          failures++;
          $display("FAIL got %0d @%0d exp %0d @%0d", mac, cyc, exp_q[0], due_q[0]);
        end
        void'(exp_q.pop_front()); void'(due_q.pop_front());
      end
    end
  end

  // zero gate: multiplier active exactly for nonzero valid features
  always @(negedge clk) begin
    if (rst_n && valid) begin
      checks++;
      if (act !== (f != 0)) begin failures++; $display("FAIL zero gate f=%0d act=%0b", f, act); end
    end
  end

  task automatic run_outputs(input int n, input int t, input bit zeros, input bit big);
    taps = 16'(t);
    for (int o = 0; o < n; o++) begin
      longint s = 0;
      for (int k = 0; k < t; k++) begin
        @(posedge clk);
        #1;
        valid = 1;
        f = (zeros && ($urandom % 3 == 0)) ? 16'sd0 : (big ? 16'sh7f00 : 16'(($urandom % 2048) - 1024));
        w = big ? 16'sh7f00 : 16'(($urandom % 2048) - 1024);
        s += longint'(f) * longint'(w);
        if (o == 0 && k == 0) first_load_cyc = cyc;
      end
      exp_q.push_back(ref_out(s));
      // with the first load in cycle L, output o is due in cycle L + t*(o+1):
      // for 3x3 that is cycle 10 when the first load is cycle 1
      due_q.push_back(first_load_cyc + t * (o + 1));
    end
    @(posedge clk); #1; valid = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    taps = 9; f = 0; w = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1 clear = 1; @(posedge clk); #1 clear = 0;
    run_outputs(6, 9, 0, 0);     // 3x3 convolutions back to back
    run_outputs(4, 9, 1, 0);     // with zero features
    run_outputs(3, 25, 1, 0);    // 5x5 kernel / dense
    run_outputs(5, 1, 0, 0);     // 1x1
    run_outputs(2, 9, 0, 1);     // saturation
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
