// tb_rc_lane: checks the R_c register halves, the residual adder with
// saturation and the normal/residual output MUX against a software model.
module tb_rc_lane;
  logic clk = 0, rst_n = 0;
  logic res_we = 0, reuse_we = 0, res_sel = 0;
  logic signed [15:0] res_in = 0, reuse_in = 0, mac = 0, reuse_out, conv;
  logic [31:0] rc;
  int checks = 0, failures = 0;
  logic signed [15:0] m_res = 0, m_reuse = 0;

  rc_lane dut (.clk, .rst_n, .res_we_i(res_we), .res_i(res_in), .reuse_we_i(reuse_we),
               .reuse_i(reuse_in), .reuse_o(reuse_out), .rc_o(rc), .res_sel_i(res_sel),
               .mac_i(mac), .conv_o(conv));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] sat(input int v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(posedge clk);
      #1;
      // check state after the edge
      checks++;
      if (rc !== {m_res, m_reuse} || reuse_out !== m_reuse) begin
        failures++; $display("FAIL rc=%h exp %h%h", rc, m_res, m_reuse);
      end
      // new stimulus
      res_we   = 1'($urandom);
      reuse_we = 1'($urandom);
      res_sel  = 1'($urandom);
      res_in   = (i % 50 == 7) ? 16'sh7000 : 16'($urandom);
      reuse_in = 16'($urandom);
      mac      = (i % 50 == 7) ? 16'sh7000 : 16'($urandom);
      #1;
      checks++;
      if (conv !== (res_sel ? sat(int'(mac) + int'(m_res)) : mac)) begin
        failures++; $display("FAIL conv=%0d mac=%0d res=%0d sel=%0b", conv, mac, m_res, res_sel);
      end
      @(negedge clk);
      if (res_we)   m_res   = res_in;
      if (reuse_we) m_reuse = reuse_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
