// tb_input_buffer: writes random words to random addresses of the input buffer,
// keeps a software copy and checks every read, including the one-cycle read
// latency, that rdata holds between reads and read-during-write of the
// same address (old word returned).
module tb_input_buffer;
  import sfmmcn_pkg::*;
  localparam int D = 1024;
  localparam int AW = $clog2(D);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] wa = 0, ra = 0;
  in_word_t wd, rd;
  in_word_t model [D];
  logic [D-1:0] written = '0;
  int checks = 0, failures = 0;

  input_buffer dut (.clk, .we_i(we), .waddr_i(wa), .wdata_i(wd), .re_i(re), .raddr_i(ra), .rdata_o(rd));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic in_word_t rnd();
    logic [$bits(in_word_t)-1:0] v;
    for (int i = 0; i < $bits(in_word_t); i += 32) v[i +: 32] = $urandom;
    return in_word_t'(v);
  endfunction

  initial begin
    in_word_t expd;
    bit    pend;
    pend = 0;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk);
      #1;
      if (pend) begin
        checks++;
        if (rd !== expd) begin failures++; $display("FAIL read %0d", i); end
      end
      we = 1'($urandom);
      wa = AW'($urandom % 64);
      wd = rnd();
      re = 1'($urandom) && (i > 200);
      ra = ($urandom % 4 == 0) ? wa : AW'($urandom % 64);
      // read returns the stored word (old word on a same-cycle write)
      pend = re && written[ra];
      if (re && written[ra]) expd = model[ra];
      if (!re && pend) ;
      @(negedge clk);
      if (we) begin model[wa] = wd; written[wa] = 1'b1; end
    end
    // top address and hold behaviour
    @(posedge clk); #1 we = 1; wa = AW'(D - 1); wd = rnd(); re = 0;
    expd = wd;
    @(posedge clk); #1 we = 0; re = 1; ra = AW'(D - 1);
    @(posedge clk); #1 re = 0;
    checks++;
    if (rd !== expd) begin failures++; $display("FAIL top address"); end
    repeat (3) @(posedge clk);
    #1 checks++;
    if (rd !== expd) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
