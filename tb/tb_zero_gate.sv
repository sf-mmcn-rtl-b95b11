// tb_zero_gate: exhaustive-corner and random check of the zero gate unit.
// Expected values: enable = valid and feature != 0; operands zero otherwise.
module tb_zero_gate;
  logic valid;
  logic signed [15:0] f, w, a, b;
  logic en;
  int checks = 0, failures = 0;

  zero_gate #(.DATA_W(16)) dut (.valid_i(valid), .feature_i(f), .weight_i(w),
                               .mul_en_o(en), .mul_a_o(a), .mul_b_o(b));

  task automatic check(input logic v, input logic signed [15:0] ff, input logic signed [15:0] ww);
    logic exp_en;
    valid = v; f = ff; w = ww;
    #1;
    exp_en = v && (ff != 0);
    checks++;
    if (en !== exp_en || a !== (exp_en ? ff : 16'sd0) || b !== (exp_en ? ww : 16'sd0)) begin
      failures++;
      $display("FAIL v=%0b f=%0d w=%0d en=%0b a=%0d b=%0d", v, ff, ww, en, a, b);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(1, 0, 16'sd5);
    check(1, 16'sd3, 16'sd5);
    check(0, 16'sd3, 16'sd5);
    check(1, -16'sd1, -16'sd7);
    check(1, 0, 0);
    repeat (200) begin
      logic signed [15:0] rf;
      rf = ($urandom % 4 == 0) ? 16'sd0 : 16'($urandom);
      check(1'($urandom), rf, 16'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
