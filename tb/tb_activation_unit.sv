// tb_activation_unit: ReLU on/off against a software model.
module tb_activation_unit;
  logic en;
  logic [7:0][15:0] in, out;
  int checks = 0, failures = 0;

  activation_unit dut (.en_i(en), .in_i(in), .out_o(out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      en = 1'(i % 3 != 0);
      for (int k = 0; k < 8; k++) in[k] = (i == 5) ? 16'h8000 : 16'($urandom);
      #1;
      for (int k = 0; k < 8; k++) begin
        logic [15:0] e;
        e = (en && $signed(in[k]) < 0) ? 16'h0 : in[k];
        checks++;
        if (out[k] !== e) begin failures++; $display("FAIL en=%0b in=%0d out=%0d", en, $signed(in[k]), $signed(out[k])); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
