// tb_pooling_unit: random and corner checks of the two 2x2 max results.
module tb_pooling_unit;
  logic [7:0][15:0] in;
  logic [1:0][15:0] mx;
  int checks = 0, failures = 0;

  pooling_unit dut (.in_i(in), .max_o(mx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k < 8; k++) begin
        case (i % 4)
          0: in[k] = 16'($urandom);
          1: in[k] = 16'(-int'($urandom % 1000) - 1);       // all negative
          2: in[k] = 16'($urandom % 7);                      // small, ties
          default: in[k] = (k == i % 8) ? 16'h7fff : 16'h8000;
        endcase
      end
      #1;
      for (int g = 0; g < 2; g++) begin
        int m;
        m = -40000;
        for (int k = 0; k < 4; k++) if (int'($signed(in[4*g+k])) > m) m = int'($signed(in[4*g+k]));
        checks++;
        if (int'($signed(mx[g])) != m) begin
          failures++; $display("FAIL g=%0d got %0d exp %0d", g, $signed(mx[g]), m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
