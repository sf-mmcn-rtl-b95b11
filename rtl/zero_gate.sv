// zero_gate: the zero gate unit in front of a PE's multiplier.
//
// When the presented input feature is zero the product is known to be zero,
// so the unit drops the multiplier enable and forces both operands to zero;
// the multiplier inputs then do not toggle and the accumulator skips the tap.
// Purely combinational. Detecting a zero feature and turning the multiplier
// off follows the paper; doing it by operand isolation plus an enable flag is
// this design's choice.
module zero_gate #(
  parameter int unsigned DATA_W = 16
) (
  input  logic                     valid_i,
  input  logic signed [DATA_W-1:0] feature_i,
  input  logic signed [DATA_W-1:0] weight_i,
  output logic                     mul_en_o,
  output logic signed [DATA_W-1:0] mul_a_o,
  output logic signed [DATA_W-1:0] mul_b_o
);
  always_comb begin
    mul_en_o = valid_i && (feature_i != '0);
    mul_a_o  = mul_en_o ? feature_i : '0;
    mul_b_o  = mul_en_o ? weight_i  : '0;
  end
endmodule
