// activation_unit: ReLU on every lane, or bypass.
//
// With en_i high each negative lane value is replaced by zero; with en_i low
// the values pass unchanged (convolution without activation, as in the
// second convolution of a U-net block). Combinational. The paper names the
// unit and ReLU as its function.
module activation_unit
  import sfmmcn_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned N  = LANES
) (
  input  logic               en_i,
  input  logic [N-1:0][DW-1:0] in_i,
  output logic [N-1:0][DW-1:0] out_o
);
  always_comb begin
    for (int k = 0; k < N; k++) begin
      out_o[k] = (en_i && in_i[k][DW-1]) ? '0 : in_i[k];
    end
  end
endmodule
