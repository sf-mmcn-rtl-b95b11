// pooling_unit: 2x2 max pooling over the eight lanes of a core.
//
// PE_1..PE_4 of a core compute a 2x2 block of neighbouring output pixels and
// PE_5..PE_8 the 2x2 block to its right, so one max over lanes 0..3 and one
// over lanes 4..7 give two 2x2 max-pool results. Combinational, signed
// compare. That the core has a pooling unit is the paper's; the 2x2 window
// and the lane grouping are this design's reading of the PE window figure.
module pooling_unit
  import sfmmcn_pkg::*;
#(
  parameter int unsigned DW = DATA_W
) (
  input  logic [7:0][DW-1:0] in_i,
  output logic [1:0][DW-1:0] max_o
);
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      max_o[g] = in_i[4*g];
      for (int k = 1; k < 4; k++) begin
        if ($signed(in_i[4*g+k]) > $signed(max_o[g])) max_o[g] = in_i[4*g+k];
      end
    end
  end
endmodule
