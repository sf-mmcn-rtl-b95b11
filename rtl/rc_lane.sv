// rc_lane: the R_c register, residual adder and output MUX of one SF lane.
//
// Each of PE_1..PE_8 has a 32-bit R_c register next to it. Its upper 16 bits
// hold the residual value that the server PE_9 delivered for this lane; its
// lower 16 bits hold one reused input feature, kept so that a later
// convolution can take it from here instead of reloading it. The lane output
// conv_o is MAC_k in normal mode and MAC_k + residual (saturated to 16 bits)
// in residual mode ("Mode select 2"). Both halves load on the clock edge
// when their write strobe is high; conv_o is combinational from mac_i and
// the register.
//
// Register size, its split into residual and reused halves, the adder and
// the MUX are from the paper; saturation of the sum and the strobes are this
// design's choices.
module rc_lane
  import sfmmcn_pkg::*;
#(
  parameter int unsigned DW = DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 res_we_i,
  input  logic signed [DW-1:0] res_i,
  input  logic                 reuse_we_i,
  input  logic signed [DW-1:0] reuse_i,
  output logic signed [DW-1:0] reuse_o,
  output logic [2*DW-1:0]      rc_o,
  input  logic                 res_sel_i,
  input  logic signed [DW-1:0] mac_i,
  output logic signed [DW-1:0] conv_o
);
  logic [2*DW-1:0] rc_q;
  logic signed [DW:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc_q <= '0;
    end else begin
      if (res_we_i)   rc_q[2*DW-1:DW] <= res_i;
      if (reuse_we_i) rc_q[DW-1:0]    <= reuse_i;
    end
  end

  assign rc_o    = rc_q;
  assign reuse_o = rc_q[DW-1:0];
  assign sum     = {mac_i[DW-1], mac_i} + {rc_q[2*DW-1], rc_q[2*DW-1:DW]};

  always_comb begin
    if (!res_sel_i)                    conv_o = mac_i;
    else if (sum[DW] != sum[DW-1])     conv_o = sum[DW] ? {1'b1, {(DW-1){1'b0}}} : {1'b0, {(DW-1){1'b1}}};
    else                               conv_o = sum[DW-1:0];
  end
endmodule
