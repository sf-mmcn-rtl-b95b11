// sf_pe: one processing element of an SF-MMCN core.
//
// A PE computes one output value by itself: taps_i (feature, weight) pairs
// arrive on consecutive valid cycles, each is multiplied and accumulated. A
// tap counter drives the accumulator's input MUX: on the first tap the
// accumulator loads the product, on later taps it adds it to its own value.
// After the last tap the result is ready in the following cycle (mac_valid_o
// for one cycle), and the first tap of the next output may arrive in that
// same cycle, so outputs stream back to back: 9 loads + 1 cycle for the first
// 3x3 result, then one result every 9 cycles.
//
// A zero gate turns the multiplier off for zero features. The accumulator is
// ACC_W bits; mac_o is the accumulator shifted right by FRAC_W (floor) and
// saturated to DATA_W bits. clear_i restarts the tap counter (layer start).
//
// The structure (zero gate, multiplier, accumulator, counter-driven MUX) and
// the 10-cycle timing are the paper's; accumulator width, rounding and the
// run-time tap count are this design's choices.
module sf_pe
  import sfmmcn_pkg::*;
#(
  parameter int unsigned DW   = DATA_W,
  parameter int unsigned FW   = FRAC_W,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned TW   = TAP_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear_i,
  input  logic [TW-1:0]        taps_i,
  input  logic                 valid_i,
  input  logic signed [DW-1:0] feature_i,
  input  logic signed [DW-1:0] weight_i,
  output logic                 mac_valid_o,
  output logic signed [DW-1:0] mac_o,
  output logic                 mul_active_o
);
  logic                   mul_en;
  logic signed [DW-1:0]   mul_a, mul_b;
  logic signed [2*DW-1:0] prod;
  logic signed [AW-1:0]   acc_q, acc_base;
  logic [TW-1:0]          cnt_q;
  logic                   first, last;

  zero_gate #(.DATA_W(DW)) u_zg (
    .valid_i  (valid_i),
    .feature_i(feature_i),
    .weight_i (weight_i),
    .mul_en_o (mul_en),
    .mul_a_o  (mul_a),
    .mul_b_o  (mul_b)
  );

  assign prod         = mul_a * mul_b;
  assign mul_active_o = mul_en;
  assign first        = (cnt_q == '0);
  assign last         = (cnt_q == taps_i - TW'(1)) || (taps_i <= TW'(1));
  // Counter-driven MUX: restart on the first tap, else feed back.
  assign acc_base     = first ? '0 : acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q       <= '0;
      acc_q       <= '0;
      mac_valid_o <= 1'b0;
    end else begin
      mac_valid_o <= 1'b0;
      if (clear_i) begin
        cnt_q <= '0;
      end else if (valid_i) begin
        acc_q <= acc_base + AW'(prod);
        if (last) begin
          cnt_q       <= '0;
          mac_valid_o <= 1'b1;
        end else begin
          cnt_q <= cnt_q + TW'(1);
        end
      end
    end
  end

  function automatic logic signed [DW-1:0] scale(input logic signed [AW-1:0] a);
    logic signed [AW-1:0] s;
    logic signed [AW-1:0] maxv, minv;
    maxv = AW'((1 << (DW-1)) - 1);
    minv = -AW'(1 << (DW-1));
    s = a >>> FW;
    if (s > maxv)      return {1'b0, {(DW-1){1'b1}}};
    else if (s < minv) return {1'b1, {(DW-1){1'b0}}};
    else               return s[DW-1:0];
  endfunction

  assign mac_o = scale(acc_q);
endmodule
