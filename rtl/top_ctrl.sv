// top_ctrl: TOP CTRL, the layer sequencer of the accelerator.
//
// On start_i (while idle) it latches the layer descriptor and runs one layer:
// for each of n_ops outputs it reads `taps` consecutive input-buffer words
// (from in_base on) and, for tap t, weight-buffer word w_base + t, so the
// same weights serve every output position of the layer. The buffers have a
// one-cycle read, so core_valid_o follows each read by one cycle. A one-cycle
// core_clear_o at the start restarts all tap counters. Every cycle in which
// the cores report an output, the word is written to the output buffer at
// out_base, out_base+1, ... When n_ops outputs have been written, done_o
// pulses for one cycle and the controller is idle again. In max-pooling mode
// each input word gives one output (taps is taken as 1).
//
// The paper says only that TOP CTRL manages the dataflow through the weight
// and input buffers; this sequencing is this design's.
//
// Lint note: rst_n is also read by the output-only-while-busy assertion,
// which lint reports as a synchronous use of the reset; the logic itself
// uses it asynchronously only.
module top_ctrl
  import sfmmcn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  layer_cfg_t        cfg_i,
  output layer_cfg_t        cfg_o,
  output logic              busy_o,
  output logic              done_o,
  output logic              in_re_o,
  output logic [IN_AW-1:0]  in_raddr_o,
  output logic              w_re_o,
  output logic [W_AW-1:0]   w_raddr_o,
  output logic              core_clear_o,
  output logic              core_valid_o,
  input  logic              core_out_valid_i,
  output logic              out_we_o,
  output logic [OUT_AW-1:0] out_waddr_o
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state_q;

  layer_cfg_t        cfg_q;
  logic [TAP_W-1:0]  op_q, tap_q, out_cnt_q, taps_eff;
  logic [IN_AW-1:0]  in_ptr_q;
  logic              issue, last_issue;

  assign taps_eff   = (cfg_q.mode == MODE_POOL || cfg_q.taps == '0) ? TAP_W'(1) : cfg_q.taps;
  assign issue      = (state_q == S_RUN);
  assign last_issue = issue && (tap_q == taps_eff - TAP_W'(1)) && (op_q == cfg_q.n_ops - TAP_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      cfg_q        <= '0;
      op_q         <= '0;
      tap_q        <= '0;
      in_ptr_q     <= '0;
      out_cnt_q    <= '0;
      core_clear_o <= 1'b0;
      core_valid_o <= 1'b0;
      done_o       <= 1'b0;
    end else begin
      core_clear_o <= 1'b0;
      done_o       <= 1'b0;
      core_valid_o <= issue;
      case (state_q)
        S_IDLE: if (start_i && cfg_i.n_ops != '0) begin
          cfg_q        <= cfg_i;
          op_q         <= '0;
          tap_q        <= '0;
          in_ptr_q     <= cfg_i.in_base;
          out_cnt_q    <= '0;
          core_clear_o <= 1'b1;
          state_q      <= S_RUN;
        end
        S_RUN: begin
          in_ptr_q <= in_ptr_q + IN_AW'(1);
          if (tap_q == taps_eff - TAP_W'(1)) begin
            tap_q <= '0;
            op_q  <= op_q + TAP_W'(1);
          end else begin
            tap_q <= tap_q + TAP_W'(1);
          end
          if (last_issue) state_q <= S_DRAIN;
        end
        default: ;
      endcase
      if (state_q != S_IDLE && core_out_valid_i) begin
        out_cnt_q <= out_cnt_q + TAP_W'(1);
        if (out_cnt_q == cfg_q.n_ops - TAP_W'(1)) begin
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
      end
    end
  end

  assign cfg_o       = cfg_q;
  assign busy_o      = (state_q != S_IDLE);
  assign in_re_o     = issue;
  assign in_raddr_o  = in_ptr_q;
  assign w_re_o      = issue;
  assign w_raddr_o   = cfg_q.w_base + W_AW'(tap_q);
  assign out_we_o    = (state_q != S_IDLE) && core_out_valid_i;
  assign out_waddr_o = cfg_q.out_base + OUT_AW'(out_cnt_q);

  // Outputs only arrive while a layer is running.
  assert property (@(posedge clk) disable iff (!rst_n) core_out_valid_i |-> busy_o);
endmodule
