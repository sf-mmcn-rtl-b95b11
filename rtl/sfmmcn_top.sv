// sfmmcn_top: the SF-MMCN accelerator.
//
// Eight SF-MMCN cores of nine PEs each (72 PEs) work in lockstep on the same
// stream of input words, each with its own weights, so each core computes a
// different output channel of the same eight output positions. The host
// loads the input and weight buffers and the layer descriptor through the
// 32-bit I/O interface and writes start; TOP CTRL then streams the buffers
// into the cores and collects one output word (8 cores x 8 lanes x 16 bits)
// per output into the output buffer, which the host reads back. done_o
// pulses when the layer is finished; busy_o is high while it runs.
//
// The eight cores, the buffers, TOP CTRL and the I/O interface are the
// blocks of the paper's architecture figure. Merging the per-core output
// buffers into one shared buffer, and the host bus that stands in for the
// off-chip memory, are this design's choices.
//
// Lint notes: the cores' per-cycle event strobes (core_stat: zero-gated
// multiplies, residual writes, reused features, pooled outputs) drive no
// logic here; they are kept as named signals for statistics and for
// testbenches to observe. rst_n is also read by the lockstep assertion,
// which lint reports as a synchronous use.
module sfmmcn_top
  import sfmmcn_pkg::*;
#(
  parameter int unsigned N_CORE = N_CORES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_we_i,
  input  logic        host_re_i,
  input  logic [23:0] host_addr_i,
  input  logic [31:0] host_wdata_i,
  output logic [31:0] host_rdata_o,
  output logic        host_rvalid_o,
  output logic        done_o,
  output logic        busy_o
);
  layer_cfg_t        host_cfg, run_cfg;
  logic              start;
  logic              in_we, w_we, out_re, in_re, w_re, out_we;
  logic [IN_AW-1:0]  in_waddr, in_raddr;
  logic [W_AW-1:0]   w_waddr, w_raddr;
  logic [OUT_AW-1:0] out_raddr, out_waddr;
  in_word_t          in_wdata, in_rdata;
  w_word_t           w_wdata, w_rdata;
  out_word_t         out_wdata, out_rdata;
  logic              core_clear, core_valid;
  logic [N_CORE-1:0] core_ov;
  core_stat_t        core_stat [N_CORE];

  io_interface u_io (
    .clk, .rst_n,
    .host_we_i, .host_re_i, .host_addr_i, .host_wdata_i, .host_rdata_o, .host_rvalid_o,
    .cfg_o(host_cfg), .start_o(start), .busy_i(busy_o), .done_i(done_o),
    .in_we_o(in_we), .in_waddr_o(in_waddr), .in_wdata_o(in_wdata),
    .w_we_o(w_we), .w_waddr_o(w_waddr), .w_wdata_o(w_wdata),
    .out_re_o(out_re), .out_raddr_o(out_raddr), .out_rdata_i(out_rdata)
  );

  top_ctrl u_ctrl (
    .clk, .rst_n,
    .start_i(start), .cfg_i(host_cfg), .cfg_o(run_cfg), .busy_o, .done_o,
    .in_re_o(in_re), .in_raddr_o(in_raddr), .w_re_o(w_re), .w_raddr_o(w_raddr),
    .core_clear_o(core_clear), .core_valid_o(core_valid),
    .core_out_valid_i(core_ov[0]), .out_we_o(out_we), .out_waddr_o(out_waddr)
  );

  input_buffer u_inbuf (
    .clk, .we_i(in_we), .waddr_i(in_waddr), .wdata_i(in_wdata),
    .re_i(in_re), .raddr_i(in_raddr), .rdata_o(in_rdata)
  );

  weight_buffer u_wbuf (
    .clk, .we_i(w_we), .waddr_i(w_waddr), .wdata_i(w_wdata),
    .re_i(w_re), .raddr_i(w_raddr), .rdata_o(w_rdata)
  );

  output_buffer u_outbuf (
    .clk, .we_i(out_we), .waddr_i(out_waddr), .wdata_i(out_wdata),
    .re_i(out_re), .raddr_i(out_raddr), .rdata_o(out_rdata)
  );

  for (genvar c = 0; c < N_CORE; c++) begin : g_core
    sf_mmcn_core #(.CORE_ID(c)) u_core (
      .clk, .rst_n,
      .cfg_i(run_cfg), .clear_i(core_clear), .valid_i(core_valid),
      .in_i(in_rdata), .w_i(w_rdata[c]),
      .out_valid_o(core_ov[c]), .out_o(out_wdata[c]), .stat_o(core_stat[c])
    );
  end
  for (genvar c = N_CORE; c < N_CORES; c++) begin : g_unused
    assign out_wdata[c] = '0;
  end

  // All cores run in lockstep and report outputs in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) core_ov == '0 || core_ov == '1);
endmodule
