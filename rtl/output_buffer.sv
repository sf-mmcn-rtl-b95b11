// output_buffer: the output buffer. One word per produced output holds the eight
// lane results of all eight cores.
//
// A simple dual-port memory written as an array: one write port and one
// read port with a registered (synchronous) read: the word addressed in a
// cycle with re_i high appears on rdata_o in the next cycle and stays there
// until the next read. Depth (DEPTH words) and word layout are this design's choices; the
// paper only names the buffer. On an ASIC this array maps onto an SRAM macro.
module output_buffer
  import sfmmcn_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  out_word_t wdata_i,
  input  logic          re_i,
  input  logic [AW-1:0] raddr_i,
  output out_word_t    rdata_o
);
  out_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end
endmodule
