// io_interface: system control and I/O interface between the host and the
// accelerator.
//
// A 32-bit memory-mapped host bus. host_addr_i[23:20] selects a region,
// [19:5] an entry and [4:0] a 32-bit chunk of that entry:
//   region 0  control/configuration registers (chunk 0 only)
//             0 start (write bit 0 = 1), 1 {add_en[10], act_en[9], split[8],
//             sf_mode[5:4], mode[2:0]}, 2 taps, 3 res_taps, 4 n_ops,
//             5 in_base, 6 w_base, 7 out_base, 8 status {busy[1], done[0]}
//   region 1  input buffer words, 9 chunks each (272 bits, upper 16 unused)
//   region 2  weight buffer words, 16 chunks each (512 bits)
//   region 3  output buffer words, 32 chunks each (1024 bits), read only
// Wide words are assembled in a staging register; writing a word's last
// chunk writes the whole word into its buffer in the next cycle (chunks
// before it may come in any order). Reads return host_rdata_o with
// host_rvalid_o two cycles after host_re_i. The done bit is set by the
// controller's done pulse and cleared by the next start.
//
// The paper only names a "System Control & I/O Interface"; the bus, address
// map and timing are this design's.
//
// Lint note: the top 16 bits of the input staging register (the part of
// the ninth chunk beyond the 272-bit input word) are written but never
// used; keeping whole 32-bit chunks keeps the chunk logic uniform.
module io_interface
  import sfmmcn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we_i,
  input  logic              host_re_i,
  input  logic [23:0]       host_addr_i,
  input  logic [31:0]       host_wdata_i,
  output logic [31:0]       host_rdata_o,
  output logic              host_rvalid_o,
  output layer_cfg_t        cfg_o,
  output logic              start_o,
  input  logic              busy_i,
  input  logic              done_i,
  output logic              in_we_o,
  output logic [IN_AW-1:0]  in_waddr_o,
  output in_word_t          in_wdata_o,
  output logic              w_we_o,
  output logic [W_AW-1:0]   w_waddr_o,
  output w_word_t           w_wdata_o,
  output logic              out_re_o,
  output logic [OUT_AW-1:0] out_raddr_o,
  input  out_word_t         out_rdata_i
);
  localparam int unsigned IN_CH  = ($bits(in_word_t) + 31) / 32;   // 9
  localparam int unsigned W_CH   = $bits(w_word_t) / 32;    // 16
  localparam int unsigned OUT_CH = $bits(out_word_t) / 32;  // 32

  logic [3:0]  region;
  logic [14:0] entry;
  logic [4:0]  chunk;
  assign region = host_addr_i[23:20];
  assign entry  = host_addr_i[19:5];
  assign chunk  = host_addr_i[4:0];

  logic [IN_CH*32-1:0]    in_stage_q;
  logic [W_CH-1:0][31:0]  w_stage_q;
  logic                   done_q;

  // ---- writes ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o      <= '0;
      start_o    <= 1'b0;
      done_q     <= 1'b0;
      in_stage_q <= '0;
      w_stage_q  <= '0;
      in_we_o    <= 1'b0;
      w_we_o     <= 1'b0;
      in_waddr_o <= '0;
      w_waddr_o  <= '0;
    end else begin
      start_o <= 1'b0;
      in_we_o <= 1'b0;
      w_we_o  <= 1'b0;
      if (done_i) done_q <= 1'b1;
      if (host_we_i) begin
        unique case (region)
          4'd0: unique case (entry)
            15'd0: if (host_wdata_i[0]) begin start_o <= 1'b1; done_q <= 1'b0; end
            15'd1: begin
              cfg_o.mode    <= mode_e'(host_wdata_i[2:0]);
              cfg_o.sf_mode <= sf_mode_e'(host_wdata_i[5:4]);
              cfg_o.split   <= host_wdata_i[8];
              cfg_o.act_en  <= host_wdata_i[9];
              cfg_o.add_en  <= host_wdata_i[10];
            end
            15'd2: cfg_o.taps     <= host_wdata_i[TAP_W-1:0];
            15'd3: cfg_o.res_taps <= host_wdata_i[TAP_W-1:0];
            15'd4: cfg_o.n_ops    <= host_wdata_i[TAP_W-1:0];
            15'd5: cfg_o.in_base  <= host_wdata_i[IN_AW-1:0];
            15'd6: cfg_o.w_base   <= host_wdata_i[W_AW-1:0];
            15'd7: cfg_o.out_base <= host_wdata_i[OUT_AW-1:0];
            default: ;
          endcase
          4'd1: if (chunk < 5'(IN_CH)) begin
            in_stage_q[chunk*32 +: 32] <= host_wdata_i;
            if (chunk == 5'(IN_CH - 1)) begin
              in_we_o    <= 1'b1;
              in_waddr_o <= entry[IN_AW-1:0];
            end
          end
          4'd2: if (chunk < 5'(W_CH)) begin
            w_stage_q[chunk[3:0]] <= host_wdata_i;
            if (chunk == 5'(W_CH - 1)) begin
              w_we_o    <= 1'b1;
              w_waddr_o <= entry[W_AW-1:0];
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign in_wdata_o = in_word_t'(in_stage_q[$bits(in_word_t)-1:0]);
  assign w_wdata_o  = w_word_t'(w_stage_q);

  // ---- reads: cycle 1 registers the request (and reads the output
  //      buffer), cycle 2 selects the chunk ----
  logic       rd_q;
  logic [3:0] rd_region_q;
  logic [4:0] rd_chunk_q;
  logic [31:0] reg_q;
  logic [OUT_CH-1:0][31:0] out_chunks;

  assign out_chunks = out_rdata_i;

  assign out_re_o    = host_re_i && (region == 4'd3);
  assign out_raddr_o = entry[OUT_AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q          <= 1'b0;
      rd_region_q   <= '0;
      rd_chunk_q    <= '0;
      reg_q         <= '0;
      host_rvalid_o <= 1'b0;
      host_rdata_o  <= '0;
    end else begin
      rd_q        <= host_re_i;
      rd_region_q <= region;
      rd_chunk_q  <= chunk;
      unique case (entry)
        15'd1:   reg_q <= 32'({cfg_o.add_en, cfg_o.act_en, cfg_o.split, 2'b00, cfg_o.sf_mode, 1'b0, cfg_o.mode});
        15'd2:   reg_q <= 32'(cfg_o.taps);
        15'd3:   reg_q <= 32'(cfg_o.res_taps);
        15'd4:   reg_q <= 32'(cfg_o.n_ops);
        15'd5:   reg_q <= 32'(cfg_o.in_base);
        15'd6:   reg_q <= 32'(cfg_o.w_base);
        15'd7:   reg_q <= 32'(cfg_o.out_base);
        15'd8:   reg_q <= {30'd0, busy_i, done_q};
        default: reg_q <= '0;
      endcase
      host_rvalid_o <= rd_q;
      if (rd_q) begin
        if (rd_region_q == 4'd3) host_rdata_o <= out_chunks[rd_chunk_q];
        else if (rd_region_q == 4'd0) host_rdata_o <= reg_q;
        else host_rdata_o <= '0;
      end
    end
  end
endmodule
