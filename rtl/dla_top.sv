// dla_top: the layer-fusion object-detection accelerator core.
//
// A host loads weights of a whole fusion group (several consecutive layers)
// into the 96 KB weight SRAM and one input tile into the left half of the
// 384 KB unified buffer, then starts the group. The core computes the layers
// one after another; each layer reads one buffer half and writes the other,
// so only the group's input and final output cross the chip boundary.
//
// Datapath, in pipeline order (as in the paper's architecture diagram):
//   unified_buffer (input half, 96 x 64 b read)
//     -> pe_feeder (window / weight multiplexers) + weight_sram (3 x 64 b read)
//     -> pe_array (8 blocks of 32x3 MACs, 256 x 24 b partial sums)
//     -> pipelined_accumulator (per-block adders, tree adder, final adder)
//     -> bn_act with bn_register (BN and ReLU6, 32 x 8 b)
//     -> transposed_addressing with max_pool (byte-masked writes, 32 x 64 b)
//     -> unified_buffer (output half)
// controlled by controller from config_register, and reached by the host
// through axis_interface (64-bit AXI4-Stream in and out).
//
// Latency of one pass: buffer/weight read 1 cycle, PE array 1, accumulator
// 2, BN 1, write 2. Layer sizes and command formats are described in the
// modules. Off-chip DRAM, DMA and the host processor are outside this core;
// the AXI4-Stream ports are where they connect.
//
// The block set and their order follow the paper; the statistics counters
// (stat_*), the command format of the stream port and the pipeline
// latencies are this design's.
module dla_top
  import dla_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [WORD_W-1:0]  s_axis_tdata,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  output logic [WORD_W-1:0]  m_axis_tdata,
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic               m_axis_tlast,
  output logic               busy,
  output logic               done,
  output logic [31:0]        stat_passes,
  output logic [31:0]        stat_swaps,
  output logic [31:0]        stat_writes
);

  localparam int unsigned AWID  = $clog2(BANK_WORDS);
  localparam int unsigned WAWID = $clog2(WB_WORDS);

  // ---- host interface ----------------------------------------------------------
  logic               start;
  logic               h_sel, h_wr_en, h_rd_en;
  logic [7:0]         h_bank;
  logic [AWID-1:0]    h_addr;
  logic [WORD_W-1:0]  h_wr_data, h_rd_data;
  logic               w_wr_en, bn_wr_en, cfg_wr_en;
  logic [1:0]         w_wr_bank;
  logic [WAWID-1:0]   w_wr_addr;
  logic [$clog2(BN_ENTRIES)-2:0]   bn_wr_idx;
  logic [$clog2(MAX_LAYERS+1)-1:0] cfg_wr_idx;
  logic [WORD_W-1:0]  wr_data;

  axis_interface u_axis (
    .clk, .rst_n,
    .s_tdata (s_axis_tdata),  .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .m_tdata (m_axis_tdata),  .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready),
    .m_tlast (m_axis_tlast),
    .core_busy(busy), .start,
    .h_sel, .h_bank, .h_addr, .h_wr_en, .h_wr_data, .h_rd_en, .h_rd_data,
    .w_wr_en, .w_wr_bank, .w_wr_addr,
    .bn_wr_en, .bn_wr_idx,
    .cfg_wr_en, .cfg_wr_idx,
    .wr_data
  );

  layer_cfg_t layers [MAX_LAYERS];
  logic [$clog2(MAX_LAYERS+1)-1:0] n_layers;

  config_register u_cfg (
    .clk, .rst_n,
    .wr_en(cfg_wr_en), .wr_idx(cfg_wr_idx), .wr_data(wr_data),
    .layers, .n_layers
  );

  // ---- controller ----------------------------------------------------------------
  logic               in_sel;
  logic [N_BANK-1:0]  fb_rd_en;
  logic [AWID-1:0]    fb_rd_addr [N_BANK];
  logic               wb_rd_en;
  logic [WAWID-1:0]   wb_rd_addr [WB_BANKS];
  logic [6:0]         feed_base;
  logic [N_ROWS-1:0]  feed_rowok;
  logic               feed_pw;
  logic [1:0]         feed_pw_bank;
  pass_t              acc_pass;
  out_tag_t           acc_tag;

  controller u_ctrl (
    .clk, .rst_n, .start, .layers, .n_layers,
    .busy, .done, .in_sel,
    .fb_rd_en, .fb_rd_addr, .wb_rd_en, .wb_rd_addr,
    .feed_base, .feed_rowok, .feed_pw, .feed_pw_bank,
    .acc_pass, .acc_tag,
    .n_passes(stat_passes), .n_swaps(stat_swaps)
  );

  // ---- memories --------------------------------------------------------------------
  logic [WORD_W-1:0]  fb_rd_data [N_BANK];
  logic [N_BANK-1:0]  ta_rd_en, ta_wr_en;
  logic [AWID-1:0]    ta_rd_addr, ta_wr_addr;
  logic [7:0]         ta_wr_mask;
  logic [WORD_W-1:0]  ta_rd_data [N_BANK];
  logic [WORD_W-1:0]  ta_wr_data [N_BANK];
  logic               ta_wr_any;

  unified_buffer u_ubuf (
    .clk, .in_sel, .core_active(busy),
    .pe_rd_en(fb_rd_en), .pe_rd_addr(fb_rd_addr), .pe_rd_data(fb_rd_data),
    .ta_rd_en, .ta_rd_addr, .ta_rd_data,
    .ta_wr_en, .ta_wr_addr, .ta_wr_mask, .ta_wr_data,
    .h_sel, .h_bank, .h_addr, .h_wr_en, .h_wr_data, .h_rd_en, .h_rd_data
  );

  logic [WORD_W-1:0] wb_rd_data [WB_BANKS];

  weight_sram u_wsram (
    .clk,
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data),
    .wr_en(w_wr_en), .wr_bank(w_wr_bank), .wr_addr(w_wr_addr), .wr_data(wr_data)
  );

  // ---- PE array --------------------------------------------------------------------
  feat_t pe_x [N_BLK][N_ROWS];
  feat_t pe_w [N_BLK][N_TAPS];
  acc_t  pe_sum   [N_BLK][N_ROWS];
  acc_t  pe_carry [N_BLK][2];

  pe_feeder u_feed (
    .fb_data(fb_rd_data), .base(feed_base), .rowok(feed_rowok),
    .wb_data(wb_rd_data), .pw(feed_pw), .pw_bank(feed_pw_bank),
    .x(pe_x), .w(pe_w)
  );

  pe_array u_pe (
    .clk, .en(1'b1), .x(pe_x), .w(pe_w), .sum(pe_sum), .carry(pe_carry)
  );

  // ---- accumulation, BN and activation ----------------------------------------------
  logic      acc_valid, acc_busy;
  logic [2:0] acc_blk;
  out_tag_t  acc_out_tag, bn_tag;
  acc_t      acc_data [N_ROWS];

  pipelined_accumulator u_acc (
    .clk, .rst_n,
    .pass(acc_pass), .tag_in(acc_tag), .sum(pe_sum), .carry(pe_carry),
    .out_valid(acc_valid), .out_blk(acc_blk), .out_tag(acc_out_tag),
    .out_data(acc_data), .out_busy(acc_busy)
  );

  always_comb begin
    bn_tag    = acc_out_tag;
    bn_tag.ch = acc_out_tag.ch + 9'(acc_blk);
  end

  logic signed [15:0] bn_scale, bn_bias;

  bn_register u_bnreg (
    .clk,
    .wr_en(bn_wr_en), .wr_idx(bn_wr_idx), .wr_data(wr_data),
    .rd_idx(8'(bn_tag.bnbase + 8'(bn_tag.ch))),
    .rd_scale(bn_scale), .rd_bias(bn_bias)
  );

  logic      act_valid;
  feat_t     act_data [N_ROWS];
  out_tag_t  act_tag;

  bn_act u_bn (
    .clk, .rst_n,
    .in_valid(acc_valid), .in_data(acc_data),
    .scale(bn_scale), .bias(bn_bias), .shift(bn_tag.shift), .relu6(bn_tag.relu6),
    .in_tag(bn_tag),
    .out_valid(act_valid), .out_data(act_data), .out_tag(act_tag)
  );

  // ---- transposed addressing into the output half -------------------------------------
  transposed_addressing u_ta (
    .clk, .rst_n,
    .in_valid(act_valid), .in_data(act_data), .in_tag(act_tag),
    .rd_en(ta_rd_en), .rd_addr(ta_rd_addr), .rd_data(ta_rd_data),
    .wr_en(ta_wr_en), .wr_addr(ta_wr_addr), .wr_mask(ta_wr_mask), .wr_data(ta_wr_data),
    .wr_any(ta_wr_any)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         stat_writes <= '0;
    else if (ta_wr_any) stat_writes <= stat_writes + 32'd1;

endmodule
