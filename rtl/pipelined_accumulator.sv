// pipelined_accumulator: turns the PE array's per-pass diagonal sums into
// finished output columns.
//
// Structure (as in the paper's block diagram): one adder+register per PE
// block, a tree adder over the blocks, and a final adder+register.
//   stage 1  per block b: bacc[b] accumulates the passes of one input-channel
//            group (the three kernel columns of a 3x3 kernel, or a single
//            pass for 1x1). On the first pass of an output, the carry terms
//            saved from the previous vertical stripe are added to rows 0 and
//            1. The blocks' carry outputs are summed alongside (cacc) and,
//            when an output completes, saved (cprev) for the next stripe:
//            these few registers are the partial-sum FIFO the paper mentions.
//   stage 2  standard / pointwise convolution: the tree adds the eight
//            bacc[b] vectors and the final adder accumulates the groups of
//            input channels. Depthwise convolution skips the tree: the eight
//            per-block vectors (eight output channels) are latched and sent
//            out one block per cycle over the next eight cycles.
// A pass marked emit=0 (the priming stripe above the tile) updates the
// carries but produces no output.
//
// Timing: a pass entering on cycle t updates stage 1 at the end of t; a
// completed output is presented on out_* from cycle t+2 (conv/pw, one cycle)
// or cycles t+2 .. t+9 (depthwise, out_blk = 0..7). A new depthwise output
// must not complete while the previous one is still being sent (out_busy).
// The pass flags, the carry handling and the depthwise serialisation are this
// design's choices; the paper gives the three-part structure and the 24-bit
// accumulation width.
module pipelined_accumulator
  import dla_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned BLKS = N_BLK
) (
  input  logic        clk,
  input  logic        rst_n,
  input  pass_t       pass,
  input  out_tag_t    tag_in,
  input  acc_t        sum   [BLKS][ROWS],
  input  acc_t        carry [BLKS][2],
  output logic        out_valid,
  output logic [2:0]  out_blk,
  output out_tag_t    out_tag,
  output acc_t        out_data [ROWS],
  output logic        out_busy
);

  acc_t bacc  [BLKS][ROWS];
  acc_t cacc  [BLKS][2];
  acc_t cprev [BLKS][2];
  acc_t facc  [ROWS];
  acc_t dwbuf [BLKS][ROWS];
  acc_t tree  [ROWS];

  // stage-2 control, delayed one cycle behind stage 1
  logic     s2_grp_done, s2_first_grp, s2_last_grp, s2_emit, s2_dw;
  out_tag_t s2_tag;
  logic     conv_out;
  logic [3:0] dw_cnt;       // 8: idle
  out_tag_t   tag_q;

  // ---- stage 1: per-block accumulation ----------------------------------
  always_ff @(posedge clk) begin
    if (pass.valid) begin
      for (int b = 0; b < BLKS; b++) begin
        for (int r = 0; r < ROWS; r++) begin
          acc_t v;
          v = sum[b][r];
          if (r < 2 && pass.carry_in && pass.first_grp && pass.first_in_grp)
            v = v + cprev[b][r];
          bacc[b][r] <= pass.first_in_grp ? v : bacc[b][r] + v;
        end
        for (int k = 0; k < 2; k++) begin
          acc_t c;
          c = (pass.first_grp && pass.first_in_grp) ? carry[b][k] : cacc[b][k] + carry[b][k];
          cacc[b][k] <= c;
          if (pass.last_grp && pass.last_in_grp) cprev[b][k] <= c;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_grp_done  <= 1'b0;
      s2_first_grp <= 1'b0;
      s2_last_grp  <= 1'b0;
      s2_emit      <= 1'b0;
      s2_dw        <= 1'b0;
      s2_tag       <= '0;
    end else begin
      s2_grp_done  <= pass.valid && pass.last_in_grp;
      s2_first_grp <= pass.first_grp;
      s2_last_grp  <= pass.last_grp;
      s2_emit      <= pass.emit;
      s2_dw        <= pass.dw;
      s2_tag       <= tag_in;
    end
  end

  // ---- stage 2: tree adder and final accumulation -----------------------
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      tree[r] = '0;
      for (int b = 0; b < BLKS; b++) tree[r] = tree[r] + bacc[b][r];
    end
  end

  always_ff @(posedge clk) begin
    if (s2_grp_done && !s2_dw)
      for (int r = 0; r < ROWS; r++)
        facc[r] <= s2_first_grp ? tree[r] : facc[r] + tree[r];
    if (s2_grp_done && s2_dw && s2_last_grp && s2_emit)
      dwbuf <= bacc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_out <= 1'b0;
      dw_cnt   <= 4'd8;
      tag_q    <= '0;
    end else begin
      conv_out <= s2_grp_done && !s2_dw && s2_last_grp && s2_emit;
      if (s2_grp_done && s2_last_grp && s2_emit) tag_q <= s2_tag;
      if (s2_grp_done && s2_dw && s2_last_grp && s2_emit) dw_cnt <= 4'd0;
      else if (dw_cnt != 4'd8)                             dw_cnt <= dw_cnt + 4'd1;
    end
  end

  assign out_valid = conv_out || (dw_cnt != 4'd8);
  assign out_blk   = (dw_cnt != 4'd8) ? dw_cnt[2:0] : 3'd0;
  assign out_tag   = tag_q;
  assign out_busy  = (dw_cnt != 4'd8) || s2_grp_done;
  always_comb
    for (int r = 0; r < ROWS; r++)
      out_data[r] = (dw_cnt != 4'd8) ? dwbuf[dw_cnt[2:0]][r] : facc[r];

endmodule
