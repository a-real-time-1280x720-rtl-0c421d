// pe_array: the 768-MAC convolution array, eight 32x3 PE blocks side by side.
//
// Block b receives its own 32-element feature column x[b] (one input channel
// of the current input-channel group) and its own three weights w[b] (one
// column of that channel's 3x3 kernel). All blocks work in lock step; the
// 8 x 32 diagonal sums (the "256 x 24 b" bus of the paper's block diagram)
// and each block's two carry terms leave one cycle after the inputs. The
// count and shape of the blocks (8 x 32 x 3) are the paper's; the one-channel-
// per-block assignment is this design's choice.
module pe_array
  import dla_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned BLKS = N_BLK
) (
  input  logic  clk,
  input  logic  en,
  input  feat_t x     [BLKS][ROWS],
  input  feat_t w     [BLKS][N_TAPS],
  output acc_t  sum   [BLKS][ROWS],
  output acc_t  carry [BLKS][2]
);

  for (genvar b = 0; b < BLKS; b++) begin : g_blk
    pe_block #(.ROWS(ROWS)) u_blk (
      .clk  (clk),
      .en   (en),
      .x    (x[b]),
      .w    (w[b]),
      .sum  (sum[b]),
      .carry(carry[b])
    );
  end

endmodule
