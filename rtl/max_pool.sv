// max_pool: 2x2 max pooling with stride 2 on one output column.
//
// The 32 rows of a freshly computed column are reduced pairwise
// (rows 2k and 2k+1) to 16 values. For the second column of a pooling
// window (use_prev = 1) each value is also compared with the value the
// first column left in the output buffer (prev), which the transposed
// addressing unit reads back. Purely combinational. The 32-in / 16-out
// widths are those printed on the paper's block diagram; the read-back of
// the previous column is this design's way of pairing columns.
module max_pool
  import dla_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS
) (
  input  feat_t col      [ROWS],
  input  feat_t prev     [ROWS/2],
  input  logic  use_prev,
  output feat_t pooled   [ROWS/2]
);

  always_comb
    for (int k = 0; k < ROWS/2; k++) begin
      feat_t v;
      v = (col[2*k] > col[2*k+1]) ? col[2*k] : col[2*k+1];
      if (use_prev && prev[k] > v) v = prev[k];
      pooled[k] = v;
    end

endmodule
