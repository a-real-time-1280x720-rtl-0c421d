// pe_block: one 32x3 MAC array with diagonal summation.
//
// Each of the ROWS feature inputs x[i] is broadcast along row i and each of
// the three weights w[j] (one column of a 3x3 kernel) is broadcast down column
// j, so MAC (i,j) forms x[i]*w[j]. The products are summed along the
// diagonal: output row r collects x[r-2]*w[0] + x[r-1]*w[1] + x[r]*w[2],
// which is one column of a 3-tap vertical convolution. Rows 0 and 1 lack the
// products that would come from inputs above the vector; the missing terms
// are exactly the two products the bottom of the array cannot use,
//   carry[0] = x[ROWS-2]*w[0] + x[ROWS-1]*w[1]   (completes row 0 of the next vector)
//   carry[1] = x[ROWS-1]*w[0]                     (completes row 1 of the next vector)
// and these leave the block for the accumulator, which adds them to the next
// vertical stripe. The array shape, the broadcast directions and the
// diagonal summation follow the paper; the carry outputs are this design's
// reading of the partial sums leaving the array edge in its PE diagram.
//
// Interface: x, w and en are sampled on a rising clock edge; sum and carry
// are registered, so results appear one cycle after the inputs (latency 1,
// one new vector per cycle). When en is low the outputs hold.
module pe_block
  import dla_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic                 clk,
  input  logic                 en,
  input  feat_t                x     [ROWS],
  input  feat_t                w     [N_TAPS],
  output acc_t                 sum   [ROWS],
  output acc_t                 carry [2]
);

  logic signed [2*DW-1:0] prod [ROWS][N_TAPS];
  acc_t                   sum_d   [ROWS];
  acc_t                   carry_d [2];

  always_comb begin
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < N_TAPS; j++)
        prod[i][j] = x[i] * w[j];

    // diagonal sums: row r takes product (r-2+j, j) for j = 0..2
    for (int r = 0; r < ROWS; r++) begin
      sum_d[r] = '0;
      for (int j = 0; j < N_TAPS; j++)
        if (r - 2 + j >= 0)
          sum_d[r] = sum_d[r] + acc_t'(prod[r-2+j][j]);
    end
    carry_d[0] = acc_t'(prod[ROWS-2][0]) + acc_t'(prod[ROWS-1][1]);
    carry_d[1] = acc_t'(prod[ROWS-1][0]);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      sum   <= sum_d;
      carry <= carry_d;
    end
  end

endmodule
