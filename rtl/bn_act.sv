// bn_act: batch normalisation and activation on one 32-row output column.
//
// For every row: y = sat8(((acc * scale) >>> shift) + bias), then, when relu6
// is set, y is clamped to [0, 6.0] with 6.0 = 6 << FRAC (features carry FRAC
// fractional bits). scale and bias come from the BN register entry of the
// output channel. The paper states that the chip applies BN and ReLU6 after
// the accumulator and stores 8-bit features from 24-bit sums; the fixed-point
// format, rounding (truncation) and saturation are this design's choices.
//
// Timing: inputs sampled when in_valid is high; results registered, so
// out_valid and out_data follow one cycle later. in_tag/in_ch ride along.
module bn_act
  import dla_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  acc_t               in_data [ROWS],
  input  logic signed [15:0] scale,
  input  logic signed [15:0] bias,
  input  logic [3:0]         shift,
  input  logic               relu6,
  input  out_tag_t           in_tag,
  output logic               out_valid,
  output feat_t              out_data [ROWS],
  output out_tag_t           out_tag
);

  feat_t y [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      logic signed [47:0] m;
      feat_t              s;
      m = (48'(in_data[r]) * 48'(scale)) >>> shift;
      m = m + 48'(bias);
      s = sat8(m);
      if (relu6) begin
        if (s < 0)                          s = '0;
        else if (s > feat_t'(RELU6_MAX))    s = feat_t'(RELU6_MAX);
      end
      y[r] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      out_data <= y;
      out_tag  <= in_tag;
    end

endmodule
