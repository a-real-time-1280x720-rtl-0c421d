// bn_register: the 1 KB register file holding the folded batch-norm
// parameters, one 32-bit entry per output channel: {scale[15:0], bias[15:0]},
// both signed. 256 entries fill the 1 KB the paper gives.
//
// Write side: one 64-bit stream word carries two entries (low half to the
// even entry, high half to the odd one); wr_idx is the word index. Read side:
// asynchronous lookup of one entry by channel, as a register file allows.
// The entry format and the two-per-word packing are this design's choices.
module bn_register
  import dla_pkg::*;
#(
  parameter int unsigned ENTRIES = BN_ENTRIES
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ENTRIES)-2:0]   wr_idx,
  input  logic [WORD_W-1:0]            wr_data,
  input  logic [$clog2(ENTRIES)-1:0]   rd_idx,
  output logic signed [15:0]           rd_scale,
  output logic signed [15:0]           rd_bias
);

  logic [31:0] mem [ENTRIES];

  always_ff @(posedge clk)
    if (wr_en) begin
      mem[{wr_idx, 1'b0}] <= wr_data[31:0];
      mem[{wr_idx, 1'b1}] <= wr_data[63:32];
    end

  assign rd_scale = mem[rd_idx][31:16];
  assign rd_bias  = mem[rd_idx][15:0];

endmodule
