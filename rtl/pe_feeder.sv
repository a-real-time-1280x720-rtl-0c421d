// pe_feeder: the input and weight multiplexers in front of the PE array.
//
// The input half of the unified buffer returns a 96 x 64 bit slice; the
// 32-row window of the current pass starts at bank `base` and may wrap
// around bank 95. Row i of the window comes from bank (base + i) mod 96 and
// byte b of that word (channel b of the group) goes to PE block b. Rows
// outside the tile (rowok = 0) are forced to zero, which implements zero
// padding. Weights: normally bank j of the weight SRAM gives tap j of every
// block; for a 1x1 layer only the word of bank pw_bank is used, as tap 2,
// with taps 0 and 1 zero, so each block multiplies its row by one weight.
// Purely combinational; the paper shows these as multiplexers at the PE
// inputs, the selection rules are this design's.
module pe_feeder
  import dla_pkg::*;
#(
  parameter int unsigned BANKS = N_BANK,
  parameter int unsigned ROWS  = N_ROWS,
  parameter int unsigned BLKS  = N_BLK
) (
  input  logic [WORD_W-1:0] fb_data [BANKS],
  input  logic [6:0]        base,
  input  logic [ROWS-1:0]   rowok,
  input  logic [WORD_W-1:0] wb_data [WB_BANKS],
  input  logic              pw,
  input  logic [1:0]        pw_bank,
  output feat_t             x [BLKS][ROWS],
  output feat_t             w [BLKS][N_TAPS]
);

  // index into the circular bank set; a is below 2*BANKS
  function automatic int wrap(input int a);
    return (a >= int'(BANKS)) ? a - int'(BANKS) : a;
  endfunction

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      logic [WORD_W-1:0] word;
      word = fb_data[wrap(int'(base) + i)];
      for (int b = 0; b < BLKS; b++)
        x[b][i] = rowok[i] ? feat_t'(word[8*b +: 8]) : '0;
    end
    for (int b = 0; b < BLKS; b++)
      for (int j = 0; j < N_TAPS; j++) begin
        if (pw) w[b][j] = (j == 2) ? feat_t'(wb_data[pw_bank][8*b +: 8]) : '0;
        else    w[b][j] = feat_t'(wb_data[j][8*b +: 8]);
      end
  end

endmodule
