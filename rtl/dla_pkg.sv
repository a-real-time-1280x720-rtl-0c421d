// dla_pkg: sizes, types and helper functions shared by the layer-fusion
// accelerator core.
//
// The core is a tile-based convolution engine: 8 PE blocks of 32x3 MACs
// (768 MACs), a 3 x 32 KB weight SRAM, and a unified feature buffer made of
// two ping-pong halves ("left" and "right"), each 96 banks of 2 KB with
// 64-bit words. A buffer word holds the eight 8-bit channels of one pixel.
// These numbers are the ones printed in the architecture block diagram.
// The layer descriptor format, the stream command format and the fixed-point
// conventions below are this design's own choices.
package dla_pkg;

  // ---- array and memory geometry (from the architecture diagram) --------
  localparam int unsigned N_ROWS     = 32;   // feature inputs per PE block
  localparam int unsigned N_TAPS     = 3;    // weights per PE block (one 3x3 kernel column)
  localparam int unsigned N_BLK      = 8;    // PE blocks (one input channel each)
  localparam int unsigned DW         = 8;    // feature / weight width
  localparam int unsigned AW         = 24;   // partial sum width
  localparam int unsigned WORD_W     = 64;   // SRAM word: 8 channels x 8 bit
  localparam int unsigned N_BANK     = 96;   // banks per feature buffer half
  localparam int unsigned BANK_WORDS = 256;  // 2 KB / 8 B
  localparam int unsigned WB_BANKS   = 3;    // weight SRAM banks (3 x 32 KB)
  localparam int unsigned WB_WORDS   = 4096; // 32 KB / 8 B
  localparam int unsigned BN_ENTRIES = 256;  // 1 KB BN register / 4 B per channel
  localparam int unsigned MAX_LAYERS = 16;   // layer descriptors per fusion group

  localparam int unsigned FRAC       = 4;    // fractional bits of features
  localparam int unsigned RELU6_MAX  = 6 << FRAC;

  typedef logic signed [DW-1:0] feat_t;
  typedef logic signed [AW-1:0] acc_t;

  // ---- layer descriptor ---------------------------------------------------
  typedef enum logic [1:0] {
    L_CONV3 = 2'd0,   // full 3x3 convolution, stride 1, zero padding
    L_DW3   = 2'd1,   // depthwise 3x3 convolution
    L_PW1   = 2'd2    // pointwise 1x1 convolution
  } ltype_e;

  typedef struct packed {
    ltype_e      ltype;     // 2
    logic        pool;      // 1: 2x2 max pooling after the activation
    logic        relu6;     // 1: ReLU6, 0: linear
    logic [10:0] width;     // input tile width  (pixels)
    logic [9:0]  height;    // input tile height (rows)
    logic [5:0]  cin_grp;   // input channels / 8
    logic [8:0]  cout;      // output channels (ignored for DW3)
    logic [11:0] wbase;     // first weight SRAM word of this layer
    logic [7:0]  bnbase;    // first BN register entry of this layer
    logic [3:0]  shift;     // right shift applied after the BN scale
  } layer_cfg_t;            // 64 bits, one configuration register

  // ---- stream command header ---------------------------------------------
  typedef enum logic [3:0] {
    D_LEFT   = 4'd0,  // feature buffer, left half
    D_RIGHT  = 4'd1,  // feature buffer, right half
    D_WEIGHT = 4'd2,  // weight SRAM
    D_BN     = 4'd3,  // BN register (two entries per word)
    D_CFG    = 4'd4,  // configuration registers
    D_START  = 4'd5,  // start the fusion group (no payload)
    D_READ_L = 4'd6,  // stream words out of the left half
    D_READ_R = 4'd7   // stream words out of the right half
  } dest_e;

  typedef struct packed {
    dest_e       dest;    // 4
    logic [7:0]  bank;    // bank (feature buffer / weight SRAM)
    logic [15:0] addr;    // first word
    logic [15:0] count;   // payload words (or words to read)
    logic [19:0] rsvd;
  } cmd_t;                // 64 bits

  // One pass of the PE array: what travels down the pipeline with the data.
  typedef struct packed {
    logic        valid;
    logic        first_in_grp;  // first pass of an input-channel group
    logic        last_in_grp;   // last pass of an input-channel group
    logic        first_grp;     // first group of an output
    logic        last_grp;      // last group: output is complete
    logic        carry_in;      // add the previous stripe's carries
    logic        emit;          // output is written (0 for the priming stripe)
    logic        dw;            // depthwise: no tree sum over blocks
  } pass_t;

  // Where a finished output vector goes.
  typedef struct packed {
    logic [8:0]  ch;        // output channel (DW: channel of block 0)
    logic [10:0] x;         // output column before pooling
    logic [10:0] y0;        // first output row of the 32-row stripe
    logic [10:0] height;    // output rows before pooling
    logic [10:0] width;     // output columns before pooling
    logic [5:0]  cgrp;      // output channel groups of this layer
    logic        pool;
    logic        relu6;
    logic [3:0]  shift;
    logic [7:0]  bnbase;
  } out_tag_t;

  // Saturate a wide value into a signed 8-bit feature.
  function automatic feat_t sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return feat_t'(8'sd127);
    else if (v < -48'sd128) return feat_t'(-8'sd128);
    else                    return feat_t'(v[7:0]);
  endfunction

endpackage
