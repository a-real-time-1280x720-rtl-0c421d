// transposed_addressing: writes finished output columns into the output half
// of the unified buffer so that the next layer can read them as input.
//
// The array produces one output channel for 32 vertically adjacent pixels at
// a time, but the buffer stores one pixel per 64-bit word with its eight
// channels side by side (the input layout). The paper resolves this with the
// SRAM's byte-write mask: the 32 values go to 32 different banks (one per
// row), all to the word of their pixel, and only the byte lane of the output
// channel (ch mod 8) is enabled. After eight channels every word is complete
// and in input order. This unit implements that scheme.
//
// Address map (this design's choice, shared with the controller): pixel (y,x)
// of channel group g lives in bank y mod 96 at word
//   (y / 96) * W * G + x * G + g
// with W the layer's output width and G its number of channel groups.
// With pooling, the 16 pooled rows of a column go to pooled row y0/2 + k,
// column x/2; for an odd column the word written by the even column is read
// back (rd_*) and max_pool combines both. A column past the last full
// pooling window (odd width) is dropped, as is a row past the tile height.
//
// Timing: two stages. Cycle A registers the column (and issues the read-back
// for an odd pooled column); cycle B writes. One column per cycle sustained.
module transposed_addressing
  import dla_pkg::*;
#(
  parameter int unsigned ROWS  = N_ROWS,
  parameter int unsigned BANKS = N_BANK,
  parameter int unsigned AWID  = $clog2(BANK_WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  feat_t              in_data [ROWS],
  input  out_tag_t           in_tag,
  // read-back port (output half)
  output logic [BANKS-1:0]   rd_en,
  output logic [AWID-1:0]    rd_addr,
  input  logic [WORD_W-1:0]  rd_data [BANKS],
  // write port (output half), byte-masked
  output logic [BANKS-1:0]   wr_en,
  output logic [AWID-1:0]    wr_addr,
  output logic [7:0]         wr_mask,
  output logic [WORD_W-1:0]  wr_data [BANKS],
  output logic               wr_any
);

  // index into the circular bank set; a is below 2*BANKS
  function automatic int wrap(input int a);
    return (a >= int'(BANKS)) ? a - int'(BANKS) : a;
  endfunction

  localparam int unsigned HR = ROWS / 2;

  // ---- address computation for the incoming column -----------------------
  logic [10:0] yo0, xo, wo, ho;
  logic [6:0]  base_bank;
  logic [15:0] addr_full;
  logic [2:0]  lane;
  logic [5:0]  cg;
  logic        col_ok;

  always_comb begin
    if (in_tag.pool) begin
      yo0    = in_tag.y0 >> 1;
      xo     = in_tag.x >> 1;
      wo     = in_tag.width >> 1;
      ho     = in_tag.height >> 1;
      col_ok = xo < wo;
    end else begin
      yo0    = in_tag.y0;
      xo     = in_tag.x;
      wo     = in_tag.width;
      ho     = in_tag.height;
      col_ok = 1'b1;
    end
    base_bank = 7'(yo0 % 11'(BANKS));
    cg        = 6'(in_tag.ch >> 3);
    lane      = in_tag.ch[2:0];
    addr_full = 16'(yo0 / 11'(BANKS)) * 16'(wo) * 16'(in_tag.cgrp)
              + 16'(xo) * 16'(in_tag.cgrp) + 16'(cg);
  end

  // ---- stage A -------------------------------------------------------------
  logic             a_valid, a_pool, a_odd;
  feat_t            a_data [ROWS];
  logic [BANKS-1:0] a_bank_en;
  logic [AWID-1:0]  a_addr;
  logic [2:0]       a_lane;
  logic [6:0]       a_base;

  logic [BANKS-1:0] bank_en_d;
  always_comb begin
    bank_en_d = '0;
    for (int r = 0; r < ROWS; r++)
      if ((in_tag.pool ? (r < HR) : 1'b1) && (11'(yo0 + 11'(r)) < ho) && col_ok)
        bank_en_d[wrap(int'(base_bank) + r)] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) a_valid <= 1'b0;
    else        a_valid <= in_valid;

  always_ff @(posedge clk)
    if (in_valid) begin
      a_data    <= in_data;
      a_pool    <= in_tag.pool;
      a_odd     <= in_tag.x[0];
      a_bank_en <= bank_en_d;
      a_addr    <= AWID'(addr_full);
      a_lane    <= lane;
      a_base    <= base_bank;
    end

  assign rd_en   = (in_valid && in_tag.pool && in_tag.x[0]) ? bank_en_d : '0;
  assign rd_addr = AWID'(addr_full);

  // ---- stage B: pooling and byte-masked write -----------------------------
  feat_t prev   [HR];
  feat_t pooled [HR];

  always_comb
    for (int k = 0; k < HR; k++)
      prev[k] = feat_t'(rd_data[wrap(int'(a_base) + k)][8*a_lane +: 8]);

  max_pool #(.ROWS(ROWS)) u_pool (
    .col     (a_data),
    .prev    (prev),
    .use_prev(a_odd),
    .pooled  (pooled)
  );

  always_comb begin
    for (int b = 0; b < BANKS; b++) wr_data[b] = '0;
    for (int r = 0; r < ROWS; r++) begin
      feat_t v;
      v = a_pool ? ((r < HR) ? pooled[r] : '0) : a_data[r];
      wr_data[wrap(int'(a_base) + r)] = {8{v}};
    end
  end

  assign wr_en   = a_valid ? a_bank_en : '0;
  assign wr_addr = a_addr;
  assign wr_mask = 8'(1) << a_lane;
  assign wr_any  = a_valid && (a_bank_en != '0);

endmodule
