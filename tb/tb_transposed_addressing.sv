// tb_transposed_addressing: self-checking test of the transposed-addressing
// writer. A behavioural 96-bank output buffer with byte-write masks is
// attached. Random output columns for all channels of a small layer are
// written; the buffer must then hold every pixel's eight channels side by
// side (the paper's Fig. 7 scheme), at this design's address map. A second
// run uses 2x2 max pooling, which reads back the even column's word.
module tb_transposed_addressing;
  import dla_pkg::*;
  localparam int AW = $clog2(BANK_WORDS);
  logic clk = 0, rst_n = 0, in_valid = 0;
  feat_t in_data [N_ROWS];
  out_tag_t in_tag;
  logic [N_BANK-1:0] rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [63:0] rd_data [N_BANK];
  logic [7:0]  wr_mask;
  logic [63:0] wr_data [N_BANK];
  logic wr_any;
  logic [63:0] mem [N_BANK][BANK_WORDS];
  int checks = 0, failures = 0;

  transposed_addressing dut (.clk, .rst_n, .in_valid, .in_data, .in_tag,
    .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_mask, .wr_data, .wr_any);

  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always_ff @(posedge clk)
    for (int b = 0; b < N_BANK; b++) begin
      if (rd_en[b]) rd_data[b] <= mem[b][rd_addr];
      if (wr_en[b]) for (int k = 0; k < 8; k++) if (wr_mask[k]) mem[b][wr_addr][8*k +: 8] <= wr_data[b][8*k +: 8];
    end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  localparam int W = 6, H = 100, C = 16, G = 2;
  feat_t full [C][H][W];

  task automatic run(input logic pool);
    int ho, wo;
    for (int b = 0; b < N_BANK; b++) for (int a = 0; a < BANK_WORDS; a++) mem[b][a] = '0;
    for (int c = 0; c < C; c++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) full[c][y][x] = feat_t'($urandom);
    for (int c = 0; c < C; c++)
      for (int x = 0; x < W; x++)
        for (int s = 0; s * N_ROWS < H; s++) begin
          @(negedge clk);
          in_valid = 1;
          in_tag = '0;
          in_tag.ch = 9'(c); in_tag.x = 11'(x); in_tag.y0 = 11'(s * N_ROWS);
          in_tag.height = 11'(H); in_tag.width = 11'(W); in_tag.cgrp = 6'(G); in_tag.pool = pool;
          for (int r = 0; r < N_ROWS; r++) in_data[r] = (s * N_ROWS + r < H) ? full[c][s*N_ROWS+r][x] : feat_t'($urandom);
          // a gap after even pooled columns keeps the read-back after the write
          if (pool) begin @(negedge clk); in_valid = 0; @(negedge clk); end
        end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    ho = pool ? H / 2 : H;
    wo = pool ? W / 2 : W;
    for (int c = 0; c < C; c++) for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) begin
      int e;
      logic [63:0] word;
      if (pool) begin
        e = -128;
        for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
          if (int'(full[c][2*y+dy][2*x+dx]) > e) e = int'(full[c][2*y+dy][2*x+dx]);
      end else e = int'(full[c][y][x]);
      word = mem[y % N_BANK][(y / N_BANK) * wo * G + x * G + c / 8];
      chk(int'(feat_t'(word[8*(c%8) +: 8])) == e, $sformatf("pool %0d c %0d y %0d x %0d", pool, c, y, x));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
