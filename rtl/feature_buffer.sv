// feature_buffer: one half (left or right) of the unified feature buffer:
// 96 banks of 2 KB (256 words of 64 bits), 192 KB in all.
//
// Every bank has its own read address, so one access returns a 96 x 64 bit
// column slice (up to 96 vertically adjacent pixels, 8 channels each), and
// its own byte-masked write port. The 96 x 2 KB organisation and the
// 96 x 64 b read width are printed in the paper's block diagram; the
// per-bank addressing is this design's choice.
module feature_buffer
  import dla_pkg::*;
#(
  parameter int unsigned BANKS = N_BANK,
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned AWID  = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic [BANKS-1:0]   rd_en,
  input  logic [AWID-1:0]    rd_addr [BANKS],
  output logic [WORD_W-1:0]  rd_data [BANKS],
  input  logic [BANKS-1:0]   wr_en,
  input  logic [AWID-1:0]    wr_addr [BANKS],
  input  logic [7:0]         wr_mask [BANKS],
  input  logic [WORD_W-1:0]  wr_data [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sram_bank #(.WORDS(WORDS), .WIDTH(WORD_W)) u_bank (
      .clk    (clk),
      .rd_en  (rd_en[b]),
      .rd_addr(rd_addr[b]),
      .rd_data(rd_data[b]),
      .wr_en  (wr_en[b]),
      .wr_addr(wr_addr[b]),
      .wr_mask(wr_mask[b]),
      .wr_data(wr_data[b])
    );
  end

endmodule
