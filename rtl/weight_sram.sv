// weight_sram: the 96 KB fusion-group weight buffer, three banks of 32 KB
// (4096 words of 64 bits). One read returns 3 x 64 bits: bank j supplies
// tap j of the current kernel column for all eight PE blocks (byte b goes
// to block b). For 1x1 layers the controller reads one bank at a time and
// uses its word as the only tap, so 1x1 weights are packed densely over the
// three banks. The 3 x 32 KB size and 3 x 64 b read width are the paper's;
// the data layout is this design's.
//
// Timing: synchronous read, data one cycle after rd_en. Writes come from the
// stream loader, one 64-bit word per cycle into the bank given by wr_bank.
module weight_sram
  import dla_pkg::*;
#(
  parameter int unsigned WORDS = WB_WORDS,
  parameter int unsigned AWID  = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [AWID-1:0]    rd_addr [WB_BANKS],
  output logic [WORD_W-1:0]  rd_data [WB_BANKS],
  input  logic               wr_en,
  input  logic [1:0]         wr_bank,
  input  logic [AWID-1:0]    wr_addr,
  input  logic [WORD_W-1:0]  wr_data
);

  for (genvar j = 0; j < WB_BANKS; j++) begin : g_bank
    sram_bank #(.WORDS(WORDS), .WIDTH(WORD_W)) u_bank (
      .clk    (clk),
      .rd_en  (rd_en),
      .rd_addr(rd_addr[j]),
      .rd_data(rd_data[j]),
      .wr_en  (wr_en && wr_bank == 2'(j)),
      .wr_addr(wr_addr),
      .wr_mask(8'hFF),
      .wr_data(wr_data)
    );
  end

endmodule
