// unified_buffer: the ping-pong feature buffer that makes fused-layer
// execution possible.
//
// Two 192 KB halves, left and right. While a layer runs, one half is its
// input (read by the PE array, 96 banks with independent addresses) and the
// other its output (written byte-masked by the transposed addressing unit,
// which may also read it back for pooling). in_sel = 0 makes the left half
// the input; the controller flips in_sel after every layer, so intermediate
// feature maps of a fusion group never leave the chip. When the core is idle
// (core_active = 0) the host port reaches either half one word at a time, for
// loading the tile and streaming results out.
//
// The two-half ping-pong organisation and the role switch are the paper's;
// the host port and the role signal are this design's. Reads are synchronous
// (one-cycle latency) on every port.
module unified_buffer
  import dla_pkg::*;
#(
  parameter int unsigned BANKS = N_BANK,
  parameter int unsigned WORDS = BANK_WORDS,
  parameter int unsigned AWID  = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               in_sel,
  input  logic               core_active,
  // input-half read (PE array)
  input  logic [BANKS-1:0]   pe_rd_en,
  input  logic [AWID-1:0]    pe_rd_addr [BANKS],
  output logic [WORD_W-1:0]  pe_rd_data [BANKS],
  // output-half read-back and write (transposed addressing)
  input  logic [BANKS-1:0]   ta_rd_en,
  input  logic [AWID-1:0]    ta_rd_addr,
  output logic [WORD_W-1:0]  ta_rd_data [BANKS],
  input  logic [BANKS-1:0]   ta_wr_en,
  input  logic [AWID-1:0]    ta_wr_addr,
  input  logic [7:0]         ta_wr_mask,
  input  logic [WORD_W-1:0]  ta_wr_data [BANKS],
  // host port
  input  logic               h_sel,      // 0: left, 1: right
  input  logic [7:0]         h_bank,
  input  logic [AWID-1:0]    h_addr,
  input  logic               h_wr_en,
  input  logic [WORD_W-1:0]  h_wr_data,
  input  logic               h_rd_en,
  output logic [WORD_W-1:0]  h_rd_data
);

  logic [BANKS-1:0]  rd_en   [2];
  logic [AWID-1:0]   rd_addr [2][BANKS];
  logic [WORD_W-1:0] rd_data [2][BANKS];
  logic [BANKS-1:0]  wr_en   [2];
  logic [AWID-1:0]   wr_addr [2][BANKS];
  logic [7:0]        wr_mask [2][BANKS];
  logic [WORD_W-1:0] wr_data [2][BANKS];

  always_comb begin
    for (int h = 0; h < 2; h++) begin
      logic is_in;
      is_in = (h == 0) ? !in_sel : in_sel;
      for (int b = 0; b < BANKS; b++) begin
        if (core_active) begin
          rd_en[h][b]   = is_in ? pe_rd_en[b] : ta_rd_en[b];
          rd_addr[h][b] = is_in ? pe_rd_addr[b] : ta_rd_addr;
          wr_en[h][b]   = is_in ? 1'b0 : ta_wr_en[b];
          wr_addr[h][b] = ta_wr_addr;
          wr_mask[h][b] = ta_wr_mask;
          wr_data[h][b] = ta_wr_data[b];
        end else begin
          rd_en[h][b]   = h_rd_en && (h_sel == h[0]) && (h_bank == 8'(b));
          rd_addr[h][b] = h_addr;
          wr_en[h][b]   = h_wr_en && (h_sel == h[0]) && (h_bank == 8'(b));
          wr_addr[h][b] = h_addr;
          wr_mask[h][b] = 8'hFF;
          wr_data[h][b] = h_wr_data;
        end
      end
    end
  end

  for (genvar h = 0; h < 2; h++) begin : g_half
    feature_buffer #(.BANKS(BANKS), .WORDS(WORDS)) u_half (
      .clk    (clk),
      .rd_en  (rd_en[h]),
      .rd_addr(rd_addr[h]),
      .rd_data(rd_data[h]),
      .wr_en  (wr_en[h]),
      .wr_addr(wr_addr[h]),
      .wr_mask(wr_mask[h]),
      .wr_data(wr_data[h])
    );
  end

  assign pe_rd_data = in_sel ? rd_data[1] : rd_data[0];
  assign ta_rd_data = in_sel ? rd_data[0] : rd_data[1];

  // host read data: select by the half and bank registered with the request
  logic       hq_sel;
  logic [7:0] hq_bank;
  always_ff @(posedge clk)
    if (h_rd_en) begin
      hq_sel  <= h_sel;
      hq_bank <= h_bank;
    end
  assign h_rd_data = (int'(hq_bank) < BANKS) ? rd_data[hq_sel][hq_bank[$clog2(BANKS)-1:0]] : '0;

endmodule
