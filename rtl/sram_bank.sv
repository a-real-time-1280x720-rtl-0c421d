// sram_bank: one SRAM bank with a byte-write mask, modelled as an array.
//
// A synchronous read port (data one cycle after rd_en) and a write port with
// one enable bit per byte lane, which is the SRAM feature the unified buffer
// relies on for its transposed writes. The bank is written here as a
// two-port (one read, one write) memory so that the output half can be read
// back while it is written; whether the chip's macros are single- or
// two-port is not stated, so this is this design's assumption.
module sram_bank #(
  parameter int unsigned WORDS = 256,
  parameter int unsigned WIDTH = 64,
  parameter int unsigned AWID  = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [AWID-1:0]    rd_addr,
  output logic [WIDTH-1:0]   rd_data,
  input  logic               wr_en,
  input  logic [AWID-1:0]    wr_addr,
  input  logic [WIDTH/8-1:0] wr_mask,
  input  logic [WIDTH-1:0]   wr_data
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < WIDTH/8; i++)
        if (wr_mask[i]) mem[wr_addr][8*i +: 8] <= wr_data[8*i +: 8];
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
