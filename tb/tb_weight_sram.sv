// tb_weight_sram: self-checking test of the 96 KB weight SRAM (three 32 KB
// banks, 3 x 64-bit read, as in the paper). Random words are written to
// random bank addresses and read back with independent per-bank addresses.
module tb_weight_sram;
  import dla_pkg::*;
  localparam int AW = $clog2(WB_WORDS);
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr [WB_BANKS];
  logic [63:0]   rd_data [WB_BANKS];
  logic [1:0]    wr_bank;
  logic [AW-1:0] wr_addr;
  logic [63:0]   wr_data;
  logic [63:0]   model [WB_BANKS][WB_WORDS];
  int checks = 0, failures = 0;

  weight_sram dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_bank, .wr_addr, .wr_data);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int b = 0; b < WB_BANKS; b++)
      for (int a = 0; a < WB_WORDS; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = AW'(a); wr_data = {$urandom, $urandom};
        model[b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      rd_en = 1;
      for (int b = 0; b < WB_BANKS; b++) rd_addr[b] = AW'($urandom);
      @(posedge clk); #1;
      for (int b = 0; b < WB_BANKS; b++) chk(rd_data[b] == model[b][rd_addr[b]], $sformatf("bank %0d", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
