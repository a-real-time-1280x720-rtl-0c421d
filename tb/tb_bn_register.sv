// tb_bn_register: self-checking test of the 1 KB BN parameter register.
// Writes random 64-bit words (two {scale,bias} entries each, this design's
// packing) to every word index and reads all 256 entries back.
module tb_bn_register;
  import dla_pkg::*;
  logic clk = 0, wr_en = 0;
  logic [6:0]  wr_idx;
  logic [63:0] wr_data;
  logic [7:0]  rd_idx;
  logic signed [15:0] rd_scale, rd_bias;
  logic [31:0] model [BN_ENTRIES];
  int checks = 0, failures = 0;

  bn_register dut (.clk, .wr_en, .wr_idx, .wr_data, .rd_idx, .rd_scale, .rd_bias);

  always #5 clk = ~clk;
  initial begin #200000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < BN_ENTRIES / 2; i++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 7'(i); wr_data = {$urandom, $urandom};
        model[2*i] = wr_data[31:0]; model[2*i+1] = wr_data[63:32];
      end
      @(negedge clk); wr_en = 0;
      for (int i = 0; i < BN_ENTRIES; i++) begin
        rd_idx = 8'(i); #1;
        chk(rd_scale == model[i][31:16] && rd_bias == model[i][15:0], $sformatf("entry %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
