// tb_config_register: self-checking test of the configuration register.
// Writes random layer descriptors to all 16 entries and the layer count to
// entry 16 (this design's map), then checks them, and checks reset.
module tb_config_register;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [4:0]  wr_idx;
  logic [63:0] wr_data;
  layer_cfg_t  layers [MAX_LAYERS];
  logic [4:0]  n_layers;
  logic [63:0] model [MAX_LAYERS];
  int checks = 0, failures = 0;

  config_register dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_data, .layers, .n_layers);

  always #5 clk = ~clk;
  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1;
    chk(n_layers == 0, "reset count");
    for (int i = 0; i < MAX_LAYERS; i++) chk(layers[i] == '0, "reset entry");
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int n;
      for (int i = 0; i < MAX_LAYERS; i++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 5'(i); wr_data = {$urandom, $urandom};
        model[i] = wr_data;
      end
      n = $urandom_range(1, MAX_LAYERS);
      @(negedge clk); wr_idx = 5'(MAX_LAYERS); wr_data = 64'(n);
      @(negedge clk); wr_en = 0;
      chk(int'(n_layers) == n, "count");
      for (int i = 0; i < MAX_LAYERS; i++) chk(64'(layers[i]) == model[i], $sformatf("entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
