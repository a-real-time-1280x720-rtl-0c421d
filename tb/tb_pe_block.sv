// tb_pe_block: self-checking test of one 32x3 PE block.
// Checks the diagonal sums of the paper's PE dataflow (inputs broadcast
// along rows, three weights down the columns, products summed along the
// diagonal) and this design's two stripe carry outputs, on random 8-bit data.
module tb_pe_block;
  import dla_pkg::*;
  logic clk = 0, en;
  feat_t x [N_ROWS];
  feat_t w [N_TAPS];
  acc_t  sum [N_ROWS];
  acc_t  carry [2];
  int checks = 0, failures = 0;

  pe_block dut (.clk, .en, .x, .w, .sum, .carry);

  always #5 clk = ~clk;
  initial begin #200000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    acc_t ref_s [N_ROWS];
    acc_t ref_c [2];
    en = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      for (int i = 0; i < N_ROWS; i++) x[i] = feat_t'($urandom);
      for (int j = 0; j < N_TAPS; j++) w[j] = feat_t'($urandom);
      if (it % 50 == 0) for (int j = 0; j < N_TAPS; j++) w[j] = -128;
      if (it % 50 == 0) for (int i = 0; i < N_ROWS; i++) x[i] = -128;
      for (int r = 0; r < N_ROWS; r++) begin
        ref_s[r] = 0;
        for (int j = 0; j < N_TAPS; j++)
          if (r - 2 + j >= 0) ref_s[r] += acc_t'(x[r-2+j]) * acc_t'(w[j]);
      end
      ref_c[0] = acc_t'(x[N_ROWS-2]) * acc_t'(w[0]) + acc_t'(x[N_ROWS-1]) * acc_t'(w[1]);
      ref_c[1] = acc_t'(x[N_ROWS-1]) * acc_t'(w[0]);
      @(posedge clk); #1;
      for (int r = 0; r < N_ROWS; r++) chk(sum[r] == ref_s[r], $sformatf("sum row %0d", r));
      chk(carry[0] == ref_c[0] && carry[1] == ref_c[1], "carry");
    end
    // hold when en is low
    @(negedge clk); en = 0;
    for (int i = 0; i < N_ROWS; i++) x[i] = feat_t'($urandom);
    @(posedge clk); #1;
    for (int r = 0; r < N_ROWS; r++) chk(sum[r] == ref_s[r], "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
