// tb_pe_array: self-checking test of the eight-block PE array (768 MACs).
// Each block receives its own random column and weights; every block's
// diagonal sums and carries are compared with a reference. The block count
// and size are the paper's; one input channel per block is this design's use.
module tb_pe_array;
  import dla_pkg::*;
  logic clk = 0;
  feat_t x [N_BLK][N_ROWS];
  feat_t w [N_BLK][N_TAPS];
  acc_t  sum [N_BLK][N_ROWS];
  acc_t  carry [N_BLK][2];
  int checks = 0, failures = 0;

  pe_array dut (.clk, .en(1'b1), .x, .w, .sum, .carry);

  always #5 clk = ~clk;
  initial begin #200000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 100; it++) begin
      acc_t r_s [N_BLK][N_ROWS];
      acc_t r_c [N_BLK][2];
      @(negedge clk);
      for (int b = 0; b < N_BLK; b++) begin
        for (int i = 0; i < N_ROWS; i++) x[b][i] = feat_t'($urandom);
        for (int j = 0; j < N_TAPS; j++) w[b][j] = feat_t'($urandom);
        for (int r = 0; r < N_ROWS; r++) begin
          r_s[b][r] = 0;
          for (int j = 0; j < N_TAPS; j++)
            if (r - 2 + j >= 0) r_s[b][r] += acc_t'(x[b][r-2+j]) * acc_t'(w[b][j]);
        end
        r_c[b][0] = acc_t'(x[b][N_ROWS-2]) * acc_t'(w[b][0]) + acc_t'(x[b][N_ROWS-1]) * acc_t'(w[b][1]);
        r_c[b][1] = acc_t'(x[b][N_ROWS-1]) * acc_t'(w[b][0]);
      end
      @(posedge clk); #1;
      for (int b = 0; b < N_BLK; b++) begin
        for (int r = 0; r < N_ROWS; r++) chk(sum[b][r] == r_s[b][r], $sformatf("blk %0d row %0d", b, r));
        chk(carry[b][0] == r_c[b][0] && carry[b][1] == r_c[b][1], "carry");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
