// tb_max_pool: self-checking test of the 2x2 max pooling unit (32 values in,
// 16 out, as in the paper's block diagram). Random signed columns, with and
// without the previous column's read-back values (this design's pairing).
module tb_max_pool;
  import dla_pkg::*;
  feat_t col [N_ROWS];
  feat_t prev [N_ROWS/2];
  feat_t pooled [N_ROWS/2];
  logic use_prev;
  int checks = 0, failures = 0;

  max_pool dut (.col, .prev, .use_prev, .pooled);

  initial begin #100000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < N_ROWS; i++) col[i] = feat_t'($urandom);
      for (int i = 0; i < N_ROWS/2; i++) prev[i] = feat_t'($urandom);
      use_prev = 1'($urandom);
      #1;
      for (int k = 0; k < N_ROWS/2; k++) begin
        int e;
        e = (int'(col[2*k]) > int'(col[2*k+1])) ? int'(col[2*k]) : int'(col[2*k+1]);
        if (use_prev && int'(prev[k]) > e) e = int'(prev[k]);
        chk(int'(pooled[k]) == e, $sformatf("k %0d", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
