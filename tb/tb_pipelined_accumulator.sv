// tb_pipelined_accumulator: self-checking test of the pipelined accumulator.
// Random PE partial sums are driven as pass sequences of
//   - a 3x3 layer: kernel columns and input-channel groups summed, blocks
//     tree-added (the paper's per-block adders, tree adder, final adder),
//     with the previous stripe's carries added to rows 0 and 1;
//   - a depthwise layer: no cross-block sum, eight per-block outputs
//     serialised (this design's mapping).
// Outputs are collected by a monitor and compared with a reference.
module tb_pipelined_accumulator;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0;
  pass_t pass;
  out_tag_t tag_in, out_tag;
  acc_t sum [N_BLK][N_ROWS];
  acc_t carry [N_BLK][2];
  logic out_valid, out_busy;
  logic [2:0] out_blk;
  acc_t out_data [N_ROWS];
  int checks = 0, failures = 0;

  pipelined_accumulator dut (.clk, .rst_n, .pass, .tag_in, .sum, .carry,
    .out_valid, .out_blk, .out_tag, .out_data, .out_busy);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected outputs, in order
  acc_t exp_q [$];
  int   exp_blk [$];
  int   got = 0;

  always @(negedge clk) if (rst_n && out_valid) begin
    acc_t e [N_ROWS];
    if (exp_q.size() < N_ROWS) chk(1'b0, "unexpected output");
    else begin
      for (int r = 0; r < N_ROWS; r++) e[r] = exp_q.pop_front();
      begin int eb; eb = exp_blk.pop_front(); chk(int'(out_blk) == eb, $sformatf("block index got %0d exp %0d at %0t", out_blk, eb, $time)); end
      for (int r = 0; r < N_ROWS; r++) chk(out_data[r] == e[r], $sformatf("out %0d row %0d got %0d exp %0d", got, r, out_data[r], e[r]));
      got++;
    end
  end

  task automatic drive(input pass_t p);
    @(negedge clk);
    pass = p;
    tag_in = '0; tag_in.x = 11'($urandom);
    for (int b = 0; b < N_BLK; b++) begin
      for (int r = 0; r < N_ROWS; r++) sum[b][r] = acc_t'(int'($urandom_range(0, 200000)) - 100000);
      carry[b][0] = acc_t'(int'($urandom_range(0, 200000)) - 100000);
      carry[b][1] = acc_t'(int'($urandom_range(0, 200000)) - 100000);
    end
  endtask

  initial begin
    pass = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- 3x3 layer: stripes -1, 0, 1 of one column, G groups ----
    for (int rep = 0; rep < 20; rep++) begin
      int G;
      acc_t cp [N_BLK][2];
      G = $urandom_range(1, 4);
      for (int s = -1; s < 2; s++) begin
        acc_t e [N_ROWS];
        acc_t cn [N_BLK][2];
        for (int r = 0; r < N_ROWS; r++) e[r] = 0;
        for (int b = 0; b < N_BLK; b++) begin cn[b][0] = 0; cn[b][1] = 0; end
        if (s >= 0) for (int b = 0; b < N_BLK; b++) begin e[0] += cp[b][0]; e[1] += cp[b][1]; end
        for (int g = 0; g < G; g++)
          for (int k = 0; k < 3; k++) begin
            pass_t p;
            p = '0;
            p.valid = 1; p.first_in_grp = (k == 0); p.last_in_grp = (k == 2);
            p.first_grp = (g == 0); p.last_grp = (g == G - 1);
            p.carry_in = (s >= 0); p.emit = (s >= 0);
            drive(p);
            for (int b = 0; b < N_BLK; b++) begin
              for (int r = 0; r < N_ROWS; r++) e[r] += sum[b][r];
              cn[b][0] += carry[b][0]; cn[b][1] += carry[b][1];
            end
          end
        cp = cn;
        if (s >= 0) begin for (int r = 0; r < N_ROWS; r++) exp_q.push_back(e[r]); exp_blk.push_back(0); end
      end
    end
    @(negedge clk); pass = '0;
    repeat (6) @(negedge clk);
    // ---- depthwise: stripes -1 and 0 ----
    for (int rep = 0; rep < 10; rep++) begin
      acc_t cp [N_BLK][2];
      for (int s = -1; s < 1; s++) begin
        acc_t e [N_BLK][N_ROWS];
        for (int b = 0; b < N_BLK; b++) for (int r = 0; r < N_ROWS; r++) e[b][r] = (s >= 0 && r < 2) ? cp[b][r] : 0;
        for (int b = 0; b < N_BLK; b++) begin cp[b][0] = 0; cp[b][1] = 0; end
        for (int k = 0; k < 3; k++) begin
          pass_t p;
          p = '0;
          p.valid = 1; p.first_in_grp = (k == 0); p.last_in_grp = (k == 2);
          p.first_grp = 1; p.last_grp = 1; p.carry_in = (s >= 0); p.emit = (s >= 0); p.dw = 1;
          drive(p);
          for (int b = 0; b < N_BLK; b++) begin
            for (int r = 0; r < N_ROWS; r++) e[b][r] += sum[b][r];
            cp[b][0] += carry[b][0]; cp[b][1] += carry[b][1];
          end
        end
        if (s >= 0) for (int b = 0; b < N_BLK; b++) begin for (int r = 0; r < N_ROWS; r++) exp_q.push_back(e[b][r]); exp_blk.push_back(b); end
        @(negedge clk); pass = '0;
        repeat (10) @(negedge clk);
      end
    end
    repeat (20) @(negedge clk);
    chk(exp_q.size() == 0, "all outputs seen");
    chk(got == 40 + 80, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
