// tb_bn_act: self-checking test of the BN + ReLU6 stage.
// Random 24-bit sums, scales, biases and shifts are applied; the registered
// outputs are compared with y = sat8(((acc*scale)>>>shift)+bias), clamped to
// 0..6.0 when ReLU6 is on. BN and ReLU6 come from the paper; the fixed-point
// format (4 fractional bits, so 6.0 = 96) is this design's.
module tb_bn_act;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, relu6;
  acc_t in_data [N_ROWS];
  logic signed [15:0] scale, bias;
  logic [3:0] shift;
  out_tag_t in_tag, out_tag;
  logic out_valid;
  feat_t out_data [N_ROWS];
  int checks = 0, failures = 0;

  bn_act dut (.clk, .rst_n, .in_valid, .in_data, .scale, .bias, .shift, .relu6,
              .in_tag, .out_valid, .out_data, .out_tag);

  always #5 clk = ~clk;
  initial begin #500000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int refv(input acc_t a, input int sc, input int b, input int sh, input logic r6);
    longint m;
    int y;
    m = (longint'(a) * longint'(sc)) >>> sh;
    m = m + b;
    y = (m > 127) ? 127 : (m < -128) ? -128 : int'(m);
    if (r6) y = (y < 0) ? 0 : (y > RELU6_MAX) ? RELU6_MAX : y;
    return y;
  endfunction

  initial begin
    int hi = 0, lo = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      in_valid = 1;
      scale = 16'($urandom_range(0, 600)) - 16'sd300;
      bias  = 16'($urandom_range(0, 400)) - 16'sd200;
      shift = 4'($urandom);
      relu6 = 1'($urandom);
      in_tag = out_tag_t'({$urandom, $urandom, $urandom});
      for (int r = 0; r < N_ROWS; r++) begin
        int mag;
        mag = (r % 3 == 0) ? 8388607 : (r % 3 == 1) ? 4000 : 100;
        in_data[r] = acc_t'(int'($urandom_range(0, 2 * mag)) - mag);
      end
      @(posedge clk); #1;
      chk(out_valid, "valid");
      chk(out_tag == in_tag, "tag");
      for (int r = 0; r < N_ROWS; r++) begin
        int e;
        e = refv(in_data[r], int'(scale), int'(bias), int'(shift), relu6);
        if (relu6 && e == RELU6_MAX) hi++;
        if (e == -128) lo++;
        chk(int'(out_data[r]) == e, $sformatf("it %0d row %0d got %0d exp %0d", it, r, out_data[r], e));
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    chk(!out_valid, "valid low");
    chk(hi > 0 && lo > 0, "clamp cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
