// tb_dla_top: end-to-end test of the accelerator core through its
// AXI4-Stream ports, at the core's full default size.
//
// A fusion group of four layers runs on one 100 x 6 tile with 16 input
// channels:
//   L0  3x3 convolution 16 -> 8, ReLU6          (two channel groups, 4 stripes)
//   L1  3x3 depthwise 8, ReLU6, 2x2 max pooling  (100x6 -> 50x3)
//   L2  1x1 convolution 8 -> 16, ReLU6
//   L3  1x1 convolution 16 -> 8, linear          (two channel groups)
// The tile is 100 rows high, so it crosses the 96-bank boundary of the
// buffer. The testbench loads weights, BN parameters, descriptors and the
// tile over the input stream, starts the group, reads the 50 x 3 x 8 result
// back over the output stream and compares every byte with a plain
// behavioural model of the same layers written here. It also checks the
// number of PE-array passes against the loop counts, that the core issues
// one pass per cycle while computing, and that each mechanism (stripe
// carries, bank-band wrap, depthwise serialisation, pooling read-back,
// buffer swaps, multi-group accumulation, ReLU6 clamping, zero padding) was
// exercised at least once.
module tb_dla_top;
  import dla_pkg::*;

  localparam int W  = 6;
  localparam int H  = 100;
  localparam int C0 = 16;
  localparam int NL = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] s_tdata;
  logic        s_tvalid, s_tready;
  logic [63:0] m_tdata;
  logic        m_tvalid, m_tready, m_tlast;
  logic        busy, done;
  logic [31:0] stat_passes, stat_swaps, stat_writes;

  dla_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast),
    .busy, .done, .stat_passes, .stat_swaps, .stat_writes
  );

  int checks = 0, failures = 0;

  // ---- reference model ----------------------------------------------------------
  int f0 [C0][H][W];          // input tile
  int f1 [8][H][W];           // after L0
  int f2 [8][H/2][W/2];       // after L1
  int f3 [16][H/2][W/2];      // after L2
  int f4 [8][H/2][W/2];       // after L3
  int w0 [8][C0][3][3];       // [co][ci][ky][kx]
  int w1 [8][3][3];
  int w2 [16][8];
  int w3 [8][16];
  int bn_s [40], bn_b [40];
  int n_clamp_hi = 0, n_clamp_lo = 0, n_pad = 0;

  function automatic int bnact(int acc, int idx, int shift, bit relu);
    longint m;
    int v;
    m = (longint'(acc) * bn_s[idx]) >>> shift;
    m = m + bn_b[idx];
    v = (m > 127) ? 127 : (m < -128) ? -128 : int'(m);
    if (relu) begin
      if (v < 0)  begin v = 0;  n_clamp_lo++; end
      if (v > 96) begin v = 96; n_clamp_hi++; end
    end
    return v;
  endfunction

  localparam int SH = 6;

  task automatic build_reference();
    int acc, m, v;
    for (int co = 0; co < 8; co++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          acc = 0;
          for (int ci = 0; ci < C0; ci++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int yy = y + ky - 1, xx = x + kx - 1;
                if (yy < 0 || yy >= H || xx < 0 || xx >= W) begin
                  n_pad++;
                  continue;
                end
                acc += f0[ci][yy][xx] * w0[co][ci][ky][kx];
              end
          f1[co][y][x] = bnact(acc, co, SH, 1);
        end
    for (int c = 0; c < 8; c++) begin
      int t [H][W];
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int yy = y + ky - 1, xx = x + kx - 1;
              if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                acc += f1[c][yy][xx] * w1[c][ky][kx];
            end
          t[y][x] = bnact(acc, 8 + c, SH, 1);
        end
      for (int y = 0; y < H/2; y++)
        for (int x = 0; x < W/2; x++) begin
          m = t[2*y][2*x];
          if (t[2*y+1][2*x]   > m) m = t[2*y+1][2*x];
          if (t[2*y][2*x+1]   > m) m = t[2*y][2*x+1];
          if (t[2*y+1][2*x+1] > m) m = t[2*y+1][2*x+1];
          f2[c][y][x] = m;
        end
    end
    for (int co = 0; co < 16; co++)
      for (int y = 0; y < H/2; y++)
        for (int x = 0; x < W/2; x++) begin
          acc = 0;
          for (int ci = 0; ci < 8; ci++) acc += f2[ci][y][x] * w2[co][ci];
          f3[co][y][x] = bnact(acc, 16 + co, SH, 1);
        end
    for (int co = 0; co < 8; co++)
      for (int y = 0; y < H/2; y++)
        for (int x = 0; x < W/2; x++) begin
          acc = 0;
          for (int ci = 0; ci < 16; ci++) acc += f3[ci][y][x] * w3[co][ci];
          v = bnact(acc, 32 + co, SH, 0);
          f4[co][y][x] = v;
        end
  endtask

  // ---- stream driver -----------------------------------------------------------------
  // Drive on the falling edge; the word moves at the next rising edge at
  // which s_tready is high.
  task automatic send(input logic [63:0] d);
    @(negedge clk);
    s_tdata  = d;
    s_tvalid = 1'b1;
    while (!s_tready) @(negedge clk);
    @(posedge clk);
    s_tvalid <= 1'b0;
  endtask

  task automatic cmd(input dest_e dest, input int bank, input int addr, input int count);
    cmd_t c;
    c = '0;
    c.dest  = dest;
    c.bank  = 8'(bank);
    c.addr  = 16'(addr);
    c.count = 16'(count);
    send(64'(c));
  endtask

  function automatic logic [7:0] b8(int v);
    return 8'(v);
  endfunction

  function automatic logic [63:0] layer(ltype_e t, bit pool, bit relu, int w, int h,
                                        int cg, int cout, int wbase, int bnbase);
    layer_cfg_t l;
    l.ltype = t; l.pool = pool; l.relu6 = relu;
    l.width = 11'(w); l.height = 10'(h); l.cin_grp = 6'(cg); l.cout = 9'(cout);
    l.wbase = 12'(wbase); l.bnbase = 8'(bnbase); l.shift = 4'(SH);
    return 64'(l);
  endfunction

  // ---- mechanism counters (observed inside the core) ------------------------------------
  int ev_carry = 0, ev_band = 0, ev_dw = 0, ev_poolrb = 0, ev_multigrp = 0;
  int run_cycles = 0, stall_cycles = 0;
  always @(posedge clk) begin
    if (dut.u_acc.pass.valid && dut.u_acc.pass.carry_in && dut.u_acc.pass.first_in_grp) ev_carry++;
    if (dut.u_ctrl.state == dut.u_ctrl.S_RUN && dut.u_ctrl.yb > 64 && dut.u_ctrl.fb_rd_en[0]) ev_band++;
    if (dut.u_acc.out_valid && dut.u_acc.out_blk != 0) ev_dw++;
    if (dut.u_ta.rd_en != '0) ev_poolrb++;
    if (dut.u_acc.pass.valid && !dut.u_acc.pass.first_grp && dut.u_acc.pass.first_in_grp) ev_multigrp++;
    if (busy) run_cycles++;
  end

  // ---- watchdog --------------------------------------------------------------------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] word;
    int exp_passes, t_start, t_end;

    s_tvalid = 0; s_tdata = 0; m_tready = 1;

    // random data
    for (int c = 0; c < C0; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) f0[c][y][x] = $urandom_range(0, 96);
    foreach (w0[a, b, c, d]) w0[a][b][c][d] = int'($urandom_range(0, 16)) - 8;
    foreach (w1[a, b, c])    w1[a][b][c]    = int'($urandom_range(0, 16)) - 8;
    foreach (w2[a, b])       w2[a][b]       = int'($urandom_range(0, 16)) - 8;
    foreach (w3[a, b])       w3[a][b]       = int'($urandom_range(0, 16)) - 8;
    for (int i = 0; i < 40; i++) begin
      bn_s[i] = $urandom_range(1, 12);
      bn_b[i] = int'($urandom_range(0, 40)) - 10;
    end
    build_reference();

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- weights ----
    // L0: word (co*2+g)*3+kx, bank ky, byte b = w0[co][8g+b][ky][kx]  (wbase 0)
    for (int ky = 0; ky < 3; ky++) begin
      cmd(D_WEIGHT, ky, 0, 48);
      for (int co = 0; co < 8; co++)
        for (int g = 0; g < 2; g++)
          for (int kx = 0; kx < 3; kx++) begin
            for (int b = 0; b < 8; b++) word[8*b +: 8] = b8(w0[co][8*g+b][ky][kx]);
            send(word);
          end
    end
    // L1: word 48 + kx, bank ky, byte b = w1[b][ky][kx]
    for (int ky = 0; ky < 3; ky++) begin
      cmd(D_WEIGHT, ky, 48, 3);
      for (int kx = 0; kx < 3; kx++) begin
        for (int b = 0; b < 8; b++) word[8*b +: 8] = b8(w1[b][ky][kx]);
        send(word);
      end
    end
    // L2: index i = co (G=1), bank i%3, word 51 + i/3
    for (int i = 0; i < 16; i++) begin
      cmd(D_WEIGHT, i % 3, 51 + i / 3, 1);
      for (int b = 0; b < 8; b++) word[8*b +: 8] = b8(w2[i][b]);
      send(word);
    end
    // L3: index i = co*2 + g, bank i%3, word 57 + i/3
    for (int i = 0; i < 16; i++) begin
      cmd(D_WEIGHT, i % 3, 57 + i / 3, 1);
      for (int b = 0; b < 8; b++) word[8*b +: 8] = b8(w3[i/2][8*(i%2)+b]);
      send(word);
    end
    // ---- BN: 40 entries, two per word ----
    cmd(D_BN, 0, 0, 20);
    for (int i = 0; i < 20; i++)
      send({16'(bn_s[2*i+1]), 16'(bn_b[2*i+1]), 16'(bn_s[2*i]), 16'(bn_b[2*i])});
    // ---- layer descriptors ----
    cmd(D_CFG, 0, 0, NL);
    send(layer(L_CONV3, 0, 1, W,   H,   2, 8,  0,  0));
    send(layer(L_DW3,   1, 1, W,   H,   1, 8,  48, 8));
    send(layer(L_PW1,   0, 1, W/2, H/2, 1, 16, 51, 16));
    send(layer(L_PW1,   0, 0, W/2, H/2, 2, 8,  57, 32));
    cmd(D_CFG, 0, MAX_LAYERS, 1);
    send(64'(NL));
    // ---- input tile into the left half: word (y/96)*W*2 + x*2 + g of bank y%96 ----
    for (int y = 0; y < H; y++) begin
      cmd(D_LEFT, y % 96, (y / 96) * W * 2, W * 2);
      for (int x = 0; x < W; x++)
        for (int g = 0; g < 2; g++) begin
          for (int b = 0; b < 8; b++) word[8*b +: 8] = b8(f0[8*g+b][y][x]);
          send(word);
        end
    end

    // ---- run ----
    cmd(D_START, 0, 0, 0);
    t_start = run_cycles;
    while (!busy) @(posedge clk);
    while (busy) @(posedge clk);
    t_end = run_cycles;
    $display("group finished: %0d busy cycles, %0d passes, %0d swaps, %0d writes",
             t_end - t_start, stat_passes, stat_swaps, stat_writes);

    // pass count from the loop nests: L0 8*6*(4+1)*2*3, L1 1*6*5*3, L2 16*3*2, L3 8*3*2*2
    exp_passes = 8*W*5*2*3 + W*5*3 + 16*(W/2)*2 + 8*(W/2)*2*2;
    checks++;
    if (stat_passes != 32'(exp_passes)) begin
      failures++;
      $display("FAIL passes %0d expected %0d", stat_passes, exp_passes);
    end
    checks++;
    if (stat_swaps != 32'(NL)) begin
      failures++;
      $display("FAIL swaps %0d expected %0d", stat_swaps, NL);
    end
    // one pass per cycle: the busy time exceeds the passes only by the fixed
    // per-layer drain/load cycles and the depthwise output gaps
    checks++;
    if (t_end - t_start > exp_passes + NL * 23 + W * 4 * 11 + 10) begin
      failures++;
      $display("FAIL cycle count %0d too high for %0d passes", t_end - t_start, exp_passes);
    end

    // ---- read the result back (final layer wrote the left half) ----
    for (int y = 0; y < H/2; y++)
      for (int x = 0; x < W/2; x++) begin
        cmd(D_READ_L, y % 96, (y / 96) * (W/2) + x, 1);
        @(negedge clk);
        while (!(m_tvalid && m_tready)) @(negedge clk);
        for (int b = 0; b < 8; b++) begin
          checks++;
          if ($signed(m_tdata[8*b +: 8]) != f4[b][y][x]) begin
            failures++;
            if (failures < 10)
              $display("FAIL out[c%0d][y%0d][x%0d] = %0d expected %0d", b, y, x,
                       $signed(m_tdata[8*b +: 8]), f4[b][y][x]);
          end
        end
        checks++;
        if (!m_tlast) failures++;
        @(posedge clk);
      end

    // ---- every mechanism happened ----
    $display("events: carry=%0d band=%0d dw_serial=%0d pool_readback=%0d multigroup=%0d clamp_hi=%0d clamp_lo=%0d pad=%0d",
             ev_carry, ev_band, ev_dw, ev_poolrb, ev_multigrp, n_clamp_hi, n_clamp_lo, n_pad);
    checks++; if (ev_carry    == 0) begin failures++; $display("FAIL no stripe carry"); end
    checks++; if (ev_band     == 0) begin failures++; $display("FAIL no band wrap"); end
    checks++; if (ev_dw       == 0) begin failures++; $display("FAIL no depthwise output"); end
    checks++; if (ev_poolrb   == 0) begin failures++; $display("FAIL no pooling read-back"); end
    checks++; if (ev_multigrp == 0) begin failures++; $display("FAIL no multi-group output"); end
    checks++; if (n_clamp_hi  == 0) begin failures++; $display("FAIL ReLU6 upper clamp never hit"); end
    checks++; if (n_clamp_lo  == 0) begin failures++; $display("FAIL ReLU6 lower clamp never hit"); end
    checks++; if (n_pad       == 0) begin failures++; $display("FAIL no zero padding"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
