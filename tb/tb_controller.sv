// tb_controller: self-checking test of the fusion-group controller.
// Random groups of 3x3, depthwise 3x3 and 1x1 layers are configured. A
// reference loop nest (this design's order: output channel, column, stripe,
// channel group, kernel column) predicts every pass; at each issued pass the
// 96 bank read enables and addresses and the three weight addresses are
// compared. Also checked: pass counts, flag timing, one buffer swap per layer
// (the paper's ping-pong role switch), the done pulse and the busy flag.
module tb_controller;
  import dla_pkg::*;
  localparam int AW = $clog2(BANK_WORDS), WAW = $clog2(WB_WORDS);
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t layers [MAX_LAYERS];
  logic [4:0] n_layers;
  logic busy, done, in_sel;
  logic [N_BANK-1:0] fb_rd_en;
  logic [AW-1:0] fb_rd_addr [N_BANK];
  logic wb_rd_en;
  logic [WAW-1:0] wb_rd_addr [WB_BANKS];
  logic [6:0] feed_base;
  logic [N_ROWS-1:0] feed_rowok;
  logic feed_pw;
  logic [1:0] feed_pw_bank;
  pass_t acc_pass;
  out_tag_t acc_tag;
  logic [31:0] n_passes, n_swaps;
  int checks = 0, failures = 0;

  controller dut (.clk, .rst_n, .start, .layers, .n_layers, .busy, .done, .in_sel,
    .fb_rd_en, .fb_rd_addr, .wb_rd_en, .wb_rd_addr,
    .feed_base, .feed_rowok, .feed_pw, .feed_pw_bank, .acc_pass, .acc_tag,
    .n_passes, .n_swaps);

  always #5 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected passes: {layer, oc, x, s, g, k}
  int q_l [$], q_oc [$], q_x [$], q_s [$], q_g [$], q_k [$];
  int n_acc = 0, n_done = 0, n_sel_flips = 0;
  logic sel_q = 0;

  always @(negedge clk) if (rst_n) begin
    if (acc_pass.valid) n_acc++;
    if (done) n_done++;
    if (in_sel != sel_q) n_sel_flips++;
    sel_q = in_sel;
    if (wb_rd_en) begin
      if (q_l.size() == 0) chk(1'b0, "extra pass");
      else begin
        int l, oc, x, s, g, k, W, H, G, grp, xc, y0r, wb;
        logic [N_BANK-1:0] en_e;
        int addr_e [N_BANK];
        layer_cfg_t c;
        l = q_l.pop_front(); oc = q_oc.pop_front(); x = q_x.pop_front();
        s = q_s.pop_front(); g = q_g.pop_front(); k = q_k.pop_front();
        c = layers[l];
        W = int'(c.width); H = int'(c.height); G = int'(c.cin_grp);
        grp = (c.ltype == L_DW3) ? oc : g;
        xc  = (c.ltype == L_PW1) ? x : x + k - 1;
        y0r = s * N_ROWS + ((c.ltype == L_PW1) ? 0 : 1);
        en_e = '0;
        for (int i = 0; i < N_ROWS; i++) begin
          int y;
          y = y0r + i;
          if (xc >= 0 && xc < W && y >= 0 && y < H) begin
            en_e[y % N_BANK] = 1'b1;
            addr_e[y % N_BANK] = (y / N_BANK) * W * G + xc * G + grp;
          end
        end
        chk(fb_rd_en == en_e, $sformatf("read enables l%0d oc%0d x%0d s%0d g%0d k%0d", l, oc, x, s, g, k));
        for (int b = 0; b < N_BANK; b++)
          if (en_e[b]) chk(int'(fb_rd_addr[b]) == addr_e[b], $sformatf("bank %0d addr", b));
        case (c.ltype)
          L_PW1:   wb = int'(c.wbase) + (oc * G + g) / 3;
          L_DW3:   wb = int'(c.wbase) + oc * 3 + k;
          default: wb = int'(c.wbase) + (oc * G + g) * 3 + k;
        endcase
        for (int j = 0; j < WB_BANKS; j++) chk(int'(wb_rd_addr[j]) == wb, "weight addr");
      end
    end
  end

  initial begin
    int total = 0;
    int prev_sel;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int grp_i = 0; grp_i < 4; grp_i++) begin
      int nl;
      nl = $urandom_range(1, 4);
      total = 0;
      for (int l = 0; l < nl; l++) begin
        layer_cfg_t c;
        int S, s0, k0, k1, noc, G;
        c = '0;
        c.ltype = ltype_e'((l + grp_i) % 3);
        c.width = 11'($urandom_range(1, 6));
        c.height = 10'($urandom_range(1, 150));
        c.cin_grp = 6'($urandom_range(1, 3));
        c.cout = 9'($urandom_range(1, 4));
        c.wbase = 12'($urandom_range(0, 100));
        layers[l] = c;
        G = int'(c.cin_grp);
        S = (int'(c.height) + N_ROWS - 1) / N_ROWS;
        s0 = (c.ltype == L_PW1) ? 0 : -1;
        k0 = (c.ltype == L_PW1) ? 1 : 0;
        k1 = (c.ltype == L_PW1) ? 1 : 2;
        noc = (c.ltype == L_DW3) ? G : int'(c.cout);
        for (int oc = 0; oc < noc; oc++)
          for (int x = 0; x < int'(c.width); x++)
            for (int s = s0; s < S; s++)
              for (int g = 0; g < ((c.ltype == L_DW3) ? 1 : G); g++)
                for (int k = k0; k <= k1; k++) begin
                  q_l.push_back(l); q_oc.push_back(oc); q_x.push_back(x);
                  q_s.push_back(s); q_g.push_back(g); q_k.push_back(k);
                  total++;
                end
      end
      n_layers = 5'(nl);
      n_acc = 0; n_done = 0; n_sel_flips = 0;
      prev_sel = int'(in_sel);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      chk(busy, "busy after start");
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      chk(q_l.size() == 0, "all passes issued");
      chk(n_acc == total, $sformatf("acc passes %0d exp %0d", n_acc, total));
      chk(n_done == 1, "one done pulse");
      chk(n_sel_flips == nl + prev_sel, "one swap per layer (start returns to the left half)");
      chk(in_sel == 1'b0 || (nl % 2 == 1), "in_sel parity");
    end
    chk(int'(n_passes) > 0 && int'(n_swaps) > 0, "statistics");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
