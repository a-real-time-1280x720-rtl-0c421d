// tb_unified_buffer: self-checking test of the ping-pong unified buffer
// (two halves of 96 x 2 KB banks, as in the paper). Checks host writes and
// reads of both halves, that the input half is the one the PE port reads,
// that byte-masked writes from the transposed-addressing port land only in
// the output half and only in the enabled byte lane, and that the roles
// swap with in_sel. The host port and role signal are this design's.
module tb_unified_buffer;
  import dla_pkg::*;
  localparam int AW = $clog2(BANK_WORDS);
  logic clk = 0, in_sel = 0, core_active = 0;
  logic [N_BANK-1:0] pe_rd_en = '0, ta_rd_en = '0, ta_wr_en = '0;
  logic [AW-1:0] pe_rd_addr [N_BANK];
  logic [63:0]   pe_rd_data [N_BANK];
  logic [AW-1:0] ta_rd_addr, ta_wr_addr;
  logic [63:0]   ta_rd_data [N_BANK];
  logic [7:0]    ta_wr_mask;
  logic [63:0]   ta_wr_data [N_BANK];
  logic h_sel, h_wr_en = 0, h_rd_en = 0;
  logic [7:0] h_bank;
  logic [AW-1:0] h_addr;
  logic [63:0] h_wr_data, h_rd_data;
  logic [63:0] model [2][N_BANK][BANK_WORDS];
  int checks = 0, failures = 0;

  unified_buffer dut (.clk, .in_sel, .core_active,
    .pe_rd_en, .pe_rd_addr, .pe_rd_data,
    .ta_rd_en, .ta_rd_addr, .ta_rd_data, .ta_wr_en, .ta_wr_addr, .ta_wr_mask, .ta_wr_data,
    .h_sel, .h_bank, .h_addr, .h_wr_en, .h_wr_data, .h_rd_en, .h_rd_data);

  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic host_write(input int h, input int b, input int a, input logic [63:0] d);
    @(negedge clk);
    h_wr_en = 1; h_sel = 1'(h); h_bank = 8'(b); h_addr = AW'(a); h_wr_data = d;
    model[h][b][a] = d;
    @(negedge clk); h_wr_en = 0;
  endtask

  task automatic host_check(input int h, input int b, input int a);
    @(negedge clk);
    h_rd_en = 1; h_sel = 1'(h); h_bank = 8'(b); h_addr = AW'(a);
    @(negedge clk); h_rd_en = 0;
    chk(h_rd_data == model[h][b][a], $sformatf("host read h%0d b%0d a%0d", h, b, a));
  endtask

  initial begin
    int bank [16];
    int addr [16];
    for (int i = 0; i < 16; i++) begin
      bank[i] = $urandom_range(0, N_BANK - 1);
      addr[i] = $urandom_range(0, BANK_WORDS - 1);
      for (int h = 0; h < 2; h++) host_write(h, bank[i], addr[i], {$urandom, $urandom});
    end
    for (int i = 0; i < 16; i++) for (int h = 0; h < 2; h++) host_check(h, bank[i], addr[i]);
    // core active: PE port reads the input half, TA writes the output half
    for (int sel = 0; sel < 2; sel++) begin
      @(negedge clk);
      core_active = 1; in_sel = 1'(sel);
      pe_rd_en = '1;
      for (int b = 0; b < N_BANK; b++) pe_rd_addr[b] = AW'(addr[b % 16]);
      @(negedge clk); pe_rd_en = '0;
      for (int i = 0; i < 16; i++)
        if (bank[i] < N_BANK) begin
          int b;
          b = bank[i];
          if (pe_rd_addr[b] == AW'(addr[i]))
            chk(pe_rd_data[b] == model[sel][b][addr[i]], "pe read input half");
        end
      for (int i = 0; i < 16; i++) begin
        logic [7:0] lane;
        logic [63:0] d;
        int oh;
        oh = 1 - sel;
        lane = 8'(1) << $urandom_range(0, 7);
        d = {$urandom, $urandom};
        @(negedge clk);
        ta_wr_en = '0; ta_wr_en[bank[i]] = 1'b1;
        ta_wr_addr = AW'(addr[i]); ta_wr_mask = lane;
        for (int b = 0; b < N_BANK; b++) ta_wr_data[b] = d;
        for (int k = 0; k < 8; k++) if (lane[k]) model[oh][bank[i]][addr[i]][8*k +: 8] = d[8*k +: 8];
        @(negedge clk); ta_wr_en = '0;
        ta_rd_en = '0; ta_rd_en[bank[i]] = 1'b1; ta_rd_addr = AW'(addr[i]);
        @(negedge clk); ta_rd_en = '0;
        chk(ta_rd_data[bank[i]] == model[oh][bank[i]][addr[i]], "ta read-back of output half");
      end
      @(negedge clk); core_active = 0;
      for (int i = 0; i < 16; i++) for (int h = 0; h < 2; h++) host_check(h, bank[i], addr[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
