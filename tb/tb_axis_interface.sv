// tb_axis_interface: self-checking test of the 64-bit AXI4-Stream port.
// Random commands (this design's header format) write feature words, weight
// words, BN words and configuration entries; a monitor records every write
// strobe and compares destination, address and data with the command. Read
// commands fetch words from a behavioural buffer with one-cycle latency and
// the output stream (with random back-pressure) must return them in order,
// tlast on the last. Headers must be refused while the core is busy.
module tb_axis_interface;
  import dla_pkg::*;
  localparam int AW = $clog2(BANK_WORDS), WAW = $clog2(WB_WORDS);
  logic clk = 0, rst_n = 0;
  logic [63:0] s_tdata, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, m_tlast;
  logic core_busy = 0, start;
  logic h_sel, h_wr_en, h_rd_en;
  logic [7:0] h_bank;
  logic [AW-1:0] h_addr;
  logic [63:0] h_wr_data, h_rd_data, wr_data;
  logic w_wr_en, bn_wr_en, cfg_wr_en;
  logic [1:0] w_wr_bank;
  logic [WAW-1:0] w_wr_addr;
  logic [6:0] bn_wr_idx;
  logic [4:0] cfg_wr_idx;
  int checks = 0, failures = 0;

  axis_interface dut (.clk, .rst_n, .s_tdata, .s_tvalid, .s_tready,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast, .core_busy, .start,
    .h_sel, .h_bank, .h_addr, .h_wr_en, .h_wr_data, .h_rd_en, .h_rd_data,
    .w_wr_en, .w_wr_bank, .w_wr_addr, .bn_wr_en, .bn_wr_idx, .cfg_wr_en, .cfg_wr_idx, .wr_data);

  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // behavioural buffer for reads: word = f(sel, bank, addr)
  function automatic logic [63:0] bufword(input logic sel, input logic [7:0] b, input logic [AW-1:0] a);
    return {32'(sel) ^ 32'hA5A5_0000, 16'(b), 16'(a)} * 64'd2654435761;
  endfunction
  always_ff @(posedge clk) if (h_rd_en) h_rd_data <= bufword(h_sel, h_bank, h_addr);

  // expected write strobes: {kind, address, data}
  int e_kind [$]; int e_addr [$]; logic [63:0] e_data [$];
  int n_start = 0;
  always @(posedge clk) if (rst_n) begin
    int kind, addr;
    logic [63:0] d;
    kind = -1;
    if (h_wr_en)   begin kind = int'(h_sel);  addr = int'(h_bank) * 1024 + int'(h_addr); d = h_wr_data; end
    if (w_wr_en)   begin kind = 2; addr = int'(w_wr_bank) * 8192 + int'(w_wr_addr); d = wr_data; end
    if (bn_wr_en)  begin kind = 3; addr = int'(bn_wr_idx); d = wr_data; end
    if (cfg_wr_en) begin kind = 4; addr = int'(cfg_wr_idx); d = wr_data; end
    if (start) n_start++;
    if (kind >= 0) begin
      if (e_kind.size() == 0) chk(1'b0, "unexpected write");
      else begin
        int ek, ea; logic [63:0] ed;
        ek = e_kind.pop_front(); ea = e_addr.pop_front(); ed = e_data.pop_front();
        chk(kind == ek && addr == ea && d == ed, $sformatf("write kind %0d/%0d addr %0d/%0d", kind, ek, addr, ea));
      end
    end
  end

  task automatic send(input logic [63:0] w);
    @(negedge clk);
    s_tdata = w; s_tvalid = 1;
    while (!s_tready) @(negedge clk);
    @(posedge clk); #1 s_tvalid = 0;
  endtask

  function automatic logic [63:0] hdr(input dest_e d, input int bank, input int addr, input int count);
    cmd_t c;
    c = '0; c.dest = d; c.bank = 8'(bank); c.addr = 16'(addr); c.count = 16'(count);
    return 64'(c);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      dest_e d;
      int bank, addr, cnt;
      d = dest_e'($urandom_range(0, 4));
      cnt = $urandom_range(1, 6);
      case (d)
        D_LEFT, D_RIGHT: begin bank = $urandom_range(0, N_BANK - 1); addr = $urandom_range(0, BANK_WORDS - 8); end
        D_WEIGHT:        begin bank = $urandom_range(0, 2); addr = $urandom_range(0, WB_WORDS - 8); end
        D_BN:            begin bank = 0; addr = $urandom_range(0, 100); end
        default:         begin bank = 0; addr = $urandom_range(0, 10); end
      endcase
      send(hdr(d, bank, addr, cnt));
      for (int i = 0; i < cnt; i++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};
        e_kind.push_back(int'(d));
        case (d)
          D_LEFT, D_RIGHT: e_addr.push_back(bank * 1024 + addr + i);
          D_WEIGHT:        e_addr.push_back(bank * 8192 + addr + i);
          default:         e_addr.push_back(addr + i);
        endcase
        e_data.push_back(w);
        send(w);
      end
    end
    // start pulse
    send(hdr(D_START, 0, 0, 0));
    repeat (2) @(negedge clk);
    chk(n_start == 1, "start pulse");
    // busy core refuses headers
    core_busy = 1;
    repeat (3) begin @(negedge clk); chk(!s_tready, "not ready while busy"); end
    core_busy = 0;
    // reads with back-pressure
    for (int it = 0; it < 10; it++) begin
      int bank, addr, cnt;
      logic sel;
      sel = 1'($urandom); bank = $urandom_range(0, N_BANK - 1);
      addr = $urandom_range(0, BANK_WORDS - 10); cnt = $urandom_range(1, 8);
      send(hdr(sel ? D_READ_R : D_READ_L, bank, addr, cnt));
      for (int i = 0; i < cnt; i++) begin
        @(negedge clk);
        m_tready = 1'($urandom);
        while (!(m_tvalid && m_tready)) begin @(negedge clk); m_tready = 1'($urandom); end
        chk(m_tdata == bufword(sel, 8'(bank), AW'(addr + i)), $sformatf("read word %0d", i));
        chk(m_tlast == (i == cnt - 1), "tlast");
        @(posedge clk); #1 m_tready = 0;
      end
    end
    repeat (3) @(negedge clk);
    chk(e_kind.size() == 0, "all writes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
