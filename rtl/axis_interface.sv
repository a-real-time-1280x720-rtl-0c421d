// axis_interface: the core's AXI4-Stream port, 64-bit input and output
// streams, through which the host (via DMA) loads weights, BN parameters,
// configuration and input tiles, starts a fusion group and reads results.
//
// The input stream carries commands. Every command begins with one header
// word (dla_pkg::cmd_t: dest, bank, addr, count) followed, for the write
// destinations, by `count` payload words written to consecutive words
// starting at `addr` of the given bank (feature halves, weight SRAM), or to
// consecutive BN-register word / configuration-register entries. D_START
// has no payload and pulses `start`. D_READ_L / D_READ_R have no payload:
// the unit reads `count` words starting at (bank, addr) of the chosen half
// and sends them on the output stream, tlast on the final word.
// While the core runs (core_busy) the unit accepts no new command.
//
// The 64-bit stream widths are the paper's; it names the AXI4-Stream
// interface but not its protocol, so the command format is this design's.
// Handshake: a word moves when tvalid and tready are both high. An output
// word costs two cycles (synchronous buffer read, then hold until accepted).
module axis_interface
  import dla_pkg::*;
#(
  parameter int unsigned AWID  = $clog2(BANK_WORDS),
  parameter int unsigned WAWID = $clog2(WB_WORDS),
  parameter int unsigned LAYERS = MAX_LAYERS
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Stream slave (input stream)
  input  logic [WORD_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  // AXI4-Stream master (output stream)
  output logic [WORD_W-1:0]  m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  // core status
  input  logic               core_busy,
  output logic               start,
  // unified buffer host port
  output logic               h_sel,
  output logic [7:0]         h_bank,
  output logic [AWID-1:0]    h_addr,
  output logic               h_wr_en,
  output logic [WORD_W-1:0]  h_wr_data,
  output logic               h_rd_en,
  input  logic [WORD_W-1:0]  h_rd_data,
  // weight SRAM write
  output logic               w_wr_en,
  output logic [1:0]         w_wr_bank,
  output logic [WAWID-1:0]   w_wr_addr,
  // BN register write
  output logic               bn_wr_en,
  output logic [$clog2(BN_ENTRIES)-2:0] bn_wr_idx,
  // configuration register write
  output logic               cfg_wr_en,
  output logic [$clog2(LAYERS+1)-1:0] cfg_wr_idx,
  // shared write data for weight / BN / cfg
  output logic [WORD_W-1:0]  wr_data
);

  typedef enum logic [2:0] {A_HDR, A_DATA, A_RD_ISSUE, A_RD_WAIT, A_RD_HOLD} astate_e;
  astate_e state;

  cmd_t        cmd;
  logic [15:0] addr, left;

  wire hdr_fire  = (state == A_HDR) && s_tvalid && !core_busy;
  wire data_fire = (state == A_DATA) && s_tvalid;
  cmd_t hdr;
  assign hdr = cmd_t'(s_tdata);

  assign s_tready = ((state == A_HDR) && !core_busy) || (state == A_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= A_HDR;
      cmd      <= '0;
      addr     <= '0;
      left     <= '0;
      start    <= 1'b0;
      m_tvalid <= 1'b0;
      m_tlast  <= 1'b0;
      m_tdata  <= '0;
    end else begin
      start <= 1'b0;
      case (state)
        A_HDR: if (hdr_fire) begin
          cmd  <= hdr;
          addr <= hdr.addr;
          left <= hdr.count;
          case (hdr.dest)
            D_START:          start <= 1'b1;
            D_READ_L, D_READ_R: if (hdr.count != 0) state <= A_RD_ISSUE;
            default:          if (hdr.count != 0) state <= A_DATA;
          endcase
        end
        A_DATA: if (data_fire) begin
          addr <= addr + 16'd1;
          left <= left - 16'd1;
          if (left == 16'd1) state <= A_HDR;
        end
        A_RD_ISSUE: state <= A_RD_WAIT;
        A_RD_WAIT: begin
          m_tdata  <= h_rd_data;
          m_tvalid <= 1'b1;
          m_tlast  <= (left == 16'd1);
          state    <= A_RD_HOLD;
        end
        A_RD_HOLD: if (m_tready) begin
          m_tvalid <= 1'b0;
          m_tlast  <= 1'b0;
          addr     <= addr + 16'd1;
          left     <= left - 16'd1;
          state    <= (left == 16'd1) ? A_HDR : A_RD_ISSUE;
        end
        default: state <= A_HDR;
      endcase
    end
  end

  // ---- write / read strobes ------------------------------------------------------
  assign h_sel     = (cmd.dest == D_RIGHT) || (cmd.dest == D_READ_R);
  assign h_bank    = cmd.bank;
  assign h_addr    = AWID'(addr);
  assign h_wr_en   = data_fire && (cmd.dest == D_LEFT || cmd.dest == D_RIGHT);
  assign h_wr_data = s_tdata;
  assign h_rd_en   = (state == A_RD_ISSUE);

  assign w_wr_en   = data_fire && (cmd.dest == D_WEIGHT);
  assign w_wr_bank = cmd.bank[1:0];
  assign w_wr_addr = WAWID'(addr);
  assign bn_wr_en  = data_fire && (cmd.dest == D_BN);
  assign bn_wr_idx = ($clog2(BN_ENTRIES)-1)'(addr);
  assign cfg_wr_en = data_fire && (cmd.dest == D_CFG);
  assign cfg_wr_idx = ($clog2(LAYERS+1))'(addr);
  assign wr_data   = s_tdata;

endmodule
