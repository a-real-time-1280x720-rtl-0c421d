// controller: sequences the layers of one fusion group over a tile held in
// the unified buffer.
//
// On start it runs layer descriptors 0 .. n_layers-1. Each layer reads the
// input half of the unified buffer and writes the other; after the layer has
// drained, the halves swap roles (in_sel flips), so the group's intermediate
// feature maps stay on chip. That layer-by-layer processing inside a fusion
// group with ping-pong buffers is the paper's scheme; the loop order, the
// stripe handling and the pass encoding below are this design's.
//
// One "pass" feeds the PE array for one cycle: eight input channels (one
// channel group g) of a 32-row vertical stripe s of column xc = x + kx - 1,
// with the three taps of kernel column kx. Loop nests (outer to inner):
//   3x3 conv   : co, x, s = -1 .. S-1, g, kx = 0..2
//   1x1 conv   : co, x, s =  0 .. S-1, g            (one pass per group)
//   depthwise  : g,  x, s = -1 .. S-1, kx = 0..2     (blocks = 8 channels)
// with S = ceil(H / 32). For 3x3 kernels stripe s reads rows 32s+1 .. 32s+32,
// so that output row r of the stripe is centred on input row 32s+r and its
// two missing top terms arrive as carries from stripe s-1; stripe -1 only
// primes those carries and writes nothing. Rows and columns outside the tile
// read as zero (zero padding).
//
// Feature address map (shared with transposed_addressing): pixel (y,x) of
// channel group g is word (y/96)*W*G + x*G + g of bank y mod 96.
// Weight address map, per layer from wbase: 3x3 conv word
// (co*G + g)*3 + kx, bank j = tap j; depthwise word g*3 + kx; 1x1 word
// index i = co*G + g is stored in bank i mod 3 at word i/3.
//
// Timing: one pass per cycle while running. Depthwise outputs leave the
// accumulator over eight cycles, so after the last pass of a depthwise
// output the controller waits DW_GAP cycles. After each layer it waits
// DRAIN cycles for the pipeline to empty. done pulses for one cycle at the
// end of the group.
module controller
  import dla_pkg::*;
#(
  parameter int unsigned BANKS  = N_BANK,
  parameter int unsigned AWID   = $clog2(BANK_WORDS),
  parameter int unsigned WAWID  = $clog2(WB_WORDS),
  parameter int unsigned LAYERS = MAX_LAYERS,
  parameter int unsigned DRAIN  = 20,
  parameter int unsigned DW_GAP = 10
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  layer_cfg_t                   layers [LAYERS],
  input  logic [$clog2(LAYERS+1)-1:0]  n_layers,
  // status
  output logic                         busy,
  output logic                         done,
  output logic                         in_sel,
  // feature read (input half)
  output logic [BANKS-1:0]             fb_rd_en,
  output logic [AWID-1:0]              fb_rd_addr [BANKS],
  // weight read
  output logic                         wb_rd_en,
  output logic [WAWID-1:0]             wb_rd_addr [WB_BANKS],
  // describes the issued pass to the PE feeder (valid with the SRAM data, one cycle later)
  output logic [6:0]                   feed_base,   // bank holding row 0 of the window
  output logic [N_ROWS-1:0]            feed_rowok,  // row inside the tile
  output logic                         feed_pw,     // 1x1: single tap from one bank
  output logic [1:0]                   feed_pw_bank,
  // pass flags and tag (valid with the PE outputs, two cycles after issue)
  output pass_t                        acc_pass,
  output out_tag_t                     acc_tag,
  // statistics
  output logic [31:0]                  n_passes,
  output logic [31:0]                  n_swaps
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_DWWAIT, S_DRAIN, S_DONE} state_e;
  state_e state;

  layer_cfg_t cfg;
  logic [$clog2(LAYERS+1)-1:0] layer;
  int unsigned wait_cnt;

  // loop counters
  int oc, xx, ss, gg, kk;
  int n_oc, n_g, n_s, s_first, k_first, k_last, n_w, n_h, n_cg;

  always_comb begin
    n_w     = int'(cfg.width);
    n_h     = int'(cfg.height);
    n_g     = int'(cfg.cin_grp);
    n_s     = (n_h + int'(N_ROWS) - 1) / int'(N_ROWS);
    s_first = (cfg.ltype == L_PW1) ? 0 : -1;
    k_first = (cfg.ltype == L_PW1) ? 1 : 0;
    k_last  = (cfg.ltype == L_PW1) ? 1 : 2;
    n_oc    = (cfg.ltype == L_DW3) ? n_g : int'(cfg.cout);
    n_cg    = (cfg.ltype == L_DW3) ? n_g : (int'(cfg.cout) + 7) / 8;
  end

  // ---- address generation for the current pass ---------------------------
  int  xc, y0r, yb, band0, grp;
  logic col_ok;
  logic [N_ROWS-1:0] rowok;

  always_comb begin
    grp    = (cfg.ltype == L_DW3) ? oc : gg;
    xc     = (cfg.ltype == L_PW1) ? xx : xx + kk - 1;
    col_ok = (xc >= 0) && (xc < n_w);
    y0r    = ss * int'(N_ROWS) + ((cfg.ltype == L_PW1) ? 0 : 1);
    yb     = ((y0r % int'(BANKS)) + int'(BANKS)) % int'(BANKS);
    band0  = (y0r - yb) / int'(BANKS);
    for (int i = 0; i < int'(N_ROWS); i++)
      rowok[i] = col_ok && (y0r + i >= 0) && (y0r + i < n_h);
    for (int b = 0; b < int'(BANKS); b++) begin
      int ib, band;
      ib   = b - yb;
      if (ib < 0) ib = ib + int'(BANKS);
      band = band0 + ((ib >= int'(BANKS) - yb) ? 1 : 0);
      fb_rd_en[b]   = (state == S_RUN) && (ib < int'(N_ROWS)) && rowok[ib[4:0]];
      fb_rd_addr[b] = AWID'(band * n_w * n_g + xc * n_g + grp);
    end
  end

  always_comb begin
    int widx;
    wb_rd_en = (state == S_RUN);
    for (int j = 0; j < int'(WB_BANKS); j++) wb_rd_addr[j] = '0;
    case (cfg.ltype)
      L_PW1: begin
        widx = oc * n_g + gg;
        for (int j = 0; j < int'(WB_BANKS); j++)
          wb_rd_addr[j] = WAWID'(int'(cfg.wbase) + widx / 3);
      end
      L_DW3: begin
        widx = oc * 3 + kk;
        for (int j = 0; j < int'(WB_BANKS); j++)
          wb_rd_addr[j] = WAWID'(int'(cfg.wbase) + widx);
      end
      default: begin
        widx = (oc * n_g + gg) * 3 + kk;
        for (int j = 0; j < int'(WB_BANKS); j++)
          wb_rd_addr[j] = WAWID'(int'(cfg.wbase) + widx);
      end
    endcase
  end

  // ---- pass description ------------------------------------------------------
  pass_t    pass_d;
  out_tag_t tag_d;
  always_comb begin
    pass_d.valid        = (state == S_RUN);
    pass_d.first_in_grp = (kk == k_first);
    pass_d.last_in_grp  = (kk == k_last);
    pass_d.first_grp    = (cfg.ltype == L_DW3) || (gg == 0);
    pass_d.last_grp     = (cfg.ltype == L_DW3) || (gg == n_g - 1);
    pass_d.carry_in     = (cfg.ltype != L_PW1) && (ss > s_first);
    pass_d.emit         = (ss >= 0);
    pass_d.dw           = (cfg.ltype == L_DW3);
    tag_d.ch            = 9'((cfg.ltype == L_DW3) ? oc * 8 : oc);
    tag_d.x             = 11'(xx);
    tag_d.y0            = 11'(ss < 0 ? 0 : ss * int'(N_ROWS));
    tag_d.height        = 11'(cfg.height);
    tag_d.width         = cfg.width;
    tag_d.cgrp          = 6'(n_cg);
    tag_d.pool          = cfg.pool;
    tag_d.relu6         = cfg.relu6;
    tag_d.shift         = cfg.shift;
    tag_d.bnbase        = cfg.bnbase;
  end

  // pipeline alignment: feeder controls one cycle, pass/tag two cycles after issue
  pass_t    pass_q1;
  out_tag_t tag_q1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass_q1  <= '0;
      acc_pass <= '0;
      tag_q1   <= '0;
      acc_tag  <= '0;
      feed_base    <= '0;
      feed_rowok   <= '0;
      feed_pw      <= 1'b0;
      feed_pw_bank <= '0;
    end else begin
      pass_q1  <= pass_d;
      acc_pass <= pass_q1;
      tag_q1   <= tag_d;
      acc_tag  <= tag_q1;
      feed_base    <= 7'(yb);
      feed_rowok   <= (state == S_RUN) ? rowok : '0;
      feed_pw      <= (cfg.ltype == L_PW1);
      feed_pw_bank <= 2'((oc * n_g + gg) % 3);
    end
  end

  // ---- loop sequencing -------------------------------------------------------
  logic last_k, last_g, last_s, last_x, last_oc;
  always_comb begin
    last_k  = (kk == k_last);
    last_g  = (cfg.ltype == L_DW3) || (gg == n_g - 1);
    last_s  = (ss == n_s - 1);
    last_x  = (xx == n_w - 1);
    last_oc = (oc == n_oc - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg      <= '0;
      layer    <= '0;
      in_sel   <= 1'b0;
      done     <= 1'b0;
      wait_cnt <= 0;
      oc <= 0; xx <= 0; ss <= 0; gg <= 0; kk <= 0;
      n_passes <= '0;
      n_swaps  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && n_layers != '0) begin
          layer  <= '0;
          in_sel <= 1'b0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          cfg   <= layers[layer[$clog2(LAYERS)-1:0]];
          state <= S_RUN;
          oc <= 0; xx <= 0; gg <= 0;
          ss <= (layers[layer[$clog2(LAYERS)-1:0]].ltype == L_PW1) ? 0 : -1;
          kk <= (layers[layer[$clog2(LAYERS)-1:0]].ltype == L_PW1) ? 1 : 0;
        end
        S_RUN: begin
          n_passes <= n_passes + 1;
          if (!last_k) kk <= kk + 1;
          else begin
            kk <= k_first;
            if (cfg.ltype == L_DW3 && ss >= 0) begin
              state    <= S_DWWAIT;
              wait_cnt <= DW_GAP;
            end
            if (!last_g) gg <= gg + 1;
            else begin
              gg <= 0;
              if (!last_s) ss <= ss + 1;
              else begin
                ss <= s_first;
                if (!last_x) xx <= xx + 1;
                else begin
                  xx <= 0;
                  if (!last_oc) oc <= oc + 1;
                  else begin
                    oc       <= 0;
                    state    <= S_DRAIN;
                    wait_cnt <= DRAIN;
                  end
                end
              end
            end
          end
        end
        S_DWWAIT: begin
          if (wait_cnt == 0) state <= S_RUN;
          else wait_cnt <= wait_cnt - 1;
        end
        S_DRAIN: begin
          if (wait_cnt == 0) begin
            in_sel  <= !in_sel;
            n_swaps <= n_swaps + 1;
            if (32'(layer) + 1 < 32'(n_layers)) begin
              layer <= layer + 1;
              state <= S_LOAD;
            end else
              state <= S_DONE;
          end else wait_cnt <= wait_cnt - 1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
