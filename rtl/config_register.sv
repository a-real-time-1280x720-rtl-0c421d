// config_register: the host-written configuration of one fusion group.
//
// Entries 0 .. MAX_LAYERS-1 each hold a 64-bit layer descriptor
// (dla_pkg::layer_cfg_t); entry MAX_LAYERS holds the number of layers in the
// group. The controller executes layers 0 .. n_layers-1 back to back,
// alternating the roles of the two unified-buffer halves. Registers reset
// to zero. The paper names a configure register feeding the controller; its
// contents and format are this design's.
module config_register
  import dla_pkg::*;
#(
  parameter int unsigned LAYERS = MAX_LAYERS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(LAYERS+1)-1:0]  wr_idx,
  input  logic [WORD_W-1:0]            wr_data,
  output layer_cfg_t                   layers [LAYERS],
  output logic [$clog2(LAYERS+1)-1:0]  n_layers
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAYERS; i++) layers[i] <= '0;
      n_layers <= '0;
    end else if (wr_en) begin
      if (int'(wr_idx) < LAYERS) layers[wr_idx[$clog2(LAYERS)-1:0]] <= layer_cfg_t'(wr_data);
      else                       n_layers <= wr_data[$clog2(LAYERS+1)-1:0];
    end
  end

endmodule
