// config_regs -- model configuration register file of the SparrowSNN core.
//
// Holds the hyper-parameters of the deployed network: the number of layers, the
// shape and encoding of the network input, and for every layer its neuron type,
// width, output field width, IF timestep count, firing threshold and ANN
// re-quantisation factors. They are written once per model through a simple
// synchronous register bus (cfg_we/cfg_addr/cfg_wdata, one write per cycle, no
// wait states) and are read by the controller and datapath as plain outputs.
//
// Register map (this design's choice; the published design lists the content
// but not a map):
//   0x00  [2:0] number of layers (1..MAX_LAYERS)
//   0x01  [7:0] input width (features), [10:8] input field width code
//   0x04+4l+0  [1:0] type, [15:8] width, [18:16] output code, [28:24] T
//   0x04+4l+1  [15:0] threshold
//   0x04+4l+2  [7:0] re-quantisation multiplier, [12:8] shift
// Reset clears everything to zero.
module config_regs
  import sparrow_pkg::*;
#(
  parameter int N_LAYERS = MAX_LAYERS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [7:0]              cfg_addr,
  input  logic [31:0]             cfg_wdata,
  output logic [LAYER_W-1:0]      num_layers,
  output logic [WIDTH_W-1:0]      in_width,
  output bits_code_t              in_code,
  output layer_cfg_t              layer_cfg [N_LAYERS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_layers <= '0;
      in_width   <= '0;
      in_code    <= '0;
      for (int l = 0; l < N_LAYERS; l++) layer_cfg[l] <= '0;
    end else if (cfg_we) begin
      if (cfg_addr == 8'h00) num_layers <= cfg_wdata[LAYER_W-1:0];
      if (cfg_addr == 8'h01) begin
        in_width <= cfg_wdata[WIDTH_W-1:0];
        in_code  <= cfg_wdata[10:8];
      end
      for (int l = 0; l < N_LAYERS; l++) begin
        if (cfg_addr == 8'(4 + 4*l)) begin
          layer_cfg[l].ltype    <= layer_type_e'(cfg_wdata[1:0]);
          layer_cfg[l].width    <= cfg_wdata[8 +: WIDTH_W];
          layer_cfg[l].out_code <= cfg_wdata[18:16];
          layer_cfg[l].tsteps   <= cfg_wdata[28:24];
        end
        if (cfg_addr == 8'(5 + 4*l)) layer_cfg[l].threshold <= cfg_wdata[ACC_W-1:0];
        if (cfg_addr == 8'(6 + 4*l)) begin
          layer_cfg[l].rq_mult  <= cfg_wdata[7:0];
          layer_cfg[l].rq_shift <= cfg_wdata[12:8];
        end
      end
    end
  end

endmodule
