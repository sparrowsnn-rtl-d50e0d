// sparrow_top -- the SparrowSNN inference core.
//
// A single-core, low-power engine for small fully-connected networks whose layers
// may each be quantised ANN, integrate-and-fire (IF) SNN or sum-spikes-and-fire
// (SSF) SNN, as in a hybrid ANN-SSF ECG/EEG classifier. It combines
//   * configuration registers and a 64 KB weight memory, programmed once per model;
//   * the FSM runtime controller;
//   * the compute core: a 128-bit input spike buffer fed from the external sensor
//     input (first layer) or the 4 KB activation memory, a weight buffer with a
//     16 x 8-bit select, one multiplier and one adder shared by all modes, a
//     16-entry membrane potential buffer, the compare-and-spike unit (IF/SSF), the
//     requantiser (ANN), a 128-bit output spike buffer and an arg-max classifier.
//
// Interface:
//   cfg_*    register writes (see config_regs), any time while idle;
//   wm_*     weight memory programming (128-bit words), while idle;
//   ext_*    the first layer's input: the core requests 128-bit word ext_rd_addr
//            with ext_rd_en and samples ext_rd_data one cycle later, like an SRAM
//            read; the input is read once per first-layer neuron (twice for an
//            IF window over 16 timesteps);
//   start    one-cycle pulse while idle; busy until the one-cycle done pulse, when
//            class_o (index of the largest last-layer output) is valid; it stays
//            valid until the next start.
// The block partition, memory sizes and port widths follow the published design;
// the external interfaces are this design's.
module sparrow_top
  import sparrow_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration registers
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  // weight memory programming
  input  logic                          wm_we,
  input  logic [$clog2(WMEM_WORDS)-1:0] wm_waddr,
  input  logic [WORD_W-1:0]             wm_wdata,
  // external (sensor) input
  output logic                          ext_rd_en,
  output logic [$clog2(AMEM_WORDS)-1:0] ext_rd_addr,
  input  logic [WORD_W-1:0]             ext_rd_data,
  // run control and result
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [WIDTH_W-1:0]            class_o
);

  // configuration
  logic [LAYER_W-1:0] num_layers;
  logic [WIDTH_W-1:0] in_width;
  bits_code_t         in_code;
  layer_cfg_t         layer_cfg [MAX_LAYERS];

  config_regs u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .num_layers, .in_width, .in_code, .layer_cfg
  );

  // controller
  logic                          wm_rd_en;
  logic [$clog2(WMEM_WORDS)-1:0] wm_rd_addr;
  logic                          am_en, am_we;
  logic [$clog2(AMEM_WORDS)-1:0] am_addr;
  logic                          src_ext;
  logic                          isb_load, isb_pop, isb_last, isb_empty;
  bits_code_t                    isb_code;
  logic                          wb_load;
  logic [$clog2(WPW)-1:0]        wb_idx;
  logic                          if_mode, bias_phase, spike_force;
  logic [4:0]                    bias_mult;
  logic                          mb_clear, mb_wr_en;
  logic [$clog2(MAX_T)-1:0]      mb_idx;
  logic                          cs_clear, cs_step, cs_spike;
  logic [4:0]                    t_max;
  layer_type_e                   ltype;
  logic [ACC_W-1:0]              threshold;
  logic [7:0]                    rq_mult;
  logic [4:0]                    rq_shift;
  logic                          ob_push, ob_flush, ob_wr_valid;
  bits_code_t                    ob_code;
  logic                          cls_clear, cls_upd;
  logic [WIDTH_W-1:0]            cls_idx;
  logic [15:0]                   if_count;

  controller u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .num_layers, .in_width, .in_code, .layer_cfg,
    .wm_rd_en, .wm_rd_addr,
    .am_en, .am_we, .am_addr,
    .ext_rd_en, .ext_rd_addr, .src_ext,
    .isb_load, .isb_pop, .isb_code, .isb_last,
    .wb_load, .wb_idx,
    .if_mode, .bias_phase, .bias_mult, .spike_force,
    .mb_clear, .mb_wr_en, .mb_idx,
    .cs_clear, .cs_step, .cs_spike, .t_max,
    .ltype, .threshold, .rq_mult, .rq_shift,
    .ob_push, .ob_code, .ob_flush, .ob_wr_valid,
    .cls_clear, .cls_upd, .cls_idx, .if_count
  );

  // memories
  logic [WORD_W-1:0] wm_rd_data, am_rd_data, ob_wr_data;

  weight_mem #(.DEPTH(WMEM_WORDS), .WIDTH(WORD_W)) u_wmem (
    .clk, .rd_en(wm_rd_en), .rd_addr(wm_rd_addr), .rd_data(wm_rd_data),
    .wr_en(wm_we), .wr_addr(wm_waddr), .wr_data(wm_wdata)
  );

  act_mem #(.DEPTH(AMEM_WORDS), .WIDTH(WORD_W)) u_amem (
    .clk, .en(am_en), .we(am_we), .addr(am_addr), .wr_data(ob_wr_data), .rd_data(am_rd_data)
  );

  // input side: source mux, input spike buffer, weight buffer
  logic [15:0]               act_val;
  logic signed [W_BITS-1:0]  weight;

  input_spike_buffer u_isb (
    .clk, .rst_n, .load(isb_load), .load_data(src_ext ? ext_rd_data : am_rd_data),
    .pop(isb_pop), .code(isb_code), .value_o(act_val), .empty(isb_empty), .last(isb_last)
  );

  weight_buffer u_wbuf (
    .clk, .rst_n, .load(wb_load), .load_data(wm_rd_data), .idx(wb_idx), .weight_o(weight)
  );

  // shared MAC and membrane potential buffer
  logic signed [ACC_W-1:0] v_rd, v_wr;

  mac_unit u_mac (
    .if_mode, .spike(spike_force | act_val[0]), .weight,
    .act(bias_phase ? 16'(bias_mult) : act_val), .acc_i(v_rd), .acc_o(v_wr)
  );

  membrane_buffer u_mbuf (
    .clk, .rst_n, .clear(mb_clear), .wr_en(mb_wr_en), .wr_idx(mb_idx), .wr_data(v_wr),
    .rd_idx(mb_idx), .rd_data(v_rd)
  );

  // activation: compare-and-spike (IF, SSF) and requantiser (ANN)
  logic [15:0] ssf_count, ann_q, out_val;

  comp_spike u_cs (
    .clk, .rst_n, .threshold, .clear(cs_clear), .step(cs_step), .vin(v_rd),
    .spike_o(cs_spike), .v_ssf(v_rd), .t_max(16'(t_max)), .count_o(ssf_count)
  );

  requant u_rq (
    .v(v_rd), .mult(rq_mult), .shift(rq_shift), .out_code(ob_code), .q_o(ann_q)
  );

  always_comb begin
    unique case (ltype)
      LT_IF:   out_val = {15'd0, cs_spike};
      LT_SSF:  out_val = ssf_count;
      default: out_val = ann_q;
    endcase
  end

  // output side
  output_spike_buffer u_obuf (
    .clk, .rst_n, .push(ob_push), .value_i(out_val), .code(ob_code), .flush(ob_flush),
    .wr_valid(ob_wr_valid), .wr_data(ob_wr_data)
  );

  logic [15:0] best;
  classifier u_cls (
    .clk, .rst_n, .clear(cls_clear), .upd(cls_upd), .idx(cls_idx),
    .val(if_mode ? if_count : out_val), .class_o, .best_o(best)
  );

endmodule
