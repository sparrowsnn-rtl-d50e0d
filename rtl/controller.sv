// controller -- FSM-based runtime controller of the SparrowSNN core.
//
// Sequences one inference in the order: for each layer, for each output neuron,
// for each input neuron (and, in an IF layer, each timestep) accumulate; then add
// the bias; then fire. It walks the weight memory, the activation memory (or, in
// the first layer, the external input port) and drives every datapath unit.
//
// Memory layout (this design's choice): the weights of a layer are stored neuron
// by neuron, each neuron starting on a fresh 128-bit word (ceil(n_in/16) words),
// followed by the layer's biases packed sixteen to a word; layers follow each
// other from address 0. Layer l writes its outputs to half (l mod 2) of the
// activation memory and layer l+1 reads them from there (ping-pong). An input
// neuron's field is 1 << code bits in SSF/ANN layers and T one-bit spikes
// (timestep 0 first) in IF layers, packed LSB first.
//
// Timing: start (one cycle, while idle) begins an inference; busy is high until
// the one-cycle done pulse. Reads are synchronous (data the cycle after the
// request). Each synapse costs one cycle in SSF/ANN layers and T cycles in IF
// layers; each refill of the weight or input buffer adds one bubble cycle (one
// bubble when both refill at once); each neuron adds 7 cycles (SSF/ANN) or 2T+5
// cycles (IF) for start, bias and fire; each layer adds 2 and an inference 1.
// The membrane buffer holds 16 timesteps, so an IF window of 17..31 timesteps
// takes two passes per neuron: both pop all T spikes of every input, the first
// accumulates timesteps 0..15 and the second the rest, each pass re-reads the
// neuron's weights and adds its own bias and fire steps, and the IF potential is
// kept between them. The 16-entry buffer is the published design's; the two-pass
// schedule is this design's own way of running the published T = 31.
// The loop order, the per-layer bias and firing steps and the bias scaled by T in
// SSF (T from the layer's T field, 1..31) follow the published design; the state encoding, the layout and the cycle
// counts are this design's.
module controller
  import sparrow_pkg::*;
#(
  parameter int N_LAYERS = MAX_LAYERS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // configuration
  input  logic [LAYER_W-1:0]        num_layers,
  input  logic [WIDTH_W-1:0]        in_width,
  input  bits_code_t                in_code,
  input  layer_cfg_t                layer_cfg [N_LAYERS],
  // weight memory read port
  output logic                      wm_rd_en,
  output logic [$clog2(WMEM_WORDS)-1:0] wm_rd_addr,
  // activation memory port (write data comes from the output spike buffer)
  output logic                      am_en,
  output logic                      am_we,
  output logic [$clog2(AMEM_WORDS)-1:0] am_addr,
  // external input read port (first layer)
  output logic                      ext_rd_en,
  output logic [$clog2(AMEM_WORDS)-1:0] ext_rd_addr,
  output logic                      src_ext,     // input buffer loads from the external port
  // input spike buffer
  output logic                      isb_load,
  output logic                      isb_pop,
  output bits_code_t                isb_code,
  input  logic                      isb_last,
  // weight buffer
  output logic                      wb_load,
  output logic [$clog2(WPW)-1:0]    wb_idx,
  // MAC unit and membrane buffer
  output logic                      if_mode,
  output logic                      bias_phase,  // operand = bias x bias_mult
  output logic [4:0]                bias_mult,   // 1, or T in SSF layers
  output logic                      spike_force,
  output logic                      mb_clear,
  output logic                      mb_wr_en,
  output logic [$clog2(MAX_T)-1:0]  mb_idx,
  // compare-and-spike / requant / output selection
  output logic                      cs_clear,
  output logic                      cs_step,
  input  logic                      cs_spike,
  output logic [4:0]                t_max,
  output layer_type_e               ltype,
  output logic [ACC_W-1:0]          threshold,
  output logic [7:0]                rq_mult,
  output logic [4:0]                rq_shift,
  // output spike buffer
  output logic                      ob_push,
  output bits_code_t                ob_code,
  output logic                      ob_flush,
  input  logic                      ob_wr_valid,
  // classifier
  output logic                      cls_clear,
  output logic                      cls_upd,
  output logic [WIDTH_W-1:0]        cls_idx,
  output logic [15:0]               if_count
);

  localparam int WA = $clog2(WMEM_WORDS);
  localparam int AA = $clog2(AMEM_WORDS);
  localparam int HALF = AMEM_WORDS / 2;

  typedef enum logic [3:0] {
    S_IDLE, S_LAYER, S_NEURON, S_LOAD, S_ACC, S_BFETCH, S_BLOAD, S_BIAS,
    S_FIRE, S_NEXT, S_FLUSH, S_DONE
  } state_e;

  state_e state_q;

  logic [LAYER_W-1:0]   layer_q;
  logic [WIDTH_W-1:0]   n_q;        // output neuron index
  logic [WIDTH_W-1:0]   i_q;        // input neuron index
  logic [4:0]           t_q;        // timestep index
  logic [$clog2(WPW)-1:0] wi_q;     // weight index inside the buffered word
  logic [WA-1:0]        w_ptr_q;    // next weight word to fetch
  logic [WA-1:0]        bias_base_q;
  logic [AA-1:0]        a_ptr_q;    // next input word to fetch
  logic [AA-1:0]        o_ptr_q;    // next output word to write
  logic [WIDTH_W-1:0]   n_in_q;
  bits_code_t           in_code_q;
  logic                 need_w_q, need_a_q;
  logic [15:0]          ifcnt_q;
  logic                 pass_q;     // IF windows over 16 timesteps: second pass
  logic [WA-1:0]        nstart_q;   // first weight word of the current neuron

  layer_cfg_t cur;
  logic [4:0] tsteps;
  logic       is_if, is_ssf, last_in, last_t, last_layer, chunk_end, in_chunk, two_pass;

  always_comb begin
    cur        = layer_cfg[layer_q];
    is_if      = (cur.ltype == LT_IF);
    is_ssf     = (cur.ltype == LT_SSF);
    tsteps     = (cur.tsteps == 0) ? 5'd1 : cur.tsteps;
    last_in    = (i_q == n_in_q - 1'b1);
    last_t     = !is_if || (t_q == tsteps - 1'b1);
    // an IF window is processed in passes of up to MAX_T timesteps: pass p owns
    // timesteps 16p..16p+15, held in membrane-buffer entries 0..15
    two_pass   = is_if && (tsteps > 5'(MAX_T));
    in_chunk   = !is_if || (t_q[4] == pass_q);
    chunk_end  = !is_if || (t_q == tsteps - 1'b1) || (t_q[3:0] == 4'hF);
    last_layer = (layer_q == num_layers - 1'b1);
  end

  // layer set-up values, used in S_LAYER
  logic [WIDTH_W-1:0] n_in_new;
  bits_code_t         in_code_new;
  logic [4:0]         wpn_new;
  always_comb begin
    if (layer_q == 0) begin
      n_in_new    = in_width;
      in_code_new = in_code;
    end else begin
      n_in_new    = layer_cfg[layer_q - 1'b1].width;
      in_code_new = (layer_cfg[layer_q - 1'b1].ltype == LT_IF) ? 3'd0
                                                               : layer_cfg[layer_q - 1'b1].out_code;
    end
    wpn_new = 5'((n_in_new + WIDTH_W'(WPW - 1)) >> $clog2(WPW));
  end

  logic [AA-1:0] in_base;
  assign in_base = (layer_q == 0) ? '0 : (layer_q[0] ? AA'(0) : AA'(HALF));

  // ---------------------------------------------------------------- outputs
  always_comb begin
    wm_rd_en    = 1'b0;  wm_rd_addr = w_ptr_q;
    am_en       = 1'b0;  am_we = 1'b0; am_addr = a_ptr_q;
    ext_rd_en   = 1'b0;  ext_rd_addr = a_ptr_q;
    isb_load    = 1'b0;  isb_pop = 1'b0;
    wb_load     = 1'b0;  wb_idx = wi_q;
    bias_phase  = 1'b0;  spike_force = 1'b0;
    mb_clear    = 1'b0;  mb_wr_en = 1'b0; mb_idx = is_if ? t_q[$clog2(MAX_T)-1:0] : '0;
    cs_clear    = 1'b0;  cs_step = 1'b0;
    ob_push     = 1'b0;  ob_flush = 1'b0;
    cls_clear   = 1'b0;  cls_upd = 1'b0;

    // refill requests leave S_NEURON and S_ACC in the same cycle
    case (state_q)
      S_IDLE: cls_clear = start;
      S_NEURON: begin
        mb_clear = 1'b1;
        cs_clear = !pass_q;   // the IF potential carries over into the second pass
        wm_rd_en = 1'b1;
        if (layer_q == 0) begin ext_rd_en = 1'b1; ext_rd_addr = in_base; end
        else              begin am_en = 1'b1;     am_addr = in_base;     end
      end
      S_LOAD: begin
        wb_load  = need_w_q;
        isb_load = need_a_q;
      end
      S_ACC: begin
        isb_pop  = 1'b1;
        mb_wr_en = in_chunk;
        if (!last_in || !last_t) begin
          if (last_t && wi_q == '1) wm_rd_en = 1'b1;
          if (isb_last) begin
            if (layer_q == 0) ext_rd_en = 1'b1;
            else              am_en     = 1'b1;
          end
        end
      end
      S_BFETCH: begin
        wm_rd_en   = 1'b1;
        wm_rd_addr = bias_base_q + WA'(n_q >> $clog2(WPW));
      end
      S_BLOAD: wb_load = 1'b1;
      S_BIAS: begin
        bias_phase  = 1'b1;
        spike_force = 1'b1;
        mb_wr_en    = 1'b1;
        wb_idx      = n_q[$clog2(WPW)-1:0];
      end
      S_FIRE: begin
        ob_push = 1'b1;
        cs_step = is_if;
        cls_upd = last_layer && !is_if;
      end
      S_NEXT:  cls_upd  = last_layer && is_if;
      S_FLUSH: ob_flush = 1'b1;
      default: ;
    endcase

    // completed output words go to the activation memory
    if (ob_wr_valid) begin
      am_en   = 1'b1;
      am_we   = 1'b1;
      am_addr = o_ptr_q;
    end
  end

  assign busy      = (state_q != S_IDLE);
  assign done      = (state_q == S_DONE);
  assign src_ext   = (layer_q == 0);
  assign isb_code  = is_if ? 3'd0 : in_code_q;
  assign if_mode   = is_if;
  // SSF: the bias is added once per window timestep and counts clip at T
  assign bias_mult = is_ssf ? ((cur.tsteps == 0) ? 5'd1 : cur.tsteps) : 5'd1;
  assign t_max     = bias_mult;
  assign ltype     = cur.ltype;
  assign threshold = cur.threshold;
  assign rq_mult   = cur.rq_mult;
  assign rq_shift  = cur.rq_shift;
  assign ob_code   = is_if ? 3'd0 : cur.out_code;
  assign cls_idx   = n_q;
  assign if_count  = ifcnt_q;

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      layer_q     <= '0;
      n_q         <= '0;
      i_q         <= '0;
      t_q         <= '0;
      wi_q        <= '0;
      w_ptr_q     <= '0;
      bias_base_q <= '0;
      a_ptr_q     <= '0;
      o_ptr_q     <= '0;
      n_in_q      <= '0;
      in_code_q   <= '0;
      need_w_q    <= 1'b0;
      need_a_q    <= 1'b0;
      ifcnt_q     <= '0;
      pass_q      <= 1'b0;
      nstart_q    <= '0;
    end else begin
      if (ob_wr_valid) o_ptr_q <= o_ptr_q + 1'b1;

      case (state_q)
        S_IDLE: if (start && num_layers != 0) begin
          layer_q <= '0;
          w_ptr_q <= '0;
          state_q <= S_LAYER;
        end
        S_LAYER: begin
          n_in_q      <= (n_in_new == 0) ? WIDTH_W'(1) : n_in_new;
          in_code_q   <= in_code_new;
          bias_base_q <= w_ptr_q + WA'(cur.width) * WA'(wpn_new);
          o_ptr_q     <= layer_q[0] ? AA'(HALF) : AA'(0);
          n_q         <= '0;
          state_q     <= S_NEURON;
        end
        S_NEURON: begin
          i_q      <= '0;
          t_q      <= '0;
          wi_q     <= '0;
          if (!pass_q) ifcnt_q <= '0;
          nstart_q <= w_ptr_q;
          need_w_q <= 1'b1;
          need_a_q <= 1'b1;
          w_ptr_q  <= w_ptr_q + 1'b1;
          a_ptr_q  <= in_base + 1'b1;
          state_q  <= S_LOAD;
        end
        S_LOAD: state_q <= S_ACC;
        S_ACC: begin
          if (last_t) begin
            t_q  <= '0;
            i_q  <= i_q + 1'b1;
            wi_q <= wi_q + 1'b1;
          end else begin
            t_q  <= t_q + 1'b1;
          end
          if (last_in && last_t) begin
            // w_ptr_q already points past this neuron's last weight word,
            // which is where the next neuron's weights start
            state_q <= S_BFETCH;
          end else begin
            need_w_q <= last_t && (wi_q == '1);
            need_a_q <= isb_last;
            if (last_t && wi_q == '1) w_ptr_q <= w_ptr_q + 1'b1;
            if (isb_last)                 a_ptr_q <= a_ptr_q + 1'b1;
            if ((last_t && wi_q == '1) || isb_last) state_q <= S_LOAD;
          end
        end
        S_BFETCH: state_q <= S_BLOAD;
        S_BLOAD: begin
          t_q     <= {pass_q, 4'b0};
          state_q <= S_BIAS;
        end
        S_BIAS: begin
          if (chunk_end) begin
            t_q     <= {pass_q, 4'b0};
            state_q <= S_FIRE;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_FIRE: begin
          if (is_if) ifcnt_q <= ifcnt_q + 16'(cs_spike);
          if (chunk_end) begin
            t_q <= '0;
            if (two_pass && !pass_q) begin
              // second pass: re-read this neuron's weights and inputs
              pass_q  <= 1'b1;
              w_ptr_q <= nstart_q;
              state_q <= S_NEURON;
            end else begin
              pass_q  <= 1'b0;
              state_q <= S_NEXT;
            end
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_NEXT: begin
          if (n_q == cur.width - 1'b1) state_q <= S_FLUSH;
          else begin
            n_q     <= n_q + 1'b1;
            state_q <= S_NEURON;
          end
        end
        S_FLUSH: begin
          w_ptr_q <= bias_base_q + ((WA'(cur.width) + WA'(WPW - 1)) >> $clog2(WPW));
          if (last_layer) state_q <= S_DONE;
          else begin
            layer_q <= layer_q + 1'b1;
            state_q <= S_LAYER;
          end
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The activation memory has a single port: a read and an output write never
  // coincide, because outputs are only pushed while no input word is fetched.
  a_single_port : assert property (@(posedge clk) disable iff (!rst_n)
    !(ob_wr_valid && (state_q inside {S_NEURON, S_ACC})));

endmodule
