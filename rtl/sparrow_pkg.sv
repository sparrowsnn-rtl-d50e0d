// sparrow_pkg -- types and sizes shared by the SparrowSNN core.
//
// The core runs a small fully-connected network of up to MAX_LAYERS layers, each
// with up to MAX_WIDTH neurons. Every layer is one of three neuron types: IF
// (integrate-and-fire over T timesteps), SSF (sum-spikes-and-fire: one dot product
// over spike counts, then a single division by the threshold) or ANN (quantised
// ReLU layer). The layer limits, memory sizes and port widths are the published
// ones; the field widths inside layer_cfg_t and the encodings are this design's.
package sparrow_pkg;

  localparam int MAX_LAYERS  = 6;     // layers supported by the core
  localparam int MAX_WIDTH   = 128;   // neurons per layer (input and output)
  localparam int WORD_W      = 128;   // SRAM port width (weights and activations)
  localparam int W_BITS      = 8;     // weight / bias width
  localparam int WPW         = WORD_W / W_BITS;   // weights per memory word (16)
  localparam int MAX_T       = 16;    // timesteps held in the membrane buffer
  localparam int ACT_MAX_W   = 16;    // widest activation field
  localparam int ACC_W       = 16;    // membrane potential / accumulator width
  localparam int WMEM_WORDS  = 4096;  // 64 KB weight memory / 16 B per word
  localparam int AMEM_WORDS  = 256;   // 4 KB activation memory / 16 B per word

  localparam int WIDTH_W     = $clog2(MAX_WIDTH + 1);  // 8: holds 1..128
  localparam int LAYER_W     = $clog2(MAX_LAYERS + 1); // 3: holds 1..6

  // Neuron type of a layer.
  typedef enum logic [1:0] {
    LT_IF  = 2'd0,
    LT_SSF = 2'd1,
    LT_ANN = 2'd2
  } layer_type_e;

  // Activation field width code: width in bits = 1 << code (1,2,4,8,16).
  typedef logic [2:0] bits_code_t;

  // Per-layer configuration.
  typedef struct packed {
    layer_type_e          ltype;     // neuron type
    logic [WIDTH_W-1:0]   width;     // number of output neurons, 1..128
    bits_code_t           out_code;  // output field width (SSF/ANN); IF always emits 1-bit spikes
    logic [4:0]           tsteps;    // window length T: 1..31 (IF over 16 runs in two passes)
    logic [ACC_W-1:0]     threshold; // IF/SSF firing threshold
    logic [7:0]           rq_mult;   // ANN re-quantisation multiplier
    logic [4:0]           rq_shift;  // ANN re-quantisation right shift
  } layer_cfg_t;

  // Width in bits of an activation field.
  function automatic logic [4:0] code_bits(bits_code_t c);
    return 5'(1) << c[2:0];
  endfunction

endpackage
