// requant -- ReLU and re-quantisation of an ANN layer output.
//
// The accumulated integer v (weights x inputs + bias) is clamped at zero (ReLU),
// scaled by the layer's integer multiplier, shifted right by the layer's shift
// and clamped to the largest value of the output field (2^bits - 1), giving the
// unsigned activation passed to the next layer. Purely combinational. The
// multiply-shift-clamp form follows the published quantised inference; the
// listing in the paper writes the shift as a left shift while the algorithm it
// derives from uses a right shift, which is what is built here. Bias and products
// share one scale here; the paper's separate bias scale is folded into the stored
// bias by the model compiler.
module requant
  import sparrow_pkg::*;
#(
  parameter int AW = ACC_W
) (
  input  logic signed [AW-1:0] v,
  input  logic [7:0]           mult,
  input  logic [4:0]           shift,
  input  bits_code_t           out_code,
  output logic [15:0]          q_o
);

  logic [AW+7:0] scaled;
  logic [16:0]   maxv;

  always_comb begin
    scaled = (v > 0) ? ((AW+8)'(v) * (AW+8)'(mult)) >> shift : '0;
    maxv   = (17'd1 << code_bits(out_code)) - 17'd1;
    q_o    = (scaled > (AW+8)'(maxv)) ? maxv[15:0] : 16'(scaled);
  end

endmodule
