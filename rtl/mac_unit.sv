// mac_unit -- shared multiply/accumulate datapath of the SparrowSNN core.
//
// One adder serves all three neuron types. In SSF and ANN mode the multiplier
// forms weight x activation (8-bit signed weight times an unsigned activation of
// up to 16 bits: a spike count or a quantised ANN value) and the product is added
// to the membrane potential acc_i. In IF mode the multiplier is bypassed: the
// weight itself is added when the 1-bit input spike is 1, and acc_i passes
// unchanged when it is 0 (the addition is skipped). The same path adds a bias by
// presenting the bias as weight and the bias multiplier (1, or T for SSF) as
// activation. Purely combinational; the result saturates at the ACC_W-bit signed
// range instead of wrapping. The mode split follows the published datapath; the
// saturation and the accumulator width are this design's.
module mac_unit
  import sparrow_pkg::*;
#(
  parameter int AW = ACC_W
) (
  input  logic                     if_mode,
  input  logic                     spike,
  input  logic signed [W_BITS-1:0] weight,
  input  logic [15:0]              act,
  input  logic signed [AW-1:0]     acc_i,
  output logic signed [AW-1:0]     acc_o
);

  localparam int PW = W_BITS + 17;       // product width (signed)
  localparam int SW = (PW > AW ? PW : AW) + 1;

  logic signed [PW-1:0] prod;
  logic signed [SW-1:0] sum;
  localparam logic signed [SW-1:0] MAXV = SW'((64'sd1 <<< (AW-1)) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(64'sd1 <<< (AW-1));

  always_comb begin
    prod = PW'(weight) * $signed({1'b0, act});
    if (if_mode) sum = spike ? SW'(acc_i) + SW'(weight) : SW'(acc_i);
    else         sum = SW'(acc_i) + SW'(prod);
    if (sum > MAXV)      acc_o = AW'(MAXV);
    else if (sum < MINV) acc_o = AW'(MINV);
    else                 acc_o = AW'(sum);
  end

endmodule
