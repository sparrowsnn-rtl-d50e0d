// comp_spike -- compare-and-spike unit (IF firing and SSF spike counting).
//
// IF mode, one timestep per step pulse: the unit holds the running membrane
// potential vm (cleared by clear). On step it adds the timestep's integrated
// input vin, fires (spike_o = 1) when the sum reaches the threshold, and then
// subtracts the threshold (subtractive reset); otherwise it keeps the sum.
// spike_o is combinational from vm, vin and threshold, vm updates at the clock.
// vm is wide enough for 31 timesteps of full-range input, so it never wraps.
//
// SSF mode, combinational: the whole window's input has already been summed into
// v_ssf, so the output spike count is computed directly as
// floor(max(0, v_ssf) / threshold), clipped to the window length t_max. A zero
// threshold gives t_max for any positive input. No per-spike comparison loop is
// run. Both behaviours are the published ones; firing on "greater or equal" follows
// the paper's firing rule and its algorithm, where its reset equation uses "greater".
module comp_spike
  import sparrow_pkg::*;
#(
  parameter int AW = ACC_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [AW-1:0]         threshold,
  // IF
  input  logic                  clear,
  input  logic                  step,
  input  logic signed [AW-1:0]  vin,
  output logic                  spike_o,
  // SSF
  input  logic signed [AW-1:0]  v_ssf,
  input  logic [15:0]           t_max,
  output logic [15:0]           count_o
);

  // vm may collect up to 31 timestep inputs of AW bits each without firing
  // (e.g. all negative), so it carries 5 extra bits plus one of margin
  localparam int VW = AW + 6;
  logic signed [VW-1:0] vm_q, vm_sum, vm_next, th_ext;

  always_comb begin
    th_ext  = $signed({{(VW - AW){1'b0}}, threshold});
    vm_sum  = vm_q + VW'(vin);
    spike_o = (vm_sum >= th_ext);
    vm_next = spike_o ? vm_sum - th_ext : vm_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     vm_q <= '0;
    else if (clear) vm_q <= '0;
    else if (step)  vm_q <= vm_next;
  end

  logic [AW-1:0] vpos, quo;
  always_comb begin
    vpos = (v_ssf > 0) ? AW'(v_ssf) : '0;
    quo  = (threshold == 0) ? '1 : vpos / threshold;
    if (vpos == 0)                  count_o = '0;
    else if (32'(quo) > 32'(t_max)) count_o = t_max;
    else                            count_o = 16'(quo);
  end

endmodule
