// membrane_buffer -- membrane potentials of one neuron for up to 16 timesteps.
//
// While an IF neuron integrates its inputs, entry t holds the potential
// contribution of timestep t, so each weight is fetched once and applied to all
// timesteps in which its input spiked, instead of being re-read every timestep.
// SSF and ANN layers use entry 0 as their single accumulator. rd_idx selects the
// entry shown on rd_data (combinational read); wr_en writes wr_data to entry
// wr_idx at the clock edge; clear zeroes all entries and wins over a write. The
// 16-entry depth follows the published design; the 9-bit entry width printed in
// its block diagram is widened to the accumulator width ACC_W here. IF windows
// longer than 16 timesteps are run by the controller in two passes.
module membrane_buffer
  import sparrow_pkg::*;
#(
  parameter int DEPTH = MAX_T,
  parameter int AW    = ACC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_idx,
  input  logic signed [AW-1:0]       wr_data,
  input  logic [$clog2(DEPTH)-1:0]   rd_idx,
  output logic signed [AW-1:0]       rd_data
);

  logic signed [AW-1:0] v_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) v_q[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < DEPTH; i++) v_q[i] <= '0;
    end else if (wr_en) begin
      v_q[wr_idx] <= wr_data;
    end
  end

  assign rd_data = v_q[rd_idx];

endmodule
