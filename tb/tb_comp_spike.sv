// tb_comp_spike -- SSF counts for random potentials, thresholds and windows against
// floor(max(0,V)/theta) clipped to T; IF spike trains for random per-timestep
// inputs against subtractive-reset integrate-and-fire, including the late-burst
// case where IF emits fewer spikes than SSF and full-range inputs over 31
// timesteps that the running potential must hold without wrapping.
`timescale 1ns/1ps
module tb_comp_spike;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [15:0] threshold = 0; logic clear = 0, step = 0;
  logic signed [15:0] vin = 0, v_ssf = 0; logic spike_o;
  logic [15:0] t_max = 0, count_o;
  comp_spike dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // SSF
    for (int k = 0; k < 20000; k++) begin
      int e;
      v_ssf = 16'($urandom); threshold = (k % 4 == 0) ? 16'($urandom_range(0, 3)) : 16'($urandom_range(0, 4000));
      t_max = 16'((1 << $urandom_range(1, 16)) - 1); #1;
      if (v_ssf <= 0) e = 0;
      else if (threshold == 0) e = t_max;
      else begin e = int'(v_ssf) / int'(threshold); if (e > int'(t_max)) e = t_max; end
      check(int'(count_o) == e, $sformatf("SSF V=%0d th=%0d T=%0d -> %0d exp %0d", v_ssf, threshold, t_max, count_o, e));
    end
    // IF
    for (int k = 0; k < 2000; k++) begin
      automatic int T = $urandom_range(1, 31), vm = 0, nif = 0, u = 0, x;
      threshold = 16'($urandom_range(1, 300));
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int t = 0; t < T; t++) begin
        x = (k % 10 == 0 && t < T - 1) ? 0 : $urandom_range(0, 400) - 100;  // late burst
        if (k % 10 == 0 && t == T - 1) x = 3 * int'(threshold) + 1;
        if (k % 10 == 3) x = 32767;    // full-range inputs: the potential must not wrap
        if (k % 10 == 6) x = -32768;
        u += x;
        vin = 16'(x); step = 1; #1;
        vm += x;
        check(spike_o == (vm >= int'(threshold)), $sformatf("IF t=%0d", t));
        if (vm >= int'(threshold)) begin vm -= int'(threshold); nif++; end
        @(negedge clk); step = 0;
      end
      if (k % 10 == 0 && T > 1) check(nif < u / int'(threshold), "late burst: IF count below floor(U/theta)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
