// tb_workloads -- runs the two network shapes the design targets, at full size on the
// core's default configuration, and checks them against the reference model:
//   ECG beat classifier: 180 8-bit input samples, layers 32-64-32-16-64; the first
//     two layers quantised ANN (8-bit outputs), the rest SSF with T = 31 (8-bit fields);
//   EEG emotion classifier: 128 8-bit input features (the feature count after PCA is
//     not known; 128 is the largest layer input), layers 128-32-32, ANN then SSF, T = 31;
//   ECG beat classifier as an all-IF network with T = 31 (spike-train input), which
//     exercises the two-pass IF schedule on a full-size network.
// Weights, biases and inputs are random (fixed seed); thresholds and re-quantisation
// factors are set so that activity stays in range. Each run checks the class, the last
// layer's outputs and the cycle count, and prints the latency at 100 MHz next to the
// published latency (hybrid: 0.124 ms ECG, 0.191 ms EEG; IF: 0.241 ms ECG). The ECG
// hybrid latency must be within 20 % of the published one; the EEG latency depends on
// the unknown input size and is only reported; the IF network takes one cycle per
// synapse and timestep and two passes, far slower than published, and is only reported.
`timescale 1ns/1ps
module tb_workloads;
  import sparrow_pkg::*;
  localparam int WATCHDOG_CYCLES = 5_000_000;
`include "sparrow_tb_common.svh"

  task automatic make_workload(int which);
    int shape[5];
    if (which != 1) begin
      nl = 5; inw = 180; shape = '{32, 64, 32, 16, 64};
    end else begin
      nl = 3; inw = 128; shape = '{128, 32, 32, 0, 0};
    end
    incode = 3;
    for (int l = 0; l < nl; l++) begin
      ty[l] = (which == 2) ? 0 : ((l < ((which == 0) ? 2 : 1)) ? 2 : 1);
      wd[l] = shape[l];
      oc[l] = 3; ts[l] = 31;
      th[l] = (which == 2) ? 24 : 400; rm[l] = 16; rs[l] = 8;
      for (int n = 0; n < wd[l]; n++) begin
        bs[l][n] = $urandom_range(0, 40) - 20;
        for (int i = 0; i < 256; i++) wt[l][n][i] = $urandom_range(0, 12) - 6;
      end
    end
    for (int i = 0; i < 256; i++) begin
      act_in[i][0] = $urandom_range(0, 255);
      if (which == 2)
        for (int t = 0; t < 31; t++) act_in[i][t] = int'($urandom_range(0, 2) == 0);
    end
  endtask

  int pub_cycles[3] = '{12400, 19100, 24100};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      make_workload(w);
      run_one(w);
      $display("%s: %0d cycles = %0.4f ms at 100 MHz (published 0.%0d ms)",
               w == 0 ? "ECG hybrid" : (w == 1 ? "EEG hybrid" : "ECG IF T=31"), ncyc, ncyc / 100000.0, pub_cycles[w] / 100);
      if (w == 0)
        check(ncyc > pub_cycles[w] * 8 / 10 && ncyc < pub_cycles[w] * 12 / 10,
              $sformatf("latency %0d cycles not within 20%% of %0d", ncyc, pub_cycles[w]));
    end
    check(n_twopass > 0 && n_fire > 0, "IF workload did not fire or did not use two passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
