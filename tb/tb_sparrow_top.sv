// tb_sparrow_top -- end-to-end test of the SparrowSNN core.
//
// Programs random networks through the configuration and weight-programming
// ports, serves the first-layer input from a word array on the external port,
// runs one inference per network and compares (a) the class index, (b) the last
// layer's packed outputs in the activation memory, and (c) the cycle count, with
// a reference model written here from the documented arithmetic: saturating
// 16-bit accumulation, bias x T in SSF, floor(max(0,V)/theta) clipped to T,
// ReLU/multiply/shift/clamp in ANN, IF with subtractive reset over T timesteps
// (windows over 16 timesteps run in two passes).
// Networks are either all-IF (one T) or mixes of ANN and SSF layers (the hybrid).
// It also counts how often each mechanism occurred and fails for any that never
// did: IF/SSF/ANN layers, weight and input buffer refills, full and partial
// output-word writes, accumulator saturation, SSF clipping at T, ANN clamping,
// IF firing, two-pass IF windows, and skipped additions for zero spikes.
`timescale 1ns/1ps
module tb_sparrow_top;
  import sparrow_pkg::*;

  localparam int NRUNS = 24;

  localparam int WATCHDOG_CYCLES = 20_000_000;
`include "sparrow_tb_common.svh"

  // ---------------------------------------------------------------- random nets
  task automatic make_net(int r);
    bit all_if = (r % 3 == 0);
    int T = 1 + $urandom_range(0, 30);
    nl = 1 + $urandom_range(0, 5);
    if (r == 1) nl = 6;
    if ((r == 2 || r == 5) && nl > 3) nl = 3;   // 128-wide layers: stay within 64 KB
    inw = 1 + $urandom_range(0, 40);
    if (r == 2 || r == 4) inw = 128;
    incode = $urandom_range(0, 4);
    for (int l = 0; l < nl; l++) begin
      ty[l] = all_if ? 0 : ((l < nl / 2) ? 2 : 1);   // ANN front, SSF back
      if (!all_if && $urandom_range(0, 3) == 0) ty[l] = 1 + $urandom_range(0, 1);
      wd[l] = 1 + $urandom_range(0, 40);
      if (r == 2 || r == 5) wd[l] = 128;
      oc[l] = $urandom_range(0, 4);
      ts[l] = T;
      if (ty[l] == 1) begin   // SSF: window 1..31, field wide enough for T
        ts[l] = $urandom_range(1, 31);
        while ((1 << bits_of(oc[l])) - 1 < ts[l]) oc[l]++;
      end
      th[l] = all_if ? $urandom_range(1, 200) : $urandom_range(0, 3000);
      rm[l] = $urandom_range(0, 255);
      rs[l] = $urandom_range(0, 14);
      for (int n = 0; n < wd[l]; n++) begin
        bs[l][n] = $urandom_range(0, 255) - 128;
        for (int i = 0; i < 128; i++)
          wt[l][n][i] = (r % 5 == 4) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 40) - 12;
      end
    end
    for (int i = 0; i < 128; i++) begin
      act_in[i][0] = $urandom_range(0, (1 << bits_of(incode)) - 1);
      for (int t = 0; t < 32; t++)
        if (all_if) act_in[i][t] = int'($urandom_range(0, 2) == 0);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NRUNS; r++) begin
      make_net(r);
      run_one(r);
    end
    // mechanisms
    check(n_if_layers > 0,  "no IF layer ran");
    check(n_ssf_layers > 0, "no SSF layer ran");
    check(n_ann_layers > 0, "no ANN layer ran");
    check(n_sat > 0,        "accumulator never saturated");
    check(n_clip > 0,       "SSF count never clipped at T");
    check(n_clamp > 0,      "ANN output never clamped");
    check(n_fire > 0,       "IF neuron never fired");
    check(n_twopass > 0,    "no IF window needed two passes");
    check(n_skip > 0,       "no zero spike skipped an addition");
    check(n_wrefill > 0,    "weight buffer never refilled");
    check(n_arefill > 0,    "input buffer never refilled");
    check(n_fullwr > 0,     "output buffer never wrote a full word");
    check(n_partwr > 0,     "output buffer never flushed a partial word");
    $display("mechanisms: IF=%0d SSF=%0d ANN=%0d sat=%0d clip=%0d clamp=%0d fire=%0d skip=%0d wrefill=%0d arefill=%0d fullwr=%0d partwr=%0d",
             n_if_layers, n_ssf_layers, n_ann_layers, n_sat, n_clip, n_clamp, n_fire, n_skip,
             n_wrefill, n_arefill, n_fullwr, n_partwr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
