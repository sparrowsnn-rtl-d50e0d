// tb_controller -- runs the FSM controller alone for random network configurations.
// The buffers around it are replaced by small models (a bit counter standing in for
// the input spike buffer's "last" flag, a fill counter for the output buffer's
// word-complete signal, random spikes). It records every weight, activation and
// external read address the controller issues, every output push and classifier
// update, and compares them with the sequences the documented memory layout
// implies; it also checks the cycle count of an inference and the busy/done timing.
`timescale 1ns/1ps
module tb_controller;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic start = 0, busy, done;
  logic [2:0] num_layers = 0; logic [7:0] in_width = 0; bits_code_t in_code = 0;
  layer_cfg_t layer_cfg [6];
  logic wm_rd_en; logic [11:0] wm_rd_addr;
  logic am_en, am_we; logic [7:0] am_addr;
  logic ext_rd_en; logic [7:0] ext_rd_addr; logic src_ext;
  logic isb_load, isb_pop, isb_last; bits_code_t isb_code;
  logic wb_load; logic [3:0] wb_idx;
  logic if_mode, bias_phase, spike_force; logic [4:0] bias_mult;
  logic mb_clear, mb_wr_en; logic [3:0] mb_idx;
  logic cs_clear, cs_step, cs_spike; logic [4:0] t_max;
  layer_type_e ltype; logic [15:0] threshold; logic [7:0] rq_mult; logic [4:0] rq_shift;
  logic ob_push, ob_flush, ob_wr_valid; bits_code_t ob_code;
  logic cls_clear, cls_upd; logic [7:0] cls_idx; logic [15:0] if_count;

  controller dut (.*);

  // input spike buffer model: bits left in the current word
  int left = 0;
  assign isb_last = (left > 0) && (left <= (1 << isb_code));
  always_ff @(posedge clk)
    if (isb_load) left <= 128;
    else if (isb_pop && left > 0) left <= left - (1 << isb_code);
  // output buffer model
  int ofill = 0;
  always_comb ob_wr_valid = (ob_push && ofill + (1 << ob_code) == 128) || (ob_flush && (ofill + (ob_push ? (1 << ob_code) : 0)) != 0);
  always_ff @(posedge clk)
    if (ob_wr_valid) ofill <= 0; else if (ob_push) ofill <= ofill + (1 << ob_code);
  always_ff @(posedge clk) cs_spike <= 1'($urandom);

  int wseq[$], aseq[$], eseq[$], pushes[$], upds;
  int cycles = 0;
  always_ff @(posedge clk) begin
    cycles <= cycles + 1;
    if (wm_rd_en) wseq.push_back(wm_rd_addr);
    if (am_en && !am_we) aseq.push_back(am_addr);
    if (ext_rd_en) eseq.push_back(ext_rd_addr);
    if (ob_push) pushes.push_back(cls_idx);
    if (cls_upd) upds <= upds + 1;
  end

  int nl, ty[6], wd[6], oc[6], ts[6], inw, icode;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int ew[$], ea[$], ee[$], base, c, t0, nin, wpn, T, abits, words, npush;
      automatic bit all_if = (r % 3 == 0);
      automatic int Tif = $urandom_range(1, 31);
      nl = (r % 4 == 0) ? $urandom_range(1, 3) : $urandom_range(1, 6);  // keep within 64 KB
      inw = $urandom_range(1, 128); icode = $urandom_range(0, 4);
      for (int l = 0; l < 6; l++) layer_cfg[l] = '0;
      for (int l = 0; l < nl; l++) begin
        ty[l] = all_if ? 0 : $urandom_range(1, 2);
        wd[l] = (r % 4 == 0) ? 128 : $urandom_range(1, 40);
        oc[l] = $urandom_range(0, 4); ts[l] = Tif;
        layer_cfg[l].ltype = layer_type_e'(ty[l]); layer_cfg[l].width = 8'(wd[l]);
        layer_cfg[l].out_code = 3'(oc[l]); layer_cfg[l].tsteps = 5'(ts[l]);
      end
      num_layers = 3'(nl); in_width = 8'(inw); in_code = 3'(icode);
      // expected sequences and cycle count
      base = 0; c = 1;
      for (int l = 0; l < nl; l++) begin
        nin = (l == 0) ? inw : wd[l-1];
        wpn = (nin + 15) / 16;
        T = (ty[l] == 0) ? ts[l] : 1;
        abits = (ty[l] == 0) ? 1 : (1 << ((l == 0) ? icode : oc[l-1]));
        words = (nin * T * abits + 127) / 128;
        c += 2;
        for (int n = 0; n < wd[l]; n++) begin
          automatic int bub = 0;
          // IF windows over 16 timesteps: two passes of 16 and T-16 timesteps,
          // each re-reading the neuron's weights, bias word and inputs
          automatic int npass = (T > 16) ? 2 : 1;
          for (int s = 1; s < nin * T; s++)
            if ((s % T == 0 && (s / T) % 16 == 0) || (s % (128 / abits) == 0)) bub++;
          for (int p = 0; p < npass; p++) begin
            automatic int len = (p == 0) ? ((T > 16) ? 16 : T) : T - 16;
            for (int k = 0; k < wpn; k++) ew.push_back(base + n * wpn + k);
            ew.push_back(base + wd[l] * wpn + n / 16);
            for (int k = 0; k < words; k++)
              if (l == 0) ee.push_back(k); else ea.push_back(((l - 1) % 2) * 128 + k);
            c += 2 + nin * T + bub + 2 + 2 * len;
          end
          c += 1;
        end
        base += wd[l] * wpn + (wd[l] + 15) / 16;
      end
      npush = 0;
      for (int l = 0; l < nl; l++) npush += wd[l] * ((ty[l] == 0) ? ts[l] : 1);
      wseq.delete(); aseq.delete(); eseq.delete(); pushes.delete(); upds = 0;
      @(negedge clk); start = 1; t0 = cycles;
      @(negedge clk); start = 0;
      check(busy, "busy after start");
      while (!done) @(posedge clk);
      check(cycles - t0 == c, $sformatf("run %0d: %0d cycles, expected %0d", r, cycles - t0, c));
      @(negedge clk);
      check(!busy, "idle after done");
      check(wseq.size() == ew.size(), $sformatf("run %0d: %0d weight reads, expected %0d", r, wseq.size(), ew.size()));
      for (int k = 0; k < ew.size() && k < wseq.size(); k++)
        check(wseq[k] == ew[k], $sformatf("run %0d weight read %0d: %0d expected %0d", r, k, wseq[k], ew[k]));
      check(aseq.size() == ea.size() && eseq.size() == ee.size(), $sformatf("run %0d: input read counts", r));
      for (int k = 0; k < ea.size() && k < aseq.size(); k++) check(aseq[k] == ea[k], "activation read address");
      for (int k = 0; k < ee.size() && k < eseq.size(); k++) check(eseq[k] == ee[k], "external read address");
      check(pushes.size() == npush, $sformatf("run %0d: %0d pushes expected %0d", r, pushes.size(), npush));
      check(upds == wd[nl-1], "classifier updates = last layer width");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
