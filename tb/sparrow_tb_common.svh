// sparrow_tb_common.svh -- shared body of the whole-core testbenches: clock, DUT,
// external input memory, watchdog (WATCHDOG_CYCLES, set by the includer), the
// reference model of the core's arithmetic, model/weight/config loading, the
// expected cycle count and run_one(), which runs and checks one inference.
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [7:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic        wm_we = 0;
  logic [11:0] wm_waddr = 0;
  logic [127:0] wm_wdata = 0;
  logic        ext_rd_en;
  logic [7:0]  ext_rd_addr;
  logic [127:0] ext_rd_data;
  logic        start = 0, busy, done;
  logic [7:0]  class_o;

  sparrow_top dut (.*);

  // external input memory: one-cycle read latency
  logic [127:0] ext_mem [256];
  always_ff @(posedge clk) if (ext_rd_en) ext_rd_data <= ext_mem[ext_rd_addr];

  int checks = 0, failures = 0;
  int cycles = 0;
  always_ff @(posedge clk) cycles <= cycles + 1;

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- network
  int nl, inw, incode;
  int ty[6], wd[6], oc[6], ts[6], th[6], rm[6], rs[6];
  int wt[6][128][256];   // [layer][out][in]; only the first layer may exceed 128 inputs
  int bs[6][128];
  int act_in[256][32];   // layer-0 input: value per input (SSF/ANN) or spike per t (IF)
  int outv[6][128];      // reference outputs: value (SSF/ANN) or spike count (IF)
  int outs[6][128][32];  // IF spike trains

  // mechanism counters
  int n_if_layers = 0, n_ssf_layers = 0, n_ann_layers = 0, n_sat = 0, n_clip = 0, n_clamp = 0;
  int n_fire = 0, n_skip = 0;
  int n_wrefill = 0, n_arefill = 0;
  int n_fullwr = 0, n_partwr = 0;
  int n_twopass = 0;      // IF neurons whose window needed two passes

  function automatic int sat16(int v);
    if (v > 32767)  begin n_sat++; return 32767;  end
    if (v < -32768) begin n_sat++; return -32768; end
    return v;
  endfunction

  function automatic int bits_of(int code); return 1 << code; endfunction

  // ---------------------------------------------------------------- reference
  task automatic ref_model();
    int nin, v, vb[32], vm, T, q, tmax, cnt, maxb;
    for (int l = 0; l < nl; l++) begin
      nin = (l == 0) ? inw : wd[l-1];
      T = ts[l];
      for (int n = 0; n < wd[l]; n++) begin
        if (ty[l] == 0) begin // IF
          for (int t = 0; t < 32; t++) vb[t] = 0;
          if (T > 16) n_twopass++;
          for (int i = 0; i < nin; i++)
            for (int t = 0; t < T; t++) begin
              int s = (l == 0) ? act_in[i][t] : outs[l-1][i][t];
              if (s != 0) vb[t] = sat16(vb[t] + wt[l][n][i]);
              else n_skip++;
            end
          for (int t = 0; t < T; t++) vb[t] = sat16(vb[t] + bs[l][n]);
          vm = 0; cnt = 0;
          for (int t = 0; t < T; t++) begin
            vm += vb[t];
            if (vm >= th[l]) begin outs[l][n][t] = 1; vm -= th[l]; cnt++; n_fire++; end
            else outs[l][n][t] = 0;
          end
          outv[l][n] = cnt;
        end else begin
          v = 0;
          for (int i = 0; i < nin; i++) begin
            int a = (l == 0) ? act_in[i][0] : outv[l-1][i];
            v = sat16(v + wt[l][n][i] * a);
          end
          tmax = (ty[l] == 1) ? ts[l] : (1 << bits_of(oc[l])) - 1;
          if (ty[l] == 1) begin
            v = sat16(v + bs[l][n] * tmax);
            if (v <= 0) q = 0;
            else if (th[l] == 0) q = tmax;
            else q = v / th[l];
            if (q > tmax) begin q = tmax; n_clip++; end
          end else begin
            v = sat16(v + bs[l][n]);
            q = (v > 0) ? ((v * rm[l]) >>> rs[l]) : 0;
            if (q > tmax) begin q = tmax; n_clamp++; end
          end
          outv[l][n] = q;
        end
      end
    end
  endtask

  // ---------------------------------------------------------------- programming
  task automatic cfg_write(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  logic [127:0] img [4096];
  int wwords;

  task automatic build_and_load();
    int a, nin, wpn;
    a = 0;
    for (int k = 0; k < 4096; k++) img[k] = '0;
    for (int l = 0; l < nl; l++) begin
      nin = (l == 0) ? inw : wd[l-1];
      wpn = (nin + 15) / 16;
      for (int n = 0; n < wd[l]; n++) begin
        for (int i = 0; i < nin; i++) img[a + i/16][(i%16)*8 +: 8] = 8'(wt[l][n][i]);
        a += wpn;
      end
      for (int n = 0; n < wd[l]; n++) img[a + n/16][(n%16)*8 +: 8] = 8'(bs[l][n]);
      a += (wd[l] + 15) / 16;
    end
    wwords = a;
    for (int k = 0; k < a; k++) begin
      @(negedge clk); wm_we = 1; wm_waddr = 12'(k); wm_wdata = img[k];
    end
    @(negedge clk); wm_we = 0;
    cfg_write(0, nl);
    cfg_write(1, inw | (incode << 8));
    for (int l = 0; l < nl; l++) begin
      cfg_write(4 + 4*l, ty[l] | (wd[l] << 8) | (oc[l] << 16) | (ts[l] << 24));
      cfg_write(5 + 4*l, th[l]);
      cfg_write(6 + 4*l, rm[l] | (rs[l] << 8));
    end
    // external input words
    for (int k = 0; k < 256; k++) ext_mem[k] = '0;
    if (ty[0] == 0) begin
      for (int i = 0; i < inw; i++)
        for (int t = 0; t < ts[0]; t++) begin
          int p = i * ts[0] + t;
          ext_mem[p/128][p%128] = 1'(act_in[i][t]);
        end
    end else begin
      int b = bits_of(incode);
      for (int i = 0; i < inw; i++) begin
        int p = i * b;
        ext_mem[p/128][p%128 +: 16] = ext_mem[p/128][p%128 +: 16] | 16'(act_in[i][0]);
      end
    end
  endtask

  // expected cycle count of one inference (documented controller timing)
  function automatic int expected_cycles();
    int c, nin, T, bits, abits, per_word;
    c = 1; // S_DONE (counted from the cycle after the start pulse)
    for (int l = 0; l < nl; l++) begin
      nin = (l == 0) ? inw : wd[l-1];
      T = (ty[l] == 0) ? ts[l] : 1;
      abits = (ty[l] == 0) ? 1 : ((l == 0) ? bits_of(incode) : bits_of(oc[l-1]));
      per_word = 128 / abits;
      c += 1 + 1; // S_LAYER, S_FLUSH
      for (int n = 0; n < wd[l]; n++) begin
        int pops = nin * T, refills = 0, wref = (nin - 1) / 16, aref = (pops - 1) / per_word;
        // IF windows over 16 timesteps run in two passes of 16 and T-16 timesteps
        int npass = (T > 16) ? 2 : 1;
        // a weight and an input refill falling on the same step share one bubble
        for (int s = 1; s < pops; s++)
          if ((s % T == 0 && (s / T) % 16 == 0) || (s % per_word == 0)) refills++;
        n_wrefill += wref; n_arefill += aref;
        for (int p = 0; p < npass; p++) begin
          int len = (p == 0) ? ((T > 16) ? 16 : T) : T - 16;
          c += 1 + 1 + pops + refills; // S_NEURON, S_LOAD, S_ACC steps, bubbles
          c += 2 + len + len;          // S_BFETCH, S_BLOAD, S_BIAS, S_FIRE
        end
        c += 1;                        // S_NEXT
      end
    end
    return c;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int exp_class, best, start_cyc, ncyc, l_last, pos, b;
  logic [127:0] exp_word;

  // one inference of the network held in the model arrays: reference, load, run, compare
  task automatic run_one(int r);
    for (int l = 0; l < nl; l++)
      if (ty[l] == 0) n_if_layers++; else if (ty[l] == 1) n_ssf_layers++; else n_ann_layers++;
    ref_model();
    build_and_load();
    @(negedge clk); start = 1; start_cyc = cycles;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    ncyc = cycles - start_cyc;
    @(negedge clk);
    // class index
    l_last = nl - 1;
    exp_class = 0; best = outv[l_last][0];
    for (int n = 1; n < wd[l_last]; n++) if (outv[l_last][n] > best) begin best = outv[l_last][n]; exp_class = n; end
    check(int'(class_o) == exp_class, $sformatf("run %0d class %0d expected %0d", r, class_o, exp_class));
    // last layer outputs in activation memory
    b = (ty[l_last] == 0) ? 1 : bits_of(oc[l_last]);
    for (int w = 0; w < (wd[l_last] * (ty[l_last] == 0 ? ts[l_last] : 1) * b + 127) / 128; w++) begin
      exp_word = '0;
      for (int p = 0; p < 128 / b; p++) begin
        pos = w * (128 / b) + p;
        if (ty[l_last] == 0) begin
          if (pos < wd[l_last] * ts[l_last]) exp_word[p] = 1'(outs[l_last][pos / ts[l_last]][pos % ts[l_last]]);
        end else if (pos < wd[l_last]) exp_word[p*b +: 16] = exp_word[p*b +: 16] | 16'(outv[l_last][pos]);
      end
      check(dut.u_amem.mem[(l_last % 2) * 128 + w] == exp_word,
            $sformatf("run %0d output word %0d: %h expected %h", r, w, dut.u_amem.mem[(l_last % 2) * 128 + w], exp_word));
    end
    check(ncyc == expected_cycles(), $sformatf("run %0d cycles %0d expected %0d", r, ncyc, expected_cycles()));
    $display("run %0d: layers=%0d in=%0d type0=%0d class=%0d cycles=%0d", r, nl, inw, ty[0], class_o, ncyc);
  endtask

  // count output-word writes as the core performs them
  always_ff @(posedge clk) if (dut.ob_wr_valid) begin
    if (dut.ob_flush) n_partwr <= n_partwr + 1;
    else              n_fullwr <= n_fullwr + 1;
  end

