// tb_output_spike_buffer -- pushes random fields of random widths (a width is kept
// for a whole word, as within a layer) with random flushes, and compares every
// word written with a packing model.
`timescale 1ns/1ps
module tb_output_spike_buffer;
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
  logic push = 0, flush = 0; logic [15:0] value_i = 0; bits_code_t code = 0;
  logic wr_valid; logic [127:0] wr_data;
  output_spike_buffer dut (.*);
  logic [127:0] mw; int fill;
  int nwords = 0;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    mw = 0; fill = 0;
    for (int k = 0; k < 20000; k++) begin
      int b;
      @(negedge clk);
      if (fill == 0) code = 3'($urandom_range(0, 4));
      b = 1 << code;
      push = ($urandom_range(0, 3) != 0); flush = ($urandom_range(0, 60) == 0);
      value_i = 16'($urandom);
      #1;
      if (push) begin mw = mw | (128'(value_i & 16'((32'd1 << b) - 1)) << fill); fill += b; end
      if (fill == 128 || (flush && fill != 0)) begin
        check(wr_valid && wr_data == mw, $sformatf("word %0d: %h exp %h", nwords, wr_data, mw));
        nwords++; mw = 0; fill = 0;
      end else check(!wr_valid, "no write while word incomplete");
      @(posedge clk); #1; push = 0; flush = 0;
    end
    check(nwords > 100, "enough words written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
