// tb_classifier -- streams random last-layer values and checks the arg-max index
// (first index on ties) after each stream, and that clear restarts the search.
`timescale 1ns/1ps
module tb_classifier;
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
  logic clear = 0, upd = 0; logic [7:0] idx = 0, class_o; logic [15:0] val = 0, best_o;
  classifier dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      automatic int n = $urandom_range(1, 128), bi = 0, bv = -1;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        upd = 1; idx = 8'(i); val = (k % 2) ? 16'($urandom_range(0, 7)) : 16'($urandom);
        if (int'(val) > bv) begin bv = val; bi = i; end
        @(negedge clk); upd = ($urandom_range(0, 1) == 0) ? 1'b0 : 1'b0;
        if ($urandom_range(0, 4) == 0) @(negedge clk);   // idle cycles between updates
      end
      check(int'(class_o) == bi && int'(best_o) == bv, $sformatf("stream %0d: class %0d exp %0d", k, class_o, bi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
