// tb_mac_unit -- random operands in both modes against an integer model with
// saturation at the 16-bit signed range; directed cases at the limits.
`timescale 1ns/1ps
module tb_mac_unit;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic if_mode, spike; logic signed [7:0] weight; logic [15:0] act;
  logic signed [15:0] acc_i, acc_o;
  mac_unit dut (.*);
  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  initial begin
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      longint e;
      if_mode = 1'($urandom); spike = 1'($urandom); weight = 8'($urandom);
      act = (k % 3 == 0) ? 16'($urandom) : 16'($urandom_range(0, 31)); acc_i = 16'($urandom);
      if (k == 0) begin if_mode = 0; weight = 127;  act = 16'hffff; acc_i = 0; end
      if (k == 1) begin if_mode = 0; weight = -128; act = 16'hffff; acc_i = 0; end
      if (k == 2) begin if_mode = 1; spike = 1; weight = 127; acc_i = 32767; end
      #1;
      if (if_mode) e = spike ? longint'(acc_i) + longint'(weight) : longint'(acc_i);
      else         e = longint'(acc_i) + longint'(weight) * longint'(act);
      check(int'(acc_o) == sat(e), $sformatf("mode %0d w %0d a %0d acc %0d -> %0d", if_mode, weight, act, acc_i, acc_o));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
