// tb_weight_buffer -- loads random weight words and checks every 8-bit select.
`timescale 1ns/1ps
module tb_weight_buffer;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic load = 0; logic [127:0] load_data = 0; logic [3:0] idx = 0;
  logic signed [7:0] weight_o;
  weight_buffer dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      automatic logic [127:0] w = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); load = 1; load_data = w;
      @(negedge clk); load = 0; load_data = ~w;
      for (int i = 0; i < 16; i++) begin
        idx = 4'(i); #1;
        check(weight_o == $signed(w[8*i +: 8]), $sformatf("weight %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
