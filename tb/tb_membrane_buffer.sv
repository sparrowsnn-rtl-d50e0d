// tb_membrane_buffer -- random writes, reads and clears against an array model.
`timescale 1ns/1ps
module tb_membrane_buffer;
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
  logic clear = 0, wr_en = 0; logic [3:0] wr_idx = 0, rd_idx = 0;
  logic signed [15:0] wr_data = 0, rd_data;
  membrane_buffer dut (.*);
  int model [16];
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) model[i] = 0;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      clear = ($urandom_range(0, 40) == 0); wr_en = 1'($urandom);
      wr_idx = 4'($urandom); wr_data = 16'($urandom);
      @(posedge clk); #1;
      if (clear) for (int i = 0; i < 16; i++) model[i] = 0;
      else if (wr_en) model[wr_idx] = wr_data;
      clear = 0; wr_en = 0;
      for (int i = 0; i < 16; i++) begin
        rd_idx = 4'(i); #0.1;
        check(int'(rd_data) == model[i], $sformatf("entry %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
