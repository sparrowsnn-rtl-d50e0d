// tb_act_mem -- random writes and reads through the single port, including a read
// right after a write to the same word; reads have one-cycle latency.
`timescale 1ns/1ps
module tb_act_mem;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic en = 0, we = 0; logic [7:0] addr = 0;
  logic [127:0] rd_data, wr_data = 0;
  act_mem dut (.*);
  logic [127:0] model [256];
  initial begin
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(a); wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      addr = 8'($urandom); en = 1;
      if ($urandom_range(0, 1)) begin
        we = 1; wr_data = {$urandom, $urandom, $urandom, $urandom}; model[addr] = wr_data;
        @(negedge clk); we = 0;   // read back the word just written
        @(negedge clk); en = 0;
        check(rd_data == model[addr], $sformatf("read after write %0d", addr));
      end else begin
        we = 0;
        @(negedge clk); en = 0;
        check(rd_data == model[addr], $sformatf("read %0d", addr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
