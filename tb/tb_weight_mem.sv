// tb_weight_mem -- writes random words to random addresses and reads them back
// through the synchronous read port (one-cycle latency, output held between reads).
`timescale 1ns/1ps
module tb_weight_mem;
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
  logic rd_en = 0, wr_en = 0; logic [11:0] rd_addr = 0, wr_addr = 0;
  logic [127:0] rd_data, wr_data = 0;
  weight_mem dut (.*);
  logic [127:0] model [4096];
  bit valid [4096];
  initial begin
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'($urandom); wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[wr_addr] = wr_data; valid[wr_addr] = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 3000; k++) begin
      int a;
      do a = $urandom_range(0, 4095); while (!valid[a]);
      @(negedge clk); rd_en = 1; rd_addr = 12'(a);
      @(negedge clk); rd_en = 0; rd_addr = ~rd_addr;
      check(rd_data == model[a], $sformatf("read %0d", a));
      @(negedge clk);
      check(rd_data == model[a], "read data held while rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
