// tb_input_spike_buffer -- loads random words and pops them at every field width,
// checking each field (LSB first), the last and empty flags, and load over pop.
`timescale 1ns/1ps
module tb_input_spike_buffer;
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
  logic load = 0, pop = 0; logic [127:0] load_data = 0; bits_code_t code = 0;
  logic [15:0] value_o; logic empty, last;
  input_spike_buffer dut (.*);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(empty && !last, "empty after reset");
    for (int k = 0; k < 300; k++) begin
      automatic logic [127:0] w = {$urandom, $urandom, $urandom, $urandom};
      int b;
      code = 3'($urandom_range(0, 4)); b = 1 << code;
      load = 1; load_data = w; @(negedge clk); load = 0;
      for (int f = 0; f < 128 / b; f++) begin
        check(value_o == 16'(w[f*b +: 16] & ((32'd1 << b) - 1)), $sformatf("field %0d width %0d", f, b));
        check(!empty, "not empty while fields remain");
        check(last == (f == 128 / b - 1), $sformatf("last flag field %0d", f));
        pop = 1; @(negedge clk); pop = 0;
      end
      check(empty && !last, "empty after all fields");
      // a load in the same cycle as a pop wins
      load = 1; pop = 1; load_data = ~w; @(negedge clk); load = 0; pop = 0;
      check(value_o == 16'(~w[15:0] & ((32'd1 << b) - 1)), "load has priority over pop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
