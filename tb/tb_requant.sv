// tb_requant -- random accumulator values, multipliers, shifts and output widths
// against ReLU, (V*mult)>>shift, clamp to 2^bits-1.
`timescale 1ns/1ps
module tb_requant;
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
  logic signed [15:0] v; logic [7:0] mult; logic [4:0] shift; bits_code_t out_code;
  logic [15:0] q_o;
  requant dut (.*);
  initial begin
    rst_n = 1;
    for (int k = 0; k < 30000; k++) begin
      longint e, mx;
      v = 16'($urandom); mult = 8'($urandom); shift = 5'($urandom_range(0, 20));
      out_code = 3'($urandom_range(0, 4)); #1;
      mx = (64'd1 << (1 << out_code)) - 1;
      e = (v > 0) ? (longint'(v) * longint'(mult)) >>> shift : 0;
      if (e > mx) e = mx;
      check(longint'(q_o) == e, $sformatf("v=%0d m=%0d s=%0d c=%0d -> %0d exp %0d", v, mult, shift, out_code, q_o, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
