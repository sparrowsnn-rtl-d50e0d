// tb_config_regs -- writes random values to every configuration register and
// checks the decoded outputs against a model of the register map; checks reset.
`timescale 1ns/1ps
module tb_config_regs;
  import sparrow_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic cfg_we = 0; logic [7:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic [2:0] num_layers; logic [7:0] in_width; bits_code_t in_code;
  layer_cfg_t layer_cfg [6];
  config_regs dut (.*);
  logic [31:0] regs [32];
  initial begin
    for (int a = 0; a < 32; a++) regs[a] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(num_layers == 0 && in_width == 0 && layer_cfg[5] == '0, "reset values");
    for (int k = 0; k < 400; k++) begin
      automatic int a = $urandom_range(0, 31);
      automatic logic [31:0] d = $urandom;
      cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = d; regs[a] = d;
      @(negedge clk); cfg_we = 0;
      check(num_layers == regs[0][2:0], "num_layers");
      check(in_width == regs[1][7:0] && in_code == regs[1][10:8], "input config");
      for (int l = 0; l < 6; l++) begin
        check(layer_cfg[l].ltype == layer_type_e'(regs[4+4*l][1:0]) && layer_cfg[l].width == regs[4+4*l][15:8]
              && layer_cfg[l].out_code == regs[4+4*l][18:16] && layer_cfg[l].tsteps == regs[4+4*l][28:24],
              $sformatf("layer %0d word 0", l));
        check(layer_cfg[l].threshold == regs[5+4*l][15:0], $sformatf("layer %0d threshold", l));
        check(layer_cfg[l].rq_mult == regs[6+4*l][7:0] && layer_cfg[l].rq_shift == regs[6+4*l][12:8],
              $sformatf("layer %0d requant", l));
      end
    end
    // writes with cfg_we low are ignored
    cfg_addr = 8'h00; cfg_wdata = ~regs[0]; @(negedge clk);
    check(num_layers == regs[0][2:0], "write without cfg_we ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
