// act_mem -- 4 KB activation memory (256 words of 128 bits).
//
// Holds the activations passed from one layer to the next. In silicon it is a
// small compiled SRAM, cheaper per access than the weight memory; here it is an
// array with one synchronous port: en with we=0 reads addr, and rd_data is valid
// in the next cycle (held until the next read); en with we=1 writes wr_data. The
// controller never reads and writes in the same cycle. Size and port width follow
// the published design; the single-port behaviour is this design's choice.
module act_mem #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wr_data,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wr_data;
      else    rd_data   <= mem[addr];
    end
  end

endmodule
