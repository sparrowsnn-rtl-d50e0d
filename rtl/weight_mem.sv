// weight_mem -- 64 KB weight and bias memory (4096 words of 128 bits).
//
// In silicon this is a compiled low-power SRAM macro; here it is written as a
// plain array so it simulates and synthesises to a memory cell. All 8-bit weights
// and biases of the model live here, sixteen to a word (byte k of a word sits at
// bits [8k+7:8k]). One synchronous read port serves the core: rd_en in a cycle
// gives rd_data in the next one, held until the next read. A separate write port
// programs the model while the core is idle. Size and port width follow the
// published design; the separate programming port is this design's choice.
module weight_mem #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
