// output_spike_buffer -- packs neuron outputs into 128-bit activation words.
//
// Each push appends a field of 1, 2, 4, 8 or 16 bits (value_i, width 1 << code)
// above the fields already held, least significant first, so the packing mirrors
// the read order of the input spike buffer. When a push fills the 128 bits, or on
// flush with at least one field held, wr_valid is raised in that same cycle with
// the completed word on wr_data (unused high bits zero) and the buffer starts
// empty again. The controller writes wr_data to the activation memory in that
// cycle. Field widths are powers of two, so fields never straddle two words. The
// 128-bit size and the "store until 128 bits" rule are published; the flush at
// the end of a layer and the packing order are this design's.
module output_spike_buffer
  import sparrow_pkg::*;
#(
  parameter int WIDTH = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  logic [15:0]       value_i,
  input  bits_code_t        code,
  input  logic              flush,
  output logic              wr_valid,
  output logic [WIDTH-1:0]  wr_data
);

  localparam int CW = $clog2(WIDTH + 1);
  logic [WIDTH-1:0] data_q, data_n;
  logic [CW-1:0]    fill_q, fill_n;
  logic [4:0]       fbits;
  logic [WIDTH-1:0] field;

  always_comb begin
    fbits  = code_bits(code);
    field  = WIDTH'(value_i & 16'((32'd1 << fbits) - 1));
    data_n = data_q;
    fill_n = fill_q;
    if (push) begin
      data_n = data_q | (field << fill_q);
      fill_n = fill_q + CW'(fbits);
    end
    wr_valid = (fill_n == CW'(WIDTH)) || (flush && fill_n != 0);
    wr_data  = data_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q <= '0;
      fill_q <= '0;
    end else if (wr_valid) begin
      data_q <= '0;
      fill_q <= '0;
    end else begin
      data_q <= data_n;
      fill_q <= fill_n;
    end
  end

endmodule
