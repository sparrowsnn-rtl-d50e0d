// weight_buffer -- one 128-bit weight word and its 16-way 8-bit select.
//
// The weight memory delivers sixteen 8-bit signed weights per read. This buffer
// keeps the last word fetched (load) and presents weight number idx of it on
// weight_o, so the datapath consumes one weight per cycle while the memory is
// read only once per sixteen weights. Byte k is bits [8k+7:8k]. The select from a
// 128-bit bus of 16 x 8-bit weights is taken from the published block diagram;
// the register and the byte order are this design's.
module weight_buffer
  import sparrow_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [WORD_W-1:0]           load_data,
  input  logic [$clog2(WPW)-1:0]      idx,
  output logic signed [W_BITS-1:0]    weight_o
);

  logic [WORD_W-1:0] word_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    word_q <= '0;
    else if (load) word_q <= load_data;
  end

  assign weight_o = word_q[idx*W_BITS +: W_BITS];

endmodule
