// input_spike_buffer -- 128-bit input activation buffer with variable-width reads.
//
// Activations arrive as 128-bit words, either from the activation memory or from
// the external sensor input. The buffer holds one word and hands it out as a FIFO
// of fields of 1, 2, 4, 8 or 16 bits, least significant field first: the field at
// the head is always visible on value_o (zero-extended to 16 bits) and pop drops
// it; last flags that the head field is the final one of the word. load takes a new word and has priority over pop in the same cycle. empty is
// high when every bit of the current word has been popped. The 128-bit size and
// the 1/2/4/8/16-bit read widths are the published ones; the LSB-first order and
// the load/pop interface are this design's.
module input_spike_buffer
  import sparrow_pkg::*;
#(
  parameter int WIDTH = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [WIDTH-1:0]  load_data,
  input  logic              pop,
  input  bits_code_t        code,      // field width = 1 << code
  output logic [15:0]       value_o,
  output logic              empty,
  output logic              last       // the head field is the last one held
);

  logic [WIDTH-1:0]           data_q;
  logic [$clog2(WIDTH+1)-1:0] left_q;   // bits not yet popped
  logic [4:0]                 fbits;

  assign fbits = code_bits(code);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q <= '0;
      left_q <= '0;
    end else if (load) begin
      data_q <= load_data;
      left_q <= ($clog2(WIDTH+1))'(WIDTH);
    end else if (pop && left_q != 0) begin
      data_q <= data_q >> fbits;
      left_q <= left_q - ($clog2(WIDTH+1))'(fbits);
    end
  end

  always_comb begin
    value_o = data_q[15:0] & 16'((32'd1 << fbits) - 1);
  end

  assign empty = (left_q == 0);
  assign last  = (left_q <= ($clog2(WIDTH+1))'(fbits)) && !empty;

endmodule
