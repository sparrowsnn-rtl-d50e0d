// classifier -- arg-max over the outputs of the last layer.
//
// The output category is the index of the last-layer neuron with the highest
// value. Values arrive one neuron at a time (upd with index idx and value val)
// while the last layer runs; clear starts a new inference. The unit keeps the
// best value and its index; on a tie the lower index (the one seen first) wins.
// class_o is the registered index. The arg-max function is the published one;
// the streaming form and the tie rule are this design's.
module classifier
  import sparrow_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                upd,
  input  logic [WIDTH_W-1:0]  idx,
  input  logic [15:0]         val,
  output logic [WIDTH_W-1:0]  class_o,
  output logic [15:0]         best_o
);

  logic have_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_q  <= 1'b0;
      class_o <= '0;
      best_o  <= '0;
    end else if (clear) begin
      have_q  <= 1'b0;
      class_o <= '0;
      best_o  <= '0;
    end else if (upd && (!have_q || val > best_o)) begin
      have_q  <= 1'b1;
      class_o <= idx;
      best_o  <= val;
    end
  end

endmodule
