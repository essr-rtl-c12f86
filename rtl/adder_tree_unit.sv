// adder_tree_unit: one named adder tree of the PE array (Adder Tree-1/-2/-3).
//
// Adds the partial sums of one 1x1 group (a) and, when use_b is set, of a
// second group (b), as needed when a 54-input 1x1 layer is split over two
// groups (C54) or not (C27). It then adds the channel bias, rounds, shifts
// right by sh (the fixed-point scale of the weights), saturates to FXP10 and
// optionally applies ReLU. The bias word (27 biases) is preloaded with
// load_en. Bias handling and the rounding rule are this design's choices.
// Latency: one cycle.
module adder_tree_unit
  import essr_pkg::*;
(
  input  logic        clk,
  input  logic        load_en,
  input  vec_t        load_w,
  input  accv_t       a,
  input  accv_t       b,
  input  logic        use_b,
  input  logic [4:0]  sh,
  input  logic        relu,
  output vec_t        y
);
  vec_t bias;

  always_ff @(posedge clk) begin
    if (load_en) bias <= load_w;
    for (int c = 0; c < LANES; c++)
      y[c] <= requant(a[c] + (use_b ? b[c] : acc_t'(0)), bias[c], sh, relu);
  end
endmodule
