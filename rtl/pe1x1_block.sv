// pe1x1_block: one 27x9 point-wise (1x1) PE block.
//
// Nine input channels enter on the nine PE rows and are broadcast across the
// 27 columns; each column holds the nine weights of one output channel and
// an adder tree sums its nine products, so the block computes 27 partial
// sums of a 9-input x 27-output slice of a 1x1 convolution per cycle. This
// follows the published 1x1 block (27x9 PEs, broadcast features,
// stationary weights, one adder tree per column into the output buffer).
//
// Weights are preloaded one row at a time: load_row selects the PE row and
// load_w carries the 27 column weights of that row. Latency: x in cycle t
// gives psum in cycle t+2 (product register, then the registered column
// sum, which stands for the output buffer).
module pe1x1_block
  import essr_pkg::*;
(
  input  logic                     clk,
  input  logic                     load_en,
  input  logic [3:0]               load_row,
  input  vec_t                     load_w,
  input  act_t [ROWS-1:0]          x,
  output acc_t [LANES-1:0]         psum
);
  logic signed [LANES-1:0][ROWS-1:0][PW-1:0] prod;

  for (genvar c = 0; c < LANES; c++) begin : g_col
    acc_t colsum;
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      pe u_pe (
        .clk  (clk),
        .wload(load_en && load_row == 4'(r)),
        .wdata(load_w[c]),
        .x    (x[r]),
        .p    (prod[c][r])
      );
    end
    adder_tree #(.N(ROWS), .IW(PW), .OW(AW)) u_tree (.in(prod[c]), .sum(colsum));
    always_ff @(posedge clk) psum[c] <= colsum;
  end
endmodule
