// pe3x3_block: one 27x9 depth-wise (3x3) PE block.
//
// Each of the 27 columns is one channel of a depth-wise 3x3 convolution: its
// nine PEs hold the nine kernel taps and receive the nine pixels of that
// channel's 3x3 window, and an adder tree sums the nine products. The block
// thus produces 27 depth-wise outputs per cycle, as in the published 3x3
// block (27x9 PEs, a feature buffer per column, adder tree per column).
//
// Weights are preloaded per tap: load_tap selects the tap (0..8, row-major,
// tap 0 = upper-left neighbour) and load_w carries its 27 column weights.
// Latency: win in cycle t gives sum in cycle t+2.
module pe3x3_block
  import essr_pkg::*;
(
  input  logic                          clk,
  input  logic                          load_en,
  input  logic [3:0]                    load_tap,
  input  vec_t                          load_w,
  input  act_t [LANES-1:0][ROWS-1:0]    win,
  output acc_t [LANES-1:0]              sum
);
  for (genvar c = 0; c < LANES; c++) begin : g_col
    logic signed [ROWS-1:0][PW-1:0] prod;
    acc_t colsum;
    for (genvar t = 0; t < ROWS; t++) begin : g_tap
      pe u_pe (
        .clk  (clk),
        .wload(load_en && load_tap == 4'(t)),
        .wdata(load_w[c]),
        .x    (win[c][t]),
        .p    (prod[t])
      );
    end
    adder_tree #(.N(ROWS), .IW(PW), .OW(AW)) u_tree (.in(prod), .sum(colsum));
    always_ff @(posedge clk) sum[c] <= colsum;
  end
endmodule
