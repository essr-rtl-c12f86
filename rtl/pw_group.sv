// pw_group: one named 1x1 group (1x1-A, -B, -C or -D) of three 27x9 blocks.
//
// The three blocks take input channels 0-8, 9-17 and 18-26 of a 27-channel
// vector and their partial sums are added, so the group computes a full
// 27-input x 27-output slice of a 1x1 convolution per pixel per cycle. The
// three-block grouping is the one drawn for the published PE array; the
// registered three-input sum is this design's pipelining.
//
// load_row 0..26 addresses block load_row/9, PE row load_row%9.
// Latency: x in cycle t gives psum in cycle t+3.
module pw_group
  import essr_pkg::*;
(
  input  logic          clk,
  input  logic          load_en,
  input  logic [4:0]    load_row,
  input  vec_t          load_w,
  input  vec_t          x,
  output accv_t         psum
);
  acc_t [2:0][LANES-1:0] bsum;

  for (genvar b = 0; b < 3; b++) begin : g_blk
    logic [4:0] lr;
    assign lr = load_row - 5'(9 * b);
    pe1x1_block u_blk (
      .clk     (clk),
      .load_en (load_en && int'(load_row) >= 9 * b && int'(load_row) < 9 * b + 9),
      .load_row(lr[3:0]),
      .load_w  (load_w),
      .x       (x[9*b +: 9]),
      .psum    (bsum[b])
    );
  end

  for (genvar c = 0; c < LANES; c++) begin : g_sum
    always_ff @(posedge clk) psum[c] <= bsum[0][c] + bsum[1][c] + bsum[2][c];
  end
endmodule
