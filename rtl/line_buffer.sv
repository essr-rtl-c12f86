// line_buffer: two-row line buffer that turns a raster stream into 3x3
// windows for a depth-wise PE block.
//
// The stream scans the patch row by row over a padded width WG = W + 2, one
// token per valid cycle; positions outside the H x W patch are forced to
// zero on entry, which gives zero padding at the patch border (block
// convolution of each patch). A shift register of 2*WG + 3 entries holds two
// rows plus three pixels; when the token of position (r, c) enters, the
// window centred on (r-1, c-1) is complete, so the output token carries that
// centre position, one cycle after the input. With repl set, window taps
// outside the patch are replaced by the nearest in-patch tap (edge
// replication), used for bilinear interpolation. The published design gives
// only the line-buffer size; its organisation here is this design's own.
//
// Window order: win[lane][t], t = 3*dr + dc, dr/dc = 0,1,2 for offsets
// -1, 0, +1 (tap 0 = upper-left).
module line_buffer
  import essr_pkg::*;
#(
  parameter int H  = 32,
  parameter int W  = 32,
  parameter int WG = W + 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        repl,
  input  tok_t                        tin,
  input  vec_t                        din,
  output tok_t                        tout,
  output act_t [LANES-1:0][ROWS-1:0]  win
);
  localparam int DEP = 2 * WG + 3;
  vec_t sr [DEP];
  logic in_patch;

  assign in_patch = tin.valid && int'(tin.row) >= 0 && int'(tin.row) < H &&
                  int'(tin.col) >= 0 && int'(tin.col) < W;

  always_ff @(posedge clk) begin
    if (tin.valid) begin
      sr[0] <= in_patch ? din : '0;
      for (int k = 1; k < DEP; k++) sr[k] <= sr[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tout <= '0;
    else begin
      tout.valid <= tin.valid;
      if (int'(tin.col) == 0) begin
        tout.col <= 8'(WG - 1);
        tout.row <= tin.row - 8'sd2;
      end else begin
        tout.col <= tin.col - 8'sd1;
        tout.row <= tin.row - 8'sd1;
      end
    end
  end

  // tap selection: taps outside the patch read zero (the shift register may
  // hold stale data there, e.g. after reset), or with repl set the nearest
  // in-patch tap
  always_comb begin
    for (int dr = 0; dr < 3; dr++) begin
      for (int dc = 0; dc < 3; dc++) begin
        int er, ec;
        logic out_tap;
        er = dr; ec = dc;
        out_tap = (dr == 0 && int'(tout.row) <= 0) || (dr == 2 && int'(tout.row) >= H - 1) ||
                  (dc == 0 && int'(tout.col) <= 0) || (dc == 2 && int'(tout.col) >= W - 1);
        if (repl) begin
          if (dr == 0 && int'(tout.row) == 0)            er = 1;
          if (dr == 2 && int'(tout.row) == H - 1)    er = 1;
          if (dc == 0 && int'(tout.col) == 0)            ec = 1;
          if (dc == 2 && int'(tout.col) == W - 1)    ec = 1;
        end
        for (int l = 0; l < LANES; l++)
          win[l][3*dr+dc] = (out_tap && !repl) ? '0 : sr[(2-er)*WG + (2-ec)][l];
      end
    end
  end
endmodule
