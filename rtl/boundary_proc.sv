// boundary_proc: pixel shuffle and overlap-and-average boundary processing,
// including the boundary SRAM.
//
// Patches of P x P low-resolution (LR) pixels are taken with a stride of
// S = P - OVL, so neighbouring patches overlap by OVL LR pixels, which is
// 4*OVL high-resolution (HR) pixels after x4 up-scaling (published: 2 LR,
// 8 HR pixels, "slim overlap block convolution and thick overlap boundary
// processing"). Each input beat is one LR position of the current patch
// with its 48 output channels; channel colour*16 + 4i + j is HR pixel
// (4y+i, 4x+j) of that colour (pixel shuffle). Values are clamped to 8 bit.
//
// Overlaps are averaged separably, which is this design's scheme: first
// across the vertical seam, using a right-strip buffer that keeps the last
// OVL columns of the previous patch of the row; then across the horizontal
// seam, using a bottom-strip buffer that keeps the last OVL rows of the
// patch row above over the whole frame width. A position that a later
// patch will overlap is stored instead of sent out; all others leave on
// out_* with their LR frame coordinates (one 4x4x3 HR block per beat).
// average = (a + b + 1) >> 1. Latency: three cycles. The published boundary
// SRAM is 114 KB; the strips here need P*OVL + OVL*FW blocks of 48 bytes
// (187 KB at the default 1920-pixel LR width).
module boundary_proc
  import essr_pkg::*;
#(
  parameter int P   = 32,
  parameter int OVL = 2,
  parameter int FW  = 1920,     // LR frame width  (8K output / 4)
  parameter int FH  = 1080,     // LR frame height
  localparam int S   = P - OVL,
  localparam int NPX = (FW - OVL + S - 1) / S,
  localparam int NPY = (FH - OVL + S - 1) / S
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [7:0]             in_row,   // LR position inside the patch
  input  logic [7:0]             in_col,
  input  logic [7:0]             in_px,    // patch index in the frame
  input  logic [7:0]             in_py,
  input  act_t [OUTCH-1:0]       in_data,
  output logic                   out_valid,
  output logic [15:0]            out_x,    // LR frame coordinates
  output logic [15:0]            out_y,
  output logic [OUTCH-1:0][7:0]  out_pix,
  output logic                   avg_h,    // a vertical-seam average happened
  output logic                   avg_v     // a horizontal-seam average happened
);
  typedef logic [OUTCH-1:0][7:0] blk_t;

  blk_t rs [P * OVL];        // right strip of the previous patch
  blk_t bs [OVL * FW];       // bottom strip of the patch row above

  function automatic blk_t avg(input blk_t a, input blk_t b);
    blk_t r;
    for (int k = 0; k < OUTCH; k++) r[k] = 8'((9'(a[k]) + 9'(b[k]) + 9'd1) >> 1);
    return r;
  endfunction

  // ---- stage 0: clamp, classify, read right strip
  blk_t v0;
  always_comb
    for (int k = 0; k < OUTCH; k++)
      v0[k] = (in_data[k] < 0) ? 8'd0 : (in_data[k] > 255) ? 8'd255 : 8'(in_data[k]);

  logic s1_valid, s1_needh, s1_storeh;
  logic [7:0] s1_row, s1_col, s1_px, s1_py;
  blk_t s1_v, rs_q;

  always_ff @(posedge clk) begin
    rs_q <= rs[int'(in_row) * OVL + ((int'(in_col) < OVL) ? int'(in_col) : 0)];
    s1_v <= v0;
    s1_row <= in_row; s1_col <= in_col; s1_px <= in_px; s1_py <= in_py;
    s1_needh  <= (in_px != 0) && int'(in_col) < OVL;
    s1_storeh <= (int'(in_px) < NPX - 1) && int'(in_col) >= S;
  end

  // ---- stage 1: horizontal blend, store right strip, read bottom strip
  blk_t v1, s2_v, bs_q;
  logic s2_valid, s2_needv;
  logic [15:0] x1, y1;
  logic [15:0] s2_x, s2_y;
  assign v1 = s1_needh ? avg(s1_v, rs_q) : s1_v;
  assign x1 = 16'(int'(s1_px) * S + int'(s1_col));
  assign y1 = 16'(int'(s1_py) * S + int'(s1_row));

  logic go1, storev1;
  assign go1     = s1_valid && !s1_storeh;
  assign storev1 = (int'(s1_py) < NPY - 1) && int'(s1_row) >= S;

  always_ff @(posedge clk) begin
    if (s1_valid && s1_storeh) rs[int'(s1_row) * OVL + int'(s1_col) - S] <= s1_v;
    if (go1 && storev1 && int'(x1) < FW) bs[(int'(s1_row) - S) * FW + int'(x1)] <= v1;
    bs_q <= bs[((int'(s1_row) < OVL) ? int'(s1_row) : 0) * FW + ((int'(x1) < FW) ? int'(x1) : 0)];
    s2_v <= v1;
    s2_x <= x1; s2_y <= y1;
    s2_needv <= (s1_py != 0) && int'(s1_row) < OVL;
  end

  // ---- stage 2: vertical blend, emit
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s2_valid <= 1'b0; out_valid <= 1'b0;
      avg_h <= 1'b0; avg_v <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      s2_valid  <= go1 && !storev1 && int'(x1) < FW && int'(y1) < FH;
      out_valid <= s2_valid;
      avg_h <= s1_valid && s1_needh;
      avg_v <= s2_valid && s2_needv;
    end
  end

  always_ff @(posedge clk) begin
    out_pix <= s2_needv ? avg(s2_v, bs_q) : s2_v;
    out_x <= s2_x;
    out_y <= s2_y;
  end
endmodule
