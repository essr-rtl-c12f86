// glnpu_datapath: the group-of-layer PE array with its configurable mapping.
//
// Physical resources, as in the published GLNPU: four 1x1 groups A, B, C, D
// (each three 27x9 PE blocks, 27 inputs x 27 outputs per pixel), two 3x3
// blocks B and C (27 depth-wise channels each) fed by line buffers, three
// adder trees and two shortcut (SC) adders. One pass streams one patch
// through a group of fused layers; the mode selects how the units are
// chained (published dataflow figures and PE-utilisation table):
//
//   M_BS54  BSConv, 54 ch: in[0:26] -> A and D, in[27:53] -> B and C;
//           AT1 = A + B -> 3x3-B, AT2 = D + C -> 3x3-C; out = {3x3-C, 3x3-B}.
//           Also the first layer (3 input channels) of C54 and C27.
//   M_PW54  shortcut + 1x1, 54 ch: SC adders, then A..D, AT1 | AT2.
//   M_DS54  DSConv 54 -> 48: 3x3-B | 3x3-C -> A..D -> AT1 (0..26) | AT2 (27..47).
//   M_SFB27 a whole C27 structure-friendly fusion block in one pass:
//           1x1-B, AT1, 3x3-B, ReLU, 1x1-C, AT2, 3x3-C, ReLU, SC adder,
//           1x1-A, AT3, ReLU.
//   M_DS27  DSConv 27 -> 48: 3x3-B -> 1x1-B (0..26) | 1x1-C (27..47).
//   M_BIL   bilinear x4: the three colours are fanned out to the 48 lanes of
//           3x3-B | 3x3-C, whose fixed weights give the 16 sub-pixels.
//
// Every unit is a fixed-latency pipeline and a position token travels with
// its data, so no unit waits for another; line buffers shift the token to
// the window centre. Source data arrive one cycle after the scan token
// (tin) from the feature SRAM or input buffer; the shortcut SRAM is read at
// sc_tok and answers one cycle later. Results leave on wr_* (to the
// destination feature SRAM) or out_* (48 channels to boundary processing),
// both tagged with their patch position. Weights and biases are loaded
// beforehand over (ld_en, ld_tgt, ld_w), flat target numbering as in
// essr_pkg. The latencies, the token scheme and the mode encoding are this
// design's own.
module glnpu_datapath
  import essr_pkg::*;
#(
  parameter int H = 32,
  parameter int W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // pass configuration, stable during a pass
  input  mode_e             mode,
  input  logic              use_sc,
  input  logic              relu_at12,
  input  logic              relu_at3,
  input  logic              relu_dw,
  input  logic [4:0]        sh_pw,
  input  logic [4:0]        sh_dw,
  // weight / bias preload
  input  logic              ld_en,
  input  logic [7:0]        ld_tgt,
  input  vec_t              ld_w,
  // source stream
  input  tok_t              tin,
  input  vec_t              src_lo,     // one cycle after tin
  input  vec_t              src_hi,
  // shortcut read
  output tok_t              sc_tok,
  input  vec_t              sc_lo,      // one cycle after sc_tok
  input  vec_t              sc_hi,
  // results
  output tok_t              wr_tok,
  output vec_t              wr_lo,
  output vec_t              wr_hi,
  output tok_t              out_tok,
  output act_t [OUTCH-1:0]  out_data
);
  localparam int LAT_GRP = 3;   // pw_group
  localparam int LAT_AT  = 1;   // adder_tree_unit
  localparam int LAT_SC  = 2;   // sc_adder
  localparam int LAT_DW  = 3;   // pe3x3_block + requant

  logic c54;
  assign c54 = (mode == M_BS54) || (mode == M_PW54) || (mode == M_DS54);

  // ---------------- source stage
  tok_t s0_tok;
  tok_delay #(.D(1)) u_d_s0 (.clk, .rst_n, .i(tin), .o(s0_tok));

  // ---------------- forward declarations of unit outputs
  vec_t  scA_y, scB_y, at1_y, at2_y, at3_y, dwB_y, dwC_y;
  tok_t  scA_tok, scB_tok, at1_tok, at2_tok, at3_tok, dwB_tok, dwC_tok;
  accv_t psA, psB, psC, psD, dwB_s, dwC_s;

  // ---------------- shortcut adders
  vec_t scA_x;
  tok_t scA_tin;
  always_comb begin
    if (mode == M_SFB27) begin scA_x = dwC_y; scA_tin = dwC_tok; end
    else                 begin scA_x = src_lo; scA_tin = s0_tok; end
  end
  assign sc_tok = scA_tin;

  sc_adder u_scA (.clk, .en(use_sc), .x(scA_x), .sc(sc_lo), .y(scA_y));
  sc_adder u_scB (.clk, .en(use_sc), .x(src_hi), .sc(sc_hi), .y(scB_y));
  tok_delay #(.D(LAT_SC)) u_d_scA (.clk, .rst_n, .i(scA_tin), .o(scA_tok));
  tok_delay #(.D(LAT_SC)) u_d_scB (.clk, .rst_n, .i(s0_tok),  .o(scB_tok));

  // ---------------- 1x1 group input routing
  vec_t xA, xB, xC, xD;
  tok_t tA, tB, tC;
  always_comb begin
    xA = '0; xB = '0; xC = '0; xD = '0;
    tA = '0; tB = '0; tC = '0;
    case (mode)
      M_BS54: begin
        xA = src_lo; xD = src_lo; xB = src_hi; xC = src_hi;
        tA = s0_tok; tB = s0_tok; tC = s0_tok;
      end
      M_PW54: begin
        xA = scA_y; xD = scA_y; xB = scB_y; xC = scB_y;
        tA = scA_tok; tB = scB_tok; tC = scB_tok;
      end
      M_DS54: begin
        xA = dwB_y; xD = dwB_y; xB = dwC_y; xC = dwC_y;
        tA = dwB_tok; tB = dwC_tok; tC = dwC_tok;
      end
      M_SFB27: begin
        xB = src_lo; tB = s0_tok;
        xC = dwB_y;  tC = dwB_tok;
        xA = scA_y;  tA = scA_tok;
      end
      M_DS27: begin
        xB = dwB_y; xC = dwB_y; tB = dwB_tok; tC = dwB_tok;
      end
      default: ;
    endcase
  end

  // ---------------- 1x1 groups A, B, C, D (load targets 0..107)
  logic [1:0] ld_grp;
  logic [4:0] ld_row;
  assign ld_grp = 2'(int'(ld_tgt) / 27);
  assign ld_row = 5'(int'(ld_tgt) % 27);
  logic ld_pw;
  assign ld_pw = ld_en && int'(ld_tgt) < 108;

  pw_group u_grpA (.clk, .load_en(ld_pw && ld_grp == 2'd0), .load_row(ld_row), .load_w(ld_w), .x(xA), .psum(psA));
  pw_group u_grpB (.clk, .load_en(ld_pw && ld_grp == 2'd1), .load_row(ld_row), .load_w(ld_w), .x(xB), .psum(psB));
  pw_group u_grpC (.clk, .load_en(ld_pw && ld_grp == 2'd2), .load_row(ld_row), .load_w(ld_w), .x(xC), .psum(psC));
  pw_group u_grpD (.clk, .load_en(ld_pw && ld_grp == 2'd3), .load_row(ld_row), .load_w(ld_w), .x(xD), .psum(psD));

  // ---------------- adder trees (bias targets 126, 127, 128)
  adder_tree_unit u_at1 (.clk, .load_en(ld_en && ld_tgt == 8'd126), .load_w(ld_w),
                         .a(psB), .b(psA), .use_b(c54), .sh(sh_pw), .relu(relu_at12), .y(at1_y));
  adder_tree_unit u_at2 (.clk, .load_en(ld_en && ld_tgt == 8'd127), .load_w(ld_w),
                         .a(psC), .b(psD), .use_b(c54), .sh(sh_pw), .relu(relu_at12), .y(at2_y));
  adder_tree_unit u_at3 (.clk, .load_en(ld_en && ld_tgt == 8'd128), .load_w(ld_w),
                         .a(psA), .b(psD), .use_b(1'b0), .sh(sh_pw), .relu(relu_at3), .y(at3_y));
  tok_delay #(.D(LAT_GRP + LAT_AT)) u_d_at1 (.clk, .rst_n, .i(tB), .o(at1_tok));
  tok_delay #(.D(LAT_GRP + LAT_AT)) u_d_at2 (.clk, .rst_n, .i(tC), .o(at2_tok));
  tok_delay #(.D(LAT_GRP + LAT_AT)) u_d_at3 (.clk, .rst_n, .i(tA), .o(at3_tok));

  // ---------------- line buffers and 3x3 blocks
  vec_t lbB_x, lbC_x;
  tok_t lbB_t, lbC_t, lbB_o, lbC_o;
  always_comb begin
    lbB_x = '0; lbC_x = '0; lbB_t = '0; lbC_t = '0;
    case (mode)
      M_BS54, M_SFB27: begin
        lbB_x = at1_y; lbB_t = at1_tok; lbC_x = at2_y; lbC_t = at2_tok;
      end
      M_DS54: begin
        lbB_x = src_lo; lbB_t = s0_tok; lbC_x = src_hi; lbC_t = s0_tok;
      end
      M_DS27: begin
        lbB_x = src_lo; lbB_t = s0_tok;
      end
      M_BIL: begin
        // fan the three colours out to output lanes n = colour*16 + sub-pixel
        for (int n = 0; n < LANES; n++) begin
          lbB_x[n] = src_lo[n / 16];
          if (LANES + n < OUTCH) lbC_x[n] = src_lo[(LANES + n) / 16];
        end
        lbB_t = s0_tok; lbC_t = s0_tok;
      end
      default: ;
    endcase
  end

  act_t [LANES-1:0][ROWS-1:0] winB, winC;
  line_buffer #(.H(H), .W(W)) u_lbB (.clk, .rst_n, .repl(mode == M_BIL), .tin(lbB_t), .din(lbB_x), .tout(lbB_o), .win(winB));
  line_buffer #(.H(H), .W(W)) u_lbC (.clk, .rst_n, .repl(mode == M_BIL), .tin(lbC_t), .din(lbC_x), .tout(lbC_o), .win(winC));

  pe3x3_block u_dwB (.clk, .load_en(ld_en && int'(ld_tgt) >= 108 && int'(ld_tgt) < 117),
                     .load_tap(4'(int'(ld_tgt) - 108)), .load_w(ld_w), .win(winB), .sum(dwB_s));
  pe3x3_block u_dwC (.clk, .load_en(ld_en && int'(ld_tgt) >= 117 && int'(ld_tgt) < 126),
                     .load_tap(4'(int'(ld_tgt) - 117)), .load_w(ld_w), .win(winC), .sum(dwC_s));
  adder_tree_unit u_dwqB (.clk, .load_en(ld_en && ld_tgt == 8'd129), .load_w(ld_w),
                          .a(dwB_s), .b(dwB_s), .use_b(1'b0), .sh(sh_dw), .relu(relu_dw), .y(dwB_y));
  adder_tree_unit u_dwqC (.clk, .load_en(ld_en && ld_tgt == 8'd130), .load_w(ld_w),
                          .a(dwC_s), .b(dwC_s), .use_b(1'b0), .sh(sh_dw), .relu(relu_dw), .y(dwC_y));
  tok_delay #(.D(LAT_DW)) u_d_dwB (.clk, .rst_n, .i(lbB_o), .o(dwB_tok));
  tok_delay #(.D(LAT_DW)) u_d_dwC (.clk, .rst_n, .i(lbC_o), .o(dwC_tok));

  // ---------------- results
  always_comb begin
    wr_tok = '0; wr_lo = '0; wr_hi = '0; out_tok = '0; out_data = '0;
    case (mode)
      M_BS54:  begin wr_tok = dwB_tok; wr_lo = dwB_y; wr_hi = dwC_y; end
      M_PW54:  begin wr_tok = at1_tok; wr_lo = at1_y; wr_hi = at2_y; end
      M_SFB27: begin wr_tok = at3_tok; wr_lo = at3_y; end
      M_DS54, M_DS27: begin
        out_tok = at1_tok;
        for (int n = 0; n < LANES; n++) begin
          out_data[n] = at1_y[n];
          if (LANES + n < OUTCH) out_data[LANES + n] = at2_y[n];
        end
      end
      M_BIL: begin
        out_tok = dwB_tok;
        for (int n = 0; n < LANES; n++) begin
          out_data[n] = dwB_y[n];
          if (LANES + n < OUTCH) out_data[LANES + n] = dwC_y[n];
        end
      end
      default: ;
    endcase
  end
endmodule
