// essr_pkg: types, constants and helper functions shared by the ESSR
// super-resolution accelerator.
//
// All activations and weights are 10-bit signed fixed point (FXP10), as in
// the reference design. A PE group is 27 lanes wide; two groups give the 54
// channels of the full (C54) subnet, one group gives the half (C27) subnet.
// The pass table (get_pass) encodes how each layer group of each subnet is
// mapped onto the four 1x1 groups (A, B, C, D), the two 3x3 blocks (B, C),
// the three adder trees and the two shortcut adders, and where its weights
// sit in the weight SRAM. The weight layout, the requantisation rule and the
// pass encoding are this design's own choices; the mapping of layers onto
// the named blocks follows the published dataflow figures.
package essr_pkg;

  localparam int DW      = 10;            // FXP10 activation / weight width
  localparam int LANES   = 27;            // output columns of one PE block
  localparam int ROWS    = 9;             // PE rows of one block
  localparam int CH      = 2 * LANES;     // 54 channels of the C54 subnet
  localparam int OUTCH   = 48;            // 3 colours x 4 x 4 sub-pixels
  localparam int PW      = 2 * DW;        // product width
  localparam int AW      = 26;            // partial-sum / accumulator width
  localparam int WWORD   = LANES * DW;    // weight SRAM word: 27 weights
  localparam int NSFB    = 5;             // structure-friendly fusion blocks
  localparam int NTGT    = 131;           // flat weight-load targets
  localparam int NCMD    = 10;            // load commands per pass

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef act_t [LANES-1:0]     vec_t;    // one 27-lane group vector
  typedef acc_t [LANES-1:0]     accv_t;

  typedef enum logic [1:0] {SUB_BIL = 2'd0, SUB_C27 = 2'd1, SUB_C54 = 2'd2} subnet_e;

  // Pass (one iteration of the PE array over the patch) routing modes.
  typedef enum logic [2:0] {
    M_BS54  = 3'd0,   // 1x1 (A+B | D+C) -> 3x3 (B | C)          BSConv
    M_PW54  = 3'd1,   // shortcut add -> 1x1 (A+B | D+C)         1x1 + SC
    M_DS54  = 3'd2,   // 3x3 (B | C) -> 1x1 (A+B | D+C), 48 out  DSConv
    M_SFB27 = 3'd3,   // 1x1-B,3x3-B,1x1-C,3x3-C,SC,1x1-A       SFB
    M_DS27  = 3'd4,   // 3x3-B -> 1x1-B | 1x1-C, 48 out          DSConv
    M_BIL   = 3'd5    // bilinear x4 on 3x3-B | 3x3-C, 48 out
  } mode_e;

  // Token that travels beside the data: its patch position.
  typedef struct packed {
    logic              valid;
    logic signed [7:0] row;
    logic signed [7:0] col;
  } tok_t;

  // Weight-load command: copy n words from weight SRAM address src (or
  // generate them) into consecutive flat load targets starting at dst.
  // Flat targets: 1x1 group g block k row r -> (3g+k)*9+r (0..107);
  // 3x3-B tap t -> 108+t; 3x3-C tap t -> 117+t; bias AT1 126, AT2 127,
  // AT3 128, 3x3-B 129, 3x3-C 130.
  typedef enum logic [1:0] {SRC_SRAM = 2'd0, SRC_BIL = 2'd1, SRC_ZERO = 2'd2} wsrc_e;
  typedef struct packed {
    wsrc_e       kind;
    logic [11:0] src;
    logic [7:0]  dst;
    logic [7:0]  n;     // 0 = unused command
  } lcmd_t;

  typedef enum logic [1:0] {B_INBUF = 2'd0, B_S = 2'd1, B_X = 2'd2, B_Y = 2'd3} brole_e;

  typedef struct packed {
    mode_e           mode;
    logic            first;     // source is the input buffer
    logic            to_out;    // result goes to boundary processing
    logic            relu_at12; // ReLU after adder trees 1 and 2
    logic            relu_dw;   // ReLU after the 3x3 blocks
    logic            relu_at3;  // ReLU after adder tree 3
    logic [1:0]      ndw;       // 3x3 stages in the pass (scan overhang)
    brole_e          src;
    brole_e          dst;
    logic            use_sc;
    logic [4:0]      sh_pw;     // requant shift after a 1x1 stage
    logic [4:0]      sh_dw;     // requant shift after a 3x3 stage
    lcmd_t [NCMD-1:0] cmd;
  } pass_t;

  // Weight SRAM layout of the C54 layers (C27 reuses sub-blocks of them).
  // L0 first BSConv(3,54): A blk0(9) D blk0(9) DWB(9) DWC(9) bias x4 = 40
  // BSConv / DSConv: A B C D (108) DWB DWC (18) bAT1 bAT2 bDWB bDWC = 130
  // 1x1 + shortcut:  A B C D (108) bAT1 bAT2                     = 110
  localparam int NLAYER  = 2 + 3 * NSFB;  // 17 C54 layers
  localparam int WDEPTH  = 2048;

  // Closed form of: 40 words for layer 0, then 130, 130, 110 repeating.
  function automatic int layer_base(input int l);
    if (l <= 0) return 0;
    return 40 + (l - 1) * 130 - 20 * ((l - 1) / 3);
  endfunction

  function automatic int num_passes(input subnet_e s);
    case (s)
      SUB_C54: return 2 + 3 * NSFB;
      SUB_C27: return 2 + NSFB;
      default: return 1;
    endcase
  endfunction

  function automatic lcmd_t mk(input wsrc_e k, input int src, input int dst, input int n);
    lcmd_t c;
    c.kind = k; c.src = 12'(src); c.dst = 8'(dst); c.n = 8'(n);
    return c;
  endfunction

  // Shift amounts of the fixed-point requantisation (weights carry WFRAC
  // fractional bits; activations are plain integers at pixel scale).
  localparam int WFRAC = 6;

  function automatic pass_t get_pass(input subnet_e s, input int p);
    pass_t q;
    int b;
    q = '0;
    q.sh_pw = 5'(WFRAC);
    q.sh_dw = 5'(WFRAC);
    case (s)
      SUB_C54: begin
        if (p == 0) begin
          b = layer_base(0);
          q.mode = M_BS54; q.first = 1'b1; q.src = B_INBUF; q.dst = B_S; q.ndw = 2'd1;
          q.cmd[0] = mk(SRC_SRAM, b,      0,   9);
          q.cmd[1] = mk(SRC_SRAM, b + 9,  81,  9);
          q.cmd[2] = mk(SRC_SRAM, b + 18, 108, 18);
          q.cmd[3] = mk(SRC_SRAM, b + 36, 126, 2);
          q.cmd[4] = mk(SRC_SRAM, b + 38, 129, 2);
        end else if (p == num_passes(SUB_C54) - 1) begin
          b = layer_base(NLAYER - 1);
          q.mode = M_DS54; q.src = B_S; q.to_out = 1'b1; q.ndw = 2'd1;
          q.cmd[0] = mk(SRC_SRAM, b,       0,   108);
          q.cmd[1] = mk(SRC_SRAM, b + 108, 108, 18);
          q.cmd[2] = mk(SRC_SRAM, b + 126, 126, 2);
          q.cmd[3] = mk(SRC_SRAM, b + 128, 129, 2);
        end else begin
          b = layer_base(p);
          case ((p - 1) % 3)
            0: begin q.mode = M_BS54; q.src = B_S; q.dst = B_X; q.relu_dw = 1'b1; q.ndw = 2'd1; end
            1: begin q.mode = M_BS54; q.src = B_X; q.dst = B_Y; q.relu_dw = 1'b1; q.ndw = 2'd1; end
            default: begin q.mode = M_PW54; q.src = B_Y; q.dst = B_X; q.use_sc = 1'b1; q.relu_at12 = 1'b1; end
          endcase
          q.cmd[0] = mk(SRC_SRAM, b, 0, 108);
          if (q.mode == M_PW54) begin
            q.cmd[1] = mk(SRC_SRAM, b + 108, 126, 2);
          end else begin
            q.cmd[1] = mk(SRC_SRAM, b + 108, 108, 18);
            q.cmd[2] = mk(SRC_SRAM, b + 126, 126, 2);
            q.cmd[3] = mk(SRC_SRAM, b + 128, 129, 2);
          end
        end
      end
      SUB_C27: begin
        if (p == 0) begin
          b = layer_base(0);
          q.mode = M_BS54; q.first = 1'b1; q.src = B_INBUF; q.dst = B_S; q.ndw = 2'd1;
          q.cmd[0] = mk(SRC_SRAM, b,      0,   9);
          q.cmd[1] = mk(SRC_SRAM, b + 18, 108, 9);
          q.cmd[2] = mk(SRC_SRAM, b + 36, 126, 1);
          q.cmd[3] = mk(SRC_SRAM, b + 38, 129, 1);
        end else if (p == num_passes(SUB_C27) - 1) begin
          b = layer_base(NLAYER - 1);
          q.mode = M_DS27; q.src = B_S; q.to_out = 1'b1; q.ndw = 2'd1;
          q.cmd[0] = mk(SRC_SRAM, b,       27,  27);   // A image -> 1x1-B
          q.cmd[1] = mk(SRC_SRAM, b + 81,  54,  27);   // D image -> 1x1-C
          q.cmd[2] = mk(SRC_SRAM, b + 108, 108, 9);
          q.cmd[3] = mk(SRC_SRAM, b + 126, 126, 2);
          q.cmd[4] = mk(SRC_SRAM, b + 128, 129, 1);
        end else begin
          // SFB k uses the C54 layers 1+3k (BSConv), 2+3k (BSConv), 3+3k (1x1)
          int b1, b2, b3;
          b1 = layer_base(1 + 3 * (p - 1));
          b2 = layer_base(2 + 3 * (p - 1));
          b3 = layer_base(3 + 3 * (p - 1));
          q.mode = M_SFB27; q.src = B_S; q.dst = B_X; q.use_sc = 1'b1; q.ndw = 2'd2;
          q.relu_dw = 1'b1; q.relu_at3 = 1'b1;
          q.cmd[0] = mk(SRC_SRAM, b1,       27,  27);  // BS1 1x1 -> 1x1-B
          q.cmd[1] = mk(SRC_SRAM, b1 + 108, 108, 9);   // BS1 3x3 -> 3x3-B
          q.cmd[2] = mk(SRC_SRAM, b2,       54,  27);  // BS2 1x1 -> 1x1-C
          q.cmd[3] = mk(SRC_SRAM, b2 + 108, 117, 9);   // BS2 3x3 -> 3x3-C
          q.cmd[4] = mk(SRC_SRAM, b3,       0,   27);  // 1x1     -> 1x1-A
          q.cmd[5] = mk(SRC_SRAM, b1 + 126, 126, 1);   // BS1 bias  -> AT1
          q.cmd[6] = mk(SRC_SRAM, b2 + 126, 127, 1);   // BS2 bias  -> AT2
          q.cmd[7] = mk(SRC_SRAM, b3 + 108, 128, 1);   // 1x1 bias  -> AT3
          q.cmd[8] = mk(SRC_SRAM, b1 + 128, 129, 1);   // BS1 3x3 bias -> 3x3-B
          q.cmd[9] = mk(SRC_SRAM, b2 + 128, 130, 1);   // BS2 3x3 bias -> 3x3-C
        end
      end
      default: begin
        q.mode = M_BIL; q.first = 1'b1; q.src = B_INBUF; q.to_out = 1'b1; q.ndw = 2'd1;
        q.sh_dw = 5'd6;
        q.cmd[0] = mk(SRC_BIL,  0, 108, 18);
        q.cmd[1] = mk(SRC_ZERO, 0, 129, 2);
      end
    endcase
    return q;
  endfunction

  // Bilinear x4 weights (align-corners off): HR sub-pixel i of an LR pixel
  // takes LR neighbours -1, 0, +1 with weights in eighths.
  function automatic int bil_1d(input int i, input int d);
    case (i)
      0: return (d == 0) ? 3 : (d == 1) ? 5 : 0;
      1: return (d == 0) ? 1 : (d == 1) ? 7 : 0;
      2: return (d == 0) ? 0 : (d == 1) ? 7 : 1;
      default: return (d == 0) ? 0 : (d == 1) ? 5 : 3;
    endcase
  endfunction

  // Weight of output lane n (0..47, = colour*16 + i*4 + j) at 3x3 tap t,
  // in 64ths.
  function automatic int bil_w(input int n, input int t);
    int sub;
    if (n >= OUTCH) return 0;
    sub = n % 16;
    return bil_1d(sub / 4, t / 3) * bil_1d(sub % 4, t % 3);
  endfunction

  // Requantise an accumulator: add bias (activation scale), round, shift,
  // saturate to FXP10, optional ReLU.
  function automatic act_t requant(input acc_t acc, input act_t bias, input logic [4:0] sh,
                                   input logic relu);
    logic signed [AW+1:0] v;
    v = (AW+2)'(acc) + ((AW+2)'(bias) <<< sh);
    if (sh != 0) v = (v + ((AW+2)'(1) <<< (sh - 1))) >>> sh;
    if (v > 511) v = 511;
    if (v < -512) v = -512;
    if (relu && v < 0) v = 0;
    return act_t'(v);
  endfunction

  function automatic act_t sat_add(input act_t a, input act_t b);
    logic signed [DW:0] v;
    v = (DW+1)'(a) + (DW+1)'(b);
    if (v > 511) v = 511;
    if (v < -512) v = -512;
    return act_t'(v);
  endfunction

endpackage
