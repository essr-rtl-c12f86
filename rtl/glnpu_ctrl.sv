// glnpu_ctrl: layer-group sequencer and SRAM control of the GLNPU.
//
// For the subnet chosen for a patch it runs the passes of essr_pkg's pass
// table one after another: C54 = first BSConv, five times (BSConv, BSConv,
// shortcut + 1x1), DSConv (17 passes); C27 = first BSConv, five SFB passes,
// DSConv (7 passes); bilinear = one pass. Each pass has three phases:
//   LOAD  - weights and biases are copied from the weight SRAM (or, for
//           bilinear, generated) into the PEs, one 27-weight word per cycle,
//           as listed by the pass's load commands;
//   SCAN  - one position token per cycle over (H + ndw) rows x (W + 2)
//           columns, the overhang letting the line buffers flush; the
//           source address is issued with the token;
//   DRAIN - DRAIN cycles for the pipeline to empty.
// Three physical feature SRAMs take the roles S (block input / shortcut),
// X and Y; after a pass that adds a shortcut, S and the pass's destination
// swap roles. The published design overlaps the weight preload of one
// layer group with the end of the previous one; here the phases are
// sequential, which is this design's simplification.
module glnpu_ctrl
  import essr_pkg::*;
#(
  parameter int H     = 32,
  parameter int W     = 32,
  parameter int DRAIN = 40,
  localparam int WG   = W + 2,
  localparam int FAB  = $clog2(H * W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  subnet_e           subnet,
  output logic              busy,
  output logic              done,
  output pass_t             cfg,        // current pass
  output logic [1:0]        src_phys,   // feature SRAM read by the array (3 = input buffer)
  output logic [1:0]        dst_phys,
  output logic [1:0]        sc_phys,
  // weight SRAM read
  output logic [10:0]       w_raddr,
  input  vec_t              w_rdata,
  // preload bus
  output logic              ld_en,
  output logic [7:0]        ld_tgt,
  output vec_t              ld_w,
  // scan
  output tok_t              tin,
  output logic [FAB-1:0]    src_addr,
  output logic [4:0]        pass_idx
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SCAN, S_DRAIN, S_NEXT} st_e;
  st_e st;
  subnet_e sub;
  logic [1:0] rS, rX, rY;
  logic [3:0] ci;
  logic [7:0] wi;
  logic [7:0] row, col;
  logic [7:0] dcnt;
  lcmd_t cur;

  assign cfg = get_pass(sub, int'(pass_idx));
  assign cur = cfg.cmd[ci];
  assign busy = (st != S_IDLE);

  function automatic logic [1:0] phys(input brole_e r, input logic [1:0] s, x, y);
    case (r)
      B_S: return s;
      B_X: return x;
      B_Y: return y;
      default: return 2'd3;
    endcase
  endfunction
  assign src_phys = phys(cfg.src, rS, rX, rY);
  assign dst_phys = phys(cfg.dst, rS, rX, rY);
  assign sc_phys  = rS;

  // weight-load pipeline: the address is registered at edge t, the
  // synchronous weight SRAM answers at edge t+1, the target loads at t+2
  logic        ldv_q, ldv_q2;
  logic [7:0]  tgt_q, tgt_q2;
  wsrc_e       kind_q, kind_q2;

  function automatic vec_t bil_word(input logic [7:0] tgt);
    vec_t v;
    int t, blk;
    t   = (int'(tgt) - 108) % 9;
    blk = (int'(tgt) >= 117) ? 1 : 0;
    for (int l = 0; l < LANES; l++) v[l] = act_t'(bil_w(blk * LANES + l, t));
    return v;
  endfunction

  always_comb begin
    ld_en  = ldv_q2;
    ld_tgt = tgt_q2;
    case (kind_q2)
      SRC_SRAM: ld_w = w_rdata;
      SRC_BIL:  ld_w = bil_word(tgt_q2);
      default:  ld_w = '0;
    endcase
  end

  always_comb begin
    tin.valid = (st == S_SCAN);
    tin.row   = row;
    tin.col   = col;
    src_addr  = (int'(row) < H && int'(col) < W) ? FAB'(int'(row) * W + int'(col)) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sub <= SUB_BIL; pass_idx <= '0; ci <= '0; wi <= '0;
      row <= '0; col <= '0; dcnt <= '0; done <= 1'b0;
      rS <= 2'd0; rX <= 2'd1; rY <= 2'd2;
      ldv_q <= 1'b0; tgt_q <= '0; kind_q <= SRC_ZERO; w_raddr <= '0;
      ldv_q2 <= 1'b0; tgt_q2 <= '0; kind_q2 <= SRC_ZERO;
    end else begin
      done  <= 1'b0;
      ldv_q <= 1'b0;
      ldv_q2 <= ldv_q; tgt_q2 <= tgt_q; kind_q2 <= kind_q;
      case (st)
        S_IDLE: if (start) begin
          sub <= subnet; pass_idx <= '0; ci <= '0; wi <= '0;
          rS <= 2'd0; rX <= 2'd1; rY <= 2'd2;
          st <= S_LOAD;
        end
        S_LOAD: begin
          if (cur.n == 8'd0 || int'(ci) >= NCMD) begin
            st <= S_SCAN; row <= '0; col <= '0; ci <= '0; wi <= '0;
          end else begin
            w_raddr <= 11'(cur.src + 12'(wi));
            ldv_q   <= 1'b1;
            tgt_q   <= cur.dst + wi;
            kind_q  <= cur.kind;
            if (wi == cur.n - 8'd1) begin
              wi <= '0;
              if (int'(ci) == NCMD - 1) begin
                st <= S_SCAN; row <= '0; col <= '0; ci <= '0;
              end else ci <= ci + 1'b1;
            end else wi <= wi + 1'b1;
          end
        end
        S_SCAN: begin
          if (int'(col) == WG - 1) begin
            col <= '0;
            if (int'(row) == H - 1 + int'(cfg.ndw)) begin
              st <= S_DRAIN; dcnt <= '0;
            end else row <= row + 1'b1;
          end else col <= col + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (int'(dcnt) == DRAIN - 1) st <= S_NEXT;
        end
        S_NEXT: begin
          if (cfg.use_sc) begin
            // the pass result becomes the next block's input / shortcut
            rS <= dst_phys;
            if (cfg.dst == B_X) rX <= rS; else rY <= rS;
          end
          if (int'(pass_idx) == num_passes(sub) - 1) begin
            st <= S_IDLE; done <= 1'b1;
          end else begin
            pass_idx <= pass_idx + 1'b1; st <= S_LOAD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
