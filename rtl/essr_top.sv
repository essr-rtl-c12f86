// essr_top: ESSR edge-selective super-resolution accelerator (x4).
//
// A low-resolution (LR) frame is processed as P x P patches taken with a
// stride of P - OVL. For every patch the accelerator
//   1. receives its P*P RGB pixels from DRAM into the input buffer and, in
//      parallel, into the edge-score unit;
//   2. computes the edge score and lets the resource adaptive model switch
//      choose bilinear, C27 or C54;
//   3. runs the chosen subnet on the GLNPU (sequencer + configurable PE
//      array), ping-ponging features between three feature SRAMs;
//   4. sends the 48-channel result (x4 pixel shuffle of 3 colours) through
//      overlap-and-average boundary processing to DRAM.
// Weights (whole model, 67 KB) are written once into the weight SRAM.
//
// Interface: w_* writes the weight SRAM. A patch is offered on in_* while
// in_ready is high: in_start with the patch indices, then P*P beats of
// in_valid in raster order. Output blocks leave on out_*: each beat is one
// LR position's 4x4 HR block of 3 colours with its LR frame coordinates.
// patch_done pulses when a patch has left the PE array. The steps run one
// after another for one patch at a time, which is this design's
// simplification; the DRAM itself is outside (its traffic is on the ports).
module essr_top
  import essr_pkg::*;
#(
  parameter int P       = 32,
  parameter int OVL     = 2,
  parameter int FW      = 1920,
  parameter int FH      = 1080,
  parameter int PPF     = 2304,      // patches per frame, 64 x 36
  parameter int FPS     = 30,
  parameter int C54_SEC = 25500,
  parameter int HI_FR   = 1000,
  parameter int LO_FR   = 700,
  localparam int FAB    = $clog2(P * P)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight SRAM fill
  input  logic                    w_we,
  input  logic [10:0]             w_addr,
  input  logic [LANES-1:0][DW-1:0] w_data,
  // patch input
  output logic                    in_ready,
  input  logic                    in_start,
  input  logic [7:0]              in_px,
  input  logic [7:0]              in_py,
  input  logic                    in_valid,
  input  logic [2:0][7:0]         in_pix,
  // high-resolution output
  output logic                    out_valid,
  output logic [15:0]             out_x,
  output logic [15:0]             out_y,
  output logic [OUTCH-1:0][7:0]   out_pix,
  // status
  output logic                    patch_done,
  output logic [1:0]              patch_subnet,
  output logic [7:0]              thr1,
  output logic [7:0]              thr2,
  output logic                    c54_capped,
  output logic                    thr_up,
  output logic                    thr_down,
  output logic                    avg_h,
  output logic                    avg_v
);
  typedef enum logic [2:0] {T_IDLE, T_FILL, T_EDGE, T_RUN} tst_e;
  tst_e st;
  logic [FAB:0] icnt;
  logic [7:0] px_q, py_q;

  // ---------------- input buffer and edge score
  logic [FAB-1:0] src_addr;
  act_t [2:0]     ib_rdata;
  input_buffer #(.P(P)) u_ibuf (.clk, .we(in_valid && st == T_FILL), .waddr(icnt[FAB-1:0]),
                                .wpix(in_pix), .raddr(src_addr), .rdata(ib_rdata));

  logic       sc_valid, es_busy;
  logic [7:0] score;
  edge_score #(.P(P)) u_edge (.clk, .rst_n, .in_valid(in_valid && st == T_FILL), .in_pix(in_pix),
                              .score_valid(sc_valid), .score(score), .busy(es_busy));

  logic    dec_valid;
  subnet_e dec;
  model_switch #(.PATCHES_PER_FRAME(PPF), .FRAMES_PER_SEC(FPS), .C54_PER_SEC(C54_SEC),
                 .HI_PER_FRAME(HI_FR), .LO_PER_FRAME(LO_FR))
    u_sw (.clk, .rst_n, .score_valid(sc_valid), .score(score), .dec_valid(dec_valid),
          .subnet(dec), .t1(thr1), .t2(thr2), .capped(c54_capped), .adj_up(thr_up), .adj_down(thr_down));

  // ---------------- sequencer, weight SRAM
  logic       busy, done;
  pass_t      cfg;
  logic [1:0] src_phys, dst_phys, sc_phys;
  logic [10:0] w_raddr;
  vec_t       w_rdata, ld_w;
  logic       ld_en;
  logic [7:0] ld_tgt;
  tok_t       tin;
  logic [4:0] pass_idx;

  weight_sram u_wsram (.clk, .we(w_we), .waddr(w_addr), .wdata(w_data), .raddr(w_raddr), .rdata(w_rdata));

  glnpu_ctrl #(.H(P), .W(P)) u_ctrl (
    .clk, .rst_n, .start(dec_valid), .subnet(dec), .busy, .done, .cfg,
    .src_phys, .dst_phys, .sc_phys, .w_raddr, .w_rdata, .ld_en, .ld_tgt, .ld_w,
    .tin, .src_addr, .pass_idx);

  // ---------------- feature SRAMs
  tok_t sc_tok, wr_tok, out_tok;
  vec_t wr_lo, wr_hi, src_lo, src_hi;
  act_t [OUTCH-1:0] out_data;
  logic [FAB-1:0] sc_addr, wr_addr;
  logic wr_in;
  logic [2:0][CH*DW-1:0] rd_a, rd_b;
  logic [1:0] src_q, sc_q;

  function automatic logic pos_in(input tok_t t);
    return t.valid && int'(t.row) >= 0 && int'(t.row) < P && int'(t.col) >= 0 && int'(t.col) < P;
  endfunction

  assign sc_addr = pos_in(sc_tok) ? FAB'(int'(sc_tok.row) * P + int'(sc_tok.col)) : '0;
  assign wr_in   = pos_in(wr_tok) && !cfg.to_out;
  assign wr_addr = FAB'(int'(wr_tok.row) * P + int'(wr_tok.col));

  for (genvar i = 0; i < 3; i++) begin : g_fsram
    feature_sram #(.DEPTH(P * P)) u_fs (
      .clk, .we(wr_in && dst_phys == 2'(i)), .waddr(wr_addr), .wdata({wr_hi, wr_lo}),
      .raddr_a(src_addr), .rdata_a(rd_a[i]), .raddr_b(sc_addr), .rdata_b(rd_b[i]));
  end

  always_ff @(posedge clk) begin
    src_q <= src_phys;
    sc_q  <= sc_phys;
  end

  vec_t sc_lo, sc_hi;
  always_comb begin
    if (src_q == 2'd3) begin
      src_lo = '0; src_hi = '0;
      src_lo[2:0] = ib_rdata;
    end else begin
      {src_hi, src_lo} = rd_a[src_q];
    end
    {sc_hi, sc_lo} = rd_b[(sc_q == 2'd3) ? 2'd0 : sc_q];
  end

  glnpu_datapath #(.H(P), .W(P)) u_dp (
    .clk, .rst_n, .mode(cfg.mode), .use_sc(cfg.use_sc), .relu_at12(cfg.relu_at12),
    .relu_at3(cfg.relu_at3), .relu_dw(cfg.relu_dw), .sh_pw(cfg.sh_pw), .sh_dw(cfg.sh_dw),
    .ld_en, .ld_tgt, .ld_w, .tin, .src_lo, .src_hi, .sc_tok, .sc_lo, .sc_hi,
    .wr_tok, .wr_lo, .wr_hi, .out_tok, .out_data);

  // ---------------- boundary processing
  boundary_proc #(.P(P), .OVL(OVL), .FW(FW), .FH(FH)) u_bnd (
    .clk, .rst_n, .in_valid(pos_in(out_tok) && cfg.to_out),
    .in_row(out_tok.row), .in_col(out_tok.col), .in_px(px_q), .in_py(py_q), .in_data(out_data),
    .out_valid, .out_x, .out_y, .out_pix, .avg_h, .avg_v);

  // ---------------- patch flow
  assign in_ready = (st == T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; icnt <= '0; px_q <= '0; py_q <= '0;
      patch_done <= 1'b0; patch_subnet <= '0;
    end else begin
      patch_done <= 1'b0;
      case (st)
        T_IDLE: if (in_start) begin
          st <= T_FILL; icnt <= '0; px_q <= in_px; py_q <= in_py;
        end
        T_FILL: if (in_valid) begin
          if (int'(icnt) == P * P - 1) st <= T_EDGE;
          icnt <= icnt + 1'b1;
        end
        T_EDGE: if (dec_valid) begin
          st <= T_RUN; patch_subnet <= dec;
        end
        T_RUN: if (done) begin
          st <= T_IDLE; patch_done <= 1'b1;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  a_no_start_while_busy: assert property (@(posedge clk)
    dec_valid |-> !busy);
endmodule
