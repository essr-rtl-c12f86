// tb_essr_full: the accelerator at its full default size
//
// Drives the whole accelerator as a host would: writes random weights for
// the full model into the weight SRAM, then streams patches of a frame in
// raster order and collects the high-resolution output blocks.
// An independent reference model in this file computes, for every patch,
// the edge score, the subnet decision with the adaptive thresholds, the
// chosen network (bilinear, C27 or C54) in plain nested loops on
// channel x row x column arrays, and the overlap-and-average of the
// frame. Every output block is compared bit-exactly with it, and every LR
// position must be emitted exactly once.
//
// Size: every parameter at its default (32x32 patches, 1920x1080 LR frame, 2304 patches per frame). Three patches of the first patch row are processed, one of each subnet: a flat patch (bilinear), stripes (C27) and texture (C54). Only the LR positions that are final after these three patches are emitted and checked (the others wait in the boundary strips for patches that are not sent); threshold adaptation needs whole frames and is exercised by the small end-to-end test.
//
// Mechanisms counted (a mechanism that never happens is a failure):
// bilinear, C27 and C54 patches, horizontal and vertical seam
// averaging. Patch kinds: flat (edge score 0), stripes (medium score) and
// random texture (high score).
module tb_essr_full;
  import essr_pkg::*;

  localparam int P    = 32;
  localparam int OVL  = 2;
  localparam int FW   = 1920;
  localparam int FH   = 1080;
  localparam int PPF  = 2304;
  localparam int FPS  = 30;
  localparam int CSEC = 25500;
  localparam int HIF  = 1000;
  localparam int LOF  = 700;
  localparam int S    = P - OVL;
  localparam int NPX  = (FW - OVL + S - 1) / S;
  localparam int NPY  = (FH - OVL + S - 1) / S;
  localparam int NPXT = 3;             // patch columns driven per frame
  localparam int NPYT = 1;             // patch rows driven per frame
  localparam int NFR  = 1;              // frames
  localparam logic REQ_ADAPT = 1'b0;       // cap / up / down must happen
  localparam int WATCHDOG = 400000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic w_we = 1'b0;
  logic [10:0] w_addr = '0;
  logic [LANES-1:0][DW-1:0] w_data = '0;
  logic in_ready, in_start = 1'b0, in_valid = 1'b0;
  logic [7:0] in_px = '0, in_py = '0;
  logic [2:0][7:0] in_pix = '0;
  logic out_valid;
  logic [15:0] out_x, out_y;
  logic [OUTCH-1:0][7:0] out_pix;
  logic patch_done, c54_capped, thr_up, thr_down, avg_h, avg_v;
  logic [1:0] patch_subnet;
  logic [7:0] thr1, thr2;

  essr_top dut (.*);

  int checks = 0, failures = 0;
  // loop bounds of the reference model, kept in variables (not constants)
  // so that the simulator compiles them as loops instead of unrolling them
  int np = P, n1 = 1, n3 = 3, n4 = 4, n5 = 5, n9 = 9, n27 = 27, n48 = 48, n2048 = 2048;
  int n_bil = 0, n_c27 = 0, n_c54 = 0, n_cap = 0, n_up = 0, n_down = 0, n_avh = 0, n_avv = 0;
  int n_out = 0, n_mid = 0;

  // ---------------------------------------------------------------- model
  int wm [2048][27];
  int pin [3][P][P];
  int fm [5][54][P][P];
  int refo [NPYT][NPXT][48][P][P];
  int seen [NPYT*S+OVL][NPXT*S+OVL];

  function automatic int rq(longint acc, int bias, bit relu);
    longint v;
    v = (acc + (longint'(bias) * 64) + 32) >>> 6;
    if (v > 511) v = 511;
    if (v < -512) v = -512;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  function automatic int sadd(int a, int b);
    int v = a + b;
    return (v > 511) ? 511 : (v < -512) ? -512 : v;
  endfunction

  function automatic int layer_word(int l);   // first word of C54 layer l
    int a = 0;
    for (int i = 0; i < l; i++) a += (i == 0) ? 40 : ((i % 3) == 0) ? 110 : 130;
    return a;
  endfunction

  // 1x1 weight of output o from input i; wmode: 0 full 54x54 (four
  // 27x27 quadrants A, B, C, D), 1 the A quadrant only, 2 DSConv-27
  // (A quadrant for outputs 0..26, D quadrant for 27..47), 3 first layer
  function automatic int wpw(int wmode, int b, int o, int i);
    int g;
    case (wmode)
      0: begin
        g = (o < 27) ? ((i < 27) ? 0 : 1) : ((i >= 27) ? 2 : 3);
        return wm[b + g * 27 + i % 27][o % 27];
      end
      1: return wm[b + i][o];
      2: return (o < 27) ? wm[b + i][o] : wm[b + 81 + i][o - 27];
      default: return (o < 27) ? wm[i][o] : wm[9 + i][o - 27];
    endcase
  endfunction

  task automatic pw(int s, int d, int nin, int nout, int wmode, int b, int bw, bit relu);
    for (int r = 0; r < np; r++)
      for (int c = 0; c < np; c++)
        for (int o = 0; o < nout; o++) begin
          automatic longint acc = 0;
          for (int i = 0; i < nin; i++) acc += longint'(wpw(wmode, b, o, i)) * fm[s][i][r][c];
          fm[d][o][r][c] = rq(acc, wm[bw + o / 27][o % 27], relu);
        end
  endtask

  // depth-wise 3x3 with zero padding at the patch border
  task automatic dw(int s, int d, int nch, int twl, int twh, int bw, bit relu);
    for (int ch = 0; ch < nch; ch++)
      for (int r = 0; r < np; r++)
        for (int c = 0; c < np; c++) begin
          automatic longint acc = 0;
          for (int t = 0; t < n9; t++) begin
            automatic int rr = r + t / 3 - 1, cc = c + t % 3 - 1;
            if (rr >= 0 && rr < P && cc >= 0 && cc < P)
              acc += longint'((ch < 27) ? wm[twl + t][ch] : wm[twh + t][ch - 27]) * fm[s][ch][rr][cc];
          end
          fm[d][ch][r][c] = rq(acc, wm[bw + ch / 27][ch % 27], relu);
        end
  endtask

  task automatic addc(int a, int b, int d, int nch);
    for (int ch = 0; ch < nch; ch++)
      for (int r = 0; r < np; r++)
        for (int c = 0; c < np; c++) fm[d][ch][r][c] = sadd(fm[a][ch][r][c], fm[b][ch][r][c]);
  endtask

  task automatic copyc(int a, int d, int nch);
    for (int ch = 0; ch < nch; ch++)
      for (int r = 0; r < np; r++)
        for (int c = 0; c < np; c++) fm[d][ch][r][c] = fm[a][ch][r][c];
  endtask

  // result of the chosen network in fm[2][0..47]
  task automatic run_net(subnet_e sn);
    for (int ch = 0; ch < n3; ch++)
      for (int r = 0; r < np; r++)
        for (int c = 0; c < np; c++) fm[4][ch][r][c] = pin[ch][r][c];
    if (sn == SUB_BIL) begin
      for (int ch = 0; ch < n3; ch++)
        for (int i = 0; i < n4; i++)
          for (int j = 0; j < n4; j++)
            for (int r = 0; r < np; r++)
              for (int c = 0; c < np; c++) begin
                // HR sub-pixel i sits at LR offset (2i-3)/8: weights in eighths
                automatic int oi = 2 * i - 3, oj = 2 * j - 3;
                automatic longint acc = 0;
                for (int dr = -1; dr <= n1; dr++)
                  for (int dc = -1; dc <= n1; dc++) begin
                    automatic int wr = (dr == 0) ? 8 - ((oi < 0) ? -oi : oi) : (dr * oi > 0) ? ((oi < 0) ? -oi : oi) : 0;
                    automatic int wc = (dc == 0) ? 8 - ((oj < 0) ? -oj : oj) : (dc * oj > 0) ? ((oj < 0) ? -oj : oj) : 0;
                    automatic int rr = (r + dr < 0) ? 0 : (r + dr > P - 1) ? P - 1 : r + dr;
                    automatic int cc = (c + dc < 0) ? 0 : (c + dc > P - 1) ? P - 1 : c + dc;
                    acc += longint'(wr * wc) * pin[ch][rr][cc];
                  end
                fm[2][ch * 16 + i * 4 + j][r][c] = rq(acc, 0, 1'b0);
              end
    end else if (sn == SUB_C54) begin
      pw(4, 1, 3, 54, 3, 0, 36, 1'b0);
      dw(1, 0, 54, 18, 27, 38, 1'b0);
      for (int k = 0; k < n5; k++) begin
        automatic int b1 = layer_word(1 + 3 * k), b2 = layer_word(2 + 3 * k), b3 = layer_word(3 + 3 * k);
        pw(0, 1, 54, 54, 0, b1, b1 + 126, 1'b0);
        dw(1, 2, 54, b1 + 108, b1 + 117, b1 + 128, 1'b1);
        pw(2, 1, 54, 54, 0, b2, b2 + 126, 1'b0);
        dw(1, 2, 54, b2 + 108, b2 + 117, b2 + 128, 1'b1);
        addc(2, 0, 1, 54);
        pw(1, 2, 54, 54, 0, b3, b3 + 108, 1'b1);
        copyc(2, 0, 54);
      end
      begin
        automatic int b = layer_word(16);
        dw(0, 1, 54, b + 108, b + 117, b + 128, 1'b0);
        pw(1, 2, 54, 48, 0, b, b + 126, 1'b0);
      end
    end else begin
      pw(4, 1, 3, 27, 3, 0, 36, 1'b0);
      dw(1, 0, 27, 18, 18, 38, 1'b0);
      for (int k = 0; k < n5; k++) begin
        automatic int b1 = layer_word(1 + 3 * k), b2 = layer_word(2 + 3 * k), b3 = layer_word(3 + 3 * k);
        pw(0, 1, 27, 27, 1, b1, b1 + 126, 1'b0);
        dw(1, 2, 27, b1 + 108, b1 + 108, b1 + 128, 1'b1);
        pw(2, 1, 27, 27, 1, b2, b2 + 126, 1'b0);
        dw(1, 2, 27, b2 + 108, b2 + 108, b2 + 128, 1'b1);
        addc(2, 0, 1, 27);
        pw(1, 2, 27, 27, 1, b3, b3 + 108, 1'b1);
        copyc(2, 0, 27);
      end
      begin
        automatic int b = layer_word(16);
        dw(0, 1, 27, b + 108, b + 108, b + 128, 1'b0);
        pw(1, 2, 27, 48, 2, b, b + 126, 1'b0);
      end
    end
  endtask

  function automatic int edge_ref();
    int y [P][P];
    int sum = 0;
    for (int r = 0; r < np; r++)
      for (int c = 0; c < np; c++)
        y[r][c] = (77 * pin[0][r][c] + 150 * pin[1][r][c] + 29 * pin[2][r][c] + 128) / 256;
    for (int r = 0; r < np; r++)
      for (int c = 0; c < np; c++) begin
        automatic int v = 4 * y[r][c] - y[(r > 0) ? r - 1 : r][c] - y[(r < P - 1) ? r + 1 : r][c]
                - y[r][(c > 0) ? c - 1 : c] - y[r][(c < P - 1) ? c + 1 : c];
        if (v < 0) v = -v;
        sum += (v > 255) ? 255 : v;
      end
    return sum / (P * P);
  endfunction

  // ---------------------------------------------------------------- switching model
  int t1m = 8, t2m = 40, pc = 0, fc = 0, c54f = 0, c54s = 0;
  function automatic int clip8(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  task automatic decide(input int sc, output subnet_e sn, output bit cap, output int adj);
    cap = c54s > CSEC;
    adj = 0;
    sn = cap ? SUB_C27 : (sc < t1m) ? SUB_BIL : (sc < t2m) ? SUB_C27 : SUB_C54;
    if (sn == SUB_C54) begin c54f++; c54s++; end
    pc++;
    if (pc == PPF) begin
      if (!cap && c54f > HIF) begin adj = 1; t1m = clip8(t1m + 1); t2m = clip8(t2m + 5); end
      else if (!cap && c54f < LOF) begin adj = -1; t1m = clip8(t1m - 1); t2m = clip8(t2m - 5); end
      pc = 0; c54f = 0; fc++;
      if (fc == FPS) begin fc = 0; c54s = 0; end
    end
  endtask

  // ---------------------------------------------------------------- expected output
  function automatic int blendx(int py, int x, int y, int k);
    int lx, vx [2], n = 0;
    for (int px = 0; px < NPXT; px++) begin
      lx = x - px * S;
      if (lx >= 0 && lx < P) begin vx[n] = refo[py][px][k][y - py * S][lx]; n++; end
    end
    return (n == 2) ? (vx[0] + vx[1] + 1) / 2 : vx[0];
  endfunction

  function automatic int expect_at(int x, int y, int k);
    int ly, vy [2], n = 0;
    for (int py = 0; py < NPYT; py++) begin
      ly = y - py * S;
      if (ly >= 0 && ly < P) begin vy[n] = blendx(py, x, y, k); n++; end
    end
    return (n == 2) ? (vy[0] + vy[1] + 1) / 2 : vy[0];
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      automatic int bad = 0;
      n_out++;
      checks++;
      if (int'(out_x) >= NPXT * S + OVL || int'(out_y) >= NPYT * S + OVL) bad = 1;
      else begin
        seen[out_y][out_x]++;
        if (seen[out_y][out_x] != 1) bad = 1;
        for (int k = 0; k < n48; k++) begin
          automatic int e = expect_at(out_x, out_y, k);
          if (int'(out_pix[k]) != e) begin
            if (bad < 3) $display("  mismatch at (%0d,%0d) ch %0d: got %0d want %0d", out_x, out_y, k, out_pix[k], e);
            bad++;
          end
          if (e > 0 && e < 255) n_mid++;
        end
      end
      if (bad != 0) failures++;
    end
    if (avg_h) n_avh++;
    if (avg_v) n_avv++;
    if (thr_up) n_up++;
    if (thr_down) n_down++;
  end

  // ---------------------------------------------------------------- stimulus
  function automatic int pix_of(int kind, int r, int c, int ch);
    case (kind)
      0: return 60 + 50 * ch;                                   // flat
      1: return ((c % 2) != 0 ? 100 : 110) + 20 * ch;            // stripes
      default: return int'($urandom_range(0, 255));              // texture
    endcase
  endfunction

  int kinds [3] = '{0, 1, 2};
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #(10 * WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kidx = 0;
    for (int a = 0; a < n2048; a++)
      for (int l = 0; l < n27; l++) wm[a][l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // weights: 1x1 in [-12, 12], 3x3 taps in [-20, 20], biases in [-6, 6] (64ths / units)
    for (int l = 0; l < NLAYER; l++) begin
      automatic int b = layer_word(l), n = (l == 0) ? 40 : ((l % 3) == 0) ? 110 : 130;
      for (int a = 0; a < n; a++) begin
        automatic bit is_bias = (l == 0) ? (a >= 36) : (n == 110) ? (a >= 108) : (a >= 126);
        automatic bit is_tap = (l == 0) ? (a >= 18 && a < 36) : (n == 130 && a >= 108 && a < 126);
        for (int k = 0; k < n27; k++)
          wm[b + a][k] = is_bias ? int'($urandom_range(0, 12)) - 6 :
                         is_tap  ? int'($urandom_range(0, 40)) - 20 : int'($urandom_range(0, 24)) - 12;
      end
    end
    for (int a = 0; a < n2048; a++) begin
      @(negedge clk);
      w_we = 1'b1; w_addr = 11'(a);
      for (int k = 0; k < n27; k++) w_data[k] = DW'(wm[a][k]);
    end
    @(negedge clk) w_we = 1'b0;

    for (int f = 0; f < NFR; f++) begin
      for (int py = 0; py < NPYT; py++)
        for (int px = 0; px < NPXT; px++) begin
          int sc, adj, t0;
          subnet_e sn;
          bit cap;
          for (int r = 0; r < np; r++)
            for (int c = 0; c < np; c++)
              for (int ch = 0; ch < n3; ch++) pin[ch][r][c] = pix_of(kinds[kidx], r, c, ch);
          kidx++;
          sc = edge_ref();
          decide(sc, sn, cap, adj);
          run_net(sn);
          for (int k = 0; k < n48; k++)
            for (int r = 0; r < np; r++)
              for (int c = 0; c < np; c++) refo[py][px][k][r][c] = clip8(fm[2][k][r][c]);
          while (!in_ready) @(negedge clk);
          @(negedge clk);
          in_start = 1'b1; in_px = 8'(px); in_py = 8'(py);
          @(negedge clk);
          in_start = 1'b0;
          t0 = cyc;
          for (int r = 0; r < np; r++)
            for (int c = 0; c < np; c++) begin
              in_valid = 1'b1;
              for (int ch = 0; ch < n3; ch++) in_pix[ch] = 8'(pin[ch][r][c]);
              @(negedge clk);
            end
          in_valid = 1'b0;
          while (!patch_done) @(negedge clk);
          checks++;
          if (patch_subnet != sn) begin
            failures++;
            $display("  frame %0d patch (%0d,%0d): subnet %0d, expected %0d (score %0d)", f, px, py, patch_subnet, sn, sc);
          end
          checks++;
          if (c54_capped != (c54s > CSEC)) begin
            failures++;
            $display("  cap flag %0d, expected %0d", c54_capped, c54s > CSEC);
          end
          if (cap) n_cap++;
          case (sn) SUB_BIL: n_bil++; SUB_C27: n_c27++; default: n_c54++; endcase
          $display("frame %0d patch (%0d,%0d): score %0d -> subnet %0d, %0d cycles, t1 %0d t2 %0d",
                   f, px, py, sc, sn, cyc - t0, thr1, thr2);
          repeat (5) @(negedge clk);
          checks++;
          if (int'(thr1) != t1m || int'(thr2) != t2m) begin
            failures++;
            $display("  thresholds %0d/%0d, expected %0d/%0d", thr1, thr2, t1m, t2m);
          end
        end
      // every driven LR position of the frame must have been emitted once
      checks++;
      begin
        automatic int missing = 0;
        for (int y = 0; y < NPYT * S + OVL; y++)
          for (int x = 0; x < NPXT * S + OVL; x++) begin
            if (x < FW && y < FH && (NPXT == NPX || x < NPXT * S) && (NPYT == NPY || y < NPYT * S)
                && seen[y][x] != 1) missing++;
            seen[y][x] = 0;
          end
        if (missing != 0) begin failures++; $display("  frame %0d: %0d positions not emitted once", f, missing); end
      end
    end

    $display("bilinear %0d, C27 %0d, C54 %0d, capped %0d, up %0d, down %0d, h-avg %0d, v-avg %0d, blocks %0d, mid-range values %0d",
             n_bil, n_c27, n_c54, n_cap, n_up, n_down, n_avh, n_avv, n_out, n_mid);
    checks++; if (n_bil == 0) begin failures++; $display("  no bilinear patch"); end
    checks++; if (n_c27 == 0) begin failures++; $display("  no C27 patch"); end
    checks++; if (n_c54 == 0) begin failures++; $display("  no C54 patch"); end
    checks++; if (n_avh == 0) begin failures++; $display("  no horizontal seam averaging"); end
    checks++; if (n_avv == 0 && NPYT > 1) begin failures++; $display("  no vertical seam averaging"); end
    checks++; if (n_mid == 0) begin failures++; $display("  all outputs saturated"); end
    if (REQ_ADAPT) begin
      checks++; if (n_cap == 0) begin failures++; $display("  C54 budget cap never reached"); end
      checks++; if (n_up == 0) begin failures++; $display("  thresholds never raised"); end
      checks++; if (n_down == 0) begin failures++; $display("  thresholds never lowered"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
