// tb_glnpu_ctrl: self-checking test of the layer sequencer.
// Runs each subnet (C54, C27, bilinear) on a 6x6 patch with a weight SRAM
// model whose word at address a encodes a. Checks, independently of the
// pass table:
//  - the number of passes (C54 17, C27 7, bilinear 1) and one done pulse;
//  - the scan length of every pass: (H + k) x (W + 2) tokens with k = 2
//    for the C27 fusion-block passes, 0 for the C54 shortcut + 1x1 passes
//    (no 3x3 stage) and 1 otherwise;
//  - the number of weight words loaded per pass (C54: 40, 130 / 130 / 110
//    per fusion block, 130; C27: 20, 104 per block, 66; bilinear: 20);
//  - that the first C54 layer's 40 words land on the right load targets
//    (which fails if the load strobe and the synchronous SRAM read are out
//    of step);
//  - the buffer roles: the shortcut buffer changes after every pass that
//    adds a shortcut, and the destination never equals the source.
module tb_glnpu_ctrl;
  import essr_pkg::*;
  localparam int H = 6, W = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  subnet_e subnet = SUB_BIL;
  pass_t cfg;
  logic [1:0] src_phys, dst_phys, sc_phys;
  logic [10:0] w_raddr;
  vec_t w_rdata, ld_w;
  logic ld_en;
  logic [7:0] ld_tgt;
  tok_t tin;
  logic [5:0] src_addr;
  logic [4:0] pass_idx;
  int checks = 0, failures = 0;
  glnpu_ctrl #(.H(H), .W(W)) dut (.*);

  // weight SRAM model: word a holds a in lanes 0 and 1
  always_ff @(posedge clk) begin
    w_rdata <= '0;
    w_rdata[0] <= act_t'(w_raddr[8:0]);
    w_rdata[1] <= act_t'({7'd0, w_raddr[10:9]});
  end

  int npass, scan_len [32], loads [32], ndone;
  logic [4:0] pq;
  always @(posedge clk) begin
    if (busy) begin
      if (tin.valid) scan_len[pass_idx]++;
      if (ld_en) begin
        loads[pass_idx]++;
        if (subnet == SUB_C54 && pass_idx == 0) begin
          automatic int t = int'(ld_tgt), wd = int'({ld_w[1][1:0], ld_w[0][8:0]}), e;
          // first layer: 1x1 rows to 0..8 (1x1-A) and 81..89 (1x1-D), 3x3
          // taps to 108..125, adder-tree biases to 126/127, 3x3 biases to
          // 129/130, from words 0..39 in this order
          e = (t < 9) ? t : (t >= 81 && t < 90) ? t - 72 : (t >= 108 && t < 128) ? t - 90 : t - 91;
          checks++;
          if (wd != e) begin
            failures++;
            if (failures < 5) $display("load to %0d: word %0d, want %0d", t, wd, e);
          end
        end
      end
      if (tin.valid && src_phys != 2'd3 && src_phys == dst_phys && !cfg.to_out) begin
        checks++; failures++; $display("pass %0d writes its own source", pass_idx);
      end
    end
    if (done) ndone++;
  end

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 3; s++) begin
      automatic int np = (s == 0) ? 17 : (s == 1) ? 7 : 1;
      automatic logic [1:0] sc_prev;
      automatic int sc_changes = 0;
      for (int p = 0; p < 32; p++) begin scan_len[p] = 0; loads[p] = 0; end
      ndone = 0;
      subnet = (s == 0) ? SUB_C54 : (s == 1) ? SUB_C27 : SUB_BIL;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      sc_prev = sc_phys;
      while (busy) begin
        @(negedge clk);
        if (sc_phys != sc_prev) sc_changes++;
        sc_prev = sc_phys;
      end
      repeat (3) @(negedge clk);
      checks++;
      if (ndone != 1) begin failures++; $display("subnet %0d: %0d done pulses", s, ndone); end
      for (int p = 0; p < 32; p++) begin
        automatic int k = (s == 1 && p >= 1 && p <= 5) ? 2 : (s == 0 && p >= 1 && p <= 15 && (p - 1) % 3 == 2) ? 0 : 1;
        automatic int el;
        if (s == 0) el = (p == 0) ? 40 : (p == 16) ? 130 : ((p - 1) % 3 == 2) ? 110 : 130;
        else if (s == 1) el = (p == 0) ? 20 : (p == 6) ? 66 : 104;
        else el = 20;
        if (p >= np) begin el = 0; k = -H; end
        checks += 2;
        if (scan_len[p] != (H + k) * (W + 2)) begin failures++; $display("subnet %0d pass %0d: scan %0d", s, p, scan_len[p]); end
        if (loads[p] != el) begin failures++; $display("subnet %0d pass %0d: %0d loads, want %0d", s, p, loads[p], el); end
      end
      checks++;
      if (sc_changes != ((s == 0) ? 5 : (s == 1) ? 5 : 0)) begin failures++; $display("subnet %0d: shortcut buffer changed %0d times", s, sc_changes); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
