// tb_model_switch: self-checking test of the subnet decision and the
// resource adaptive threshold control.
// Uses 10 patches per frame, 3 frames per second, a budget of 12 C54
// patches per second and raise/lower limits of 6/2 C54 patches per frame.
// Random scores are fed; a reference model written here tracks the
// thresholds, the per-frame and per-second counts and the cap, and every
// decision, threshold value, cap flag and adjustment pulse is compared.
// The decision must appear one cycle after the score.
module tb_model_switch;
  import essr_pkg::*;
  localparam int PPF = 10, FPS = 3, CSEC = 12, HIF = 6, LOF = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic score_valid = 1'b0;
  logic [7:0] score = '0;
  logic dec_valid, capped, adj_up, adj_down;
  subnet_e subnet;
  logic [7:0] t1, t2;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0, n_cap = 0;
  model_switch #(.PATCHES_PER_FRAME(PPF), .FRAMES_PER_SEC(FPS), .C54_PER_SEC(CSEC),
                 .HI_PER_FRAME(HIF), .LO_PER_FRAME(LOF)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int m1 = 8, m2 = 40, pc = 0, fc = 0, cf = 0, cs = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      automatic int sc, up = 0, dn = 0;
      bit cap;
      subnet_e e;
      // phases: mostly high scores, then mostly low, then mixed
      sc = (n < 200) ? int'($urandom_range(30, 120)) : (n < 400) ? int'($urandom_range(0, 45)) : int'($urandom_range(0, 255));
      cap = cs > CSEC;
      e = cap ? SUB_C27 : (sc < m1) ? SUB_BIL : (sc < m2) ? SUB_C27 : SUB_C54;
      if (e == SUB_C54) begin cf++; cs++; end
      if (++pc == PPF) begin
        if (!cap && cf > HIF) begin up = 1; m1 = (m1 + 1 > 255) ? 255 : m1 + 1; m2 = (m2 + 5 > 255) ? 255 : m2 + 5; end
        else if (!cap && cf < LOF) begin dn = 1; m1 = (m1 < 1) ? 0 : m1 - 1; m2 = (m2 < 5) ? 0 : m2 - 5; end
        pc = 0; cf = 0;
        if (++fc == FPS) begin fc = 0; cs = 0; end
      end
      @(negedge clk);
      score_valid = 1'b1; score = 8'(sc);
      @(negedge clk);
      score_valid = 1'b0;
      checks++;
      if (!dec_valid || subnet != e || int'(adj_up) != up || int'(adj_down) != dn) begin
        failures++;
        if (failures < 6) $display("n %0d: dec %0d/%0d want %0d, up %0d/%0d down %0d/%0d", n, dec_valid, subnet, e, adj_up, up, adj_down, dn);
      end
      checks++;
      if (int'(t1) != m1 || int'(t2) != m2 || capped != (cs > CSEC)) begin
        failures++;
        if (failures < 6) $display("n %0d: t1 %0d/%0d t2 %0d/%0d", n, t1, m1, t2, m2);
      end
      n_up += up; n_dn += dn; n_cap += int'(cap);
    end
    checks++;
    if (n_up == 0 || n_dn == 0 || n_cap == 0) begin failures++; $display("not all mechanisms: up %0d down %0d cap %0d", n_up, n_dn, n_cap); end
    $display("raised %0d, lowered %0d, capped decisions %0d", n_up, n_dn, n_cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
