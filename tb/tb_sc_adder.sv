// tb_sc_adder: self-checking test of the shortcut adder.
// Each cycle drives a random 27-lane feature x and a random shortcut
// vector sc. The shortcut belongs to the feature of the previous cycle (the
// SRAM answers one cycle after being addressed), so after each clock edge y
// must be sat(x[previous] + sc[now]), or x[previous] when en is low:
// two cycles from x to y.
module tb_sc_adder;
  import essr_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0;
  vec_t x = '0, sc = '0, y;
  int checks = 0, failures = 0;
  sc_adder dut (.*);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    vec_t xp;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      xp = x;
      for (int k = 0; k < 27; k++) begin
        x[k]  = act_t'(int'($urandom_range(0, 1023)) - 512);
        sc[k] = act_t'(int'($urandom_range(0, 1023)) - 512);
      end
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (n > 0)
        for (int k = 0; k < 27; k++) begin
          automatic int e = int'(xp[k]) + (en ? int'(sc[k]) : 0);
          e = (e > 511) ? 511 : (e < -512) ? -512 : e;
          checks++;
          if (int'(y[k]) != e) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
