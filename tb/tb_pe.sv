// tb_pe: self-checking test of the processing element.
// Loads random FXP10 weights, drives random FXP10 features and checks that
// the registered product equals x*w one cycle later (latency 1), and that
// the weight register holds its value while wload is low.
module tb_pe;
  import essr_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wload = 1'b0;
  act_t wdata = '0, x = '0;
  logic signed [PW-1:0] p;
  int checks = 0, failures = 0;
  pe dut (.*);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int w, xv;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (n % 50 == 0) begin w = int'($urandom_range(0, 1023)) - 512; wload = 1'b1; wdata = act_t'(w); end
      else wload = 1'b0;
      xv = int'($urandom_range(0, 1023)) - 512;
      x = act_t'(xv);
      @(posedge clk); #1;
      if (wload) continue;      // a new weight is used from the next cycle on
      checks++;
      if (int'(p) != w * xv) begin failures++; if (failures < 5) $display("p=%0d want %0d", p, w * xv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
