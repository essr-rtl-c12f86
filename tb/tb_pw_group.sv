// tb_pw_group: self-checking test of pw_group.
// A 1x1 group: three 27x9 blocks, 27 inputs, 27 outputs.
// Random weights are loaded one row at a time, then a new random input is
// driven every cycle and each output is compared, exactly 3 cycles later,
// with the sum of products computed here.
module tb_pw_group;
  import essr_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic load_en = 1'b0;
  logic [4:0] load_row = '0;
  vec_t load_w = '0;
  vec_t x = '0; accv_t psum;
  int checks = 0, failures = 0;
  int w [LANES][27];
  int hist [8][LANES];
  pw_group dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int r = 0; r < 27; r++) begin
      @(negedge clk);
      load_en = 1'b1; load_row = 5'(r);
      for (int c = 0; c < LANES; c++) begin w[c][r] = int'($urandom_range(0, 1023)) - 512; load_w[c] = act_t'(w[c][r]); end
    end
    @(negedge clk) load_en = 1'b0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int r = 0; r < LANES; r++) x[r] = act_t'(int'($urandom_range(0, 1023)) - 512);
      for (int c = 0; c < LANES; c++) begin hist[n % 8][c] = 0; for (int r = 0; r < LANES; r++) hist[n % 8][c] += w[c][r] * int'(x[r]); end
      if (n >= 3)
        for (int c = 0; c < LANES; c++) begin
          checks++;
          if (int'(psum[c]) != hist[(n - 3) % 8][c]) begin
            failures++;
            if (failures < 4) $display("n %0d lane %0d: %0d want %0d", n, c, psum[c], hist[(n - 3) % 8][c]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
