// tb_pe3x3_block: self-checking test of pe3x3_block.
// A 3x3 block: 27 depth-wise channels, 9 taps each.
// Random weights are loaded one tap at a time, then a new random input is
// driven every cycle and each output is compared, exactly 2 cycles later,
// with the sum of products computed here.
module tb_pe3x3_block;
  import essr_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic load_en = 1'b0;
  logic [3:0] load_tap = '0;
  vec_t load_w = '0;
  act_t [LANES-1:0][ROWS-1:0] win = '0; acc_t [LANES-1:0] sum;
  int checks = 0, failures = 0;
  int w [LANES][9];
  int hist [8][LANES];
  pe3x3_block dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int r = 0; r < 9; r++) begin
      @(negedge clk);
      load_en = 1'b1; load_tap = 4'(r);
      for (int c = 0; c < LANES; c++) begin w[c][r] = int'($urandom_range(0, 1023)) - 512; load_w[c] = act_t'(w[c][r]); end
    end
    @(negedge clk) load_en = 1'b0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int c = 0; c < LANES; c++) for (int t = 0; t < ROWS; t++) win[c][t] = act_t'(int'($urandom_range(0, 1023)) - 512);
      for (int c = 0; c < LANES; c++) begin hist[n % 8][c] = 0; for (int t = 0; t < ROWS; t++) hist[n % 8][c] += w[c][t] * int'(win[c][t]); end
      if (n >= 2)
        for (int c = 0; c < LANES; c++) begin
          checks++;
          if (int'(sum[c]) != hist[(n - 2) % 8][c]) begin
            failures++;
            if (failures < 4) $display("n %0d lane %0d: %0d want %0d", n, c, sum[c], hist[(n - 2) % 8][c]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
