// tb_line_buffer: self-checking test of the 3x3 window line buffer.
// A 5x6 patch (padded scan width 8) of random 27-lane data is scanned row
// by row over 6 rows, as the sequencer does for one depth-wise stage. Each
// output token that names a patch position must come with the 3x3 window
// centred on it: zero outside the patch (repl = 0) or the nearest border
// pixel (repl = 1), both computed here. Two patches of each kind.
module tb_line_buffer;
  import essr_pkg::*;
  localparam int H = 5, W = 6, WG = W + 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic repl = 1'b0;
  tok_t tin = '0, tout;
  vec_t din = '0;
  act_t [LANES-1:0][ROWS-1:0] win;
  int checks = 0, failures = 0, centres = 0;
  line_buffer #(.H(H), .W(W)) dut (.*);
  int img [H][W][LANES];

  always @(posedge clk) begin
    #1;
    if (tout.valid && int'(tout.row) >= 0 && int'(tout.row) < H && int'(tout.col) >= 0 && int'(tout.col) < W) begin
      automatic int bad = 0;
      centres++;
      for (int t = 0; t < 9; t++)
        for (int l = 0; l < LANES; l++) begin
          automatic int rr = int'(tout.row) + t / 3 - 1, cc = int'(tout.col) + t % 3 - 1, e;
          if (repl) begin
            rr = (rr < 0) ? 0 : (rr > H - 1) ? H - 1 : rr;
            cc = (cc < 0) ? 0 : (cc > W - 1) ? W - 1 : cc;
          end
          e = (rr >= 0 && rr < H && cc >= 0 && cc < W) ? img[rr][cc][l] : 0;
          if (int'(win[l][t]) != e) bad++;
        end
      checks++;
      if (bad != 0) begin failures++; if (failures < 5) $display("centre (%0d,%0d): %0d taps wrong", tout.row, tout.col, bad); end
    end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4; n++) begin
      repl = n[1];
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int l = 0; l < LANES; l++) img[r][c][l] = int'($urandom_range(0, 1023)) - 512;
      for (int r = 0; r <= H; r++)
        for (int c = 0; c < WG; c++) begin
          @(negedge clk);
          tin.valid = 1'b1; tin.row = 8'(r); tin.col = 8'(c);
          for (int l = 0; l < LANES; l++)
            din[l] = act_t'((r < H && c < W) ? img[r][c][l] : int'($urandom_range(0, 1023)) - 512);
        end
      @(negedge clk) tin.valid = 1'b0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (centres != 4 * H * W) begin failures++; $display("%0d window centres, want %0d", centres, 4 * H * W); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
