// tb_edge_score: self-checking test of the edge-score unit.
// Streams 8x8 patches (flat, stripes, random texture, single edge) and
// compares the score with a reference computed here: BT.601 integer luma,
// 4-neighbour Laplacian with replicated border, absolute value clamped to
// 255, truncated mean. Also checks that score_valid comes exactly P*P
// cycles after the last pixel.
module tb_edge_score;
  localparam int P = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0;
  logic [2:0][7:0] in_pix = '0;
  logic score_valid, busy;
  logic [7:0] score;
  int checks = 0, failures = 0;
  edge_score #(.P(P)) dut (.*);
  int pin [3][P][P];
  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 12; n++) begin
      int y [P][P];
      automatic int sum = 0, e, tl;
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++)
          for (int ch = 0; ch < 3; ch++)
            case (n % 4)
              0: pin[ch][r][c] = 77 + ch;
              1: pin[ch][r][c] = (c % 2 != 0) ? 90 : 100 + ch;
              2: pin[ch][r][c] = int'($urandom_range(0, 255));
              default: pin[ch][r][c] = (c < P / 2) ? 10 : 250;
            endcase
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++)
          y[r][c] = (77 * pin[0][r][c] + 150 * pin[1][r][c] + 29 * pin[2][r][c] + 128) / 256;
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++) begin
          automatic int v = 4 * y[r][c] - y[(r > 0) ? r - 1 : r][c] - y[(r < P - 1) ? r + 1 : r][c]
                  - y[r][(c > 0) ? c - 1 : c] - y[r][(c < P - 1) ? c + 1 : c];
          if (v < 0) v = -v;
          sum += (v > 255) ? 255 : v;
        end
      e = sum / (P * P);
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++) begin
          @(negedge clk);
          in_valid = 1'b1;
          for (int ch = 0; ch < 3; ch++) in_pix[ch] = 8'(pin[ch][r][c]);
        end
      @(negedge clk);
      in_valid = 1'b0;
      tl = cyc;
      while (!score_valid) @(negedge clk);
      checks++;
      if (int'(score) != e) begin failures++; $display("patch %0d: score %0d want %0d", n, score, e); end
      checks++;
      if (cyc - tl != P * P) begin failures++; $display("patch %0d: %0d cycles, want %0d", n, cyc - tl, P * P); end
      while (busy) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
