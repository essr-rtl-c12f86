// tb_boundary_proc: self-checking test of pixel shuffle and
// overlap-and-average.
// A 20x14 LR frame is covered by 6x6 patches with an overlap of 2 (stride
// 4): 5 x 3 patches. Each patch position carries 48 random values in
// -40..300 (so that clamping to 0..255 happens). Patches are sent in raster
// order, one position per cycle, and every emitted block is compared with
// the average computed here: clamp each patch's value, average the left
// and right patch where two overlap, then the upper and lower results.
// Every frame position must be emitted exactly once, three cycles after the
// last patch that covers it.
module tb_boundary_proc;
  import essr_pkg::*;
  localparam int P = 6, OVL = 2, FW = 20, FH = 14, S = P - OVL;
  localparam int NPX = 5, NPY = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0;
  logic [7:0] in_row = '0, in_col = '0, in_px = '0, in_py = '0;
  act_t [OUTCH-1:0] in_data = '0;
  logic out_valid, avg_h, avg_v;
  logic [15:0] out_x, out_y;
  logic [OUTCH-1:0][7:0] out_pix;
  int checks = 0, failures = 0, nh = 0, nv = 0;
  boundary_proc #(.P(P), .OVL(OVL), .FW(FW), .FH(FH)) dut (.*);
  int v [NPY][NPX][P][P][OUTCH];
  int seen [FH][FW];

  function automatic int cl(int a);
    return (a < 0) ? 0 : (a > 255) ? 255 : a;
  endfunction
  function automatic int rowval(int py, int x, int y, int k);
    int vals [2], n = 0;
    for (int px = 0; px < NPX; px++)
      if (x - px * S >= 0 && x - px * S < P) begin vals[n] = cl(v[py][px][y - py * S][x - px * S][k]); n++; end
    return (n == 2) ? (vals[0] + vals[1] + 1) / 2 : vals[0];
  endfunction
  function automatic int expect_at(int x, int y, int k);
    int vals [2], n = 0;
    for (int py = 0; py < NPY; py++)
      if (y - py * S >= 0 && y - py * S < P) begin vals[n] = rowval(py, x, y, k); n++; end
    return (n == 2) ? (vals[0] + vals[1] + 1) / 2 : vals[0];
  endfunction

  always @(posedge clk) begin
    if (avg_h) nh++;
    if (avg_v) nv++;
    if (out_valid) begin
      automatic int bad = 0;
      checks++;
      if (int'(out_x) >= FW || int'(out_y) >= FH) bad = 1;
      else begin
        seen[out_y][out_x]++;
        if (seen[out_y][out_x] != 1) bad = 1;
        for (int k = 0; k < OUTCH; k++) if (int'(out_pix[k]) != expect_at(out_x, out_y, k)) bad++;
      end
      if (bad != 0) begin failures++; if (failures < 5) $display("block (%0d,%0d) wrong", out_x, out_y); end
    end
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int py = 0; py < NPY; py++)
      for (int px = 0; px < NPX; px++)
        for (int r = 0; r < P; r++)
          for (int c = 0; c < P; c++)
            for (int k = 0; k < OUTCH; k++) v[py][px][r][c][k] = int'($urandom_range(0, 340)) - 40;
    for (int y = 0; y < FH; y++) for (int x = 0; x < FW; x++) seen[y][x] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int py = 0; py < NPY; py++)
      for (int px = 0; px < NPX; px++) begin
        for (int r = 0; r < P; r++)
          for (int c = 0; c < P; c++) begin
            @(negedge clk);
            in_valid = 1'b1; in_row = 8'(r); in_col = 8'(c); in_px = 8'(px); in_py = 8'(py);
            for (int k = 0; k < OUTCH; k++) in_data[k] = act_t'(v[py][px][r][c][k]);
          end
        @(negedge clk) in_valid = 1'b0;
        repeat (3) @(negedge clk);
      end
    repeat (5) @(negedge clk);
    for (int y = 0; y < FH; y++)
      for (int x = 0; x < FW; x++) begin
        checks++;
        if (seen[y][x] != 1) begin failures++; if (failures < 8) $display("(%0d,%0d) emitted %0d times", x, y, seen[y][x]); end
      end
    checks++;
    if (nh == 0 || nv == 0) begin failures++; $display("no averaging: h %0d v %0d", nh, nv); end
    $display("horizontal averages %0d, vertical averages %0d", nh, nv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
