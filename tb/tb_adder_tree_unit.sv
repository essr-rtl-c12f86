// tb_adder_tree_unit: self-checking test of an adder tree with its
// requantisation.
// Loads a random bias word, then drives random partial sums of two groups
// with random use_b, shift and ReLU settings, and checks one cycle later
// y = clamp(round((a [+ b] + bias * 2^sh) / 2^sh)) with optional ReLU,
// computed here in 64-bit integers (round half up, clamp to -512..511).
module tb_adder_tree_unit;
  import essr_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic load_en = 1'b0, use_b = 1'b0, relu = 1'b0;
  vec_t load_w = '0, y;
  accv_t a = '0, b = '0;
  logic [4:0] sh = 5'd6;
  int checks = 0, failures = 0, n_sat = 0, n_mid = 0;
  int bias [LANES];
  adder_tree_unit dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if (n % 100 == 0) begin
        load_en = 1'b1;
        for (int k = 0; k < LANES; k++) begin bias[k] = int'($urandom_range(0, 1023)) - 512; load_w[k] = act_t'(bias[k]); end
        @(negedge clk);
        load_en = 1'b0;
      end
      use_b = 1'($urandom_range(0, 1));
      relu  = 1'($urandom_range(0, 1));
      sh    = 5'($urandom_range(0, 8));
      for (int k = 0; k < LANES; k++) begin
        a[k] = acc_t'(int'($urandom_range(0, 1 << 16)) - (1 << 15));
        b[k] = acc_t'(int'($urandom_range(0, 1 << 16)) - (1 << 15));
      end
      @(posedge clk); #1;
      for (int k = 0; k < LANES; k++) begin
        automatic longint v = longint'(a[k]) + (use_b ? longint'(b[k]) : 0) + longint'(bias[k]) * (longint'(1) << sh);
        if (sh != 0) v = (v + (longint'(1) << (sh - 1))) >>> sh;
        if (v > 511) v = 511;
        if (v < -512) v = -512;
        if (relu && v < 0) v = 0;
        if (v == 511 || v == -512) n_sat++; else n_mid++;
        checks++;
        if (longint'(y[k]) != v) begin failures++; if (failures < 5) $display("lane %0d: %0d want %0d", k, y[k], v); end
      end
    end
    $display("saturated %0d, in range %0d", n_sat, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
