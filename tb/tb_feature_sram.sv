// tb_feature_sram: self-checking test of a feature SRAM bank.
// Writes random 540-bit words (54 FXP10 channels) and reads them back on
// both read ports at once, with different addresses, while writes to
// other addresses continue; data appear one cycle after the address.
module tb_feature_sram;
  import essr_pkg::*;
  localparam int DEPTH = 64;
  localparam int WIDTH = CH * DW;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [5:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [WIDTH-1:0] wdata = '0, rdata_a, rdata_b;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;
  feature_sram #(.DEPTH(DEPTH)) dut (.*);
  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH; i += 30) v[i +: 30] = 30'($urandom);
    return v;
  endfunction
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 6'(a); wdata = rnd(); shadow[a] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      automatic int a = int'($urandom_range(0, DEPTH / 2 - 1));
      automatic int b = int'($urandom_range(0, DEPTH / 2 - 1));
      automatic int w = int'($urandom_range(DEPTH / 2, DEPTH - 1));
      @(negedge clk);
      raddr_a = 6'(a); raddr_b = 6'(b);
      we = 1'b1; waddr = 6'(w); wdata = rnd(); shadow[w] = wdata;
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a != shadow[a]) failures++;
      if (rdata_b != shadow[b]) failures++;
      // swap halves now and then so that the written half is read too
      if (n == 200) for (int i = 0; i < DEPTH / 2; i++) begin
        @(negedge clk);
        raddr_a = 6'(i + DEPTH / 2); raddr_b = 6'(DEPTH - 1 - i); we = 1'b0;
        @(posedge clk); #1;
        checks += 2;
        if (rdata_a != shadow[i + DEPTH / 2]) failures++;
        if (rdata_b != shadow[DEPTH - 1 - i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
