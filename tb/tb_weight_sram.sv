// tb_weight_sram: self-checking test of the weight SRAM.
// Writes random 27-value words to random addresses, keeps a shadow copy,
// and reads back every written address: the data must appear one cycle
// after the read address (synchronous read).
module tb_weight_sram;
  import essr_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [7:0] waddr = '0, raddr = '0;
  vec_t wdata = '0, rdata;
  vec_t shadow [DEPTH];
  bit valid [DEPTH];
  int checks = 0, failures = 0;
  weight_sram #(.DEPTH(DEPTH)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'($urandom_range(0, DEPTH - 1));
      for (int k = 0; k < LANES; k++) wdata[k] = act_t'($urandom_range(0, 1023));
      shadow[waddr] = wdata; valid[waddr] = 1'b1;
    end
    @(negedge clk) we = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      if (!valid[a]) continue;
      raddr = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != shadow[a]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
