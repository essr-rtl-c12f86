// tb_input_buffer: self-checking test of the input buffer.
// Fills an 8x8 patch of random RGB pixels in raster order, then reads all
// positions in a random order: one cycle after the read address the three
// colours must come back as non-negative FXP10 values.
module tb_input_buffer;
  import essr_pkg::*;
  localparam int P = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [2:0][7:0] wpix = '0;
  act_t [2:0] rdata;
  logic [2:0][7:0] shadow [P * P];
  int checks = 0, failures = 0;
  input_buffer #(.P(P)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 3; n++) begin
      for (int a = 0; a < P * P; a++) begin
        @(negedge clk);
        we = 1'b1; waddr = 6'(a);
        for (int c = 0; c < 3; c++) wpix[c] = 8'($urandom_range(0, 255));
        shadow[a] = wpix;
      end
      @(negedge clk) we = 1'b0;
      for (int i = 0; i < P * P; i++) begin
        automatic int a = int'($urandom_range(0, P * P - 1));
        raddr = 6'(a);
        @(posedge clk); #1;
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (int'(rdata[c]) != int'(shadow[a][c])) failures++;
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
