// input_buffer: holds the RGB low-resolution input patch fetched from DRAM.
//
// P*P pixels of three 8-bit colours, written in raster order by the DRAM
// side and read by the PE array for the first layer and for bilinear
// interpolation. Read data appear one cycle after the address, as FXP10
// activations with the pixel value as integer.
module input_buffer
  import essr_pkg::*;
#(
  parameter int P  = 32,
  localparam int AB = $clog2(P * P)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AB-1:0]     waddr,
  input  logic [2:0][7:0]   wpix,     // {B, G, R}
  input  logic [AB-1:0]     raddr,
  output act_t [2:0]        rdata
);
  logic [2:0][7:0] mem [P * P];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wpix;
    for (int k = 0; k < 3; k++) rdata[k] <= act_t'({2'b00, mem[raddr][k]});
  end
endmodule
