// weight_sram: on-chip storage of the whole model's weights and biases.
//
// WDEPTH words of 27 FXP10 values (2048 x 270 bit = 67.5 KB; the published
// size is 67 KB). Written once from DRAM through (we, waddr, wdata); read
// synchronously by the weight loader of the sequencer, data one cycle after
// the address. The layout of the layers in it is given in essr_pkg.
module weight_sram
  import essr_pkg::*;
#(
  parameter int DEPTH = WDEPTH,
  localparam int AB   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AB-1:0] waddr,
  input  vec_t          wdata,
  input  logic [AB-1:0] raddr,
  output vec_t          rdata
);
  vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
