// pe: one processing element of the GLNPU PE blocks.
//
// Weight-stationary multiplier: the 10-bit weight is preloaded once per pass
// through (wload, wdata) and then held while features stream past, which
// follows the published PE-block description. Each cycle the PE multiplies
// its feature input by the stored weight; the full-precision 20-bit product
// is registered, so the product of the feature presented in cycle t appears
// at p in cycle t+1. The product register is this design's pipelining choice.
module pe
  import essr_pkg::*;
(
  input  logic                 clk,
  input  logic                 wload,   // load wdata into the weight register
  input  act_t                 wdata,
  input  act_t                 x,       // feature input
  output logic signed [PW-1:0] p        // registered product x * w
);
  act_t w;

  always_ff @(posedge clk) begin
    if (wload) w <= wdata;
    p <= PW'(x) * PW'(w);
  end
endmodule
