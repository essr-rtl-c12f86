// sc_adder: shortcut adder in front of a 1x1 group.
//
// Adds, lane by lane with FXP10 saturation, the shortcut feature read from
// the feature SRAM to the feature that enters the 1x1 group, as in the
// SFB / "1x1 with shortcut" dataflow. The caller addresses the shortcut SRAM
// with the position of the incoming feature in the same cycle; the SRAM data
// arrives one cycle later, so the adder holds the feature for that cycle and
// registers the sum. With en low it passes the feature unchanged.
// Latency: two cycles.
module sc_adder
  import essr_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  vec_t  x,
  input  vec_t  sc,     // shortcut data, one cycle after the token
  output vec_t  y
);
  vec_t x_q;

  always_ff @(posedge clk) begin
    x_q <= x;
    for (int c = 0; c < LANES; c++) y[c] <= en ? sat_add(x_q[c], sc[c]) : x_q[c];
  end
endmodule
