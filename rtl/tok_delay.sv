// tok_delay: delays a position token by D cycles so that it stays aligned
// with the data of a fixed-latency pipeline stage. The valid bit is reset.
module tok_delay
  import essr_pkg::*;
#(
  parameter int D = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  tok_t i,
  output tok_t o
);
  tok_t sr [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < D; k++) sr[k] <= '0;
    end else begin
      sr[0] <= i;
      for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
    end
  end
  assign o = sr[D-1];
endmodule
