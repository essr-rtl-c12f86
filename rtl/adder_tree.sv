// adder_tree: combinational sum of N signed operands. Used for the
// per-column trees of the PE blocks (N = 9). The sum is written as a loop;
// synthesis is free to rebalance it into a tree. The output width OW must
// hold the sum without overflow.
module adder_tree #(
  parameter int N  = 9,
  parameter int IW = 20,
  parameter int OW = 24
) (
  input  logic signed [N-1:0][IW-1:0] in,
  output logic signed [OW-1:0]        sum
);
  always_comb begin
    sum = '0;
    for (int k = 0; k < N; k++) sum = sum + OW'(signed'(in[k]));
  end
endmodule
