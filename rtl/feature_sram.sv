// feature_sram: one of the three feature SRAMs (ping, pong, shortcut).
//
// Holds one patch of up to 54 FXP10 channels, one word per pixel: P*P words
// of 540 bits (32x32 x 54 x 10 bit = 69 KB, the published size). One write
// port and two synchronous read ports: port a feeds the PE array, port b the
// shortcut adders. The second read port is this design's choice: in the C27
// structure-friendly fusion block the same buffer is both the block input
// and its shortcut. Read data appear one cycle after the address.
module feature_sram
  import essr_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int WIDTH = CH * DW,
  localparam int AB   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AB-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AB-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic [AB-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end

  a_waddr: assert property (@(posedge clk) we |-> int'(waddr) < DEPTH);
endmodule
