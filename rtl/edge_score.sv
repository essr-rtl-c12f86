// edge_score: edge score of one low-resolution input patch.
//
// As published: the luminance of the patch is filtered with a 3x3 Laplacian,
// the absolute response is clamped to 0..255 and averaged over the patch;
// the average is the patch's edge score. The patch arrives as P*P RGB pixels
// in raster order (one per in_valid cycle) and its luma is stored. Then one
// Laplacian response per cycle is accumulated, and score_valid pulses with
// the score P*P cycles after the last pixel.
//
// This design's choices, where the description is silent: luma
// Y = (77R + 150G + 29B + 128) >> 8 (BT.601 weights); the 4-neighbour
// kernel [0 1 0; 1 -4 1; 0 1 0]; replicated pixels beyond the patch border;
// the average is the truncated mean over all P*P positions.
module edge_score #(
  parameter int P = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [2:0][7:0] in_pix,     // {B, G, R}
  output logic            score_valid,
  output logic [7:0]      score,
  output logic            busy
);
  localparam int N  = P * P;
  localparam int AB = $clog2(N);
  localparam int SW = AB + 8;

  logic [7:0] y [N];
  logic [AB:0] wcnt, ccnt;
  logic computing;
  logic [SW-1:0] acc;
  logic [7:0] luma;

  assign luma = 8'((16'd77 * in_pix[0] + 16'd150 * in_pix[1] + 16'd29 * in_pix[2] + 16'd128) >> 8);
  assign busy = computing;

  // Laplacian at position ccnt, replicated border
  logic [7:0] lap;
  always_comb begin
    int r, c, ru, rd, cl, cr, v;
    r  = int'(ccnt[AB-1:0]) / P;
    c  = int'(ccnt[AB-1:0]) % P;
    ru = (r == 0)     ? r : r - 1;
    rd = (r == P - 1) ? r : r + 1;
    cl = (c == 0)     ? c : c - 1;
    cr = (c == P - 1) ? c : c + 1;
    v  = 4 * int'(y[r*P+c]) - int'(y[ru*P+c]) - int'(y[rd*P+c])
       - int'(y[r*P+cl]) - int'(y[r*P+cr]);
    if (v < 0) v = -v;
    if (v > 255) v = 255;
    lap = 8'(v);
  end

  always_ff @(posedge clk) begin
    if (in_valid && !computing) y[wcnt[AB-1:0]] <= luma;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt <= '0; ccnt <= '0; computing <= 1'b0; acc <= '0;
      score_valid <= 1'b0; score <= '0;
    end else begin
      score_valid <= 1'b0;
      if (!computing) begin
        if (in_valid) begin
          if (int'(wcnt) == N - 1) begin
            wcnt <= '0; computing <= 1'b1; ccnt <= '0; acc <= '0;
          end else wcnt <= wcnt + 1'b1;
        end
      end else begin
        acc <= acc + SW'(lap);
        if (int'(ccnt) == N - 1) begin
          computing   <= 1'b0;
          score_valid <= 1'b1;
          score       <= 8'((acc + SW'(lap)) / SW'(N));
        end else ccnt <= ccnt + 1'b1;
      end
    end
  end
endmodule
