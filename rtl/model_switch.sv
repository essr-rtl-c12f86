// model_switch: edge-threshold subnet decision with resource adaptive model
// switching.
//
// Each patch's edge score selects a subnet (published rule): below
// threshold1 bilinear, below threshold2 C27, otherwise C54. Thresholds start
// at 8 and 40. The published adaptation (Algorithm 1) is implemented as
// follows: C54 decisions are counted per frame and per second. Once more
// than C54_PER_SEC C54 patches have been issued in the current second, every
// remaining patch of that second runs with C27. Otherwise, at the end of
// each frame, more than HI_PER_FRAME C54 patches raise threshold1 by 1 and
// threshold2 by 5, fewer than LO_PER_FRAME lower them by the same steps.
// Frame and second boundaries are found by counting PATCHES_PER_FRAME
// patches and FRAMES_PER_SEC frames.
//
// This design's choices: score == threshold goes to the larger subnet;
// thresholds saturate at 0 and 255; no threshold change in a frame that
// ended with the per-second cap active. The decision appears one cycle after
// score_valid.
module model_switch
  import essr_pkg::*;
#(
  parameter int PATCHES_PER_FRAME = 2304,   // 64 x 36 patches of 1920x1080 LR
  parameter int FRAMES_PER_SEC    = 30,
  parameter int C54_PER_SEC       = 25500,
  parameter int HI_PER_FRAME      = 1000,
  parameter int LO_PER_FRAME      = 700,
  parameter int T1_INIT           = 8,
  parameter int T2_INIT           = 40,
  parameter int T1_STEP           = 1,
  parameter int T2_STEP           = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       score_valid,
  input  logic [7:0] score,
  output logic       dec_valid,
  output subnet_e    subnet,
  output logic [7:0] t1,
  output logic [7:0] t2,
  output logic       capped,       // per-second C54 budget exhausted
  output logic       adj_up,       // pulses when thresholds were raised
  output logic       adj_down      // pulses when thresholds were lowered
);
  logic [31:0] pcnt, fcnt, c54_frame, c54_sec;
  subnet_e d;
  logic last_patch;
  logic [31:0] nf;

  assign capped = c54_sec > 32'(C54_PER_SEC);

  always_comb begin
    if (capped)                d = SUB_C27;
    else if (score < t1)       d = SUB_BIL;
    else if (score < t2)       d = SUB_C27;
    else                       d = SUB_C54;
  end

  function automatic logic [7:0] sat_step(input logic [7:0] v, input int s, input logic up);
    int r;
    r = up ? int'(v) + s : int'(v) - s;
    if (r < 0) r = 0;
    if (r > 255) r = 255;
    return 8'(r);
  endfunction

  assign nf = c54_frame + ((d == SUB_C54) ? 32'd1 : 32'd0);
  assign last_patch = int'(pcnt) == PATCHES_PER_FRAME - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt <= '0; fcnt <= '0; c54_frame <= '0; c54_sec <= '0;
      t1 <= 8'(T1_INIT); t2 <= 8'(T2_INIT);
      dec_valid <= 1'b0; subnet <= SUB_BIL; adj_up <= 1'b0; adj_down <= 1'b0;
    end else begin
      dec_valid <= 1'b0; adj_up <= 1'b0; adj_down <= 1'b0;
      if (score_valid) begin
        dec_valid <= 1'b1;
        subnet    <= d;
        if (last_patch) begin
          pcnt <= '0;
          c54_frame <= '0;
          if (!capped) begin
            if (nf > 32'(HI_PER_FRAME)) begin
              t1 <= sat_step(t1, T1_STEP, 1'b1); t2 <= sat_step(t2, T2_STEP, 1'b1); adj_up <= 1'b1;
            end else if (nf < 32'(LO_PER_FRAME)) begin
              t1 <= sat_step(t1, T1_STEP, 1'b0); t2 <= sat_step(t2, T2_STEP, 1'b0); adj_down <= 1'b1;
            end
          end
          if (int'(fcnt) == FRAMES_PER_SEC - 1) begin
            fcnt <= '0; c54_sec <= '0;
          end else begin
            fcnt <= fcnt + 1;
            c54_sec <= c54_sec + ((d == SUB_C54) ? 32'd1 : 32'd0);
          end
        end else begin
          pcnt <= pcnt + 1;
          c54_frame <= nf;
          c54_sec <= c54_sec + ((d == SUB_C54) ? 32'd1 : 32'd0);
        end
      end
    end
  end
endmodule
