// progressive_filter: threshold-aware, clock-gated progressive filter of BGPP.
//
// Holds the estimated attention scores A[0..63] of one 64-key block and the mask
// of keys still alive. During a round the scores of live keys arrive 16 at a time;
// the threshold-updating (TU) part keeps the running maximum and minimum of the
// live scores. At the end of the round the threshold is
//     theta = max - alpha_r * radius          (radius = 3, 0 <= alpha_r <= 1)
// and the clipping module keeps a key only if its score is greater than theta.
// If theta is below the minimum, every live key would pass: clipping is skipped
// (clock-gated) and the mask stays as it is. alpha_r is a fraction with
// ALPHA_FRAC bits (16 = 1.0 with the default); the comparison is done scaled by
// 2^ALPHA_FRAC so no precision is lost. The formula, the radius and the min/max
// gating are the published ones; the fixed-point format is this design's choice.
// The comparison is strict as published ("greater than this threshold"), so
// alpha_r = 0 removes every key; a round without any live key changes nothing.
//
// Interface: init_i loads the initial mask (keys present in the block);
// round_start_i clears max/min; in_valid_i writes scores in_sum_i for keys
// 16*in_beat_i.. (only where in_live_i); eval_i with alpha_i updates mask_o in
// the next cycle and pulses gated_o if clipping was skipped. score_o exposes the
// stored scores (partial sums for the next round).
module progressive_filter #(
  parameter int unsigned N_KEYS     = 64,
  parameter int unsigned N_IN       = 16,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned RADIUS     = 3,
  parameter int unsigned ALPHA_FRAC = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init_i,
  input  logic [N_KEYS-1:0]       init_mask_i,
  input  logic                    round_start_i,
  input  logic                    in_valid_i,
  input  logic [$clog2(N_KEYS/N_IN)-1:0] in_beat_i,
  input  logic [N_IN-1:0]         in_live_i,
  input  logic signed [ACC_W-1:0] in_sum_i [N_IN],
  input  logic                    eval_i,
  input  logic [ALPHA_FRAC:0]     alpha_i,
  output logic [N_KEYS-1:0]       mask_o,
  output logic signed [ACC_W-1:0] score_o [N_KEYS],
  output logic                    gated_o,
  output logic                    eval_done_o
);
  localparam int unsigned SW = ACC_W + ALPHA_FRAC + 3;
  logic signed [ACC_W-1:0] amax, amin, bmax, bmin;
  logic                    any;                 // a live score was seen this round
  logic signed [SW-1:0]    theta_s, min_s;

  // TU: running max/min over the live scores of this round; the first live
  // beat of a round restarts the statistics
  always_comb begin
    logic seen;
    seen = any && !round_start_i;
    bmax = amax;
    bmin = amin;
    for (int i = 0; i < N_IN; i++)
      if (in_live_i[i]) begin
        if (!seen || in_sum_i[i] > bmax) bmax = in_sum_i[i];
        if (!seen || in_sum_i[i] < bmin) bmin = in_sum_i[i];
        seen = 1'b1;
      end
  end

  assign theta_s = (SW'(amax) <<< ALPHA_FRAC) - SW'(alpha_i * RADIUS);
  assign min_s   = SW'(amin) <<< ALPHA_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_o      <= '0;
      amax        <= '0;
      amin        <= '0;
      any         <= 1'b0;
      gated_o     <= 1'b0;
      eval_done_o <= 1'b0;
      for (int k = 0; k < N_KEYS; k++) score_o[k] <= '0;
    end else begin
      gated_o     <= 1'b0;
      eval_done_o <= 1'b0;
      if (init_i) mask_o <= init_mask_i;
      if (round_start_i) any <= 1'b0;
      if (in_valid_i && (in_live_i != '0)) begin
        for (int i = 0; i < N_IN; i++)
          if (in_live_i[i]) score_o[N_IN*in_beat_i + i] <= in_sum_i[i];
        any  <= 1'b1;
        amax <= bmax;
        amin <= bmin;
      end
      if (eval_i) begin
        eval_done_o <= 1'b1;
        if (!any) begin
          // no live key this round: nothing to clip, mask unchanged
        end else if (theta_s < min_s) begin
          gated_o <= 1'b1;                     // every live key passes: skip clipping
        end else begin
          for (int k = 0; k < N_KEYS; k++)
            mask_o[k] <= mask_o[k] && ((SW'(score_o[k]) <<< ALPHA_FRAC) > theta_s);
        end
      end
    end
  end
endmodule
