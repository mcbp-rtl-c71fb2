// bgpp_unit: bit-grained progressive prediction (BGPP) for one block of 64 keys.
//
// Decides which keys of a 64-key block are worth attending to, reading the keys
// one bit plane at a time from the most significant magnitude bit down and
// dropping keys as soon as their partial scores fall too far below the best one:
//   round r (r = 0 .. n_rounds-1) uses key magnitude bit 6-r;
//   for each beat of 16 keys that still holds a live key, the bit plane of the
//   live keys is requested from the KV fetcher (sign planes too in round 0);
//   16 bit-serial inner-product units update the partial scores
//   A = 2*A + q . (bit of k, signed);
//   the progressive filter then sets theta = max(A) - alpha_r * 3 and keeps the
//   keys with A > theta (clipping skipped when theta < min(A)).
// Beats without live keys are skipped altogether, which is where the KV cache
// traffic is saved. 16 IP units with 64-input trees and one filter per unit are
// the published sizes (four such units make the 64 trees and four filters of
// the published configuration). Reading the sign plane once in round 0 and
// keeping it locally is this design's choice.
//
// Interface: start_i with q_i (64 signed 8-bit query elements), init_mask_i (keys
// present), n_rounds_i (1..7) and alpha_i[r] (fractions, 16 = 1.0). Key requests
// go out on kreq_* (held until krsp_valid_i); done_o pulses with mask_o final.
// Timing per round: for each live beat, request-to-response latency + 2 cycles;
// + 2 cycles for the threshold and clipping.
module bgpp_unit #(
  parameter int unsigned D          = 64,
  parameter int unsigned N_KEYS     = 64,
  parameter int unsigned N_IP       = 16,
  parameter int unsigned Q_W        = 8,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned MAG        = 7,
  parameter int unsigned ALPHA_FRAC = 4,
  parameter int unsigned NB         = N_KEYS / N_IP,
  parameter int unsigned BW         = $clog2(NB)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start_i,
  input  logic signed [Q_W-1:0] q_i      [D],
  input  logic [N_KEYS-1:0]     init_mask_i,
  input  logic [2:0]            n_rounds_i,
  input  logic [ALPHA_FRAC:0]   alpha_i  [MAG],
  // key bit-plane requests to the fetcher
  output logic                  kreq_valid_o,
  output logic [BW-1:0]         kreq_beat_o,
  output logic [2:0]            kreq_bit_o,
  output logic                  kreq_sign_o,
  output logic [N_IP-1:0]       kreq_mask_o,
  input  logic                  krsp_valid_i,
  input  logic [D-1:0]          krsp_bits_i [N_IP],
  input  logic [D-1:0]          krsp_sign_i [N_IP],
  // result
  output logic                  busy_o,
  output logic                  done_o,
  output logic [N_KEYS-1:0]     mask_o,
  output logic [7:0]            gated_rounds_o,
  output logic [7:0]            skipped_beats_o
);
  typedef enum logic [2:0] {S_IDLE, S_BEAT, S_WAIT, S_IP, S_EVAL, S_EVWAIT, S_DONE} state_t;
  state_t state;

  logic signed [Q_W-1:0] q   [D];
  logic [2:0]            round, nrounds;
  logic [BW-1:0]         beat;
  logic [D-1:0]          signbuf [N_KEYS];
  logic [N_IP-1:0]       live;
  logic                  round_start;
  logic [N_IP-1:0]       ip_valid;
  logic signed [ACC_W-1:0] ip_sum [N_IP];
  logic signed [ACC_W-1:0] score  [N_KEYS];
  logic                  pf_gated, pf_eval_done;

  assign live        = mask_o[N_IP*beat +: N_IP];
  assign busy_o      = (state != S_IDLE);
  assign kreq_valid_o = (state == S_WAIT);
  assign kreq_beat_o  = beat;
  assign kreq_bit_o   = 3'(MAG - 1) - round;
  assign kreq_sign_o  = (round == '0);
  assign kreq_mask_o  = live;

  for (genvar i = 0; i < N_IP; i++) begin : g_ip
    logic [D-1:0] ksign;
    assign ksign = (round == '0) ? krsp_sign_i[i] : signbuf[N_IP*beat + i];
    bgpp_ip_unit #(.D(D), .Q_W(Q_W), .ACC_W(ACC_W)) u_ip (
      .clk, .rst_n,
      .en_i(state == S_WAIT && krsp_valid_i && live[i]),
      .first_i(round == '0), .psum_i(score[N_IP*beat + i]),
      .q_i(q), .kbit_i(krsp_bits_i[i]), .ksign_i(ksign),
      .sum_o(ip_sum[i]), .valid_o(ip_valid[i])
    );
  end

  progressive_filter #(.N_KEYS(N_KEYS), .N_IN(N_IP), .ACC_W(ACC_W),
                       .ALPHA_FRAC(ALPHA_FRAC)) u_pf (
    .clk, .rst_n,
    .init_i(state == S_IDLE && start_i), .init_mask_i,
    .round_start_i(round_start),
    .in_valid_i(state == S_IP), .in_beat_i(beat), .in_live_i(ip_valid),
    .in_sum_i(ip_sum),
    .eval_i(state == S_EVAL), .alpha_i(alpha_i[round]),
    .mask_o, .score_o(score), .gated_o(pf_gated), .eval_done_o(pf_eval_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      round           <= '0;
      nrounds         <= '0;
      beat            <= '0;
      round_start     <= 1'b0;
      done_o          <= 1'b0;
      gated_rounds_o  <= '0;
      skipped_beats_o <= '0;
      for (int j = 0; j < D; j++) q[j] <= '0;
    end else begin
      done_o <= 1'b0;
      if (pf_gated) gated_rounds_o <= gated_rounds_o + 1'b1;
      unique case (state)
        S_IDLE: if (start_i) begin
          q           <= q_i;
          nrounds     <= n_rounds_i;
          round       <= '0;
          beat        <= '0;
          round_start <= 1'b1;
          gated_rounds_o  <= '0;
          skipped_beats_o <= '0;
          state       <= S_BEAT;
        end
        S_BEAT: begin
          if (live != '0) begin
            state <= S_WAIT;
          end else begin
            skipped_beats_o <= skipped_beats_o + 1'b1;   // early termination
            beat <= beat + 1'b1;
            if (beat == BW'(NB - 1)) state <= S_EVAL;
          end
        end
        S_WAIT: if (krsp_valid_i) begin
          if (round == '0)
            for (int i = 0; i < N_IP; i++) signbuf[N_IP*beat + i] <= krsp_sign_i[i];
          state <= S_IP;
        end
        S_IP: begin                    // filter stores the scores of this beat
          round_start <= 1'b0;
          beat <= beat + 1'b1;
          state <= (beat == BW'(NB - 1)) ? S_EVAL : S_BEAT;
        end
        S_EVAL: state <= S_EVWAIT;
        S_EVWAIT: if (pf_eval_done) begin
          round_start <= 1'b1;
          beat        <= '0;
          if (round + 1'b1 == nrounds) begin
            state <= S_DONE;
          end else begin
            round <= round + 1'b1;
            state <= S_BEAT;
          end
        end
        S_DONE: begin
          round_start <= 1'b0;
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // handshake rule: a key response only arrives for an outstanding request
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    krsp_valid_i |-> state == S_WAIT);
endmodule
