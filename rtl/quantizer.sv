// quantizer: output requantization of the auxiliary processing unit.
//
// Turns an INT GEMM accumulator back into an 8-bit activation for the next layer,
//     Y_q = Scale[ch] * (W_q X_q) + Bias[ch],
// the form derived for per-channel symmetric weights and per-tensor asymmetric
// activations: Scale folds Delta_W * Delta_X / Delta_Y, Bias folds the output zero
// point and the activation zero-point correction, all known after calibration.
// The published unit converts between FP16 and INT8; this design keeps the
// datapath integer: Scale is an unsigned fixed-point number with SHIFT fraction
// bits, Bias a signed integer, and the result is rounded and saturated to
// 0..255 (unsigned activations).
//
// Interface: cfg_we_i writes the Scale/Bias pair of channel cfg_ch_i. in_valid_i
// with in_ch_i and in_acc_i gives out_valid_o / out_q_o two cycles later.
module quantizer #(
  parameter int unsigned N_CH    = 1280,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned SCALE_W = 16,
  parameter int unsigned BIAS_W  = 16,
  parameter int unsigned SHIFT   = 16,
  parameter int unsigned CHW     = $clog2(N_CH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we_i,
  input  logic [CHW-1:0]           cfg_ch_i,
  input  logic [SCALE_W-1:0]       cfg_scale_i,
  input  logic signed [BIAS_W-1:0] cfg_bias_i,
  input  logic                     in_valid_i,
  input  logic [CHW-1:0]           in_ch_i,
  input  logic signed [ACC_W-1:0]  in_acc_i,
  output logic                     out_valid_o,
  output logic [CHW-1:0]           out_ch_o,
  output logic [7:0]               out_q_o
);
  localparam int unsigned PW = ACC_W + SCALE_W + 2;

  logic [SCALE_W+BIAS_W-1:0] tbl [N_CH];
  logic [SCALE_W+BIAS_W-1:0] ent;
  logic signed [ACC_W-1:0]   acc1;
  logic [CHW-1:0]            ch1;
  logic                      v1;
  logic signed [PW-1:0]      prod, y;

  always_ff @(posedge clk) begin
    if (cfg_we_i)   tbl[cfg_ch_i] <= {cfg_scale_i, cfg_bias_i};
    if (in_valid_i) ent <= tbl[in_ch_i];
  end

  assign prod = PW'(acc1) * $signed({2'b0, ent[SCALE_W+BIAS_W-1:BIAS_W]});
  assign y    = ((prod + (PW'(1) <<< (SHIFT - 1))) >>> SHIFT)
              + PW'($signed(ent[BIAS_W-1:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc1 <= '0; ch1 <= '0; v1 <= 1'b0;
      out_valid_o <= 1'b0; out_ch_o <= '0; out_q_o <= '0;
    end else begin
      v1 <= in_valid_i;
      if (in_valid_i) begin
        acc1 <= in_acc_i;
        ch1  <= in_ch_i;
      end
      out_valid_o <= v1;
      if (v1) begin
        out_ch_o <= ch1;
        out_q_o  <= (y < 0) ? 8'd0 : (y > 255) ? 8'd255 : y[7:0];
      end
    end
  end
endmodule
