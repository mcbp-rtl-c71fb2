// mcbp_top: MCBP LLM inference accelerator core.
//
// The accelerator multiplies 8-bit sign-magnitude weights with 8-bit activations
// one bit slice at a time and exploits three bit-level effects:
//  * BRCR - inside a 4-row group of a bit-slice matrix many 4-bit columns repeat;
//    a CAM finds all columns with the same pattern in one cycle, their
//    activations are added once (group sums), and a fixed reconstruction network
//    turns the 15 group sums into the 4 row results (N_CLUSTERS PE clusters).
//  * BSTC - high-order weight bit slices are mostly zero; each 4-bit column is
//    stored as 0 (all zero) or 1+4 bits, decoded on chip by bit-serial lanes that
//    read a segmented layout from per-lane weight SRAM banks (N_LANES per cluster).
//  * BGPP - attention keys are predicted bit plane by bit plane, MSB first, and
//    pruned after every round against max - alpha*radius, so pruned keys are never
//    fetched again (N_BGPP units of 64 keys, 16 inner-product units each).
// Around them: token SRAM (activations and queries, 384 KB), temp SRAM (vital-key
// masks, 96 KB), the quantizer of the auxiliary unit and the controller. The
// BSTC encoder bank (10 x 4 encoders) is exposed as a combinational compression
// port. Main memory (HBM) is outside: weight banks and token SRAM are filled
// through write ports, keys are read through one memory port per BGPP unit.
// Block structure and sizes follow the published configuration, with the
// departures listed in the accompanying documentation (7 PEs per cluster,
// 640 KB of weight banks, integer quantizer).
//
// Usage: fill weight banks (w_wr_*) and token SRAM (t_wr_*), write quantizer
// parameters (qc_*), pulse gemv_start; results come out as res_valid/res_ch/res_q
// for channel ch = 64*cluster + row, followed by gemv_done. For prediction, pulse
// bgpp_start; masks land in temp SRAM (read through tmp_*), then bgpp_done.
// gemv_done follows the last result.
//
// Size: at the default configuration the core holds 140 PEs, each with a
// 512-column CAM, so coarse synthesis of the flattened core takes far longer
// than any of its blocks; every block synthesises on its own.
module mcbp_top
  import mcbp_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 20,
  parameter int unsigned N_LANES    = 4,
  parameter int unsigned N_BGPP     = 4,
  parameter int unsigned N_ENC      = 40,
  parameter int unsigned BANK_ROWS  = 1024,
  parameter int unsigned TOK_DEPTH  = 12288,   // 384 KB of 256-bit words
  parameter int unsigned TMP_DEPTH  = 12288,   // 96 KB of 64-bit words
  parameter int unsigned KV_AW      = 32,
  parameter int unsigned N_CH       = N_CLUSTERS * T_M,
  parameter int unsigned N_BANKS    = N_CLUSTERS * N_LANES,
  parameter int unsigned CHW        = $clog2(N_CH),
  parameter int unsigned BKW        = $clog2(N_BANKS),
  parameter int unsigned TOK_AW     = $clog2(TOK_DEPTH),
  parameter int unsigned TMP_AW     = $clog2(TMP_DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight SRAM fill (from main memory)
  input  logic                        w_wr_en,
  input  logic [BKW-1:0]              w_wr_bank,
  input  logic [$clog2(BANK_ROWS)-1:0] w_wr_row,
  input  logic [63:0]                 w_wr_data,
  // token SRAM fill
  input  logic                        t_wr_en,
  input  logic [TOK_AW-1:0]           t_wr_addr,
  input  logic [COLS*ACT_W-1:0]       t_wr_data,
  // quantizer parameters
  input  logic                        qc_we,
  input  logic [CHW-1:0]              qc_ch,
  input  logic [15:0]                 qc_scale,
  input  logic signed [15:0]          qc_bias,
  // GEMV command and results
  input  logic                        gemv_start,
  input  logic [3:0]                  gemv_n_chunks,
  input  logic [TOK_AW-1:0]           gemv_act_base,
  output logic                        gemv_busy,
  output logic                        gemv_done,
  output logic                        res_valid,
  output logic [CHW-1:0]              res_ch,
  output logic [7:0]                  res_q,
  output logic signed [ACC_W-1:0]     res_acc,
  // BGPP command
  input  logic                        bgpp_start,
  input  logic [TOK_AW-1:0]           bgpp_q_addr,
  input  logic [KV_AW-1:0]            bgpp_kv_base,
  input  logic [KV_AW-1:0]            bgpp_key_base,
  input  logic [N_BGPP*64-1:0]        bgpp_key_mask,
  input  logic [2:0]                  bgpp_n_rounds,
  input  logic [4:0]                  bgpp_alpha [MAG_BITS],
  input  logic [TMP_AW-1:0]           bgpp_tmp_base,
  output logic                        bgpp_busy,
  output logic                        bgpp_done,
  // key memory ports, one per BGPP unit, 16 lanes each
  output logic                        kv_req      [N_BGPP][16],
  output logic [KV_AW-1:0]            kv_addr     [N_BGPP][16],
  input  logic                        kv_rsp_valid [N_BGPP],
  input  logic [63:0]                 kv_rsp_data [N_BGPP][16],
  // temp SRAM read port
  input  logic                        tmp_re,
  input  logic [TMP_AW-1:0]           tmp_raddr,
  output logic [63:0]                 tmp_rdata,
  // BSTC encoder bank
  input  logic [M-1:0]                enc_col  [N_ENC],
  output logic [M:0]                  enc_code [N_ENC],
  output logic [2:0]                  enc_len  [N_ENC],
  // activity counters
  output logic [31:0]                 stat_cam_gated,
  output logic [31:0]                 stat_pf_gated,
  output logic [31:0]                 stat_beats_skipped,
  output logic [31:0]                 stat_kv_words,
  output logic [31:0]                 stat_weight_bits
);
  // ---------------- controller ----------------
  logic              lane_start, lane_bypass, lanes_busy;
  logic [7:0]        lane_sub_id;
  logic [2:0]        dec_slice;
  logic [1:0]        dec_q;
  logic              cl_clear, cl_act_load, cl_start, cl_busy;
  logic              tok_re;
  logic [TOK_AW-1:0] tok_raddr;
  logic [COLS*ACT_W-1:0] tok_rdata;
  logic              drain_valid;
  logic [CHW-1:0]    drain_ch;
  logic              q_load_lo, q_load_hi, bg_start, bg_busy;
  logic              tmp_we, ctrl_gemv_done;
  logic [1:0]        done_pipe;
  logic [TMP_AW-1:0] tmp_waddr;
  logic [$clog2(N_BGPP)-1:0] tmp_unit;

  mcbp_controller #(.N_CH(N_CH), .N_BGPP(N_BGPP), .TOK_AW(TOK_AW), .TMP_AW(TMP_AW)) u_ctrl (
    .clk, .rst_n,
    .gemv_start_i(gemv_start), .gemv_n_chunks_i(gemv_n_chunks), .gemv_act_base_i(gemv_act_base),
    .gemv_busy_o(gemv_busy), .gemv_done_o(ctrl_gemv_done),
    .lane_start_o(lane_start), .lane_sub_id_o(lane_sub_id), .lane_bypass_o(lane_bypass),
    .dec_slice_o(dec_slice), .dec_q_o(dec_q), .lanes_busy_i(lanes_busy),
    .cl_clear_o(cl_clear), .cl_act_load_o(cl_act_load), .cl_start_o(cl_start), .cl_busy_i(cl_busy),
    .tok_re_o(tok_re), .tok_raddr_o(tok_raddr),
    .drain_valid_o(drain_valid), .drain_ch_o(drain_ch),
    .bgpp_start_i(bgpp_start), .bgpp_q_addr_i(bgpp_q_addr), .bgpp_tmp_base_i(bgpp_tmp_base),
    .bgpp_busy_o(bgpp_busy), .bgpp_done_o(bgpp_done),
    .q_load_lo_o(q_load_lo), .q_load_hi_o(q_load_hi), .bg_start_o(bg_start), .bg_busy_i(bg_busy),
    .tmp_we_o(tmp_we), .tmp_waddr_o(tmp_waddr), .tmp_unit_o(tmp_unit)
  );

  // ---------------- token SRAM ----------------
  sram_bank #(.WIDTH(COLS*ACT_W), .DEPTH(TOK_DEPTH)) u_token_sram (
    .clk, .we(t_wr_en), .waddr(t_wr_addr), .wdata(t_wr_data),
    .re(tok_re), .raddr(tok_raddr), .rdata(tok_rdata)
  );

  act_t chunk [COLS];
  always_comb
    for (int c = 0; c < COLS; c++) chunk[c] = tok_rdata[c*ACT_W +: ACT_W];

  // ---------------- BSTC lanes and PE clusters ----------------
  logic [N_BANKS-1:0] lane_busy;
  logic [N_CLUSTERS-1:0] cl_busy_v;
  logic signed [ACC_W-1:0] acc [N_CLUSTERS][T_M];
  logic [15:0] cl_gated [N_CLUSTERS];
  logic [15:0] lane_bits [N_BANKS];

  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cl
    logic             wr_en    [N_LANES];
    logic [2:0]       wr_slice [N_LANES];
    logic [3:0]       wr_group [N_LANES];
    logic [IDX_W-1:0] wr_col   [N_LANES];
    col_t             wr_data  [N_LANES];
    logic             unused_done;

    for (genvar l = 0; l < N_LANES; l++) begin : g_lane
      localparam int unsigned B = c * N_LANES + l;
      logic       col_valid;
      col_t       col;
      logic [5:0] col_idx;
      logic       unused_done_l;
      logic       unused_idx_msb;
      bstc_lane #(.BANK_ROWS(BANK_ROWS), .M(M)) u_lane (
        .clk, .rst_n,
        .wr_en_i(w_wr_en && w_wr_bank == BKW'(B)), .wr_row_i(w_wr_row), .wr_data_i(w_wr_data),
        .start_i(lane_start), .sub_id_i(lane_sub_id), .n_cols_i(6'(COLS)), .bypass_i(lane_bypass),
        .col_valid_o(col_valid), .col_o(col), .col_idx_o(col_idx), .done_o(unused_done_l),
        .busy_o(lane_busy[B]), .bits_o(lane_bits[B])
      );
      assign unused_idx_msb = col_idx[5];
      assign wr_en[l]    = col_valid;
      assign wr_slice[l] = dec_slice;
      assign wr_group[l] = {dec_q, 2'(l)};
      assign wr_col[l]   = col_idx[IDX_W-1:0];
      assign wr_data[l]  = col;
    end

    brcr_cluster #(.N_LANES(N_LANES)) u_cluster (
      .clk, .rst_n,
      .wr_en_i(wr_en), .wr_slice_i(wr_slice), .wr_group_i(wr_group),
      .wr_col_i(wr_col), .wr_data_i(wr_data),
      .act_load_i(cl_act_load), .act_i(chunk),
      .clear_i(cl_clear), .start_i(cl_start),
      .busy_o(cl_busy_v[c]), .done_o(unused_done), .acc_o(acc[c]),
      .gated_keys_o(cl_gated[c])
    );
  end

  assign lanes_busy = |lane_busy;
  assign cl_busy    = |cl_busy_v;

  // ---------------- drain through the quantizer ----------------
  logic signed [ACC_W-1:0] drain_acc;
  logic signed [ACC_W-1:0] acc_d1, acc_d2;
  assign drain_acc = acc[32'(drain_ch) / T_M][32'(drain_ch) % T_M];

  quantizer #(.N_CH(N_CH), .ACC_W(ACC_W)) u_quant (
    .clk, .rst_n,
    .cfg_we_i(qc_we), .cfg_ch_i(qc_ch), .cfg_scale_i(qc_scale), .cfg_bias_i(qc_bias),
    .in_valid_i(drain_valid), .in_ch_i(drain_ch), .in_acc_i(drain_acc),
    .out_valid_o(res_valid), .out_ch_o(res_ch), .out_q_o(res_q)
  );

  always_ff @(posedge clk) begin
    acc_d1 <= drain_acc;
    acc_d2 <= acc_d1;
  end
  assign res_acc = acc_d2;

  // gemv_done follows the last result through the two quantizer stages
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_pipe <= '0;
    else        done_pipe <= {done_pipe[0], ctrl_gemv_done};
  end
  assign gemv_done = done_pipe[1];

  // ---------------- BGPP units with their KV fetchers ----------------
  logic signed [7:0] qv [64];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int j = 0; j < 64; j++) qv[j] <= '0;
    else begin
      if (q_load_lo) for (int j = 0; j < 32; j++) qv[j]      <= tok_rdata[j*8 +: 8];
      if (q_load_hi) for (int j = 0; j < 32; j++) qv[32 + j] <= tok_rdata[j*8 +: 8];
    end
  end

  logic [N_BGPP-1:0] bg_busy_v;
  logic [63:0]       bg_mask [N_BGPP];
  logic [7:0]        bg_gated [N_BGPP], bg_skip [N_BGPP];
  logic [31:0]       kv_words [N_BGPP];

  for (genvar u = 0; u < N_BGPP; u++) begin : g_bgpp
    logic        kreq_valid, kreq_sign, krsp_valid, unused_done;
    logic [1:0]  kreq_beat;
    logic [2:0]  kreq_bit;
    logic [15:0] kreq_mask;
    logic [63:0] krsp_bits [16];
    logic [63:0] krsp_sign [16];

    bgpp_unit u_bgpp (
      .clk, .rst_n, .start_i(bg_start), .q_i(qv),
      .init_mask_i(bgpp_key_mask[u*64 +: 64]), .n_rounds_i(bgpp_n_rounds), .alpha_i(bgpp_alpha),
      .kreq_valid_o(kreq_valid), .kreq_beat_o(kreq_beat), .kreq_bit_o(kreq_bit),
      .kreq_sign_o(kreq_sign), .kreq_mask_o(kreq_mask),
      .krsp_valid_i(krsp_valid), .krsp_bits_i(krsp_bits), .krsp_sign_i(krsp_sign),
      .busy_o(bg_busy_v[u]), .done_o(unused_done), .mask_o(bg_mask[u]),
      .gated_rounds_o(bg_gated[u]), .skipped_beats_o(bg_skip[u])
    );

    kv_fetcher #(.AW(KV_AW)) u_fetch (
      .clk, .rst_n, .clear_i(bg_start),
      .cfg_kv_base_i(bgpp_kv_base), .cfg_key_base_i(bgpp_key_base + KV_AW'(u * 64)),
      .kreq_valid_i(kreq_valid), .kreq_beat_i(kreq_beat), .kreq_bit_i(kreq_bit),
      .kreq_sign_i(kreq_sign), .kreq_mask_i(kreq_mask),
      .krsp_valid_o(krsp_valid), .krsp_bits_o(krsp_bits), .krsp_sign_o(krsp_sign),
      .mem_req_o(kv_req[u]), .mem_addr_o(kv_addr[u]),
      .mem_rsp_valid_i(kv_rsp_valid[u]), .mem_rsp_data_i(kv_rsp_data[u]),
      .words_o(kv_words[u])
    );
  end

  assign bg_busy = |bg_busy_v;

  // ---------------- temp SRAM ----------------
  sram_bank #(.WIDTH(64), .DEPTH(TMP_DEPTH)) u_temp_sram (
    .clk, .we(tmp_we), .waddr(tmp_waddr), .wdata(bg_mask[tmp_unit]),
    .re(tmp_re), .raddr(tmp_raddr), .rdata(tmp_rdata)
  );

  // ---------------- BSTC encoder bank ----------------
  for (genvar e = 0; e < N_ENC; e++) begin : g_enc
    bstc_encoder #(.M(M)) u_enc (.col_i(enc_col[e]), .code_o(enc_code[e]), .len_o(enc_len[e]));
  end

  // ---------------- activity counters ----------------
  // weight bits streamed by all lanes: the per-sub-weight counts are added when
  // the last lane of a decode step has finished (cleared by gemv_start)
  logic        lanes_busy_d;
  logic [31:0] lane_bits_sum, weight_bits;
  always_comb begin
    lane_bits_sum = '0;
    for (int b = 0; b < N_BANKS; b++) lane_bits_sum += 32'(lane_bits[b]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lanes_busy_d <= 1'b0;
      weight_bits  <= '0;
    end else begin
      lanes_busy_d <= lanes_busy;
      if (gemv_start && !gemv_busy)         weight_bits <= '0;
      else if (lanes_busy_d && !lanes_busy) weight_bits <= weight_bits + lane_bits_sum;
    end
  end
  assign stat_weight_bits = weight_bits;

  always_comb begin
    stat_cam_gated     = '0;
    stat_pf_gated      = '0;
    stat_beats_skipped = '0;
    stat_kv_words      = '0;
    for (int c = 0; c < N_CLUSTERS; c++) stat_cam_gated += 32'(cl_gated[c]);
    for (int u = 0; u < N_BGPP; u++) begin
      stat_pf_gated      += 32'(bg_gated[u]);
      stat_beats_skipped += 32'(bg_skip[u]);
      stat_kv_words      += kv_words[u];
    end
  end
endmodule
