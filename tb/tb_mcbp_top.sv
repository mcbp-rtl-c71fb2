// tb_mcbp_top: full-size test of the accelerator core with its default
// configuration (20 PE clusters, 80 BSTC lanes, 4 BGPP units, 1280 channels).
//
// GEMV: random 8-bit sign-magnitude weights for all 1280 output channels and
// NCH = 8 chunks of 32 inputs, one whole T_K = 256 weight tile (mostly small
// magnitudes, some full-range rows, as in quantized LLM layers) are BSTC-compressed by the testbench into the segmented
// bank layout of every lane (address area in rows 0-63, streams from row 64;
// slices 2-6 coded, 0, 1 and the sign raw), written through the fill port, and
// multiplied with random activations from token SRAM. Every channel's
// accumulator and quantized output are compared with integer arithmetic. The
// number of weight bits streamed must equal the compressed size.
// BGPP, started in the same cycle as the GEMV so both jobs share the token SRAM:
// four 64-key blocks with random queries and keys in a bit-plane key memory
// model; the masks read back from temp SRAM, the gated-round, skipped-beat and
// KV-word counters are compared with a software model of the prediction.
// Encoder bank: random columns through all 40 encoders.
// Every mechanism is counted (CAM key-0 gating, coded and raw slice decoding,
// negative-weight pass, filter clipping and clock gating, beat skipping, KV
// traffic, quantizer saturation at both ends, token-port sharing, encoders) and
// a mechanism that never happened is a failure. A lower bound on the GEMV cycle
// count (one cycle per streamed bit of the longest lane, per sub-weight) is
// checked.
module tb_mcbp_top;
  import mcbp_pkg::*;
  localparam int NCL = 20, NB = 80, NCH_OUT = 1280, NCH = 8, K = 32 * NCH, LAT = 3;
  localparam int ROWS0 = 64;

  logic clk = 0, rst_n = 0;
  logic w_wr_en = 0;
  logic [6:0] w_wr_bank;
  logic [9:0] w_wr_row;
  logic [63:0] w_wr_data;
  logic t_wr_en = 0;
  logic [13:0] t_wr_addr;
  logic [255:0] t_wr_data;
  logic qc_we = 0;
  logic [10:0] qc_ch;
  logic [15:0] qc_scale;
  logic signed [15:0] qc_bias;
  logic gemv_start = 0, gemv_busy, gemv_done, res_valid;
  logic [3:0] gemv_n_chunks;
  logic [13:0] gemv_act_base;
  logic [10:0] res_ch;
  logic [7:0] res_q;
  logic signed [31:0] res_acc;
  logic bgpp_start = 0, bgpp_busy, bgpp_done;
  logic [13:0] bgpp_q_addr, bgpp_tmp_base;
  logic [31:0] bgpp_kv_base, bgpp_key_base;
  logic [255:0] bgpp_key_mask;
  logic [2:0] bgpp_n_rounds;
  logic [4:0] bgpp_alpha [7];
  logic kv_req [4][16];
  logic [31:0] kv_addr [4][16];
  logic kv_rsp_valid [4];
  logic [63:0] kv_rsp_data [4][16];
  logic tmp_re = 0;
  logic [13:0] tmp_raddr;
  logic [63:0] tmp_rdata;
  logic [3:0] enc_col [40];
  logic [4:0] enc_code [40];
  logic [2:0] enc_len [40];
  logic [31:0] stat_cam_gated, stat_pf_gated, stat_beats_skipped, stat_kv_words, stat_weight_bits;

  mcbp_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_cam_gated = 0, m_coded = 0, m_raw = 0, m_neg = 0, m_clip = 0, m_pf_gated = 0,
      m_skip = 0, m_kv = 0, m_sat_lo = 0, m_sat_hi = 0, m_shared = 0, m_enc = 0,
      m_compress = 0, m_results = 0;

  int w [NCH_OUT][K];
  int x [K];
  int sc [NCH_OUT], bi [NCH_OUT];
  logic [63:0] img [NB][1024];
  int total_bits = 0;
  int lane_bits [NB][NCH][32];

  // keys (bit planes) and queries for BGPP
  int kmag [256][64];
  bit ksgn [256][64];
  int qv [64];
  localparam logic [31:0] KV_BASE = 32'h0004_0000, KEY_BASE = 32'd256;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- key memory model, one port per BGPP unit ----------------
  for (genvar u = 0; u < 4; u++) begin : g_mem
    initial begin
      kv_rsp_valid[u] = 0;
      forever begin
        @(negedge clk);
        kv_rsp_valid[u] = 0;
        begin
          bit any;
          logic [31:0] a [16];
          logic r [16];
          any = 0;
          for (int i = 0; i < 16; i++) begin
            r[i] = kv_req[u][i]; a[i] = kv_addr[u][i];
            if (r[i]) any = 1;
          end
          if (any) begin
            repeat (LAT) @(negedge clk);
            for (int i = 0; i < 16; i++) begin
              kv_rsp_data[u][i] = 64'hbad0bad0;
              if (r[i]) begin
                int off, plane, key;
                off = int'(a[i] - KV_BASE);
                plane = off / 4096;
                key = off % 4096 - int'(KEY_BASE);
                for (int j = 0; j < 64; j++)
                  kv_rsp_data[u][i][j] = (plane == 7) ? ksgn[key][j] : kmag[key][j][plane];
              end
            end
            kv_rsp_valid[u] = 1;
          end
        end
      end
    end
  end

  // ---------------- result checker ----------------
  longint model_acc [NCH_OUT];
  int n_res = 0;
  always @(negedge clk) if (rst_n && res_valid) begin
    longint y;
    int c;
    c = int'(res_ch);
    y = ((model_acc[c] * longint'(sc[c]) + 32768) >>> 16) + bi[c];
    if (y < 0) begin y = 0; m_sat_lo++; end
    if (y > 255) begin y = 255; m_sat_hi++; end
    checks += 2;
    if (longint'(res_acc) != model_acc[c]) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d acc %0d exp %0d", c, res_acc, model_acc[c]);
    end
    if (int'(res_q) != int'(y)) begin
      failures++;
      if (failures < 10) $display("FAIL ch %0d q %0d exp %0d", c, res_q, y);
    end
    if (int'(res_ch) != n_res) begin failures++; $display("FAIL channel order %0d", res_ch); end
    n_res++;
    m_results++;
  end

  // mechanism observation inside the core
  always @(negedge clk) if (rst_n) begin
    if (dut.lane_start && dut.lane_bypass) m_raw++;
    if (dut.lane_start && !dut.lane_bypass) m_coded++;
    if (dut.tok_re && dut.bgpp_busy && dut.gemv_busy) m_shared++;
    if (dut.g_cl[0].u_cluster.state != 0 && dut.g_cl[0].u_cluster.pass) m_neg++;
  end

  // bitstream helpers
  int pos [NB];
  task automatic put(input int b, input logic v);
    img[b][pos[b] / 64][63 - (pos[b] % 64)] = v;
    pos[b]++;
  endtask

  function automatic logic [3:0] wcol(int cl, int g, int kk, int sl);
    logic [3:0] v;
    for (int i = 0; i < 4; i++) begin
      int wv, mg;
      wv = w[64 * cl + 4 * g + i][kk];
      mg = wv < 0 ? -wv : wv;
      v[3 - i] = (sl == 7) ? (wv < 0) : mg[sl];
    end
    return v;
  endfunction

  initial begin
    // ---------------- data ----------------
    for (int r = 0; r < NCH_OUT; r++) begin
      bit big;
      big = (r % 16 == 5);
      for (int k = 0; k < K; k++) begin
        int mg;
        mg = big ? int'($urandom % 128) : (($urandom % 10) == 0 ? int'($urandom % 32) : int'($urandom % 4));
        w[r][k] = ($urandom % 2) ? -mg : mg;
      end
      sc[r] = 200 + int'($urandom % 3000);
      bi[r] = int'($urandom % 200) - 60;
      if (r % 97 == 3) sc[r] = 65535;
    end
    for (int k = 0; k < K; k++) x[k] = int'($urandom % 256);
    for (int r = 0; r < NCH_OUT; r++) begin
      model_acc[r] = 0;
      for (int k = 0; k < K; k++) model_acc[r] += longint'(w[r][k]) * longint'(x[k]);
    end
    // compressed bank images
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < 1024; r++) img[b][r] = '0;
      pos[b] = ROWS0 * 64;
    end
    for (int b = 0; b < NB; b++) begin
      int cl, l;
      cl = b / 4; l = b % 4;
      for (int ch = 0; ch < NCH; ch++)
        for (int s = 0; s < 32; s++) begin
          int sl, g, id, nb;
          sl = s / 4; g = 4 * (s % 4) + l; id = 32 * ch + s;
          img[b][id / 4][63 - 16 * (id % 4) -: 16] = {10'(pos[b] / 64), 6'(pos[b] % 64)};
          nb = 0;
          for (int c = 0; c < 32; c++) begin
            logic [3:0] v;
            v = wcol(cl, g, 32 * ch + c, sl);
            if (!BSTC_CODED[sl]) begin
              for (int i = 3; i >= 0; i--) put(b, v[i]);
              nb += 4;
            end else if (v == 0) begin
              put(b, 1'b0); nb += 1;
            end else begin
              put(b, 1'b1); for (int i = 3; i >= 0; i--) put(b, v[i]);
              nb += 5;
            end
          end
          lane_bits[b][ch][s] = nb;
          total_bits += nb;
        end
    end
    // keys and queries
    for (int j = 0; j < 64; j++) qv[j] = int'($urandom % 256) - 128;
    for (int k = 0; k < 256; k++) begin
      int scale;
      scale = (k % 8 == 0) ? 128 : 1 + int'($urandom % 40);
      for (int j = 0; j < 64; j++) begin
        kmag[k][j] = int'($urandom % 128) % scale;
        ksgn[k][j] = 1'($urandom);
      end
    end

    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- fills ----------------
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < (pos[b] + 63) / 64; r++) begin
        w_wr_en = 1; w_wr_bank = 7'(b); w_wr_row = 10'(r); w_wr_data = img[b][r];
        @(negedge clk);
      end
    w_wr_en = 0;
    for (int ch = 0; ch < NCH; ch++) begin
      t_wr_en = 1; t_wr_addr = 14'(10 + ch);
      for (int c = 0; c < 32; c++) t_wr_data[8 * c +: 8] = 8'(x[32 * ch + c]);
      @(negedge clk);
    end
    for (int h = 0; h < 2; h++) begin
      t_wr_en = 1; t_wr_addr = 14'(600 + h);
      for (int c = 0; c < 32; c++) t_wr_data[8 * c +: 8] = 8'(qv[32 * h + c]);
      @(negedge clk);
    end
    t_wr_en = 0;
    for (int r = 0; r < NCH_OUT; r++) begin
      qc_we = 1; qc_ch = 11'(r); qc_scale = 16'(sc[r]); qc_bias = 16'(bi[r]);
      @(negedge clk);
    end
    qc_we = 0;

    // ---------------- encoder bank ----------------
    for (int t = 0; t < 8; t++) begin
      for (int e = 0; e < 40; e++) enc_col[e] = 4'($urandom);
      #1;
      for (int e = 0; e < 40; e++) begin
        checks++;
        if (enc_col[e] == 0 ? (enc_len[e] != 1 || enc_code[e][0] != 0)
                            : (enc_len[e] != 5 || enc_code[e] != {1'b1, enc_col[e]})) begin
          failures++; $display("FAIL encoder %0d", e);
        end
        m_enc++;
      end
      @(negedge clk);
    end

    // ---------------- GEMV and BGPP together ----------------
    begin
      int cyc, min_cyc, exp_gated, exp_skip, exp_words;
      logic [63:0] exp_mask [4];
      bgpp_q_addr = 14'd600; bgpp_tmp_base = 14'd40;
      bgpp_kv_base = KV_BASE; bgpp_key_base = KEY_BASE;
      bgpp_key_mask = {{64{1'b1}}, 32'h0, 32'hffff_ffff, {$urandom, $urandom}, {64{1'b1}}};
      bgpp_n_rounds = 3'd5;
      for (int r = 0; r < 7; r++) bgpp_alpha[r] = 5'(4 + r * 2);
      bgpp_alpha[0] = 5'd16;
      // BGPP model
      exp_gated = 0; exp_skip = 0; exp_words = 0;
      for (int u = 0; u < 4; u++) begin
        longint a [64];
        logic [63:0] m;
        m = bgpp_key_mask[64 * u +: 64];
        for (int k = 0; k < 64; k++) a[k] = 0;
        for (int r = 0; r < int'(bgpp_n_rounds); r++) begin
          longint mx, mn, al;
          bit any;
          any = 0; mx = 0; mn = 0; al = longint'(bgpp_alpha[r]);
          for (int bt = 0; bt < 4; bt++) begin
            if (m[16 * bt +: 16] == '0) exp_skip++;
            exp_words += (r == 0 ? 2 : 1) * $countones(m[16 * bt +: 16]);
            for (int i = 0; i < 16; i++) begin
              int k;
              k = 16 * bt + i;
              if (m[k]) begin
                longint d;
                d = 0;
                for (int j = 0; j < 64; j++)
                  if (kmag[64 * u + k][j][6 - r]) d += ksgn[64 * u + k][j] ? -longint'(qv[j]) : longint'(qv[j]);
                a[k] = 2 * a[k] + d;
                if (!any || a[k] > mx) mx = a[k];
                if (!any || a[k] < mn) mn = a[k];
                any = 1;
              end
            end
          end
          if (any) begin
            if (16 * mx - 3 * al < 16 * mn) exp_gated++;
            else for (int k = 0; k < 64; k++) m[k] = m[k] && (16 * a[k] > 16 * mx - 3 * al);
          end
        end
        exp_mask[u] = m;
        if (m != bgpp_key_mask[64 * u +: 64]) m_clip++;
      end

      gemv_n_chunks = 4'(NCH); gemv_act_base = 14'd10;
      gemv_start = 1; bgpp_start = 1;
      @(negedge clk);
      gemv_start = 0; bgpp_start = 0;
      cyc = 1;
      while (!gemv_done && cyc < 2500000) begin @(negedge clk); cyc++; end
      while (bgpp_busy) @(negedge clk);
      // lower bound: every sub-weight step lasts at least as long as its longest lane
      min_cyc = NCH_OUT;
      for (int ch = 0; ch < NCH; ch++)
        for (int s = 0; s < 32; s++) begin
          int mx;
          mx = 0;
          for (int b = 0; b < NB; b++) if (lane_bits[b][ch][s] > mx) mx = lane_bits[b][ch][s];
          min_cyc += mx;
        end
      $display("INFO GEMV %0d chunks: %0d cycles (bound %0d), %0d weight bits of %0d raw",
               NCH, cyc, min_cyc, stat_weight_bits, NB * NCH * 32 * 32 * 4);
      checks += 3;
      if (cyc < min_cyc) begin failures++; $display("FAIL cycle count below bound"); end
      if (n_res != NCH_OUT) begin failures++; $display("FAIL %0d results", n_res); end
      if (stat_weight_bits != 32'(total_bits)) begin failures++; $display("FAIL weight bits %0d exp %0d", stat_weight_bits, total_bits); end
      if (total_bits < NB * NCH * 32 * 32 * 4) m_compress++;
      if (stat_cam_gated != 0) m_cam_gated++;
      // BGPP results
      for (int u = 0; u < 4; u++) begin
        tmp_re = 1; tmp_raddr = 14'(40 + u);
        @(negedge clk);
        tmp_re = 0;
        checks++;
        if (tmp_rdata != exp_mask[u]) begin failures++; $display("FAIL unit %0d mask %h exp %h", u, tmp_rdata, exp_mask[u]); end
      end
      checks += 3;
      if (stat_pf_gated != 32'(exp_gated)) begin failures++; $display("FAIL pf gated %0d exp %0d", stat_pf_gated, exp_gated); end
      if (stat_beats_skipped != 32'(exp_skip)) begin failures++; $display("FAIL skipped %0d exp %0d", stat_beats_skipped, exp_skip); end
      if (stat_kv_words != 32'(exp_words)) begin failures++; $display("FAIL kv words %0d exp %0d", stat_kv_words, exp_words); end
      m_pf_gated = int'(stat_pf_gated); m_skip = int'(stat_beats_skipped); m_kv = int'(stat_kv_words);
      $display("INFO BGPP: %0d gated rounds, %0d skipped beats, %0d key words of %0d", exp_gated, exp_skip, exp_words, 256 * 5 + 256);
    end

    // ---------------- mechanism coverage ----------------
    begin
      string nm [14];
      int cnt [14];
      nm = '{"cam_key0_gating", "bstc_coded_decode", "bstc_raw_decode", "negative_pass",
             "pf_clipping", "pf_clock_gating", "beat_skipping", "kv_on_demand_fetch",
             "quant_sat_low", "quant_sat_high", "token_port_shared", "encoder_bank",
             "bstc_compression", "gemv_results"};
      cnt = '{m_cam_gated, m_coded, m_raw, m_neg, m_clip, m_pf_gated, m_skip, m_kv,
              m_sat_lo, m_sat_hi, m_shared, m_enc, m_compress, m_results};
      for (int i = 0; i < 14; i++) begin
        checks++;
        $display("INFO mechanism %s: %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
