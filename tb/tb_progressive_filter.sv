// tb_progressive_filter: several rounds over 64 keys with random scores and
// random alpha. The new mask must keep exactly the live keys whose score is
// greater than max - alpha*3 (alpha in 16ths); rounds where that threshold is
// below the minimum must report gating and keep the mask. Both cases occur.
module tb_progressive_filter;
  logic clk = 0, rst_n = 0, init = 0, rs = 0, iv = 0, ev = 0;
  logic [63:0] imask = 0, mask;
  logic [1:0] beat = 0;
  logic [15:0] live = 0;
  logic signed [31:0] sums [16];
  logic signed [31:0] score [64];
  logic [4:0] alpha = 0;
  logic gated, evd;
  int checks = 0, failures = 0, n_gated = 0, n_clip = 0;
  int sc [64];

  progressive_filter dut (.clk, .rst_n, .init_i(init), .init_mask_i(imask), .round_start_i(rs),
    .in_valid_i(iv), .in_beat_i(beat), .in_live_i(live), .in_sum_i(sums), .eval_i(ev),
    .alpha_i(alpha), .mask_o(mask), .score_o(score), .gated_o(gated), .eval_done_o(evd));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [63:0] m;
      m = {$urandom, $urandom};
      if (t % 4 == 0) m = '1;
      imask = m; init = 1; @(negedge clk); init = 0;
      for (int r = 0; r < 4; r++) begin
        int mx, mn, spread, a;
        bit any;
        logic [63:0] expm;
        bit expg;
        spread = (r == 3) ? 2 : ((t % 2) ? 4 : 200);
        any = 0; mx = 0; mn = 0;
        rs = 1;
        for (int b = 0; b < 4; b++) begin
          live = m[16*b +: 16];
          beat = 2'(b);
          for (int i = 0; i < 16; i++) begin
            sc[16*b+i] = int'($urandom % spread) - spread/2;
            sums[i] = sc[16*b+i];
            if (live[i]) begin
              if (!any || sc[16*b+i] > mx) mx = sc[16*b+i];
              if (!any || sc[16*b+i] < mn) mn = sc[16*b+i];
              any = 1;
            end
          end
          iv = 1; @(negedge clk); iv = 0; rs = 0;
        end
        alpha = 5'($urandom % 17); a = alpha;
        ev = 1; @(negedge clk); ev = 0;
        expg = any && (mx * 16 - a * 3 < mn * 16);
        for (int k = 0; k < 64; k++) expm[k] = m[k] && (expg || (sc[k] * 16 > mx * 16 - a * 3));
        if (!any) expm = m;
        checks++;
        if (any && (mask != expm || gated != expg || !evd)) begin
          failures++; $display("FAIL t%0d r%0d mask %h exp %h gated %b exp %b", t, r, mask, expm, gated, expg);
        end
        if (any && expg) n_gated++;
        if (any && !expg) n_clip++;
        m = mask;
      end
    end
    checks++;
    if (n_gated == 0 || n_clip == 0) begin failures++; $display("FAIL gated %0d clipped %0d", n_gated, n_clip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
