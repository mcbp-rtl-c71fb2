// tb_bgpp_unit: runs the progressive prediction over random 64-key blocks and
// compares the final key mask, the number of gated rounds and the number of
// skipped beats with a software model of the algorithm (A = 2A + q.k_bit per
// round, keep A > max - alpha*3, no clipping when that is below the minimum).
// A memory model answers key-plane requests LAT cycles later and returns garbage
// for keys that were not requested, so a wrongly used pruned key shows up. The
// total cycle count is checked: 1 + per round (per live beat 2 + LAT + 1,
// per skipped beat 1, plus 2) + 1.
module tb_bgpp_unit;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [7:0] q [64];
  logic [63:0] imask;
  logic [2:0] nr;
  logic [4:0] alpha [7];
  logic kv, ks, busy, done, rv = 0;
  logic [1:0] kb;
  logic [2:0] kbit;
  logic [15:0] km;
  logic [63:0] rbits [16], rsign [16];
  logic [63:0] mask;
  logic [7:0] gr, sb;
  int checks = 0, failures = 0, tot_skipped = 0, tot_gated = 0;
  int mag [64][64];
  bit sgn [64][64];

  bgpp_unit dut (.clk, .rst_n, .start_i(start), .q_i(q), .init_mask_i(imask), .n_rounds_i(nr),
    .alpha_i(alpha), .kreq_valid_o(kv), .kreq_beat_o(kb), .kreq_bit_o(kbit), .kreq_sign_o(ks),
    .kreq_mask_o(km), .krsp_valid_i(rv), .krsp_bits_i(rbits), .krsp_sign_i(rsign),
    .busy_o(busy), .done_o(done), .mask_o(mask), .gated_rounds_o(gr), .skipped_beats_o(sb));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model
  initial begin
    forever begin
      @(negedge clk);
      rv = 0;
      if (kv) begin
        repeat (LAT) @(negedge clk);
        for (int i = 0; i < 16; i++) begin
          int k;
          k = 16 * int'(kb) + i;
          for (int j = 0; j < 64; j++) begin
            rbits[i][j] = km[i] ? mag[k][j][kbit] : 1'($urandom);
            rsign[i][j] = (km[i] && ks) ? sgn[k][j] : 1'($urandom);
          end
        end
        rv = 1;
        @(negedge clk);
        rv = 0;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      longint a [64];
      logic [63:0] m;
      int exp_cyc, cyc, eg, es;
      for (int j = 0; j < 64; j++) q[j] = 8'($urandom);
      for (int k = 0; k < 64; k++) begin
        int scale;
        scale = (k % 8 == 0) ? 128 : 1 + int'($urandom % 40);
        for (int j = 0; j < 64; j++) begin
          mag[k][j] = int'($urandom) % scale;
          if (mag[k][j] < 0) mag[k][j] = -mag[k][j];
          sgn[k][j] = 1'($urandom);
        end
      end
      imask = (t % 3 == 0) ? '1 : {$urandom, $urandom};
      if (t % 5 == 1) imask[47:16] = '0;
      nr = 3'(1 + (t % 7));
      for (int r = 0; r < 7; r++) alpha[r] = 5'($urandom % 17);
      if (t % 4 == 3) for (int r = 0; r < 7; r++) alpha[r] = 5'd16;
      // model
      m = imask; eg = 0; es = 0; exp_cyc = 2;
      for (int k = 0; k < 64; k++) a[k] = 0;
      for (int r = 0; r < int'(nr); r++) begin
        longint mx, mn, al;
        bit any;
        any = 0; mx = 0; mn = 0; al = longint'(alpha[r]);
        for (int b = 0; b < 4; b++) begin
          if (m[16*b +: 16] == '0) begin es++; exp_cyc += 1; end
          else exp_cyc += 3 + LAT;
          for (int i = 0; i < 16; i++) begin
            int k;
            k = 16 * b + i;
            if (m[k]) begin
              longint d;
              d = 0;
              for (int j = 0; j < 64; j++)
                if (mag[k][j][6 - r]) d += sgn[k][j] ? -longint'(q[j]) : longint'(q[j]);
              a[k] = 2 * a[k] + d;
              if (!any || a[k] > mx) mx = a[k];
              if (!any || a[k] < mn) mn = a[k];
              any = 1;
            end
          end
        end
        exp_cyc += 2;
        if (any) begin
          if (16 * mx - 3 * al < 16 * mn) eg++;
          else for (int k = 0; k < 64; k++) m[k] = m[k] && (16 * a[k] > 16 * mx - 3 * al);
        end
      end
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
      checks += 4;
      if (mask != m) begin failures++; $display("FAIL t%0d mask %h exp %h", t, mask, m); end
      if (int'(gr) != eg) begin failures++; $display("FAIL t%0d gated %0d exp %0d", t, gr, eg); end
      if (int'(sb) != es) begin failures++; $display("FAIL t%0d skipped %0d exp %0d", t, sb, es); end
      if (cyc != exp_cyc) begin failures++; $display("FAIL t%0d cycles %0d exp %0d", t, cyc, exp_cyc); end
      tot_gated += eg; tot_skipped += es;
      @(negedge clk);
    end
    checks++;
    if (tot_gated == 0 || tot_skipped == 0) begin failures++; $display("FAIL no gating/skipping seen"); end
    $display("INFO gated rounds %0d skipped beats %0d", tot_gated, tot_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
