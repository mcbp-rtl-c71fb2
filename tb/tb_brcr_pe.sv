// tb_brcr_pe: random bit-slice tiles (64 rows x 32 columns, sparse and dense)
// and random unsigned activations. Every row result must equal the plain dot
// product of the row's bits with the activations, and the run must take exactly
//   1 + 1 + sum over keys 1..15 of (2 + max(1, max_g matches(g,key))) + 64 + 1
// cycles from start to done.
module tb_brcr_pe;
  import mcbp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  col_t cols [N_GROUPS*COLS];
  logic req [N_GROUPS];
  logic [IDX_W-1:0] idx [N_GROUPS];
  act_t act [N_GROUPS];
  act_t x [COLS];
  logic yv, busy, done, gated;
  logic [$clog2(T_M)-1:0] yrow;
  logic [Y_W-1:0] y;
  logic [15:0] adds;
  int checks = 0, failures = 0;
  int gated_seen = 0;

  brcr_pe dut (.clk, .rst_n, .start_i(start), .cols_i(cols), .act_req_o(req), .act_idx_o(idx),
    .act_i(act), .y_valid_o(yv), .y_row_o(yrow), .y_o(y), .busy_o(busy), .done_o(done),
    .key_gated_o(gated), .merge_adds_o(adds));
  always #5 clk = ~clk;
  always_comb for (int g = 0; g < N_GROUPS; g++) act[g] = x[idx[g]];
  always @(negedge clk) if (rst_n && gated) gated_seen++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      longint exp_y [T_M];
      bit seen [T_M];
      int exp_cyc, cyc, nz;
      for (int c = 0; c < COLS; c++) x[c] = act_t'($urandom);
      for (int j = 0; j < N_GROUPS*COLS; j++)
        cols[j] = (t % 3 == 0) ? col_t'($urandom) : ((t % 3 == 1) ? col_t'($urandom & $urandom & $urandom) : col_t'(0));
      if (t == 2) cols[5] = 4'hF;
      nz = 0;
      for (int r = 0; r < T_M; r++) begin
        exp_y[r] = 0; seen[r] = 0;
        for (int c = 0; c < COLS; c++)
          if (cols[(r/4)*COLS + c][3 - r%4]) exp_y[r] += x[c];
      end
      exp_cyc = 1 + 1 + 64 + 1;
      for (int k = 1; k < 16; k++) begin
        int mx;
        mx = 1;
        for (int g = 0; g < N_GROUPS; g++) begin
          int n;
          n = 0;
          for (int c = 0; c < COLS; c++) if (cols[g*COLS + c] == col_t'(k)) n++;
          if (n > mx) mx = n;
        end
        exp_cyc += 2 + mx;
      end
      for (int j = 0; j < N_GROUPS*COLS; j++) if (cols[j] != 0) nz++;
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin
        if (yv) begin
          checks++;
          seen[yrow] = 1;
          if (longint'(y) != exp_y[yrow]) begin failures++; $display("FAIL t%0d row %0d y=%0d exp %0d", t, yrow, y, exp_y[yrow]); end
        end
        @(negedge clk); cyc++;
        if (cyc > 5000) break;
      end
      for (int r = 0; r < T_M; r++) if (!seen[r]) begin failures++; $display("FAIL row %0d missing", r); end
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL t%0d cycles %0d expected %0d", t, cyc, exp_cyc); end
      checks++;
      if (int'(adds) != nz) begin failures++; $display("FAIL merges %0d expected %0d", adds, nz); end
    end
    checks++;
    if (gated_seen != 12) begin failures++; $display("FAIL key-0 gating seen %0d times", gated_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
