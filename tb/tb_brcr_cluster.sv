// tb_brcr_cluster: random 8-bit sign-magnitude weights (mostly small, as in real
// layers, plus some full-range ones) for a 64-row tile and three 32-column
// chunks of unsigned activations. Decoded columns are written through the lane
// ports exactly as the BSTC lanes would; after each chunk the accumulators must
// equal the signed integer GEMV of all chunks so far. The cycle count of every
// chunk is checked against the bounds of two PE runs plus two accumulate cycles.
module tb_brcr_cluster;
  import mcbp_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, act_load = 0, clear = 0, start = 0;
  logic wr_en [L];
  logic [2:0] wr_slice [L];
  logic [3:0] wr_group [L];
  logic [IDX_W-1:0] wr_col [L];
  col_t wr_data [L];
  act_t act [COLS];
  logic busy, done;
  logic signed [ACC_W-1:0] acc [T_M];
  logic [15:0] gk;
  int checks = 0, failures = 0;
  longint model [T_M];
  int w [T_M][COLS];

  brcr_cluster #(.N_LANES(L)) dut (.clk, .rst_n, .wr_en_i(wr_en), .wr_slice_i(wr_slice),
    .wr_group_i(wr_group), .wr_col_i(wr_col), .wr_data_i(wr_data), .act_load_i(act_load),
    .act_i(act), .clear_i(clear), .start_i(start), .busy_o(busy), .done_o(done), .acc_o(acc),
    .gated_keys_o(gk));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic col_t slice_col(int g, int c, int b);
    col_t v;
    for (int i = 0; i < 4; i++) begin
      int wv, mag;
      wv  = w[4*g + i][c];
      mag = wv < 0 ? -wv : wv;
      v[3 - i] = (b == 7) ? (wv < 0) : mag[b];
    end
    return v;
  endfunction

  initial begin
    for (int l = 0; l < L; l++) wr_en[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clear = 1; @(negedge clk); clear = 0;
    for (int r = 0; r < T_M; r++) model[r] = 0;
    for (int k = 0; k < 3; k++) begin
      int cyc;
      for (int r = 0; r < T_M; r++)
        for (int c = 0; c < COLS; c++) begin
          int mag;
          mag = (k == 2 || ($urandom % 8) == 0) ? int'($urandom % 128) : int'($urandom % 6);
          w[r][c] = ($urandom % 2) ? -mag : mag;
        end
      for (int c = 0; c < COLS; c++) act[c] = act_t'($urandom);
      // write decoded columns: lane l writes groups l, l+4, ...
      for (int b = 0; b < 8; b++)
        for (int q = 0; q < 4; q++)
          for (int c = 0; c < COLS; c++) begin
            for (int l = 0; l < L; l++) begin
              wr_en[l] = 1; wr_slice[l] = 3'(b); wr_group[l] = 4'(4*q + l);
              wr_col[l] = IDX_W'(c); wr_data[l] = slice_col(4*q + l, c, b);
            end
            @(negedge clk);
          end
      for (int l = 0; l < L; l++) wr_en[l] = 0;
      act_load = 1; @(negedge clk); act_load = 0;
      for (int r = 0; r < T_M; r++)
        for (int c = 0; c < COLS; c++) model[r] += longint'(w[r][c]) * longint'(act[c]);
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
      for (int r = 0; r < T_M; r++) begin
        checks++;
        if (longint'(acc[r]) != model[r]) begin failures++; $display("FAIL chunk %0d row %0d acc=%0d exp %0d", k, r, acc[r], model[r]); end
      end
      $display("INFO chunk %0d took %0d cycles", k, cyc);
      // two PE runs (each 2 + sum over 15 keys of 2 + max(1, popcount) + 65) + 2
      checks++;
      if (cyc < 2 * (2 + 15 * 3 + 65) + 2 || cyc > 2 * (2 + 15 * 34 + 65) + 2) begin
        failures++; $display("FAIL cycle count %0d", cyc);
      end
    end
    checks++;
    if (gk != 16'(3 * 2 * MAG_BITS)) begin failures++; $display("FAIL gated keys %0d", gk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
