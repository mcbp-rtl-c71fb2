// tb_bstc_lane: builds a weight bank image with the segmented layout (address
// area in rows 0-1, then eight variable-length sub-weights packed back to back,
// crossing row boundaries), writes it through the fill port and decodes each
// sub-weight. Checks every column, its index, the number of bits streamed and
// that streaming runs at one bit per cycle.
module tb_bstc_lane;
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [9:0] wrow = 0;
  logic [63:0] wdata = 0;
  logic start = 0, bypass = 0;
  logic [7:0] sub = 0;
  logic cv, done, busy;
  logic [3:0] col;
  logic [5:0] cidx;
  logic [15:0] bits;
  int checks = 0, failures = 0;

  logic [63:0] img [16];
  logic [3:0]  cols [8][32];
  int          nbits [8];
  bit          raw [8];

  bstc_lane dut (.clk, .rst_n, .wr_en_i(we), .wr_row_i(wrow), .wr_data_i(wdata),
    .start_i(start), .sub_id_i(sub), .n_cols_i(6'd32), .bypass_i(bypass),
    .col_valid_o(cv), .col_o(col), .col_idx_o(cidx), .done_o(done), .busy_o(busy), .bits_o(bits));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pos;   // bit position in the image, row*64 + column
  task automatic put(input logic v);
    img[pos / 64][63 - (pos % 64)] = v;
    pos++;
  endtask

  initial begin
    for (int r = 0; r < 16; r++) img[r] = '0;
    pos = 2 * 64;
    for (int s = 0; s < 8; s++) begin
      logic [15:0] entry;
      raw[s] = (s % 3 == 2);
      entry = {10'(pos / 64), 6'(pos % 64)};
      img[s / 4][63 - 16 * (s % 4) -: 16] = entry;
      nbits[s] = 0;
      for (int c = 0; c < 32; c++) begin
        cols[s][c] = ($urandom % 3 == 0) ? 4'($urandom) : 4'd0;
        if (raw[s]) begin
          for (int i = 3; i >= 0; i--) put(cols[s][c][i]);
          nbits[s] += 4;
        end else if (cols[s][c] == 0) begin
          put(1'b0); nbits[s] += 1;
        end else begin
          put(1'b1); for (int i = 3; i >= 0; i--) put(cols[s][c][i]);
          nbits[s] += 5;
        end
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      we = 1; wrow = 10'(r); wdata = img[r];
      @(negedge clk);
    end
    we = 0;
    for (int s = 7; s >= 0; s--) begin
      int got, t0, t1;
      start = 1; sub = 8'(s); bypass = raw[s];
      @(negedge clk); start = 0;
      t0 = $time / 10;
      got = 0;
      while (!done) begin
        if (cv) begin
          checks++;
          if (col != cols[s][got] || cidx != 6'(got)) begin
            failures++; $display("FAIL sub %0d col %0d: %b exp %b idx %0d", s, got, col, cols[s][got], cidx);
          end
          got++;
        end
        @(negedge clk);
      end
      t1 = $time / 10;
      checks++;
      if (got != 32 || bits != 16'(nbits[s])) begin
        failures++; $display("FAIL sub %0d: %0d columns, %0d bits (exp %0d)", s, got, bits, nbits[s]);
      end
      // address-entry cycle + one cycle per bit + the cycle that sees the last
      // column + the done register
      checks++;
      if (t1 - t0 != nbits[s] + 3) begin
        failures++; $display("FAIL sub %0d took %0d cycles for %0d bits", s, t1 - t0, nbits[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
