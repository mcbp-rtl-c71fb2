// tb_cam_match: loads 512 random 4-bit columns, searches every key and checks the
// match bitmap against a direct comparison, the one-cycle latency, and that key
// 0 is gated (no valid bitmap, gated pulse, bitmap unchanged).
module tb_cam_match;
  localparam int N = 512;
  logic clk = 0, rst_n = 0, load = 0, search = 0;
  logic [3:0] cols [N];
  logic [3:0] key = 0;
  logic [N-1:0] bm;
  logic bv, gated;
  int checks = 0, failures = 0;

  cam_match #(.N_COLS(N)) dut (.clk, .rst_n, .load_i(load), .cols_i(cols), .search_i(search),
    .key_i(key), .bitmap_o(bm), .bitmap_valid_o(bv), .gated_o(gated));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      logic [N-1:0] prev;
      for (int j = 0; j < N; j++) cols[j] = (t % 2) ? 4'($urandom) : 4'($urandom % 3);
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int k = 1; k < 16; k++) begin
        logic [N-1:0] exp;
        for (int j = 0; j < N; j++) exp[j] = (cols[j] == 4'(k));
        search = 1; key = 4'(k);
        @(negedge clk); search = 0;
        checks++;
        if (!bv || bm != exp || gated) begin failures++; $display("FAIL key %0d", k); end
      end
      prev = bm;
      search = 1; key = 0;
      @(negedge clk); search = 0;
      checks++;
      if (bv || !gated || bm != prev) begin failures++; $display("FAIL key 0 not gated"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
