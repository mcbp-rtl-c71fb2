// tb_reconstruction_unit: random group sums; each row result must equal the sum
// of the registers whose pattern has the row's bit set (bit 3 = row 0), one cycle
// after the request, for rows requested in the order 3, 2, 1, 0.
module tb_reconstruction_unit;
  import mcbp_pkg::*;
  logic clk = 0, rst_n = 0, rv = 0;
  logic [1:0] row = 0;
  zsum_t z [N_KEYS];
  logic [Y_W-1:0] y;
  logic yv;
  int checks = 0, failures = 0;

  reconstruction_unit dut (.clk, .rst_n, .row_valid_i(rv), .row_i(row), .z_i(z), .y_o(y), .y_valid_o(yv));
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
    for (int t = 0; t < 200; t++) begin
      z[0] = '0;
      for (int k = 1; k < 16; k++) z[k] = (t == 0) ? {Z_W{1'b1}} : zsum_t'($urandom % 9000);
      for (int r = 3; r >= 0; r--) begin
        longint e;
        e = 0;
        for (int k = 1; k < 16; k++) if (k[3 - r]) e += z[k];
        rv = 1; row = 2'(r);
        @(negedge clk); rv = 0;
        checks++;
        if (!yv || longint'(y) != e) begin failures++; $display("FAIL row %0d y=%0d exp %0d", r, y, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
