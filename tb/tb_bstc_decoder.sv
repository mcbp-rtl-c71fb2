// tb_bstc_decoder: feeds random columns, coded by the testbench itself, bit by bit
// into the decoder, first as two-state symbols (mostly zero columns, as in the
// high-order slices), then raw. Checks every decoded column, their number, and
// that each symbol costs exactly its length in bit-cycles (1, 5 or 4).
module tb_bstc_decoder;
  logic clk = 0, rst_n = 0, clear = 0, bypass = 0, bv = 0, b = 0;
  logic cv;
  logic [3:0] col;
  int checks = 0, failures = 0;
  logic [3:0] sent [$];
  int bitcycles = 0, expect_bits = 0;

  bstc_decoder #(.M(4)) dut (.clk, .rst_n, .clear_i(clear), .bypass_i(bypass),
    .bit_valid_i(bv), .bit_i(b), .col_valid_o(cv), .col_o(col));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (cv) begin
    logic [3:0] e;
    checks++;
    if (sent.size() == 0) begin
      failures++; $display("FAIL extra column %b", col);
    end else begin
      e = sent.pop_front();
      if (e != col) begin failures++; $display("FAIL got %b expected %b", col, e); end
    end
  end

  task automatic send_bit(input logic v);
    bv = 1'b1; b = v; bitcycles++;
    @(negedge clk);
    bv = 1'b0;
  endtask

  task automatic send_col(input logic [3:0] c, input logic raw);
    sent.push_back(c);
    if (raw) begin
      expect_bits += 4;
      for (int i = 3; i >= 0; i--) send_bit(c[i]);
    end else if (c == 0) begin
      expect_bits += 1;
      send_bit(1'b0);
    end else begin
      expect_bits += 5;
      send_bit(1'b1);
      for (int i = 3; i >= 0; i--) send_bit(c[i]);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      logic [3:0] c;
      c = ($urandom % 4 == 0) ? 4'($urandom) : 4'd0;
      send_col(c, 1'b0);
      if ($urandom % 5 == 0) @(negedge clk);   // idle gaps
    end
    bypass = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 200; n++) send_col(4'($urandom), 1'b1);
    repeat (4) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d columns never decoded", sent.size()); end
    checks++;
    if (bitcycles != expect_bits) begin failures++; $display("FAIL bit cycles %0d vs %0d", bitcycles, expect_bits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
