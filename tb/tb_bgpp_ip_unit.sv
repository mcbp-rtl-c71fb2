// tb_bgpp_ip_unit: random signed queries and sign-magnitude keys; the unit is run
// over 1..7 magnitude bit planes MSB first, feeding back its own sum, and after
// every round the sum must equal the dot product of the query with the key
// truncated to the bits seen so far. One-cycle latency is checked.
module tb_bgpp_ip_unit;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic signed [31:0] psum = 0, sum;
  logic signed [7:0] q [D];
  logic [D-1:0] kbit = 0, ksign = 0;
  logic valid;
  int checks = 0, failures = 0;
  int key [D];

  bgpp_ip_unit #(.D(D)) dut (.clk, .rst_n, .en_i(en), .first_i(first), .psum_i(psum), .q_i(q),
    .kbit_i(kbit), .ksign_i(ksign), .sum_o(sum), .valid_o(valid));
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
      for (int j = 0; j < D; j++) begin
        q[j] = 8'($urandom);
        key[j] = int'($urandom % 128) * (($urandom % 2) ? -1 : 1);
        ksign[j] = key[j] < 0;
      end
      for (int r = 0; r < 7; r++) begin
        longint e;
        int bitpos;
        bitpos = 6 - r;
        for (int j = 0; j < D; j++) begin
          int mag;
          mag = key[j] < 0 ? -key[j] : key[j];
          kbit[j] = mag[bitpos];
        end
        en = 1; first = (r == 0); psum = sum;
        @(negedge clk); en = 0;
        e = 0;
        for (int j = 0; j < D; j++) begin
          int mag, tr;
          mag = key[j] < 0 ? -key[j] : key[j];
          tr = mag >> bitpos;
          e += longint'(q[j]) * (key[j] < 0 ? -tr : tr);
        end
        checks++;
        if (!valid || longint'(sum) != e) begin failures++; $display("FAIL t%0d r%0d sum=%0d exp %0d", t, r, sum, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
