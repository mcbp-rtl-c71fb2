// tb_index_converter: loads random 32-bit bitmaps and checks that the indices of
// the ones come out lowest first, one per cycle, that p ones take p cycles, and
// that last/empty are right.
module tb_index_converter;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [31:0] bmi = 0;
  logic [4:0] idx;
  logic iv, last, empty;
  int checks = 0, failures = 0;

  index_converter #(.W(32)) dut (.clk, .rst_n, .load_i(load), .bitmap_i(bmi), .step_i(step),
    .idx_o(idx), .idx_valid_o(iv), .last_o(last), .empty_o(empty));
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
    for (int t = 0; t < 300; t++) begin
      int cyc;
      bmi = (t % 3 == 0) ? $urandom & $urandom & $urandom : $urandom;
      load = 1;
      @(negedge clk); load = 0; step = 1; #1;
      cyc = 0;
      for (int i = 0; i < 32; i++) if (bmi[i]) begin
        checks++;
        if (!iv || idx != 5'(i) || (last != ($countones(bmi >> i) == 1))) begin
          failures++; $display("FAIL bitmap %h expected index %0d got %0d (v=%b)", bmi, i, idx, iv);
        end
        @(negedge clk); #1; cyc++;
      end
      checks++;
      if (!empty || iv || cyc != $countones(bmi)) begin failures++; $display("FAIL not empty after %0d", cyc); end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
