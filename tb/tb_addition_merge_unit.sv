// tb_addition_merge_unit: random (key, activation) additions, checked against a
// model of the 15 group-sum registers; key 0 must change nothing; clear empties.
module tb_addition_merge_unit;
  import mcbp_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, add = 0;
  logic [3:0] key = 0;
  act_t act = 0;
  zsum_t z [N_KEYS];
  longint model [16];
  int checks = 0, failures = 0;

  addition_merge_unit dut (.clk, .rst_n, .clear_i(clear), .add_i(add), .key_i(key), .act_i(act), .z_o(z));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare;
    for (int k = 0; k < 16; k++) begin
      checks++;
      if (longint'(z[k]) != model[k]) begin failures++; $display("FAIL z%0d=%0d model %0d", k, z[k], model[k]); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < 16; k++) model[k] = 0;
      for (int n = 0; n < 500; n++) begin
        add = ($urandom % 4 != 0); key = 4'($urandom); act = act_t'($urandom);
        if (add && key != 0) model[key] += act;
        @(negedge clk);
      end
      add = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
