// tb_bstc_encoder: exhaustive check of the two-state encoder. Every 4-bit column
// is applied; a zero column must give the 1-bit symbol 0, any other column the
// 5-bit symbol {1, column}.
module tb_bstc_encoder;
  logic [3:0] col;
  logic [4:0] code;
  logic [2:0] len;
  int checks = 0, failures = 0;

  bstc_encoder #(.M(4)) dut (.col_i(col), .code_o(code), .len_o(len));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      col = 4'(v);
      #1;
      checks++;
      if (v == 0) begin
        if (len != 3'd1 || code[0] != 1'b0) begin
          failures++; $display("FAIL zero column: code=%b len=%0d", code, len);
        end
      end else if (len != 3'd5 || code != {1'b1, 4'(v)}) begin
        failures++; $display("FAIL col=%b: code=%b len=%0d", col, code, len);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
