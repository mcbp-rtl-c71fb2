// tb_quantizer: programs random Scale/Bias pairs for channels spread over the
// 1280-entry table, streams one accumulator per cycle and compares each output
// with round(acc*scale / 2^16) + bias saturated to 0..255, two cycles later.
// Saturation at both ends must occur.
module tb_quantizer;
  logic clk = 0, rst_n = 0, we = 0, iv = 0;
  logic [10:0] cch, ich, och;
  logic [15:0] cs;
  logic signed [15:0] cb;
  logic signed [31:0] acc;
  logic ov;
  logic [7:0] oq;
  int checks = 0, failures = 0, sat_lo = 0, sat_hi = 0;
  int sc [1280], bi [1280];
  int exp_q [$];
  int exp_ch [$];

  quantizer dut (.clk, .rst_n, .cfg_we_i(we), .cfg_ch_i(cch), .cfg_scale_i(cs), .cfg_bias_i(cb),
    .in_valid_i(iv), .in_ch_i(ich), .in_acc_i(acc), .out_valid_o(ov), .out_ch_o(och), .out_q_o(oq));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: output of the input presented two edges earlier
  always @(negedge clk) if (rst_n && ov) begin
    int e, c;
    e = exp_q.pop_front(); c = exp_ch.pop_front();
    checks++;
    if (int'(oq) != e || int'(och) != c) begin failures++; $display("FAIL ch %0d q %0d exp %0d", och, oq, e); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 1280; c++) begin
      sc[c] = int'($urandom % 65536); bi[c] = int'($urandom % 256) - 64;
      we = 1; cch = 11'(c); cs = 16'(sc[c]); cb = 16'(bi[c]);
      @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 3000; t++) begin
      longint p, y;
      int c;
      c = int'($urandom % 1280);
      acc = 32'(int'($urandom % 2000) - 1000);
      if (t % 50 == 0) acc = 32'($urandom);
      p = longint'(acc) * longint'(sc[c]);
      y = ((p + 32768) >>> 16) + bi[c];
      if (y < 0) begin y = 0; sat_lo++; end
      if (y > 255) begin y = 255; sat_hi++; end
      exp_q.push_back(int'(y)); exp_ch.push_back(c);
      iv = 1; ich = 11'(c);
      @(negedge clk);
    end
    iv = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || sat_lo == 0 || sat_hi == 0) begin failures++; $display("FAIL left %0d sat %0d %0d", exp_q.size(), sat_lo, sat_hi); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
