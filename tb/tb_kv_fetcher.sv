// tb_kv_fetcher: random requests (beat, bit plane, live mask, with or without
// the sign plane) against a memory model whose word at address a is a hash of
// a. Checks that only live lanes issue reads, at kv_base + plane*4096 +
// key_base + 16*beat + i, that the returned bits/signs are those words (zero for
// pruned lanes), the word counter, and the cycle count: 1 + LAT per plane read
// plus 1 for the response cycle.
module tb_kv_fetcher;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0, clear = 0, kv = 0, ks = 0, mrv = 0;
  logic [31:0] kvb, keyb;
  logic [1:0] kb;
  logic [2:0] kbit;
  logic [15:0] km;
  logic rv;
  logic [63:0] rbits [16], rsign [16], mdata [16];
  logic mreq [16];
  logic [31:0] maddr [16], words;
  int checks = 0, failures = 0, exp_words = 0;

  kv_fetcher dut (.clk, .rst_n, .clear_i(clear), .cfg_kv_base_i(kvb), .cfg_key_base_i(keyb),
    .kreq_valid_i(kv), .kreq_beat_i(kb), .kreq_bit_i(kbit), .kreq_sign_i(ks), .kreq_mask_i(km),
    .krsp_valid_o(rv), .krsp_bits_o(rbits), .krsp_sign_o(rsign), .mem_req_o(mreq),
    .mem_addr_o(maddr), .mem_rsp_valid_i(mrv), .mem_rsp_data_i(mdata), .words_o(words));
  always #5 clk = ~clk;

  function automatic logic [63:0] hash(logic [31:0] a);
    return {a * 32'h9E3779B1, ~a ^ 32'h5bd1e995};
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: latches the addresses, answers LAT cycles later
  initial begin
    forever begin
      @(negedge clk);
      mrv = 0;
      begin
        bit any;
        logic [31:0] a [16];
        logic r [16];
        any = 0;
        for (int i = 0; i < 16; i++) begin
          r[i] = mreq[i]; a[i] = maddr[i];
          if (mreq[i]) begin
            any = 1;
            checks++;
            if (!km[i]) begin failures++; $display("FAIL read on pruned lane %0d", i); end
          end
        end
        if (any) begin
          repeat (LAT) @(negedge clk);
          for (int i = 0; i < 16; i++) mdata[i] = r[i] ? hash(a[i]) : 64'hdead;
          mrv = 1;
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    kvb = 32'h0010_0000; keyb = 32'd128;
    for (int t = 0; t < 300; t++) begin
      int cyc, exp_cyc;
      kb = 2'($urandom); kbit = 3'($urandom % 7); ks = ($urandom % 3) == 0;
      km = 16'($urandom);
      if (t % 10 == 0) km = '1;
      keyb = 32'(64 * ($urandom % 64));
      kv = 1;
      cyc = 0;
      do begin @(negedge clk); cyc++; end while (!rv && cyc < 100);
      kv = 0;
      exp_cyc = (ks ? 2 : 1) * (1 + LAT) + 1;
      exp_words += (ks ? 2 : 1) * $countones(km);
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL t%0d cycles %0d exp %0d", t, cyc, exp_cyc); end
      for (int i = 0; i < 16; i++) begin
        logic [31:0] base;
        base = kvb + keyb + 32'(16 * int'(kb) + i);
        checks++;
        if (rbits[i] != (km[i] ? hash(base + 32'(kbit) * 4096) : 64'd0)) begin
          failures++; $display("FAIL t%0d lane %0d bits", t, i);
        end
        if (ks) begin
          checks++;
          if (rsign[i] != (km[i] ? hash(base + 7 * 4096) : 64'd0)) begin
            failures++; $display("FAIL t%0d lane %0d sign", t, i);
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (words != 32'(exp_words)) begin failures++; $display("FAIL words %0d exp %0d", words, exp_words); end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (words != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
