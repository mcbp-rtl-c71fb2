// tb_sram_bank: writes random words to random addresses of a 64 x 1024 bank and
// reads them back, checking the one-cycle read latency and that rdata holds while
// re is low.
module tb_sram_bank;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [9:0] wa = 0, ra = 0;
  logic [63:0] wd = 0, rd;
  logic [63:0] model [1024];
  bit written [1024];
  int checks = 0, failures = 0;

  sram_bank #(.WIDTH(64), .DEPTH(1024)) dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rd));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = 1; wa = 10'($urandom); wd = {$urandom, $urandom};
      model[wa] = wd; written[wa] = 1;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [9:0] a;
      do a = 10'($urandom); while (!written[a]);
      @(negedge clk); re = 1; ra = a;
      @(negedge clk); re = 0; ra = ~a;
      checks++;
      if (rd !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rd !== model[a]) begin failures++; $display("FAIL hold addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
