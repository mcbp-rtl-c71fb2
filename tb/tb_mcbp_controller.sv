// tb_mcbp_controller: drives the controller with lane, cluster and BGPP-unit
// models that stay busy for fixed times after their start pulses, runs GEMV jobs
// of several chunk counts, and a BGPP job started together with one of them.
// Checks: the sub-weight order {chunk, 0..31}, slice/group and raw/coded choice
// of every decode, the activation word read for each chunk, one act load and one
// cluster start per chunk, the drain of channels 0..1279 in order, the query
// reads q_addr and q_addr+1 (GEMV wins the shared token port), the four temp
// writes and the GEMV cycle count
//   2 + n_chunks * (32 * (2 + LB) + 4 + CB) + 1280
// for lanes busy LB and clusters busy CB cycles after their start pulses.
module tb_mcbp_controller;
  import mcbp_pkg::*;
  localparam int LB = 5, CB = 40, BB = 30;
  logic clk = 0, rst_n = 0, gstart = 0, bstart = 0;
  logic [3:0] nch;
  logic [13:0] abase, qaddr, tbase;
  logic gbusy, gdone, lstart, lbyp, lbusy, clclr, clld, clst, clbusy, tre, dv;
  logic [7:0] sid;
  logic [2:0] dsl;
  logic [1:0] dq;
  logic [13:0] traddr, twaddr;
  logic [10:0] dch;
  logic bbusy, bdone, qlo, qhi, bgst, bgbusy, twe;
  logic [1:0] tunit;
  int checks = 0, failures = 0;
  int lcnt = 0, ccnt = 0, bcnt = 0;
  int n_dec = 0, n_ld = 0, n_st = 0, n_drain = 0, n_twr = 0, n_qrd = 0;
  int cur_chunk = 0;

  mcbp_controller dut (.clk, .rst_n, .gemv_start_i(gstart), .gemv_n_chunks_i(nch),
    .gemv_act_base_i(abase), .gemv_busy_o(gbusy), .gemv_done_o(gdone), .lane_start_o(lstart),
    .lane_sub_id_o(sid), .lane_bypass_o(lbyp), .dec_slice_o(dsl), .dec_q_o(dq),
    .lanes_busy_i(lbusy), .cl_clear_o(clclr), .cl_act_load_o(clld), .cl_start_o(clst),
    .cl_busy_i(clbusy), .tok_re_o(tre), .tok_raddr_o(traddr), .drain_valid_o(dv),
    .drain_ch_o(dch), .bgpp_start_i(bstart), .bgpp_q_addr_i(qaddr), .bgpp_tmp_base_i(tbase),
    .bgpp_busy_o(bbusy), .bgpp_done_o(bdone), .q_load_lo_o(qlo), .q_load_hi_o(qhi),
    .bg_start_o(bgst), .bg_busy_i(bgbusy), .tmp_we_o(twe), .tmp_waddr_o(twaddr),
    .tmp_unit_o(tunit));
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // busy models of lanes, clusters and BGPP units
  always @(posedge clk) begin
    if (lstart) lcnt <= LB; else if (lcnt > 0) lcnt <= lcnt - 1;
    if (clst) ccnt <= CB; else if (ccnt > 0) ccnt <= ccnt - 1;
    if (bgst) bcnt <= BB; else if (bcnt > 0) bcnt <= bcnt - 1;
  end
  assign lbusy  = lcnt > 0;
  assign clbusy = ccnt > 0;
  assign bgbusy = bcnt > 0;

  // protocol checker
  always @(negedge clk) if (rst_n) begin
    if (lstart) begin
      int s;
      s = n_dec % 32;
      checks++;
      if (sid != 8'({3'(cur_chunk), 5'(s)}) || dsl != 3'(s / 4) || dq != 2'(s % 4)
          || lbyp != !BSTC_CODED[s / 4]) begin
        failures++; $display("FAIL decode %0d sid %h", n_dec, sid);
      end
      n_dec++;
    end
    if (tre && dut.gs == dut.G_ACT) begin
      checks++;
      if (traddr != abase + 14'(cur_chunk)) begin failures++; $display("FAIL act addr %0d", traddr); end
    end
    if (tre && dut.gs != dut.G_ACT) begin
      checks++;
      if (traddr != qaddr + 14'(n_qrd)) begin failures++; $display("FAIL q addr %0d", traddr); end
      n_qrd++;
    end
    if (clld) n_ld++;
    if (clst) begin
      n_st++;
      checks++;
      if (n_ld != n_st) begin failures++; $display("FAIL start before act load"); end
    end
    if (gbusy && dut.gs == dut.G_CWAIT && !clbusy) cur_chunk++;
    if (dv) begin
      checks++;
      if (int'(dch) != n_drain) begin failures++; $display("FAIL drain ch %0d exp %0d", dch, n_drain); end
      n_drain++;
    end
    if (twe) begin
      checks++;
      if (twaddr != tbase + 14'(n_twr) || int'(tunit) != n_twr) begin failures++; $display("FAIL tmp write"); end
      n_twr++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    qaddr = 14'd500; tbase = 14'd77;
    for (int t = 0; t < 4; t++) begin
      int cyc, exp_cyc;
      nch = 4'(1 + t * 2);
      abase = 14'(100 * t);
      n_dec = 0; n_ld = 0; n_st = 0; n_drain = 0; cur_chunk = 0; n_qrd = 0; n_twr = 0;
      gstart = 1;
      if (t == 1) bstart = 1;
      @(negedge clk);
      gstart = 0; bstart = 0;
      cyc = 1;
      while (!gdone && cyc < 100000) begin @(negedge clk); cyc++; end
      exp_cyc = 2 + int'(nch) * (32 * (2 + LB) + 4 + CB) + 1280;
      checks += 5;
      if (cyc != exp_cyc) begin failures++; $display("FAIL t%0d cycles %0d exp %0d", t, cyc, exp_cyc); end
      if (n_dec != 32 * int'(nch)) begin failures++; $display("FAIL decodes %0d", n_dec); end
      if (n_ld != int'(nch) || n_st != int'(nch)) begin failures++; $display("FAIL loads %0d starts %0d", n_ld, n_st); end
      if (n_drain != 1280) begin failures++; $display("FAIL drains %0d", n_drain); end
      if (t == 1 && (n_qrd != 2 || n_twr != 4 || bbusy)) begin
        failures++; $display("FAIL bgpp reads %0d writes %0d", n_qrd, n_twr);
      end
      else if (t != 1 && (n_qrd != 0 || n_twr != 0)) begin failures++; $display("FAIL stray bgpp"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
