// brcr_cluster: PE cluster of the BRCR unit, one 64-row output tile.
//
// The cluster holds the decoded weights of one 64 x 32 chunk of its T_M = 64 row
// tile as eight 4-bit-column bit-slice matrices (slices 0..6 are the magnitude,
// slice 7 the sign of the 8-bit sign-magnitude weights), written column by
// column by the BSTC decoding lanes. Its PEs work bit-slice parallel: PE b
// processes magnitude slice b, and the results are shifted left by b and summed
// across PEs into 64 output-stationary accumulators that collect all chunks of
// the K dimension (inter-PE accumulation).
// Sign handling is this design's own: because a product's sign differs from row
// to row inside a 4-row group, each chunk is run in two passes, first with the
// magnitude bits of positive weights (bit & ~sign), then with those of negative
// weights (bit & sign); the second pass is subtracted. The sign slice itself
// needs no PE, so the cluster has 7 PEs where the published configuration counts 8.
// Activations are held in a 32-entry register file (the fetched chunk) that every
// PE reads with 16 indices per cycle.
//
// Interface: wr_* (N_LANES ports) write decoded columns; act_load_i loads the
// chunk act_i; clear_i zeroes the accumulators; start_i runs both passes over the
// current chunk and done_o pulses when acc_o is updated. Latency: two PE runs
// plus one accumulate cycle each.
module brcr_cluster
  import mcbp_pkg::*;
#(
  parameter int unsigned N_LANES = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en_i    [N_LANES],
  input  logic [2:0]            wr_slice_i [N_LANES],
  input  logic [3:0]            wr_group_i [N_LANES],
  input  logic [IDX_W-1:0]      wr_col_i   [N_LANES],
  input  col_t                  wr_data_i  [N_LANES],
  input  logic                  act_load_i,
  input  act_t                  act_i      [COLS],
  input  logic                  clear_i,
  input  logic                  start_i,
  output logic                  busy_o,
  output logic                  done_o,
  output logic signed [ACC_W-1:0] acc_o  [T_M],
  output logic [15:0]           gated_keys_o
);
  localparam int unsigned N_PE = MAG_BITS;
  localparam int unsigned NC   = N_GROUPS * COLS;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_ACC} state_t;
  state_t state;
  logic   pass;              // 0: positive weights, 1: negative weights
  logic   cam_pass;          // pass whose columns the PEs load on pe_start

  col_t   wstore [W_BITS][N_GROUPS][COLS];
  act_t   xreg   [COLS];
  col_t   pe_cols [N_PE][NC];
  logic   pe_start;
  logic   pe_req  [N_PE][N_GROUPS];
  logic [IDX_W-1:0] pe_idx [N_PE][N_GROUPS];
  act_t   pe_act  [N_PE][N_GROUPS];
  logic   pe_yv   [N_PE];
  logic [$clog2(T_M)-1:0] pe_yrow [N_PE];
  logic [Y_W-1:0] pe_y [N_PE];
  logic [N_PE-1:0] pe_done_seen, pe_done, pe_gated;
  logic [Y_W-1:0] ybuf [N_PE][T_M];

  // decoded weight store
  always_ff @(posedge clk) begin
    for (int l = 0; l < N_LANES; l++)
      if (wr_en_i[l]) wstore[wr_slice_i[l]][wr_group_i[l]][wr_col_i[l]] <= wr_data_i[l];
  end

  // activation chunk
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int c = 0; c < COLS; c++) xreg[c] <= '0;
    else if (act_load_i) xreg <= act_i;
  end

  // sign-masked magnitude slices; the PEs load them into their CAMs in the
  // start cycle, which for the second pass is the S_ACC cycle of the first
  assign cam_pass = (state == S_ACC) ? 1'b1 : (state == S_IDLE) ? 1'b0 : pass;

  always_comb
    for (int b = 0; b < N_PE; b++)
      for (int g = 0; g < N_GROUPS; g++)
        for (int c = 0; c < COLS; c++)
          pe_cols[b][g*COLS + c] = wstore[b][g][c] &
                                   (cam_pass ? wstore[W_BITS-1][g][c] : ~wstore[W_BITS-1][g][c]);

  for (genvar b = 0; b < N_PE; b++) begin : g_pe
    logic unused_busy;
    logic [15:0] unused_adds;
    brcr_pe u_pe (
      .clk, .rst_n, .start_i(pe_start), .cols_i(pe_cols[b]),
      .act_req_o(pe_req[b]), .act_idx_o(pe_idx[b]), .act_i(pe_act[b]),
      .y_valid_o(pe_yv[b]), .y_row_o(pe_yrow[b]), .y_o(pe_y[b]),
      .busy_o(unused_busy), .done_o(pe_done[b]), .key_gated_o(pe_gated[b]),
      .merge_adds_o(unused_adds)
    );
    // activation fetch: index -> chunk register file
    always_comb
      for (int g = 0; g < N_GROUPS; g++)
        pe_act[b][g] = pe_req[b][g] ? xreg[pe_idx[b][g]] : '0;
    always_ff @(posedge clk)
      if (pe_yv[b]) ybuf[b][pe_yrow[b]] <= pe_y[b];
  end

  assign pe_start = (state == S_IDLE && start_i) || (state == S_ACC && !pass);
  assign busy_o   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      pass         <= 1'b0;
      pe_done_seen <= '0;
      done_o       <= 1'b0;
      gated_keys_o <= '0;
      for (int r = 0; r < T_M; r++) acc_o[r] <= '0;
    end else begin
      done_o <= 1'b0;
      gated_keys_o <= gated_keys_o + 16'($countones(pe_gated));
      if (clear_i) for (int r = 0; r < T_M; r++) acc_o[r] <= '0;
      unique case (state)
        S_IDLE: if (start_i) begin
          pass         <= 1'b0;
          pe_done_seen <= '0;
          state        <= S_RUN;
        end
        S_RUN: begin
          pe_done_seen <= pe_done_seen | pe_done;
          if (&(pe_done_seen | pe_done)) state <= S_ACC;
        end
        S_ACC: begin
          // inter-PE accumulation: acc += (+/-) sum_b (y_b << b)
          for (int r = 0; r < T_M; r++) begin
            logic signed [ACC_W-1:0] s;
            s = '0;
            for (int b = 0; b < N_PE; b++) s += ACC_W'(ybuf[b][r]) << b;
            acc_o[r] <= pass ? acc_o[r] - s : acc_o[r] + s;
          end
          pe_done_seen <= '0;
          if (!pass) begin
            pass  <= 1'b1;
            state <= S_RUN;
          end else begin
            done_o <= 1'b1;
            pass   <= 1'b0;
            state  <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a chunk is only started on an idle cluster
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start_i |-> state == S_IDLE);
endmodule
