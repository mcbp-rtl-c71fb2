// brcr_pe: BRCR processing element (bit-slice repetitiveness computation reduction).
//
// One PE multiplies one bit slice of a 64-row weight tile (16 groups of m = 4
// rows, 32 columns each) with a 32-element activation chunk, without multipliers
// and without repeating additions that rows of a group share:
//  1. load:   all 16 x 32 four-bit columns are written into the CAM (cam_match).
//  2. merge:  the controller walks the search keys 1..15 (key 0 is gated). For a
//             key, the CAM returns in one cycle a 512-bit bitmap of matching
//             columns; 16 index converters (one per group, 32-bit slice each)
//             turn it into column indices, the activations at those indices are
//             fetched, and the group's addition merge unit adds them into its
//             group-sum register z[key].
//  3. rebuild: one reconstruction unit, time-multiplexed over the 16 groups,
//             forms the four row results of each group from its 15 group sums,
//             in the row order y3, y2, y1, y0.
// Structure and counts (one 512 B CAM, 16 index converters, 16 AMUs, one RU) are
// the published ones. Searching a key and draining its indices are not
// overlapped here, and each AMU adds one activation per cycle.
//
// Timing: after start_i, 1 load cycle, 1 cycle for the gated key 0, then per
// key 1..15 one search cycle + 1 bitmap load cycle + max(1, largest per-group match count) merge cycles, then 64
// reconstruction cycles (+1 register). done_o pulses when the last row is out.
//
// Interface: cols_i[g*32+c] is column c of group g (bit 3 = row 4g). During the
// merge phase act_req_o[g]/act_idx_o[g] ask for activation act_idx_o[g] of the
// chunk, which must be returned on act_i[g] in the same cycle. Rows come out on
// y_valid_o / y_row_o (0..63) / y_o, unsigned sums of activations.
module brcr_pe
  import mcbp_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_i,
  input  col_t                 cols_i   [N_GROUPS*COLS],
  output logic                 act_req_o [N_GROUPS],
  output logic [IDX_W-1:0]     act_idx_o [N_GROUPS],
  input  act_t                 act_i    [N_GROUPS],
  output logic                 y_valid_o,
  output logic [$clog2(T_M)-1:0] y_row_o,
  output logic [Y_W-1:0]       y_o,
  output logic                 busy_o,
  output logic                 done_o,
  output logic                 key_gated_o,
  output logic [15:0]          merge_adds_o
);
  localparam int unsigned NC = N_GROUPS * COLS;

  typedef enum logic [2:0] {S_IDLE, S_SEARCH, S_BMLOAD, S_MERGE, S_RECON, S_WAIT} state_t;
  state_t state;

  logic [3:0]           key;
  logic [NC-1:0]        bitmap;
  logic                 bitmap_valid;
  logic                 cam_gated;
  logic                 search;
  logic [N_GROUPS-1:0]  ic_last, ic_valid;
  logic [IDX_W-1:0]     ic_idx  [N_GROUPS];
  logic                 step;
  zsum_t                z       [N_GROUPS][N_KEYS];
  zsum_t                z_sel   [N_KEYS];
  logic [3:0]           rg;      // reconstruction group
  logic [1:0]           rr;      // reconstruction row, 3 down to 0
  logic                 ru_valid;
  logic [Y_W-1:0]       ru_y;
  logic [$clog2(T_M)-1:0] row_q;

  // the key sweep starts at 0000, which the CAM gates (no bitmap, no merge)
  assign search = (state == S_SEARCH);

  cam_match #(.N_COLS(NC)) u_cam (
    .clk, .rst_n, .load_i(start_i && state == S_IDLE), .cols_i,
    .search_i(search), .key_i(key),
    .bitmap_o(bitmap), .bitmap_valid_o(bitmap_valid), .gated_o(cam_gated)
  );
  assign key_gated_o = cam_gated;

  assign step = (state == S_MERGE);

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    logic unused_empty;
    index_converter #(.W(COLS)) u_ic (
      .clk, .rst_n,
      .load_i(bitmap_valid), .bitmap_i(bitmap[g*COLS +: COLS]),
      .step_i(step), .idx_o(ic_idx[g]), .idx_valid_o(ic_valid[g]),
      .last_o(ic_last[g]), .empty_o(unused_empty)
    );
    assign act_req_o[g] = ic_valid[g];
    assign act_idx_o[g] = ic_idx[g];

    addition_merge_unit u_amu (
      .clk, .rst_n, .clear_i(start_i && state == S_IDLE),
      .add_i(ic_valid[g]), .key_i(key), .act_i(act_i[g]), .z_o(z[g])
    );
  end

  always_comb
    for (int k = 0; k < N_KEYS; k++) z_sel[k] = z[rg][k];

  reconstruction_unit u_ru (
    .clk, .rst_n, .row_valid_i(state == S_RECON), .row_i(rr), .z_i(z_sel),
    .y_o(ru_y), .y_valid_o(ru_valid)
  );

  assign y_valid_o = ru_valid;
  assign y_o       = ru_y;
  assign y_row_o   = row_q;
  assign busy_o    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      key          <= '0;
      rg           <= '0;
      rr           <= '0;
      row_q        <= '0;
      done_o       <= 1'b0;
      merge_adds_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (step) merge_adds_o <= merge_adds_o + 16'($countones(ic_valid));
      if (state == S_RECON) row_q <= {rg, rr};
      unique case (state)
        S_IDLE: if (start_i) begin
          key          <= 4'd0;
          merge_adds_o <= '0;
          state        <= S_SEARCH;
        end
        S_SEARCH: state <= (key == 4'd0) ? S_SEARCH : S_BMLOAD;
        S_BMLOAD: state <= S_MERGE;
        S_MERGE: if (&ic_last) begin
          if (key == 4'd15) begin
            rg    <= '0;
            rr    <= 2'd3;
            state <= S_RECON;
          end else begin
            key   <= key + 1'b1;
            state <= S_SEARCH;
          end
        end
        S_RECON: begin
          rr <= rr - 1'b1;
          if (rr == 2'd0) begin
            rg <= rg + 1'b1;
            if (rg == 4'(N_GROUPS - 1)) state <= S_WAIT;
          end
        end
        S_WAIT: begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (state == S_SEARCH && key == 4'd0) key <= 4'd1;
    end
  end
endmodule
