// bstc_lane: one weight-SRAM bank with its BSTC decoder (segmented layout reader).
//
// The compressed bit-slice matrices are cut along the hidden dimension into
// sub-weights, each stored as a variable-length bit stream in a bank of its own
// lane so that the lanes decode in parallel. Because the lengths vary, the start
// of every sub-weight is kept in an address area at the top of the bank: each
// 16-bit entry is {10-bit row, 6-bit column}, four entries per 64-bit row
// (entry j in row j/4, entry 0 of a row in bits 63:48). Row and column sizes
// (64 x 1024) and the entry format come from the published layout; the order of
// entries inside a row and the MSB-first bit order are this design's choices.
//
// On start_i the lane reads entry sub_id_i, then reads the bank row by row from
// that position (column c of a row is bit 63-c) and shifts one bit per cycle into
// a bstc_decoder, until n_cols_i columns have been decoded. A symbol may cross a
// row boundary: the next row is read while the last bit of the current one is
// shifted, so the stream runs at one bit per cycle without bubbles.
//
// Interface: the bank is filled through wr_*; decoded columns appear on
// col_valid_o / col_o with their index col_idx_o (0..n_cols_i-1); done_o pulses
// once after the last column. bypass_i selects uncompressed slices (m bits per
// column, no indicator). bits_o counts bits streamed for the current sub-weight.
module bstc_lane #(
  parameter int unsigned BANK_ROWS = 1024,
  parameter int unsigned BANK_COLS = 64,
  parameter int unsigned M         = 4,
  parameter int unsigned NC_W      = 6,
  parameter int unsigned RW        = $clog2(BANK_ROWS),
  parameter int unsigned CW        = $clog2(BANK_COLS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // fill port
  input  logic                 wr_en_i,
  input  logic [RW-1:0]        wr_row_i,
  input  logic [BANK_COLS-1:0] wr_data_i,
  // decode command
  input  logic                 start_i,
  input  logic [7:0]           sub_id_i,
  input  logic [NC_W-1:0]      n_cols_i,
  input  logic                 bypass_i,
  // decoded columns
  output logic                 col_valid_o,
  output logic [M-1:0]         col_o,
  output logic [NC_W-1:0]      col_idx_o,
  output logic                 done_o,
  output logic                 busy_o,
  output logic [15:0]          bits_o
);
  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_STREAM, S_FIN} state_t;
  state_t state;

  logic                 re;
  logic [RW-1:0]        raddr;
  logic [BANK_COLS-1:0] rdata;
  logic [RW-1:0]        row;
  logic [CW-1:0]        col;
  logic [NC_W-1:0]      ncols, cnt;
  logic [1:0]           entry_sel;
  logic                 byp;
  logic                 feed;
  logic                 last_col;
  logic [15:0]          entry;

  sram_bank #(.WIDTH(BANK_COLS), .DEPTH(BANK_ROWS)) u_bank (
    .clk, .we(wr_en_i), .waddr(wr_row_i), .wdata(wr_data_i),
    .re, .raddr, .rdata
  );

  // the decoder's registered output of the final column is seen here, so the
  // stream stops without feeding an extra bit
  assign last_col = col_valid_o && (cnt + 1'b1 == ncols);
  assign feed     = (state == S_STREAM) && !last_col;
  assign entry    = rdata[BANK_COLS-1-16*entry_sel -: 16];

  bstc_decoder #(.M(M)) u_dec (
    .clk, .rst_n, .clear_i(start_i), .bypass_i(byp),
    .bit_valid_i(feed), .bit_i(rdata[CW'(BANK_COLS-1) - col]),
    .col_valid_o, .col_o
  );

  assign col_idx_o = cnt;
  assign busy_o    = (state != S_IDLE);

  always_comb begin
    re    = 1'b0;
    raddr = row;
    if (state == S_IDLE && start_i) begin
      re    = 1'b1;
      raddr = RW'(sub_id_i >> 2);
    end else if (state == S_ADDR) begin
      re    = 1'b1;
      raddr = entry[15:6];
    end else if (feed && col == CW'(BANK_COLS - 1)) begin
      re    = 1'b1;
      raddr = row + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row       <= '0;
      col       <= '0;
      ncols     <= '0;
      cnt       <= '0;
      entry_sel <= '0;
      byp       <= 1'b0;
      done_o    <= 1'b0;
      bits_o    <= '0;
    end else begin
      done_o <= 1'b0;
      if (col_valid_o) cnt <= cnt + 1'b1;
      if (feed) bits_o <= bits_o + 1'b1;
      unique case (state)
        S_IDLE: if (start_i) begin
          entry_sel <= sub_id_i[1:0];
          ncols     <= n_cols_i;
          byp       <= bypass_i;
          cnt       <= '0;
          bits_o    <= '0;
          state     <= S_ADDR;
        end
        S_ADDR: begin                       // entry available, row read issued
          row   <= entry[15:6];
          col   <= entry[5:0];
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (last_col) begin
            state <= S_FIN;
          end else begin
            col <= col + 1'b1;              // wraps to 0 at the row end
            if (col == CW'(BANK_COLS - 1)) row <= row + 1'b1;
          end
        end
        S_FIN: begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a new sub-weight is only started on an idle lane
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start_i |-> state == S_IDLE);
endmodule
