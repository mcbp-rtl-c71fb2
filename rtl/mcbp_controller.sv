// mcbp_controller: bit-serial and scheduling controller of the accelerator.
//
// Runs two independent jobs, as the published pipeline runs BRCR and BGPP side by
// side:
//
// GEMV job (BRCR): for each 32-column chunk k of the T_K = 32 * n_chunks wide
// weight tile it
//   1. decodes: every BSTC lane decodes 32 sub-weights, one after another; sub-
//      weight s = 4*b + q of chunk k (address-area entry 32*k + s) is bit slice b
//      of group 4*q + lane. Slices whose BSTC_CODED bit is 0 are read raw;
//   2. fetches the activation chunk from token SRAM word act_base + k and loads it
//      into every cluster;
//   3. starts all clusters (both sign passes) and waits for them;
// then it drains the output-stationary accumulators, channel by channel, through
// the quantizer. Decoding the next chunk is not overlapped with computing the
// current one in this design.
//
// BGPP job: reads the 64-element query from token SRAM words q_addr and q_addr+1,
// starts all BGPP units, waits, and writes each unit's 64-bit vital-key mask to
// temp SRAM at tmp_base + unit. The GEMV job has priority on the token SRAM read
// port.
//
// The order of these steps follows the published workflow; the concrete sequence,
// sub-weight numbering and handshakes are this design's.
module mcbp_controller
  import mcbp_pkg::*;
#(
  parameter int unsigned N_CH     = 1280,
  parameter int unsigned N_BGPP   = 4,
  parameter int unsigned TOK_AW   = 14,
  parameter int unsigned TMP_AW   = 14,
  parameter int unsigned CHW      = $clog2(N_CH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // GEMV command
  input  logic              gemv_start_i,
  input  logic [3:0]        gemv_n_chunks_i,
  input  logic [TOK_AW-1:0] gemv_act_base_i,
  output logic              gemv_busy_o,
  output logic              gemv_done_o,
  // BSTC lanes
  output logic              lane_start_o,
  output logic [7:0]        lane_sub_id_o,
  output logic              lane_bypass_o,
  output logic [2:0]        dec_slice_o,
  output logic [1:0]        dec_q_o,
  input  logic              lanes_busy_i,
  // clusters
  output logic              cl_clear_o,
  output logic              cl_act_load_o,
  output logic              cl_start_o,
  input  logic              cl_busy_i,
  // token SRAM read port
  output logic              tok_re_o,
  output logic [TOK_AW-1:0] tok_raddr_o,
  // drain into the quantizer
  output logic              drain_valid_o,
  output logic [CHW-1:0]    drain_ch_o,
  // BGPP command
  input  logic              bgpp_start_i,
  input  logic [TOK_AW-1:0] bgpp_q_addr_i,
  input  logic [TMP_AW-1:0] bgpp_tmp_base_i,
  output logic              bgpp_busy_o,
  output logic              bgpp_done_o,
  output logic              q_load_lo_o,
  output logic              q_load_hi_o,
  output logic              bg_start_o,
  input  logic              bg_busy_i,
  output logic              tmp_we_o,
  output logic [TMP_AW-1:0] tmp_waddr_o,
  output logic [$clog2(N_BGPP)-1:0] tmp_unit_o
);
  typedef enum logic [3:0] {G_IDLE, G_DSTART, G_DGUARD, G_DWAIT, G_ACT, G_ACTLD,
                            G_CSTART, G_CGUARD, G_CWAIT, G_DRAIN, G_DONE} gstate_t;
  typedef enum logic [3:0] {B_IDLE, B_Q0, B_L0, B_Q1, B_L1, B_START, B_GUARD, B_WAIT, B_WR} bstate_t;
  gstate_t gs;
  bstate_t bs;

  logic [3:0]        nchunks, chunk;
  logic [4:0]        sub;
  logic [TOK_AW-1:0] act_base;
  logic [CHW-1:0]    ch;
  logic [TOK_AW-1:0] q_addr;
  logic [TMP_AW-1:0] tmp_base;
  logic [$clog2(N_BGPP)-1:0] unit;
  logic              g_tok, b_tok;

  // ---------------- GEMV job ----------------
  assign lane_start_o  = (gs == G_DSTART);
  assign lane_sub_id_o = {chunk[2:0], sub};
  assign dec_slice_o   = sub[4:2];
  assign dec_q_o       = sub[1:0];
  assign lane_bypass_o = !BSTC_CODED[sub[4:2]];
  assign cl_act_load_o = (gs == G_ACTLD);
  assign cl_start_o    = (gs == G_CSTART);
  assign drain_valid_o = (gs == G_DRAIN);
  assign drain_ch_o    = ch;
  assign gemv_busy_o   = (gs != G_IDLE);
  assign g_tok         = (gs == G_ACT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs <= G_IDLE; nchunks <= '0; chunk <= '0; sub <= '0; act_base <= '0; ch <= '0;
      gemv_done_o <= 1'b0; cl_clear_o <= 1'b0;
    end else begin
      gemv_done_o <= 1'b0;
      cl_clear_o  <= 1'b0;
      unique case (gs)
        G_IDLE: if (gemv_start_i) begin
          nchunks    <= gemv_n_chunks_i;
          act_base   <= gemv_act_base_i;
          chunk      <= '0;
          sub        <= '0;
          cl_clear_o <= 1'b1;
          gs         <= G_DSTART;
        end
        G_DSTART: gs <= G_DGUARD;
        G_DGUARD: gs <= G_DWAIT;
        G_DWAIT: if (!lanes_busy_i) begin
          sub <= sub + 1'b1;
          gs  <= (sub == 5'd31) ? G_ACT : G_DSTART;
        end
        G_ACT:   gs <= G_ACTLD;          // token SRAM read issued
        G_ACTLD: gs <= G_CSTART;         // chunk loaded into the clusters
        G_CSTART: gs <= G_CGUARD;
        G_CGUARD: gs <= G_CWAIT;
        G_CWAIT: if (!cl_busy_i) begin
          chunk <= chunk + 1'b1;
          if (chunk + 1'b1 == nchunks) begin
            ch <= '0;
            gs <= G_DRAIN;
          end else begin
            gs <= G_DSTART;
          end
        end
        G_DRAIN: begin
          ch <= ch + 1'b1;
          if (ch == CHW'(N_CH - 1)) gs <= G_DONE;
        end
        G_DONE: begin
          gemv_done_o <= 1'b1;
          gs <= G_IDLE;
        end
        default: gs <= G_IDLE;
      endcase
    end
  end

  // ---------------- BGPP job ----------------
  assign b_tok       = (bs == B_Q0 || bs == B_Q1) && !g_tok;
  assign tok_re_o    = g_tok || b_tok;
  assign tok_raddr_o = g_tok ? act_base + TOK_AW'(chunk) : (bs == B_Q0 ? q_addr : q_addr + 1'b1);
  assign q_load_lo_o = (bs == B_L0);                  // word q_addr arrived
  assign q_load_hi_o = (bs == B_L1);                  // word q_addr+1 arrived
  assign bg_start_o  = (bs == B_START);
  assign bgpp_busy_o = (bs != B_IDLE);
  assign tmp_we_o    = (bs == B_WR);
  assign tmp_waddr_o = tmp_base + TMP_AW'(unit);
  assign tmp_unit_o  = unit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bs <= B_IDLE; q_addr <= '0; tmp_base <= '0; unit <= '0; bgpp_done_o <= 1'b0;
    end else begin
      bgpp_done_o <= 1'b0;
      unique case (bs)
        B_IDLE: if (bgpp_start_i) begin
          q_addr   <= bgpp_q_addr_i;
          tmp_base <= bgpp_tmp_base_i;
          bs       <= B_Q0;
        end
        B_Q0:    if (!g_tok) bs <= B_L0;
        B_L0:    bs <= B_Q1;
        B_Q1:    if (!g_tok) bs <= B_L1;
        B_L1:    bs <= B_START;
        B_START: bs <= B_GUARD;
        B_GUARD: bs <= B_WAIT;
        B_WAIT:  if (!bg_busy_i) begin
          unit <= '0;
          bs   <= B_WR;
        end
        B_WR: begin
          unit <= unit + 1'b1;
          if (unit == $clog2(N_BGPP)'(N_BGPP - 1)) begin
            bgpp_done_o <= 1'b1;
            bs <= B_IDLE;
          end
        end
        default: bs <= B_IDLE;
      endcase
    end
  end
endmodule
