// kv_fetcher: on-demand key fetcher between a BGPP unit and main memory.
//
// Keys are kept in main memory as bit planes: for key n and plane p (p = 0..6
// the magnitude bits, p = 7 the sign) the 64 bits of all 64 dimensions sit in one
// word at  kv_base + p * PLANE_STRIDE + n . A request from the BGPP unit names a
// beat of 16 keys, a magnitude bit and a mask of live keys; the fetcher issues one
// memory read per live key only (the sign plane too when asked), so pruned keys
// cost no traffic, collects the words and hands them back together. The bit-plane
// layout is this design's reading of the published "bit-level KV cache"; the
// addresses and the lane-per-key memory port are its own choices.
//
// Interface: cfg_kv_base_i / cfg_key_base_i (first key of the block) are sampled
// at start of each request. Memory port: mem_req_o[i] / mem_addr_o[i] for 16
// lanes, one cycle; mem_rsp_valid_i with mem_rsp_data_i arrives some cycles
// later for the lanes requested. words_o counts words read since clear_i.
module kv_fetcher #(
  parameter int unsigned D            = 64,
  parameter int unsigned N_IP         = 16,
  parameter int unsigned AW           = 32,
  parameter int unsigned PLANE_STRIDE = 4096,
  parameter int unsigned BW           = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear_i,
  input  logic [AW-1:0]   cfg_kv_base_i,
  input  logic [AW-1:0]   cfg_key_base_i,
  // from the BGPP unit
  input  logic            kreq_valid_i,
  input  logic [BW-1:0]   kreq_beat_i,
  input  logic [2:0]      kreq_bit_i,
  input  logic            kreq_sign_i,
  input  logic [N_IP-1:0] kreq_mask_i,
  output logic            krsp_valid_o,
  output logic [D-1:0]    krsp_bits_o [N_IP],
  output logic [D-1:0]    krsp_sign_o [N_IP],
  // main-memory read port
  output logic            mem_req_o   [N_IP],
  output logic [AW-1:0]   mem_addr_o  [N_IP],
  input  logic            mem_rsp_valid_i,
  input  logic [D-1:0]    mem_rsp_data_i [N_IP],
  output logic [31:0]     words_o
);
  typedef enum logic [2:0] {S_IDLE, S_SREQ, S_SWAIT, S_BREQ, S_BWAIT, S_RSP} state_t;
  state_t state;
  logic [N_IP-1:0] mask;
  logic [2:0]      plane;

  always_comb
    for (int i = 0; i < N_IP; i++) begin
      mem_req_o[i]  = (state == S_SREQ || state == S_BREQ) && mask[i];
      mem_addr_o[i] = cfg_kv_base_i + AW'(plane) * AW'(PLANE_STRIDE) + cfg_key_base_i
                      + AW'(N_IP) * AW'(kreq_beat_i) + AW'(i);
    end

  assign krsp_valid_o = (state == S_RSP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      mask    <= '0;
      plane   <= '0;
      words_o <= '0;
      for (int i = 0; i < N_IP; i++) begin
        krsp_bits_o[i] <= '0;
        krsp_sign_o[i] <= '0;
      end
    end else begin
      if (clear_i) words_o <= '0;
      unique case (state)
        S_IDLE: if (kreq_valid_i) begin
          mask  <= kreq_mask_i;
          plane <= kreq_sign_i ? 3'd7 : kreq_bit_i;
          state <= kreq_sign_i ? S_SREQ : S_BREQ;
        end
        S_SREQ: begin
          words_o <= words_o + 32'($countones(mask));
          state   <= S_SWAIT;
        end
        S_SWAIT: if (mem_rsp_valid_i) begin
          for (int i = 0; i < N_IP; i++) krsp_sign_o[i] <= mask[i] ? mem_rsp_data_i[i] : '0;
          plane <= kreq_bit_i;
          state <= S_BREQ;
        end
        S_BREQ: begin
          words_o <= words_o + 32'($countones(mask));
          state   <= S_BWAIT;
        end
        S_BWAIT: if (mem_rsp_valid_i) begin
          for (int i = 0; i < N_IP; i++) krsp_bits_o[i] <= mask[i] ? mem_rsp_data_i[i] : '0;
          state <= S_RSP;
        end
        S_RSP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // handshake rule: the requester holds its request (beat, bit, mask) until the
  // response cycle
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    (state inside {S_SREQ, S_SWAIT, S_BREQ, S_BWAIT}) |-> kreq_valid_i);
endmodule
