// addition_merge_unit: merges activations that share a bit-column pattern.
//
// The group-sum buffer (GSB) holds one register z_k for every non-zero 4-bit
// column pattern k = 1..15 (z_0 would collect activations multiplied by zero and
// is not kept). For each fetched activation x, the register selected by the
// current search key is read through a multiplexer, x is added and the sum is
// written back through a demultiplexer: z[key] += x. After all keys have been
// searched, z_k is the sum of the activations whose weight column equals k. The
// 15 x 20-bit GSB is the published one; this design adds one activation per cycle.
//
// Interface: clear_i zeroes the GSB. add_i with key_i and act_i (unsigned) updates
// z[key_i] at the clock edge. z_o[k] is the register value; z_o[0] is a constant
// 0 so that the output can be indexed directly by a 4-bit key.
module addition_merge_unit
  import mcbp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear_i,
  input  logic       add_i,
  input  logic [3:0] key_i,
  input  act_t       act_i,
  output zsum_t      z_o [N_KEYS]
);
  zsum_t gsb [1:N_KEYS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < N_KEYS; k++) gsb[k] <= '0;
    end else if (clear_i) begin
      for (int k = 1; k < N_KEYS; k++) gsb[k] <= '0;
    end else if (add_i && key_i != 4'd0) begin
      gsb[key_i] <= gsb[key_i] + zsum_t'(act_i);
    end
  end

  always_comb begin
    z_o[0] = '0;
    for (int k = 1; k < N_KEYS; k++) z_o[k] = gsb[k];
  end
endmodule
