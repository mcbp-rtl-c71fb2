// index_converter: turns one 32-bit slice of the CAM bitmap into column indices.
//
// A position-one detector (priority encoder) finds the lowest set bit of the
// loaded bitmap; that index is emitted and the bit cleared, one index per cycle,
// so a bitmap with p ones is converted in p cycles. The indices address the
// activations that the addition merge unit then adds together. The published
// figure prints both a 6-bit index and "16*5" for sixteen converters; this design
// uses 5 bits, enough for a 32-bit slice.
//
// Interface: load_i captures bitmap_i. While step_i is high and the bitmap is not
// empty, idx_o / idx_valid_o show the current lowest one (combinationally) and it
// is cleared at the clock edge. last_o is high when at most one bit remains.
module index_converter #(
  parameter int unsigned W  = 32,
  parameter int unsigned IW = $clog2(W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_i,
  input  logic [W-1:0]  bitmap_i,
  input  logic          step_i,
  output logic [IW-1:0] idx_o,
  output logic          idx_valid_o,
  output logic          last_o,
  output logic          empty_o
);
  logic [W-1:0] bm;

  always_comb begin
    idx_o = '0;
    for (int i = W - 1; i >= 0; i--)
      if (bm[i]) idx_o = IW'(i);
  end

  assign empty_o     = (bm == '0);
  assign idx_valid_o = step_i && !empty_o;
  assign last_o      = ((bm & (bm - 1'b1)) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           bm <= '0;
    else if (load_i)      bm <= bitmap_i;
    else if (idx_valid_o) bm <= bm & (bm - 1'b1);  // clear the lowest one
  end
endmodule
