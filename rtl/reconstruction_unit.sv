// reconstruction_unit: rebuilds the four row results of a group from its group sums.
//
// Output row r of a 4-row group is the sum of the group-sum registers z_k over
// all patterns k whose bit (3 - r) is set (bit 3 of a pattern is row 0): this is
// the product of the fixed enumeration matrix with the merged activation vector.
// Every row sums eight registers. The datapath is fixed: four adders, each with
// its two inputs bound to a short list of registers through a multiplexer,
// followed by an adder tree. Adder a adds the (2a)-th and (2a+1)-th pattern that
// contains the row, so Adder 0 reads z8, z4, z2, z1 on its first input and
// Adder 3 reads z15 on its second input for every row, as in the published
// figure. Rows are meant to be produced in the order y3, y2, y1, y0.
//
// Interface: row_valid_i with row_i (0..3) and the group sums z_i; y_o and
// y_valid_o follow one cycle later (registered).
module reconstruction_unit
  import mcbp_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           row_valid_i,
  input  logic [1:0]     row_i,
  input  zsum_t          z_i [N_KEYS],
  output logic [Y_W-1:0] y_o,
  output logic           y_valid_o
);
  // n-th (0..7) pattern with bit b set, in increasing order
  function automatic int unsigned pat(input int unsigned b, input int unsigned n);
    return ((n >> b) << (b + 1)) | (1 << b) | (n & ((1 << b) - 1));
  endfunction

  logic [Z_W:0]   add_out [4];
  logic [Y_W-1:0] tree;
  logic [1:0]     b;

  assign b = 2'd3 - row_i;

  always_comb begin
    for (int a = 0; a < 4; a++) begin
      add_out[a] = '0;
      for (int bb = 0; bb < 4; bb++)
        if (b == 2'(bb))
          add_out[a] = {1'b0, z_i[pat(bb, 2*a)]} + {1'b0, z_i[pat(bb, 2*a + 1)]};
    end
    tree = Y_W'(add_out[0]) + Y_W'(add_out[1]) + Y_W'(add_out[2]) + Y_W'(add_out[3]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_o       <= '0;
      y_valid_o <= 1'b0;
    end else begin
      y_valid_o <= row_valid_i;
      if (row_valid_i) y_o <= tree;
    end
  end
endmodule
