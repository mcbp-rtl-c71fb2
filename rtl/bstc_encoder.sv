// bstc_encoder: two-state (BSTC) encoder for one m-bit weight column.
//
// A bit-slice column of the group matrix is either all zero, coded as the single
// bit 0, or non-zero, coded as a 1 indicator followed by the m data bits
// ({1'b1, data}). The circuit is the one of the paper: an m-bit comparator
// against zero and a 2:1 multiplexer. Purely combinational.
//
// Interface: col_i is the column (bit m-1 = first row of the group); code_o holds
// the symbol right-aligned (a zero column gives 5'b00000 with len_o = 1); len_o is
// 1 or m+1. The symbol is transmitted MSB first: code_o[len_o-1] goes out first.
module bstc_encoder #(
  parameter int unsigned M = 4
) (
  input  logic [M-1:0]       col_i,
  output logic [M:0]         code_o,
  output logic [$clog2(M+2)-1:0] len_o
);
  logic nz;
  assign nz     = (col_i != '0);           // CMP against 0000
  assign code_o = nz ? {1'b1, col_i} : '0; // MUX
  assign len_o  = nz ? ($clog2(M+2))'(M + 1) : ($clog2(M+2))'(1);
endmodule
