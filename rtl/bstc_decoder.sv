// bstc_decoder: bit-serial two-state (BSTC) decoder, one m-bit column per symbol.
//
// Follows the paper's structure: a 1-bit comparator looks at the incoming bit when
// no symbol is in flight. A 0 there is a whole symbol and the decoder emits m
// zeros. A 1 starts a symbol: the bit and the next m bits are shifted into an
// serial-in parallel-out register, and once m+1 bits are in the leading-one
// eliminator drops the indicator and emits the m data bits. (The indicator is
// dropped as it enters, and the last data bit goes straight to the output, so only m-1 bits of
// the published 5-bit SIPO are stored.)
// Bit slices that are stored uncompressed (bypass_i = 1) have no indicator: m bits
// are collected and emitted as they are. bypass_i must stay constant within a
// symbol.
//
// Interface: one bit per cycle on bit_i when bit_valid_i. col_valid_o pulses in
// the cycle after the last bit of a symbol, with col_o (first received data bit in
// col_o[m-1]). clear_i drops a partial symbol. Throughput: a zero column costs one
// bit-cycle, a non-zero column m+1, a raw column m.
module bstc_decoder #(
  parameter int unsigned M = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear_i,
  input  logic         bypass_i,
  input  logic         bit_valid_i,
  input  logic         bit_i,
  output logic         col_valid_o,
  output logic [M-1:0] col_o
);
  localparam int unsigned CW = $clog2(M + 2);
  logic [M-2:0]  sipo;      // SIPO: indicator dropped, last data bit taken directly
  logic [CW-1:0] cnt;       // bits held in the SIPO
  logic          busy;      // a symbol is in flight

  assign busy = (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sipo        <= '0;
      cnt         <= '0;
      col_valid_o <= 1'b0;
      col_o       <= '0;
    end else begin
      col_valid_o <= 1'b0;
      if (clear_i) begin
        cnt <= '0;
      end else if (bit_valid_i) begin
        if (!busy && !bypass_i && !bit_i) begin
          // comparator sees a 0 symbol: emit m zeros
          col_valid_o <= 1'b1;
          col_o       <= '0;
        end else begin
          sipo <= {sipo[M-3:0], bit_i};
          if ((bypass_i && cnt == CW'(M - 1)) || (!bypass_i && cnt == CW'(M))) begin
            // SIPO full: leading-one eliminator keeps the m data bits
            col_valid_o <= 1'b1;
            col_o       <= {sipo, bit_i};
            cnt         <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
