// cam_match: CAM-based fast match unit of the BRCR processing element.
//
// Each m = 4 bit column of the decoded group matrices is "orchestrated" on load:
// its higher-order two bits (rows 0,1) and lower-order two bits (rows 2,3) are
// stored one-hot in two banks of four entries, so entry v of the HO bank holds a
// 1 in column j when column j's HO bits equal v (likewise for the LO bank). A
// search reads entry key[3:2] of the HO bank and entry key[1:0] of the LO bank
// and ANDs them: the result is a bitmap of all columns equal to the key, found in
// one cycle whatever the number of columns. With N_COLS = 512 the two banks hold
// 2 x 4 x 512 bits = 512 bytes, the size of the published CAM. The CAM cell is a
// custom circuit in the original; here it is modelled with flip-flops.
// Key 0 is never searched (its activations are multiplied by zero): a search with
// key 0 is gated, leaves the bitmap register untouched and pulses gated_o.
//
// Interface: load_i with cols_i writes all columns at once (column j = cols_i[j],
// bit 3 = row 0). search_i with key_i gives bitmap_o and bitmap_valid_o in the
// next cycle.
module cam_match #(
  parameter int unsigned N_COLS = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_i,
  input  logic [3:0]        cols_i [N_COLS],
  input  logic              search_i,
  input  logic [3:0]        key_i,
  output logic [N_COLS-1:0] bitmap_o,
  output logic              bitmap_valid_o,
  output logic              gated_o
);
  logic [N_COLS-1:0] ho [4];  // HO bank: entry v marks columns whose bits [3:2] == v
  logic [N_COLS-1:0] lo [4];  // LO bank: entry v marks columns whose bits [1:0] == v

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < 4; v++) begin
        ho[v] <= '0;
        lo[v] <= '0;
      end
    end else if (load_i) begin
      for (int v = 0; v < 4; v++)
        for (int j = 0; j < N_COLS; j++) begin
          ho[v][j] <= (cols_i[j][3:2] == 2'(v));
          lo[v][j] <= (cols_i[j][1:0] == 2'(v));
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitmap_o       <= '0;
      bitmap_valid_o <= 1'b0;
      gated_o        <= 1'b0;
    end else begin
      bitmap_valid_o <= search_i && (key_i != 4'd0);
      gated_o        <= search_i && (key_i == 4'd0);
      if (search_i && key_i != 4'd0)
        bitmap_o <= ho[key_i[3:2]] & lo[key_i[1:0]];
    end
  end
endmodule
