// bgpp_ip_unit: bit-serial inner-product unit of the bit-grained prediction unit.
//
// Computes, one key bit plane per round, the dot product of a 64-element query
// with one key. Each lane ANDs the key's current magnitude bit with the query
// element (the "AND-based adder tree"), and the sign decision unit negates the
// term when the key element is negative (keys are sign-magnitude; the query is
// two's complement and carries its own sign). A 64-input adder tree sums the
// terms, and the partial sum of the previous rounds, shifted left by one, is
// added, so after r rounds the result equals the dot product with the r most
// significant magnitude bits of the key. In the first (MSB) round the shifted
// feedback is replaced by zero. The partial sum lives outside (in the filter's
// score buffer) because the unit serves a different key on every beat; the
// 32-bit result register is the published one.
//
// Interface: en_i with first_i, psum_i (previous partial sum of this key),
// q_i, kbit_i and ksign_i; sum_o / valid_o one cycle later.
module bgpp_ip_unit #(
  parameter int unsigned D     = 64,
  parameter int unsigned Q_W   = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en_i,
  input  logic                    first_i,
  input  logic signed [ACC_W-1:0] psum_i,
  input  logic signed [Q_W-1:0]   q_i     [D],
  input  logic [D-1:0]            kbit_i,
  input  logic [D-1:0]            ksign_i,
  output logic signed [ACC_W-1:0] sum_o,
  output logic                    valid_o
);
  logic signed [ACC_W-1:0] tree;

  always_comb begin
    tree = '0;
    for (int j = 0; j < D; j++) begin
      logic signed [Q_W:0] t;
      t = kbit_i[j] ? (Q_W+1)'(q_i[j]) : '0;        // AND
      if (ksign_i[j]) t = -t;                         // Neg, sign decision
      tree += ACC_W'(t);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_o   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= en_i;
      if (en_i) sum_o <= (first_i ? '0 : (psum_i <<< 1)) + tree;
    end
  end
endmodule
