// mult_2xk: 2 x k LUT multiplier tile, P = A * B with a 2-bit A and a K-bit B.
//
// The two partial-product rows (B AND a0) and (B AND a1) << 1 are added on one carry
// chain: each column's LUT computes prop = r0 ^ r1 and gen = r0 from a0, a1, b_n and
// b_{n-1}, so the tile costs one LUT per column. A is unsigned; B is unsigned or, with
// SIGNED_B, two's complement (the rows are then sign-extended by one column). P has K+2
// bits. The paper lists this tile (from earlier work) only with its size and LUT cost;
// the single-chain structure here is the simplest one that meets that cost.
// Combinational.
module mult_2xk #(
  parameter int K        = 8,
  parameter bit SIGNED_B = 1'b0
) (
  input  logic [1:0]   a,
  input  logic [K-1:0] b,
  output logic [K+1:0] p
);

  logic [K+1:0] r0, r1, prop;
  logic         cout;

  always_comb begin
    r0   = {{2{SIGNED_B & b[K-1]}}, b} & {(K + 2){a[0]}};
    r1   = {{SIGNED_B & b[K-1]}, b, 1'b0} & {(K + 2){a[1]}};
    prop = r0 ^ r1;
  end

  // cout of a sign-extended K+2 bit sum carries no information and stays unused.
  carry_chain #(.WIDTH(K + 2)) u_cc (
    .prop(prop),
    .gen (r0),
    .cin (1'b0),
    .sum (p),
    .cout(cout)
  );

endmodule
