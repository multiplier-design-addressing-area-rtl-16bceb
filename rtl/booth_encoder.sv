// booth_encoder: radix-4 Booth encoder (BE) of one Booth level.
//
// Looks at three neighbouring bits {y_{m+1}, y_m, y_{m-1}} of the Booth-encoded operand
// and returns the flags that steer the partial-product LUTs of the level:
//   z = digit is 0, c = digit is negative, s = |digit| is 2.
// The mapping is the standard radix-4 truth table reproduced in the paper (digits
// -2..2; the pattern 111 gives z=1 and c=1, the row is then all ones and the carry-in
// c=1 wraps it back to zero). Purely combinational, no timing of its own.
module booth_encoder
  import booth_pkg::*;
(
  input  logic [2:0] y_trip,  // {y_{m+1}, y_m, y_{m-1}}
  output booth_ctl_t ctl
);

  always_comb begin
    ctl.z = (y_trip == 3'b000) || (y_trip == 3'b111);
    ctl.c = y_trip[2];
    ctl.s = (y_trip == 3'b011) || (y_trip == 3'b100);
  end

endmodule
