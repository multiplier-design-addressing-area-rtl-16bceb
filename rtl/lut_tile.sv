// lut_tile: small LUT-based multiplier tile of WA x WB bits (1x1, 1x2, 2x3, 3x3).
//
// With at most six input bits every product bit is one LUT6: the module holds the full
// product table, computed at elaboration time from the formula TABLE[{a,b}] = a * b, and
// looks the product up. Both operands are unsigned; WA + WB must not exceed 6. The paper
// gives these tiles only by size and LUT cost, the table form is this design's choice.
// Combinational.
module lut_tile #(
  parameter int WA = 3,
  parameter int WB = 3
) (
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [WA+WB-1:0] p
);

  localparam int NI = WA + WB;

  typedef logic [NI-1:0] table_t [2**NI];

  function automatic table_t make_table();
    table_t tab;
    for (int i = 0; i < 2**NI; i++) tab[i] = NI'((i >> WB) * (i % (1 << WB)));
    return tab;
  endfunction

  localparam table_t TABLE = make_table();

  initial assert (NI <= 6) else $error("lut_tile: %0d inputs do not fit one LUT6", NI);

  assign p = TABLE[{a, b}];

endmodule
