// booth_array: radix-4 Booth-array multiplier-accumulator, P = X * Y + D.
//
// Y is Booth-encoded in overlapping bit triples; each radix-4 digit gets one logic level
// (booth_level). Level 0 starts from the accumulate input D, every later level adds its
// digit's multiple of X to the partial sum of the level above shifted right by two, and
// each level hands out two product bits. The last level supplies the remaining high bits.
// This is the stacked structure of the paper's 8x8 examples: the delay grows with the
// number of levels, which is why the tiled multiplier uses arrays of few levels only.
//
// Levels: an unsigned Y of WY bits needs floor(WY/2)+1 levels (Y is zero-extended, the last
// digit is then 0 or +1), a signed Y needs ceil(WY/2). X and Y signedness are separate
// parameters (the paper shows only fully signed and fully unsigned arrays); D has the
// signedness of X. Set D to 0 when the accumulate feature is unused.
//
// P is WX+WY bits, two's complement if either operand is signed. Combinational.
module booth_array
  import booth_pkg::*;
#(
  parameter int WX       = 8,
  parameter int WY       = 8,
  parameter bit SIGNED_X = 1'b0,
  parameter bit SIGNED_Y = 1'b0
) (
  input  logic [WX-1:0]    x,
  input  logic [WY-1:0]    y,
  input  logic [WX-1:0]    d,
  output logic [WX+WY-1:0] p
);

  localparam int L  = booth_levels(WY, SIGNED_Y);
  localparam int WP = WX + WY;
  localparam int WR = 2 * L + WX + 1;  // all bits the levels produce

  logic [2*L:0]  y_ext;                // y_ext[i+1] = y_i, y_ext[0] = y_{-1} = 0
  logic [WX:0]   t [L+1];
  logic [WR-1:0] res;

  always_comb begin
    y_ext = {{(2 * L - WY){SIGNED_Y & y[WY-1]}}, y, 1'b0};
    t[0]  = {SIGNED_X & d[WX-1], d};
  end

  for (genvar r = 0; r < L; r++) begin : g_lvl
    booth_level #(.WX(WX), .SIGNED_X(SIGNED_X)) u_lvl (
      .y_trip(y_ext[2*r+2 -: 3]),
      .x     (x),
      .t_in  (t[r]),
      .p_out (res[2*r +: 2]),
      .t_out (t[r+1])
    );
  end

  always_comb begin
    res[WR-1:2*L] = t[L];
    p = res[WP-1:0];
  end

endmodule
