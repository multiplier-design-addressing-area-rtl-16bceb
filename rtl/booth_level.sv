// booth_level: one logic level (one radix-4 digit) of a Booth-array multiplier.
//
// The level adds BE_m * X to the running partial sum t handed down by the level above:
//   s = t + BE_m * X           (BE_m in {-2,-1,0,1,2}, from {y_{m+1}, y_m, y_{m-1}})
// It is built like the paper's slice configuration: one Booth encoder, one LUT per column
// that forms the partial-product bit from x_n, x_{n-1} and adds t_n, and a carry chain
// whose carry-in y_{m+1} supplies the +1 of a negative digit. The two LSBs of s are final
// product bits (p_{2m}, p_{2m+1}); the remaining bits go to the next level as t^{r+1},
// i.e. the arithmetic right shift of s by two.
//
// Sign handling departs from the paper: instead of the Bewick sign-extension constants and
// the special LUTs B/C/D at the two MSB columns, X and t are sign-extended (X only when
// SIGNED_X) and every column uses the type-A LUT. The row is WX+3 columns wide, one more
// than the paper's, so that the accumulate input of the first level cannot overflow.
//
// Interface: t_in and t_out are WX+1 bits, two's complement. Combinational.
module booth_level
  import booth_pkg::*;
#(
  parameter int WX       = 8,
  parameter bit SIGNED_X = 1'b0
) (
  input  logic [2:0]  y_trip,  // {y_{m+1}, y_m, y_{m-1}}
  input  logic [WX-1:0] x,
  input  logic [WX:0]   t_in,  // partial sum from the level above (two's complement)
  output logic [1:0]    p_out, // two product bits of this level
  output logic [WX:0]   t_out  // partial sum for the next level (two's complement)
);

  localparam int CW = WX + 3;  // columns of the row

  booth_ctl_t        ctl;
  logic [CW:0]       x_col;    // x_col[n+1] = x_n, x_col[0] = x_{-1} = 0
  logic [CW-1:0]     t_col;
  logic [CW-1:0]     prop, gen, s;
  logic              cout;

  booth_encoder u_be (.y_trip(y_trip), .ctl(ctl));

  always_comb begin
    x_col = {{(CW - WX){SIGNED_X & x[WX-1]}}, x, 1'b0};
    t_col = {{(CW - WX - 1){t_in[WX]}}, t_in};
  end

  for (genvar n = 0; n < CW; n++) begin : g_col
    booth_lut_a u_lut (
      .ctl  (ctl),
      .x_n  (x_col[n + 1]),
      .x_nm1(x_col[n]),
      .t_n  (t_col[n]),
      .prop (prop[n]),
      .gen  (gen[n])
    );
  end

  carry_chain #(.WIDTH(CW)) u_cc (
    .prop(prop),
    .gen (gen),
    .cin (y_trip[2]),
    .sum (s),
    .cout(cout)
  );

  // cout is the carry out of the sign-extended row; the row is wide enough that it carries
  // no information (two's complement wrap), so it is left unused.
  always_comb begin
    p_out = s[1:0];
    t_out = s[CW-1:2];
  end

endmodule
