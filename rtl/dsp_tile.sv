// dsp_tile: an embedded DSP multiplier used as a tile of the tiled multiplier.
//
// On AMD 7-series / UltraScale the DSP48 multiplies 25x18 signed operands, i.e. 24x17
// unsigned. The tile takes WA x WB operands, each signed or unsigned by parameter, extends
// both by one bit and multiplies; synthesis maps the product onto one DSP block. The DSP's
// own pipeline registers are not used. P is WA+WB bits, two's complement if either operand
// is signed. Combinational.
module dsp_tile #(
  parameter int WA       = 24,
  parameter int WB       = 17,
  parameter bit SIGNED_A = 1'b0,
  parameter bit SIGNED_B = 1'b0
) (
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [WA+WB-1:0] p
);

  logic signed [WA:0]      a_s;
  logic signed [WB:0]      b_s;
  logic signed [WA+WB+1:0] prod;

  always_comb begin
    a_s  = {SIGNED_A & a[WA-1], a};
    b_s  = {SIGNED_B & b[WB-1], b};
    prod = a_s * b_s;
    p    = prod[WA+WB-1:0];
  end

endmodule
