// booth_lut_a: the "type A" LUT of a Booth-array level, one per column n.
//
// The LUT forms the partial-product bit of column n from the Booth flags and the two X
// bits it sees, x_n and x_{n-1}: the shift flag s picks x_{n-1} (digit magnitude 2) or
// x_n (magnitude 1), the zero flag z forces 0, and the complement flag c inverts the bit
// (the +1 of the two's complement enters as the carry-in of the chain). The bit is then
// combined with the bit t_n of the previous level for the slice's carry logic:
//   prop = pp ^ t_n   (selects the carry mux, feeds the sum XOR)
//   gen  = t_n        (data input of the carry mux, taken when prop = 0)
// so that the carry chain adds pp and t_n. The select order s, z, c follows the slice
// drawing of the paper; using t_n as the mux data input is this design's choice (either
// summand is correct there). Combinational.
module booth_lut_a
  import booth_pkg::*;
(
  input  booth_ctl_t ctl,
  input  logic       x_n,    // x_n
  input  logic       x_nm1,  // x_{n-1}
  input  logic       t_n,    // t_n^r of the previous level (accumulate bit d_n on level 0)
  output logic       prop,
  output logic       gen
);

  logic sel, pp;

  always_comb begin
    sel  = ctl.s ? x_nm1 : x_n;
    pp   = (ctl.z ? 1'b0 : sel) ^ ctl.c;
    prop = pp ^ t_n;
    gen  = t_n;
  end

endmodule
