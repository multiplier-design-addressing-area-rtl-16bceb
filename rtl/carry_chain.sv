// carry_chain: the fast carry chain of an FPGA slice, WIDTH bits long.
//
// Each bit is a 2:1 carry mux and a sum XOR, driven by a LUT output pair:
//   sum[i]     = prop[i] ^ carry[i]
//   carry[i+1] = prop[i] ? carry[i] : gen[i]
// with carry[0] = cin and cout = carry[WIDTH]. With prop = a ^ b and gen = a (or b) this
// is a ripple adder a + b + cin. The equations are the generic mux/XOR form of the slice
// carry logic, not a vendor primitive. Combinational.
module carry_chain #(
  parameter int WIDTH = 8
) (
  input  logic [WIDTH-1:0] prop,
  input  logic [WIDTH-1:0] gen,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  logic [WIDTH:0] carry;

  assign carry[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    assign sum[i]       = prop[i] ^ carry[i];
    assign carry[i + 1] = prop[i] ? carry[i] : gen[i];
  end

  assign cout = carry[WIDTH];

endmodule
