// tb_lut_tile: the small LUT tiles of the tile set (3x3 default, 2x3, 1x2, 1x1),
// exhaustive.
module tb_lut_tile;
  logic [2:0] a3, b3;
  logic [5:0] p33;
  logic [4:0] p23;
  logic [2:0] p12;
  logic [1:0] p11;
  int checks = 0, failures = 0;

  lut_tile dut33 (.a(a3), .b(b3), .p(p33));
  lut_tile #(.WA(2), .WB(3)) dut23 (.a(a3[1:0]), .b(b3), .p(p23));
  lut_tile #(.WA(1), .WB(2)) dut12 (.a(a3[0]), .b(b3[1:0]), .p(p12));
  lut_tile #(.WA(1), .WB(1)) dut11 (.a(a3[0]), .b(b3[0]), .p(p11));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      {a3, b3} = 6'(i);
      #1;
      checks += 4;
      if (p33 != 6'(int'(a3) * int'(b3))) begin failures++; $display("FAIL 3x3 %0d*%0d=%0d", a3, b3, p33); end
      if (p23 != 5'(int'(a3[1:0]) * int'(b3))) begin failures++; $display("FAIL 2x3"); end
      if (p12 != 3'(int'(a3[0]) * int'(b3[1:0]))) begin failures++; $display("FAIL 1x2"); end
      if (p11 != 2'(a3[0] & b3[0])) begin failures++; $display("FAIL 1x1"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
