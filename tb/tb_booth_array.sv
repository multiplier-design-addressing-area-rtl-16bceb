// tb_booth_array: Booth-array multiplier-accumulator checks.
//  * the level counts of the paper's examples: 8x8 unsigned 5 levels, signed 4; four levels
//    hold 7 unsigned / 8 signed Y bits, three levels 5 / 6;
//  * 8x8 unsigned (default parameters) and 8x8 signed, exhaustive over X and Y, with a random
//    accumulate input D: P = X*Y + D;
//  * a 32x7 unsigned and a 32x8 signed array (four levels, the X width of the level
//    experiments), and a mixed 12x5 array (signed X, unsigned Y), random operands.
module tb_booth_array;
  import booth_pkg::*;

  logic [7:0]  x8, y8, d8;
  logic [15:0] pu8, ps8;
  logic [31:0] x32, d32;
  logic [6:0]  y7;
  logic [7:0]  y8b;
  logic [38:0] p32u;
  logic [39:0] p32s;
  logic [11:0] x12, d12;
  logic [4:0]  y5;
  logic [16:0] p12;
  int checks = 0, failures = 0;

  booth_array dut_u8 (.x(x8), .y(y8), .d(d8), .p(pu8));
  booth_array #(.WX(8), .WY(8), .SIGNED_X(1), .SIGNED_Y(1)) dut_s8 (.x(x8), .y(y8), .d(d8), .p(ps8));
  booth_array #(.WX(32), .WY(7)) dut_u32 (.x(x32), .y(y7), .d(d32), .p(p32u));
  booth_array #(.WX(32), .WY(8), .SIGNED_X(1), .SIGNED_Y(1)) dut_s32 (.x(x32), .y(y8b), .d(d32), .p(p32s));
  booth_array #(.WX(12), .WY(5), .SIGNED_X(1), .SIGNED_Y(0)) dut_m12 (.x(x12), .y(y5), .d(d12), .p(p12));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(booth_levels(8, 0) == 5, "8 unsigned bits need 5 levels");
    check(booth_levels(8, 1) == 4, "8 signed bits need 4 levels");
    check(booth_levels(7, 0) == 4 && booth_levels(5, 0) == 3, "unsigned 7 -> 4, 5 -> 3 levels");
    check(booth_levels(6, 1) == 3 && booth_height(4, 1) == 8 && booth_height(4, 0) == 7,
          "signed 6 -> 3 levels, 4 levels hold 8/7 bits");

    for (int i = 0; i < 65536; i++) begin
      longint eu, es;
      x8 = 8'(i);
      y8 = 8'(i >> 8);
      d8 = (i % 3 == 0) ? 8'h00 : 8'($urandom);
      #1;
      eu = longint'(x8) * longint'(y8) + longint'(d8);
      es = longint'($signed(x8)) * longint'($signed(y8)) + longint'($signed(d8));
      check(pu8 == 16'(eu), $sformatf("u8 %0d*%0d+%0d got %0d", x8, y8, d8, pu8));
      check(ps8 == 16'(es), $sformatf("s8 %0d*%0d+%0d got %0d", $signed(x8), $signed(y8),
                                      $signed(d8), $signed(ps8)));
    end

    for (int i = 0; i < 20000; i++) begin
      logic [79:0] eu, es, em;
      x32 = (i == 0) ? 32'hffff_ffff : (i == 1) ? 32'h8000_0000 : $urandom;
      y7  = (i < 2) ? 7'h7f : 7'($urandom);
      y8b = (i == 0) ? 8'h80 : 8'($urandom);
      d32 = (i % 2) ? 32'h0 : $urandom;
      x12 = 12'($urandom);
      y5  = 5'($urandom);
      d12 = 12'($urandom);
      #1;
      eu = 80'(x32) * 80'(y7) + 80'(d32);
      es = 80'($signed(x32) * $signed({{72{y8b[7]}}, y8b}) + $signed({{48{d32[31]}}, d32}));
      em = 80'($signed({{68{x12[11]}}, x12}) * $signed({75'd0, y5}) + $signed({{68{d12[11]}}, d12}));
      check(p32u == 39'(eu), $sformatf("u32x7 %h*%h+%h got %h", x32, y7, d32, p32u));
      check(p32s == 40'(es), $sformatf("s32x8 %h*%h+%h got %h", x32, y8b, d32, p32s));
      check(p12 == 17'(em), $sformatf("m12x5 %h*%h+%h got %h", x12, y5, d12, p12));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
