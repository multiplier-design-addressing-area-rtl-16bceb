// tb_booth_encoder: exhaustive check of the radix-4 Booth encoder against the
// standard truth table (digit -2..2; z = zero, c = negative, s = magnitude two).
module tb_booth_encoder;
  import booth_pkg::*;

  logic [2:0] y_trip;
  booth_ctl_t ctl;
  int checks = 0, failures = 0;

  booth_encoder dut (.y_trip(y_trip), .ctl(ctl));

  // Expected {z, c, s}, indexed by {y_{m+1}, y_m, y_{m-1}}, written out row by row.
  localparam logic [2:0] EXP [8] = '{3'b100, 3'b000, 3'b000, 3'b001,
                                     3'b011, 3'b010, 3'b010, 3'b110};

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      int digit;
      y_trip = 3'(i);
      #1;
      digit = -2 * int'(y_trip[2]) + int'(y_trip[1]) + int'(y_trip[0]);
      checks++;
      if ({ctl.z, ctl.c, ctl.s} !== EXP[i]) begin
        failures++;
        $display("FAIL y=%b got zcs=%b exp %b", y_trip, {ctl.z, ctl.c, ctl.s}, EXP[i]);
      end
      // Cross-check the flags against the digit value they stand for.
      checks++;
      if (ctl.z != (digit == 0) || ctl.s != (digit == 2 || digit == -2) ||
          (digit < 0 && !ctl.c) || (digit > 0 && ctl.c)) begin
        failures++;
        $display("FAIL y=%b flags do not match digit %0d", y_trip, digit);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
