// tb_booth_level: one Booth level (8-bit X, unsigned and signed) must produce
// {t_out, p_out} = t_in + digit * X as a two's-complement number of WX+3 bits, where
// digit = -2*y_{m+1} + y_m + y_{m-1}. Exhaustive over the digit triple, random X and t.
module tb_booth_level;
  localparam int WX = 8;

  logic [2:0]    y_trip;
  logic [WX-1:0] x;
  logic [WX:0]   t_in, t_u, t_s;
  logic [1:0]    p_u, p_s;
  int checks = 0, failures = 0;

  booth_level dut_u (.y_trip(y_trip), .x(x), .t_in(t_in), .p_out(p_u), .t_out(t_u));
  booth_level #(.WX(WX), .SIGNED_X(1'b1)) dut_s (
    .y_trip(y_trip), .x(x), .t_in(t_in), .p_out(p_s), .t_out(t_s));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8 * 500; i++) begin
      int digit, xu, xs, tv, exp_u, exp_s;
      y_trip = 3'(i % 8);
      x      = (i < 8) ? 8'hff : (i < 16) ? 8'h80 : 8'($urandom);
      t_in   = (i < 8) ? 9'h0ff : 9'($urandom);
      #1;
      digit = -2 * int'(y_trip[2]) + int'(y_trip[1]) + int'(y_trip[0]);
      xu    = int'(x);
      xs    = int'($signed(x));
      tv    = int'($signed(t_in));
      exp_u = tv + digit * xu;
      exp_s = tv + digit * xs;
      checks++;
      if ($signed({t_u, p_u}) != 11'(exp_u)) begin
        failures++;
        $display("FAIL unsigned y=%b x=%0d t=%0d got %0d exp %0d", y_trip, xu, tv,
                 $signed({t_u, p_u}), exp_u);
      end
      checks++;
      if ($signed({t_s, p_s}) != 11'(exp_s)) begin
        failures++;
        $display("FAIL signed y=%b x=%0d t=%0d got %0d exp %0d", y_trip, xs, tv,
                 $signed({t_s, p_s}), exp_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
