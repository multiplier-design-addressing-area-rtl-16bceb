// tb_mult_2xk: 2xk tile, exhaustive for K = 8 with unsigned and with signed B.
module tb_mult_2xk;
  logic [1:0] a;
  logic [7:0] b;
  logic [9:0] pu, ps;
  int checks = 0, failures = 0;

  mult_2xk dut_u (.a(a), .b(b), .p(pu));
  mult_2xk #(.K(8), .SIGNED_B(1'b1)) dut_s (.a(a), .b(b), .p(ps));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      {a, b} = 10'(i);
      #1;
      checks++;
      if (pu != 10'(int'(a) * int'(b))) begin
        failures++;
        $display("FAIL u %0d*%0d got %0d", a, b, pu);
      end
      checks++;
      if (ps != 10'(int'(a) * int'($signed(b)))) begin
        failures++;
        $display("FAIL s %0d*%0d got %0d", a, $signed(b), $signed(ps));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
