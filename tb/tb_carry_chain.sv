// tb_carry_chain: the carry chain used as an adder (prop = a ^ b, gen = a) must give
// a + b + cin, at the default width and at 24 bits, on random and corner operands.
module tb_carry_chain;
  logic [7:0]  a8, b8, s8;
  logic [23:0] a24, b24, s24;
  logic        cin, co8, co24;
  int checks = 0, failures = 0;

  carry_chain dut8 (.prop(a8 ^ b8), .gen(a8), .cin(cin), .sum(s8), .cout(co8));
  carry_chain #(.WIDTH(24)) dut24 (.prop(a24 ^ b24), .gen(a24), .cin(cin), .sum(s24), .cout(co24));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      a8  = (i == 0) ? 8'hff : 8'($urandom);
      b8  = (i == 0) ? 8'h00 : 8'($urandom);
      a24 = 24'($urandom);
      b24 = (i == 1) ? ~a24 : 24'($urandom);
      cin = (i == 0) ? 1'b1 : 1'($urandom);
      #1;
      checks++;
      if ({co8, s8} != 9'(a8) + 9'(b8) + 9'(cin)) begin
        failures++;
        $display("FAIL 8: %h+%h+%b -> %b %h", a8, b8, cin, co8, s8);
      end
      checks++;
      if ({co24, s24} != 25'(a24) + 25'(b24) + 25'(cin)) begin
        failures++;
        $display("FAIL 24: %h+%h+%b -> %b %h", a24, b24, cin, co24, s24);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
