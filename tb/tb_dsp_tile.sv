// tb_dsp_tile: DSP tile as 24x17 unsigned (default) and 25x18 signed, random and corner
// operands.
module tb_dsp_tile;
  logic [23:0] au;
  logic [16:0] bu;
  logic [40:0] pu;
  logic [24:0] as_;
  logic [17:0] bs;
  logic [42:0] ps;
  int checks = 0, failures = 0;

  dsp_tile dut_u (.a(au), .b(bu), .p(pu));
  dsp_tile #(.WA(25), .WB(18), .SIGNED_A(1'b1), .SIGNED_B(1'b1)) dut_s (.a(as_), .b(bs), .p(ps));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      au  = (i == 0) ? '1 : 24'($urandom);
      bu  = (i == 0) ? '1 : 17'($urandom);
      as_ = (i == 0) ? 25'h1000000 : 25'($urandom);
      bs  = (i == 0) ? 18'h20000 : 18'($urandom);
      #1;
      checks++;
      if (pu != 41'(longint'(au) * longint'(bu))) begin
        failures++;
        $display("FAIL u %h*%h got %h", au, bu, pu);
      end
      checks++;
      if (ps != 43'(longint'($signed(as_)) * longint'($signed(bs)))) begin
        failures++;
        $display("FAIL s %h*%h got %h", as_, bs, ps);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
