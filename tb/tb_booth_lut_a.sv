// tb_booth_lut_a: exhaustive check of the type-A Booth LUT. For every flag and input
// combination and both carry-ins, the carry-chain cell driven by the LUT must produce
// sum/carry of pp + t_n + cin, where pp = ((s ? x_{n-1} : x_n) & !z) ^ c.
module tb_booth_lut_a;
  import booth_pkg::*;

  booth_ctl_t ctl;
  logic x_n, x_nm1, t_n, prop, gen;
  int checks = 0, failures = 0;

  booth_lut_a dut (.ctl(ctl), .x_n(x_n), .x_nm1(x_nm1), .t_n(t_n), .prop(prop), .gen(gen));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      logic pp;
      {ctl.z, ctl.c, ctl.s, x_n, x_nm1, t_n} = 6'(i);
      #1;
      pp = ((ctl.s ? x_nm1 : x_n) & !ctl.z) ^ ctl.c;
      for (int ci = 0; ci < 2; ci++) begin
        logic s_bit, c_out;
        int   total;
        s_bit = prop ^ 1'(ci);
        c_out = prop ? 1'(ci) : gen;
        total = int'(pp) + int'(t_n) + ci;
        checks++;
        if ({c_out, s_bit} != 2'(total)) begin
          failures++;
          $display("FAIL in=%b ci=%0d got %b%b exp %0d", 6'(i), ci, c_out, s_bit, total);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
