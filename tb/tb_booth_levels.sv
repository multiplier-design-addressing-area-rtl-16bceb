// tb_booth_levels: the Booth arrays of the level experiments of the paper: X is 32 bits
// wide and Y has the largest height for 3, 4, 5 and 6 levels (5, 7, 9, 11 bits unsigned;
// 6, 8, 10, 12 bits signed). Random operands and accumulate input, P = X*Y + D.
module tb_booth_levels;
  import booth_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] x, d;
  logic [11:0] y;

  for (genvar lv = 3; lv <= 6; lv++) begin : g_lv
    localparam int HU = 2 * lv - 1;
    localparam int HS = 2 * lv;
    logic [32+HU-1:0] pu;
    logic [32+HS-1:0] ps;
    booth_array #(.WX(32), .WY(HU)) u_u (.x(x), .y(y[HU-1:0]), .d(d), .p(pu));
    booth_array #(.WX(32), .WY(HS), .SIGNED_X(1'b1), .SIGNED_Y(1'b1)) u_s (
      .x(x), .y(y[HS-1:0]), .d(d), .p(ps));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [63:0] ref_u(int h);
    return 64'(x) * 64'(y & ((12'd1 << h) - 1)) + 64'(d);
  endfunction

  function automatic logic [63:0] ref_s(int h);
    longint ys;
    ys = longint'(y & ((12'd1 << h) - 1));
    if (ys >= (longint'(1) << (h - 1))) ys -= longint'(1) << h;
    return 64'(longint'($signed(x)) * ys + longint'($signed(d)));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int lv = 3; lv <= 6; lv++) begin
      check(booth_levels(2 * lv - 1, 1'b0) == lv && booth_levels(2 * lv, 1'b1) == lv,
            $sformatf("level count for %0d levels", lv));
    end
    for (int i = 0; i < 5000; i++) begin
      x = (i == 0) ? '1 : (i == 1) ? 32'h8000_0000 : $urandom;
      y = (i < 2) ? '1 : 12'($urandom);
      d = (i % 2) ? '0 : $urandom;
      #1;
      check(g_lv[3].pu == (32+5)'(ref_u(5)),   "3-level unsigned");
      check(g_lv[4].pu == (32+7)'(ref_u(7)),   "4-level unsigned");
      check(g_lv[5].pu == (32+9)'(ref_u(9)),   "5-level unsigned");
      check(g_lv[6].pu == (32+11)'(ref_u(11)), "6-level unsigned");
      check(g_lv[3].ps == (32+6)'(ref_s(6)),   "3-level signed");
      check(g_lv[4].ps == (32+8)'(ref_s(8)),   "4-level signed");
      check(g_lv[5].ps == (32+10)'(ref_s(10)), "5-level signed");
      check(g_lv[6].ps == (32+12)'(ref_s(12)), "6-level signed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
