// tb_tiled_multiplier: end-to-end test of the tiled multiplier.
//
// Six instances cover the tile kinds and modes of the design; each is driven and checked
// by a tb_mult_checker (random and corner operands, bubbles in in_valid, a reset pulse,
// exact latency):
//   dut_full  default parameters: 32x32 unsigned, one DSP, 4-level Booth, 2 pipeline stages
//             (DSP 24x17, Booth stripes 7/7/3 beside it, 7/7 above it, one 1x1-tile row)
//   dut_s32   32x32 signed, DSP, 2 stages (signed top Booth stripe of one bit)
//   dut_d16   16x16 unsigned, the DSP covers the whole board, combinational
//   dut_u9    16x9 unsigned, no DSP, 1 stage (Booth stripe of 7 rows + 2xk tile)
//   dut_s12   12x12 signed, no DSP, 3-level Booth, combinational
//   dut_s30   30x20 signed, DSP, 3-level Booth, combinational (2xk tile with signed X)
//   dut_f24   24x24 unsigned with an 18x18 DSP corner, 1 stage (the introductory example:
//             DSP, a 6x18 strip beside it cut into Booth stripes 7/7/4, a 24x6 Booth band)
// Besides every product it counts how often each mechanism occurred and fails if one never
// did: negative Booth digits, negative signed products, valid bubbles, reset flushes,
// and results from the DSP-only, 2xk and 1x1 paths.
module tb_tiled_multiplier;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 7;
  int checks_a [NCFG], fail_a [NCFG], nd_a [NCFG], nn_a [NCFG], nb_a [NCFG], nf_a [NCFG];
  logic done_a [NCFG];

  `define TB_TM_INST(IDX, NAME, PWX, PWY, PS, PLAT, PN, PARAMS)                           \
    logic             NAME``_rst_n, NAME``_iv, NAME``_ov;                                \
    logic [PWX-1:0]   NAME``_x;                                                          \
    logic [PWY-1:0]   NAME``_y;                                                          \
    logic [PWX+PWY-1:0] NAME``_p;                                                        \
    tiled_multiplier PARAMS NAME (                                                       \
      .clk(clk), .rst_n(NAME``_rst_n), .in_valid(NAME``_iv), .x(NAME``_x), .y(NAME``_y), \
      .out_valid(NAME``_ov), .p(NAME``_p));                                              \
    tb_mult_checker #(.WX(PWX), .WY(PWY), .SIGNED(PS), .LAT(PLAT), .NVEC(PN)) NAME``_chk ( \
      .clk(clk), .rst_n(NAME``_rst_n), .in_valid(NAME``_iv), .x(NAME``_x), .y(NAME``_y), \
      .out_valid(NAME``_ov), .p(NAME``_p), .checks(checks_a[IDX]), .failures(fail_a[IDX]), \
      .n_neg_digit(nd_a[IDX]), .n_neg_result(nn_a[IDX]), .n_bubble(nb_a[IDX]),          \
      .n_flush(nf_a[IDX]), .done(done_a[IDX]));

  `TB_TM_INST(0, dut_full, 32, 32, 1'b0, 2, 3000, )
  `TB_TM_INST(1, dut_s32, 32, 32, 1'b1, 2, 3000,
              #(.WX(32), .WY(32), .SIGNED(1'b1), .USE_DSP(1'b1), .BOOTH_LEVELS(4), .PIPE_STAGES(2)))
  `TB_TM_INST(2, dut_d16, 16, 16, 1'b0, 0, 1000,
              #(.WX(16), .WY(16), .SIGNED(1'b0), .USE_DSP(1'b1), .BOOTH_LEVELS(4), .PIPE_STAGES(0)))
  `TB_TM_INST(3, dut_u9, 16, 9, 1'b0, 1, 2000,
              #(.WX(16), .WY(9), .SIGNED(1'b0), .USE_DSP(1'b0), .BOOTH_LEVELS(4), .PIPE_STAGES(1)))
  `TB_TM_INST(4, dut_s12, 12, 12, 1'b1, 0, 2000,
              #(.WX(12), .WY(12), .SIGNED(1'b1), .USE_DSP(1'b0), .BOOTH_LEVELS(3), .PIPE_STAGES(0)))
  `TB_TM_INST(6, dut_f24, 24, 24, 1'b0, 1, 2000,
              #(.WX(24), .WY(24), .SIGNED(1'b0), .USE_DSP(1'b1), .BOOTH_LEVELS(4), .PIPE_STAGES(1),
                .DSP_WX(18), .DSP_WY(18)))
  `TB_TM_INST(5, dut_s30, 30, 20, 1'b1, 0, 2000,
              #(.WX(30), .WY(20), .SIGNED(1'b1), .USE_DSP(1'b1), .BOOTH_LEVELS(3), .PIPE_STAGES(0)))

  int checks = 0, failures = 0;

  // Work reaching particular tiles under the tiling rule, seen from the operands: the 2xk
  // tile of dut_u9 (Y bits 8:7), the 2xk tile beside the DSP of dut_s30 (X bits 29:24,
  // Y bits 16:15) and the 1x1-tile row of dut_full (Y bit 31).
  int n_2xk = 0, n_2xk_s = 0, n_1x1 = 0;
  always @(posedge clk) begin
    if (dut_u9_iv && dut_u9_y[8:7] != '0 && dut_u9_x != '0) n_2xk++;
    if (dut_s30_iv && dut_s30_y[16:15] != '0 && dut_s30_x[29:24] != '0) n_2xk_s++;
    if (dut_full_iv && dut_full_y[31] && dut_full_x != '0) n_1x1++;
  end

  task automatic mech(string what, int count);
    checks++;
    $display("mechanism %-34s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    int sum_nd, sum_nn, sum_nb, sum_nf;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NCFG; i++) if (done_a[i] !== 1'b1) all_done = 1'b0;
    end while (!all_done);
    sum_nd = 0; sum_nn = 0; sum_nb = 0; sum_nf = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks   += checks_a[i];
      failures += fail_a[i];
      sum_nd   += nd_a[i];
      sum_nn   += nn_a[i];
      sum_nb   += nb_a[i];
      sum_nf   += nf_a[i];
      $display("config %0d: checks=%0d failures=%0d", i, checks_a[i], fail_a[i]);
    end
    mech("negative Booth digit in Y", sum_nd);
    mech("negative signed product", sum_nn);
    mech("bubble (in_valid low) passed", sum_nb);
    mech("reset flush with work in flight", sum_nf);
    mech("2xk tile active (unsigned)", n_2xk);
    mech("2xk tile active (signed X)", n_2xk_s);
    mech("1x1 tile row active", n_1x1);
    mech("products via DSP-only board", checks_a[2]);
    mech("products via Booth + 2xk tiles", checks_a[3]);
    mech("products via Booth + DSP + 1x1 row", checks_a[0]);
    mech("products via signed 2xk beside DSP", checks_a[5]);
    mech("products via 18x18 DSP corner (24x24)", checks_a[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
