// tb_table5_configs: runs the multiplier in the configurations of the comparison table of
// the paper: square sizes 4, 8, 16 and 32 bits, unsigned and signed, without and with one
// DSP, tiled with 3-level and with 4-level Booth arrays. The 3-level builds are
// combinational; the 4-level builds are pipelined like the paper's results (no register up
// to 8x8, one stage up to 30x30, two stages above). Each of the 32 builds is checked on
// random and corner operands by a tb_mult_checker.
module tb_table5_configs;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NC = 32;
  int   chk [NC], fl [NC], nd [NC], nn [NC], nb [NC], nf [NC];
  logic dn [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    localparam int  N    = 4 << (c % 4);           // 4, 8, 16, 32
    localparam int  LV   = 3 + ((c / 4) % 2);      // Booth levels 3 or 4
    localparam bit  DSP  = (c / 8) % 2;
    localparam bit  SG   = (c / 16) % 2;
    localparam int  PIPE = (LV == 3 || N <= 8) ? 0 : (N < 30) ? 1 : 2;

    logic         rst_n, iv, ov;
    logic [N-1:0] x, y;
    logic [2*N-1:0] p;

    tiled_multiplier #(.WX(N), .WY(N), .SIGNED(SG), .USE_DSP(DSP), .BOOTH_LEVELS(LV),
                       .PIPE_STAGES(PIPE)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .y(y), .out_valid(ov), .p(p));

    tb_mult_checker #(.WX(N), .WY(N), .SIGNED(SG), .LAT(PIPE), .NVEC(400)) chk_i (
      .clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .y(y), .out_valid(ov), .p(p),
      .checks(chk[c]), .failures(fl[c]), .n_neg_digit(nd[c]), .n_neg_result(nn[c]),
      .n_bubble(nb[c]), .n_flush(nf[c]), .done(dn[c]));
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NC; i++) if (dn[i] !== 1'b1) all_done = 1'b0;
    end while (!all_done);
    for (int i = 0; i < NC; i++) begin
      $display("%0dx%0d %s %0d DSP %0d-level: checks=%0d failures=%0d", 4 << (i % 4),
               4 << (i % 4), ((i / 16) % 2) ? "signed  " : "unsigned", (i / 8) % 2,
               3 + ((i / 4) % 2), chk[i], fl[i]);
      checks   += chk[i];
      failures += fl[i];
      if (chk[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
