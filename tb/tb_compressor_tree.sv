// tb_compressor_tree: the carry-save tree plus final adder must return the sum of its rows
// modulo 2^W: N = 4, W = 48 (defaults), N = 9 rows of 64 bits, a single row, and a
// pipelined N = 7 tree whose result must appear exactly one clock after its inputs.
module tb_compressor_tree;
  logic        clk = 0;
  logic [47:0] r4 [4];
  logic [47:0] s4;
  logic [63:0] r9 [9];
  logic [63:0] s9;
  logic [15:0] r1 [1];
  logic [15:0] s1;
  logic [31:0] r7 [7];
  logic [31:0] s7;
  logic [31:0] exp7_q;
  int checks = 0, failures = 0;

  compressor_tree dut4 (.clk(clk), .rows(r4), .result(s4));
  compressor_tree #(.N(9), .W(64)) dut9 (.clk(clk), .rows(r9), .result(s9));
  compressor_tree #(.N(1), .W(16)) dut1 (.clk(clk), .rows(r1), .result(s1));
  compressor_tree #(.N(7), .W(32), .PIPE_CPA(1'b1)) dut7 (.clk(clk), .rows(r7), .result(s7));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [47:0] e4;
      logic [63:0] e9;
      logic [31:0] e7;
      e4 = '0;
      e9 = '0;
      e7 = '0;
      foreach (r4[k]) begin r4[k] = (i == 0) ? '1 : {$urandom, $urandom}; e4 += r4[k]; end
      foreach (r9[k]) begin r9[k] = (i == 0) ? '1 : {$urandom, $urandom}; e9 += r9[k]; end
      foreach (r7[k]) begin r7[k] = $urandom; e7 += r7[k]; end
      r1[0] = 16'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (s4 != e4) begin failures++; $display("FAIL N=4 got %h exp %h", s4, e4); end
      checks++;
      if (s9 != e9) begin failures++; $display("FAIL N=9 got %h exp %h", s9, e9); end
      checks++;
      if (s1 != r1[0]) begin failures++; $display("FAIL N=1"); end
      // the pipelined tree shows the sum of the rows applied before this edge
      checks++;
      if (s7 != e7) begin failures++; $display("FAIL N=7 pipelined got %h exp %h", s7, e7); end
      // new rows must not reach the pipelined result before the next edge
      foreach (r7[k]) r7[k] = ~r7[k];
      #1;
      checks++;
      if (s7 != e7) begin failures++; $display("FAIL N=7 result changed before the clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
