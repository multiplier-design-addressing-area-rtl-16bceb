// compressor_tree: adds N aligned partial-product rows of W bits into one W-bit result.
//
// The tiles of the multiplier deliver their products as rows already shifted to their
// weight and extended to W bits. Stage by stage, every group of three rows is replaced by
// a sum row and a carry row (a 3:2 counter per column, the carry row shifted left by one);
// rows that do not fill a group pass to the next stage. When two rows remain, a carry-chain
// ripple adder forms the result. Sums are modulo 2^W.
//
// The paper builds this tree with an ILP that chooses among generalized parallel counters,
// 4:2 row compressors and ternary adders; this design uses only 3:2 counters, the simplest
// correct choice. With PIPE_CPA a register stage sits between the carry-save rows and the
// final adder (one cycle of latency); otherwise the tree is combinational.
module compressor_tree
  import booth_pkg::*;
#(
  parameter int N        = 4,
  parameter int W        = 48,
  parameter bit PIPE_CPA = 1'b0
) (
  input  logic         clk,
  input  logic [W-1:0] rows [N],
  output logic [W-1:0] result
);

  localparam int NS = csa_stages(N);

  logic [W-1:0] fa_a, fa_b, fa_a_q, fa_b_q, prop;
  logic         cout;

  // g_stage[s].cur holds the rows entering stage s, g_stage[s].g_cmp.nxt the rows it produces.
  for (genvar s = 0; s <= NS; s++) begin : g_stage
    localparam int R  = csa_rows(N, s);
    localparam int G  = R / 3;
    localparam int RN = csa_next(R);
    logic [W-1:0] cur [R];
    if (s == 0) begin : g_first
      for (genvar i = 0; i < N; i++) begin : g_in
        assign cur[i] = rows[i];
      end
    end else begin : g_link
      for (genvar i = 0; i < R; i++) begin : g_in
        assign cur[i] = g_stage[s-1].g_cmp.nxt[i];
      end
    end
    if (s < NS) begin : g_cmp
      logic [W-1:0] nxt [RN];
      for (genvar g = 0; g < G; g++) begin : g_csa
        logic [W-1:0] a, b, c, maj;
        assign a   = cur[3*g];
        assign b   = cur[3*g+1];
        assign c   = cur[3*g+2];
        assign maj = (a & b) | (a & c) | (b & c);
        assign nxt[2*g]   = a ^ b ^ c;
        assign nxt[2*g+1] = {maj[W-2:0], 1'b0};
      end
      for (genvar r = 3 * G; r < R; r++) begin : g_pass
        assign nxt[2*G + r - 3*G] = cur[r];
      end
    end
  end

  assign fa_a = g_stage[NS].cur[0];
  if (N > 1) begin : g_two
    assign fa_b = g_stage[NS].cur[1];
  end else begin : g_one
    assign fa_b = '0;
  end

  if (PIPE_CPA) begin : g_reg
    always_ff @(posedge clk) begin
      fa_a_q <= fa_a;
      fa_b_q <= fa_b;
    end
  end else begin : g_comb
    assign fa_a_q = fa_a;
    assign fa_b_q = fa_b;
  end

  assign prop = fa_a_q ^ fa_b_q;

  // The result is taken modulo 2^W, so the carry out is not needed.
  carry_chain #(.WIDTH(W)) u_cpa (
    .prop(prop),
    .gen (fa_a_q),
    .cin (1'b0),
    .sum (result),
    .cout(cout)
  );

endmodule
