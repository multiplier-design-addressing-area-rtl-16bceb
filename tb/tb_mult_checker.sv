// tb_mult_checker: stimulus and scoreboard for one tiled_multiplier instance.
//
// On every falling clock edge it first compares the multiplier's outputs with the product
// of the operands it applied LAT cycles earlier (one half-cycle earlier when LAT = 0),
// then applies new operands: random ones, and now and then all-ones, the most negative
// value, zero, or a Y with a negative radix-4 Booth digit. in_valid is dropped at random
// so that the valid pipeline is checked too, and once during the run rst_n is pulsed with
// work in flight, after which out_valid must stay low until new work has passed through.
// The reference product is computed with 128-bit arithmetic, independently of the design.
module tb_mult_checker #(
  parameter int WX      = 8,
  parameter int WY      = 8,
  parameter bit SIGNED  = 1'b0,
  parameter int LAT     = 0,
  parameter int NVEC    = 1000
) (
  input  logic             clk,
  output logic             rst_n,
  output logic             in_valid,
  output logic [WX-1:0]    x,
  output logic [WY-1:0]    y,
  input  logic             out_valid,
  input  logic [WX+WY-1:0] p,
  output int               checks,
  output int               failures,
  output int               n_neg_digit,   // products whose Y had a negative Booth digit
  output int               n_neg_result,  // signed products that were negative
  output int               n_bubble,      // cycles with in_valid low checked for out_valid low
  output int               n_flush,       // reset pulses with work in flight
  output logic             done
);

  localparam int W  = WX + WY;
  localparam int HD = (LAT > 0) ? LAT - 1 : 0;  // extra cycles between apply and check

  logic         hv [NVEC + 8];
  logic [W-1:0] hp [NVEC + 8];
  logic         flushed;

  function automatic logic [W-1:0] ref_mul(logic [WX-1:0] a, logic [WY-1:0] b);
    logic signed [127:0] ae, be;
    ae = SIGNED ? 128'($signed(a)) : 128'(a);
    be = SIGNED ? 128'($signed(b)) : 128'(b);
    return W'(ae * be);
  endfunction

  function automatic bit has_neg_digit(logic [WY-1:0] b);
    logic [WY+1:0] e;
    e = {SIGNED & b[WY-1], b, 1'b0};
    for (int m = 0; m + 2 <= WY; m += 2)
      if (e[m+2] && e[m+2 -: 3] != 3'b111) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    checks = 0; failures = 0; n_neg_digit = 0; n_neg_result = 0; n_bubble = 0; n_flush = 0;
    done = 1'b0; flushed = 1'b0;
    rst_n = 1'b0; in_valid = 1'b0; x = '0; y = '0;
    for (int k = 0; k < NVEC + 8; k++) begin hv[k] = 1'b0; hp[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NVEC; n++) begin
      @(negedge clk);
      // ---- check what the operands applied earlier produced
      if (n >= 1 + HD) begin
        int k;
        k = n - 1 - HD;
        checks++;
        if (out_valid !== hv[k]) begin
          failures++;
          $display("FAIL %0dx%0d s=%0d: out_valid=%b exp %b at vector %0d", WX, WY, SIGNED,
                   out_valid, hv[k], k);
        end else if (hv[k]) begin
          checks++;
          if (p !== hp[k]) begin
            failures++;
            $display("FAIL %0dx%0d s=%0d: p=%h exp %h", WX, WY, SIGNED, p, hp[k]);
          end
        end else begin
          n_bubble++;
        end
      end
      // ---- reset pulse with work in flight (pipelined instances only)
      if (LAT > 0 && n == NVEC / 2 && !flushed) begin
        flushed = 1'b1;
        rst_n = 1'b0;
        in_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (out_valid !== 1'b0) begin
          failures++;
          $display("FAIL %0dx%0d: out_valid not cleared by reset", WX, WY);
        end
        n_flush++;
        rst_n = 1'b1;
        for (int k = 0; k < NVEC + 8; k++) hv[k] = 1'b0;
      end
      // ---- apply new operands
      case ($urandom % 16)
        0: begin x = '1; y = '1; end
        1: begin x = {1'b1, {(WX-1){1'b0}}}; y = {1'b1, {(WY-1){1'b0}}}; end
        2: begin x = '0; y = WY'($urandom); end
        default: begin x = WX'({$urandom, $urandom}); y = WY'({$urandom, $urandom}); end
      endcase
      in_valid = ($urandom % 8) != 0;
      hv[n] = in_valid;
      hp[n] = ref_mul(x, y);
      if (in_valid && has_neg_digit(y)) n_neg_digit++;
      if (in_valid && SIGNED && hp[n][W-1]) n_neg_result++;
    end
    done = 1'b1;
  end

endmodule
