// tiled_multiplier: WX x WY integer multiplier assembled from sub-multiplier tiles.
//
// The multiplier board (X bits across, Y bits down) is covered by tiles, each a smaller
// multiplier of a rectangle of the board; every tile's product is shifted to the weight
// of its rectangle's corner and all of them are summed in a compressor tree:
//   X*Y = sum over tiles of (X-slice * Y-slice) * 2^(x_lo + y_lo).
// The tiling follows a fixed rule:
//   * with USE_DSP, a DSP tile covers the LSB corner, DSP_WX x DSP_WY bits unsigned
//     (24x17 for an AMD DSP48); an operand that fits the DSP entirely (with its sign bit,
//     one bit more when signed, 25/18 on AMD) is covered completely. DSP_WX = DSP_WY = 18
//     gives the 18x18 DSP corner of the paper's introductory 24x24 example;
//   * the rest of the board is cut into horizontal stripes, the strip right of the DSP
//     (X bits above the DSP, Y bits beside it) and the full-width band above it;
//   * a stripe of 3 or more Y bits, or one that holds the sign bit of a signed Y, is a
//     radix-4 Booth array of at most BOOTH_LEVELS levels (7 unsigned / 8 signed Y bits for
//     four levels); a 2-bit stripe is a 2xk tile and a 1-bit stripe a row of 1x1 LUT tiles.
// Tiles that touch the MSB of a signed operand treat that operand as signed; all others
// are unsigned, so the sum of the sign-extended rows is the signed product.
//
// The paper obtains the tiling (and the compressors) from an ILP optimiser; the rule above
// is this design's own, chosen to give the structure the paper proposes: few-level Booth
// arrays next to a DSP, summed by a compressor tree.
//
// Timing: PIPE_STAGES = 0 is combinational. PIPE_STAGES >= 1 registers the tile outputs,
// PIPE_STAGES = 2 adds a register before the final adder. out_valid follows in_valid with
// the same latency; rst_n (synchronous, active low) clears only the valid pipeline.
module tiled_multiplier
  import booth_pkg::*;
#(
  parameter int WX           = 32,
  parameter int WY           = 32,
  parameter bit SIGNED       = 1'b0,
  parameter bit USE_DSP      = 1'b1,
  parameter int BOOTH_LEVELS = 4,
  parameter int PIPE_STAGES  = 2,
  parameter int DSP_WX       = 24,
  parameter int DSP_WY       = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WX-1:0]    x,
  input  logic [WY-1:0]    y,
  output logic             out_valid,
  output logic [WX+WY-1:0] p
);

  localparam int W = WX + WY;

  // DSP coverage of the LSB corner (0 when no DSP is used).
  localparam int DX = !USE_DSP ? 0 : (WX <= DSP_WX + (SIGNED ? 1 : 0)) ? WX : DSP_WX;
  localparam int DY = !USE_DSP ? 0 : (WY <= DSP_WY + (SIGNED ? 1 : 0)) ? WY : DSP_WY;
  // Region 1: X bits [DX, WX) beside the DSP, Y bits [0, DY). Region 2: all X, Y [DY, WY).
  localparam int N1 = (USE_DSP && DX < WX) ? stripe_count(0, DY, WY, SIGNED, BOOTH_LEVELS) : 0;
  localparam int N2 = (DY < WY) ? stripe_count(DY, WY, WY, SIGNED, BOOTH_LEVELS) : 0;
  localparam int ND = USE_DSP ? 1 : 0;
  localparam int NR = ND + N1 + N2;

  logic [W-1:0] rows   [NR];
  logic [W-1:0] rows_q [NR];

  initial assert (BOOTH_LEVELS >= 1 && PIPE_STAGES >= 0 && PIPE_STAGES <= 2)
    else $error("tiled_multiplier: unsupported BOOTH_LEVELS or PIPE_STAGES");

  // ---------------------------------------------------------------- DSP tile
  if (USE_DSP) begin : g_dsp
    localparam bit SA = SIGNED && DX == WX;
    localparam bit SB = SIGNED && DY == WY;
    logic [DX+DY-1:0] prod;
    dsp_tile #(.WA(DX), .WB(DY), .SIGNED_A(SA), .SIGNED_B(SB)) u_dsp (
      .a(x[DX-1:0]), .b(y[DY-1:0]), .p(prod)
    );
    assign rows[0] = W'({{W{(SA || SB) & prod[DX+DY-1]}}, prod});
  end

  // ---------------------------------------------------------------- stripe tiles
  for (genvar i = 0; i < N1 + N2; i++) begin : g_stripe
    localparam bit IN1 = i < N1;
    localparam int XL  = IN1 ? DX : 0;
    localparam int TW  = WX - XL;
    localparam int YL  = IN1 ? stripe_start(0, DY, WY, SIGNED, BOOTH_LEVELS, i)
                             : stripe_start(DY, WY, WY, SIGNED, BOOTH_LEVELS, i - N1);
    localparam int TH  = IN1 ? stripe_height(0, DY, WY, SIGNED, BOOTH_LEVELS, i)
                             : stripe_height(DY, WY, WY, SIGNED, BOOTH_LEVELS, i - N1);
    localparam bit SX  = SIGNED;                  // every stripe reaches the X MSB
    localparam bit SY  = SIGNED && (YL + TH == WY);
    localparam int KIND = (TH >= 3 || SY) ? 0 : (TH == 2) ? 1 : 2;  // 0 Booth, 1 2xk, 2 1x1 row

    logic [TW-1:0]    xs;
    logic [TH-1:0]    ys;
    logic [TW+TH-1:0] prod;

    assign xs = x[WX-1:XL];
    assign ys = y[YL+TH-1:YL];

    if (KIND == 0) begin : g_booth
      booth_array #(.WX(TW), .WY(TH), .SIGNED_X(SX), .SIGNED_Y(SY)) u_ba (
        .x(xs), .y(ys), .d('0), .p(prod)
      );
    end else if (KIND == 1) begin : g_2xk
      mult_2xk #(.K(TW), .SIGNED_B(SX)) u_m2 (.a(ys), .b(xs), .p(prod));
    end else begin : g_1x1
      logic [TW-1:0] bits;
      for (genvar n = 0; n < TW; n++) begin : g_bit
        logic [1:0] pb;  // a 1x1 product never sets pb[1]
        lut_tile #(.WA(1), .WB(1)) u_lt (.a(xs[n]), .b(ys), .p(pb));
        assign bits[n] = pb[0];
      end
      assign prod = {SX & bits[TW-1], bits};
    end

    assign rows[ND + i] = W'({{W{(SX || SY) & prod[TW+TH-1]}}, prod}) << (XL + YL);
  end

  // ---------------------------------------------------------------- pipeline + compression
  if (PIPE_STAGES >= 1) begin : g_p1
    always_ff @(posedge clk) rows_q <= rows;
  end else begin : g_p0
    assign rows_q = rows;
  end

  compressor_tree #(.N(NR), .W(W), .PIPE_CPA(PIPE_STAGES >= 2)) u_ct (
    .clk(clk), .rows(rows_q), .result(p)
  );

  if (PIPE_STAGES == 0) begin : g_v0
    assign out_valid = in_valid;
  end else begin : g_vn
    logic [PIPE_STAGES-1:0] vld;
    always_ff @(posedge clk) begin
      if (!rst_n) vld <= '0;
      else        vld <= PIPE_STAGES'({vld, in_valid});
    end
    assign out_valid = vld[PIPE_STAGES-1];
  end

endmodule
