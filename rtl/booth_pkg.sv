// booth_pkg: shared types and elaboration-time helpers of the tiled Booth multiplier.
//
// booth_ctl_t is the set of three control flags a radix-4 Booth encoder hands to the
// LUTs of its level: z (digit is zero), c (digit is negative, complement the row) and
// s (|digit| = 2, shift X left by one). The functions below size a Booth array from the
// height of its Booth-encoded operand and cut a rectangular region of the multiplier
// board into horizontal stripes, one sub-multiplier tile per stripe.
//
// The level counts follow the paper's examples (an unsigned 8x8 array needs five levels,
// a signed one four; four levels cover 7 unsigned or 8 signed bits). The stripe rule is
// this design's own stand-in for the optimal tiling the paper obtains from an ILP solver.
package booth_pkg;

  typedef struct packed {
    logic z;  // Booth digit is 0
    logic c;  // Booth digit is negative: invert the row, +1 via the carry-in
    logic s;  // |Booth digit| = 2: select x_{n-1} instead of x_n
  } booth_ctl_t;

  // Number of Booth levels (radix-4 digits) for an h-bit Booth-encoded operand.
  function automatic int booth_levels(input int h, input bit is_signed);
    return is_signed ? (h + 1) / 2 : (h + 2) / 2;
  endfunction

  // Largest operand height that L Booth levels can encode.
  function automatic int booth_height(input int levels, input bit is_signed);
    return is_signed ? 2 * levels : 2 * levels - 1;
  endfunction

  // Stripe tiling of the Y range [y_lo, y_hi) of a board whose Y operand is wy bits wide.
  // Stripes are cut from the LSB upwards with the unsigned maximum height; the stripe that
  // holds the sign bit of a signed Y may be one bit taller.
  function automatic int stripe_height(input int y_lo, input int y_hi, input int wy,
                                       input bit is_signed, input int levels, input int idx);
    int y, h, k;
    y = y_lo;
    h = 0;
    for (k = 0; k <= idx; k++) begin
      if (y >= y_hi) return 0;
      h = y_hi - y;
      if (is_signed && y_hi == wy && h <= booth_height(levels, 1'b1)) begin
        // last stripe, holds the sign bit: may use the signed height
      end else if (h > booth_height(levels, 1'b0)) begin
        h = booth_height(levels, 1'b0);
      end
      if (k < idx) y += h;
    end
    return h;
  endfunction

  function automatic int stripe_start(input int y_lo, input int y_hi, input int wy,
                                      input bit is_signed, input int levels, input int idx);
    int y;
    y = y_lo;
    for (int k = 0; k < idx; k++) y += stripe_height(y_lo, y_hi, wy, is_signed, levels, k);
    return y;
  endfunction

  function automatic int stripe_count(input int y_lo, input int y_hi, input int wy,
                                      input bit is_signed, input int levels);
    int n;
    n = 0;
    while (stripe_height(y_lo, y_hi, wy, is_signed, levels, n) > 0) n++;
    return n;
  endfunction

  // Rows left after one stage of 3:2 row compressors.
  function automatic int csa_next(input int n);
    return 2 * (n / 3) + (n % 3);
  endfunction

  // Number of 3:2 stages needed to bring n rows down to at most two.
  function automatic int csa_stages(input int n);
    int k, m;
    k = 0;
    m = n;
    while (m > 2) begin
      m = csa_next(m);
      k++;
    end
    return k;
  endfunction

  // Rows present at the input of stage s (s = 0 is the tree input).
  function automatic int csa_rows(input int n, input int s);
    int m;
    m = n;
    for (int k = 0; k < s; k++) m = csa_next(m);
    return m;
  endfunction

endpackage
