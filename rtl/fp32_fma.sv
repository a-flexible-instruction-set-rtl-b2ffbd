// fp32_fma: IEEE-754 single-precision fused multiply-add, r = a*b + c, one per lane.
//
// This is the FPU of a lane. The paper only names the lane FPU and says that a cvfma
// micro-instruction behaves like a standard vector FMA; the insides here are this design's own:
// the 48-bit exact product and the addend are aligned in a 76-bit window (26 bits below the
// product's LSB, the bits shifted out collapse into a sticky bit), added or subtracted as
// magnitudes, normalised with a leading-one search and rounded once to nearest-even.
// Simplifications: subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero; every NaN result is the canonical quiet NaN 0x7fc00000; no exception flags.
// Exact cancellation gives +0 (round to nearest).
//
// Interface: purely combinational; the lane registers the result in its write-back buffer.
module fp32_fma (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  output logic [31:0] r_o
);
  localparam int W = 76;          // alignment window
  localparam int ONE = 72;        // bit weight 2^0 of the product's binary point in the window

  function automatic logic [W-1:0] shr_sticky(logic [W-1:0] v, int amt);
    logic [W-1:0] m;
    if (amt <= 0) return v;
    if (amt >= W) return {{(W-1){1'b0}}, |v};
    m = (({{(W-1){1'b0}}, 1'b1}) << amt) - 1'b1;
    return (v >> amt) | {{(W-1){1'b0}}, |(v & m)};
  endfunction

  logic        sa, sb, sc, sp, sr;
  logic [7:0]  ea, eb, ec;
  logic        a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, any_nan;
  logic [47:0] prod;
  logic [W-1:0] x, y, xs, ys, r;
  logic [23:0] mant;
  logic [24:0] mant_r;
  logic        g, st, up;
  int          ep, ecx, d, e_big, p, er;

  always_comb begin
    sa = a_i[31]; sb = b_i[31]; sc = c_i[31];
    ea = a_i[30:23]; eb = b_i[30:23]; ec = c_i[30:23];
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0); c_zero = (ec == 8'd0);
    a_inf  = (ea == 8'hff) && (a_i[22:0] == '0);
    b_inf  = (eb == 8'hff) && (b_i[22:0] == '0);
    c_inf  = (ec == 8'hff) && (c_i[22:0] == '0);
    any_nan = ((ea == 8'hff) && (a_i[22:0] != '0)) || ((eb == 8'hff) && (b_i[22:0] != '0)) ||
              ((ec == 8'hff) && (c_i[22:0] != '0));
    sp   = sa ^ sb;
    prod = {1'b1, a_i[22:0]} * {1'b1, b_i[22:0]};

    // alignment
    ep  = int'(ea) + int'(eb) - 127;
    ecx = c_zero ? ep : int'(ec);
    x   = {2'b00, prod, 26'd0};
    y   = c_zero ? '0 : {3'b000, 1'b1, c_i[22:0], 49'd0};
    d   = ep - ecx;
    if (d >= 0) begin e_big = ep;  xs = x;                 ys = shr_sticky(y, d);  end
    else        begin e_big = ecx; xs = shr_sticky(x, -d); ys = y;                end

    // add magnitudes
    if (sp == sc)     begin r = xs + ys; sr = sp; end
    else if (xs >= ys) begin r = xs - ys; sr = sp; end
    else              begin r = ys - xs; sr = sc; end

    // normalise and round to nearest even
    p = 0;
    for (int i = 0; i < W; i++) if (r[i]) p = i;
    r      = r << (W - 1 - p);
    mant   = r[W-1 -: 24];
    g      = r[W-25];
    st     = |r[W-26:0];
    up     = g & (st | mant[0]);
    mant_r = {1'b0, mant} + 25'(up);
    er     = e_big + p - ONE;
    if (mant_r[24]) begin mant_r = mant_r >> 1; er = er + 1; end

    // result selection
    if (any_nan || (a_inf && b_zero) || (b_inf && a_zero) ||
        ((a_inf || b_inf) && c_inf && (sp != sc)))
      r_o = 32'h7fc0_0000;
    else if (a_inf || b_inf)      r_o = {sp, 8'hff, 23'd0};
    else if (c_inf)               r_o = {sc, 8'hff, 23'd0};
    else if (a_zero || b_zero)    r_o = c_zero ? {sp & sc, 31'd0} : c_i;
    else if (r == '0)             r_o = 32'd0;
    else if (er >= 255)           r_o = {sr, 8'hff, 23'd0};
    else if (er <= 0)             r_o = {sr, 31'd0};
    else                          r_o = {sr, er[7:0], mant_r[22:0]};
  end

endmodule
