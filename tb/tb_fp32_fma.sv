// tb_fp32_fma: self-checking test of fp32_fma.
// (1) Random operands with short mantissas and nearby exponents, so a*b + c is exactly
//     representable in fp32; the expected value is computed in double precision (exact here)
//     and converted bit by bit. (2) Hand-worked cases: rounding to nearest even at a tie, the
//     single rounding of a fused operation, cancellation, infinities, NaN, zero signs,
//     overflow and flush of tiny results. (3) Random full 24-bit mantissas with c = 0 and
//     products a*b with odd 12-bit tails (exact ties): the product is exact in double
//     precision, and the expected value is rounded to nearest even by the testbench.
module tb_fp32_fma;
  logic [31:0] a, b, c, r;
  int checks = 0, failures = 0;
  logic clk = 0;

  fp32_fma dut (.a_i(a), .b_i(b), .c_i(c), .r_o(r));

  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // double -> float bits for values that are exactly representable as normal floats (or zero)
  function automatic logic [31:0] d2f(real x);
    logic [63:0] d;
    int e;
    d = $realtobits(x);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    return {d[63], e[7:0], d[51:29]};
  endfunction
  function automatic real f2d(logic [31:0] f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction
  // double -> float with round to nearest even, for results in the normal float range
  function automatic logic [31:0] d2f_rne(real x);
    logic [63:0] d;
    logic [24:0] m;
    logic        g, st;
    int e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e++; end
    return {d[63], e[7:0], m[22:0]};
  endfunction
  // random float with a 6-bit mantissa and exponent in [lo, hi]
  function automatic logic [31:0] rnd(int lo, int hi);
    return {1'($urandom), 8'($urandom_range(hi, lo)), 6'($urandom), 17'd0};
  endfunction

  task automatic chk(logic [31:0] ea, logic [31:0] eb, logic [31:0] ec, logic [31:0] exp);
    a = ea; b = eb; c = ec; #1;
    checks++;
    if (r !== exp) begin
      failures++;
      $display("FAIL %h*%h+%h = %h exp %h", ea, eb, ec, r, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [31:0] x, y, z;
      x = rnd(126, 128); y = rnd(126, 128);
      z = (t % 10 == 0) ? 32'd0 : rnd(125, 129);
      chk(x, y, z, d2f(f2d(x) * f2d(y) + f2d(z)));
    end
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] x, y;
      x = {1'($urandom), 8'($urandom_range(140, 110)), 23'($urandom)};
      y = {1'($urandom), 8'($urandom_range(140, 110)), 23'($urandom)};
      chk(x, y, 32'd0, d2f_rne(f2d(x) * f2d(y)));
    end
    // (1 + p*2^-12)(1 + q*2^-12) with p, q odd: the 2^-24 term is exactly half an ulp
    for (int t = 0; t < 200; t++) begin
      logic [31:0] x, y;
      x = {9'h07f, 11'($urandom_range(1023, 0)), 1'b1, 11'd0};
      y = {9'h07f, 11'($urandom_range(1023, 0)), 1'b1, 11'd0};
      chk(x, y, 32'd0, d2f_rne(f2d(x) * f2d(y)));
    end
    // 1*1 + 2^-24: exact tie, rounds to even (1.0)
    chk(32'h3f80_0000, 32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);
    // 1*1 + 3*2^-24: tie above odd, rounds up to 1+2^-22
    chk(32'h3f80_0000, 32'h3f80_0000, 32'h3440_0000, 32'h3f80_0002);
    // (1+2^-12)^2 - 1 = 2^-11 + 2^-24: fused keeps the low bit (a separate multiply would lose it)
    chk(32'h3f80_0800, 32'h3f80_0800, 32'hbf80_0000, 32'h3a00_0400);
    // exact cancellation gives +0
    chk(32'h4040_0000, 32'h4000_0000, 32'hc0c0_0000, 32'h0000_0000);
    // -0 + -0 stays -0, -0 + +0 is +0
    chk(32'h8000_0000, 32'h3f80_0000, 32'h8000_0000, 32'h8000_0000);
    chk(32'h8000_0000, 32'h3f80_0000, 32'h0000_0000, 32'h0000_0000);
    // x*y + (-0) == x*y
    chk(32'h4040_0000, 32'hc000_0000, 32'h8000_0000, 32'hc0c0_0000);
    // infinities and NaN
    chk(32'h7f80_0000, 32'h4000_0000, 32'h3f80_0000, 32'h7f80_0000);
    chk(32'h7f80_0000, 32'h0000_0000, 32'h3f80_0000, 32'h7fc0_0000);
    chk(32'h7f80_0000, 32'h3f80_0000, 32'hff80_0000, 32'h7fc0_0000);
    chk(32'h7fc0_1234, 32'h3f80_0000, 32'h3f80_0000, 32'h7fc0_0000);
    chk(32'h3f80_0000, 32'h3f80_0000, 32'hff80_0000, 32'hff80_0000);
    // overflow to infinity, underflow flushed to zero
    chk(32'h7f00_0000, 32'h4000_0000, 32'h0000_0000, 32'h7f80_0000);
    chk(32'h0080_0000, 32'h3f00_0000, 32'h0000_0000, 32'h0000_0000);
    // addend much larger than the product: product only sets the sticky bit
    chk(32'h3f80_0000, 32'h3380_0000, 32'h4b80_0000, 32'h4b80_0000);
    // 1.5 * 2.5 + 0.25 = 4.0
    chk(32'h3fc0_0000, 32'h4020_0000, 32'h3e80_0000, 32'h4080_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
