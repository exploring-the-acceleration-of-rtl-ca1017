// nek_pkg: shared constants, types and arithmetic for the Nekbone AX kernel.
//
// The kernel applies the spectral-element Poisson operator to elements of
// N x N x N grid points (N = 16 by default, the polynomial order of the
// evaluated test case). All arithmetic is IEEE-754 binary64, as in the
// original double-precision code. The two functions fp64_mul_f and
// fp64_add_f are the floating-point cores used everywhere: round to nearest
// even, with subnormal operands and results flushed to zero (a choice of this
// design; the original work used vendor cores). Memory words are 512 bits,
// eight doubles, matching the widened HBM ports.
//
// Grid point (x, y, z) of an element has linear index x + N*y + N*N*z (x runs
// fastest, Fortran order). The reordering buffers spread an element over N
// banks with bank = (x+y+z) mod N and in-bank address = z*N + y, so that any
// line of N points along x, y or z lies in N distinct banks.
package nek_pkg;

  localparam int unsigned NP = 16;           // default polynomial order
  localparam int unsigned WORD_W = 512;      // HBM port width
  localparam int unsigned LANES = WORD_W / 64;

  typedef logic [63:0] dbl_t;
  typedef logic [WORD_W-1:0] word_t;

  localparam dbl_t FP_QNAN = 64'h7FF8_0000_0000_0000;

  // Count of leading zeros in a 57-bit value (57 when zero).
  function automatic int unsigned lzc57(input logic [56:0] v);
    int unsigned n;
    n = 57;
    for (int i = 0; i < 57; i++) begin
      if (v[i]) n = 56 - i;
    end
    return n;
  endfunction

  // binary64 multiply, round to nearest even, flush-to-zero.
  function automatic dbl_t fp64_mul_f(input dbl_t a, input dbl_t b);
    logic        s;
    logic [10:0] ea, eb;
    logic [51:0] ma, mb;
    logic [105:0] prod;
    logic [52:0] frac;   // 1 carry bit + 52 mantissa bits after rounding
    logic        g, st;
    logic signed [13:0] e;
    s  = a[63] ^ b[63];
    ea = a[62:52]; eb = b[62:52];
    ma = a[51:0];  mb = b[51:0];
    if ((ea == 11'h7FF && ma != 0) || (eb == 11'h7FF && mb != 0)) return FP_QNAN;
    if (ea == 11'h7FF || eb == 11'h7FF) begin
      if (ea == 0 || eb == 0) return FP_QNAN;      // inf * 0
      return {s, 11'h7FF, 52'd0};
    end
    if (ea == 0 || eb == 0) return {s, 63'd0};
    prod = {1'b1, ma} * {1'b1, mb};
    e = 14'(ea) + 14'(eb) - 14'sd1023;
    if (prod[105]) begin
      e++;
      frac = {1'b0, prod[104:53]};
      g    = prod[52];
      st   = |prod[51:0];
    end else begin
      frac = {1'b0, prod[103:52]};
      g    = prod[51];
      st   = |prod[50:0];
    end
    if (g && (st || frac[0])) frac = frac + 53'd1;
    if (frac[52]) e++;                               // mantissa rounded up to 2.0
    if (e >= 14'sd2047) return {s, 11'h7FF, 52'd0};
    if (e <= 14'sd0) return {s, 63'd0};
    return {s, e[10:0], frac[51:0]};
  endfunction

  // binary64 add, round to nearest even, flush-to-zero.
  function automatic dbl_t fp64_add_f(input dbl_t a, input dbl_t b);
    dbl_t        big, sml;
    logic [10:0] eb, es;
    logic [55:0] mbig, msml;   // hidden bit, 52 mantissa bits, guard, round, sticky
    logic [56:0] sum;
    int unsigned d, lz;
    logic signed [13:0] e;
    logic [53:0] rnd;
    if ((a[62:52] == 11'h7FF && a[51:0] != 0) || (b[62:52] == 11'h7FF && b[51:0] != 0))
      return FP_QNAN;
    if (a[62:52] == 11'h7FF && b[62:52] == 11'h7FF)
      return (a[63] == b[63]) ? a : FP_QNAN;
    if (a[62:52] == 11'h7FF) return a;
    if (b[62:52] == 11'h7FF) return b;
    if (a[62:52] == 0 && b[62:52] == 0) return {a[63] & b[63], 63'd0};
    if (a[62:52] == 0) return b;
    if (b[62:52] == 0) return a;
    if (a[62:0] >= b[62:0]) begin big = a; sml = b; end
    else begin big = b; sml = a; end
    eb = big[62:52]; es = sml[62:52];
    mbig = {1'b1, big[51:0], 3'b000};
    msml = {1'b1, sml[51:0], 3'b000};
    d = int'(eb) - int'(es);
    if (d > 55) msml = 56'd1;
    else if (d > 0) msml = (msml >> d) | 56'((msml & ((56'd1 << d) - 56'd1)) != 0);
    if (big[63] == sml[63]) sum = {1'b0, mbig} + {1'b0, msml};
    else sum = {1'b0, mbig} - {1'b0, msml};
    if (sum == 0) return 64'd0;                      // exact cancellation gives +0
    e = 14'(eb);
    if (sum[56]) begin
      sum = (sum >> 1) | 57'(sum[0]);
      e++;
    end else begin
      lz = lzc57(sum) - 1;                           // zeros above the hidden-bit position
      sum = sum << lz;
      e = e - 14'(lz);
    end
    // sum[55] is now the hidden bit, [54:3] the mantissa, [2] guard, [1:0] sticky
    rnd = {1'b0, sum[55:3]};
    if (sum[2] && (sum[1] || sum[0] || sum[3])) rnd = rnd + 54'd1;
    if (rnd[53]) begin
      rnd = rnd >> 1;
      e++;
    end
    if (e >= 14'sd2047) return {big[63], 11'h7FF, 52'd0};
    if (e <= 14'sd0) return {big[63], 63'd0};
    return {big[63], e[10:0], rnd[51:0]};
  endfunction

endpackage
