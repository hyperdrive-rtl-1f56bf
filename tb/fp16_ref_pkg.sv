// fp16_ref_pkg: reference model of the FP16 arithmetic for the testbenches.
//
// Values are converted to `real` (exact for FP16), the operation is done in
// double precision (also exact for one FP16 add or multiply) and the result is
// rounded back to FP16 with round-to-nearest-even. It follows the same
// conventions as the RTL: subnormal inputs count as zero, results that round
// below 2^-14 become zero, overflow gives infinity. fp16_eq treats +0 and -0
// as equal and all NaNs as equal.
package fp16_ref_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real a, f, frac;
    int e, mi;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    f = a / (2.0 ** e) * 1024.0;     // in [1024, 2048)
    mi = int'($floor(f));
    frac = f - real'(mi);
    if (frac > 0.5 || (frac == 0.5 && (mi % 2) == 1)) mi++;
    if (mi == 2048) begin
      mi = 1024;
      e++;
    end
    if (e < -14) return {s, 15'd0};
    if (e > 15) return {s, 5'h1F, 10'd0};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b, input logic sub);
    real ra, rb;
    ra = fp16_to_real(a);
    rb = fp16_to_real(b);
    return real_to_fp16(sub ? ra - rb : ra + rb);
  endfunction

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
  endfunction

  function automatic logic fp16_eq(input logic [15:0] a, input logic [15:0] b);
    logic a_nan, b_nan;
    a_nan = (a[14:10] == 5'h1F) && (a[9:0] != 0);
    b_nan = (b[14:10] == 5'h1F) && (b[9:0] != 0);
    if (a_nan || b_nan) return a_nan && b_nan;
    if (a[14:0] == 0 && b[14:0] == 0) return 1'b1;
    return a == b;
  endfunction

  // random normal FP16 number with exponent in [15-span, 15+span]
  function automatic logic [15:0] rand_fp16(input int span);
    int e;
    e = 15 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom()), 5'(e), 10'($urandom())};
  endfunction

endpackage
