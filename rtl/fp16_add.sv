// fp16_add: IEEE-754 half-precision adder/subtractor, combinational.
//
// Computes a + b (sub = 0) or a - b (sub = 1) with round-to-nearest-even. In the
// Tile Processing Unit the binary weight drives `sub`, so a multiplication by
// +1/-1 costs nothing but a sign change, as the paper describes. The paper says
// only that an FP16 adder is used; the insides are a plain single-path design:
// swap so |a| >= |b|, align b with guard/round/sticky bits, add or subtract,
// normalise with a leading-zero count, round. Own simplifications: subnormal
// inputs are read as zero and results below the smallest normal number are
// flushed to (signed) zero; overflow gives infinity; any NaN input, or
// inf - inf, gives the quiet NaN 16'h7E00. An exact zero sum is +0.
module fp16_add
  import hd_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  input  logic  sub,
  output fp16_t y
);
  logic        sa, sb, sl, ss;
  logic [4:0]  ea, eb, el, es;
  logic [10:0] ma, mb, ml, ms;     // with hidden bit
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [4:0]  d;
  logic [13:0] ml_x, ms_x;         // mantissa << 3 (guard, round, sticky)
  logic [13:0] ms_sh;
  logic        sticky;
  logic [14:0] sum;
  logic [3:0]  lz;
  logic [14:0] norm;
  logic signed [6:0] e_n;
  logic [10:0] m_r;
  logic        g, r, st, rnd;
  logic [11:0] m_inc;
  logic signed [6:0] e_f;

  always_comb begin
    sa = a[15];
    sb = b[15] ^ sub;
    ea = a[14:10];
    eb = b[14:10];
    ma = (ea == 5'd0) ? 11'd0 : {1'b1, a[9:0]};
    mb = (eb == 5'd0) ? 11'd0 : {1'b1, b[9:0]};
    a_nan = (ea == 5'h1F) && (a[9:0] != 10'd0);
    b_nan = (eb == 5'h1F) && (b[9:0] != 10'd0);
    a_inf = (ea == 5'h1F) && (a[9:0] == 10'd0);
    b_inf = (eb == 5'h1F) && (b[9:0] == 10'd0);

    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    if (ms == 11'd0) es = el;        // zero operand needs no alignment

    d     = el - es;
    ml_x  = {ml, 3'b000};
    ms_x  = {ms, 3'b000};
    ms_sh = (d > 5'd13) ? 14'd0 : (ms_x >> d);
    sticky = (d > 5'd13) ? (ms != 11'd0) : ((ms_x & ~(14'h3FFF << d)) != 14'd0);
    ms_sh[0] = ms_sh[0] | sticky;

    sum = (sl == ss) ? ({1'b0, ml_x} + {1'b0, ms_sh}) : ({1'b0, ml_x} - {1'b0, ms_sh});

    // normalise: bit 13 is the hidden-bit position
    lz = 4'd0;
    for (int i = 13; i >= 0; i--) begin
      if (sum[i]) begin
        lz = 4'(13 - i);
        break;
      end
    end
    if (sum[14]) begin
      norm = {1'b0, sum[14:1]};
      norm[0] = norm[0] | sum[0];
      e_n  = 7'(el) + 7'sd1;
    end else begin
      norm = sum << lz;
      e_n  = 7'(el) - 7'(lz);
    end

    // round to nearest even
    m_r = norm[13:3];
    g   = norm[2];
    r   = norm[1];
    st  = norm[0];
    rnd = g & (r | st | m_r[0]);
    m_inc = {1'b0, m_r} + 12'(rnd);
    e_f = e_n;
    if (m_inc[11]) e_f = e_n + 7'sd1;

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 16'h7E00;
    end else if (a_inf) begin
      y = {sa, 5'h1F, 10'd0};
    end else if (b_inf) begin
      y = {sb, 5'h1F, 10'd0};
    end else if (sum == 15'd0) begin
      y = (sl == ss) ? {sl, 15'd0} : 16'h0000;
    end else if (e_f >= 7'sd31) begin
      y = {sl, 5'h1F, 10'd0};
    end else if (e_f <= 7'sd0) begin
      y = {sl, 15'd0};
    end else begin
      y = {sl, e_f[4:0], (m_inc[11] ? m_inc[10:1] : m_inc[9:0])};
    end
  end

endmodule
