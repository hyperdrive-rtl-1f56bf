// fp16_mul: IEEE-754 half-precision multiplier, combinational.
//
// One multiplier serves the C Tile Processing Units of a spatial tile and is
// time-shared between them (the paper's depth-wise shared multiplier for the
// batch-norm scale). The paper names the unit only; the insides are the usual
// ones: 11 x 11 bit mantissa product, one-bit normalisation, round to nearest
// even. Same own simplifications as fp16_add: subnormal inputs read as zero,
// results below the normal range flush to signed zero, overflow gives
// infinity, NaN (or 0 x inf) gives 16'h7E00.
module fp16_mul
  import hd_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);
  logic        s;
  logic [4:0]  ea, eb;
  logic [10:0] ma, mb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [21:0] p;
  logic [10:0] m_r;
  logic        g, st, rnd;
  logic [11:0] m_inc;
  logic signed [7:0] e;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:10];
    eb = b[14:10];
    a_zero = (ea == 5'd0);
    b_zero = (eb == 5'd0);
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    a_nan = (ea == 5'h1F) && (a[9:0] != 10'd0);
    b_nan = (eb == 5'h1F) && (b[9:0] != 10'd0);
    a_inf = (ea == 5'h1F) && (a[9:0] == 10'd0);
    b_inf = (eb == 5'h1F) && (b[9:0] == 10'd0);

    p = ma * mb;                       // 1.x * 1.x in [1, 4)
    e = 8'(ea) + 8'(eb) - 8'sd15;
    if (p[21]) begin
      m_r = p[21:11];
      g   = p[10];
      st  = (p[9:0] != 10'd0);
      e   = e + 8'sd1;
    end else begin
      m_r = p[20:10];
      g   = p[9];
      st  = (p[8:0] != 9'd0);
    end
    rnd   = g & (st | m_r[0]);
    m_inc = {1'b0, m_r} + 12'(rnd);
    if (m_inc[11]) e = e + 8'sd1;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = 16'h7E00;
    end else if (a_inf || b_inf) begin
      y = {s, 5'h1F, 10'd0};
    end else if (a_zero || b_zero) begin
      y = {s, 15'd0};
    end else if (e >= 8'sd31) begin
      y = {s, 5'h1F, 10'd0};
    end else if (e <= 8'sd0) begin
      y = {s, 15'd0};
    end else begin
      y = {s, e[4:0], (m_inc[11] ? m_inc[10:1] : m_inc[9:0])};
    end
  end

endmodule
