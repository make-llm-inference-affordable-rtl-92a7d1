// fp16_pkg: IEEE 754 binary16 arithmetic shared by the NDP core datapaths.
//
// The GEMV multipliers and the reduction tree use fp16_mul and fp16_add; the
// activation unit uses fp16_gt for its comparator tree, fp16_add for the
// subtractors and adder tree, fp16_exp for the exponentiation units,
// fp16_recip for the divider and fp16_mul for the output multipliers.
// All functions are combinational and synthesizable.
//
// Number handling is this design's own choice (the source architecture only
// states that the units are FP16): round to nearest even on mul, add and
// reciprocal; subnormal inputs and results are flushed to zero; overflow and
// infinite inputs give a signed infinity; NaN is not generated.
// fp16_exp computes 2^(x*log2 e) in fixed point with a cubic polynomial for
// 2^f on [0,1); its relative error is below 1e-3.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  // Round a normalized significand (leading 1 at bit 13 of m, 10 kept
  // fraction bits, guard at bit 2, sticky below) and pack with exponent e.
  function automatic fp16_t fp16_pack(input logic s, input int e, input logic [13:0] m,
                                      input logic extra_sticky);
    logic [10:0] r;
    logic        g, st;
    int          ee;
    g  = m[2];
    st = (|m[1:0]) | extra_sticky;
    r  = {1'b0, m[12:3]};
    if (g && (st || m[3])) r = r + 11'd1;
    ee = e;
    if (r[10]) begin
      ee = ee + 1;
      r  = 11'd0;
    end
    if (ee >= 31)     return {s, 15'h7C00};
    else if (ee <= 0) return {s, 15'h0000};
    else              return {s, ee[4:0], r[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, 15'h7C00};
    if (a[14:10] == 5'd0  || b[14:10] == 5'd0)  return {s, 15'h0000};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      e = e + 1;
      return fp16_pack(s, e, p[21:8], |p[7:0]);
    end
    return fp16_pack(s, e, p[20:7], |p[6:0]);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    fp16_t       x, y;
    int          d, e, lz;
    logic [25:0] mx, my, sum, mask;
    logic        sticky;
    x = a;
    y = b;
    if (a[14:10] == 5'd0) x = 16'h0000;
    if (b[14:10] == 5'd0) y = 16'h0000;
    if (x[14:10] == 5'd31) return x;
    if (y[14:10] == 5'd31) return y;
    if (x[14:0] < y[14:0]) begin
      x = y;
      y = (a[14:10] == 5'd0) ? 16'h0000 : a;
    end
    if (x[14:10] == 5'd0) return 16'h0000;
    if (y[14:10] == 5'd0) return x;
    d  = int'(x[14:10]) - int'(y[14:10]);
    e  = int'(x[14:10]);
    // significands with 14 extra low bits: leading one at bit 24
    mx = {1'b0, 1'b1, x[9:0], 14'd0};
    my = {1'b0, 1'b1, y[9:0], 14'd0};
    if (d > 25) begin
      sticky = 1'b1;
      my     = '0;
    end else begin
      mask   = (26'd1 << d) - 26'd1;
      sticky = |(my & mask);
      my     = my >> d;
    end
    if (x[15] == y[15]) begin
      sum = mx + my;
      if (sum[25]) begin
        sticky = sticky | sum[0];
        sum    = sum >> 1;
        e      = e + 1;
      end
    end else begin
      // a sticky bit shifted out of the subtrahend means the true difference
      // is slightly smaller: borrow one unit in the last place
      sum = mx - my - {25'd0, sticky};
      if (sum == 26'd0) return 16'h0000;
      lz = 0;
      for (int i = 24; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp16_pack(x[15], e, sum[24:11], (|sum[10:0]) | sticky);
  endfunction

  // a > b, with +0 and -0 equal
  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    logic [15:0] ka, kb;
    fp16_t       x, y;
    x  = (a[14:10] == 5'd0) ? 16'h0000 : a;
    y  = (b[14:10] == 5'd0) ? 16'h0000 : b;
    ka = x[15] ? ~x : (x | 16'h8000);
    kb = y[15] ? ~y : (y | 16'h8000);
    return ka > kb;
  endfunction

  function automatic fp16_t fp16_max(input fp16_t a, input fp16_t b);
    return fp16_gt(b, a) ? b : a;
  endfunction

  function automatic fp16_t fp16_neg(input fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // 1/a
  function automatic fp16_t fp16_recip(input fp16_t a);
    logic [24:0] q, r;
    logic [10:0] m;
    int          e;
    if (a[14:10] == 5'd0)  return {a[15], 15'h7C00};
    if (a[14:10] == 5'd31) return {a[15], 15'h0000};
    m = {1'b1, a[9:0]};
    q = 25'd1 << 24;
    r = q % 25'(m);
    q = q / 25'(m);
    if (q[14]) return fp16_pack(a[15], 30 - int'(a[14:10]), {q[14:1]}, q[0] | (|r));
    e = 29 - int'(a[14:10]);
    return fp16_pack(a[15], e, q[13:0], |r);
  endfunction

  // e^x
  localparam logic [20:0] LOG2E_Q20 = 21'd1512775;  // log2(e) * 2^20
  localparam int          C1_Q20    = 729344;       // 0.6955569 * 2^20
  localparam int          C2_Q20    = 237162;       // 0.2261736 * 2^20
  localparam int          C3_Q20    = 81941;        // 0.0781456 * 2^20

  function automatic fp16_t fp16_exp(input fp16_t x);
    logic [23:0] fx;
    logic [44:0] prod;
    logic signed [31:0] y, n;
    logic [19:0] f;
    logic [63:0] t;
    logic [21:0] p;
    int          ex;
    ex = int'(x[14:10]);
    if (ex == 31) return x[15] ? 16'h0000 : 16'h7C00;
    if (ex < 5)   return FP16_ONE;                  // |x| < 2^-10
    if (ex >= 19) return x[15] ? 16'h0000 : 16'h7C00; // |x| >= 16
    fx   = 24'({1'b1, x[9:0]}) << (ex - 5);          // |x| in Q4.20
    prod = 45'(fx) * 45'(LOG2E_Q20);                 // |x|*log2e in Q.40
    y    = 32'(prod >> 20);
    if (x[15]) y = -y;
    n    = y >>> 20;
    f    = y[19:0];
    t    = (64'(C3_Q20) * 64'(f)) >> 20;
    t    = ((64'(C2_Q20) + t) * 64'(f)) >> 20;
    t    = ((64'(C1_Q20) + t) * 64'(f)) >> 20;
    p    = 22'(64'(1 << 20) + t);
    if (p[21]) p = 22'h1FFFFF;                       // keep below 2.0
    return fp16_pack(1'b0, int'(n) + 15, p[20:7], |p[6:0]);
  endfunction

endpackage
