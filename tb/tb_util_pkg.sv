// tb_util_pkg: reference conversions between binary16 and real for the
// testbenches. real_to_fp16 rounds to nearest even from the double value,
// flushes subnormals to zero and saturates to infinity, matching the number
// handling chosen for the RTL. Sums and products of two binary16 values are
// exact in double, so rounding them here gives an exact reference.
package tb_util_pkg;
  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = (1024.0 + real'(h[9:0])) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real d);
    logic [63:0] b;
    logic        s, g, st;
    int          e;
    logic [10:0] m;
    b = $realtobits(d);
    s = b[63];
    if (d == 0.0) return {s, 15'd0};
    e = int'(b[62:52]) - 1023 + 15;
    m = {1'b0, b[51:42]};
    g = b[41];
    st = |b[40:0];
    if (g && (st || m[0])) m = m + 11'd1;
    if (m[10]) begin
      m = 11'd0;
      e = e + 1;
    end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'h0000};
    return {s, e[4:0], m[9:0]};
  endfunction

  // random normal fp16 with magnitude in [2^(lo-15), 2^(hi-14))
  function automatic logic [15:0] rand_fp16(input int lo, input int hi);
    int e;
    e = lo + int'($urandom % (hi - lo + 1));
    return {1'($urandom), e[4:0], 10'($urandom)};
  endfunction
endpackage
