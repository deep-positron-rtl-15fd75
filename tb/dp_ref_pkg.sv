// dp_ref_pkg: reference arithmetic for the testbenches.
//
// Numbers are held as exact integers scaled by 2^scale in a 256-bit signed
// variable. Decoding is done bit by bit with loops, independently of the
// RTL decoders. Rounding to a posit uses the definition "round in the bit
// string": the midpoint between two adjacent n-bit posits p and p+1 is the
// value of the (n+1)-bit posit {p,1}; ties go to the even pattern; results
// clip to maxpos/minpos. Rounding to a float picks the nearest value, ties
// to the even encoding, and clips at the largest finite value.
package dp_ref_pkg;

  typedef logic signed [255:0] big_t;

  // value of an m-bit posit with es exponent bits, times 2^scale
  function automatic big_t posit_value(input logic [31:0] bits, input int m, input int es,
                                       input int scale);
    logic [31:0] u;
    logic        neg, r0;
    int          i, run, k, e, nf, f, sh;
    big_t        v;
    u   = bits & ((32'd1 << m) - 1);
    if (u == 0) return '0;
    neg = u[m-1];
    if (neg) u = ((~u) + 1) & ((32'd1 << m) - 1);
    i   = m - 2;
    r0  = u[i];
    run = 0;
    while (i >= 0 && u[i] == r0) begin run++; i--; end
    i--;                                  // skip the terminating bit
    k = r0 ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e << 1;
      if (i >= 0) begin e = e | int'(u[i]); i--; end
    end
    nf = (i >= 0) ? i + 1 : 0;
    f  = 0;
    for (int j = 0; j < nf; j++) f = (f << 1) | int'(u[nf-1-j]);
    sh = scale + k * (1 << es) + e - nf;
    if (sh < 0) $fatal(1, "posit_value: scale too small");
    v = big_t'((1 << nf) + f) <<< sh;
    return neg ? -v : v;
  endfunction

  // round an exact value (times 2^scale) to an n-bit posit
  function automatic logic [31:0] posit_round(input big_t x, input int n, input int es,
                                              input int scale);
    big_t        mag, lo, hi, mid;
    logic [31:0] p, res;
    logic        neg;
    if (x == 0) return '0;
    neg = x < 0;
    mag = neg ? -x : x;
    res = '0;
    if (mag >= posit_value((32'd1 << (n-1)) - 1, n, es, scale)) res = (32'd1 << (n-1)) - 1;
    else if (mag <= posit_value(32'd1, n, es, scale)) res = 32'd1;
    else begin
      for (p = 1; p < (32'd1 << (n-1)) - 1; p++) begin
        lo = posit_value(p, n, es, scale);
        hi = posit_value(p + 1, n, es, scale);
        if (mag >= lo && mag < hi) begin
          mid = posit_value((p << 1) | 1, n + 1, es, scale);
          if (mag < mid)      res = p;
          else if (mag > mid) res = p + 1;
          else                res = p[0] ? p + 1 : p;
          break;
        end
      end
    end
    if (neg) res = (~res + 1) & ((32'd1 << n) - 1);
    return res;
  endfunction

  // value of a float {s, e[we], f[wf]} with subnormals, times 2^scale
  function automatic big_t float_value(input logic [31:0] bits, input int we, input int wf,
                                       input int scale);
    int   e, f, bias, sh;
    logic s;
    big_t v;
    bias = (1 << (we - 1)) - 1;
    s = bits[we + wf];
    e = int'((bits >> wf) & ((32'd1 << we) - 1));
    f = int'(bits & ((32'd1 << wf) - 1));
    if (e == 0) begin
      sh = scale + 1 - bias - wf;
      v  = big_t'(f);
    end else begin
      sh = scale + e - bias - wf;
      v  = big_t'((1 << wf) + f);
    end
    if (sh < 0) $fatal(1, "float_value: scale too small");
    v = v <<< sh;
    return s ? -v : v;
  endfunction

  function automatic logic [31:0] float_round(input big_t x, input int we, input int wf,
                                              input int scale);
    big_t        mag, lo, hi;
    logic [31:0] p, res, maxenc;
    logic        neg;
    if (x == 0) return '0;
    neg    = x < 0;
    mag    = neg ? -x : x;
    maxenc = (32'(((1 << we) - 2)) << wf) | ((32'd1 << wf) - 1);
    res    = '0;
    if (mag >= float_value(maxenc, we, wf, scale)) res = maxenc;
    else begin
      for (p = 0; p < maxenc; p++) begin
        lo = float_value(p, we, wf, scale);
        hi = float_value(p + 1, we, wf, scale);
        if (mag >= lo && mag < hi) begin
          if (2 * mag < lo + hi)      res = p;
          else if (2 * mag > lo + hi) res = p + 1;
          else                        res = p[0] ? p + 1 : p;
          break;
        end
      end
    end
    if (res == 0) return '0;
    return neg ? (res | (32'd1 << (we + wf))) : res;
  endfunction

  // ---- format-generic helpers: fmt 0 fixed (q fraction bits), 1 float
  // (we exponent bits, n-1-we fraction bits), 2 posit (es exponent bits)
  function automatic int fmt_scale(input int fmt, input int n, input int es, input int we,
                                   input int q);
    if (fmt == 0) return q;
    if (fmt == 1) return (1 << (we - 1)) - 1 + (n - 1 - we) + 1;
    return (n - 1) * (1 << es) + n;
  endfunction

  function automatic big_t fmt_value(input logic [31:0] bits, input int fmt, input int n,
                                     input int es, input int we, input int q, input int scale);
    big_t v;
    if (fmt == 0) begin
      v = big_t'(bits[n-1] ? -int'((~bits + 1) & ((32'd1 << n) - 1)) : int'(bits));
      return v <<< (scale - q);
    end
    if (fmt == 1) return float_value(bits, we, n - 1 - we, scale);
    return posit_value(bits, n, es, scale);
  endfunction

  // round an exact value (times 2^scale) to the format; fixed point
  // truncates toward minus infinity and saturates
  function automatic logic [31:0] fmt_round(input big_t x, input int fmt, input int n,
                                            input int es, input int we, input int q,
                                            input int scale);
    big_t t;
    if (fmt == 0) begin
      t = x >>> (scale - q);
      if (t > big_t'((1 << (n - 1)) - 1)) t = big_t'((1 << (n - 1)) - 1);
      if (t < -big_t'(1 << (n - 1)))      t = -big_t'(1 << (n - 1));
      return 32'(t) & ((32'd1 << n) - 1);
    end
    if (fmt == 1) return float_round(x, we, n - 1 - we, scale);
    return posit_round(x, n, es, scale);
  endfunction

endpackage
