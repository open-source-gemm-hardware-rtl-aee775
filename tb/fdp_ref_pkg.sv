// fdp_ref_pkg -- reference model of the fused dot product, for testbenches.
//
// It works on real numbers instead of bit vectors: an IEEE-style operand is
// turned into a real, the product is formed in double precision (exact for
// operands of up to 26 significand bits), scaled by 2^-LSB and floored to
// give the accumulator addend.  The accumulator is a longint wrapped to W
// bits.  The final conversion goes through the double-precision bit pattern
// and rounds it to nearest-even at WF fraction bits.  All of this is exact
// while W <= 53.
package fdp_ref_pkg;

  typedef struct {
    longint addend;
    bit     nan;
    bit     too_small;
    bit     too_big;
    bit     ftz;
  } prod_t;

  function automatic real pow2(int n);
    real r = 1.0;
    for (int i = 0; i < n; i++) r = r * 2.0;
    for (int i = 0; i > n; i--) r = r / 2.0;
    return r;
  endfunction

  function automatic real to_real(longint unsigned x, int we, int wf);
    longint unsigned e, f;
    real m;
    bit s;
    s = x[we+wf];
    e = (x >> wf) & ((64'd1 << we) - 1);
    f = x & ((64'd1 << wf) - 1);
    m = (1.0 + real'(f) / pow2(wf)) * pow2(int'(e) - ((1 << (we-1)) - 1));
    return s ? -m : m;
  endfunction

  // Addend contributed by the product x*y to an accumulator <ovf,msb,lsb>.
  function automatic prod_t product(longint unsigned x, longint unsigned y,
                                    int we, int wf, int msb, int lsb);
    prod_t r;
    int ex, ey, emax, top;
    real p;
    emax = (1 << we) - 1;
    ex = int'((x >> wf) & emax);
    ey = int'((y >> wf) & emax);
    r.addend = 0; r.nan = 0; r.too_small = 0; r.too_big = 0; r.ftz = 0;
    if (ex == emax || ey == emax) begin
      r.nan = 1;
      return r;
    end
    if (ex == 0 || ey == 0) begin
      r.ftz = 1;
      return r;
    end
    // weight of the top bit the product can have
    top = ex + ey - 2 * ((1 << (we-1)) - 1) + 1;
    if (top > msb) begin
      r.too_big = 1; r.nan = 1;
      return r;
    end
    if (top + 1 <= lsb) begin
      r.too_small = 1;
      return r;
    end
    p = to_real(x, we, wf) * to_real(y, we, wf) * pow2(-lsb);
    r.addend = longint'($floor(p));
    return r;
  endfunction

  // Wrap v to a w-bit two's-complement value.
  function automatic longint wrap(longint v, int w);
    longint m;
    m = v & ((64'sd1 <<< w) - 1);
    if (m[w-1]) m = m - (64'sd1 <<< w);
    return m;
  endfunction

  // Round acc * 2^lsb to the format {sign, we, wf}: nearest even, overflow
  // to infinity, below the smallest normal to signed zero.
  function automatic longint unsigned to_format(longint acc, bit nan, int we, int wf, int lsb);
    logic [63:0] d;
    longint unsigned frac, rest, half, res;
    int e, emax;
    bit s;
    emax = (1 << we) - 1;
    if (nan) return (longint'(emax) << wf) | (64'd1 << (wf - 1));
    if (acc == 0) return 0;
    d = $realtobits(real'(acc) * pow2(lsb));
    s = d[63];
    e = int'(d[62:52]) - 1023 + ((1 << (we-1)) - 1);
    frac = d[51:0] >> (52 - wf);
    rest = d[51:0] & ((64'd1 << (52 - wf)) - 1);
    half = 64'd1 << (51 - wf);
    if (rest > half || (rest == half && frac[0])) frac = frac + 1;
    if (frac == (64'd1 << wf)) begin
      frac = 0;
      e = e + 1;
    end
    if (e >= emax)   res = longint'(emax) << wf;
    else if (e <= 0) res = 0;
    else             res = (longint'(e) << wf) | frac;
    return res | (longint'(s) << (we + wf));
  endfunction

  // Random operand: mostly ordinary values near 1, sometimes special.
  function automatic longint unsigned rand_operand(int we, int wf, int spread, int special_pct);
    int bias, e, r;
    longint unsigned f, s;
    bias = (1 << (we-1)) - 1;
    r = $urandom_range(99);
    s = $urandom_range(1);
    f = {$urandom, $urandom} & ((64'd1 << wf) - 1);
    if (r < special_pct) begin
      case ($urandom_range(3))
        0: e = 0;                              // zero / subnormal
        1: e = (1 << we) - 1;                  // NaN / infinity
        2: e = bias + 20 + $urandom_range(10); // too big
        default: e = bias - 30 - $urandom_range(10); // tiny
      endcase
    end else begin
      e = bias - spread + $urandom_range(2 * spread);
    end
    return (s << (we + wf)) | (longint'(e) << wf) | f;
  endfunction

endpackage
