// fdp_ref_pkg -- reference arithmetic for the FDP testbenches.
//
// Independent models of what the array computes, written as plain integer
// arithmetic on wide vectors rather than as a copy of the hardware:
//   ref_prod_fix  exact product of two IEEE754-style words (flush-to-zero
//                 for subnormals), scaled to accumulator units 2^LSB and
//                 truncated toward zero, as a 256-bit two's-complement value;
//   ref_wrap      reduces a 256-bit value modulo 2^W (sign-extending bit W-1);
//   ref_round     rounds a W-bit two's-complement accumulator to an
//                 IEEE754-style word, nearest-even, by comparing the
//                 remainder with one half (not with guard/sticky bits);
//   fp_to_real    value of a word as a real, for reports.
package fdp_ref_pkg;

  typedef logic signed [255:0] wide_t;

  function automatic int bias(int we);
    return (1 << (we - 1)) - 1;
  endfunction

  function automatic bit ref_is_nan(logic [63:0] x, int we, int wf);
    logic [63:0] e;
    e = (x >> wf) & ((64'd1 << we) - 1);
    return e == ((64'd1 << we) - 1);
  endfunction

  function automatic logic [63:0] make_fp(bit s, int unsigned e, logic [63:0] f,
                                          int we, int wf);
    return (64'(s) << (we + wf)) | (64'(e) << wf) | (f & ((64'd1 << wf) - 1));
  endfunction

  function automatic wide_t ref_prod_fix(logic [63:0] a, logic [63:0] b,
                                         int we, int wf, int lsb);
    int    ea, eb, sh;
    wide_t ma, mb, p;
    bit    s;
    ea = int'((a >> wf) & ((64'd1 << we) - 1));
    eb = int'((b >> wf) & ((64'd1 << we) - 1));
    if (ea == 0 || eb == 0) return '0;
    ma = wide_t'(a & ((64'd1 << wf) - 1)) + (wide_t'(1) << wf);
    mb = wide_t'(b & ((64'd1 << wf) - 1)) + (wide_t'(1) << wf);
    s  = a[we+wf] ^ b[we+wf];
    p  = ma * mb;                         // value p * 2^(ea+eb-2bias-2wf)
    sh = ea + eb - 2 * bias(we) - 2 * wf - lsb;
    if (sh >= 0) begin
      if (sh > 200) p = '0; else p = p << sh;
    end else begin
      if (-sh > 200) p = '0; else p = p >> (-sh);
    end
    return s ? -p : p;
  endfunction

  function automatic wide_t ref_wrap(wide_t v, int w);
    wide_t m;
    m = (wide_t'(1) << w) - 1;
    v = v & m;
    if (v[w-1]) v = v - (wide_t'(1) << w);
    return v;
  endfunction

  function automatic logic [63:0] ref_round(wide_t acc, int lsb, int weo, int wfo,
                                            bit nan);
    wide_t mag, q, rem, half;
    int    p, eb, emax;
    bit    s;
    emax = (1 << weo) - 1;
    if (nan) return make_fp(0, emax, 64'd1 << (wfo - 1), weo, wfo);
    if (acc == 0) return 64'd0;
    s   = acc < 0;
    mag = s ? -acc : acc;
    p   = 0;
    while ((mag >> (p + 1)) != 0) p++;
    if (p > wfo) begin
      q    = mag >> (p - wfo);
      rem  = mag - (q << (p - wfo));
      half = wide_t'(1) << (p - wfo - 1);
      if (rem > half || (rem == half && q[0])) q = q + 1;
    end else begin
      q = mag << (wfo - p);
    end
    if (q == (wide_t'(1) << (wfo + 1))) begin q = q >> 1; p++; end
    eb = p + lsb + bias(weo);
    if (eb <= 0)    return make_fp(s, 0, 0, weo, wfo);
    if (eb >= emax) return make_fp(s, emax, 0, weo, wfo);
    return make_fp(s, eb, 64'(q), weo, wfo);
  endfunction

  function automatic real fp_to_real(logic [63:0] x, int we, int wf);
    int  e;
    real m, r;
    e = int'((x >> wf) & ((64'd1 << we) - 1));
    if (e == 0) return 0.0;
    m = 1.0 + real'(x & ((64'd1 << wf) - 1)) / (2.0 ** wf);
    r = m * (2.0 ** (e - bias(we)));
    return x[we+wf] ? -r : r;
  endfunction

  // Random normal word with an exponent within +-erange of 2^e0.
  function automatic logic [63:0] rand_fp(int we, int wf, int e0, int erange);
    int e;
    e = bias(we) + e0 + int'($urandom_range(2 * erange)) - erange;
    return make_fp($urandom_range(1), e, {$urandom, $urandom}, we, wf);
  endfunction

endpackage
