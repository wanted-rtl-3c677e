// fp_ref_pkg: reference model and stimulus for the binary64 FPADD/FPADDRE
// testbenches.
//
// The reference sum is the simulator's own IEEE double addition (round to
// nearest even). The reference round-off error is Knuth's TwoSum, six
// dependent double additions, which is exact for every finite sum that does
// not overflow and yields NaN when the sum is infinite or NaN, so it is an
// independent model of what the hardware computes in one step.
// gen_pair() draws operand pairs from classes chosen to reach every path of
// the datapath: overlapping exponents, far-apart exponents, cancellation,
// exact ties, subnormals, overflow and special values.
package fp_ref_pkg;

  typedef logic [63:0] dbl_t;

  localparam dbl_t QNAN = 64'h7FF8_0000_0000_0000;

  function automatic bit is_nan(dbl_t x);
    return (x[62:52] == 11'h7FF) && (x[51:0] != 0);
  endfunction

  function automatic bit is_zero(dbl_t x);
    return x[62:0] == 0;
  endfunction

  function automatic dbl_t ref_add(dbl_t a, dbl_t b);
    real s;
    s = $bitstoreal(a) + $bitstoreal(b);
    return $realtobits(s);
  endfunction

  // Knuth's TwoSum (general case error-free addition).
  function automatic dbl_t ref_addre(dbl_t a, dbl_t b);
    real ra, rb, s, bv, av, br, ar, e;
    ra = $bitstoreal(a);
    rb = $bitstoreal(b);
    s  = ra + rb;
    bv = s - ra;
    av = s - bv;
    br = rb - bv;
    ar = ra - av;
    e  = ar + br;
    return $realtobits(e);
  endfunction

  // Result comparison: NaNs match any NaN; a zero round-off error is +0 in
  // the hardware and either sign in the reference.
  function automatic bit same(dbl_t got, dbl_t exp, bit is_error);
    if (is_nan(exp)) return is_nan(got);
    if (is_error && is_zero(exp)) return got == 64'h0;
    return got == exp;
  endfunction

  function automatic dbl_t rnd64();
    return {$urandom(), $urandom()};
  endfunction

  function automatic dbl_t mk(bit s, int unsigned e, logic [51:0] m);
    return {s, 11'(e), m};
  endfunction

  function automatic void gen_pair(output dbl_t a, output dbl_t b);
    int unsigned mode, ea, eb, d;
    dbl_t r;
    mode = $urandom_range(0, 12);
    r    = rnd64();
    ea   = $urandom_range(100, 1900);
    case (mode)
      0: begin a = rnd64(); b = rnd64(); end
      1, 2, 3, 4: begin                     // overlapping or nearby exponents
        d = $urandom_range(0, 60);
        a = mk($urandom_range(0, 1), ea, rnd64());
        b = mk($urandom_range(0, 1), ea - d, rnd64());
      end
      5: begin                              // heavy cancellation
        a = mk($urandom_range(0, 1), ea, rnd64());
        b = a ^ 64'h8000_0000_0000_0000;
        b[20:0] = r[20:0];
        if (r[40]) b[62:52] = b[62:52] - 1;
      end
      6: begin                              // subnormal and tiny operands
        a = mk($urandom_range(0, 1), $urandom_range(0, 3), rnd64());
        b = mk($urandom_range(0, 1), $urandom_range(0, 60), rnd64());
      end
      7: begin                              // near the top of the range
        a = mk($urandom_range(0, 1), $urandom_range(2040, 2046), rnd64());
        b = mk(a[63] ^ r[0] ^ r[1], $urandom_range(1990, 2046), rnd64());
      end
      8: begin                              // special values
        case (r[2:0])
          0: a = 64'h7FF0_0000_0000_0000;
          1: a = 64'hFFF0_0000_0000_0000;
          2: a = 64'h7FF8_0000_0000_0001;
          3: a = 64'h0000_0000_0000_0000;
          4: a = 64'h8000_0000_0000_0000;
          default: a = mk(r[3], ea, rnd64());
        endcase
        case (r[6:4])
          0: b = 64'h7FF0_0000_0000_0000;
          1: b = 64'hFFF0_0000_0000_0000;
          2: b = 64'hFFF4_0000_0000_0000;
          3: b = 64'h0000_0000_0000_0000;
          4: b = 64'h8000_0000_0000_0000;
          default: b = mk(r[7], ea - r[13:8], rnd64());
        endcase
      end
      9: begin                              // exact ties: b is half an ulp of a
        a = mk(r[0], ea, rnd64());
        b = mk(r[1], ea - 53, 52'h0);
        if (r[2]) b = mk(r[1], ea - 52, 52'h8_0000_0000_0000);
      end
      10: begin                             // few-bit operands: exact sums
        a = mk(r[0], ea, {r[12:5], 44'h0});
        b = mk(r[1], ea - r[20:16], {r[30:24], 45'h0});
      end
      12: begin                             // rounding carries out of the fraction
        a = mk(r[0], ea, 52'hF_FFFF_FFFF_FFFF);
        b = mk(r[0], ea - $urandom_range(20, 54), rnd64());
      end
      default: begin                        // power-of-two minus tiny
        a = mk(r[0], ea, 52'h0);
        b = mk(~r[0], ea - $urandom_range(50, 56), rnd64());
      end
    endcase
  endfunction

endpackage
