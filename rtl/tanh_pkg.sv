// tanh_pkg -- constants and elaboration-time functions shared by the tanh datapath.
//
// The datapath works with the "velocity factor" f(a) = (1 - tanh a) / (1 + tanh a),
// which equals exp(-2a). Velocity factors of a sum multiply, so f(|x|) is the
// product of the factors of the set bits of |x|, and tanh |x| = (1 - f) / (1 + f).
// This package provides:
//   * lut_bit():      which magnitude bit drives address bit j of LUT l. The
//                     grouping mixes large and small place values in one LUT so
//                     the partial products keep their precision. LUT0 uses bits
//                     {x15, x8, x7, x0} for a 16-bit magnitude, as in the method
//                     this design follows; the other LUTs continue the same
//                     pattern, which is this design's own extension.
//   * vf_entry():     the rounded 0.LUT_W velocity factor stored at one LUT address.
//   * nr_seed_entry():the Newton-Raphson starting guess for one sub-interval of
//                     [0.5, 1).
// All functions are evaluated while elaborating, using integer fixed-point
// arithmetic with 64 fraction bits, so no table is written out by hand.
package tanh_pkg;

  typedef logic [127:0] wide_t;  // fixed point, 64 fraction bits

  localparam int unsigned FP = 64;

  // Magnitude bit feeding address bit j (0 = LSB) of LUT l, for an IN_W-bit
  // magnitude split over IN_W/4 LUTs of four address bits each.
  function automatic int lut_bit(int in_w, int l, int j);
    case (j)
      0:       return l;
      1:       return in_w / 2 - 1 - l;
      2:       return in_w / 2 + l;
      default: return in_w - 1 - l;
    endcase
  endfunction

  // exp(-2^e) in 64-bit fraction fixed point. A Taylor series is used for the
  // small argument 2^e0 (e0 <= -4), and the result is squared (e - e0) times.
  function automatic wide_t exp_neg_pow2(int e);
    int    e0;
    wide_t sum, term;
    e0   = (e < -4) ? e : -4;
    sum  = wide_t'(1) << FP;
    term = wide_t'(1) << FP;
    for (int k = 1; k <= 24; k++) begin
      term = (term >> (-e0)) / wide_t'(k);
      if (k % 2 == 1) sum = sum - term;
      else            sum = sum + term;
    end
    for (int s = e0; s < e; s++) sum = (sum * sum) >> FP;
    return sum;
  endfunction

  // Velocity factor exp(-2 * sum of the place values selected by addr) for LUT
  // l, rounded to a 0.lut_w fraction. 1.0 (addr = 0) saturates to the largest code.
  function automatic logic [63:0] vf_entry(int in_w, int frac_in, int lut_w, int l, int addr);
    wide_t p, r;
    p = wide_t'(1) << FP;
    for (int j = 0; j < 4; j++)
      if (addr[j]) p = (p * exp_neg_pow2(lut_bit(in_w, l, j) - frac_in + 1)) >> FP;
    r = (p + (wide_t'(1) << (FP - lut_w - 1))) >> (FP - lut_w);
    if (r > ((wide_t'(1) << lut_w) - 1)) r = (wide_t'(1) << lut_w) - 1;
    return r[63:0];
  endfunction

  // Starting guess for 1/d with d in sub-interval i of [0.5, 1) split into
  // 2^seed_bits equal parts: 2 / (lo + hi), as an unsigned 2.w value, rounded.
  function automatic logic [63:0] nr_seed_entry(int w, int seed_bits, int i);
    wide_t num, den;
    num = wide_t'(1) << (w + seed_bits + 2);
    den = (wide_t'(1) << (seed_bits + 1)) + wide_t'(2 * i + 1);
    return 64'((num + den / 2) / den);
  endfunction

endpackage
