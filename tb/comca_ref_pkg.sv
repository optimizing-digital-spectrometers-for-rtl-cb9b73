// comca_ref_pkg -- reference arithmetic for the testbenches, written from the
// formulas of the calibration rather than from the RTL:
//   * linear interpolation c' = floor((K'*c_k0 + K''*c_k1) / I) with
//     k0 = 2I*floor(k/2I + 1/2), k1 = 2I*floor(k/2I) + I, K' = |I - k mod 2I|;
//   * corrected channel b_k = sum_m a_{k mod N',m} * c_{k,m}, rounded half up
//     from Q2.14 and saturated to 32 bits;
//   * placement of channel k in the core array (inverse of the flip-and-shift
//     reordering): block b = k div (N'/2), r = k mod (N'/2); even blocks use
//     k' = r, odd blocks k' = N'/2 - r (r = 0 is not reconstructable).
package comca_ref_pkg;
  import comca_pkg::*;

  function automatic longint floor_div(longint a, longint b);
    return longint'($floor(real'(a) / real'(b)));
  endfunction

  // interpolation indices of the source's table for a channel address k
  function automatic void interp_idx(int k, int I, output int k0, output int k1,
                                     output int kp);
    k0 = 2 * I * int'($floor(real'(k) / real'(2 * I) + 0.5));
    k1 = 2 * I * int'($floor(real'(k) / real'(2 * I))) + I;
    kp = (I - (k % (2 * I))) < 0 ? -(I - (k % (2 * I))) : (I - (k % (2 * I)));
  endfunction

  function automatic longint lerp(longint a, longint b, int kp, int I);
    return floor_div(longint'(kp) * a + longint'(I - kp) * b, I);
  endfunction

  function automatic longint round_sat32(longint s);
    longint r;
    r = floor_div(s + (longint'(1) << (COEF_FRAC - 1)), longint'(1) << COEF_FRAC);
    if (r > 64'sd2147483647)  r = 64'sd2147483647;
    if (r < -64'sd2147483648) r = -64'sd2147483648;
    return r;
  endfunction

  // channel k -> (block, k', valid)
  function automatic void place(int k, int nprime, output int b, output int kprime,
                                output bit ok);
    int half, r;
    half = nprime / 2;
    b = k / half;
    r = k % half;
    if (b % 2 == 0) begin
      kprime = r;
      ok = 1'b1;
    end else begin
      kprime = (r == 0) ? 0 : half - r;
      ok = (r != 0);
    end
  endfunction

  function automatic bin_t rand_bin(int bits);
    bin_t x;
    longint lim;
    lim = longint'(1) << (bits - 1);
    x.re = DATA_W'(longint'($urandom_range(0, 32'(2 * lim - 1))) - lim);
    x.im = DATA_W'(longint'($urandom_range(0, 32'(2 * lim - 1))) - lim);
    return x;
  endfunction

  function automatic coef_t rand_coef();
    coef_t c;
    c.re = COEF_W'($urandom);
    c.im = COEF_W'($urandom);
    return c;
  endfunction
endpackage
