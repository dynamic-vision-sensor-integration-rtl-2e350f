// dvs2sm_ref_pkg: reference arithmetic for the testbenches.
//
// Plain integer models of the normalisation, written from the formulas
// (Eq. 2 and the NORM routine) rather than from the circuit: the mean by
// integer division, the variance by a direct sum, the square root by binary
// search, and the NORM result with ordinary division and clipping.
// Fixed-point values are raw integers with 8 fractional bits.
package dvs2sm_ref_pkg;

  localparam int NPIX = 4096;

  function automatic longint wrap24(longint v);
    longint m = v & 64'hFF_FFFF;
    return (m >= 64'h80_0000) ? m - 64'h100_0000 : m;
  endfunction

  function automatic longint floor_div(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  // One NORM block: sigma in Q16.8, int16 pixel -> Q8.8 result (16 bits).
  function automatic int ref_norm(int sigma_raw, int pixel, bit rectify);
    longint sig, half, rng, num, f;
    sig = (sigma_raw < 0) ? 0 : longint'(sigma_raw);        // 0.1/255 is 0 in Q16.8
    if (rectify) begin half = 0;             rng = wrap24(3 * sig);  end
    else         begin half = wrap24(3*sig); rng = wrap24(2 * half); end
    if (pixel == 0) return 127 * 256;               // (127/255 in Q16.8) * 256
    num = wrap24(longint'(pixel) * 256 + half);
    if (rng <= 0) return (num > 0) ? 255 * 256 : 0;
    f = floor_div(num * 256, rng);
    if (f > 256) f = 256;
    if (f < 0)   f = 0;
    return int'(f * 255);
  endfunction

  function automatic longint unsigned isqrt_ref(longint unsigned x);
    longint unsigned lo = 0, hi = 64'h1_0000_0000, mid;
    while (hi - lo > 1) begin
      mid = (lo + hi) / 2;
      if (mid * mid <= x) lo = mid; else hi = mid;
    end
    return lo;
  endfunction

  // Mean, variance (16 fractional bits) and sigma of a histogram.
  function automatic void ref_stats(input int h[NPIX], input bit all_pixels,
                                    output int mean_raw, output longint unsigned var_q16,
                                    output int sigma_raw);
    longint s = 0, c = 0, m;
    longint unsigned acc = 0;
    for (int i = 0; i < NPIX; i++) begin
      s += longint'(h[i]);
      if (h[i] != 0) c++;
    end
    if (c == 0) m = 0;
    else begin
      m = ((s < 0) ? -s : s) * 256 / c;
      if (m > 64'h7F_FFFF) m = 64'h7F_FFFF;
      if (s < 0) m = -m;
    end
    mean_raw = int'(m);
    for (int i = 0; i < NPIX; i++) begin
      longint d = longint'(h[i]) * 256 - m;
      if (all_pixels || h[i] != 0) acc += longint'(d * d);
    end
    var_q16 = (c == 0) ? '1 : acc / longint'(c);
    sigma_raw = int'((isqrt_ref(var_q16) > 64'h7F_FFFF) ? 64'h7F_FFFF : isqrt_ref(var_q16));
  endfunction

endpackage
