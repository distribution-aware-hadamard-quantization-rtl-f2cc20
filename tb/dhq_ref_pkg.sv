// dhq_ref_pkg: bit-exact reference arithmetic for the testbenches, written
// from the design's documented formulas with plain integer and real maths
// (no lookup tables shared with the RTL):
//   sine_ref  : round-half-away(2047 * sin(2*pi*phase/1024)),
//               phase = ((z*mul) >>> shift) mod 1024
//   quant_ref : clamp(floor(x*mul/2^shift + 1/2), -128, 127)
//   had_ref   : y_i = sum_j (-1)^popcount(i & j) * x_j
//   coord_ref : floor((2c+1)*128/size) - 128
package dhq_ref_pkg;

  function automatic int sine_ref(longint z, int mul, int shift, int sin_w = 12);
    longint sc;
    int     ph;
    real    v, amp;
    sc  = (z * longint'(mul)) >>> shift;
    ph  = int'(sc & 64'd1023);
    amp = real'((1 << (sin_w - 1)) - 1);
    v   = amp * $sin(2.0 * 3.14159265358979323846 * real'(ph) / 1024.0);
    if (v >= 0.0) return int'($floor(v + 0.5));
    else          return -int'($floor(-v + 0.5));
  endfunction

  function automatic int quant_ref(longint x, int mul, int shift, int abits, output bit sat);
    real    r;
    longint q;
    longint qmax, qmin;
    qmax = (longint'(1) << (abits - 1)) - 1;
    qmin = -(longint'(1) << (abits - 1));
    r = real'(x) * real'(mul) / (2.0 ** shift);
    q = longint'($floor(r + 0.5));
    sat = 1'b0;
    if (q > qmax) begin q = qmax; sat = 1'b1; end
    if (q < qmin) begin q = qmin; sat = 1'b1; end
    return int'(q);
  endfunction

  function automatic int had_sign(int i, int j);
    return ($countones(i & j) % 2 == 0) ? 1 : -1;
  endfunction

  function automatic int coord_ref(int c, int size, int abits = 8);
    int half;
    half = 1 << (abits - 1);
    return ((2 * c + 1) * half) / size - half;
  endfunction

endpackage
