// dyrecmul_ref_pkg -- arithmetic reference model for the testbenches.
//
// Written from the equations of the multiplier, not from its tables:
//   |x| (clamped to 127) = m * 2^e + dropped bits, e = 0, 1, 2 for |x| < 32,
//   < 64, >= 64; zm = floor((m * |w| + 64) / 128); |z| = zm * 2^e;
//   z = -|z| when exactly one operand is negative.
package dyrecmul_ref_pkg;

  function automatic int ref_exp(input int x);
    int a;
    a = (x < 0) ? -x : x;
    if (a > 127) a = 127;
    return (a >= 64) ? 2 : (a >= 32) ? 1 : 0;
  endfunction

  function automatic int ref_mnt(input int x);
    int a;
    a = (x < 0) ? -x : x;
    if (a > 127) a = 127;
    return a / (2 ** ref_exp(x));
  endfunction

  // rounded mantissa product for a 5-bit mantissa and a weight magnitude
  function automatic int ref_zmnt(input int m, input int wmag);
    return (m * wmag + 64) / 128;
  endfunction

  function automatic int ref_mul(input int x, input int w);
    int wm, zm, zmag;
    wm   = (w < 0) ? -w : w;
    zm   = ref_zmnt(ref_mnt(x), wm);
    zmag = zm * (2 ** ref_exp(x));
    return ((x < 0) != (w < 0)) ? -zmag : zmag;
  endfunction

  // bit n (0 = first sent) of the serial load of weight w into one multiplier:
  // sign of w, then for product bits 0..4 the 32 entries 31..0 of its table
  function automatic bit ref_stream_bit(input int w, input int n);
    int wm, b, a;
    wm = (w < 0) ? -w : w;
    if (n == 0) return (w < 0);
    b = (n - 1) / 32;
    a = 31 - ((n - 1) % 32);
    return ((ref_zmnt(a, wm) >> b) & 1) != 0;
  endfunction

endpackage
