// sift_ref_pkg: testbench-side reference model and data generator for the
// SIFT matching core. It computes, from two descriptors, the angle the core
// must produce bit for bit:
//   dp    = sum of element products (exact integer), saturated to 32 bits
//   x     = dp as Q1.23, clamped at 1.0
//   v     = floor(sqrt(1 - x^2)) in Q1.23, found with a real-valued estimate
//           corrected by integer squaring (not the digit-by-digit circuit)
//   theta = 11-step vectoring CORDIC of (x, v), rounded to Q1.15 radians
// and also the real-valued arccos for a tolerance check. It also makes
// random unit-length descriptors with Q1.15 elements.
package sift_ref_pkg;
  import sift_pkg::*;

  typedef logic [DESC_W-1:0] desc_t;

  function automatic longint unsigned ref_dot(input desc_t a, input desc_t b);
    longint unsigned s = 0;
    for (int i = 0; i < N_ELEM; i++)
      s += longint'(a[i*ELEM_W +: ELEM_W]) * longint'(b[i*ELEM_W +: ELEM_W]);
    return (s > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : s;
  endfunction

  function automatic longint unsigned isqrt(input longint unsigned x);
    longint unsigned r;
    r = longint'($sqrt(real'(x)));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  function automatic logic [15:0] ref_angle(input longint unsigned dp);
    localparam int ATAN [11] = '{102944, 60771, 32110, 16299, 8181, 4095, 2048, 1024, 512, 256, 128};
    longint signed x, y, z, xn, yn, zr;
    longint unsigned xr, v;
    xr = (dp >= 64'h4000_0000) ? 64'h80_0000 : ((dp >> 7) & 64'hFF_FFFF);
    v  = isqrt((64'd1 << 46) - xr * xr);
    x = longint'(xr) * 4;
    y = longint'(v) * 4;
    z = 0;
    for (int i = 0; i < 11; i++) begin
      if (y >= 0) begin xn = x + (y >>> i); yn = y - (x >>> i); z += ATAN[i]; end
      else        begin xn = x - (y >>> i); yn = y + (x >>> i); z -= ATAN[i]; end
      x = xn; y = yn;
    end
    zr = (z + 2) >>> 2;
    if (zr < 0) zr = 0;
    if (zr > 65535) zr = 65535;
    return 16'(zr);
  endfunction

  function automatic real real_angle(input desc_t a, input desc_t b);
    real s = 0.0;
    for (int i = 0; i < N_ELEM; i++)
      s += (real'(a[i*ELEM_W +: ELEM_W]) / 32768.0) * (real'(b[i*ELEM_W +: ELEM_W]) / 32768.0);
    if (s > 1.0) s = 1.0;
    return $acos(s);
  endfunction

  // Unit-length descriptor from raw non-negative weights, quantised to Q1.15.
  function automatic desc_t normalise(input real w [N_ELEM], input logic [31:0] xy);
    desc_t d;
    real n = 0.0;
    foreach (w[i]) n += w[i] * w[i];
    n = $sqrt(n);
    for (int i = 0; i < N_ELEM; i++) d[i*ELEM_W +: ELEM_W] = 16'($rtoi(w[i] / n * 32768.0));
    d[VEC_W +: COORD_W] = xy;
    return d;
  endfunction

  // A random SIFT-like descriptor: sparse-ish non-negative histogram.
  function automatic desc_t random_desc(input logic [31:0] xy);
    real w [N_ELEM];
    foreach (w[i]) w[i] = (($urandom % 3) == 0) ? 0.0 : real'($urandom % 256);
    w[$urandom % N_ELEM] = 255.0;
    return normalise(w, xy);
  endfunction

  // A noisy copy of descriptor d (a true correspondence).
  function automatic desc_t noisy_copy(input desc_t d, input logic [31:0] xy, input int noise);
    real w [N_ELEM];
    foreach (w[i]) w[i] = real'(d[i*ELEM_W +: ELEM_W]) + real'($urandom % (noise + 1));
    return normalise(w, xy);
  endfunction
endpackage
