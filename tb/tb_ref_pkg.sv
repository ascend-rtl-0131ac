// tb_ref_pkg -- reference arithmetic for the testbenches.
//
// Works on the values carried by thermometer streams (number of ones minus
// half the length), with real-number rounding, so that it shares nothing
// with the threshold wiring computed inside the design. Also holds helpers
// to build and inspect thermometer streams (ones packed at the top).
package tb_ref_pkg;

  // round half up: floor(num/den + 1/2)
  function automatic int rnd(input int num, input int den);
    return $rtoi($floor(real'(num) / real'(den) + 0.5));
  endfunction

  function automatic int clip(input int v, input int h);
    return (v > h) ? h : ((v < -h) ? -h : v);
  endfunction

  // L-bit thermometer stream with c ones at the top
  function automatic logic [4095:0] thermo(input int c, input int L);
    logic [4095:0] r;
    r = '0;
    for (int b = 0; b < c; b++) r[L - 1 - b] = 1'b1;
    return r;
  endfunction

  // number of ones, or -1 when the pattern is not a thermometer stream
  function automatic int thermo_count(input logic [4095:0] v, input int L);
    int c;
    c = 0;
    for (int b = 0; b < L; b++) c += int'(v[b]);
    return (v == thermo(c, L)) ? c : -1;
  endfunction

  // one softmax element update, in values:
  //   z = x*y ; y' = clip(y + round(z*UPZ/DNZ) + round(round(-y*s/S2)*UPP/DNP))
  function automatic int unit_z(input int vx, input int vy);
    return vx * vy;
  endfunction

  function automatic int unit_y(input int vx, input int vy, input int vsum,
                                input int by, input int s1, input int s2, input int k,
                                input int ax_num, input int ax_den, input int ay_den);
    int zk, ps, pk;
    zk = rnd(vx * vy * ax_num, ax_den * k);
    ps = rnd(-(vy * vsum), s2);
    pk = rnd(ps * ax_num * s1 * s2, ax_den * ay_den * k);
    return clip(vy + zk + pk, by / 2);
  endfunction

  // same, before saturation (to see whether clipping happened)
  function automatic int unit_y_raw(input int vx, input int vy, input int vsum,
                                    input int s1, input int s2, input int k,
                                    input int ax_num, input int ax_den, input int ay_den);
    int zk, ps, pk;
    zk = rnd(vx * vy * ax_num, ax_den * k);
    ps = rnd(-(vy * vsum), s2);
    pk = rnd(ps * ax_num * s1 * s2, ax_den * ay_den * k);
    return vy + zk + pk;
  endfunction

  function automatic real gelu_ref(input real x);
    real u;
    u = 0.7978845608 * (x + 0.044715 * x * x * x);
    return 0.5 * x * (1.0 + (1.0 - 2.0 / ($exp(2.0 * u) + 1.0)));
  endfunction

endpackage
