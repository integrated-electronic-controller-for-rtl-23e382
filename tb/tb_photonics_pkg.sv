// tb_photonics_pkg: behavioural models used by the end-to-end testbenches,
// in real arithmetic.
//
// Heater: 12-bit DAC, 0..6 V across 400 ohm, phase shift pi per 20 mW
// (about 4.5*pi at full scale), instantaneous (the real heaters settle in
// about 10 us, one sample period).
// MZI: input field e1 passes the input heater (phi1), a 50:50 coupler
// [1 j; j 1]/sqrt(2), the arm heater (phi2) on arm 1, a second coupler.
// Output 1 continues through the mesh; output 2 (drop) goes to the monitor
// photodiode (1 A/W).
// Front end and ADC: six gains, full scale 1 mA at step 0 and 4x smaller at
// each step up; code = min(1023, floor(1023 * I / I_fs)).
package tb_photonics_pkg;

  localparam real PI = 3.14159265358979;

  function automatic real heater_phase(input int dac);
    real v, p;
    v = 6.0 * real'(dac) / 4095.0;
    p = v * v / 400.0;            // W
    return PI * p / 20.0e-3;
  endfunction

  // e1 = (r1, i1), e2 = (r2, i2) -> output field (or, oi) and drop power pd
  function automatic void mzi(input real r1, input real i1, input real r2, input real i2,
                     input int dac1, input int dac2,
                     output real or_, output real oi, output real pd);
    real p1, p2, c, s, u1r, u1i, v1r, v1i, v2r, v2i, w1r, w1i, o2r, o2i, k;
    k = 1.0 / $sqrt(2.0);
    p1 = heater_phase(dac1);
    p2 = heater_phase(dac2);
    c = $cos(p1); s = $sin(p1);
    u1r = r1 * c - i1 * s;  u1i = r1 * s + i1 * c;
    // v1 = (u1 + j e2)/sqrt2 ; v2 = (j u1 + e2)/sqrt2
    v1r = k * (u1r - i2);   v1i = k * (u1i + r2);
    v2r = k * (r2 - u1i);   v2i = k * (i2 + u1r);
    c = $cos(p2); s = $sin(p2);
    w1r = v1r * c - v1i * s; w1i = v1r * s + v1i * c;
    // o1 = (w1 + j v2)/sqrt2 ; o2 = (j w1 + v2)/sqrt2
    or_ = k * (w1r - v2i);  oi = k * (w1i + v2r);
    o2r = k * (v2r - w1i);  o2i = k * (v2i + w1r);
    pd  = o2r * o2r + o2i * o2i;
  endfunction

  function automatic int adc_code(input real i_pd, input int gain);
    real fs, c;
    fs = 1.0e-3 / (4.0 ** gain);
    c = 1023.0 * i_pd / fs;
    if (c > 1023.0) c = 1023.0;
    if (c < 0.0) c = 0.0;
    return int'($floor(c));
  endfunction

endpackage
