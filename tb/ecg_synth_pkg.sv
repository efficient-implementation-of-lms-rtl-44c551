// ecg_synth_pkg: synthetic two-lead test signals for the end-to-end tests.
//
// At 1 kHz, maternal beats are Gaussian QRS pulses (sigma 10 samples) every
// MAT_RR = 750 samples (80 bpm) starting at MAT_OFF; fetal beats are sharper
// (sigma 4) pulses every rr_f samples starting at FET_OFF. The thoracic lead
// carries only the maternal beat (times 1.2) and a 0.2 Hz baseline wander;
// the abdominal lead carries the maternal beat, the fetal beat at 0.6 of the
// maternal height, a 0.3 Hz baseline wander and a 135 Hz tone. Both leads also
// share a broadband maternal noise (uniform, width NOISE = 5, from a fixed integer
// hash of k, so both leads and every test see the same values). Without such a
// common broadband part the sparse pulse trains leave the LMS-AF badly
// conditioned and it converges far too slowly. All values are scaled by amp.
package ecg_synth_pkg;

  localparam int MAT_RR  = 750;
  localparam int MAT_OFF = 80;
  localparam int FET_OFF = 200;
  localparam real NOISE  = 5.0;

  function automatic real gauss(input int d, input real s);
    return $exp(-0.5 * (real'(d) / s) * (real'(d) / s));
  endfunction

  function automatic real maternal(input int k);
    real v;
    int b;
    v = 0.0;
    b = (k - MAT_OFF) / MAT_RR;
    for (int i = b - 1; i <= b + 1; i++) if (i >= 0) v += gauss(k - (MAT_OFF + i * MAT_RR), 10.0);
    return v;
  endfunction

  function automatic real fetal(input int k, input int rr_f);
    real v;
    int b;
    v = 0.0;
    b = (k - FET_OFF) / rr_f;
    for (int i = b - 1; i <= b + 1; i++) if (i >= 0) v += gauss(k - (FET_OFF + i * rr_f), 4.0);
    return v;
  endfunction

  // deterministic noise in [-0.5, 0.5)
  function automatic real shared_noise(input int k);
    logic [31:0] h;
    h = 32'(k) * 32'd2654435761;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return real'(h[23:8]) / 65536.0 - 0.5;
  endfunction

  function automatic real abdominal(input int k, input int rr_f, input real amp);
    real t;
    t = real'(k) / 1000.0;
    return amp * (maternal(k) + 0.6 * fetal(k, rr_f) + 0.3 * $sin(2.0 * 3.14159265 * 0.3 * t)
                  + 0.02 * $sin(2.0 * 3.14159265 * 135.2 * t)
                  + NOISE * shared_noise(k));
  endfunction

  function automatic real thoracic(input int k, input real amp);
    real t;
    t = real'(k) / 1000.0;
    return amp * (1.2 * (maternal(k) + NOISE * shared_noise(k))
                  + 0.2 * $sin(2.0 * 3.14159265 * 0.2 * t));
  endfunction

  // true location of fetal beat b
  function automatic int fetal_at(input int b, input int rr_f);
    return FET_OFF + b * rr_f;
  endfunction

endpackage
