// mcap_tb_pkg: helpers shared by the testbenches: CAP filter coefficients,
// scaling shifts, a reference QAM mapping and a reference PRBS-15.
//
// Coefficients: with m sub-bands, N = m*SPS1 samples per band symbol and
// L = SPAN*N taps, the pulse of band b is
//   p_b(n)  = A * g(n) * cos(2*pi*f_b*u),  p'_b(n) = A * g(n) * sin(2*pi*f_b*u)
//   u = n - (L-1)/2,   g = square-root raised cosine, roll-off BETA = 0.15,
//   scaled to unit energy, A chosen for a peak coefficient of 30000.
// The m bands split the aggregate bandwidth (1+BETA)*Rs evenly above an
// offset F_OFF (500 kHz at Rs = 5.65 MBd): band centre
//   f_b / fs = (F_OFF/Rs + (b + 0.5) * (1+BETA) / m) / SPS1.
package mcap_tb_pkg;
  import mcap_pkg::*;

  localparam real PI    = 3.14159265358979;
  localparam real BETA  = 0.15;
  localparam real RS    = 5.65e6;
  localparam real F_OFF = 0.5e6;

  function automatic real srrc(real t);  // t in symbol periods
    real num, den;
    if (t < 1e-9 && t > -1e-9) return 1.0 - BETA + 4.0 * BETA / PI;
    if ((4.0 * BETA * t - 1.0) ** 2 < 1e-12 || (4.0 * BETA * t + 1.0) ** 2 < 1e-12)
      return BETA / $sqrt(2.0) * ((1.0 + 2.0/PI) * $sin(PI/(4.0*BETA))
                                + (1.0 - 2.0/PI) * $cos(PI/(4.0*BETA)));
    num = $sin(PI * t * (1.0 - BETA)) + 4.0 * BETA * t * $cos(PI * t * (1.0 + BETA));
    den = PI * t * (1.0 - (4.0 * BETA * t) ** 2);
    return num / den;
  endfunction

  // Amplitude A that gives a unit-energy g a peak coefficient of 30000.
  function automatic real pulse_amp(int m);
    int  n_s, l;
    real e, pk, g;
    n_s = m * SPS1;
    l   = SPAN * n_s;
    e = 0.0;
    pk = 0.0;
    for (int n = 0; n < l; n++) begin
      g = srrc((real'(n) - real'(l - 1) / 2.0) / real'(n_s));
      e += g * g;
      if (g > pk) pk = g;
    end
    return 30000.0 / (pk / $sqrt(e)) ;
  endfunction

  function automatic int coef_value(int m, int b, int quad, int n);
    int  n_s, l;
    real e, g, u, fb, a;
    n_s = m * SPS1;
    l   = SPAN * n_s;
    e = 0.0;
    for (int k = 0; k < l; k++) begin
      g = srrc((real'(k) - real'(l - 1) / 2.0) / real'(n_s));
      e += g * g;
    end
    a  = pulse_amp(m);
    u  = real'(n) - real'(l - 1) / 2.0;
    g  = srrc(u / real'(n_s)) / $sqrt(e);
    fb = (F_OFF / RS + (real'(b) + 0.5) * (1.0 + BETA) / real'(m)) / real'(SPS1);
    if (quad == 0) return $rtoi(a * g * $cos(2.0 * PI * fb * u) + ((a * g * $cos(2.0 * PI * fb * u)) >= 0 ? 0.5 : -0.5));
    else           return $rtoi(a * g * $sin(2.0 * PI * fb * u) + ((a * g * $sin(2.0 * PI * fb * u)) >= 0 ? 0.5 : -0.5));
  endfunction

  function automatic int log2r(real v);
    return $rtoi($ln(v) / $ln(2.0) + 0.5);
  endfunction

  // Mean square of one axis for the constellation: (S^2 - 1) / 3.
  function automatic real axis_ms(qam_t q);
    int s;
    s = 1 << (bits_per_sym(q) / 2);
    return real'(s * s - 1) / 3.0;
  endfunction

  // Transmit shift for an RMS of about 3000 at the DAC.
  function automatic int tx_shift_for(int m, qam_t q);
    real a;
    a = pulse_amp(m);
    return log2r($sqrt(axis_ms(q)) * a / $sqrt(real'(SPS1)) / 3000.0);
  endfunction

  // Receive shift that puts a level-1 symbol near 2048 for channel gain g.
  function automatic int rx_shift_for(int m, qam_t q, real g);
    real a;
    a = pulse_amp(m);
    return log2r(a * a / 2.0 * g / real'(1 << tx_shift_for(m, q)) / 2048.0);
  endfunction

  function automatic mcap_cfg_t make_cfg(int m, qam_t q, real g);
    mcap_cfg_t c;
    c.n_bands  = 4'(m);
    c.qam      = q;
    c.tx_shift = 5'(tx_shift_for(m, q));
    c.rx_shift = 6'(rx_shift_for(m, q, g));
    return c;
  endfunction

  // Reference axis level of a Gray index g with h bits.
  function automatic int ref_level(int g, int h);
    int b;
    b = 0;
    for (int k = h - 1; k >= 0; k--) b = (b << 1) | (((b & 1) ^ ((g >> k) & 1)));
    return 2 * b - ((1 << h) - 1);
  endfunction

  // Reference PRBS-15 step: returns the next bit and updates the state.
  function automatic bit prbs_step(ref logic [14:0] s);
    bit nb;
    nb = s[14] ^ s[13];
    s  = {s[13:0], nb};
    return nb;
  endfunction

endpackage
