// tb_signal_pkg: analog input, ADC mismatch model and reconstruction filter
// design for the end-to-end testbenches.
//
// The input is a sum of sinusoids or, with pulse_mode set, a train of
// PMT-like pulses: a raised-cosine leading edge followed by an exponential
// tail, sized for a 10-90 % rise time of 3.10 ns and a 90-10 % fall time of
// 9.90 ns (0.5-0.5cos rises 10-90 % in 0.5903 of its length; an exponential
// falls 90-10 % in ln(9) time constants). ADC channel c (sampling order ADC1_core1,
// ADC2_core1, ADC1_core2, ADC2_core2) samples global instant n at time
// (n + skew[c]) * 1 ns and returns round(gain[c] * x + offset[c]) clipped to
// 12 bits. Every sample produced is recorded with its channel so that a
// testbench can check the interleaving order and compute reference outputs.
//
// design_filters() computes the 16 reconstruction filters of the
// perfect-reconstruction method for the 16-lane view of the 4-channel ADC:
//   f_m[j] = (M/pi) * prod_i sin((j-D-d_i)*pi/M)
//            / ((j-D-d_m) * prod_{i!=m} sin((d_m-d_i)*pi/M)) * w(j-D-d_m),
// M = 16, d_i = i + skew[i mod 4], for j in [D+m-L, D+m+L), with a Kaiser
// window w of shape beta over [-L, L], quantized to signed Q2.16.
package tb_signal_pkg;

  localparam int MN = int'(wfd_pkg::MN), L = int'(wfd_pkg::L), D = int'(wfd_pkg::D);

  real   amp  [4];
  real   freq [4];            // in units of the 1 GHz sample rate
  real   gain [4];
  real   offs [4];            // LSB
  real   skew [4];            // sample periods
  real   beta = 8.0;
  bit    pulse_mode = 1'b0;
  real   pulse_period;        // ns
  real   pulse_base;          // LSB
  localparam real TRISE = 3.10 / 0.5903, TAU = 9.90 / 2.1972;  // ns
  time   t0;                  // instant of global sample 0
  int    produced [int];      // code of global sample n
  int    who      [int];      // channel that took sample n
  int    ftab [MN][2*L];      // quantized filters, ftab[m][j-(D+m-L)]

  function automatic real analog(input real t);
    real s, tt;
    s = 0.0;
    if (pulse_mode) begin
      tt = t - pulse_period * $floor(t / pulse_period);
      if (tt < TRISE) s = 0.5 - 0.5 * $cos(3.14159265358979 * tt / TRISE);
      else            s = $exp(-(tt - TRISE) / TAU);
      return pulse_base + amp[0] * s;
    end
    for (int k = 0; k < 4; k++) s += amp[k] * $sin(2.0 * 3.14159265358979 * freq[k] * t);
    return s;
  endfunction

  // Called by the ADC model when channel c samples at simulation time t.
  function automatic int sample(input int c, input time t);
    int n, code;
    real v;
    n = int'((t - t0) / 1000);
    v = gain[c] * analog(real'(n) + skew[c]) + offs[c];
    code = int'($floor(v + 0.5));
    if (code > 2047) code = 2047;
    if (code < -2048) code = -2048;
    produced[n] = code;
    who[n] = c;
    return code;
  endfunction

  function automatic real bessel_i0(input real x);
    real s, term;
    s = 1.0;
    term = 1.0;
    for (int k = 1; k < 40; k++) begin
      term = term * (x / (2.0 * k)) * (x / (2.0 * k));
      s += term;
    end
    return s;
  endfunction

  function automatic void design_filters();
    real pi, dm, u, num, den, f, w;
    real di [MN];
    pi = 3.14159265358979;
    for (int i = 0; i < MN; i++) di[i] = real'(i) + skew[i % 4];
    for (int m = 0; m < MN; m++) begin
      dm = di[m];
      den = 1.0;
      for (int i = 0; i < MN; i++) if (i != m) den *= $sin((dm - di[i]) * pi / MN);
      for (int k = 0; k < 2*L; k++) begin
        int j;
        j = D + m - L + k;
        u = real'(j) - D - dm;
        num = 1.0;
        for (int i = 0; i < MN; i++)
          if (i != m) num *= $sin((real'(j) - D - di[i]) * pi / MN);
        // factor of channel m itself: sin(u*pi/M)/u, limit pi/M
        if (u > -1e-9 && u < 1e-9) num *= pi / MN;
        else num *= $sin(u * pi / MN) / u;
        f = (MN / pi) * num / den;
        w = (u * u <= real'(L * L)) ? bessel_i0(beta * $sqrt(1.0 - (u / L) * (u / L))) / bessel_i0(beta)
                                    : 0.0;
        ftab[m][k] = int'($floor(f * w * 65536.0 + 0.5));
      end
    end
  endfunction

endpackage
