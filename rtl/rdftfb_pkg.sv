// rdftfb_pkg -- shared constants and elaboration-time functions of the
// reconfigurable DFT filter bank (RDFTFB).
//
// The filter bank needs two fixed tables, both computed here at elaboration
// time instead of being stored as data:
//   * proto_coef(): the prototype lowpass coefficients h[0..L-1].  The paper
//     specifies the prototype (bandwidth 1/N of the half sampling rate,
//     transition width 0.1, 0.04 dB passband ripple, 50 dB stopband) but
//     designs it with an equiripple tool and prints no coefficients.  This
//     design uses a Kaiser-window design to the same specification instead:
//       h[n] = round( 2^(COEF_W-1) * sin(wc*m)/(pi*m) * I0(beta*sqrt(1-(m/c)^2)) / I0(beta) ),
//       m = n - c,  c = (L-1)/2,  wc = pi/N,  beta = 0.1102*(A-8.7), A = 53 dB.
//     With L = 65 the 16-bit coefficients keep 0.04 dB ripple up to 0.078 and
//     more than 50 dB attenuation from 0.174 (frequencies relative to fs/2).
//   * twiddle_re()/twiddle_im(): the IDFT kernel exp(+j*2*pi*k*i/N) of Eq. 1,
//     as signed fixed-point numbers with TW_FRAC fractional bits, rounded.
// Everything else (default sizes of the 8-subband, M = 1..5 configuration
// the paper evaluates) is a plain localparam.
package rdftfb_pkg;

  // Default configuration: 8 subbands, CDM factor 1..5 (paper, Sec. IV).
  localparam int unsigned N_SUB    = 8;
  localparam int unsigned M_MAX_DEF = 5;
  // Prototype length: not given by the paper, chosen as the shortest odd
  // Kaiser-window length meeting its specification.
  localparam int unsigned L_PROTO  = 65;
  // Word lengths: not given by the paper (own choice).
  localparam int unsigned DATA_W_DEF = 16;  // input sample, two's complement
  localparam int unsigned COEF_W_DEF = 16;  // prototype coefficient, Q1.(COEF_W-1)
  localparam int unsigned TW_W_DEF   = 16;  // IDFT twiddle, TW_W-2 fractional bits

  localparam real PI = 3.14159265358979323846;

  // Modified Bessel function of the first kind, order 0 (power series).
  function automatic real bessel_i0(input real x);
    real s, t;
    s = 1.0;
    t = 1.0;
    for (int k = 1; k < 40; k++) begin
      t = t * (x / 2.0) / real'(k);
      s = s + t * t;
    end
    return s;
  endfunction

  // Round a real to the nearest integer (halves away from zero).
  function automatic longint round_real(input real x);
    if (x >= 0.0) return longint'($floor(x + 0.5));
    else          return -longint'($floor(-x + 0.5));
  endfunction

  // Prototype coefficient h[n], n = 0..L-1, scaled by 2^(W-1).
  function automatic int proto_coef(input int n, input int L, input int N, input int W);
    real c, m, wc, a, beta, s, win;
    c    = real'(L - 1) / 2.0;
    m    = real'(n) - c;
    wc   = PI / real'(N);
    a    = 53.0;
    beta = 0.1102 * (a - 8.7);
    if (m == 0.0) s = wc / PI;
    else          s = $sin(wc * m) / (PI * m);
    win  = bessel_i0(beta * $sqrt(1.0 - (m / c) * (m / c))) / bessel_i0(beta);
    return int'(round_real(s * win * (2.0 ** (W - 1))));
  endfunction

  // Real and imaginary part of exp(+j*2*pi*k*i/N), scaled by 2^(W-2)
  // (so that +1.0 and -1.0 are exact in W bits).
  function automatic int twiddle_re(input int k, input int i, input int N, input int W);
    return int'(round_real($cos(2.0 * PI * real'((k * i) % N) / real'(N)) * (2.0 ** (W - 2))));
  endfunction

  function automatic int twiddle_im(input int k, input int i, input int N, input int W);
    return int'(round_real($sin(2.0 * PI * real'((k * i) % N) / real'(N)) * (2.0 ** (W - 2))));
  endfunction

  // Bits needed to hold values 0..x-1 (at least 1).
  function automatic int unsigned clog2_min1(input int unsigned x);
    return (x <= 2) ? 1 : $clog2(x);
  endfunction

endpackage
