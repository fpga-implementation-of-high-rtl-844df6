// tb_ref_pkg -- reference data shared by the filter-bank testbenches.
//
// REF_H holds the 65 prototype coefficients of the default configuration
// (Kaiser window, beta = 0.1102*(53-8.7), cut-off pi/8, scaled by 2^15 and
// rounded), computed independently of the RTL so that the testbenches can
// also check the elaboration-time coefficient function.  ref_tw_re/_im give
// exp(+j*2*pi*k*i/N) scaled by 2^(W-2), rounded to nearest.
package tb_ref_pkg;

  localparam int REF_L = 65;
  localparam int REF_H [REF_L] = '{
      0,    -7,   -19,   -32,   -45,   -53,   -50,   -33,     0,    48,
    105,   161,   204,   220,   195,   122,     0,  -161,  -341,  -511,
   -634,  -673,  -594,  -372,     0,   513,  1138,  1827,  2520,  3151,
   3656,  3983,  4096,  3983,  3656,  3151,  2520,  1827,  1138,   513,
      0,  -372,  -594,  -673,  -634,  -511,  -341,  -161,     0,   122,
    195,   220,   204,   161,   105,    48,     0,   -33,   -50,   -53,
    -45,   -32,   -19,    -7,     0};

  function automatic longint rnd(input real x);
    return (x >= 0.0) ? longint'($floor(x + 0.5)) : -longint'($floor(-x + 0.5));
  endfunction

  function automatic longint ref_tw_re(input int k, input int i, input int n, input int w);
    return rnd($cos(2.0 * 3.14159265358979323846 * real'((k * i) % n) / real'(n)) * (2.0 ** (w - 2)));
  endfunction

  function automatic longint ref_tw_im(input int k, input int i, input int n, input int w);
    return rnd($sin(2.0 * 3.14159265358979323846 * real'((k * i) % n) / real'(n)) * (2.0 ** (w - 2)));
  endfunction

endpackage
