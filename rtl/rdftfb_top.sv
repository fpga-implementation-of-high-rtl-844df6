// rdftfb_top -- high-speed reconfigurable DFT filter bank (RDFTFB).
//
// A real input stream is split into N uniformly spaced complex subbands;
// subband k is centred at 2*pi*k/N and its bandwidth is M times that of a
// fixed-coefficient prototype lowpass filter.  M (1..M_MAX) is changed at
// run time without touching any coefficient: coefficient decimation keeps
// every M-th prototype coefficient and packs them together, which widens
// the filter's passband M times.
//
//   x --> cdm_polyphase_filter (shared multipliers, N polyphase chains) --v[N]-->
//         idft_modulator (N-point IDFT, Eq. 1) --> y_re[N] + j*y_im[N]
//   m_in --> rdftfb_ctrl --> m_sel (sel_M), out_valid
//
// There is no rate change: one input sample per enabled clock gives one
// output sample in every subband.  The whole datapath is pipelined so that
// no register-to-register path holds more than one multiplier, or one
// multiplexer and one adder; this is the paper's high-speed form.
//
// Interface:  in_valid is the sample strobe and clock enable of the whole
//             datapath (while it is low everything holds).  x is a signed
//             DATA_W-bit sample.  m_in is the requested decimation factor.
//             y_re[k], y_im[k] are full-precision outputs scaled by
//             2^(COEF_W-1) * 2^(TW_W-2).  out_valid marks a new output that
//             was produced entirely with the current M.
// Timing:     the term h'[0]*x(t) of the sample accepted at enabled edge t
//             reaches y at enabled edge t + LATENCY, LATENCY = 4 + ceil(log2 N)
//             (7 for N = 8); x(t-j) enters with coefficient h'[j].
// The default parameters are the 8-subband, M = 1..5 configuration the paper
// evaluates; L, the word lengths and the prototype coefficients are this
// design's choice (the paper does not give them).
module rdftfb_top
  import rdftfb_pkg::*;
#(
  parameter int unsigned N      = N_SUB,
  parameter int unsigned L      = L_PROTO,
  parameter int unsigned M_MAX  = M_MAX_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned COEF_W = COEF_W_DEF,
  parameter int unsigned TW_W   = TW_W_DEF,
  localparam int unsigned MW    = $clog2(M_MAX + 1),
  localparam int unsigned ACC_W = DATA_W + COEF_W + $clog2(L),
  localparam int unsigned OUT_W = ACC_W + TW_W + $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x,
  input  logic [MW-1:0]            m_in,
  output logic [MW-1:0]            m_sel,
  output logic                     m_err,
  output logic                     reconfig,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  y_re [N],
  output logic signed [OUT_W-1:0]  y_im [N]
);

  logic signed [ACC_W-1:0] v [N];

  // Anti-aliasing limit of coefficient decimation, M * f_o < pi with the
  // prototype bandwidth f_o = pi/N: every selectable M must stay below N.
  if (M_MAX >= N) begin : g_bad_mmax
    $error("rdftfb_top: M_MAX (%0d) must be below N (%0d)", M_MAX, N);
  end

  rdftfb_ctrl #(
    .M_MAX(M_MAX), .FLUSH(L + 2 + $clog2(N))
  ) u_ctrl (
    .clk, .rst, .en(in_valid), .m_in, .m_sel, .m_err, .reconfig, .out_valid
  );

  cdm_polyphase_filter #(
    .N(N), .L(L), .M_MAX(M_MAX), .DATA_W(DATA_W), .COEF_W(COEF_W)
  ) u_filter (
    .clk, .rst, .en(in_valid), .m(m_sel), .x, .v
  );

  idft_modulator #(
    .N(N), .IN_W(ACC_W), .TW_W(TW_W)
  ) u_idft (
    .clk, .rst, .en(in_valid), .v, .y_re, .y_im
  );

endmodule
