// cdm_polyphase_filter -- the polyphase prototype lowpass filter with
// coefficient decimation by M (first block of the filter bank).
//
// A single shared multiplier bank (coef_mult_bank) forms h[n]*x for all
// prototype coefficients; N polyphase branches (polyphase_branch) pick
// from those products, branch p producing
//     v_p(n) = sum over j with j mod N = p, j*M < L of  h[j*M] * x(n - j)
// i.e. the p-th delayed polyphase component z^-p E_p(z^N) of the decimated
// prototype h'(j) = h(j*M).  Summing v_0..v_{N-1} gives the decimated
// prototype filter itself; the IDFT modulator recombines them with phase
// rotations to form the N subbands.
//
// Interface:  x sampled on enabled edges; m = decimation factor (sel_M),
//             1..M_MAX.  Output v[p] for input x(t) (stage-0 term) appears
//             3 enabled edges after the edge that takes x(t).  All
//             registers hold while en = 0.
// The split into a shared multiplier row feeding N zero-multiplexed chains
// follows the paper's architecture figure.
module cdm_polyphase_filter
  import rdftfb_pkg::*;
#(
  parameter int unsigned N      = N_SUB,
  parameter int unsigned L      = L_PROTO,
  parameter int unsigned M_MAX  = M_MAX_DEF,
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned COEF_W = COEF_W_DEF,
  localparam int unsigned PROD_W = DATA_W + COEF_W,
  localparam int unsigned ACC_W  = PROD_W + $clog2(L),
  localparam int unsigned MW     = $clog2(M_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic [MW-1:0]            m,
  input  logic signed [DATA_W-1:0] x,
  output logic signed [ACC_W-1:0]  v [N]
);

  logic signed [PROD_W-1:0] prod [L];

  coef_mult_bank #(
    .L(L), .N(N), .DATA_W(DATA_W), .COEF_W(COEF_W)
  ) u_mult (
    .clk, .rst, .en, .x, .prod
  );

  for (genvar p = 0; p < N; p++) begin : g_branch
    polyphase_branch #(
      .N(N), .L(L), .M_MAX(M_MAX), .P(p), .PROD_W(PROD_W), .ACC_W(ACC_W)
    ) u_branch (
      .clk, .rst, .en, .m, .prod, .v(v[p])
    );
  end

endmodule
