// coef_mult_bank -- the fixed-coefficient multiplier bank of the prototype
// lowpass filter (the row of multipliers h_0 .. h_L at the top of the
// polyphase architecture).
//
// Every input sample is multiplied by all L prototype coefficients in the
// same cycle, as in a transposed-form FIR filter where the input is broadcast
// to all taps.  The prototype is linear phase, so h[n] = h[L-1-n]: only
// ceil(L/2) multipliers are built and each product is fanned out to both
// coefficient positions of its symmetric pair (the paper notes that the
// multiplier count is half the filter length).
//
// Pipelining follows the highlighted detail of the high-speed architecture:
// one register in front of the multipliers and one behind them, so that the
// critical path through this block is a single multiplier.
//
// Interface:  x (DATA_W-bit signed) is accepted on a rising clk edge when
//             en = 1.  prod[n] = h[n] * x, full precision
//             (DATA_W+COEF_W bits), appears two enabled edges later.  When
//             en = 0 both register stages hold.  rst is synchronous and
//             clears both stages.
// The coefficients come from rdftfb_pkg::proto_coef (a Kaiser-window design
// to the paper's specification; the paper's own coefficients are not
// published).  The register placement is the paper's; the enable and the
// reset are this design's choice.
module coef_mult_bank
  import rdftfb_pkg::*;
#(
  parameter int unsigned L      = L_PROTO,
  parameter int unsigned N      = N_SUB,     // sets the prototype cut-off pi/N
  parameter int unsigned DATA_W = DATA_W_DEF,
  parameter int unsigned COEF_W = COEF_W_DEF,
  localparam int unsigned PROD_W = DATA_W + COEF_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] x,
  output logic signed [PROD_W-1:0] prod [L]
);

  localparam int unsigned NU = (L + 1) / 2;  // distinct coefficients

  logic signed [DATA_W-1:0] x_r;
  logic signed [PROD_W-1:0] prod_r [NU];

  always_ff @(posedge clk) begin
    if (rst)     x_r <= '0;
    else if (en) x_r <= x;
  end

  for (genvar u = 0; u < NU; u++) begin : g_mult
    localparam logic signed [COEF_W-1:0] H = COEF_W'(proto_coef(u, L, N, COEF_W));
    always_ff @(posedge clk) begin
      if (rst)     prod_r[u] <= '0;
      else if (en) prod_r[u] <= PROD_W'(x_r) * PROD_W'(H);
    end
  end

  // Symmetric fan-out: position n uses the multiplier of min(n, L-1-n).
  for (genvar n = 0; n < L; n++) begin : g_fan
    assign prod[n] = prod_r[(n < NU) ? n : (L - 1 - n)];
  end

endmodule
