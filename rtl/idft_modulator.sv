// idft_modulator -- N-point IDFT modulator of the filter bank, pipelined.
//
// Output k is the subband centred at 2*pi*k/N:
//     y_k = sum_{i=0}^{N-1} v_i * exp(+j*2*pi*k*i/N)              (Eq. 1)
// The branch signals v_i are real, so each output needs N real products for
// its real part and N for its imaginary part.  The twiddles are constants
// (rdftfb_pkg::twiddle_re/_im, TW_W bits with TW_W-2 fractional bits), so
// every product is a constant multiplication; zero and +-1 twiddles reduce
// to wiring in synthesis.
//
// A direct implementation puts one multiplier and N-1 adders in series (for
// N = 8: a multiplier and 7 adders).  In this high-speed form registers are
// placed after the constant multipliers and after every level of a binary
// adder tree, so no register-to-register path holds more than one
// multiplier or one adder.  All N outputs pass through the same number of
// registers, so they stay aligned.
//
// Interface:  v[i] (IN_W-bit signed) accepted on enabled edges;
//             y_re[k], y_im[k] (OUT_W-bit signed, full precision, scaled by
//             2^(TW_W-2)) appear LATENCY = 1 + ceil(log2 N) enabled edges
//             later.  Registers hold while en = 0; rst clears them.
// Eq. 1 and the registers in all IDFT branches are the paper's; the adder
// tree and its register placement are this design's choice.
module idft_modulator
  import rdftfb_pkg::*;
#(
  parameter int unsigned N     = N_SUB,
  parameter int unsigned IN_W  = DATA_W_DEF + COEF_W_DEF + $clog2(L_PROTO),
  parameter int unsigned TW_W  = TW_W_DEF,
  localparam int unsigned LV   = $clog2(N),          // adder-tree levels
  localparam int unsigned NP   = 1 << LV,            // N padded to 2^LV
  localparam int unsigned OUT_W = IN_W + TW_W + LV
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  v    [N],
  output logic signed [OUT_W-1:0] y_re [N],
  output logic signed [OUT_W-1:0] y_im [N]
);

  for (genvar k = 0; k < N; k++) begin : g_out
    // tree[l][*] holds level l; level 0 = registered products.
    logic signed [OUT_W-1:0] re_t [LV+1][NP];
    logic signed [OUT_W-1:0] im_t [LV+1][NP];

    for (genvar i = 0; i < NP; i++) begin : g_prod
      if (i < N) begin : g_real
        localparam logic signed [TW_W-1:0] WR = TW_W'(twiddle_re(k, i, N, TW_W));
        localparam logic signed [TW_W-1:0] WI = TW_W'(twiddle_im(k, i, N, TW_W));
        always_ff @(posedge clk) begin
          if (rst) begin
            re_t[0][i] <= '0;
            im_t[0][i] <= '0;
          end else if (en) begin
            re_t[0][i] <= OUT_W'(v[i]) * OUT_W'(WR);
            im_t[0][i] <= OUT_W'(v[i]) * OUT_W'(WI);
          end
        end
      end else begin : g_pad
        assign re_t[0][i] = '0;
        assign im_t[0][i] = '0;
      end
    end

    for (genvar l = 1; l <= LV; l++) begin : g_lvl
      for (genvar a = 0; a < (NP >> l); a++) begin : g_add
        always_ff @(posedge clk) begin
          if (rst) begin
            re_t[l][a] <= '0;
            im_t[l][a] <= '0;
          end else if (en) begin
            re_t[l][a] <= re_t[l-1][2*a] + re_t[l-1][2*a+1];
            im_t[l][a] <= im_t[l-1][2*a] + im_t[l-1][2*a+1];
          end
        end
      end
      // Upper half of each level is unused.
      for (genvar a = (NP >> l); a < NP; a++) begin : g_unused
        assign re_t[l][a] = '0;
        assign im_t[l][a] = '0;
      end
    end

    assign y_re[k] = re_t[LV][0];
    assign y_im[k] = im_t[LV][0];
  end

endmodule
