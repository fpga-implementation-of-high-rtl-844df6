// polyphase_branch -- one polyphase branch of the coefficient-decimated
// prototype filter, in transposed form.
//
// Branch P realises z^-P * E_P(z^N) of the decimated prototype h'(n), where
// coefficient decimation by M (CDM-II) keeps every M-th prototype
// coefficient and packs the kept ones together: h'[j] = h[j*M] for
// j*M < L.  The branch is a transposed-form chain of L stages.  Stage j
// (j = number of chain registers between it and the output) owns tap h'[j]:
//   * a coefficient-select multiplexer driven by sel_M picks the product
//     h[j*M]*x out of the shared multiplier bank,
//   * a multiplexer driven by sel_p passes that product only if stage j
//     belongs to this branch (j mod N = P) and forces 0 otherwise,
//   * an add/bypass multiplexer driven by sel_M either adds the tap into
//     the chain or passes the chain through, as in the architecture figure.
// Because the chain keeps all L unit delays and only every N-th stage of a
// branch carries a tap, each branch already contains its own delay z^-P, so
// all N branch outputs line up without further alignment registers.
//
// Pipelining (high-speed form): the selected tap is registered before the
// adder, so the path into each chain register is one 2:1 multiplexer and one
// adder.
//
// Interface:  prod[n] = h[n]*x from coef_mult_bank; m = decimation factor
//             1..M_MAX (held by the controller).  v is registered; for a
//             product presented in enabled cycle t, its stage-0 contribution
//             reaches v after two enabled edges.  All registers hold when
//             en = 0 and clear on the synchronous rst.
// The structure (sel_p zero-multiplexer, per-stage add/bypass multiplexer,
// unit-delay chain) follows the paper's architecture figure; the
// coefficient-select multiplexer is how this design routes the decimated
// coefficients to fixed chain positions, which the paper does not detail.
module polyphase_branch
  import rdftfb_pkg::*;
#(
  parameter int unsigned N      = N_SUB,
  parameter int unsigned L      = L_PROTO,
  parameter int unsigned M_MAX  = M_MAX_DEF,
  parameter int unsigned P      = 0,                        // branch index 0..N-1
  parameter int unsigned PROD_W = DATA_W_DEF + COEF_W_DEF,
  parameter int unsigned ACC_W  = PROD_W + $clog2(L),
  localparam int unsigned MW    = $clog2(M_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic [MW-1:0]            m,
  input  logic signed [PROD_W-1:0] prod [L],
  output logic signed [ACC_W-1:0]  v
);

  logic signed [PROD_W-1:0] tap   [L];   // sel_M / sel_p multiplexer outputs
  logic                     use_t [L];   // stage adds (1) or bypasses (0)
  logic signed [PROD_W-1:0] tap_r [L];
  logic                     use_r [L];
  logic signed [ACC_W-1:0]  chain [L];

  for (genvar j = 0; j < L; j++) begin : g_stage
    localparam bit SEL_P = ((j % N) == P);
    logic signed [ACC_W-1:0] upstream;   // chain value entering stage j

    if (j == L - 1) begin : g_end
      assign upstream = '0;
    end else begin : g_mid
      assign upstream = chain[j+1];
    end

    always_comb begin
      tap[j]   = '0;
      use_t[j] = 1'b0;
      for (int mm = 1; mm <= int'(M_MAX); mm++) begin
        if (int'(m) == mm && j * mm < int'(L) && SEL_P) begin
          tap[j]   = prod[j * mm];
          use_t[j] = 1'b1;
        end
      end
    end

    always_ff @(posedge clk) begin
      if (rst) begin
        tap_r[j] <= '0;
        use_r[j] <= 1'b0;
        chain[j] <= '0;
      end else if (en) begin
        tap_r[j] <= tap[j];
        use_r[j] <= use_t[j];
        chain[j] <= use_r[j] ? upstream + ACC_W'(tap_r[j]) : upstream;
      end
    end
  end

  assign v = chain[0];

endmodule
