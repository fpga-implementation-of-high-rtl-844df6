// rdftfb_ctrl -- reconfiguration control of the filter bank: holds the
// coefficient-decimation factor M (the sel_M control of the architecture)
// and flags which outputs are valid.
//
// M selects the subband bandwidth (M times the prototype bandwidth).  A new
// value on m_in is taken on an enabled clock edge if it is legal
// (1..M_MAX); an illegal request is ignored and reported on m_err for that
// edge.  Changing M needs no coefficient update, but the transposed filter
// chains still hold partial sums built with the old M, so the outputs are
// not yet those of the new filter.  A counter of enabled edges since the
// last change (or since reset) keeps out_valid low until FLUSH new samples
// have entered: FLUSH = L + 2 + ceil(log2 N) covers the L-stage chain, the
// tap register stage, and the IDFT pipeline.
//
// Interface:  en is the sample strobe of the whole filter bank; out_valid
//             is high in the cycle after an enabled edge whose new output
//             comes entirely from the current M.  m_sel is registered and
//             resets to 1 (undecimated prototype); reconfig pulses for one
//             cycle after each accepted change of M.
// The paper gives only the control's name and purpose; the legality check,
// reset value and valid flag are this design's choices.
module rdftfb_ctrl
  import rdftfb_pkg::*;
#(
  parameter int unsigned M_MAX = M_MAX_DEF,
  parameter int unsigned FLUSH = L_PROTO + 2 + $clog2(N_SUB),
  localparam int unsigned MW   = $clog2(M_MAX + 1),
  localparam int unsigned CW   = $clog2(FLUSH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en,
  input  logic [MW-1:0] m_in,
  output logic [MW-1:0] m_sel,
  output logic          m_err,
  output logic          reconfig,
  output logic          out_valid
);

  logic [CW-1:0] cnt;      // enabled edges since the last change, saturating
  logic          upd;      // an enabled edge has just updated the pipeline
  logic          legal;

  assign legal = (m_in >= MW'(1)) && (m_in <= MW'(M_MAX));

  always_ff @(posedge clk) begin
    if (rst) begin
      m_sel    <= MW'(1);
      m_err    <= 1'b0;
      reconfig <= 1'b0;
      cnt      <= '0;
      upd      <= 1'b0;
    end else begin
      upd      <= en;
      m_err    <= en && !legal;
      reconfig <= 1'b0;
      if (en) begin
        if (legal && m_in != m_sel) begin
          m_sel    <= m_in;
          reconfig <= 1'b1;
          cnt      <= '0;
        end else if (cnt < CW'(FLUSH)) begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end

  assign out_valid = upd && (cnt >= CW'(FLUSH));

  // sel_M must always select one of the built decimation factors.
  a_m_legal: assert property (@(posedge clk) disable iff (rst)
                              (m_sel >= MW'(1) && m_sel <= MW'(M_MAX)));

endmodule
