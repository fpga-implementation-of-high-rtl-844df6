// tb_rdftfb_top -- end-to-end test of the filter bank at its default size
// (8 subbands, 65-tap prototype, M = 1..5), with no parameter overrides.
//
// A random sample stream (with full-scale extremes) is fed with random gaps
// in in_valid, while M is walked through 1, 3, 5, 2, 4, 1, 5 and illegal
// requests (0, 6, 7) are injected.  Every output flagged valid is compared
// with an independent model of the whole filter bank,
//   y_k(t) = sum_{j*M < L} h[j*M] * x(t - 7 - j) * exp(+j*2*pi*k*(j mod 8)/8)
// (x(s) = sample taken on enabled edge s; samples before reset count as 0),
// which checks the 7-edge latency as well.  out_valid must come back exactly
// 70 enabled edges after each change of M.  Each mechanism -- every
// decimation factor, a reconfiguration, a rejected request, a stall of the
// sample stream, and the post-change flush -- is counted and must occur.
module tb_rdftfb_top;
  import tb_ref_pkg::*;
  localparam int N = 8, L = 65, MMAX = 5, DW = 16, OW = 58, LAT = 7, FLUSH = 70;

  logic clk = 1'b0, rst = 1'b1, in_valid = 1'b0;
  logic signed [DW-1:0] x = '0;
  logic [2:0] m_in = 3'd1, m_sel;
  logic m_err, reconfig, out_valid;
  logic signed [OW-1:0] y_re [N], y_im [N];
  int checks = 0, failures = 0;

  rdftfb_top dut (.clk, .rst, .in_valid, .x, .m_in, .m_sel, .m_err, .reconfig,
                  .out_valid, .y_re, .y_im);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NSEG = 7;
  localparam int SEQ [NSEG] = '{1, 3, 5, 2, 4, 1, 5};
  int used_m [MMAX+1];
  int n_reconfig = 0, n_illegal = 0, n_stall = 0, n_flush = 0, n_valid = 0;
  int since, cur_m;
  longint hist [$];
  longint tw_re [N][N], tw_im [N][N];

  initial begin
    for (int k = 0; k < N; k++)
      for (int i = 0; i < N; i++) begin
        tw_re[k][i] = ref_tw_re(k, i, N, 16);
        tw_im[k][i] = ref_tw_im(k, i, N, 16);
      end
    for (int i = 0; i < L + LAT + 2; i++) hist.push_back(0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    cur_m = 1;
    since = 0;
    for (int seg = 0; seg < NSEG; seg++) begin
      for (int cyc = 0; cyc < 400; cyc++) begin
        logic illegal_now;
        @(negedge clk);
        in_valid = ($urandom_range(0, 4) != 0);
        illegal_now = (cyc == 200);
        m_in = illegal_now ? 3'($urandom_range(0, 2) == 0 ? 0 : $urandom_range(6, 7)) : 3'(SEQ[seg]);
        case ($urandom_range(0, 9))
          0:       x = 16'sh7fff;
          1:       x = -16'sh8000;
          default: x = DW'($urandom);
        endcase
        @(posedge clk);
        if (!in_valid) n_stall++;
        if (in_valid) begin
          hist.push_back(longint'(x));
          if (!illegal_now && SEQ[seg] != cur_m) begin
            cur_m = SEQ[seg];
            since = 0;
          end else if (since < FLUSH) since++;
        end
        #1;
        if (reconfig) begin
          n_reconfig++;
          used_m[m_sel]++;
        end
        if (m_err) n_illegal++;
        checks++;
        if (int'(m_sel) != cur_m) begin
          failures++;
          $display("m_sel=%0d expected %0d", m_sel, cur_m);
        end
        // Valid exactly FLUSH enabled edges after the last change.
        checks++;
        if (out_valid != (in_valid && since >= FLUSH)) begin
          failures++;
          if (failures < 10) $display("seg %0d cyc %0d out_valid=%0b since=%0d", seg, cyc, out_valid, since);
        end
        if (in_valid && since < FLUSH && since > 0) n_flush++;
        if (out_valid) begin
          n_valid++;
          for (int k = 0; k < N; k++) begin
            longint er, ei, xv;
            er = 0;
            ei = 0;
            for (int j = 0; j * cur_m < L; j++) begin
              xv = longint'(REF_H[j * cur_m]) * hist[hist.size() - 1 - LAT - j];
              er += xv * tw_re[k][j % N];
              ei += xv * tw_im[k][j % N];
            end
            checks += 2;
            if (longint'(y_re[k]) != er || longint'(y_im[k]) != ei) begin
              failures++;
              if (failures < 10)
                $display("seg %0d M=%0d k=%0d got (%0d, %0d) expected (%0d, %0d)",
                         seg, cur_m, k, y_re[k], y_im[k], er, ei);
            end
          end
        end
      end
    end
    $display("reconfig=%0d illegal=%0d stall=%0d flush=%0d valid=%0d", n_reconfig, n_illegal,
             n_stall, n_flush, n_valid);
    for (int mm = 1; mm <= MMAX; mm++) begin
      checks++;
      if (used_m[mm] == 0) begin failures++; $display("M=%0d never used", mm); end
    end
    checks += 5;
    if (n_reconfig == 0) failures++;
    if (n_illegal == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_flush == 0) failures++;
    if (n_valid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
