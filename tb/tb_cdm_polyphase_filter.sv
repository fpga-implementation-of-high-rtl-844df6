// tb_cdm_polyphase_filter -- self-checking test of the polyphase prototype
// filter with coefficient decimation (default 8 branches, L = 65).
// Random samples with random enable gaps; for each M = 1..5, once the
// chains hold only new-M samples, every branch output is compared with
//     v_p(t) = sum over j mod 8 = p, j*M < 65 of h[j*M] * x(t - 3 - j)
// (x(s) = sample taken on enabled edge s), and the sum over all branches
// with the direct-form decimated prototype filter.
module tb_cdm_polyphase_filter;
  import tb_ref_pkg::*;
  localparam int N = 8, L = 65, MMAX = 5, DW = 16, AW = 39;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [2:0] m = 3'd1;
  logic signed [DW-1:0] x = '0;
  logic signed [AW-1:0] v [N];
  int checks = 0, failures = 0;

  cdm_polyphase_filter dut (.clk, .rst, .en, .m, .x, .v);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist [$];
  int since;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int mm = 1; mm <= MMAX; mm++) begin
      since = 0;
      for (int cyc = 0; cyc < 400; cyc++) begin
        @(negedge clk);
        m  = 3'(mm);
        en = ($urandom_range(0, 4) != 0);
        x  = ($urandom_range(0, 9) == 0) ? -16'sh8000 : DW'($urandom);
        @(posedge clk);
        if (en) begin
          hist.push_back(longint'(x));
          since++;
        end
        #1;
        if (since > L + 2) begin
          longint tot, direct;
          tot = 0;
          direct = 0;
          for (int p = 0; p < N; p++) begin
            longint exp_v;
            exp_v = 0;
            for (int j = p; j < L; j += N)
              if (j * mm < L) exp_v += longint'(REF_H[j * mm]) * hist[hist.size() - 4 - j];
            checks++;
            if (longint'(v[p]) != exp_v) begin
              failures++;
              if (failures < 10) $display("M=%0d p=%0d v=%0d expected %0d", mm, p, v[p], exp_v);
            end
            tot += longint'(v[p]);
          end
          for (int j = 0; j * mm < L; j++)
            direct += longint'(REF_H[j * mm]) * hist[hist.size() - 4 - j];
          checks++;
          if (tot != direct) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
