// tb_polyphase_branch -- self-checking test of polyphase branches.
// Two branches (P = 0 and P = 5) of the default 8-branch, 65-stage chain
// are fed the same random product vectors (each position an independent
// random value, so a wrong coefficient route shows).  For every decimation
// factor M = 1..5 the branch output is compared, after the chain has been
// refilled with the new M, with
//     v_P(t) = sum over j mod 8 = P, j*M < 65 of prod[j*M](t - 1 - j)
// where prod(s) is the vector presented before enabled edge s.
module tb_polyphase_branch;
  localparam int N = 8, L = 65, MMAX = 5, PW = 32, AW = 39;
  localparam int NB = 2;
  localparam int PIDX [NB] = '{0, 5};

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [2:0] m = 3'd1;
  logic signed [PW-1:0] prod [L];
  logic signed [AW-1:0] v [NB];
  int checks = 0, failures = 0;

  for (genvar b = 0; b < NB; b++) begin : g_dut
    polyphase_branch #(.P(PIDX[b])) dut (.clk, .rst, .en, .m, .prod, .v(v[b]));
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef longint vec_t [L];
  vec_t hist [$];
  int since;

  initial begin
    for (int n = 0; n < L; n++) prod[n] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int mm = 1; mm <= MMAX; mm++) begin
      since = 0;
      for (int cyc = 0; cyc < 300; cyc++) begin
        @(negedge clk);
        m  = 3'(mm);
        en = ($urandom_range(0, 4) != 0);
        for (int n = 0; n < L; n++) prod[n] = PW'($signed($urandom)) >>> $urandom_range(0, 8);
        @(posedge clk);
        if (en) begin
          vec_t cur;
          for (int n = 0; n < L; n++) cur[n] = longint'(prod[n]);
          hist.push_back(cur);
          since++;
        end
        #1;
        if (since > L) begin
          for (int b = 0; b < NB; b++) begin
            longint exp_v;
            exp_v = 0;
            for (int j = 0; j < L; j++)
              if (j % N == PIDX[b] && j * mm < L)
                exp_v += hist[hist.size() - 2 - j][j * mm];
            checks++;
            if (longint'(v[b]) != exp_v) begin
              failures++;
              if (failures < 10) $display("M=%0d P=%0d v=%0d expected %0d", mm, PIDX[b], v[b], exp_v);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
