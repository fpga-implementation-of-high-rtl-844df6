// tb_subband_response -- frequency-response test of the filter bank at its
// default size (8 subbands, L = 65), for M = 1..5, on the second and the
// seventh subband (k = 1, centre +pi/4, and k = 6, centre +3*pi/2, i.e. -pi/2).
//
// For each M a set of test tones is fed, one at a time.  After the chains
// have settled, each subband output is correlated over W = 512 samples with
// exp(-j*2*pi*f*n), which isolates the tone's positive-frequency part
// exactly because every tone lies on the 1/256 grid.  Its magnitude,
// relative to the DC gain of the decimated prototype, is the subband gain
// at offset f - k/8 from the subband centre.  Checked: gain within 0.05 dB
// of unity at the centre and at offsets +-0.0625*M (frequencies relative to
// fs/2), i.e. the passband widens M times; and at least 49 dB attenuation at
// offsets +-0.18*M and at the far edge (offset 1.0), where the prototype
// specification asks for 50 dB.
module tb_subband_response;
  localparam int N = 8, OW = 58, W = 512, GRID = 256;
  localparam real PI  = 3.14159265358979323846;
  localparam real AMP = 16000.0;

  logic clk = 1'b0, rst = 1'b1, in_valid = 1'b0;
  logic signed [15:0] x = '0;
  logic [2:0] m_in = 3'd1, m_sel;
  logic m_err, reconfig, out_valid;
  logic signed [OW-1:0] y_re [N], y_im [N];
  int checks = 0, failures = 0;

  rdftfb_top dut (.clk, .rst, .in_valid, .x, .m_in, .m_sel, .m_err, .reconfig,
                  .out_valid, .y_re, .y_im);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Relative gain (dB) of subband k for a tone at q/GRID cycles per sample.
  task automatic measure(input int q, input int k, input real dc_gain, output real db);
    real cr, ci, yr, yi, ph;
    int n;
    n  = 0;
    cr = 0.0;
    ci = 0.0;
    // settle: run until the flush is over and the chain holds only this tone
    for (int s = 0; s < W + 200; s++) begin
      @(negedge clk);
      in_valid = 1'b1;
      x = 16'($rtoi(AMP * $cos(2.0 * PI * real'(q) * real'(s) / real'(GRID))));
      @(posedge clk);
      #1;
      if (s >= 200 && out_valid) begin
        yr = real'(y_re[k]);
        yi = real'(y_im[k]);
        ph = -2.0 * PI * real'(q) * real'(n) / real'(GRID);
        cr += yr * $cos(ph) - yi * $sin(ph);
        ci += yr * $sin(ph) + yi * $cos(ph);
        n++;
      end
    end
    if (n != W) begin
      failures++;
      $display("q=%0d: only %0d valid outputs", q, n);
    end
    db = 20.0 * $log10($sqrt(cr * cr + ci * ci) / real'(n) /
                       (AMP / 2.0 * dc_gain * 16384.0) + 1.0e-12);
  endtask

  task automatic expect_db(input string what, input int mm, input int k, input int off,
                           input real db, input bit pass);
    checks++;
    if (pass ? (db > 0.05 || db < -0.05) : (db > -49.0)) begin
      failures++;
      $display("FAIL M=%0d k=%0d offset %0d/%0d (fs): %s gain %f dB", mm, k, off, GRID, what, db);
    end else
      $display("M=%0d k=%0d offset %0d/%0d (fs): %s gain %f dB", mm, k, off, GRID, what, db);
  endtask

  initial begin
    int ks [2] = '{1, 6};
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int mm = 1; mm <= 5; mm++) begin
      real g;
      g = 0.0;
      for (int j = 0; j * mm < 65; j++) g += real'(tb_ref_pkg::REF_H[j * mm]);
      @(negedge clk) m_in = 3'(mm);
      for (int kk = 0; kk < 2; kk++) begin
        int k, centre;
        int offs [5];
        k = ks[kk];
        centre = k * GRID / N;
        // offsets in grid steps: 0.0625*M and 0.18*M relative to fs/2
        // are 8*M and 23*M steps of 1/256 cycle per sample.
        offs = '{0, 8 * mm, -8 * mm, 23 * mm, -23 * mm};
        for (int o = 0; o < 5; o++) begin
          real db;
          int q;
          q = ((centre + offs[o]) % GRID + GRID) % GRID;
          if (q % (GRID / 2) == 0) q++;       // keep away from 0 and fs/2
          measure(q, k, g, db);
          expect_db(o < 3 ? "pass" : "stop", mm, k, offs[o], db, o < 3);
        end
        begin
          real db;
          int q;
          q = (centre + GRID / 2) % GRID;
          if (q % (GRID / 2) == 0) q++;
          measure(q, k, g, db);
          expect_db("stop", mm, k, GRID / 2, db, 1'b0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
