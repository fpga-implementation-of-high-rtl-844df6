// tb_rdftfb_ctrl -- self-checking test of the decimation-factor control.
// Random enable, random requests (legal and illegal, repeated and new
// values).  A reference model tracks the selected M and the number of
// enabled edges since the last accepted change; after every edge m_sel,
// m_err, reconfig and out_valid must match it, so out_valid must rise
// exactly FLUSH enabled edges after a change.
module tb_rdftfb_ctrl;
  localparam int MMAX = 5, FLUSH = 70;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [2:0] m_in = 3'd1, m_sel;
  logic m_err, reconfig, out_valid;
  int checks = 0, failures = 0;
  int n_change = 0, n_illegal = 0, n_valid = 0;

  rdftfb_ctrl dut (.clk, .rst, .en, .m_in, .m_sel, .m_err, .reconfig, .out_valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_m, since;
  logic ref_err, ref_rc, ref_valid;

  task automatic expect_eq(input string what, input int got, input int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("%t %s = %0d, expected %0d", $time, what, got, exp_v);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1;
    expect_eq("m_sel after reset", int'(m_sel), 1);
    @(negedge clk) rst = 1'b0;
    ref_m = 1;
    since = 0;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      en = ($urandom_range(0, 5) != 0);
      // Mostly keep M; now and then ask for another legal or an illegal one.
      case ($urandom_range(0, 199))
        0, 1, 2: m_in = 3'($urandom_range(1, MMAX));
        3:       m_in = 3'($urandom_range(0, 1) ? 0 : $urandom_range(MMAX + 1, 7));
        default: if (m_in == 0 || m_in > MMAX) m_in = 3'(ref_m);
      endcase
      @(posedge clk);
      // Reference model of this edge.
      ref_err = en && (m_in == 0 || m_in > MMAX);
      ref_rc  = 1'b0;
      if (en) begin
        if (!ref_err && int'(m_in) != ref_m) begin
          ref_m  = int'(m_in);
          ref_rc = 1'b1;
          since  = 0;
        end else if (since < FLUSH) begin
          since++;
        end
      end
      ref_valid = en && since >= FLUSH;
      #1;
      expect_eq("m_sel", int'(m_sel), ref_m);
      expect_eq("m_err", int'(m_err), int'(ref_err));
      expect_eq("reconfig", int'(reconfig), int'(ref_rc));
      expect_eq("out_valid", int'(out_valid), int'(ref_valid));
      n_change  += int'(ref_rc);
      n_illegal += int'(ref_err);
      n_valid   += int'(ref_valid);
    end
    $display("changes=%0d illegal=%0d valid=%0d", n_change, n_illegal, n_valid);
    checks++;
    if (n_change == 0 || n_illegal == 0 || n_valid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
