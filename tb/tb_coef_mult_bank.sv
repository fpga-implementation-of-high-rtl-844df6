// tb_coef_mult_bank -- self-checking test of the symmetric multiplier bank.
// Checks the elaborated coefficients against an independently computed
// table, then streams random samples with random enable gaps and checks
// every product h[n]*x two enabled edges after x was taken.
module tb_coef_mult_bank;
  import tb_ref_pkg::*;

  localparam int L = 65, DW = 16, CW = 16, PW = DW + CW;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic signed [DW-1:0] x = '0;
  logic signed [PW-1:0] prod [L];
  int checks = 0, failures = 0;

  coef_mult_bank dut (.clk, .rst, .en, .x, .prod);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint hist [$];   // samples taken on enabled edges, newest last

  initial begin
    // Coefficient table of the elaboration-time design function.
    for (int n = 0; n < L; n++) begin
      checks++;
      if (rdftfb_pkg::proto_coef(n, L, 8, CW) != REF_H[n]) begin
        failures++;
        $display("coef %0d: %0d expected %0d", n, rdftfb_pkg::proto_coef(n, L, 8, CW), REF_H[n]);
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 5))
        0:       x = 16'sh7fff;
        1:       x = -16'sh8000;
        default: x = DW'($urandom);
      endcase
      @(posedge clk);
      if (en) hist.push_back(longint'(x));
      #1;
      if (hist.size() >= 2) begin
        for (int n = 0; n < L; n++) begin
          checks++;
          if (longint'(prod[n]) != longint'(REF_H[n]) * hist[hist.size() - 2]) begin
            failures++;
            if (failures < 10)
              $display("cyc %0d prod[%0d]=%0d expected %0d", cyc, n, prod[n],
                       longint'(REF_H[n]) * hist[hist.size() - 2]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
