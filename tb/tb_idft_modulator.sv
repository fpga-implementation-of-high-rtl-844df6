// tb_idft_modulator -- self-checking test of the pipelined N-point IDFT.
// Random branch vectors (including full-scale extremes) with random enable
// gaps; each output pair must equal sum_i v_i * exp(+j*2*pi*k*i/N), with
// twiddles rounded to TW_W-2 fractional bits, exactly 1 + log2(N) enabled
// edges after the vector was taken.  Run for N = 8 (default) and N = 4.
module tb_idft_modulator;
  localparam int IW = 39, TW = 16;

  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Device under test for one size, with its own scoreboard.
  logic signed [IW-1:0] v8 [8];
  logic signed [IW+TW+2:0] yr8 [8], yi8 [8];
  logic signed [IW-1:0] v4 [4];
  logic signed [IW+TW+1:0] yr4 [4], yi4 [4];

  idft_modulator #(.N(8), .IN_W(IW), .TW_W(TW)) dut8 (.clk, .rst, .en, .v(v8), .y_re(yr8), .y_im(yi8));
  idft_modulator #(.N(4), .IN_W(IW), .TW_W(TW)) dut4 (.clk, .rst, .en, .v(v4), .y_re(yr4), .y_im(yi4));

  typedef longint vec8_t [8];
  vec8_t h8 [$];
  vec8_t h4 [$];

  function automatic logic signed [IW-1:0] rnd_in();
    case ($urandom_range(0, 7))
      0: return {1'b0, {(IW-1){1'b1}}};
      1: return {1'b1, {(IW-1){1'b0}}};
      default: return IW'($signed({$urandom, $urandom}));
    endcase
  endfunction

  task automatic check(input int n, input vec8_t vin, input longint gr, input longint gi, input int k);
    longint er, ei;
    er = 0;
    ei = 0;
    for (int i = 0; i < n; i++) begin
      er += vin[i] * tb_ref_pkg::ref_tw_re(k, i, n, TW);
      ei += vin[i] * tb_ref_pkg::ref_tw_im(k, i, n, TW);
    end
    checks += 2;
    if (gr != er || gi != ei) begin
      failures++;
      if (failures < 10) $display("N=%0d k=%0d got (%0d, %0d) expected (%0d, %0d)", n, k, gr, gi, er, ei);
    end
  endtask

  initial begin
    for (int i = 0; i < 8; i++) v8[i] = '0;
    for (int i = 0; i < 4; i++) v4[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      vec8_t c8, c4;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < 8; i++) begin v8[i] = rnd_in(); c8[i] = longint'(v8[i]); end
      for (int i = 0; i < 4; i++) begin v4[i] = rnd_in(); c4[i] = longint'(v4[i]); end
      for (int i = 4; i < 8; i++) c4[i] = 0;
      @(posedge clk);
      if (en) begin h8.push_back(c8); h4.push_back(c4); end
      #1;
      if (h8.size() >= 4)
        for (int k = 0; k < 8; k++) check(8, h8[h8.size() - 4], longint'(yr8[k]), longint'(yi8[k]), k);
      if (h4.size() >= 3)
        for (int k = 0; k < 4; k++) check(4, h4[h4.size() - 3], longint'(yr4[k]), longint'(yi4[k]), k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
