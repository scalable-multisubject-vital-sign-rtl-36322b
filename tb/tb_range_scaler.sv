// tb_range_scaler -- every range bin 0..511 through the multiplier.  The
// expected distance is computed here from the radar configuration
// (c*Tm/(2*BW) * fadc/N, in Q16.16 metres) and must also agree with the real
// number to within one part in 65536 per bin; the result follows the input
// by one cycle.
module tb_range_scaler;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, out_valid;
  logic [8:0]  in_idx = '0;
  logic [31:0] range_q16;

  range_scaler dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam real STEP_M = 3.0e8 * 100.0e-6 / (2.0 * 2998.2e6) * 6.0e6 / 512.0;

  initial begin
    automatic int step_q16 = $rtoi(STEP_M * 65536.0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(STEP_M > 0.058 && STEP_M < 0.059, "range resolution is 0.058 m");
    for (int k = 0; k < 512; k++) begin
      in_valid = 1'b1; in_idx = 9'(k);
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, $sformatf("bin %0d: no result after one cycle", k));
      check(range_q16 == 32'(k * step_q16), $sformatf("bin %0d: %0d want %0d", k, range_q16, k * step_q16));
      check(real'(range_q16) / 65536.0 - k * STEP_M <= 0.0 && real'(range_q16) / 65536.0 - k * STEP_M > -(k + 1) / 65536.0,
            $sformatf("bin %0d: %f m vs %f m", k, real'(range_q16) / 65536.0, k * STEP_M));
      if ($urandom_range(1) != 0) begin
        @(negedge clk);
        check(!out_valid, "out_valid without input");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
