// tb_pfft_hrbr -- unwrapped phase frames through the phase-FFT stage with
// the behavioural FFT core (random stalls).  Each frame is
// A_B*sin(2*pi*b*m/M) + A_H*sin(2*pi*h*m/M + 0.7) + offset + an
// out-of-band tone, in radians with 13 fraction bits; its breathing bin b
// lies in 1..3 and heartbeat bin h in 6..12 (3..36 and 48..120 per minute at
// 9.375 per minute per bin).  The stage must report b and h, rates
// b*9.375 and h*9.375 per minute in Q8.8, ignore the stronger tone outside
// both bands, and feed the core the phase shifted to Q16.16 with zero
// imaginary part, in order, with last on sample M-1.
module tb_pfft_hrbr;
  import vs_pkg::*;

  localparam int M = 128;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 pus_valid = 1'b0, pus_ready, pus_last = 1'b0;
  logic signed [31:0]   pus_data = '0;
  logic                 fft_in_valid, fft_in_ready, fft_in_last, fft_out_valid, fft_out_last;
  cplx_t                fft_in_data, fft_out_data;
  logic                 result_valid, bands_ok;
  logic [6:0]           br_idx, hr_idx;
  logic [15:0]          br_rate, hr_rate;
  logic [63:0]          br_psd, hr_psd;

  pfft_hrbr dut (.*);

  fft_model #(.NPTS(M), .LATENCY(7), .STALL_PCT(30)) u_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data), .in_last(fft_in_last),
    .out_valid(fft_out_valid), .out_data(fft_out_data), .out_last(fft_out_last));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NFR = 12;
  int b_f [NFR], h_f [NFR], results = 0, n_stall = 0;

  always @(posedge clk) if (rst_n) begin
    if (fft_in_valid) check(fft_in_data.re == pus_data * 8 && fft_in_data.im == 0 && fft_in_last == pus_last,
                            "word to the FFT core");
    if (pus_valid && !pus_ready) n_stall++;
    if (result_valid) begin
      automatic int f = results;
      check(br_idx == 7'(b_f[f]) && hr_idx == 7'(h_f[f]),
            $sformatf("frame %0d: bins %0d/%0d want %0d/%0d", f, br_idx, hr_idx, b_f[f], h_f[f]));
      check(br_rate == 16'($rtoi(b_f[f] * 1200.0 / M * 256.0 + 0.5)) && hr_rate == 16'($rtoi(h_f[f] * 1200.0 / M * 256.0 + 0.5)),
            $sformatf("frame %0d: rates %0d/%0d", f, br_rate, hr_rate));
      check(bands_ok && br_psd > hr_psd, "bands_ok, breathing stronger");
      results++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NFR; f++) begin
      automatic int out_tone = 20 + f;
      b_f[f] = 1 + (f % 3);
      h_f[f] = 6 + ((f * 5) % 7);
      for (int m = 0; m < M; m++) begin
        automatic real p = 4.0 * $sin(TWO_PI * b_f[f] * m / M) + 0.5 * $sin(TWO_PI * h_f[f] * m / M + 0.7)
                           + 1.0 * $sin(TWO_PI * out_tone * m / M) + 30.0 - f * 7.0;
        pus_valid = 1'b1;
        pus_data  = $rtoi((p + 1000.0) * 8192.0 + 0.5) - 1000 * 8192;
        pus_last  = (m == M - 1);
        #1;
        while (!pus_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        pus_valid = 1'b0;
        if ($urandom_range(3) == 0) @(negedge clk);
      end
      pus_last = 1'b0;
      while (results <= f) @(negedge clk);
    end
    check(n_stall > 0, "core stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
