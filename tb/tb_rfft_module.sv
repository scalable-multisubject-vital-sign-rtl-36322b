// tb_rfft_module -- chirps of random samples through the range-FFT
// sequencer with the behavioural FFT core (random stalls).  Checks: the
// words sent to the core are the chirp's samples in order with last on the
// N-th; nothing is accepted while enable is low or a chirp waits; no word
// is streamed while hold is high; the spectrum comes out numbered 0..N-1
// with last on bin N-1 and equal to the DFT of the chirp computed here;
// chirp_loaded pulses once per chirp.
module tb_rfft_module;
  import vs_pkg::*;

  localparam int N = 64, NCH = 6;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  enable = 1'b0, hold = 1'b0, in_valid = 1'b0, in_ready, chirp_loaded;
  cplx_t in_data = '0;
  logic  fft_in_valid, fft_in_ready, fft_in_last, fft_out_valid, fft_out_last;
  cplx_t fft_in_data, fft_out_data;
  logic  spec_valid, spec_last;
  logic [$clog2(N)-1:0] spec_idx;
  cplx_t spec_data;

  rfft_module #(.N(N)) dut (.*);

  fft_model #(.NPTS(N), .LATENCY(5), .STALL_PCT(25)) u_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data), .in_last(fft_in_last),
    .out_valid(fft_out_valid), .out_data(fft_out_data), .out_last(fft_out_last));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int xr [NCH][N], xi [NCH][N];
  int sent_ch = 0, sent_n = 0, spec_ch = 0, spec_n = 0, loaded = 0, n_hold_seen = 0;

  always @(posedge clk) if (rst_n) begin
    if (chirp_loaded) loaded++;
    if (hold && fft_in_valid && fft_in_ready && sent_n == 0) check(1'b0, "stream started while hold");
    if (hold && int'(dut.state) == 1) n_hold_seen++;
    if (in_ready) check(enable, "in_ready while enable is low");
    if (fft_in_valid && fft_in_ready) begin
      check(fft_in_data.re == xr[sent_ch][sent_n] && fft_in_data.im == xi[sent_ch][sent_n],
            $sformatf("chirp %0d word %0d to core differs: %0d want %0d", sent_ch, sent_n, fft_in_data.re, xr[sent_ch][sent_n]));
      check(fft_in_last == (sent_n == N - 1), "fft_in_last");
      if (sent_n == N - 1) begin sent_n = 0; sent_ch++; end else sent_n++;
    end
    if (spec_valid) begin
      automatic real ar = 0.0, ai = 0.0;
      for (int n = 0; n < N; n++) begin
        ar += xr[spec_ch][n] * $cos(TWO_PI * spec_n * n / N) + xi[spec_ch][n] * $sin(TWO_PI * spec_n * n / N);
        ai += xi[spec_ch][n] * $cos(TWO_PI * spec_n * n / N) - xr[spec_ch][n] * $sin(TWO_PI * spec_n * n / N);
      end
      ar /= N; ai /= N;
      check(int'(spec_idx) == spec_n && spec_last == (spec_n == N - 1), $sformatf("bin number %0d want %0d", spec_idx, spec_n));
      check(real'(spec_data.re) - ar < 1.0 && real'(spec_data.re) - ar > -1.0 &&
            real'(spec_data.im) - ai < 1.0 && real'(spec_data.im) - ai > -1.0,
            $sformatf("chirp %0d bin %0d: %0d,%0d want %f,%f", spec_ch, spec_n, spec_data.re, spec_data.im, ar, ai));
      if (spec_n == N - 1) begin spec_n = 0; spec_ch++; end else spec_n++;
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++)
      for (int n = 0; n < N; n++) begin
        xr[c][n] = $urandom_range(2000000) - 1000000;
        xi[c][n] = $urandom_range(2000000) - 1000000;
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    enable = 1'b1;
    for (int c = 0; c < NCH; c++) begin
      for (int n = 0; n < N; n++) begin
        in_valid = 1'b1; in_data.re = xr[c][n]; in_data.im = xi[c][n];
        if (c == 2 && n == 10) begin enable = 1'b0; repeat (7) @(negedge clk); enable = 1'b1; end
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom_range(7) == 0) @(negedge clk);
      end
      // hold the next chirp's stream for a while on every other chirp
      if (c % 2 == 1) begin
        hold = 1'b1; repeat (40) @(negedge clk); hold = 1'b0;
      end
    end
    while (spec_ch < NCH) @(negedge clk);
    repeat (5) @(negedge clk);
    check(loaded == NCH, $sformatf("chirp_loaded %0d times", loaded));
    check(sent_ch == NCH, "all chirps streamed");
    check(n_hold_seen > 0, "hold was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
