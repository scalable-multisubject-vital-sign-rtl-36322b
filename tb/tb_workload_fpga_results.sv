// tb_workload_fpga_results -- the four single-subject measurements of the
// FPGA evaluation, run through the full-size design (N = 512, M = 128).
//
// Each frame holds one subject with the true breathing and heart rates of
// one measurement (18/87, 21/105, 12/104, 10/77 per minute), placed at
// 1, 3, 5 and 7 m (the distances of the range experiment).  Neither the
// rates nor the distances fall on bin centres, so the spectra leak; ADC
// noise of +-40 LSB is added.  Chest motion: breathing swing 2 rad, heart
// 0.3 rad of radar phase (about 0.6 mm and 0.1 mm at 77 GHz).
//
// Checks per frame: every chirp's range bin is the nearest bin to the
// distance (0.0586 m per bin); the reported rates are the nearest phase-FFT
// bins to the true rates (9.375 per minute per bin), i.e. within half a bin.
// The mean absolute errors against the true rates are printed.
module tb_workload_fpga_results;
  import vs_pkg::*;

  localparam int N  = N_SAMPLES;
  localparam int M  = M_CHIRPS;
  localparam int NF = 4;
  localparam real TWO_PI = 6.283185307179586;
  localparam real STEP_M = 3.0e8 * 100.0e-6 / (2.0 * 2998.2e6) * 6.0e6 / N;
  localparam real BIN_PM = 60.0 * 20.0 / M;

  real br_true [NF] = '{18.0, 21.0, 12.0, 10.0};
  real hr_true [NF] = '{87.0, 105.0, 104.0, 77.0};
  real dist_m    [NF] = '{1.0, 3.0, 5.0, 7.0};

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic                      adc_valid = 1'b0, adc_ready;
  logic signed [ADC_W-1:0]   adc_i = '0, adc_q = '0;
  logic                      rfft_in_valid, rfft_in_ready, rfft_in_last, rfft_out_valid, rfft_out_last;
  cplx_t                     rfft_in_data, rfft_out_data;
  logic                      cordic_in_valid, cordic_in_ready, cordic_out_valid;
  cplx_t                     cordic_in_data;
  logic signed [PHASE_W-1:0] cordic_out_phase;
  logic                      pfft_in_valid, pfft_in_ready, pfft_in_last, pfft_out_valid, pfft_out_last;
  cplx_t                     pfft_in_data, pfft_out_data;
  logic                      range_valid, range_found, result_valid, bands_ok;
  logic [$clog2(N)-1:0]      range_bin;
  logic [31:0]               range_q16;
  logic [PSD_W-1:0]          range_psd, br_psd, hr_psd;
  logic [$clog2(M)-1:0]      br_idx, hr_idx;
  logic [15:0]               br_rate, hr_rate;
  logic                      frame_busy, unwrap_busy, wrap_add, wrap_sub;

  vital_sign_top dut (.*);

  fft_model #(.NPTS(N), .LATENCY(12)) u_rfft_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rfft_in_valid), .in_ready(rfft_in_ready), .in_data(rfft_in_data), .in_last(rfft_in_last),
    .out_valid(rfft_out_valid), .out_data(rfft_out_data), .out_last(rfft_out_last));

  cordic_model #(.LATENCY(6)) u_cordic_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cordic_in_valid), .in_ready(cordic_in_ready), .in_data(cordic_in_data),
    .out_valid(cordic_out_valid), .out_phase(cordic_out_phase));

  fft_model #(.NPTS(M), .LATENCY(12)) u_pfft_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(pfft_in_valid), .in_ready(pfft_in_ready), .in_data(pfft_in_data), .in_last(pfft_in_last),
    .out_valid(pfft_out_valid), .out_data(pfft_out_data), .out_last(pfft_out_last));

  int checks = 0, failures = 0, n_frames = 0, bad_range = 0, chirps = 0;
  real br_mae = 0.0, hr_mae = 0.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int nearest(real x);
    return $rtoi(x + 0.5);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (range_valid) begin
      if (int'(range_bin) != nearest(dist_m[n_frames] / STEP_M)) bad_range++;
      chirps++;
    end
    if (result_valid) begin
      automatic int f = n_frames;
      automatic real br = br_rate / 256.0, hr = hr_rate / 256.0;
      check(bad_range == 0 && chirps == M, $sformatf("subject %0d: %0d of %0d chirps off the range bin %0d",
            f, bad_range, chirps, nearest(dist_m[f] / STEP_M)));
      check(int'(br_idx) == nearest(br_true[f] / BIN_PM), $sformatf("subject %0d: BR bin %0d, want %0d", f, br_idx, nearest(br_true[f] / BIN_PM)));
      check(int'(hr_idx) == nearest(hr_true[f] / BIN_PM), $sformatf("subject %0d: HR bin %0d, want %0d", f, hr_idx, nearest(hr_true[f] / BIN_PM)));
      br_mae += (br > br_true[f]) ? br - br_true[f] : br_true[f] - br;
      hr_mae += (hr > hr_true[f]) ? hr - hr_true[f] : hr_true[f] - hr;
      $display("subject %0d at %0.1f m: range bin %0d (%0.3f m)  BR %0.2f (true %0.0f)  HR %0.2f (true %0.0f) per minute",
               f, dist_m[f], range_bin, range_q16 / 65536.0, br, br_true[f], hr, hr_true[f]);
      bad_range = 0; chirps = 0;
      n_frames++;
    end
  end

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      automatic real kf = dist_m[f] / STEP_M;
      while (frame_busy) @(negedge clk);
      for (int m = 0; m < M; m++) begin
        // slow time t = m * 50 ms
        automatic real t = m * 0.05;
        automatic real p = 1.0 + 2.0 * $sin(TWO_PI * br_true[f] / 60.0 * t) + 0.3 * $sin(TWO_PI * hr_true[f] / 60.0 * t + 0.4);
        for (int n = 0; n < N; n++) begin
          automatic real arg = TWO_PI * kf * n / N + p;
          adc_i     = ADC_W'($rtoi(7000.0 * $cos(arg) + 32768.5 + $urandom_range(80)) - 32808);
          adc_q     = ADC_W'($rtoi(7000.0 * $sin(arg) + 32768.5 + $urandom_range(80)) - 32808);
          adc_valid = 1'b1;
          #1;
          while (!adc_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          adc_valid = 1'b0;
        end
      end
      while (n_frames <= f) @(negedge clk);
    end
    $display("MAE over %0d subjects: BR %0.2f, HR %0.2f per minute", NF, br_mae / NF, hr_mae / NF);
    check(n_frames == NF, "all frames done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
