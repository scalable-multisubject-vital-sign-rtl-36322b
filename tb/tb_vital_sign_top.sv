// tb_vital_sign_top -- end-to-end test of the vital-sign processor at its
// full size (N = 512 samples per chirp, M = 128 chirps per frame).
//
// A subject is synthesised as one reflector at range bin K0 whose phase
// moves as phi(m) = PHI0 + AB*sin(2*pi*B*m/M) + AH*sin(2*pi*H*m/M + 0.3):
// breathing at phase-FFT bin B, heartbeat at bin H.  The IF sample of chirp
// m, sample n is DC + A*exp(j*(2*pi*K0*n/N + phi(m))); the DC term is
// stronger than the subject so the range search must skip bin 0.  The
// breathing swing is several radians, so the wrapped phase jumps and the
// unwrapper must correct it, sometimes by two turns.  The FFT and CORDIC
// cores are behavioural models that stall at random.
//
// Two frames are run with different subjects.  Checks: the range bin and
// distance of every chirp, the unwrapped phase of every chirp (it must
// equal phi(m) up to a constant multiple of 2*pi), the breathing and
// heartbeat bins and rates of each frame, and the frame processing time
// against 0.815 ms at 300 MHz (244,500 cycles).  Each mechanism (ADC
// back-pressure, FFT and CORDIC stalls, range-FFT hold, DC bin rejected,
// 2*pi added, 2*pi subtracted, double correction, unwrapper stall, frame
// switch) is counted and must occur at least once.
module tb_vital_sign_top;
  import vs_pkg::*;

  localparam int N  = N_SAMPLES;
  localparam int M  = M_CHIRPS;
  localparam int NF = 2;
  localparam real TWO_PI = 6.283185307179586;
  localparam int  FRAME_CYCLE_LIMIT = 244500;   // 0.815 ms at 300 MHz
  localparam longint TP_Q = longint'(TWO_PI_Q);   // 2*pi in the unwrapped-phase format

  // per-frame subject
  int  k0_f [NF] = '{30, 100};
  int  b_f  [NF] = '{2, 3};
  int  h_f  [NF] = '{8, 11};
  localparam real A    = 6000.0;
  localparam real DC   = 9000.0;
  localparam real AB   = 6.5;
  localparam real AH   = 0.6;
  localparam real PHI0 = 3.0;

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

  fft_model #(.NPTS(N), .LATENCY(12), .STALL_PCT(10)) u_rfft_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rfft_in_valid), .in_ready(rfft_in_ready), .in_data(rfft_in_data), .in_last(rfft_in_last),
    .out_valid(rfft_out_valid), .out_data(rfft_out_data), .out_last(rfft_out_last));

  cordic_model #(.LATENCY(6), .STALL_PCT(30)) u_cordic_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cordic_in_valid), .in_ready(cordic_in_ready), .in_data(cordic_in_data),
    .out_valid(cordic_out_valid), .out_phase(cordic_out_phase));

  fft_model #(.NPTS(M), .LATENCY(12), .STALL_PCT(20)) u_pfft_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(pfft_in_valid), .in_ready(pfft_in_ready), .in_data(pfft_in_data), .in_last(pfft_in_last),
    .out_valid(pfft_out_valid), .out_data(pfft_out_data), .out_last(pfft_out_last));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic real phi(int f, int m);
    return PHI0 + AB * $sin(TWO_PI * b_f[f] * m / M) + AH * $sin(TWO_PI * h_f[f] * m / M + 0.3);
  endfunction

  // ---- mechanism counters ---------------------------------------------------
  int n_adc_stall = 0, n_rfft_stall = 0, n_cordic_stall = 0, n_hold = 0, n_dc_rejected = 0;
  int n_add = 0, n_sub = 0, n_double = 0, n_pus_stall = 0, n_frames = 0;
  logic prev_wrap = 1'b0;
  logic [PSD_W-1:0] dc_psd = '0;

  always @(posedge clk) if (rst_n) begin
    if (adc_valid && !adc_ready && int'(dut.u_rfft.state) != 0) n_adc_stall++;
    if (rfft_in_valid && !rfft_in_ready) n_rfft_stall++;
    if (cordic_in_valid && !cordic_in_ready) n_cordic_stall++;
    if (int'(dut.u_rfft.state) == 1 && dut.u_rfft.hold) n_hold++;
    if (wrap_add) n_add++;
    if (wrap_sub) n_sub++;
    if ((wrap_add || wrap_sub) && prev_wrap) n_double++;
    prev_wrap <= wrap_add || wrap_sub;
    if (dut.pus_valid && !dut.pus_ready) n_pus_stall++;
    if (dut.rpsd_valid && dut.rpsd_idx == 0) dc_psd <= dut.rpsd_val;
  end

  // ---- stimulus -----------------------------------------------------------------
  int frame_start [NF];
  int frame_end   [NF];
  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++) begin
      // wait for the frame to open
      while (frame_busy) @(negedge clk);
      frame_start[f] = cycle;
      for (int m = 0; m < M; m++) begin
        real p;
        p = phi(f, m);
        for (int n = 0; n < N; n++) begin
          real arg;
          if ($urandom_range(99) < 5) @(negedge clk);     // idle gaps
          arg       = TWO_PI * k0_f[f] * n / N + p;
          adc_i     = ADC_W'($rtoi(DC + A * $cos(arg) + 32768.5) - 32768);
          adc_q     = ADC_W'($rtoi(DC + A * $sin(arg) + 32768.5) - 32768);
          adc_valid = 1'b1;
          #1;
          while (!adc_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          adc_valid = 1'b0;
        end
      end
      while (n_frames <= f) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    finish_test();
  end

  // ---- per-chirp range and per-sample phase checks ----------------------------------
  int chirp_no = 0, pus_no = 0;
  longint pus_off0 = 0;
  always @(posedge clk) if (rst_n) begin
    if (range_valid) begin
      automatic int f = n_frames;
      automatic real step_m = 3.0e8 * 100.0e-6 / (2.0 * 2998.2e6) * 6.0e6 / N;
      automatic real want_m = k0_f[f] * step_m;
      automatic real got_m  = real'(range_q16) / 65536.0;
      check(int'(range_bin) == k0_f[f] && range_found, $sformatf("frame %0d chirp %0d: range bin %0d, want %0d", f, chirp_no, range_bin, k0_f[f]));
      check(got_m > want_m - 0.001 && got_m < want_m + 0.001, $sformatf("range %f m, want %f m", got_m, want_m));
      if (dc_psd > range_psd) n_dc_rejected++;
      chirp_no++;
    end
    if (dut.pus_valid && dut.pus_ready) begin
      automatic int f = n_frames;
      automatic longint want = longint'($rtoi((phi(f, pus_no) + 100.0) * 8192.0 + 0.5)) - 100 * 8192;
      automatic longint off;
      off  = longint'(dut.pus_data) - want;
      if (pus_no == 0) begin
        pus_off0 = off;
        check(off % TP_Q == 0 || (off % TP_Q) < 16 || (off % TP_Q) > TP_Q - 16 ||
              (-off % TP_Q) < 16 || (-off % TP_Q) > TP_Q - 16,
              $sformatf("frame %0d first phase off by %0d, not a multiple of 2pi", f, off));
      end else begin
        check(off - pus_off0 < 24 && off - pus_off0 > -24,
              $sformatf("frame %0d phase %0d: unwrapped %0d, want %0d (+%0d)", f, pus_no, dut.pus_data, want, pus_off0));
      end
      pus_no = (pus_no == M - 1) ? 0 : pus_no + 1;
    end
    if (result_valid) begin
      automatic int f = n_frames;
      automatic int want_br = $rtoi(b_f[f] * 60.0 * 20.0 / M * 256.0 + 0.5);
      automatic int want_hr = $rtoi(h_f[f] * 60.0 * 20.0 / M * 256.0 + 0.5);
      frame_end[f] = cycle;
      check(chirp_no == M, $sformatf("frame %0d: %0d range results, want %0d", f, chirp_no, M));
      check(int'(br_idx) == b_f[f], $sformatf("frame %0d: BR bin %0d, want %0d", f, br_idx, b_f[f]));
      check(int'(hr_idx) == h_f[f], $sformatf("frame %0d: HR bin %0d, want %0d", f, hr_idx, h_f[f]));
      check(int'(br_rate) == want_br, $sformatf("frame %0d: BR %0d/256, want %0d/256", f, br_rate, want_br));
      check(int'(hr_rate) == want_hr, $sformatf("frame %0d: HR %0d/256, want %0d/256", f, hr_rate, want_hr));
      check(bands_ok && br_psd > 0 && hr_psd > 0, "bands_ok / peak PSDs");
      check(frame_end[f] - frame_start[f] <= FRAME_CYCLE_LIMIT,
            $sformatf("frame %0d took %0d cycles, limit %0d", f, frame_end[f] - frame_start[f], FRAME_CYCLE_LIMIT));
      $display("frame %0d: range bin %0d, BR %0.2f /min (bin %0d), HR %0.2f /min (bin %0d), %0d cycles = %0.3f ms at 300 MHz",
               f, range_bin, br_rate / 256.0, br_idx, hr_rate / 256.0, hr_idx,
               frame_end[f] - frame_start[f], (frame_end[f] - frame_start[f]) / 300.0e3);
      chirp_no = 0;
      n_frames++;
    end
  end

  task automatic mech(input int n, input string name);
    $display("  mechanism %-22s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  task automatic finish_test();
    mech(n_adc_stall,    "adc back-pressure");
    mech(n_rfft_stall,   "range-FFT core stall");
    mech(n_hold,         "range-FFT hold");
    mech(n_cordic_stall, "CORDIC stall");
    mech(n_dc_rejected,  "DC bin rejected");
    mech(n_add,          "2pi added");
    mech(n_sub,          "2pi subtracted");
    mech(n_double,       "double correction");
    mech(n_pus_stall,    "unwrapper stall");
    mech(n_frames - 1,   "frame switch");
    check(n_frames == NF, $sformatf("%0d frames done, want %0d", n_frames, NF));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  // watchdog
  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
