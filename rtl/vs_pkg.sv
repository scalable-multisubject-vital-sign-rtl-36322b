// vs_pkg -- constants and types shared by the vital-sign radar pipeline.
//
// The radar numbers are the chirp configuration the design was sized for:
// 512 ADC samples per chirp at 6 Msps, 100 us chirps sweeping 2998.2 MHz,
// one chirp every 50 ms (20 Hz slow-time rate) and 128 chirps per frame on
// the FPGA.  From them the package derives the two scale factors the
// datapath needs:
//   * metres per range bin  = c*Tm/(2*BW) * fadc/N      (~0.0586 m)
//   * rate per phase-FFT bin = 60 * (1/Tc) / M  per minute (9.375 /min)
// and the band limits of breathing (3..36 /min) and heartbeat (48..120 /min)
// expressed in phase-FFT bins.
//
// Number formats (this design's choice where no format was published):
//   * IF samples and FFT words: 32-bit signed Q16.16; the scaled 16-bit ADC
//     sample sits in the upper half and the lower half is zero.
//   * wrapped phase: 16-bit signed radians Q3.13 (the usual CORDIC output).
//   * unwrapped phase: 32-bit signed radians, 13 fraction bits.
package vs_pkg;

  // ---- radar configuration --------------------------------------------
  parameter int  N_SAMPLES  = 512;      // ADC samples per chirp
  parameter int  M_CHIRPS   = 128;      // chirps per frame (FPGA flow)
  parameter real C_LIGHT    = 3.0e8;    // m/s
  parameter real T_CHIRP_M  = 100.0e-6; // chirp duration Tm, s
  parameter real BW_HZ      = 2998.2e6; // RF bandwidth, Hz
  parameter real FADC_HZ    = 6.0e6;    // ADC sampling rate, Hz
  parameter real FS_SLOW_HZ = 20.0;     // 1/Tc, chirp rate, Hz

  // ---- word formats -----------------------------------------------------
  parameter int ADC_W      = 16;
  parameter int DATA_W     = 32;
  parameter int FRAC_W     = 16;
  parameter int PHASE_W    = 16;
  parameter int PHASE_FRAC = 13;
  parameter int UNWRAP_W   = 32;
  parameter int PSD_W      = 2 * DATA_W;

  // pi and 2*pi in PHASE_FRAC fraction bits: round(pi * 2^13) = 25736
  parameter int PI_Q     = 25736;
  parameter int TWO_PI_Q = 2 * PI_Q;

  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  // Metres per range bin, unsigned Q16.16, for an n-point range FFT.
  function automatic int range_step_q16(int n);
    return int'(C_LIGHT * T_CHIRP_M / (2.0 * BW_HZ) * FADC_HZ / real'(n) * 65536.0);
  endfunction

  // Breaths or beats per minute per phase-FFT bin, Q8.8, for an m-point FFT.
  function automatic int rate_per_bin_q8(int m);
    return int'(60.0 * FS_SLOW_HZ / real'(m) * 256.0);
  endfunction

  // First bin at or above rate lo_per_min, last bin at or below hi_per_min.
  // A band whose lower edge falls below bin 1 starts at bin 1 (DC excluded).
  function automatic int band_lo_bin(int m, real lo_per_min);
    real w;
    int  b;
    w = 60.0 * FS_SLOW_HZ / real'(m);
    b = int'($ceil(lo_per_min / w));
    return (b < 1) ? 1 : b;
  endfunction

  function automatic int band_hi_bin(int m, real hi_per_min);
    real w;
    w = 60.0 * FS_SLOW_HZ / real'(m);
    return int'($floor(hi_per_min / w));
  endfunction

endpackage
