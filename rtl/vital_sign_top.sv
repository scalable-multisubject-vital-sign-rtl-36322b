// vital_sign_top -- FMCW-radar vital-sign processor, top level.
//
// One receive channel of a 77 GHz FMCW radar delivers N complex IF samples
// per chirp.  A frame is M chirps, one every 50 ms.  For each chirp the
// design finds the range bin of the strongest reflector (the subject's
// chest), takes the phase of that bin, and after M chirps turns the phase
// sequence into breathing and heart rates:
//
//   adc -> if_preproc -> rfft_module -> [range FFT core] -+-> psd_unit
//                                                         |     |
//                                                         |  peak_detector --> range_scaler -> range
//                                                         |     | k_hat
//                                                         +-> phase_extract -> [CORDIC core]
//                                                                   | phase BRAM writes
//                                     phase_unwrap <----------------+
//                                          | unwrapped phase stream
//                                     pfft_hrbr -> [phase FFT core] -> PSD -> BR/HR band peaks
//
// The FFT and CORDIC cores are vendor IP and sit outside this module; their
// stream ports are the rfft_*, cordic_* and pfft_* ports.  Everything else is
// here.  The stage order and the blocks follow the published FPGA flow;
// the frame sequencing is this design's own: the top accepts M chirps
// (adc_ready falls after the M-th), waits for the M-th phase, starts the
// unwrapper, waits for the rate result and then opens the next frame.
//
// Outputs: range_valid pulses once per chirp with the peak bin and its
// distance (Q16.16 metres; range_bin/range_psd/range_found change on the
// same edge and are held until the next chirp).  result_valid pulses once
// per frame with the breathing and heartbeat peak bins, rates (Q8.8 per
// minute) and peak PSDs.
// wrap_add / wrap_sub pulse for every 2*pi correction of the unwrapper.
// Some outputs carry bits that are constant by construction (the 16 zero
// fraction bits of the Q16.16 samples, the zero imaginary part of the
// phase-FFT input, the low zero bits of constant-multiple products).
module vital_sign_top
  import vs_pkg::*;
#(
  parameter int N       = N_SAMPLES,
  parameter int M       = M_CHIRPS,
  parameter int A_SHIFT = 2,
  localparam int AW     = $clog2(N),
  localparam int MW     = $clog2(M)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // IF samples
  input  logic                      adc_valid,
  output logic                      adc_ready,
  input  logic signed [ADC_W-1:0]   adc_i,
  input  logic signed [ADC_W-1:0]   adc_q,
  // range-FFT core (N points)
  output logic                      rfft_in_valid,
  input  logic                      rfft_in_ready,
  output cplx_t                     rfft_in_data,
  output logic                      rfft_in_last,
  input  logic                      rfft_out_valid,
  input  cplx_t                     rfft_out_data,
  input  logic                      rfft_out_last,
  // CORDIC core (arctangent)
  output logic                      cordic_in_valid,
  input  logic                      cordic_in_ready,
  output cplx_t                     cordic_in_data,
  input  logic                      cordic_out_valid,
  input  logic signed [PHASE_W-1:0] cordic_out_phase,
  // phase-FFT core (M points)
  output logic                      pfft_in_valid,
  input  logic                      pfft_in_ready,
  output cplx_t                     pfft_in_data,
  output logic                      pfft_in_last,
  input  logic                      pfft_out_valid,
  input  cplx_t                     pfft_out_data,
  input  logic                      pfft_out_last,
  // per-chirp range
  output logic                      range_valid,
  output logic [AW-1:0]             range_bin,
  output logic [31:0]               range_q16,
  output logic [PSD_W-1:0]          range_psd,
  output logic                      range_found,
  // per-frame vital signs
  output logic                      result_valid,
  output logic [MW-1:0]             br_idx,
  output logic [MW-1:0]             hr_idx,
  output logic [15:0]               br_rate,
  output logic [15:0]               hr_rate,
  output logic [PSD_W-1:0]          br_psd,
  output logic [PSD_W-1:0]          hr_psd,
  output logic                      bands_ok,
  // status
  output logic                      frame_busy,
  output logic                      unwrap_busy,
  output logic                      wrap_add,
  output logic                      wrap_sub
);

  // ---- frame sequencer --------------------------------------------------
  typedef enum logic {CAPTURE, ESTIMATE} fstate_t;
  fstate_t fstate;
  logic [MW:0] chirps_in;
  logic        chirp_loaded, frame_done, unwrap_start, capture_en;

  assign capture_en = (fstate == CAPTURE) && (chirps_in < (MW+1)'(M));
  assign frame_busy = (fstate == ESTIMATE) || (chirps_in != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate       <= CAPTURE;
      chirps_in    <= '0;
      unwrap_start <= 1'b0;
    end else begin
      unwrap_start <= 1'b0;
      if (chirp_loaded) chirps_in <= chirps_in + 1'b1;
      unique case (fstate)
        CAPTURE: if (frame_done) begin
          unwrap_start <= 1'b1;
          fstate       <= ESTIMATE;
        end
        ESTIMATE: if (result_valid) begin
          chirps_in <= '0;
          fstate    <= CAPTURE;
        end
        default: fstate <= CAPTURE;
      endcase
    end
  end

  // ---- pre-processing -----------------------------------------------------
  logic  pp_valid, pp_ready, adc_ready_pp;
  cplx_t pp_data;

  if_preproc #(.A_SHIFT(A_SHIFT)) u_pre (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (adc_valid),
    .in_ready  (adc_ready_pp),
    .in_i      (adc_i),
    .in_q      (adc_q),
    .out_valid (pp_valid),
    .out_ready (pp_ready),
    .out_data  (pp_data)
  );

  // The pre-processor's output register may hold one sample; the ADC is
  // throttled with the capture enable so no sample of a later frame slips in.
  logic [AW:0] adc_cnt;   // samples taken in the current chirp
  logic [MW:0] adc_chirps;
  assign adc_ready = adc_ready_pp && (fstate == CAPTURE) && (adc_chirps < (MW+1)'(M));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_cnt    <= '0;
      adc_chirps <= '0;
    end else begin
      if (adc_valid && adc_ready) begin
        if (adc_cnt == (AW+1)'(N-1)) begin
          adc_cnt    <= '0;
          adc_chirps <= adc_chirps + 1'b1;
        end else begin
          adc_cnt <= adc_cnt + 1'b1;
        end
      end
      if (fstate == ESTIMATE && result_valid) adc_chirps <= '0;
    end
  end

  // ---- range FFT ------------------------------------------------------------
  logic          spec_valid, spec_last, pe_busy;
  logic [AW-1:0] spec_idx;
  cplx_t         spec_data;

  rfft_module #(.N(N)) u_rfft (
    .clk           (clk),
    .rst_n         (rst_n),
    .enable        (capture_en),
    .hold          (pe_busy),
    .in_valid      (pp_valid),
    .in_ready      (pp_ready),
    .in_data       (pp_data),
    .chirp_loaded  (chirp_loaded),
    .fft_in_valid  (rfft_in_valid),
    .fft_in_ready  (rfft_in_ready),
    .fft_in_data   (rfft_in_data),
    .fft_in_last   (rfft_in_last),
    .fft_out_valid (rfft_out_valid),
    .fft_out_data  (rfft_out_data),
    .fft_out_last  (rfft_out_last),
    .spec_valid    (spec_valid),
    .spec_idx      (spec_idx),
    .spec_data     (spec_data),
    .spec_last     (spec_last)
  );

  // ---- PSD and range peak ---------------------------------------------------
  logic             rpsd_valid, rpsd_last;
  logic [AW-1:0]    rpsd_idx;
  logic [PSD_W-1:0] rpsd_val;

  psd_unit #(.IDX_W(AW)) u_rpsd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (spec_valid),
    .in_idx    (spec_idx),
    .in_data   (spec_data),
    .in_last   (spec_last),
    .out_valid (rpsd_valid),
    .out_idx   (rpsd_idx),
    .out_psd   (rpsd_val),
    .out_last  (rpsd_last)
  );

  logic             kpeak_valid, kpeak_found;
  logic [AW-1:0]    kpeak_idx;
  logic [PSD_W-1:0] kpeak_val;

  // bins 1 .. N/2-1: positive beat frequencies, DC excluded
  peak_detector #(.IDX_W(AW), .VAL_W(PSD_W)) u_rpeak (
    .clk        (clk),
    .rst_n      (rst_n),
    .lo         (AW'(1)),
    .hi         (AW'(N/2 - 1)),
    .in_valid   (rpsd_valid),
    .in_idx     (rpsd_idx),
    .in_val     (rpsd_val),
    .in_last    (rpsd_last),
    .peak_valid (kpeak_valid),
    .peak_idx   (kpeak_idx),
    .peak_val   (kpeak_val),
    .peak_found (kpeak_found)
  );

  range_scaler #(.IDX_W(AW), .RANGE_STEP_Q16(range_step_q16(N))) u_range (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (kpeak_valid),
    .in_idx    (kpeak_idx),
    .out_valid (range_valid),
    .range_q16 (range_q16)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      range_bin   <= '0;
      range_psd   <= '0;
      range_found <= 1'b0;
    end else if (kpeak_valid) begin
      range_bin   <= kpeak_idx;
      range_psd   <= kpeak_val;
      range_found <= kpeak_found;
    end
  end

  // ---- phase extraction -----------------------------------------------------
  logic                      ph_we;
  logic [MW-1:0]             ph_waddr;
  logic signed [PHASE_W-1:0] ph_wdata;

  phase_extract #(.N(N), .M(M)) u_pext (
    .clk              (clk),
    .rst_n            (rst_n),
    .spec_valid       (spec_valid),
    .spec_idx         (spec_idx),
    .spec_data        (spec_data),
    .peak_valid       (kpeak_valid),
    .peak_idx         (kpeak_idx),
    .cordic_in_valid  (cordic_in_valid),
    .cordic_in_ready  (cordic_in_ready),
    .cordic_in_data   (cordic_in_data),
    .cordic_out_valid (cordic_out_valid),
    .cordic_out_phase (cordic_out_phase),
    .ph_we            (ph_we),
    .ph_waddr         (ph_waddr),
    .ph_wdata         (ph_wdata),
    .busy             (pe_busy),
    .frame_done       (frame_done)
  );

  // ---- phase unwrapping -----------------------------------------------------
  logic                       pus_valid, pus_ready, pus_last;
  logic signed [UNWRAP_W-1:0] pus_data;

  phase_unwrap #(.M(M)) u_unwrap (
    .clk       (clk),
    .rst_n     (rst_n),
    .ph_we     (ph_we),
    .ph_waddr  (ph_waddr),
    .ph_wdata  (ph_wdata),
    .start     (unwrap_start),
    .busy      (unwrap_busy),
    .out_valid (pus_valid),
    .out_ready (pus_ready),
    .out_data  (pus_data),
    .out_last  (pus_last),
    .wrap_add  (wrap_add),
    .wrap_sub  (wrap_sub)
  );

  // ---- phase FFT and HR/BR ------------------------------------------------------
  pfft_hrbr #(
    .M       (M),
    .RATE_Q8 (rate_per_bin_q8(M)),
    .BR_LO   (band_lo_bin(M, 3.0)),
    .BR_HI   (band_hi_bin(M, 36.0)),
    .HR_LO   (band_lo_bin(M, 48.0)),
    .HR_HI   (band_hi_bin(M, 120.0))
  ) u_pfft (
    .clk           (clk),
    .rst_n         (rst_n),
    .pus_valid     (pus_valid),
    .pus_ready     (pus_ready),
    .pus_data      (pus_data),
    .pus_last      (pus_last),
    .fft_in_valid  (pfft_in_valid),
    .fft_in_ready  (pfft_in_ready),
    .fft_in_data   (pfft_in_data),
    .fft_in_last   (pfft_in_last),
    .fft_out_valid (pfft_out_valid),
    .fft_out_data  (pfft_out_data),
    .fft_out_last  (pfft_out_last),
    .result_valid  (result_valid),
    .br_idx        (br_idx),
    .hr_idx        (hr_idx),
    .br_rate       (br_rate),
    .hr_rate       (hr_rate),
    .br_psd        (br_psd),
    .hr_psd        (hr_psd),
    .bands_ok      (bands_ok)
  );

endmodule
