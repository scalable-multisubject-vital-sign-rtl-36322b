// pfft_hrbr -- phase FFT and heart-rate / breath-rate estimation.
//
// The unwrapped phase signal of a frame (M slow-time samples) is sent to the
// phase-FFT core as a real signal: radians are shifted from PHASE_FRAC to the
// FFT's FRAC_W fraction bits and the imaginary part is zero.  The returned
// spectrum is numbered, squared into a PSD (psd_unit) and scanned by two
// peak detectors, one over the breathing band and one over the heartbeat
// band.  No FIR or IIR filtering is done: splitting the spectrum into bands
// takes its place.  The rate of a band is its peak bin times the bin width,
// rate = k / M * fs * 60 per minute, fs being the chirp rate.
//
// Following the published flow: phase FFT, band split instead of filters,
// peak index times the bin width.  The bands are the typical human ranges,
// 3..36 breaths and 48..120 beats per minute, converted to bins.  With the
// 20 Hz chirp rate and M = 128 one bin is 9.375 /min, so the default bands
// are bins 1..3 (breathing) and 6..12 (heartbeat).  The rate scale and band
// limits are parameters.  Result format: unsigned Q8.8 per minute.
//
// Interface: pus_* is the unwrapped phase stream (valid/ready/last); the
// ready comes straight from the FFT core, so a stall of the core holds the
// unwrapper.  fft_in_* / fft_out_* connect the vendor FFT core.  Timing:
// result_valid pulses 5 cycles after the last bin leaves the FFT core.
// br_psd / hr_psd give the PSD at each peak (for a presence threshold
// downstream); bands_ok says both bands held at least one bin.
module pfft_hrbr
  import vs_pkg::*;
#(
  parameter int M       = M_CHIRPS,
  parameter int RATE_Q8 = rate_per_bin_q8(M_CHIRPS),
  parameter int BR_LO   = band_lo_bin(M_CHIRPS, 3.0),
  parameter int BR_HI   = band_hi_bin(M_CHIRPS, 36.0),
  parameter int HR_LO   = band_lo_bin(M_CHIRPS, 48.0),
  parameter int HR_HI   = band_hi_bin(M_CHIRPS, 120.0),
  localparam int MW     = $clog2(M)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // unwrapped phase stream
  input  logic                       pus_valid,
  output logic                       pus_ready,
  input  logic signed [UNWRAP_W-1:0] pus_data,
  input  logic                       pus_last,
  // phase-FFT core
  output logic                       fft_in_valid,
  input  logic                       fft_in_ready,
  output cplx_t                      fft_in_data,
  output logic                       fft_in_last,
  input  logic                       fft_out_valid,
  input  cplx_t                      fft_out_data,
  input  logic                       fft_out_last,
  // result
  output logic                       result_valid,
  output logic [MW-1:0]              br_idx,
  output logic [MW-1:0]              hr_idx,
  output logic [15:0]                br_rate,
  output logic [15:0]                hr_rate,
  output logic [PSD_W-1:0]           br_psd,
  output logic [PSD_W-1:0]           hr_psd,
  output logic                       bands_ok
);

  // ---- input: real phase signal into the FFT --------------------------
  assign fft_in_valid   = pus_valid;
  assign pus_ready      = fft_in_ready;
  assign fft_in_data.re = DATA_W'(pus_data <<< (FRAC_W - PHASE_FRAC));
  assign fft_in_data.im = '0;
  assign fft_in_last    = pus_last;

  // ---- output: number the bins ----------------------------------------
  logic [MW-1:0] bin_cnt;
  logic          bin_last;
  assign bin_last = fft_out_last || (bin_cnt == MW'(M-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             bin_cnt <= '0;
    else if (fft_out_valid) bin_cnt <= bin_last ? '0 : bin_cnt + 1'b1;
  end

  logic             psd_valid, psd_last;
  logic [MW-1:0]    psd_idx;
  logic [PSD_W-1:0] psd_val;

  psd_unit #(.IDX_W(MW)) u_psd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (fft_out_valid),
    .in_idx    (bin_cnt),
    .in_data   (fft_out_data),
    .in_last   (bin_last),
    .out_valid (psd_valid),
    .out_idx   (psd_idx),
    .out_psd   (psd_val),
    .out_last  (psd_last)
  );

  // ---- band peak search -----------------------------------------------
  logic             br_pv, hr_pv, br_found, hr_found;
  logic [MW-1:0]    br_k, hr_k;
  logic [PSD_W-1:0] br_val, hr_val;

  peak_detector #(.IDX_W(MW), .VAL_W(PSD_W)) u_br_peak (
    .clk(clk), .rst_n(rst_n), .lo(MW'(BR_LO)), .hi(MW'(BR_HI)),
    .in_valid(psd_valid), .in_idx(psd_idx), .in_val(psd_val), .in_last(psd_last),
    .peak_valid(br_pv), .peak_idx(br_k), .peak_val(br_val), .peak_found(br_found)
  );

  peak_detector #(.IDX_W(MW), .VAL_W(PSD_W)) u_hr_peak (
    .clk(clk), .rst_n(rst_n), .lo(MW'(HR_LO)), .hi(MW'(HR_HI)),
    .in_valid(psd_valid), .in_idx(psd_idx), .in_val(psd_val), .in_last(psd_last),
    .peak_valid(hr_pv), .peak_idx(hr_k), .peak_val(hr_val), .peak_found(hr_found)
  );

  // ---- peak index times bin width -------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result_valid <= 1'b0;
      br_idx       <= '0;
      hr_idx       <= '0;
      br_rate      <= '0;
      hr_rate      <= '0;
      br_psd       <= '0;
      hr_psd       <= '0;
      bands_ok     <= 1'b0;
    end else begin
      result_valid <= br_pv && hr_pv;
      if (br_pv && hr_pv) begin
        br_idx  <= br_k;
        hr_idx  <= hr_k;
        br_rate <= 16'(32'(br_k) * 32'(RATE_Q8));
        hr_rate <= 16'(32'(hr_k) * 32'(RATE_Q8));
        br_psd  <= br_val;
        hr_psd  <= hr_val;
        bands_ok <= br_found && hr_found;
      end
    end
  end

endmodule
