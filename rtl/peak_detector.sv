// peak_detector -- arg-max of a PSD spectrum inside a bin window.
//
// The incoming Gamma(k) is first latched, with its bin number, in the
// accumulator register.  A comparator then holds it against the max-value
// register; when the new value is larger (strictly, so the first of equal
// peaks wins) and its bin lies in [lo, hi], the max-value / index register
// takes it.  After the bin flagged in_last has been compared, peak_valid
// pulses for one cycle with peak_idx = k_hat, and the registers clear for
// the next spectrum.  peak_found tells whether any bin of the window was
// seen; if none was, peak_idx and peak_val are zero.
//
// The accumulator / comparator / max-index-register structure follows the
// published peak detector; the window inputs, the tie rule and the clearing
// between spectra are this design's choices.  The same module finds the
// range bin of the subject (window 1..N/2-1) and the breathing and heartbeat
// peaks of the phase spectrum (their bands).
//
// Timing: one bin per cycle; peak_valid comes two cycles after the in_last
// bin.
module peak_detector #(
  parameter int IDX_W = 9,
  parameter int VAL_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W-1:0] lo,
  input  logic [IDX_W-1:0] hi,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [VAL_W-1:0] in_val,
  input  logic             in_last,
  output logic             peak_valid,
  output logic [IDX_W-1:0] peak_idx,
  output logic [VAL_W-1:0] peak_val,
  output logic             peak_found
);

  // accumulator register: the bin under comparison
  logic             acc_valid, acc_last;
  logic [IDX_W-1:0] acc_idx;
  logic [VAL_W-1:0] acc_val;
  // max-value / index register
  logic             max_have;
  logic [IDX_W-1:0] max_idx;
  logic [VAL_W-1:0] max_val;
  // comparator
  logic             in_win, greater, take;

  assign in_win  = (acc_idx >= lo) && (acc_idx <= hi);
  assign greater = !max_have || (acc_val > max_val);
  assign take    = acc_valid && in_win && greater;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid  <= 1'b0;
      acc_last   <= 1'b0;
      acc_idx    <= '0;
      acc_val    <= '0;
      max_have   <= 1'b0;
      max_idx    <= '0;
      max_val    <= '0;
      peak_valid <= 1'b0;
      peak_idx   <= '0;
      peak_val   <= '0;
      peak_found <= 1'b0;
    end else begin
      acc_valid <= in_valid;
      acc_last  <= in_valid && in_last;
      if (in_valid) begin
        acc_idx <= in_idx;
        acc_val <= in_val;
      end

      peak_valid <= 1'b0;
      if (acc_valid && acc_last) begin
        // close the spectrum: report, including the last bin itself
        peak_valid <= 1'b1;
        peak_found <= max_have || take;
        peak_idx   <= take ? acc_idx : (max_have ? max_idx : '0);
        peak_val   <= take ? acc_val : (max_have ? max_val : '0);
        max_have   <= 1'b0;
        max_idx    <= '0;
        max_val    <= '0;
      end else if (take) begin
        max_have <= 1'b1;
        max_idx  <= acc_idx;
        max_val  <= acc_val;
      end
    end
  end

endmodule
