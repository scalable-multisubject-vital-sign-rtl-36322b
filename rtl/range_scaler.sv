// range_scaler -- converts the peak range bin into a distance.
//
// Range = k_hat * K * Fs/N with K = c*Tm/(2*BW): the beat frequency of bin
// k_hat is k_hat*Fs/N and K turns beat frequency into metres.  The product
// K*Fs/N is a constant of the radar configuration (about 0.0586 m per bin for
// 100 us, 2998.2 MHz chirps sampled 512 times at 6 Msps) and is computed at
// elaboration time from vs_pkg as an unsigned Q16.16 number, so the circuit
// is a single constant multiplier as in the published block diagram.
//
// Timing: one register stage; out_valid follows in_valid by one cycle.
// Output: unsigned Q16.16 metres (this design's choice of format).
module range_scaler
  import vs_pkg::*;
#(
  parameter int IDX_W          = 9,
  parameter int RANGE_STEP_Q16 = range_step_q16(N_SAMPLES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  output logic             out_valid,
  output logic [31:0]      range_q16
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      range_q16 <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) range_q16 <= 32'(in_idx) * 32'(RANGE_STEP_Q16);
    end
  end

endmodule
