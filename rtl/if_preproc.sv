// if_preproc -- IF sample pre-processing in front of the range FFT.
//
// Each complex ADC sample (I, Q) is divided by a scale factor A and packed
// into two 32-bit fixed-point words, real and imaginary.  The scaled 16-bit
// sample occupies the upper half of each word and the lower half is zero, so
// the words read as Q16.16 and the FFT that follows has 16 fraction bits of
// headroom for its internal scaling.
//
// Following the published flow: the divide-by-A step and the 32-bit word
// with a 16-bit sample over 16 zero bits.  This design's own choices: A is
// a power of two, 2**A_SHIFT, so the divide is an arithmetic right shift
// (rounding toward minus infinity); ADC samples are 16-bit signed.
//
// Interface: valid/ready on both sides, one output register.  A sample is
// taken when in_valid && in_ready and appears on out_* the next cycle;
// throughput one sample per cycle.
module if_preproc
  import vs_pkg::*;
#(
  parameter int A_SHIFT = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [ADC_W-1:0] in_i,
  input  logic signed [ADC_W-1:0] in_q,
  output logic                    out_valid,
  input  logic                    out_ready,
  output cplx_t                   out_data
);

  logic signed [ADC_W-1:0] i_s, q_s;

  assign i_s      = in_i >>> A_SHIFT;
  assign q_s      = in_q >>> A_SHIFT;
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data.re <= {i_s, {(DATA_W-ADC_W){1'b0}}};
        out_data.im <= {q_s, {(DATA_W-ADC_W){1'b0}}};
      end
    end
  end

endmodule
