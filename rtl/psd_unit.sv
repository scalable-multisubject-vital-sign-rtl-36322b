// psd_unit -- power spectral density of a stream of FFT bins.
//
// For every bin X[k] it forms Gamma[k] = Re(X[k])^2 + Im(X[k])^2, the
// "a^2 + b^2" of the PSD module, and passes the bin index and the
// end-of-spectrum flag along with it.  Two 32x32 squarings feed one adder;
// the 64-bit unsigned result cannot overflow because each square is at most
// 2^62.
//
// Timing: two register stages (squares, then sum), so out_* follow in_* by
// two cycles; one bin per cycle, no back-pressure.  The formula is the
// published one; the pipelining and widths are this design's choice.
module psd_unit
  import vs_pkg::*;
#(
  parameter int IDX_W = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [IDX_W-1:0]   in_idx,
  input  cplx_t              in_data,
  input  logic               in_last,
  output logic               out_valid,
  output logic [IDX_W-1:0]   out_idx,
  output logic [PSD_W-1:0]   out_psd,
  output logic               out_last
);

  logic [PSD_W-1:0] sq_re, sq_im;
  logic             s1_valid, s1_last;
  logic [IDX_W-1:0] s1_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_last   <= 1'b0;
      s1_idx    <= '0;
      sq_re     <= '0;
      sq_im     <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_idx   <= '0;
      out_psd   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_last  <= in_valid && in_last;
      if (in_valid) begin
        s1_idx <= in_idx;
        sq_re  <= PSD_W'(in_data.re * in_data.re);
        sq_im  <= PSD_W'(in_data.im * in_data.im);
      end
      out_valid <= s1_valid;
      out_last  <= s1_last;
      if (s1_valid) begin
        out_idx <= s1_idx;
        out_psd <= sq_re + sq_im;
      end
    end
  end

endmodule
