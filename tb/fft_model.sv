// fft_model -- behavioural model of the vendor FFT core (testbench only).
//
// Collects NPTS complex words (Q16.16 integers), computes the forward DFT
// Y[k] = (1/NPTS) * sum_n x[n] * exp(-j*2*pi*k*n/NPTS) in floating point,
// waits LATENCY cycles and returns the bins in natural order, one per cycle,
// rounded to integers, with out_last on the final bin.  The 1/NPTS scaling
// stands for the core's scaled mode.  in_ready is low while a transform is
// being returned; with STALL_PCT > 0 it also drops at random to exercise the
// back-pressure of the design.  Not synthesizable.
module fft_model
  import vs_pkg::*;
#(
  parameter int NPTS      = 512,
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  cplx_t in_data,
  input  logic  in_last,
  output logic  out_valid,
  output cplx_t out_data,
  output logic  out_last
);

  real xr[NPTS], xi[NPTS], yr[NPTS], yi[NPTS], cw[NPTS], sw[NPTS];
  int  n_in, n_out, wait_cnt;
  logic busy, stall;
  int  transforms;

  function automatic int rnd(real x);
    return (x >= 0.0) ? $rtoi(x + 0.5) : -$rtoi(-x + 0.5);
  endfunction

  initial begin
    for (int k = 0; k < NPTS; k++) begin
      cw[k] = $cos(2.0 * 3.14159265358979 * k / NPTS);
      sw[k] = $sin(2.0 * 3.14159265358979 * k / NPTS);
    end
  end

  assign in_ready = !busy && !stall;

  always @(posedge clk) begin
    if (!rst_n) begin
      n_in <= 0; n_out <= 0; busy <= 1'b0; stall <= 1'b0; wait_cnt <= 0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; transforms <= 0;
    end else begin
      stall     <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid && in_ready) begin
        xr[n_in] = real'(in_data.re);
        xi[n_in] = real'(in_data.im);
        if (n_in == NPTS - 1) begin
          for (int k = 0; k < NPTS; k++) begin
            real ar, ai;
            ar = 0.0; ai = 0.0;
            for (int n = 0; n < NPTS; n++) begin
              int t;
              t  = (k * n) % NPTS;
              ar += xr[n] * cw[t] + xi[n] * sw[t];
              ai += xi[n] * cw[t] - xr[n] * sw[t];
            end
            yr[k] = ar / NPTS;
            yi[k] = ai / NPTS;
          end
          n_in     <= 0;
          busy     <= 1'b1;
          wait_cnt <= LATENCY;
          n_out    <= 0;
          transforms <= transforms + 1;
        end else begin
          n_in <= n_in + 1;
        end
      end else if (busy) begin
        if (wait_cnt > 0) begin
          wait_cnt <= wait_cnt - 1;
        end else begin
          out_valid   <= 1'b1;
          out_data.re <= rnd(yr[n_out]);
          out_data.im <= rnd(yi[n_out]);
          out_last    <= (n_out == NPTS - 1);
          if (n_out == NPTS - 1) busy <= 1'b0;
          n_out <= n_out + 1;
        end
      end
    end
  end

endmodule
