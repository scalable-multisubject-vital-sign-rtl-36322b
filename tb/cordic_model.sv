// cordic_model -- behavioural model of the vendor CORDIC core in arctangent
// mode (testbench only).
//
// Takes (x, y) = (re, im) of a complex word and, LATENCY cycles later,
// returns atan2(y, x) in radians as signed Q3.13, the format the design
// expects from the core.  in_ready drops at random when STALL_PCT > 0.
// Not synthesizable.
module cordic_model
  import vs_pkg::*;
#(
  parameter int LATENCY   = 6,
  parameter int STALL_PCT = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  cplx_t                     in_data,
  output logic                      out_valid,
  output logic signed [PHASE_W-1:0] out_phase
);

  logic                      pv [LATENCY];
  logic signed [PHASE_W-1:0] pp [LATENCY];
  logic                      stall;

  function automatic logic signed [PHASE_W-1:0] angle(cplx_t d);
    real a;
    int  q;
    a = $atan2(real'(d.im), real'(d.re));
    q = (a >= 0.0) ? $rtoi(a * 8192.0 + 0.5) : -$rtoi(-a * 8192.0 + 0.5);
    if (q > PI_Q)  q = PI_Q;
    if (q < -PI_Q) q = -PI_Q;
    return PHASE_W'(q);
  endfunction

  assign in_ready  = !stall;
  assign out_valid = pv[LATENCY-1];
  assign out_phase = pp[LATENCY-1];

  always @(posedge clk) begin
    if (!rst_n) begin
      stall <= 1'b0;
      for (int i = 0; i < LATENCY; i++) begin pv[i] <= 1'b0; pp[i] <= '0; end
    end else begin
      stall <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
      pv[0] <= in_valid && in_ready;
      pp[0] <= angle(in_data);
      for (int i = 1; i < LATENCY; i++) begin pv[i] <= pv[i-1]; pp[i] <= pp[i-1]; end
    end
  end

endmodule
