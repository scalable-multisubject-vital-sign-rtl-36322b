// tb_phase_unwrap -- frames of a random-walk phase.  The true phase t(m)
// (integer units of 2^-13 rad, steps below pi, drifting over many turns) is
// wrapped into (-pi, pi] and written into the phase BRAM; after start the
// unwrapper must return t(m) exactly, with last on sample M-1, under random
// out_ready.  With out_ready held high the frame must take
// sum(4 + k(m)) cycles, k(m) being the number of 2*pi corrections of sample
// m; the wrap_add / wrap_sub pulses must count the corrections.
module tb_phase_unwrap;
  import vs_pkg::*;

  localparam int M = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      ph_we = 1'b0, start = 1'b0, busy, out_valid, out_ready = 1'b0, out_last, wrap_add, wrap_sub;
  logic [$clog2(M)-1:0]      ph_waddr = '0;
  logic signed [PHASE_W-1:0] ph_wdata = '0;
  logic signed [31:0]        out_data;

  phase_unwrap #(.M(M)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int t [M];
  int k_exp [M];
  int got = 0, wraps = 0, cyc = 0;

  function automatic int wrap(int x);
    int w;
    w = x % TWO_PI_Q;
    if (w > PI_Q)   w -= TWO_PI_Q;
    if (w <= -PI_Q) w += TWO_PI_Q;
    return w;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (wrap_add || wrap_sub) wraps++;
      if (out_valid && out_ready) begin
        check(out_data == t[got], $sformatf("sample %0d: %0d want %0d", got, out_data, t[got]));
        check(out_last == (got == M - 1), "out_last");
        got++;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 6; f++) begin
      automatic int t0, cycles_exp = 0, wraps_exp = 0;
      // frame: random walk; frame 0 starts at a value that needs no turn
      t[0] = $urandom_range(2 * PI_Q - 2) - PI_Q + 1;
      for (int m = 1; m < M; m++) begin
        automatic int maxstep = (f % 2 != 0) ? PI_Q - 1 : PI_Q / 2;
        automatic int dir = (f == 2) ? 1 : (f == 3) ? -1 : 0;
        if (dir == 0) t[m] = t[m-1] + $urandom_range(2 * maxstep) - maxstep;
        else          t[m] = t[m-1] + $urandom_range(maxstep) - maxstep / 2 + dir * (maxstep / 3);
      end
      for (int m = 0; m < M; m++) begin
        automatic int w = wrap(t[m]);
        ph_we = 1'b1; ph_waddr = 7'(m); ph_wdata = 16'(w);
        @(negedge clk);
      end
      // the first sample passes unchanged: make the reference start there
      t0 = wrap(t[0]);
      for (int m = 0; m < M; m++) t[m] = t[m] - (t[0] - t0);
      // recompute expectations for the shifted reference
      cycles_exp = 0; wraps_exp = 0;
      for (int m = 0; m < M; m++) begin
        automatic int w = wrap(t[m]);
        k_exp[m] = (m == 0) ? 0 : (((t[m] - w) >= 0 ? (t[m] - w) : (w - t[m])) / TWO_PI_Q);
        cycles_exp += 4 + k_exp[m];
        wraps_exp  += k_exp[m];
      end
      ph_we = 1'b0;
      got = 0; wraps = 0;
      out_ready = 1'b1;       // frames 0,1: always ready, timed
      start = 1'b1;
      begin
        automatic int c0 = cyc;
        @(negedge clk);
        start = 1'b0;
        while (got < M) begin
          if (f >= 2) out_ready = ($urandom_range(2) != 0);
          @(negedge clk);
        end
        if (f < 2) check(cyc - c0 == cycles_exp + 1, $sformatf("frame %0d took %0d cycles, want %0d", f, cyc - c0, cycles_exp + 1));
      end
      check(wraps == wraps_exp, $sformatf("frame %0d: %0d corrections, want %0d", f, wraps, wraps_exp));
      repeat (3) @(negedge clk);
      check(!busy, "busy after the frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
