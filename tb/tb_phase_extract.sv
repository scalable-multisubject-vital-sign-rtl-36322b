// tb_phase_extract -- random range spectra, each followed by a peak index,
// with the behavioural CORDIC core stalling at random.  For every chirp the
// phase written to the phase BRAM must be atan2(Im, Re) of the chosen bin
// (computed here, radians Q3.13, within one LSB) at address chirp mod M;
// frame_done must pulse with the write of every M-th phase; busy must be
// high from the first bin of a spectrum until its phase is written.
module tb_phase_extract;
  import vs_pkg::*;

  localparam int N = 64, M = 8, NCH = 3 * M;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                      spec_valid = 1'b0, peak_valid = 1'b0;
  logic [$clog2(N)-1:0]      spec_idx = '0, peak_idx = '0;
  cplx_t                     spec_data = '0;
  logic                      cordic_in_valid, cordic_in_ready, cordic_out_valid;
  cplx_t                     cordic_in_data;
  logic signed [PHASE_W-1:0] cordic_out_phase;
  logic                      ph_we, busy, frame_done;
  logic [$clog2(M)-1:0]      ph_waddr;
  logic signed [PHASE_W-1:0] ph_wdata;

  phase_extract #(.N(N), .M(M)) dut (.*);

  cordic_model #(.LATENCY(4), .STALL_PCT(40)) u_cordic (
    .clk(clk), .rst_n(rst_n), .in_valid(cordic_in_valid), .in_ready(cordic_in_ready),
    .in_data(cordic_in_data), .out_valid(cordic_out_valid), .out_phase(cordic_out_phase));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int want_phase [NCH];
  int writes = 0, dones = 0;

  always @(posedge clk) if (rst_n) begin
    if (ph_we) begin
      check(ph_waddr == ($clog2(M))'(writes % M), $sformatf("write %0d at address %0d", writes, ph_waddr));
      check(int'(ph_wdata) - want_phase[writes] <= 1 && int'(ph_wdata) - want_phase[writes] >= -1,
            $sformatf("chirp %0d: phase %0d want %0d", writes, ph_wdata, want_phase[writes]));
      check(frame_done == (writes % M == M - 1), $sformatf("frame_done at write %0d", writes));
      writes++;
    end else begin
      check(!frame_done, "frame_done without a write");
    end
    if (frame_done) dones++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      automatic int k = $urandom_range(N - 1);
      automatic cplx_t chosen;
      check(!busy, $sformatf("busy before chirp %0d", c));
      for (int n = 0; n < N; n++) begin
        spec_valid = 1'b1; spec_idx = ($clog2(N))'(n);
        spec_data.re = (c % 5 == 0) ? -32'sd5000 : 32'($urandom) >>> 4;
        spec_data.im = (c % 7 == 3) ? 32'sd0 : 32'($urandom) >>> 4;
        if (n == k) chosen = spec_data;
        @(negedge clk);
        check(busy, "busy while the spectrum arrives");
      end
      spec_valid = 1'b0;
      want_phase[c] = $rtoi($atan2(real'(chosen.im), real'(chosen.re)) * 8192.0 + (($atan2(real'(chosen.im), real'(chosen.re)) >= 0) ? 0.5 : -0.5));
      repeat (3) @(negedge clk);
      check(busy, "busy before the peak");
      peak_valid = 1'b1; peak_idx = ($clog2(N))'(k);
      @(negedge clk);
      peak_valid = 1'b0;
      while (writes <= c) begin
        check(busy || ph_we, "busy until the phase is written");
        @(negedge clk);
      end
      @(negedge clk);
    end
    check(writes == NCH && dones == NCH / M, $sformatf("%0d writes, %0d frame_done", writes, dones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
