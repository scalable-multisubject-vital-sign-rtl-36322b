// tb_peak_detector -- random spectra with random windows.  The reference
// arg-max (first maximum among the bins in [lo, hi]) is computed here; the
// detector must report it two cycles after the last bin, with its value,
// and report "not found" for a window that holds no bin.  Spectra with
// equal peaks and back-to-back spectra without a gap are included.
module tb_peak_detector;

  localparam int IW = 7, VW = 64, L = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [IW-1:0] lo = '0, hi = '0, in_idx = '0, peak_idx;
  logic          in_valid = 1'b0, in_last = 1'b0, peak_valid, peak_found;
  logic [VW-1:0] in_val = '0, peak_val;

  peak_detector #(.IDX_W(IW), .VAL_W(VW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { int idx; logic [VW-1:0] val; bit found; int due; } want_t;
  want_t wq[$];
  int cyc = 0, n_reports = 0, n_spectra = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && peak_valid) begin
      automatic want_t w = wq.pop_front();
      check(cyc == w.due, $sformatf("report at cycle %0d, due %0d", cyc, w.due));
      check(peak_found == w.found, "found flag");
      if (w.found) check(peak_idx == IW'(w.idx) && peak_val == w.val,
                         $sformatf("peak %0d (%0d) want %0d (%0d)", peak_idx, peak_val, w.idx, w.val));
      n_reports++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int s = 0; s < 300; s++) begin
      automatic int l = $urandom_range(20, 60), h;
      automatic int best = -1;
      automatic logic [VW-1:0] bv = '0;
      automatic logic [VW-1:0] vals [L];
      automatic bit ties = (s % 5 == 0);
      l = (s % 17 == 0) ? 90 : $urandom_range(0, 40);
      h = (s % 17 == 0) ? 95 : l + $urandom_range(0, 50);
      lo = IW'(l); hi = IW'(h);
      for (int k = 0; k < 64; k++) vals[k] = ties ? VW'($urandom_range(3)) : VW'({$urandom, $urandom});
      for (int k = 0; k < 64; k++)
        if (k >= l && k <= h && (best < 0 || vals[k] > bv)) begin best = k; bv = vals[k]; end
      for (int k = 0; k < 64; k++) begin
        in_valid = 1'b1; in_idx = IW'(k); in_val = vals[k]; in_last = (k == 63);
        if (k == 63) wq.push_back('{best, bv, best >= 0, cyc + 2});
        @(negedge clk);
        if ($urandom_range(9) == 0 && k != 63) begin
          in_valid = 1'b0; @(negedge clk);
        end
      end
      in_valid = 1'b0; in_last = 1'b0;
      n_spectra++;
      if (s % 2 != 0) begin
        @(negedge clk);
        @(negedge clk);   // keep lo/hi until the report
      end else begin
        // next spectrum back to back, window unchanged until the report
        @(negedge clk);
        @(negedge clk);
      end
    end
    repeat (4) @(negedge clk);
    check(n_reports == n_spectra, $sformatf("%0d reports for %0d spectra", n_reports, n_spectra));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
