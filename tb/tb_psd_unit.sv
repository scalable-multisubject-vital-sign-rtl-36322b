// tb_psd_unit -- random complex bins (with the extreme values) through the
// PSD unit; each output must equal re^2 + im^2 computed here with 64-bit
// unsigned arithmetic, arrive exactly two cycles after its input and keep
// its index and last flag.
module tb_psd_unit;
  import vs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_last = 1'b0, out_valid, out_last;
  logic [8:0]  in_idx = '0, out_idx;
  cplx_t       in_data = '0;
  logic [63:0] out_psd;

  psd_unit #(.IDX_W(9)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { logic v; logic [8:0] idx; logic [63:0] p; logic last; } exp_t;
  exp_t pipe [3];
  int cyc = 0;

  function automatic logic [63:0] mag2(logic signed [31:0] a, logic signed [31:0] b);
    longint ua, ub;
    ua = (a < 0) ? -longint'(a) : longint'(a);
    ub = (b < 0) ? -longint'(b) : longint'(b);
    return 64'(ua * ua) + 64'(ub * ub);
  endfunction

  always @(posedge clk) if (rst_n) begin
    // outputs now must match what entered two edges ago
    check(out_valid == pipe[1].v, $sformatf("valid at cycle %0d", cyc));
    if (pipe[1].v)
      check(out_psd == pipe[1].p && out_idx == pipe[1].idx && out_last == pipe[1].last,
            $sformatf("cycle %0d: psd %0d want %0d", cyc, out_psd, pipe[1].p));
    pipe[1] <= pipe[0];
    pipe[0] <= '{in_valid, in_idx, mag2(in_data.re, in_data.im), in_last};
    cyc <= cyc + 1;
  end

  initial begin
    pipe[0] = '{1'b0, '0, '0, 1'b0};
    pipe[1] = '{1'b0, '0, '0, 1'b0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int k = 0; k < 2000; k++) begin
      in_valid = ($urandom_range(4) != 0);
      in_idx   = 9'(k);
      in_last  = (k % 37 == 36);
      case (k % 100)
        0: in_data = '{re: 32'sh80000000, im: 32'sh80000000};
        1: in_data = '{re: 32'sh7fffffff, im: 32'sh80000000};
        2: in_data = '{re: 32'sd0,        im: -32'sd1};
        default: in_data = '{re: 32'($urandom), im: 32'($urandom)};
      endcase
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
