// tb_if_preproc -- random I/Q samples through the pre-processor with random
// valid and ready.  Each output word must carry floor(sample / 4) in its
// upper 16 bits and zeros below (A = 4), in order, with nothing lost or
// duplicated; with both sides always ready one sample passes per cycle.
module tb_if_preproc;
  import vs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic signed [15:0] in_i = '0, in_q = '0;
  cplx_t out_data;

  if_preproc #(.A_SHIFT(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int floordiv4(int x);
    return (x >= 0) ? x / 4 : -((-x + 3) / 4);
  endfunction

  int exp_re[$], exp_im[$];
  int sent = 0, got = 0, rate_mode = 0, burst_cycles = 0, burst_words = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic int er = exp_re.pop_front();
      automatic int ei = exp_im.pop_front();
      check(out_data.re == {er[15:0], 16'h0000} && out_data.im == {ei[15:0], 16'h0000},
            $sformatf("word %0d: got %h/%h want %0d/%0d", got, out_data.re, out_data.im, er, ei));
      got++;
      if (rate_mode != 0) burst_words++;
    end
    if (rate_mode != 0) burst_cycles++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random traffic, including the extreme values
    for (int k = 0; k < 2000; k++) begin
      out_ready = ($urandom_range(3) != 0);
      if ($urandom_range(3) != 0 || in_valid) begin
        if (!in_valid) begin
          in_valid = 1'b1;
          case (k % 50)
            0: begin in_i = 16'sh8000; in_q = 16'sh7fff; end
            1: begin in_i = -16'sd1;   in_q = 16'sd1;    end
            default: begin in_i = 16'($urandom); in_q = 16'($urandom); end
          endcase
        end
      end
      @(posedge clk);
      if (in_valid && in_ready) begin
        exp_re.push_back(floordiv4(int'(in_i)));
        exp_im.push_back(floordiv4(int'(in_q)));
        sent++;
        #1 in_valid = 1'b0;
      end
      @(negedge clk);
    end
    // full-rate burst: 100 samples, both sides always ready
    in_valid = 1'b0; out_ready = 1'b1;
    repeat (3) @(negedge clk);
    rate_mode = 1;
    for (int k = 0; k < 100; k++) begin
      in_valid = 1'b1; in_i = 16'(k * 77 - 3000); in_q = 16'(-k * 13);
      @(posedge clk);
      exp_re.push_back(floordiv4(int'(in_i)));
      exp_im.push_back(floordiv4(int'(in_q)));
      sent++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    @(negedge clk);
    rate_mode = 0;
    check(burst_words == 100 && burst_cycles == 101, $sformatf("burst: %0d words in %0d cycles", burst_words, burst_cycles));
    repeat (5) @(negedge clk);
    check(got == sent && exp_re.size() == 0, $sformatf("sent %0d, received %0d", sent, got));
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
