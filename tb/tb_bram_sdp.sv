// tb_bram_sdp -- random writes and reads against a reference array.  A read
// returns the stored word one cycle after re; rdata holds while re is low;
// a read of the address being written returns the old word.
module tb_bram_sdp;

  localparam int DEPTH = 128, WIDTH = 40, AW = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             we = 1'b0, re = 1'b0;
  logic [AW-1:0]    waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  bram_sdp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [WIDTH-1:0] ref_mem [DEPTH];
  logic [WIDTH-1:0] want, held;
  logic             pend = 1'b0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      we = 1'b1; waddr = AW'(a); wdata = WIDTH'({$urandom, $urandom});
      ref_mem[a] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    // random mix
    for (int k = 0; k < 3000; k++) begin
      we    = ($urandom_range(1) == 1);
      waddr = AW'($urandom_range(DEPTH - 1));
      wdata = WIDTH'({$urandom, $urandom});
      re    = ($urandom_range(2) != 0);
      raddr = ($urandom_range(4) == 0) ? waddr : AW'($urandom_range(DEPTH - 1));
      if (re) want = ref_mem[raddr];   // old contents, even if written now
      held = rdata;
      @(posedge clk);
      #1;
      if (we) ref_mem[waddr] = wdata;
      if (re) check(rdata == want, $sformatf("read %0d: got %h want %h", raddr, rdata, want));
      else    check(rdata == held, "rdata changed without re");
      @(negedge clk);
    end
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
