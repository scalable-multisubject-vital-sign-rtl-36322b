// bram_sdp -- simple dual-port block RAM.
//
// One write port and one synchronous read port in the same clock domain, the
// shape an FPGA block RAM takes.  The pipeline uses it for the chirp sample
// memory of the range FFT, the range-spectrum buffer of the phase extractor
// and the phase BRAM of the unwrapper.
//
// Timing: a write with we=1 lands at the clock edge.  A read with re=1
// presents mem[raddr] on rdata after the next edge; rdata keeps its value
// while re=0, so a stalled consumer sees stable data.  Reading an address in
// the same cycle as it is written returns the old contents.  The array has
// no reset (block RAM contents are not reset); rdata resets to zero.
module bram_sdp #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 64,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
