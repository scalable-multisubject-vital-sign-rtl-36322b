// phase_unwrap -- removes the 2*pi jumps from the wrapped phase signal.
//
// The CORDIC angle of each chirp lies in (-pi, pi]; the chest motion it
// encodes can exceed that, so the raw sequence jumps by 2*pi wherever the
// true phase crosses the boundary.  The unwrapper walks the phase BRAM in
// slow-time order (address generator) and loads each sample into an
// accumulator.  A subtractor forms diff = accumulator - previous unwrapped
// value and a comparator sorts it into three cases that drive a mux:
//   diff >  pi : subtract 2*pi from the accumulator and compare again
//   diff < -pi : add 2*pi to the accumulator and compare again
//   otherwise  : pass the accumulator to the output register
// Each correction takes one clock cycle through the accumulator feedback,
// so a sample that is k turns away costs k extra cycles.  The output
// register also becomes the previous-value register for the next sample.
// The first sample of a frame passes unchanged.
//
// Following the published architecture: address generator, BRAM,
// accumulator, previous-value register, subtractor, comparator, mux with
// add / pass / subtract inputs, output register fed back.  The published
// figure labels the comparator thresholds 2*pi while the text says the
// difference is kept within -pi..pi; the -pi..pi rule of the text is the
// one that unwraps correctly and is used here.  Number format (radians with
// PHASE_FRAC fraction bits, 16-bit in, 32-bit out) is this design's choice.
//
// Interface: the phase BRAM is written through ph_* by the phase
// extractor.  A start pulse unwraps samples 0..M-1 and streams them out with
// valid/ready, out_last on the M-th.  Timing per sample: 1 read cycle,
// 1 load cycle, 1 + k compare cycles, then the output handshake.
// wrap_add / wrap_sub pulse for each 2*pi correction.
module phase_unwrap
  import vs_pkg::*;
#(
  parameter int M     = M_CHIRPS,
  parameter int OUT_W = UNWRAP_W,
  localparam int MW   = $clog2(M)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // phase BRAM write port
  input  logic                      ph_we,
  input  logic [MW-1:0]             ph_waddr,
  input  logic signed [PHASE_W-1:0] ph_wdata,
  // control
  input  logic                      start,
  output logic                      busy,
  // unwrapped phase stream
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic signed [OUT_W-1:0]   out_data,
  output logic                      out_last,
  // status
  output logic                      wrap_add,
  output logic                      wrap_sub
);

  typedef enum logic [2:0] {IDLE, READ, LOAD, CMP, OUT} state_t;
  state_t state;

  localparam logic signed [OUT_W-1:0] PI     = OUT_W'(PI_Q);
  localparam logic signed [OUT_W-1:0] TWO_PI = OUT_W'(TWO_PI_Q);

  logic [MW-1:0]             addr;       // address generator
  logic signed [PHASE_W-1:0] rdata;
  logic signed [OUT_W-1:0]   acc;        // accumulator
  logic signed [OUT_W-1:0]   prev;       // previous-value register
  logic signed [OUT_W-1:0]   diff;
  logic                      first;

  typedef enum logic [1:0] {SEL_PASS, SEL_ADD, SEL_SUB} sel_t;
  sel_t sel;

  bram_sdp #(.DEPTH(M), .WIDTH(PHASE_W)) u_bram (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (ph_we),
    .waddr (ph_waddr),
    .wdata (ph_wdata),
    .re    (state == READ),
    .raddr (addr),
    .rdata (rdata)
  );

  // subtractor and comparator
  assign diff = acc - prev;
  always_comb begin
    if (first)            sel = SEL_PASS;
    else if (diff > PI)   sel = SEL_SUB;
    else if (diff < -PI)  sel = SEL_ADD;
    else                  sel = SEL_PASS;
  end

  assign busy     = (state != IDLE);
  assign wrap_add = (state == CMP) && (sel == SEL_ADD);
  assign wrap_sub = (state == CMP) && (sel == SEL_SUB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      addr      <= '0;
      acc       <= '0;
      prev      <= '0;
      first     <= 1'b1;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          addr  <= '0;
          first <= 1'b1;
          state <= READ;
        end
        READ: state <= LOAD;
        LOAD: begin
          acc   <= OUT_W'(rdata);
          state <= CMP;
        end
        CMP: unique case (sel)
          SEL_SUB:  acc <= acc - TWO_PI;
          SEL_ADD:  acc <= acc + TWO_PI;
          default: begin
            out_data  <= acc;
            prev      <= acc;
            out_valid <= 1'b1;
            out_last  <= (addr == MW'(M-1));
            first     <= 1'b0;
            state     <= OUT;
          end
        endcase
        OUT: if (out_ready) begin
          out_valid <= 1'b0;
          out_last  <= 1'b0;
          if (addr == MW'(M-1)) begin
            state <= IDLE;
          end else begin
            addr  <= addr + 1'b1;
            state <= READ;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
