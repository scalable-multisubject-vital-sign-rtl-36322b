// phase_extract -- picks the subject's range bin and turns it into a phase.
//
// The range spectrum of the current chirp is written into a buffer as it
// streams past.  When the peak detector reports k_hat, the bin X[k_hat] is
// read back and handed to the CORDIC core (arctangent mode), which returns
// its angle atan2(Im, Re).  The angle is written into the phase BRAM at the
// chirp's slow-time index 0..M-1, so after M chirps the BRAM holds the
// wrapped phase signal of the frame and frame_done pulses.
//
// Following the published flow: the phase is taken at the bin the range FFT
// found, with a vendor CORDIC core, and stored in block RAM.  This design's
// choices: k_hat is the peak of the same chirp's spectrum (no per-frame
// locking); the CORDIC is reached through valid/ready input and valid output
// ports and returns radians in signed Q3.13.
//
// busy is high from the first bin of a spectrum until its phase has been
// written; the range-FFT sequencer must not send the next spectrum meanwhile.
// Timing after peak_valid: 1 cycle buffer read, then the CORDIC handshake
// and latency, then one cycle to write the phase BRAM.
module phase_extract
  import vs_pkg::*;
#(
  parameter int N = N_SAMPLES,
  parameter int M = M_CHIRPS,
  localparam int AW = $clog2(N),
  localparam int MW = $clog2(M)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // range spectrum
  input  logic                      spec_valid,
  input  logic [AW-1:0]             spec_idx,
  input  cplx_t                     spec_data,
  // range peak
  input  logic                      peak_valid,
  input  logic [AW-1:0]             peak_idx,
  // CORDIC core
  output logic                      cordic_in_valid,
  input  logic                      cordic_in_ready,
  output cplx_t                     cordic_in_data,
  input  logic                      cordic_out_valid,
  input  logic signed [PHASE_W-1:0] cordic_out_phase,
  // phase BRAM write port
  output logic                      ph_we,
  output logic [MW-1:0]             ph_waddr,
  output logic signed [PHASE_W-1:0] ph_wdata,
  // status
  output logic                      busy,
  output logic                      frame_done
);

  typedef enum logic [1:0] {IDLE, READ, SEND, WAIT_C} state_t;
  state_t state;

  logic          receiving;
  logic [MW-1:0] chirp_cnt;
  logic          rd_en;

  assign rd_en = (state == IDLE) && peak_valid;

  bram_sdp #(.DEPTH(N), .WIDTH(2*DATA_W)) u_spec (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (spec_valid),
    .waddr (spec_idx),
    .wdata (spec_data),
    .re    (rd_en),
    .raddr (peak_idx),
    .rdata (cordic_in_data)
  );

  assign cordic_in_valid = (state == SEND);
  assign busy            = receiving || (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      receiving  <= 1'b0;
      chirp_cnt  <= '0;
      ph_we      <= 1'b0;
      ph_waddr   <= '0;
      ph_wdata   <= '0;
      frame_done <= 1'b0;
    end else begin
      ph_we      <= 1'b0;
      frame_done <= 1'b0;
      if (spec_valid) receiving <= 1'b1;
      if (peak_valid) receiving <= 1'b0;
      unique case (state)
        IDLE:   if (peak_valid) state <= READ;
        READ:   state <= SEND;
        SEND:   if (cordic_in_ready) state <= WAIT_C;
        WAIT_C: if (cordic_out_valid) begin
          ph_we     <= 1'b1;
          ph_waddr  <= chirp_cnt;
          ph_wdata  <= cordic_out_phase;
          if (chirp_cnt == MW'(M-1)) begin
            chirp_cnt  <= '0;
            frame_done <= 1'b1;
          end else begin
            chirp_cnt <= chirp_cnt + 1'b1;
          end
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
