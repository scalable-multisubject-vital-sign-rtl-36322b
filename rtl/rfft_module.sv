// rfft_module -- chirp memory and sequencing around the range FFT.
//
// The pre-processed IF samples of one chirp are first written into a block
// RAM of N complex words.  Once the chirp is complete the memory is read in
// order and streamed to the FFT processor; the returned spectrum is numbered
// bin by bin and passed on as spec_* for the PSD, the peak detector and the
// phase extractor.  This is the "IF signal -> memory -> FFT processor"
// arrangement of the range-FFT module.  The FFT processor itself is a vendor
// IP core outside this module, reached through its ports (fft_in_*, fft_out_*).
//
// This design's choices: a single chirp buffer; a new chirp is accepted as
// soon as the previous one has been read out, while the FFT is still
// working; the FFT ports are AXI-stream-like, input with valid/ready/last,
// output with valid/last and no back-pressure, natural bin order.
//
// Control: samples are accepted (in_ready) only in LOAD while enable is
// high.  chirp_loaded pulses when the N-th sample is written.  Streaming
// waits while hold is high (the phase extractor is still reading the
// previous spectrum).  Timing: N cycles to load, N cycles (plus FFT stalls)
// to stream, one sample/bin per cycle.
module rfft_module
  import vs_pkg::*;
#(
  parameter int N = N_SAMPLES,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic          hold,
  // pre-processed samples
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t         in_data,
  output logic          chirp_loaded,
  // to the FFT IP
  output logic          fft_in_valid,
  input  logic          fft_in_ready,
  output cplx_t         fft_in_data,
  output logic          fft_in_last,
  // from the FFT IP
  input  logic          fft_out_valid,
  input  cplx_t         fft_out_data,
  input  logic          fft_out_last,
  // numbered range spectrum
  output logic          spec_valid,
  output logic [AW-1:0] spec_idx,
  output cplx_t         spec_data,
  output logic          spec_last
);

  typedef enum logic [1:0] {LOAD, WAIT_GO, STREAM} state_t;
  state_t state;

  logic [AW-1:0] wr_addr;
  logic [AW:0]   rd_addr;      // one bit wider: counts to N
  logic          rd_en, adv, v_q, last_q;
  logic [AW-1:0] out_cnt;
  logic          wr_en;

  assign in_ready = (state == LOAD) && enable;
  assign wr_en    = in_valid && in_ready;

  // read side: a word is fetched when the output slot is empty or drains
  assign adv   = !v_q || fft_in_ready;
  assign rd_en = (state == STREAM) && adv && (rd_addr < (AW+1)'(N));

  bram_sdp #(.DEPTH(N), .WIDTH(2*DATA_W)) u_mem (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (wr_en),
    .waddr (wr_addr),
    .wdata (in_data),
    .re    (rd_en),
    .raddr (rd_addr[AW-1:0]),
    .rdata (fft_in_data)
  );

  assign fft_in_valid = v_q;
  assign fft_in_last  = v_q && last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= LOAD;
      wr_addr      <= '0;
      rd_addr      <= '0;
      v_q          <= 1'b0;
      last_q       <= 1'b0;
      chirp_loaded <= 1'b0;
    end else begin
      chirp_loaded <= 1'b0;
      unique case (state)
        LOAD: if (wr_en) begin
          wr_addr <= wr_addr + 1'b1;
          if (wr_addr == AW'(N-1)) begin
            wr_addr      <= '0;
            chirp_loaded <= 1'b1;
            state        <= WAIT_GO;
          end
        end
        WAIT_GO: if (!hold) begin
          rd_addr <= '0;
          state   <= STREAM;
        end
        STREAM: begin
          if (adv) begin
            if (rd_en) begin
              v_q     <= 1'b1;
              last_q  <= (rd_addr == (AW+1)'(N-1));
              rd_addr <= rd_addr + 1'b1;
            end else begin
              v_q <= 1'b0;
            end
          end
          if (fft_in_valid && fft_in_ready && fft_in_last) begin
            v_q   <= 1'b0;
            state <= LOAD;
          end
        end
        default: state <= LOAD;
      endcase
    end
  end

  // output side: number the bins as they come back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_cnt    <= '0;
      spec_valid <= 1'b0;
      spec_idx   <= '0;
      spec_data  <= '0;
      spec_last  <= 1'b0;
    end else begin
      spec_valid <= fft_out_valid;
      spec_last  <= fft_out_valid && (fft_out_last || out_cnt == AW'(N-1));
      if (fft_out_valid) begin
        spec_idx  <= out_cnt;
        spec_data <= fft_out_data;
        out_cnt   <= (fft_out_last || out_cnt == AW'(N-1)) ? '0 : out_cnt + 1'b1;
      end
    end
  end

endmodule
