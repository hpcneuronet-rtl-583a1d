// stft: short-time Fourier transform front end.
//
// Audio samples arrive one per beat (s_valid/s_ready, 16-bit). They go into a
// ring buffer holding the last N (512) samples; words not written since reset
// read as zero.
// After every HOP (128) new samples the whole window, oldest sample first, is
// streamed into an fft_core (forward, result scaled by 1/N) and the first
// NBANDS (256) bins, k = 0..255 (0 Hz up to just below 8 kHz at 16 kHz
// sampling), leave on m_* in bin order with m_last on bin 255. The upper half
// of the spectrum is the mirror image of the lower half for real input and is
// dropped, as is the Nyquist bin 256. Window length, hop and band count are
// the paper's; the rectangular window, the zero-filled start and dropping
// bin 256 are this design's choices (a rectangular window with hop N/4 lets
// the ISTFT rebuild the signal exactly by overlap-add and a divide by 4).
// Timing: the input is held off for N clocks while a window is copied into
// the FFT; the FFT then needs (N/2)*log2(N) clocks before bins appear.
module stft
  import hpc_pkg::*;
#(
  parameter int N      = FFT_N,
  parameter int HOP    = HOP_LEN,
  parameter int NB     = NBANDS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       s_valid,
  output logic                       s_ready,
  input  logic signed [SAMPLE_W-1:0] s_sample,
  output logic                       m_valid,
  input  logic                       m_ready,
  output cplx_t                      m_data,
  output logic                       m_last
);
  localparam int AW = $clog2(N);

  typedef enum logic {S_FILL, S_SEND} state_e;
  state_e state;

  logic signed [SAMPLE_W-1:0] ring [N];
  logic [AW-1:0]              wr_ptr, rd_cnt;
  logic [$clog2(HOP)-1:0]     hop_cnt;
  logic [AW:0]                written;   // samples since reset, saturates at N

  // FFT interface
  logic  f_s_valid, f_s_ready, f_m_valid, f_m_ready, f_m_last;
  cplx_t f_s_data, f_m_data;
  logic [AW-1:0] bin;

  assign s_ready   = (state == S_FILL);
  assign f_s_valid = (state == S_SEND);
  // Words not yet written since reset read as zero.
  assign f_s_data  = '{re: ((AW+1)'(rd_cnt) >= (AW+1)'(N) - written) ? ring[wr_ptr + rd_cnt] : '0,
                       im: '0};

  always_ff @(posedge clk) begin
    if (state == S_FILL && s_valid) ring[wr_ptr] <= s_sample;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_FILL;
      wr_ptr  <= '0;
      rd_cnt  <= '0;
      hop_cnt <= '0;
      written <= '0;
    end else begin
      unique case (state)
        S_FILL: if (s_valid) begin
          if (32'(written) < N) written <= written + 1'b1;
          wr_ptr       <= wr_ptr + 1'b1;
          hop_cnt      <= hop_cnt + 1'b1;
          if (32'(hop_cnt) == HOP-1) begin
            hop_cnt <= '0;
            state   <= S_SEND;
            rd_cnt  <= '0;
          end
        end
        S_SEND: if (f_s_ready) begin
          rd_cnt <= rd_cnt + 1'b1;
          if (32'(rd_cnt) == N-1) state <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

  fft_core #(.N(N)) u_fft (
    .clk, .rst_n, .inverse(1'b0),
    .s_valid(f_s_valid), .s_ready(f_s_ready), .s_data(f_s_data),
    .m_valid(f_m_valid), .m_ready(f_m_ready), .m_data(f_m_data), .m_last(f_m_last)
  );

  // Keep bins 0..NB-1, drop the rest.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bin <= '0;
    else if (f_m_valid && f_m_ready) bin <= f_m_last ? '0 : bin + 1'b1;
  end
  assign m_valid   = f_m_valid && (32'(bin) < NB);
  assign f_m_ready = (32'(bin) < NB) ? m_ready : 1'b1;
  assign m_data    = f_m_data;
  assign m_last    = m_valid && (32'(bin) == NB-1);
endmodule
